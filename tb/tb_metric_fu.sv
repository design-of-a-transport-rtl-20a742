// tb_metric_fu: self-checking test of the METRIC unit.
//
// Random state metrics and LLRs in all four modes. Forward steps feed alpha(k-1) to ports 0..7
// and compare the outputs with the reference forward recursion. Backward steps feed beta(k+1)
// through the butterfly re-ordering (port 2j <- beta(j), port 2j+1 <- beta(j+4)) and compare
// out[j] with beta(k)(2j) and out[j+4] with beta(k)(2j+1). Every operation also checks that the
// result appears exactly mode-latency cycles after the trigger, and the test checks that the
// operand registers keep their values between triggers and that `stall` freezes the unit.
module tb_metric_fu;
  import tta_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, stall = 0;
  logic [9:0] op_we = '0;
  word_t op_data [10];
  logic trig_we = 0;
  word_t trig_data = '0;
  logic [3:0] trig_opc = '0;
  word_t result [8];
  int checks = 0, failures = 0;

  metric_fu dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // one operation: ports[0..7] = m, returns the outputs after the latency
  task automatic run_op(input int m [8], input int la, input int ls, input int lp, input int mode,
                        input bit use_operands, output int o [8]);
    int prev [8];
    for (int i = 0; i < 8; i++) prev[i] = result[i];
    @(negedge clk);
    if (use_operands) begin
      op_we = '1;
      for (int i = 0; i < 8; i++) op_data[i] = m[i];
      op_data[8] = la; op_data[9] = ls;
    end
    trig_we = 1; trig_data = lp; trig_opc = 4'(mode);
    @(negedge clk);
    op_we = '0; trig_we = 0;
    for (int c = 1; c < lat_ref(mode); c++) begin
      for (int i = 0; i < 8; i++)
        check(result[i] == prev[i], $sformatf("result changed early, mode %0d cycle %0d", mode, c));
      @(negedge clk);
    end
    for (int i = 0; i < 8; i++) o[i] = result[i];
  endtask

  int m [8], o [8], perm_in [8];
  metrics_t a, r;
  int la, ls, lp;
  initial begin
    for (int i = 0; i < 10; i++) op_data[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      automatic int mode = t % 4;
      for (int i = 0; i < 8; i++) begin a[i] = int'($urandom_range(0, 200)) - 100; m[i] = a[i]; end
      la = int'($urandom_range(0, 60)) - 30;
      ls = int'($urandom_range(0, 60)) - 30;
      lp = int'($urandom_range(0, 60)) - 30;
      if (t % 2 == 0) begin
        run_op(m, la, ls, lp, mode, 1'b1, o);
        r = fwd_ref(a, la, ls, lp, mode);
        for (int i = 0; i < 8; i++)
          check(o[i] == r[i], $sformatf("fwd mode %0d state %0d: got %0d exp %0d", mode, i, o[i], r[i]));
      end else begin
        for (int j = 0; j < 4; j++) begin perm_in[2*j] = a[j]; perm_in[2*j+1] = a[j+4]; end
        run_op(perm_in, la, ls, lp, mode, 1'b1, o);
        r = bwd_ref(a, la, ls, lp, mode);
        for (int j = 0; j < 4; j++) begin
          check(o[j]   == r[2*j],   $sformatf("bwd mode %0d state %0d", mode, 2*j));
          check(o[j+4] == r[2*j+1], $sformatf("bwd mode %0d state %0d", mode, 2*j+1));
        end
      end
    end
    // operands kept: trigger again with a new parity only
    for (int i = 0; i < 8; i++) begin a[i] = i * 3 - 7; m[i] = a[i]; end
    run_op(m, 5, -3, 9, 0, 1'b1, o);
    run_op(m, 5, -3, -11, 0, 1'b0, o);
    r = fwd_ref(a, 5, -3, -11, 0);
    for (int i = 0; i < 8; i++) check(o[i] == r[i], "operand registers kept");
    // stall freezes: trigger while stalled does nothing
    @(negedge clk);
    stall = 1; trig_we = 1; trig_data = 100; op_we = '1;
    for (int i = 0; i < 10; i++) op_data[i] = 1000;
    @(negedge clk);
    @(negedge clk);
    stall = 0; trig_we = 0; op_we = '0;
    @(negedge clk);
    for (int i = 0; i < 8; i++) check(o[i] == result[i], "stall blocks trigger");
    run_op(m, 5, -3, -11, 1, 1'b0, o);
    r = fwd_ref(a, 5, -3, -11, 1);
    for (int i = 0; i < 8; i++) check(o[i] == r[i], "operands unchanged under stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
