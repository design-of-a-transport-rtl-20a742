// tb_max7_fu: self-checking test of the MAX7 unit.
//
// Random sets of seven values in all four modes; the result must equal the reference chain
// max*(x0, max*(x1, ... max*(x5, x6))) and must appear exactly mode-latency cycles after the
// trigger. Also checks that operands persist and that back-to-back triggers of equal latency
// deliver one result per cycle.
module tb_max7_fu;
  import tta_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, stall = 0;
  logic [5:0] op_we = '0;
  word_t op_data [6];
  logic trig_we = 0;
  word_t trig_data = '0;
  logic [3:0] trig_opc = '0;
  word_t result;
  int checks = 0, failures = 0;

  max7_fu dut (.*);

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

  int x [7];
  int exp_v, prev;
  initial begin
    for (int i = 0; i < 6; i++) op_data[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      automatic int mode = t % 4;
      for (int i = 0; i < 7; i++) x[i] = int'($urandom_range(0, 80)) - 40;
      if (t % 5 == 0) x[3] = x[1] + 1;     // near ties exercise the corrections
      exp_v = max7_ref(x, mode);
      prev  = result;
      @(negedge clk);
      op_we = '1;
      for (int i = 0; i < 6; i++) op_data[i] = x[i];
      trig_we = 1; trig_data = x[6]; trig_opc = 4'(mode);
      @(negedge clk);
      op_we = '0; trig_we = 0;
      for (int c = 1; c < lat_ref(mode); c++) begin
        check(result == prev, "result early");
        @(negedge clk);
      end
      check(result == exp_v, $sformatf("mode %0d got %0d exp %0d", mode, result, exp_v));
    end
    // back-to-back max-log triggers, operands kept, only the 7th value changes
    @(negedge clk);
    op_we = '1;
    for (int i = 0; i < 6; i++) op_data[i] = i;
    trig_we = 1; trig_data = 3; trig_opc = 0;
    @(negedge clk);
    check(result == 5, "first of back-to-back");
    op_we = '0; trig_data = 50;
    @(negedge clk);
    trig_we = 0;
    @(negedge clk);
    check(result == 50, "second of back-to-back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
