// tb_tta_rf: self-checking test of the register file: random writes and reads against an
// array model (read sees the value before the same cycle's write), reset to zero, and
// writes blocked by `stall`.
module tb_tta_rf;
  import tta_pkg::*;
  localparam int N = 32;
  logic clk = 0, rst_n = 0, stall = 0, we = 0;
  logic [4:0] widx = '0, ridx = '0;
  word_t wdata = '0, rdata;
  int checks = 0, failures = 0;

  tta_rf #(.NUM_REGS(N)) dut (.*);

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

  int model [N];
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      model[i] = 0; ridx = 5'(i); #1; check(rdata == 0, "reset value");
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      ridx = 5'($urandom_range(0, N - 1));
      #1 check(rdata == model[ridx], "read");
      we = $urandom_range(0, 1); widx = 5'($urandom_range(0, N - 1)); wdata = $urandom;
      stall = ($urandom_range(0, 7) == 0);
      if (we && !stall) model[widx] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
