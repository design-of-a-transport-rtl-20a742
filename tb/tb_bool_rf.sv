// tb_bool_rf: self-checking test of the boolean register file: bit 0 of the written value
// is stored, the read port and the guard outputs agree with a model, stall blocks writes.
module tb_bool_rf;
  import tta_pkg::*;
  logic clk = 0, rst_n = 0, stall = 0, we = 0;
  logic widx = 0, ridx = 0;
  word_t wdata = '0, rdata;
  logic [1:0] bits;
  int checks = 0, failures = 0;

  bool_rf #(.NUM_REGS(2)) dut (.*);

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

  logic [1:0] model = '0;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      ridx = $urandom_range(0, 1);
      #1;
      check(bits == model, "guards");
      check(rdata == word_t'(model[ridx]), "read");
      we = $urandom_range(0, 1); widx = $urandom_range(0, 1); wdata = $urandom;
      stall = ($urandom_range(0, 7) == 0);
      if (we && !stall) model[widx] = wdata[0];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
