// tb_sync_fifo: self-checking test of the FIFO buffer against a queue model: random pushes
// and pops (never beyond full or empty), order, show-ahead data, count, full and empty flags.
module tb_sync_fifo;
  localparam int W = 32, DEPTH = 16;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [W-1:0] wdata = '0, rdata;
  logic empty, full;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic [W-1:0] q [$];
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      check(count == q.size(), "count");
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == DEPTH), "full");
      if (q.size() > 0) check(rdata == q[0], "head data");
      // bias fills and drains in phases so both limits are reached
      push = (q.size() < DEPTH) && ($urandom_range(0, 9) < (((t / 200) % 2) ? 3 : 7));
      pop  = (q.size() > 0) && ($urandom_range(0, 9) < (((t / 200) % 2) ? 7 : 3));
      wdata = $urandom;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
