// tb_stream_in_fu: self-checking test of the input STREAM unit with a FIFO in front.
//
// Reads a sample every cycle while the FIFO holds data (one sample per cycle, result one cycle
// after the trigger), checks the lock request when reading an empty FIFO, that a locked read
// does not pop, and the STATUS operation.
module tb_stream_in_fu;
  import tta_pkg::*;
  localparam int CNT_W = 5;
  logic clk = 0, rst_n = 0, stall = 0;
  logic trig_we = 0;
  logic [3:0] trig_opc = '0;
  logic fifo_empty, fifo_pop, lock_req, f_full, push = 0;
  word_t fifo_rdata, data, status, wdata = '0;
  logic [CNT_W-1:0] fifo_count;
  int checks = 0, failures = 0;

  sync_fifo #(.W(32), .DEPTH(16)) u_fifo (.clk, .rst_n, .push, .wdata, .pop(fifo_pop),
    .rdata(fifo_rdata), .empty(fifo_empty), .full(f_full), .count(fifo_count));
  stream_in_fu #(.CNT_W(CNT_W)) dut (.*);

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

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 10; i++) begin
      @(negedge clk); push = 1; wdata = 100 + i;
    end
    @(negedge clk); push = 0;
    // STATUS
    trig_we = 1; trig_opc = 4'(STREAM_STATUS);
    @(negedge clk);
    check(status == 10, "status = fill level");
    // one read per cycle
    for (int i = 0; i < 10; i++) begin
      trig_opc = 4'(STREAM_RW);
      check(lock_req == 0, "no lock while data");
      @(negedge clk);
      check(data == 100 + i, $sformatf("sample %0d got %0d", i, data));
    end
    // empty: lock, no pop
    check(fifo_empty && lock_req, "lock on empty");
    stall = lock_req;
    @(negedge clk);
    check(data == 109, "locked read leaves data");
    push = 1; wdata = 555;
    @(negedge clk);
    push = 0;
    stall = lock_req;
    check(!lock_req, "lock released");
    @(negedge clk);
    trig_we = 0;
    check(data == 555, "read after lock");
    check(fifo_empty, "popped once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
