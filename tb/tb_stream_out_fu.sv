// tb_stream_out_fu: self-checking test of the output STREAM unit with a FIFO behind it.
//
// Writes one value per cycle until the FIFO is full, checks the lock request on a full FIFO,
// that a locked write is not pushed, the STATUS operation (free space), and the data order.
module tb_stream_out_fu;
  import tta_pkg::*;
  localparam int CNT_W = 4, DEPTH = 8;
  logic clk = 0, rst_n = 0, stall = 0;
  logic trig_we = 0;
  word_t trig_data = '0;
  logic [3:0] trig_opc = '0;
  logic fifo_full, fifo_push, lock_req, f_empty, pop = 0;
  word_t fifo_wdata, status, rdata;
  logic [CNT_W-1:0] fifo_count;
  int checks = 0, failures = 0;

  sync_fifo #(.W(32), .DEPTH(DEPTH)) u_fifo (.clk, .rst_n, .push(fifo_push), .wdata(fifo_wdata),
    .pop, .rdata, .empty(f_empty), .full(fifo_full), .count(fifo_count));
  stream_out_fu #(.CNT_W(CNT_W), .DEPTH(DEPTH)) dut (.*);

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
    for (int i = 0; i < DEPTH; i++) begin
      trig_we = 1; trig_opc = 4'(STREAM_RW); trig_data = 40 + i;
      check(!lock_req, "no lock while room");
      @(negedge clk);
      check(fifo_count == CNT_W'(i + 1), "one write per cycle");
    end
    trig_data = 99;
    check(lock_req, "lock on full");
    stall = 1;
    @(negedge clk);
    check(fifo_count == CNT_W'(DEPTH), "locked write not pushed");
    stall = 0; trig_we = 0;
    // drain and check order
    for (int i = 0; i < DEPTH; i++) begin
      check(rdata == 40 + i, "order");
      pop = 1;
      @(negedge clk);
    end
    pop = 0;
    trig_we = 1; trig_opc = 4'(STREAM_STATUS);
    @(negedge clk);
    trig_we = 0;
    check(status == DEPTH, "status = free space");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
