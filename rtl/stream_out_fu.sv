// stream_out_fu: STREAM unit that writes output LLRs into a FIFO buffer.
//
// A trigger move with opcode 0 (WRITE) pushes the moved value into the FIFO in that cycle;
// one value per cycle. Opcode 1 (STATUS) places the free space of the FIFO on `status` one
// cycle later. A WRITE while the FIFO is full raises `lock_req` and the processor holds the
// instruction until there is room. From the paper: one output STREAM unit writing a buffer.
// Own choices: the status operation and the lock.
module stream_out_fu
  import tta_pkg::*;
#(
  parameter int unsigned CNT_W = 7,
  parameter int unsigned DEPTH = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             stall,
  input  logic             trig_we,
  input  word_t            trig_data,
  input  logic [OPC_W-1:0] trig_opc,
  input  logic             fifo_full,
  input  logic [CNT_W-1:0] fifo_count,
  output logic             fifo_push,
  output word_t            fifo_wdata,
  output logic             lock_req,
  output word_t            status
);
  logic wr;
  assign wr         = trig_we && (stream_op_e'(trig_opc) == STREAM_RW);
  assign lock_req   = wr && fifo_full;
  assign fifo_push  = wr && !fifo_full && !stall;
  assign fifo_wdata = trig_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                   status <= '0;
    else if (!stall && trig_we && !wr)            status <= word_t'(DEPTH) - word_t'(fifo_count);
  end
endmodule
