// stream_in_fu: STREAM unit that reads input LLRs from a FIFO buffer.
//
// A trigger move with opcode 0 (READ) pops one sample from the FIFO and places it on `data`
// one cycle later; a new sample can be read every cycle. Opcode 1 (STATUS) places the FIFO's
// fill level on `status` one cycle later. A READ while the FIFO is empty raises `lock_req`,
// combinationally: the processor then holds the whole instruction (global lock, `stall`) until
// a sample arrives. The trigger value itself is ignored. From the paper: FIFO input, one
// sample per cycle, eight such units. Own choices: the status operation and the lock.
module stream_in_fu
  import tta_pkg::*;
#(
  parameter int unsigned CNT_W = 7
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             stall,
  input  logic             trig_we,
  input  logic [OPC_W-1:0] trig_opc,
  input  logic             fifo_empty,
  input  word_t            fifo_rdata,
  input  logic [CNT_W-1:0] fifo_count,
  output logic             fifo_pop,
  output logic             lock_req,
  output word_t            data,
  output word_t            status
);
  logic rd;
  assign rd       = trig_we && (stream_op_e'(trig_opc) == STREAM_RW);
  assign lock_req = rd && fifo_empty;
  assign fifo_pop = rd && !fifo_empty && !stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data   <= '0;
      status <= '0;
    end else if (!stall && trig_we) begin
      if (rd) data <= fifo_rdata;
      else    status <= word_t'(fifo_count);
    end
  end
endmodule
