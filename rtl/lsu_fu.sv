// lsu_fu: load/store unit between the transport buses and one data-memory port.
//
// STW (opcode 1): the trigger carries the word address, the operand register the data; the
// memory is written at the end of the trigger cycle (one-cycle store). LDW (opcode 0): the
// trigger carries the address; the memory port reads it in the trigger cycle, its registered
// data passes LOAD_LAT-2 further pipeline registers and is readable on `result` LOAD_LAT
// cycles after the trigger (three, as in the paper). Loads may be issued every cycle.
// `stall` freezes the pipeline and blocks memory accesses. From the paper: three-cycle reads,
// single-cycle writes. Own choices: word addressing, the opcode numbers, the pipeline split.
module lsu_fu
  import tta_pkg::*;
#(
  parameter int unsigned ADDR_W   = 17,
  parameter int unsigned LOAD_LAT = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              stall,
  input  logic              op_we,
  input  word_t             op_data,
  input  logic              trig_we,
  input  word_t             trig_data,
  input  logic [OPC_W-1:0]  trig_opc,
  output word_t             result,
  // memory port
  output logic              mem_en,
  output logic              mem_we,
  output logic [ADDR_W-1:0] mem_addr,
  output word_t             mem_wdata,
  input  word_t             mem_rdata
);
  localparam int unsigned PIPE = LOAD_LAT - 1;   // registers after the memory's own
  word_t data_q;
  logic  [PIPE-1:0] v;
  word_t pipe [PIPE];

  assign mem_en    = trig_we && !stall;
  assign mem_we    = (lsu_op_e'(trig_opc) == LSU_STW);
  assign mem_addr  = trig_data[ADDR_W-1:0];
  assign mem_wdata = op_we ? op_data : data_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_q <= '0;
      v      <= '0;
      for (int k = 0; k < PIPE; k++) pipe[k] <= '0;
    end else if (!stall) begin
      if (op_we) data_q <= op_data;
      v[0] <= trig_we && (lsu_op_e'(trig_opc) == LSU_LDW);
      for (int k = 1; k < PIPE; k++) v[k] <= v[k-1];
      // stage 0 captures the memory's registered output in the cycle after the access
      if (v[0]) pipe[0] <= mem_rdata;
      for (int k = 1; k < PIPE; k++) if (v[k]) pipe[k] <= pipe[k-1];
    end
  end
  assign result = pipe[PIPE-1];

  initial assert (LOAD_LAT >= 2) else $error("LOAD_LAT must be at least 2");
endmodule
