// tta_turbo_top: transport-triggered processor for programmable turbo decoding.
//
// The processor executes one wide instruction per cycle: NUM_BUSES move slots, each moving a
// value from a source port (or an immediate) to a destination port. Operations start as a side
// effect of a move to a unit's trigger port. The units are those of the turbo-decoder
// processor:
//   * NUM_LSU load/store units on a shared multi-port data memory (3-cycle load, 1-cycle store),
//   * NUM_ALU arithmetic-logic units (add, sub, shifts, compares, multiply),
//   * NUM_SIN input STREAM units, each reading LLRs from its own input FIFO, and NUM_SOUT
//     output STREAM units writing decoded LLRs into output FIFOs,
//   * METRIC, one trellis step of the 8-state turbo code (forward or backward recursion),
//   * MAX7, max* over seven values for output LLRs,
//   * NUM_RF general register files, one boolean register file for guards,
//   * the GCU with the program counter, fed by the instruction memory.
// METRIC and MAX7 select max-log-MAP, linear-log-MAP, constant-log-MAP or log-MAP by opcode.
//
// Global lock: a STREAM read from an empty input FIFO, or a STREAM write to a full output
// FIFO, stalls the whole processor (every unit, the pc and all register writes) until the
// FIFO is ready; the same instruction then executes. `lock` shows it.
//
// Interface: load the program through imem_* while rst_n is low, then release reset; the
// program starts at address 0. Input LLRs are pushed into sin_* FIFOs, results popped from
// sout_* FIFOs (show-ahead data). Move-slot format and port numbers are in tta_pkg.
//
// The set and number of units follow the paper (three LSUs, eight input and one output STREAM
// units, 30 buses). The number of ALUs and register files, the memory sizes, the instruction
// format and full bus connectivity are this design's choices.
module tta_turbo_top
  import tta_pkg::*;
#(
  parameter int unsigned NUM_BUSES  = 30,
  parameter int unsigned NUM_LSU    = 3,
  parameter int unsigned NUM_ALU    = 1,
  parameter int unsigned NUM_SIN    = 8,
  parameter int unsigned NUM_SOUT   = 1,
  parameter int unsigned NUM_RF     = 4,
  parameter int unsigned RF_REGS    = 32,
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned DMEM_DEPTH = 131072,
  parameter int unsigned FIFO_DEPTH = 64,
  localparam int unsigned PC_W      = $clog2(IMEM_DEPTH),
  localparam int unsigned CNT_W     = $clog2(FIFO_DEPTH) + 1,
  localparam int unsigned INSTR_W   = NUM_BUSES * MOVE_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // program load
  input  logic                 imem_we,
  input  logic [PC_W-1:0]      imem_addr,
  input  logic [INSTR_W-1:0]   imem_wdata,
  // input LLR buffers
  input  logic [NUM_SIN-1:0]   sin_push,
  input  word_t                sin_data  [NUM_SIN],
  output logic [NUM_SIN-1:0]   sin_full,
  // output LLR buffers
  input  logic [NUM_SOUT-1:0]  sout_pop,
  output word_t                sout_data [NUM_SOUT],
  output logic [NUM_SOUT-1:0]  sout_empty,
  // status
  output logic [PC_W-1:0]      pc,
  output logic                 lock
);
  localparam int unsigned DMEM_AW = $clog2(DMEM_DEPTH);
  localparam int unsigned RF_IW   = $clog2(RF_REGS);

  // dense numbering of sources
  localparam int unsigned S_LSU   = 0;
  localparam int unsigned S_ALU   = S_LSU + NUM_LSU;
  localparam int unsigned S_SIND  = S_ALU + NUM_ALU;
  localparam int unsigned S_SINS  = S_SIND + NUM_SIN;
  localparam int unsigned S_SOUTS = S_SINS + NUM_SIN;
  localparam int unsigned S_MET   = S_SOUTS + NUM_SOUT;
  localparam int unsigned S_MAX7  = S_MET + NUM_STATES;
  localparam int unsigned S_BOOL  = S_MAX7 + 1;
  localparam int unsigned S_RA    = S_BOOL + 1;
  localparam int unsigned S_RF    = S_RA + 1;
  localparam int unsigned NUM_SRC = S_RF + NUM_RF;
  // dense numbering of destinations
  localparam int unsigned D_LSU   = 0;                  // 2 per unit: operand, trigger
  localparam int unsigned D_ALU   = D_LSU + 2 * NUM_LSU;
  localparam int unsigned D_SIN   = D_ALU + 2 * NUM_ALU;
  localparam int unsigned D_SOUT  = D_SIN + NUM_SIN;
  localparam int unsigned D_MET   = D_SOUT + NUM_SOUT;  // 11
  localparam int unsigned D_MAX7  = D_MET + 11;         // 7
  localparam int unsigned D_BOOL  = D_MAX7 + 7;
  localparam int unsigned D_RA    = D_BOOL + 1;
  localparam int unsigned D_GCU   = D_RA + 1;
  localparam int unsigned D_RF    = D_GCU + 1;
  localparam int unsigned NUM_DST = D_RF + NUM_RF;

  logic [INSTR_W-1:0]      instr;
  move_t                   moves    [NUM_BUSES];
  logic [NUM_GUARDS-1:0]   guards;
  logic [PORT_ID_W-1:0]    src_base [NUM_SRC];
  logic [IDX_W:0]          src_span [NUM_SRC];
  word_t                   src_data [NUM_SRC];
  logic [IDX_W-1:0]        src_idx  [NUM_SRC];
  logic [PORT_ID_W-1:0]    dst_base [NUM_DST];
  logic [IDX_W:0]          dst_span [NUM_DST];
  logic [NUM_DST-1:0]      dst_we;
  word_t                   dst_data [NUM_DST];
  logic [OPC_W-1:0]        dst_opc  [NUM_DST];
  logic [IDX_W-1:0]        dst_idx  [NUM_DST];
  word_t                   bus_data [NUM_BUSES];
  logic                    glock;

  // ------------------------------------------------------------ fetch and control
  tta_imem #(.NUM_BUSES(NUM_BUSES), .DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .we(imem_we), .waddr(imem_addr), .wdata(imem_wdata), .pc, .instr
  );

  always_comb begin
    for (int b = 0; b < NUM_BUSES; b++) moves[b] = move_t'(instr[b*MOVE_W +: MOVE_W]);
  end

  gcu #(.PC_W(PC_W)) u_gcu (
    .clk, .rst_n, .stall(glock),
    .op_we(dst_we[D_RA]), .op_data(dst_data[D_RA]),
    .trig_we(dst_we[D_GCU]), .trig_data(dst_data[D_GCU]), .trig_opc(dst_opc[D_GCU]),
    .pc, .ra(src_data[S_RA])
  );
  assign src_base[S_RA] = PORT_ID_W'(SRC_GCU_RA);
  assign src_span[S_RA] = 1;
  assign dst_base[D_RA] = PORT_ID_W'(DST_GCU_RA);
  assign dst_span[D_RA] = 1;
  assign dst_base[D_GCU] = PORT_ID_W'(DST_GCU);
  assign dst_span[D_GCU] = 1;

  tta_interconnect #(.NUM_BUSES(NUM_BUSES), .NUM_SRC(NUM_SRC), .NUM_DST(NUM_DST)) u_ic (
    .clk, .rst_n, .moves, .guards,
    .src_base, .src_span, .src_data, .src_idx,
    .dst_base, .dst_span, .dst_we, .dst_data, .dst_opc, .dst_idx, .bus_data
  );

  // ------------------------------------------------------------ load/store units and memory
  logic [NUM_LSU-1:0] mem_en, mem_we;
  logic [DMEM_AW-1:0] mem_addr  [NUM_LSU];
  word_t              mem_wdata [NUM_LSU];
  word_t              mem_rdata [NUM_LSU];

  for (genvar i = 0; i < NUM_LSU; i++) begin : g_lsu
    lsu_fu #(.ADDR_W(DMEM_AW), .LOAD_LAT(3)) u_lsu (
      .clk, .rst_n, .stall(glock),
      .op_we(dst_we[D_LSU+2*i]), .op_data(dst_data[D_LSU+2*i]),
      .trig_we(dst_we[D_LSU+2*i+1]), .trig_data(dst_data[D_LSU+2*i+1]),
      .trig_opc(dst_opc[D_LSU+2*i+1]),
      .result(src_data[S_LSU+i]),
      .mem_en(mem_en[i]), .mem_we(mem_we[i]), .mem_addr(mem_addr[i]),
      .mem_wdata(mem_wdata[i]), .mem_rdata(mem_rdata[i])
    );
    assign src_base[S_LSU+i]     = PORT_ID_W'(SRC_LSU + i);
    assign src_span[S_LSU+i]     = 1;
    assign dst_base[D_LSU+2*i]   = PORT_ID_W'(DST_LSU + 2*i);
    assign dst_span[D_LSU+2*i]   = 1;
    assign dst_base[D_LSU+2*i+1] = PORT_ID_W'(DST_LSU + 2*i + 1);
    assign dst_span[D_LSU+2*i+1] = 1;
  end

  data_mem #(.DEPTH(DMEM_DEPTH), .NUM_PORTS(NUM_LSU)) u_dmem (
    .clk, .en(mem_en), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata), .rdata(mem_rdata)
  );

  // ------------------------------------------------------------ ALUs
  for (genvar i = 0; i < NUM_ALU; i++) begin : g_alu
    alu_fu u_alu (
      .clk, .rst_n, .stall(glock),
      .op_we(dst_we[D_ALU+2*i]), .op_data(dst_data[D_ALU+2*i]),
      .trig_we(dst_we[D_ALU+2*i+1]), .trig_data(dst_data[D_ALU+2*i+1]),
      .trig_opc(dst_opc[D_ALU+2*i+1]),
      .result(src_data[S_ALU+i])
    );
    assign src_base[S_ALU+i]     = PORT_ID_W'(SRC_ALU + i);
    assign src_span[S_ALU+i]     = 1;
    assign dst_base[D_ALU+2*i]   = PORT_ID_W'(DST_ALU + 2*i);
    assign dst_span[D_ALU+2*i]   = 1;
    assign dst_base[D_ALU+2*i+1] = PORT_ID_W'(DST_ALU + 2*i + 1);
    assign dst_span[D_ALU+2*i+1] = 1;
  end

  // ------------------------------------------------------------ STREAM units and buffers
  logic [NUM_SIN-1:0]  sin_lock;
  logic [NUM_SOUT-1:0] sout_lock;

  for (genvar i = 0; i < NUM_SIN; i++) begin : g_sin
    logic             f_empty, f_pop, f_full;
    word_t            f_rdata;
    logic [CNT_W-1:0] f_count;
    sync_fifo #(.W(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .push(sin_push[i] && !f_full), .wdata(sin_data[i]), .pop(f_pop),
      .rdata(f_rdata), .empty(f_empty), .full(f_full), .count(f_count)
    );
    assign sin_full[i] = f_full;
    stream_in_fu #(.CNT_W(CNT_W)) u_stream (
      .clk, .rst_n, .stall(glock),
      .trig_we(dst_we[D_SIN+i]), .trig_opc(dst_opc[D_SIN+i]),
      .fifo_empty(f_empty), .fifo_rdata(f_rdata), .fifo_count(f_count), .fifo_pop(f_pop),
      .lock_req(sin_lock[i]), .data(src_data[S_SIND+i]), .status(src_data[S_SINS+i])
    );
    assign src_base[S_SIND+i] = PORT_ID_W'(SRC_SIN_DATA + i);
    assign src_span[S_SIND+i] = 1;
    assign src_base[S_SINS+i] = PORT_ID_W'(SRC_SIN_STAT + i);
    assign src_span[S_SINS+i] = 1;
    assign dst_base[D_SIN+i]  = PORT_ID_W'(DST_SIN + i);
    assign dst_span[D_SIN+i]  = 1;
  end

  for (genvar i = 0; i < NUM_SOUT; i++) begin : g_sout
    logic             f_full, f_push;
    word_t            f_wdata;
    logic [CNT_W-1:0] f_count;
    sync_fifo #(.W(DATA_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .push(f_push), .wdata(f_wdata), .pop(sout_pop[i] && !sout_empty[i]),
      .rdata(sout_data[i]), .empty(sout_empty[i]), .full(f_full), .count(f_count)
    );
    stream_out_fu #(.CNT_W(CNT_W), .DEPTH(FIFO_DEPTH)) u_stream (
      .clk, .rst_n, .stall(glock),
      .trig_we(dst_we[D_SOUT+i]), .trig_data(dst_data[D_SOUT+i]), .trig_opc(dst_opc[D_SOUT+i]),
      .fifo_full(f_full), .fifo_count(f_count), .fifo_push(f_push), .fifo_wdata(f_wdata),
      .lock_req(sout_lock[i]), .status(src_data[S_SOUTS+i])
    );
    assign src_base[S_SOUTS+i] = PORT_ID_W'(SRC_SOUT_STAT + i);
    assign src_span[S_SOUTS+i] = 1;
    assign dst_base[D_SOUT+i]  = PORT_ID_W'(DST_SOUT + i);
    assign dst_span[D_SOUT+i]  = 1;
  end

  assign glock = (|sin_lock) || (|sout_lock);
  assign lock  = glock;

  // ------------------------------------------------------------ METRIC and MAX7
  logic [9:0] met_we;
  word_t      met_op  [10];
  word_t      met_res [NUM_STATES];
  for (genvar k = 0; k < 10; k++) begin : g_met_in
    assign met_we[k] = dst_we[D_MET+k];
    assign met_op[k] = dst_data[D_MET+k];
  end
  for (genvar k = 0; k < 11; k++) begin : g_met_dst
    assign dst_base[D_MET+k] = PORT_ID_W'(DST_METRIC + k);
    assign dst_span[D_MET+k] = 1;
  end
  metric_fu u_metric (
    .clk, .rst_n, .stall(glock), .op_we(met_we), .op_data(met_op),
    .trig_we(dst_we[D_MET+10]), .trig_data(dst_data[D_MET+10]), .trig_opc(dst_opc[D_MET+10]),
    .result(met_res)
  );
  for (genvar k = 0; k < NUM_STATES; k++) begin : g_met_out
    assign src_data[S_MET+k] = met_res[k];
    assign src_base[S_MET+k] = PORT_ID_W'(SRC_METRIC + k);
    assign src_span[S_MET+k] = 1;
  end

  logic [5:0] m7_we;
  word_t      m7_op [6];
  for (genvar k = 0; k < 6; k++) begin : g_m7_in
    assign m7_we[k] = dst_we[D_MAX7+k];
    assign m7_op[k] = dst_data[D_MAX7+k];
  end
  for (genvar k = 0; k < 7; k++) begin : g_m7_dst
    assign dst_base[D_MAX7+k] = PORT_ID_W'(DST_MAX7 + k);
    assign dst_span[D_MAX7+k] = 1;
  end
  max7_fu u_max7 (
    .clk, .rst_n, .stall(glock), .op_we(m7_we), .op_data(m7_op),
    .trig_we(dst_we[D_MAX7+6]), .trig_data(dst_data[D_MAX7+6]), .trig_opc(dst_opc[D_MAX7+6]),
    .result(src_data[S_MAX7])
  );
  assign src_base[S_MAX7] = PORT_ID_W'(SRC_MAX7);
  assign src_span[S_MAX7] = 1;

  // ------------------------------------------------------------ register files
  bool_rf #(.NUM_REGS(NUM_GUARDS)) u_bool (
    .clk, .rst_n, .stall(glock),
    .we(dst_we[D_BOOL]), .widx(dst_idx[D_BOOL][0]), .wdata(dst_data[D_BOOL]),
    .ridx(src_idx[S_BOOL][0]), .rdata(src_data[S_BOOL]), .bits(guards)
  );
  assign src_base[S_BOOL] = PORT_ID_W'(SRC_BOOL);
  assign src_span[S_BOOL] = (IDX_W+1)'(NUM_GUARDS);
  assign dst_base[D_BOOL] = PORT_ID_W'(DST_BOOL);
  assign dst_span[D_BOOL] = (IDX_W+1)'(NUM_GUARDS);

  for (genvar f = 0; f < NUM_RF; f++) begin : g_rf
    tta_rf #(.NUM_REGS(RF_REGS)) u_rf (
      .clk, .rst_n, .stall(glock),
      .we(dst_we[D_RF+f]), .widx(dst_idx[D_RF+f][RF_IW-1:0]), .wdata(dst_data[D_RF+f]),
      .ridx(src_idx[S_RF+f][RF_IW-1:0]), .rdata(src_data[S_RF+f])
    );
    assign src_base[S_RF+f] = PORT_ID_W'(SRC_RF + RF_SPAN*f);
    assign src_span[S_RF+f] = (IDX_W+1)'(RF_REGS);
    assign dst_base[D_RF+f] = PORT_ID_W'(DST_RF + RF_SPAN*f);
    assign dst_span[D_RF+f] = (IDX_W+1)'(RF_REGS);
  end
endmodule
