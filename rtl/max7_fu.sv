// max7_fu: the MAX7 special function unit, max* over seven values for output LLRs.
//
// The program adds, for the branches of one trellis step, forward metric + branch metric +
// backward metric and hands the seven sums to this unit (the eighth is dropped by the
// normalisation that pins one state metric to zero). The unit returns
//     max*(x0, max*(x1, ... max*(x5, x6)))
// with max* selected by the opcode like METRIC: 0 max-log-MAP (plain maximum),
// 1 linear-log-MAP, 2 constant-log-MAP, 3 log-MAP. The correction terms are applied pairwise
// in a chain from x0 to x6.
//
// Interface: six operand registers (ports 0..5) written by moves, the seventh value and the
// opcode arrive on the trigger port. The result appears mode_latency(mode) cycles after the
// trigger (1, 3, 2, 3). From the paper: seven inputs, four modes, mode-dependent latency.
// Own choices: the order of the max* chain, the latencies and the word width.
module max7_fu
  import tta_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             stall,
  input  logic [5:0]       op_we,
  input  word_t            op_data [6],
  input  logic             trig_we,
  input  word_t            trig_data,
  input  logic [OPC_W-1:0] trig_opc,
  output word_t            result
);
  word_t opr [6];
  word_t acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 6; i++) opr[i] <= '0;
    end else if (!stall) begin
      for (int i = 0; i < 6; i++) if (op_we[i]) opr[i] <= op_data[i];
    end
  end

  always_comb begin
    acc = trig_data;
    for (int i = 5; i >= 0; i--) acc = max_star(op_we[i] ? op_data[i] : opr[i], acc, trig_opc);
  end

  mode_delay #(.W(DATA_W), .MAX_LAT(MAX_MODE_LAT)) u_delay (
    .clk, .rst_n, .stall,
    .valid (trig_we),
    .d     (acc),
    .lat   (2'(mode_latency(trig_opc))),
    .q     (result)
  );
endmodule
