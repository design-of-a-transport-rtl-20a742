// metric_fu: the METRIC special function unit, one trellis step of the 8-state turbo code.
//
// Operation: from eight state metrics m[0..7], the a priori LLR La, the systematic LLR Ls and
// the parity LLR Lp, compute the eight next-state metrics with four butterflies. Butterfly j
// takes m[2j], m[2j+1] and one branch metric g_j, both of the form +-(La+Ls) +- Lp:
//     out[j]   = max*(m[2j] + g_j, m[2j+1] - g_j)
//     out[j+4] = max*(m[2j] - g_j, m[2j+1] + g_j)
// With m = alpha(k-1) this is the forward recursion. The backward recursion uses the same unit
// with its inputs and outputs re-ordered by the program: beta(k+1) of the two successor states
// of a butterfly go where the predecessors' alphas go, and the two outputs are beta(k) of the
// predecessors (for the butterfly drawn in the paper: alpha(3),alpha(4) -> alpha(2),alpha(6)
// forward, beta(2),beta(6) -> beta(3),beta(4) backward, states counted from 1).
// The branch-metric network follows the drawing of one butterfly pair: one adder forms
// La+Ls-Lp (or La+Ls+Lp), one negation gives its opposite, four adders and two max* units.
//
// Interface (transport-triggered): ten operand ports (0..7 metrics, 8 La, 9 Ls) are registers
// written by moves; a move to the trigger port carries Lp and the opcode, which is the mode:
// 0 max-log-MAP, 1 linear-log-MAP, 2 constant-log-MAP, 3 log-MAP. An operand written in the
// trigger cycle is used at once. The eight results appear mode_latency(mode) cycles after the
// trigger (1, 3, 2, 3) and stay until the next result. `stall` freezes the unit.
//
// From the paper: the eight metric, three LLR inputs plus mode, eight outputs, four modes,
// the butterfly network and reuse for both directions. Own choices: word width, which input is
// the trigger, the per-mode latencies and the max* correction constants (in tta_pkg).
module metric_fu
  import tta_pkg::*;
#(
  parameter int unsigned NUM_OPS = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            stall,
  input  logic [NUM_OPS-1:0] op_we,
  input  word_t           op_data [NUM_OPS],
  input  logic            trig_we,
  input  word_t           trig_data,
  input  logic [OPC_W-1:0] trig_opc,
  output word_t           result  [NUM_STATES]
);
  word_t opr   [NUM_OPS];    // operand registers
  word_t cur   [NUM_OPS];    // operands seen by an operation triggered now
  word_t nxt   [NUM_STATES];
  logic [NUM_STATES*DATA_W-1:0] nxt_flat, res_flat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_OPS; i++) opr[i] <= '0;
    end else if (!stall) begin
      for (int i = 0; i < NUM_OPS; i++) if (op_we[i]) opr[i] <= op_data[i];
    end
  end

  always_comb begin
    for (int i = 0; i < NUM_OPS; i++) cur[i] = op_we[i] ? op_data[i] : opr[i];
  end

  // Branch metrics: gamma(u,p) = u*(La+Ls) + p*Lp with u,p = +-1.
  word_t g_pm, g_pp;
  assign g_pm = cur[8] + cur[9] - trig_data;   // gamma(+1,-1)
  assign g_pp = cur[8] + cur[9] + trig_data;   // gamma(+1,+1)

  always_comb begin
    for (int j = 0; j < NUM_STATES / 2; j++) begin
      logic [2:0] sp;
      logic       u, p;
      word_t      g;
      sp = 3'(2 * j);
      // branch from state 2j into state j: the input bit u that leads there, and its parity
      u  = (trellis_next(sp, 1'b1) == 3'(j));
      p  = trellis_parity(sp, u);
      g  = (u == p) ? g_pp : g_pm;
      if (!u) g = -g;
      nxt[j]     = max_star(cur[2*j] + g, cur[2*j+1] - g, trig_opc);
      nxt[j + 4] = max_star(cur[2*j] - g, cur[2*j+1] + g, trig_opc);
    end
  end

  always_comb begin
    for (int i = 0; i < NUM_STATES; i++) begin
      nxt_flat[i*DATA_W +: DATA_W] = nxt[i];
      result[i] = res_flat[i*DATA_W +: DATA_W];
    end
  end

  mode_delay #(.W(NUM_STATES * DATA_W), .MAX_LAT(MAX_MODE_LAT)) u_delay (
    .clk, .rst_n, .stall,
    .valid (trig_we),
    .d     (nxt_flat),
    .lat   (2'(mode_latency(trig_opc))),
    .q     (res_flat)
  );
endmodule
