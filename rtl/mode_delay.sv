// mode_delay: result register with a latency chosen per operation.
//
// A unit computes its result in the trigger cycle and hands it here with the latency of its
// mode (1..MAX_LAT). The value becomes visible on `q` exactly `lat` cycles after the trigger
// cycle, so a move in cycle t+lat reads it. Several results may be in flight; the register
// keeps the last delivered one until the next delivery, as a TTA output port does. While
// `stall` is high nothing moves. Two results due in the same cycle are a scheduling error of
// the program and are flagged by an assertion. This helper is this design's own.
module mode_delay #(
  parameter int unsigned W       = 32,
  parameter int unsigned MAX_LAT = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         stall,
  input  logic         valid,
  input  logic [W-1:0] d,
  input  logic [1:0]   lat,        // 1 .. MAX_LAT
  output logic [W-1:0] q
);
  localparam int unsigned STAGES = (MAX_LAT > 1) ? MAX_LAT - 1 : 1;
  logic [STAGES-1:0] v;
  logic [W-1:0]      s [STAGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      q <= '0;
      for (int k = 0; k < STAGES; k++) s[k] <= '0;
    end else if (!stall) begin
      for (int k = 0; k < STAGES; k++) begin
        v[k] <= (k + 1 < STAGES) ? v[k+1] : 1'b0;
        s[k] <= (k + 1 < STAGES) ? s[k+1] : s[k];
      end
      if (valid && lat > 2'd1) begin
        v[lat-2] <= 1'b1;
        s[lat-2] <= d;
      end
      if (valid && lat == 2'd1) q <= d;
      else if (v[0])           q <= s[0];
    end
  end

  a_one_result_per_cycle: assert property (@(posedge clk) disable iff (!rst_n)
    !(valid && lat == 2'd1 && v[0] && !stall));
endmodule
