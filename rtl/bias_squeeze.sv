// bias_squeeze: merges the per-time-step bias into the weight-retrieval
// stream so that an empty vector pair never costs an extra cycle.
//
// The weight-retrieval logic offers one operation per cycle: either a
// matched non-zero pair (a weight address) or a "bubble" (a vector pair whose
// AND was all zero). `w_last` marks the last vector of a time step, after
// which the bias must be added once. Behaviour, following the paper's
// biasCycleReg description:
//   bubble & last    -> the bias is issued in this same cycle (isBias=1)
//   bubble & !last   -> an idle cycle (nothing issued), the bubble is consumed
//   pair   & last    -> the pair is issued and biasCycleReg is set, so the
//                       next cycle issues the bias while w_ready is held low
//   pair   & !last   -> the pair is issued
// The bias is always valid, so it has no valid input. The handshake is
// valid/ready; `o_ready` stalls everything. The gate-level wiring is this
// design's own; only the rule and signal names come from the paper.
module bias_squeeze #(
  parameter int unsigned AW = 12
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          w_valid,
  input  logic          w_bubble,
  input  logic          w_last,
  input  logic          w_chan_last,
  input  logic [AW-1:0] w_addr,
  output logic          w_ready,
  output logic          o_valid,
  output logic          o_is_bias,
  output logic          o_chan_last,
  output logic [AW-1:0] o_addr,
  input  logic          o_ready
);
  logic bias_cycle_q, chan_last_q;

  always_comb begin
    o_addr      = w_addr;
    o_chan_last = w_chan_last;
    if (bias_cycle_q) begin
      o_valid     = 1'b1;
      o_is_bias   = 1'b1;
      o_chan_last = chan_last_q;
      w_ready     = 1'b0;
    end else if (w_valid && w_bubble) begin
      o_valid   = w_last;          // bias absorbs the bubble; else idle cycle
      o_is_bias = 1'b1;
      w_ready   = o_ready;
    end else begin
      o_valid   = w_valid;
      o_is_bias = 1'b0;
      w_ready   = o_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bias_cycle_q <= 1'b0;
      chan_last_q  <= 1'b0;
    end else if (o_ready) begin
      if (bias_cycle_q) bias_cycle_q <= 1'b0;
      else if (w_valid && !w_bubble && w_last) begin
        bias_cycle_q <= 1'b1;      // bias goes in the following cycle
        chan_last_q  <= w_chan_last;
      end
    end
  end
endmodule
