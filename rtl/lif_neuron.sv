// lif_neuron: integer IF/LIF neuron dynamics of one detector.
//
// Each OP_PAIR adds a signed 4-bit weight to the input-current accumulator.
// An OP_BIAS closes a time step: I = acc + bias, then
//   LIF (LEAK=1): V = V + ((I - V) >>> 1)      (tau_m = 2, R_m = 1)
//   IF  (LEAK=0): V = V + I
// and the neuron fires when V > Vth, resetting V to 0 (V_reset = 0). The
// accumulator is cleared for the next time step. After the last time step of
// a channel (`chan_last`) V is cleared, because the next bias op belongs to
// the next output channel: only one membrane register is needed (paper's
// storage-free scheme). Equations follow the paper; the widths and the
// arithmetic shift used for the division by 2 are this design's choices.
// Timing: inputs are taken when `en` is high; the spike appears registered
// on the next cycle with spike_valid (held while `en` is low).
module lif_neuron
  import ff_pkg::*;
#(
  parameter int unsigned WWID = ff_pkg::WW,
  parameter int unsigned BWID = ff_pkg::BW,
  parameter int unsigned VWID = ff_pkg::VW,
  parameter bit          LEAK = 1'b1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  op_kind_e               op,
  input  logic signed [WWID-1:0] w_data,
  input  logic signed [BWID-1:0] b_data,
  input  logic signed [VWID-1:0] vth,
  input  logic                   chan_last,
  output logic                   spike_valid,
  output logic                   spike,
  output logic signed [VWID-1:0] v_mem
);
  logic signed [VWID-1:0] acc, cur, v_new;

  always_comb begin
    cur = acc + VWID'(b_data);
    if (LEAK) v_new = v_mem + ((cur - v_mem) >>> 1);
    else      v_new = v_mem + cur;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; v_mem <= '0; spike_valid <= 1'b0; spike <= 1'b0;
    end else if (en) begin
      spike_valid <= (op == OP_BIAS);
      if (op == OP_PAIR) acc <= acc + VWID'(w_data);
      if (op == OP_BIAS) begin
        acc   <= '0;
        spike <= (v_new > vth);
        if (chan_last || (v_new > vth)) v_mem <= '0;
        else                            v_mem <= v_new;
      end
    end
  end
endmodule
