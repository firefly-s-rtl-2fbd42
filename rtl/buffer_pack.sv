// buffer_pack: collects the spikes of the N parallel detectors and packs
// them into one N-bit output vector.
//
// Each detector finishes its time steps at its own pace (the number of
// matched pairs differs per channel), so every detector writes into a FIFO
// of its own. A packed vector leaves when all N FIFOs hold a spike, popping
// one entry from each; bit j of the vector is detector j. The packed vector
// is the spike word of the next layer (its input channel group). Follows the
// "Buffer & Pack" FIFOs of the paper's figure; the depth is this design's.
// Latency: a vector can leave the cycle after its last spike is written.
module buffer_pack #(
  parameter int unsigned N     = 16,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  logic [N-1:0] in_spike,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [N-1:0] out_vec
);
  logic [N-1:0] f_valid;

  for (genvar j = 0; j < N; j++) begin : g_fifo
    logic [$clog2(DEPTH+1)-1:0] cnt;
    sync_fifo #(.DW(1), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid(in_valid[j]), .in_ready(in_ready[j]), .in_data(in_spike[j]),
      .out_valid(f_valid[j]), .out_ready(out_valid && out_ready),
      .out_data(out_vec[j]), .count(cnt)
    );
  end

  assign out_valid = &f_valid;
endmodule
