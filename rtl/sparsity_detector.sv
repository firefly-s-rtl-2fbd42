// sparsity_detector: one dual-side sparsity detector with its parameter
// RAMs and neuron; the layer instantiates PCO of them.
//
// Each input beat is a PCI-bit spike vector plus loop flags from the
// dataflow orchestrator. The detector reads the matching PCI-bit bitmap mask
// of its current output channel, ANDs it with the spikes (x = s & m) and then
// retires one matched non-zero pair per cycle:
//   y      = x & ~(x-1)            one-hot of the lowest pair
//   x     <= x & ~y                clear it
//   prefix = (y | (y-1)) & m       mask bits up to and including y
//   offset = popcount(prefix)      position among this vector's non-zeros
//   addr   = chan_base + vec_base + offset - 1
// vec_base accumulates popcount(m) over the earlier vectors of the time step
// (reset at every time step) and chan_base over earlier channels of the pixel,
// so the non-zero weights are stored packed, channel after channel, in the
// order (channel, Kh, Kw, Ci-group, lane). A vector whose AND is zero yields
// one "bubble" cycle; bias_squeeze turns a bubble on the last vector into the
// bias cycle. The mask RAM address is (channel x KKC + vector index), the bias
// and threshold address is the channel counter.
// Pipeline (all stages stall together when the output is not taken):
//   fetch (mask RAM read) -> decode (AND / one-hot / popcount / address,
//   bias_squeeze) -> RAM read of weight or bias+threshold -> lif_neuron
//   -> registered spike. The paper spreads the same work over CLK0..CLK6;
//   this design merges some of those stages. Throughput: one matched pair per
//   cycle, one cycle per all-zero vector, one extra cycle per time step for
//   the bias unless a last-vector bubble absorbs it.
// Parameter RAMs are written through cfg_* (selector ff_pkg::cfg_sel_e); the
// paper does not say how they are loaded. The weight RAM is sized for the
// dense case; the paper sizes it for the actual non-zero count.
module sparsity_detector
  import ff_pkg::*;
#(
  parameter int unsigned PCI    = 16,
  parameter int unsigned COG    = 1,
  parameter int unsigned KKC    = 9,
  parameter bit          LEAK   = 1'b1,
  parameter int unsigned WDEPTH = COG * KKC * PCI
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // spike vectors from the orchestrator
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [PCI-1:0]        in_spk,
  input  logic                  in_last,
  input  logic                  in_chan_last,
  input  logic                  in_pix_last,
  // parameter RAM write port
  input  logic                  cfg_we,
  input  cfg_sel_e              cfg_sel,
  input  logic [15:0]           cfg_addr,
  input  logic [31:0]           cfg_data,
  // one spike per (output channel, time step)
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic                  out_spike
);
  localparam int unsigned MDEPTH = COG * KKC;
  localparam int unsigned MAW = clog2_min1(MDEPTH);
  localparam int unsigned WAW = clog2_min1(WDEPTH);
  localparam int unsigned GAW = clog2_min1(COG);
  localparam int unsigned CW  = $clog2(PCI+1);

  // ---------------- parameter RAMs ----------------
  logic [PCI-1:0]         mask_ram [MDEPTH];
  logic signed [WW-1:0]   wgt_ram  [WDEPTH];
  logic signed [BW-1:0]   bias_ram [COG];
  logic signed [VW-1:0]   vth_ram  [COG];

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      unique case (cfg_sel)
        CFG_MASK:   mask_ram[MAW'(cfg_addr)] <= cfg_data[PCI-1:0];
        CFG_WEIGHT: wgt_ram[WAW'(cfg_addr)]  <= cfg_data[WW-1:0];
        CFG_BIAS:   bias_ram[GAW'(cfg_addr)] <= cfg_data[BW-1:0];
        CFG_VTH:    vth_ram[GAW'(cfg_addr)]  <= cfg_data[VW-1:0];
      endcase
    end
  end

  function automatic logic [CW-1:0] popcount(input logic [PCI-1:0] v);
    logic [CW-1:0] s;
    s = '0;
    for (int i = 0; i < PCI; i++) s = s + CW'(v[i]);
    return s;
  endfunction

  logic adv;                 // global pipeline advance

  // ---------------- fetch stage: mask read ----------------
  logic           f_valid, f_last, f_chan_last, f_pix_last;
  logic [PCI-1:0] f_spk, mask_q;
  logic [MAW-1:0] m_addr, m_base;
  logic           f_take;    // fetch -> decode this cycle
  logic           in_take;

  assign in_ready = adv && (!f_valid || f_take);
  assign in_take  = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_valid <= 1'b0; f_last <= 1'b0; f_chan_last <= 1'b0; f_pix_last <= 1'b0;
      f_spk <= '0; m_addr <= '0; m_base <= '0;
    end else if (adv) begin
      if (in_take) begin
        f_valid <= 1'b1; f_spk <= in_spk;
        f_last <= in_last; f_chan_last <= in_chan_last; f_pix_last <= in_pix_last;
        if (!in_last)            m_addr <= m_addr + 1'b1;
        else if (!in_chan_last)  m_addr <= m_base;            // next time step
        else if (!in_pix_last) begin                          // next channel
          m_base <= m_base + MAW'(KKC);
          m_addr <= m_base + MAW'(KKC);
        end else begin                                        // next pixel
          m_base <= '0; m_addr <= '0;
        end
      end else if (f_take) f_valid <= 1'b0;
    end
  end

  always_ff @(posedge clk) if (in_take) mask_q <= mask_ram[m_addr];

  // ---------------- decode stage: weight retrieval ----------------
  logic           d_valid, d_last, d_chan_last, d_pix_last;
  logic [PCI-1:0] d_x, d_mask, y, prefix;
  logic [WAW-1:0] vec_base, chan_base, w_addr;
  logic           d_bubble, d_done, w_ready, w_last;
  logic           o_valid, o_is_bias, o_chan_last;
  logic [WAW-1:0] o_addr;

  assign d_bubble = (d_x == '0);
  assign y        = d_x & (~d_x + 1'b1);
  assign prefix   = (y | (y - 1'b1)) & d_mask;
  assign w_addr   = chan_base + vec_base + WAW'(popcount(prefix)) - 1'b1;
  // 'last' for the bias logic means the final operation of the time step
  assign w_last   = d_last && (d_bubble || ((d_x & ~y) == '0));
  assign d_done   = d_valid && w_ready && (d_bubble || ((d_x & ~y) == '0));
  assign f_take   = f_valid && (!d_valid || d_done);

  bias_squeeze #(.AW(WAW)) u_squeeze (
    .clk, .rst_n,
    .w_valid(d_valid), .w_bubble(d_bubble), .w_last(w_last),
    .w_chan_last(d_chan_last), .w_addr(w_addr), .w_ready(w_ready),
    .o_valid(o_valid), .o_is_bias(o_is_bias), .o_chan_last(o_chan_last),
    .o_addr(o_addr), .o_ready(adv)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0; d_x <= '0; d_mask <= '0;
      d_last <= 1'b0; d_chan_last <= 1'b0; d_pix_last <= 1'b0;
      vec_base <= '0; chan_base <= '0;
    end else if (adv) begin
      if (d_valid && w_ready && !d_done) d_x <= d_x & ~y;
      if (d_done) begin
        if (!d_last) vec_base <= vec_base + WAW'(popcount(d_mask));
        else begin
          vec_base <= '0;
          if (d_chan_last) begin
            if (d_pix_last) chan_base <= '0;
            else chan_base <= chan_base + vec_base + WAW'(popcount(d_mask));
          end
        end
      end
      if (f_take) begin
        d_valid <= 1'b1; d_x <= f_spk & mask_q; d_mask <= mask_q;
        d_last <= f_last; d_chan_last <= f_chan_last; d_pix_last <= f_pix_last;
      end else if (d_done) d_valid <= 1'b0;
    end
  end

  // ---------------- RAM read stage ----------------
  op_kind_e              r_op;
  logic                  r_chan_last;
  logic [GAW-1:0]        g_cnt;
  logic signed [WW-1:0]  r_w;
  logic signed [BW-1:0]  r_b;
  logic signed [VW-1:0]  r_vth;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_op <= OP_NONE; r_chan_last <= 1'b0; g_cnt <= '0;
    end else if (adv) begin
      r_op <= !o_valid ? OP_NONE : (o_is_bias ? OP_BIAS : OP_PAIR);
      r_chan_last <= o_chan_last;
      if (o_valid && o_is_bias && o_chan_last)
        g_cnt <= (g_cnt == GAW'(COG-1)) ? '0 : g_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      r_w   <= wgt_ram[o_addr];
      r_b   <= bias_ram[g_cnt];
      r_vth <= vth_ram[g_cnt];
    end
  end

  // ---------------- neuron ----------------
  logic signed [VW-1:0] v_mem;
  assign adv = !out_valid || out_ready;

  lif_neuron #(.LEAK(LEAK)) u_neuron (
    .clk, .rst_n, .en(adv), .op(r_op), .w_data(r_w), .b_data(r_b),
    .vth(r_vth), .chan_last(r_chan_last),
    .spike_valid(out_valid), .spike(out_spike), .v_mem(v_mem)
  );

  assert property (@(posedge clk) disable iff (!rst_n)
    (o_valid && !o_is_bias && adv) |-> (32'(o_addr) < WDEPTH));
endmodule
