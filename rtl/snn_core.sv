// snn_core: one pipeline stage of the accelerator, computing one layer.
//
// Chain: padding -> dataflow_orchestrator -> PCO input buffers ->
// PCO sparsity_detectors -> buffer_pack -> maxpool (optional).
// Input: spike words of PCI channels (one input channel group) in the order
// (Fh, Fw, Ci-group, T), for an FH x FW map with CIG groups. Output: words
// of PCO channels in the order (Fh_o, Fw_o, Co-group, T), which is exactly
// the input order of the next core when its PCI equals this PCO. The
// orchestrator broadcasts each reordered vector to all detectors through
// small per-detector FIFOs ("Buffer" stage), so detectors with few matched
// pairs can run ahead of slower ones. Detector j computes output channels
// g*PCO + j, g = 0..COG-1. A fully connected layer is run as a valid
// convolution whose kernel covers the whole input (K = FH = FW, PAD = 0).
// Parameter RAMs are written with cfg_we/cfg_det/cfg_sel/cfg_addr/cfg_data.
// The module structure follows the paper's core figure; the per-detector
// input FIFOs, their depth and the configuration port are this design's.
module snn_core
  import ff_pkg::*;
#(
  parameter int unsigned FH   = 28,
  parameter int unsigned FW   = 28,
  parameter int unsigned PAD  = 1,
  parameter int unsigned PCI  = 1,
  parameter int unsigned CIG  = 1,
  parameter int unsigned PCO  = 8,
  parameter int unsigned COG  = 1,
  parameter int unsigned K    = 3,
  parameter bit          POOL = 1'b0,
  parameter bit          LEAK = 1'b1,
  parameter int unsigned T    = ff_pkg::T_STEPS,
  parameter int unsigned HOLD = 64,
  parameter int unsigned IBUF = 4,
  parameter int unsigned OBUF = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [PCI-1:0] in_data,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [PCO-1:0] out_data,
  input  logic           cfg_we,
  input  logic [7:0]     cfg_det,
  input  cfg_sel_e       cfg_sel,
  input  logic [15:0]    cfg_addr,
  input  logic [31:0]    cfg_data
);
  localparam int unsigned PFH = FH + 2*PAD;
  localparam int unsigned PFW = FW + 2*PAD;
  localparam int unsigned FHO = PFH - K + 1;
  localparam int unsigned FWO = PFW - K + 1;
  localparam int unsigned KKC = K * K * CIG;

  // padding
  logic p_valid, p_ready;
  logic [PCI-1:0] p_data;
  padding #(.FH(FH), .FW(FW), .WPP(CIG*T), .PAD(PAD), .DW(PCI)) u_pad (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(p_valid), .out_ready(p_ready), .out_data(p_data)
  );

  // dataflow orchestrator
  logic o_valid, o_ready, o_last, o_chan_last, o_pix_last;
  logic [PCI-1:0] o_data;
  dataflow_orchestrator #(.FH(PFH), .FW(PFW), .CIG(CIG), .T(T), .KH(K), .KW(K),
                          .COG(COG), .DW(PCI), .HOLD(HOLD)) u_orch (
    .clk, .rst_n, .in_valid(p_valid), .in_ready(p_ready), .in_data(p_data),
    .out_valid(o_valid), .out_ready(o_ready), .out_data(o_data),
    .out_last(o_last), .out_chan_last(o_chan_last), .out_pix_last(o_pix_last)
  );

  // per-detector input buffers and detectors
  localparam int unsigned BW_IN = PCI + 3;
  logic [PCO-1:0] b_in_ready, d_out_valid, d_out_ready, d_out_spike;
  logic all_ready;
  assign all_ready = &b_in_ready;
  assign o_ready   = all_ready;

  for (genvar j = 0; j < PCO; j++) begin : g_det
    logic             b_valid, b_ready;
    logic [BW_IN-1:0] b_data;
    logic [$clog2(IBUF+1)-1:0] b_cnt;
    sync_fifo #(.DW(BW_IN), .DEPTH(IBUF)) u_ibuf (
      .clk, .rst_n,
      .in_valid(o_valid && all_ready), .in_ready(b_in_ready[j]),
      .in_data({o_pix_last, o_chan_last, o_last, o_data}),
      .out_valid(b_valid), .out_ready(b_ready), .out_data(b_data), .count(b_cnt)
    );
    sparsity_detector #(.PCI(PCI), .COG(COG), .KKC(KKC), .LEAK(LEAK)) u_det (
      .clk, .rst_n,
      .in_valid(b_valid), .in_ready(b_ready), .in_spk(b_data[PCI-1:0]),
      .in_last(b_data[PCI]), .in_chan_last(b_data[PCI+1]), .in_pix_last(b_data[PCI+2]),
      .cfg_we(cfg_we && (cfg_det == 8'(j))), .cfg_sel, .cfg_addr, .cfg_data,
      .out_valid(d_out_valid[j]), .out_ready(d_out_ready[j]), .out_spike(d_out_spike[j])
    );
  end

  // buffer & pack
  logic k_valid, k_ready;
  logic [PCO-1:0] k_data;
  buffer_pack #(.N(PCO), .DEPTH(OBUF)) u_pack (
    .clk, .rst_n, .in_valid(d_out_valid), .in_ready(d_out_ready), .in_spike(d_out_spike),
    .out_valid(k_valid), .out_ready(k_ready), .out_vec(k_data)
  );

  // optional max pooling
  maxpool #(.FH(FHO), .FW(FWO), .WPP(COG*T), .DW(PCO), .EN(POOL)) u_pool (
    .clk, .rst_n, .in_valid(k_valid), .in_ready(k_ready), .in_data(k_data),
    .out_valid, .out_ready, .out_data
  );
endmodule
