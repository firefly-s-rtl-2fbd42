// firefly_s_top: inter-layer pipelined sparse SNN accelerator.
//
// NL cores, one per network layer, are chained through register slices
// (2-entry FIFOs); every core holds its own parameters on chip, so a whole
// image streams through all layers with no external memory. Layer l is
// described by the per-layer parameter arrays (input size FH/FW, padding,
// input word width PCI = previous layer's PCO, channel groups CIG/COG,
// detectors PCO, kernel K, optional pooling). The defaults are the SCNN5
// network (MNIST) of the paper:
//   1x28x28-8c3p1-16c3p2-mp2-32c3p1-mp2-64c3p1-64c3p1-mp2-10fc
// with T = 4 and LIF neurons. The detector counts PCO are this design's own
// (each must divide the layer's output channels and equal the next layer's
// PCI); the paper's parallelism figures for SCNN5 do not fit that rule.
// The final fully connected layer runs as a 3x3 valid convolution over the
// 3x3x64 map. Input: spike words (PCI of layer 0 bits) in (Fh, Fw, Ci, T)
// order; output: 5-bit words in (Co-group, T) order, 2 groups x 4 steps per
// image. Parameters are written through cfg_* with cfg_layer selecting the
// core.
module firefly_s_top
  import ff_pkg::*;
#(
  parameter int unsigned NL = 6,
  parameter int unsigned L_FH  [NL] = '{28, 28, 15,  7,  7, 3},
  parameter int unsigned L_FW  [NL] = '{28, 28, 15,  7,  7, 3},
  parameter int unsigned L_PAD [NL] = '{ 1,  2,  1,  1,  1, 0},
  parameter int unsigned L_PCI [NL] = '{ 1,  8, 16, 16, 16, 16},
  parameter int unsigned L_CIG [NL] = '{ 1,  1,  1,  2,  4, 4},
  parameter int unsigned L_PCO [NL] = '{ 8, 16, 16, 16, 16, 5},
  parameter int unsigned L_COG [NL] = '{ 1,  1,  2,  4,  4, 2},
  parameter int unsigned L_K   [NL] = '{ 3,  3,  3,  3,  3, 3},
  parameter bit          L_POOL[NL] = '{ 0,  1,  1,  0,  1, 0},
  parameter int unsigned IN_W  = 1,
  parameter int unsigned OUT_W = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IN_W-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OUT_W-1:0] out_data,
  input  logic             cfg_we,
  input  logic [3:0]       cfg_layer,
  input  logic [7:0]       cfg_det,
  input  cfg_sel_e         cfg_sel,
  input  logic [15:0]      cfg_addr,
  input  logic [31:0]      cfg_data
);
  localparam int unsigned MW = 64;
  logic          s_valid [NL+1];
  logic          s_ready [NL+1];
  logic [MW-1:0] s_data  [NL+1];

  assign s_valid[0] = in_valid;
  assign in_ready   = s_ready[0];
  assign s_data[0]  = MW'(in_data);
  assign out_valid  = s_valid[NL];
  assign s_ready[NL] = out_ready;
  assign out_data   = s_data[NL][OUT_W-1:0];

  for (genvar l = 0; l < NL; l++) begin : g_layer
    localparam int unsigned PCI = L_PCI[l];
    localparam int unsigned PCO = L_PCO[l];
    logic c_valid, c_ready;
    logic [PCO-1:0] c_data;
    logic [$clog2(3)-1:0] r_cnt;

    snn_core #(.FH(L_FH[l]), .FW(L_FW[l]), .PAD(L_PAD[l]), .PCI(PCI), .CIG(L_CIG[l]),
               .PCO(PCO), .COG(L_COG[l]), .K(L_K[l]), .POOL(L_POOL[l])) u_core (
      .clk, .rst_n,
      .in_valid(s_valid[l]), .in_ready(s_ready[l]), .in_data(s_data[l][PCI-1:0]),
      .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data),
      .cfg_we(cfg_we && (cfg_layer == 4'(l))), .cfg_det, .cfg_sel, .cfg_addr, .cfg_data
    );

    // pipeline register between cores
    logic [PCO-1:0] r_data;
    sync_fifo #(.DW(PCO), .DEPTH(2)) u_slice (
      .clk, .rst_n,
      .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data),
      .out_valid(s_valid[l+1]), .out_ready(s_ready[l+1]), .out_data(r_data), .count(r_cnt)
    );
    assign s_data[l+1] = MW'(r_data);
  end
endmodule
