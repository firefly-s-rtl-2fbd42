// tb_snn_core: one layer core (padding, orchestrator, detectors, pack,
// pooling) against the software layer model, on two random images.
// Size: 6x6 input, 8 input channels in 2 groups of 4, 8 output channels on
// 4 detectors (2 groups), 3x3 kernel with padding 1, 2x2 pooling, T = 4.
// Input valid and output ready are randomly throttled.
module tb_snn_core;
  import ff_pkg::*;
  import snn_ref_pkg::*;
  localparam int H = 6, W = 6, PAD = 1, PCI = 4, CIG = 2, PCO = 4, COG = 2, K = 3, T = 4;
  localparam int CI = PCI*CIG, CO = PCO*COG, NIMG = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [PCI-1:0] in_data = '0;
  logic [PCO-1:0] out_data;
  logic cfg_we = 0; logic [7:0] cfg_det = 0; cfg_sel_e cfg_sel = CFG_MASK;
  logic [15:0] cfg_addr = 0; logic [31:0] cfg_data = 0;
  int checks = 0, failures = 0;

  snn_core #(.FH(H), .FW(W), .PAD(PAD), .PCI(PCI), .CIG(CIG), .PCO(PCO), .COG(COG),
             .K(K), .POOL(1'b1), .T(T)) dut (.*);

  iarr wt, bias, vth, s_in[NIMG], s_exp[NIMG];
  cfg_wr_t q[$];
  int HO, WO, HP, WP;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wt = rand_weights(CO*CI*K*K, 30);
    bias = new[CO]; vth = new[CO];
    foreach (bias[i]) begin bias[i] = int'($urandom % 5) - 1; vth[i] = int'($urandom % 4); end
    for (int n = 0; n < NIMG; n++) begin
      iarr tmp;
      s_in[n] = new[T*CI*H*W];
      foreach (s_in[n][i]) s_in[n][i] = (($urandom % 100) < 35) ? 1 : 0;
      tmp = conv_lif(H, W, CI, PAD, K, CO, T, 1'b1, s_in[n], wt, bias, vth, HO, WO);
      s_exp[n] = maxpool2(HO, WO, CO, T, tmp, HP, WP);
    end
    encode_layer(CI, K, PCI, CIG, PCO, COG, wt, bias, vth, q);
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (q[i]) begin
      @(negedge clk);
      cfg_we = 1; cfg_det = 8'(q[i].det); cfg_sel = cfg_sel_e'(q[i].sel);
      cfg_addr = 16'(q[i].addr); cfg_data = 32'(q[i].data);
    end
    @(negedge clk) cfg_we = 0;
    fork
      begin : drive
        for (int n = 0; n < NIMG; n++)
          for (int h = 0; h < H; h++) for (int w = 0; w < W; w++)
            for (int g = 0; g < CIG; g++) for (int t = 0; t < T; t++) begin
              @(negedge clk);
              while (($urandom % 4) == 0) begin in_valid = 0; @(negedge clk); end
              in_valid = 1; in_data = PCI'(stream_word(s_in[n], CI, H, W, PCI, h, w, g, t));
              @(posedge clk);
              while (!in_ready) @(posedge clk);
            end
        @(negedge clk) in_valid = 0;
      end
      begin : check
        for (int n = 0; n < NIMG; n++)
          for (int h = 0; h < HP; h++) for (int w = 0; w < WP; w++)
            for (int g = 0; g < COG; g++) for (int t = 0; t < T; t++) begin
              logic [PCO-1:0] e;
              e = PCO'(stream_word(s_exp[n], CO, HP, WP, PCO, h, w, g, t));
              @(negedge clk);
              out_ready = ($urandom % 3) != 0;
              @(posedge clk);
              while (!(out_valid && out_ready)) begin
                @(negedge clk); out_ready = ($urandom % 3) != 0; @(posedge clk);
              end
              checks++;
              if (out_data !== e) begin
                failures++;
                $display("mismatch img %0d (%0d,%0d) g%0d t%0d: got %b exp %b", n, h, w, g, t, out_data, e);
              end
            end
        @(negedge clk) out_ready = 0;
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
