// tb_firefly_s_top: end-to-end test of the accelerator at its default
// parameters (the six-layer SCNN5 network, T = 4), against the software
// network model. Random sparse 4-bit weights (about 15% non-zero), random
// biases and thresholds, and NIMG random 28x28 input spike images are
// generated here, bitmap-encoded and written through the configuration
// port; then the images are streamed in back to back and the 2x4 output
// words per image are compared. The test also counts how often each
// mechanism of the design occurred and fails if one never did: window reuse
// across output-channel groups, padding, max pooling, bubble cycles, a
// bubble absorbed by the bias, an extra bias cycle, a full orchestrator
// holding the stream back, and back-pressure at the network input.
module tb_firefly_s_top;
  import ff_pkg::*;
  import snn_ref_pkg::*;
  localparam int NIMG = 2, T = 4, NL = 6;
  int LPAD[NL] = '{ 1,  2,  1,  1,  1, 0};
  int LCI[NL] = '{ 1,  8, 16, 32, 64, 64};
  int LCO[NL] = '{ 8, 16, 32, 64, 64, 10};
  int LPCI[NL] = '{ 1,  8, 16, 16, 16, 16};
  int LCIG[NL] = '{ 1,  1,  1,  2,  4, 4};
  int LPCO[NL] = '{ 8, 16, 16, 16, 16, 5};
  int LCOG[NL] = '{ 1,  1,  2,  4,  4, 2};
  bit LPOOL[NL] = '{0, 1, 1, 0, 1, 0};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [0:0] in_data = '0;
  logic [4:0] out_data;
  logic cfg_we = 0; logic [3:0] cfg_layer = 0; logic [7:0] cfg_det = 0;
  cfg_sel_e cfg_sel = CFG_MASK; logic [15:0] cfg_addr = 0; logic [31:0] cfg_data = 0;
  int checks = 0, failures = 0, ones = 0;
  longint cyc = 0;

  firefly_s_top dut (.*);

  iarr wt[NL], bias[NL], vth[NL], s_in[NIMG], s_exp[NIMG];

  // mechanism counters
  int n_reuse = 0, n_pad = 0, n_pool = 0, n_bubble = 0, n_bias_absorb = 0,
      n_bias_extra = 0, n_orch_full = 0, n_in_stall = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dut.g_layer[2].u_core.u_orch.pop && dut.g_layer[2].u_core.u_orch.c_co != 0) n_reuse++;
      if (dut.g_layer[1].u_core.u_pad.g_pad.border && dut.g_layer[1].u_core.u_pad.out_valid
          && dut.g_layer[1].u_core.u_pad.out_ready) n_pad++;
      if (dut.g_layer[1].u_core.u_pool.out_valid && dut.g_layer[1].u_core.u_pool.out_ready) n_pool++;
      if (dut.g_layer[4].u_core.g_det[0].u_det.u_squeeze.w_valid
          && dut.g_layer[4].u_core.g_det[0].u_det.u_squeeze.w_bubble
          && !dut.g_layer[4].u_core.g_det[0].u_det.u_squeeze.bias_cycle_q
          && dut.g_layer[4].u_core.g_det[0].u_det.u_squeeze.o_ready) begin
        if (dut.g_layer[4].u_core.g_det[0].u_det.u_squeeze.w_last) n_bias_absorb++;
        else n_bubble++;
      end
      if (dut.g_layer[4].u_core.g_det[0].u_det.u_squeeze.bias_cycle_q
          && dut.g_layer[4].u_core.g_det[0].u_det.u_squeeze.o_ready) n_bias_extra++;
      if (dut.g_layer[1].u_core.u_orch.in_valid && !dut.g_layer[1].u_core.u_orch.in_ready) n_orch_full++;
      if (in_valid && !in_ready) n_in_stall++;
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int H, W, HO, WO;
    longint c_start;
    for (int l = 0; l < NL; l++) begin
      wt[l] = rand_weights(LCO[l]*LCI[l]*9, 15);
      bias[l] = new[LCO[l]]; vth[l] = new[LCO[l]];
      foreach (bias[l][i]) begin bias[l][i] = int'($urandom % 4) - 1; vth[l][i] = int'($urandom % 3); end
    end
    for (int n = 0; n < NIMG; n++) begin
      iarr s;
      s_in[n] = new[T*28*28];
      foreach (s_in[n][i]) s_in[n][i] = (($urandom % 100) < 25) ? 1 : 0;
      s = s_in[n]; H = 28; W = 28;
      for (int l = 0; l < NL; l++) begin
        s = conv_lif(H, W, LCI[l], LPAD[l], 3, LCO[l], T, 1'b1, s, wt[l], bias[l], vth[l], HO, WO);
        H = HO; W = WO;
        if (LPOOL[l]) begin s = maxpool2(H, W, LCO[l], T, s, HO, WO); H = HO; W = WO; end
      end
      s_exp[n] = s;
      foreach (s[i]) ones += s[i];
    end
    $display("expected output spikes: %0d of %0d", ones, NIMG*T*10);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < NL; l++) begin
      cfg_wr_t q[$];
      encode_layer(LCI[l], 3, LPCI[l], LCIG[l], LPCO[l], LCOG[l], wt[l], bias[l], vth[l], q);
      foreach (q[i]) begin
        @(negedge clk);
        cfg_we = 1; cfg_layer = 4'(l); cfg_det = 8'(q[i].det); cfg_sel = cfg_sel_e'(q[i].sel);
        cfg_addr = 16'(q[i].addr); cfg_data = 32'(q[i].data);
      end
    end
    @(negedge clk) cfg_we = 0;
    c_start = cyc;
    fork
      begin : drive
        for (int n = 0; n < NIMG; n++)
          for (int h = 0; h < 28; h++) for (int w = 0; w < 28; w++)
            for (int t = 0; t < T; t++) begin
              @(negedge clk);
              in_valid = 1; in_data = 1'(s_in[n][sidx(t, 0, h, w, 1, 28, 28)]);
              @(posedge clk);
              while (!in_ready) @(posedge clk);
            end
        @(negedge clk) in_valid = 0;
      end
      begin : check
        for (int n = 0; n < NIMG; n++)
          for (int g = 0; g < 2; g++) for (int t = 0; t < T; t++) begin
            logic [4:0] e;
            e = 5'(stream_word(s_exp[n], 10, 1, 1, 5, 0, 0, g, t));
            @(negedge clk) out_ready = 1;
            @(posedge clk);
            while (!out_valid) @(posedge clk);
            checks++;
            if (out_data !== e) begin
              failures++;
              $display("mismatch img %0d g%0d t%0d: got %b exp %b", n, g, t, out_data, e);
            end
          end
      end
    join
    $display("cycles for %0d images: %0d", NIMG, cyc - c_start);
    $display("reuse=%0d pad=%0d pool=%0d bubble=%0d bias_absorb=%0d bias_extra=%0d orch_full=%0d in_stall=%0d",
             n_reuse, n_pad, n_pool, n_bubble, n_bias_absorb, n_bias_extra, n_orch_full, n_in_stall);
    checks += 8;
    if (n_reuse == 0)       begin failures++; $display("window reuse never happened"); end
    if (n_pad == 0)         begin failures++; $display("padding never happened"); end
    if (n_pool == 0)        begin failures++; $display("pooling never happened"); end
    if (n_bubble == 0)      begin failures++; $display("bubble cycle never happened"); end
    if (n_bias_absorb == 0) begin failures++; $display("bias absorbing a bubble never happened"); end
    if (n_bias_extra == 0)  begin failures++; $display("extra bias cycle never happened"); end
    if (n_orch_full == 0)   begin failures++; $display("orchestrator full never happened"); end
    if (n_in_stall == 0)    begin failures++; $display("input back-pressure never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
