// tb_sparsity_detector: one detector with 8-lane vectors, 2 output
// channels, 3 vectors per time step and T = 2, over 4 pixels. Random bitmap
// masks, packed non-zero weights, biases and thresholds are written through
// the configuration port; random spike vectors are streamed in with the
// orchestrator's flags. The first vector reproduces the worked example of the
// design description (mask 1101, spike at lane 2: the pair is the 2nd
// non-zero of the vector). Every output spike is compared with an integer LIF
// model. A second pass with the input always valid and the output always
// ready checks the throughput: each time step costs, per vector, one cycle
// per matched pair (one if none), plus one bias cycle unless the last vector
// had no pair; the last spike must appear exactly 3 cycles after the last
// issue cycle.
module tb_sparsity_detector;
  import ff_pkg::*;
  localparam int PCI = 8, COG = 2, KKC = 3, T = 2, NPIX = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, in_last = 0, in_chan_last = 0, in_pix_last = 0;
  logic [PCI-1:0] in_spk = '0;
  logic cfg_we = 0; cfg_sel_e cfg_sel = CFG_MASK; logic [15:0] cfg_addr = 0; logic [31:0] cfg_data = 0;
  logic out_valid, out_ready = 0, out_spike;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  sparsity_detector #(.PCI(PCI), .COG(COG), .KKC(KKC)) dut (.*);

  logic [PCI-1:0] mask [COG][KKC];
  int wgt [COG][KKC][PCI];
  int bias [COG], vth [COG];
  logic [PCI-1:0] spk [NPIX][COG][T][KKC];
  bit exp_s [NPIX][COG][T];
  int nops;

  task automatic cfg(input cfg_sel_e s, input int a, input int d);
    @(negedge clk); cfg_we = 1; cfg_sel = s; cfg_addr = 16'(a); cfg_data = 32'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run(input bit throttle, output longint first_in, output longint last_out);
    first_in = -1; last_out = -1;
    fork
      begin
        for (int p = 0; p < NPIX; p++) for (int g = 0; g < COG; g++)
          for (int t = 0; t < T; t++) for (int k = 0; k < KKC; k++) begin
            @(negedge clk);
            while (throttle && ($urandom % 3) == 0) begin in_valid = 0; @(negedge clk); end
            in_valid = 1; in_spk = spk[p][g][t][k];
            in_last = (k == KKC-1); in_chan_last = in_last && (t == T-1);
            in_pix_last = in_chan_last && (g == COG-1);
            @(posedge clk); while (!in_ready) @(posedge clk);
            if (first_in < 0) first_in = cyc;
          end
        @(negedge clk) in_valid = 0;
      end
      begin
        for (int p = 0; p < NPIX; p++) for (int g = 0; g < COG; g++)
          for (int t = 0; t < T; t++) begin
            @(negedge clk) out_ready = throttle ? (($urandom % 3) != 0) : 1'b1;
            @(posedge clk);
            while (!(out_valid && out_ready)) begin
              @(negedge clk) out_ready = throttle ? (($urandom % 3) != 0) : 1'b1; @(posedge clk);
            end
            last_out = cyc;
            checks++;
            if (out_spike !== exp_s[p][g][t]) begin
              failures++; $display("pix %0d ch %0d t %0d: got %b exp %b", p, g, t, out_spike, exp_s[p][g][t]);
            end
          end
        @(negedge clk) out_ready = 0;
      end
    join
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint f0, l0;
    int wa;
    // parameters
    for (int g = 0; g < COG; g++) begin
      bias[g] = int'($urandom % 5) - 1; vth[g] = int'($urandom % 6);
      for (int k = 0; k < KKC; k++) begin
        mask[g][k] = PCI'($urandom) & PCI'($urandom);
        for (int l = 0; l < PCI; l++) wgt[g][k][l] = mask[g][k][l] ? (int'($urandom % 15) - 7) : 0;
      end
    end
    mask[0][0] = 8'b0000_1101;
    for (int l = 0; l < PCI; l++) wgt[0][0][l] = mask[0][0][l] ? l + 1 : 0;  // 1,_,3,4
    mask[1][2] = 8'b1111_0000;                                              // forces bubbles
    // spikes and reference
    nops = 0;
    for (int p = 0; p < NPIX; p++) for (int g = 0; g < COG; g++) begin
      int v;
      v = 0;
      for (int t = 0; t < T; t++) begin
        int cur;
        cur = bias[g];
        for (int k = 0; k < KKC; k++) begin
          int n;
          spk[p][g][t][k] = PCI'($urandom) & PCI'($urandom);
          if (p == 0 && g == 0 && t == 0 && k == 0) spk[p][g][t][k] = 8'b0000_0100;
          if (p == 1 && g == 1 && k == 2) spk[p][g][t][k] = 8'b0000_1111;
          n = $countones(spk[p][g][t][k] & mask[g][k]);
          nops += (n == 0) ? 1 : n;
          if (k == KKC-1 && n != 0) nops += 1;
          for (int l = 0; l < PCI; l++) if (spk[p][g][t][k][l] && mask[g][k][l]) cur += wgt[g][k][l];
        end
        v = v + ((cur - v) >>> 1);
        exp_s[p][g][t] = (v > vth[g]);
        if (exp_s[p][g][t]) v = 0;
      end
    end
    repeat (2) @(posedge clk); rst_n = 1;
    wa = 0;
    for (int g = 0; g < COG; g++) begin
      cfg(CFG_BIAS, g, bias[g]); cfg(CFG_VTH, g, vth[g]);
      for (int k = 0; k < KKC; k++) begin
        cfg(CFG_MASK, g*KKC + k, int'(mask[g][k]));
        for (int l = 0; l < PCI; l++) if (mask[g][k][l]) begin cfg(CFG_WEIGHT, wa, wgt[g][k][l]); wa++; end
      end
    end
    run(1'b1, f0, l0);
    // throughput pass
    run(1'b0, f0, l0);
    checks++;
    if (l0 - f0 != longint'(nops) + 3) begin
      failures++; $display("throughput: %0d cycles, expected %0d", l0 - f0, nops + 3);
    end else $display("throughput: %0d cycles for %0d issue slots", l0 - f0, nops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
