// dataflow_orchestrator: FIFO-like window buffer doing implicit im2col,
// time/channel permutation and window reuse for one convolution layer.
//
// Input words (one channel group of PCI spikes each) arrive in the order
// (Fh, Fw, Ci-group, T): T innermost. They are pushed into a circular RAM at
// an unwrapped push counter. Words leave in the order
// (Fh_o, Fw_o, Co-group, T, Kh, Kw, Ci-group), so that each output channel
// group can integrate a whole time step before moving to the next one and no
// membrane potential has to be stored across windows. The pop address is
// base + offset, both driven by stride counters as in the paper's tables:
//   status counters  Ci -> Kw -> Kh -> T -> Co -> Fw_o -> Fh_o (chained)
//   offset stride    T                    on a Ci or Kw step
//                    ((FW-KW)*CIG+1)*T    on a Kh step
//                    reset to t          when the Kh loop wraps
//   base stride      CIG*T                next window in the row
//                    KW*CIG*T             next row
//                    ((KH-1)*FW+KW)*CIG*T next feature map
// The base only moves once all COG output channel groups have reused the
// window. Push is allowed while the word does not overwrite anything at or
// above the current base; a pop waits until its word has been pushed. RAM
// depth is a power of two holding the window span plus a holding area HOLD
// (paper: "configurable holding area"). FH/FW are the (already padded) input
// size; stride 1, valid convolution. Full/empty are computed from the
// counters each cycle (the paper registers them; this design does not).
// Output is registered: one word per cycle, 1 cycle read latency.
// Flags: out_last ends a (Kh,Kw,Ci) loop, out_chan_last ends the T loop of
// one channel group, out_pix_last ends all channel groups of a pixel.
module dataflow_orchestrator #(
  parameter int unsigned FH   = 30,
  parameter int unsigned FW   = 30,
  parameter int unsigned CIG  = 1,
  parameter int unsigned T    = 4,
  parameter int unsigned KH   = 3,
  parameter int unsigned KW   = 3,
  parameter int unsigned COG  = 1,
  parameter int unsigned DW   = 1,
  parameter int unsigned HOLD = 64
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data,
  output logic          out_last,
  output logic          out_chan_last,
  output logic          out_pix_last
);
  localparam int unsigned FHO  = FH - KH + 1;
  localparam int unsigned FWO  = FW - KW + 1;
  localparam int unsigned CT   = CIG * T;
  localparam int unsigned SPAN = ((KH-1)*FW + KW) * CT;
  localparam int unsigned AW   = $clog2(SPAN + HOLD);
  localparam int unsigned DEPTH = 1 << AW;
  // stride constants (elaboration-time products, no run-time multipliers)
  localparam logic [31:0] S_BASE0 = 32'(CT);
  localparam logic [31:0] S_BASE1 = 32'(KW*CT);
  localparam logic [31:0] S_BASE2 = 32'(((KH-1)*FW + KW) * CT);
  localparam logic [31:0] S_OFF0  = 32'(T);
  localparam logic [31:0] S_OFF1  = 32'(((FW-KW)*CIG + 1) * T);

  logic [DW-1:0] ram [DEPTH];
  logic [31:0] push_cnt, base_cnt, off_cnt;
  logic [15:0] c_ci, c_kw, c_kh, c_t, c_co, c_fw, c_fh;

  // ---------------- push side ----------------
  logic [31:0] fill;
  assign fill     = push_cnt - base_cnt;
  assign in_ready = (fill < 32'(DEPTH));
  always_ff @(posedge clk) begin
    if (in_valid && in_ready) ram[push_cnt[AW-1:0]] <= in_data;
  end

  // ---------------- pop side ----------------
  logic ci_w, kw_w, kh_w, t_w, co_w, fw_w, fh_w;
  assign ci_w = (c_ci == 16'(CIG-1));
  assign kw_w = (c_kw == 16'(KW-1));
  assign kh_w = (c_kh == 16'(KH-1));
  assign t_w  = (c_t  == 16'(T-1));
  assign co_w = (c_co == 16'(COG-1));
  assign fw_w = (c_fw == 16'(FWO-1));
  assign fh_w = (c_fh == 16'(FHO-1));

  logic avail, pop;
  assign avail = (fill > off_cnt);          // word base+off already pushed
  assign pop   = avail && (!out_valid || out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      push_cnt <= '0; base_cnt <= '0; off_cnt <= '0;
      c_ci <= '0; c_kw <= '0; c_kh <= '0; c_t <= '0;
      c_co <= '0; c_fw <= '0; c_fh <= '0;
      out_valid <= 1'b0; out_last <= 1'b0; out_chan_last <= 1'b0; out_pix_last <= 1'b0;
    end else begin
      if (in_valid && in_ready) push_cnt <= push_cnt + 1'b1;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (pop) begin
        out_valid     <= 1'b1;
        out_last      <= ci_w && kw_w && kh_w;
        out_chan_last <= ci_w && kw_w && kh_w && t_w;
        out_pix_last  <= ci_w && kw_w && kh_w && t_w && co_w;
        // status registers and offset counter
        if (!ci_w) begin
          c_ci <= c_ci + 1'b1; off_cnt <= off_cnt + S_OFF0;
        end else begin
          c_ci <= '0;
          if (!kw_w) begin
            c_kw <= c_kw + 1'b1; off_cnt <= off_cnt + S_OFF0;
          end else begin
            c_kw <= '0;
            if (!kh_w) begin
              c_kh <= c_kh + 1'b1; off_cnt <= off_cnt + S_OFF1;
            end else begin
              c_kh <= '0;
              if (!t_w) begin
                c_t <= c_t + 1'b1; off_cnt <= 32'(c_t) + 1'b1;  // reset to T counter
              end else begin
                c_t <= '0; off_cnt <= '0;
                if (!co_w) begin
                  c_co <= c_co + 1'b1;                        // reuse the window
                end else begin
                  c_co <= '0;
                  if (!fw_w) begin
                    c_fw <= c_fw + 1'b1; base_cnt <= base_cnt + S_BASE0;
                  end else begin
                    c_fw <= '0;
                    if (!fh_w) begin
                      c_fh <= c_fh + 1'b1; base_cnt <= base_cnt + S_BASE1;
                    end else begin
                      c_fh <= '0; base_cnt <= base_cnt + S_BASE2;
                    end
                  end
                end
              end
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (pop) out_data <= ram[AW'(base_cnt + off_cnt)];
  end

  // A pop never reads beyond what has been pushed, and never outside the window.
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> off_cnt < 32'(SPAN));
endmodule
