// tb_dataflow_orchestrator: the input words carry their own stream index,
// so every output word tells which input it was. For a 5x6 map, 2 input
// channel groups, T = 2, 3x3 kernel and 2 output channel groups (window
// reused twice), three feature maps are streamed with random valid/ready and
// each output word and its last / chan_last / pix_last flags are compared
// with the im2col order (Fh_o, Fw_o, Co, T, Kh, Kw, Ci). A small holding
// area makes the push side stall; the test requires that it did.
module tb_dataflow_orchestrator;
  localparam int FH = 5, FW = 6, CIG = 2, T = 2, KH = 3, KW = 3, COG = 2, NIMG = 3;
  localparam int DW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last, out_chan_last, out_pix_last;
  logic [DW-1:0] in_data = '0, out_data;
  int checks = 0, failures = 0, stalls = 0;
  dataflow_orchestrator #(.FH(FH), .FW(FW), .CIG(CIG), .T(T), .KH(KH), .KW(KW),
                          .COG(COG), .DW(DW), .HOLD(4)) dut (.*);

  always @(posedge clk) if (rst_n && in_valid && !in_ready) stalls++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    fork
      begin
        for (int i = 0; i < NIMG*FH*FW*CIG*T; i++) begin
          @(negedge clk);
          while (($urandom % 4) == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1; in_data = DW'(i);
          @(posedge clk); while (!in_ready) @(posedge clk);
        end
        @(negedge clk) in_valid = 0;
      end
      begin
        for (int n = 0; n < NIMG; n++)
          for (int ho = 0; ho <= FH-KH; ho++) for (int wo = 0; wo <= FW-KW; wo++)
            for (int co = 0; co < COG; co++) for (int t = 0; t < T; t++)
              for (int kh = 0; kh < KH; kh++) for (int kw = 0; kw < KW; kw++)
                for (int ci = 0; ci < CIG; ci++) begin
                  int e; bit l, cl, pl;
                  e = ((((n*FH + ho + kh)*FW + wo + kw)*CIG) + ci)*T + t;
                  l = (kh == KH-1) && (kw == KW-1) && (ci == CIG-1);
                  cl = l && (t == T-1);
                  pl = cl && (co == COG-1);
                  @(negedge clk) out_ready = ($urandom % 4) != 0;
                  @(posedge clk);
                  while (!(out_valid && out_ready)) begin @(negedge clk) out_ready = ($urandom % 4) != 0; @(posedge clk); end
                  checks++;
                  if (out_data !== DW'(e) || out_last !== l || out_chan_last !== cl || out_pix_last !== pl) begin
                    failures++;
                    if (failures < 10) $display("img %0d (%0d,%0d) co%0d t%0d k(%0d,%0d) ci%0d: got %0d %b%b%b exp %0d %b%b%b",
                      n, ho, wo, co, t, kh, kw, ci, out_data, out_last, out_chan_last, out_pix_last, e, l, cl, pl);
                  end
                end
      end
    join
    checks++;
    if (stalls == 0) begin failures++; $display("holding area never filled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
