// tb_padding: a 3x4 map of 2 words per pixel, padded by 1, twice in a row,
// with random input valid and output ready. Every output word is compared
// with the expected padded sequence (zeros on the border, the input word
// inside).
module tb_padding;
  localparam int FH = 3, FW = 4, WPP = 2, PAD = 1, DW = 8, NIMG = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [DW-1:0] in_data = '0, out_data;
  int checks = 0, failures = 0;
  logic [DW-1:0] exp_q[$];
  padding #(.FH(FH), .FW(FW), .WPP(WPP), .PAD(PAD), .DW(DW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [DW-1:0] v = 8'h11;
    for (int n = 0; n < NIMG; n++)
      for (int r = 0; r < FH + 2*PAD; r++) for (int c = 0; c < FW + 2*PAD; c++)
        for (int w = 0; w < WPP; w++) begin
          if (r < PAD || r >= FH + PAD || c < PAD || c >= FW + PAD) exp_q.push_back('0);
          else begin exp_q.push_back(v); v = v + 8'd3; if (v == 0) v = 1; end
        end
    repeat (2) @(posedge clk); rst_n = 1;
    fork
      begin
        logic [DW-1:0] d = 8'h11;
        for (int i = 0; i < NIMG*FH*FW*WPP; i++) begin
          @(negedge clk);
          while (($urandom % 3) == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1; in_data = d;
          @(posedge clk); while (!in_ready) @(posedge clk);
          d = d + 8'd3; if (d == 0) d = 1;
        end
        @(negedge clk) in_valid = 0;
      end
      begin
        for (int i = 0; i < NIMG*(FH+2*PAD)*(FW+2*PAD)*WPP; i++) begin
          @(negedge clk) out_ready = ($urandom % 3) != 0;
          @(posedge clk);
          while (!(out_valid && out_ready)) begin @(negedge clk) out_ready = ($urandom % 3) != 0; @(posedge clk); end
          checks++;
          if (out_data !== exp_q[i]) begin failures++; $display("word %0d got %h exp %h", i, out_data, exp_q[i]); end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
