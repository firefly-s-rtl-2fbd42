// tb_maxpool: a 5x6 map (odd height, so the last row is dropped) of 3 words
// per pixel, 4 channels per word, two maps in a row, random valid/ready.
// Each pooled word is compared with the OR of its 2x2 window.
module tb_maxpool;
  localparam int FH = 5, FW = 6, WPP = 3, DW = 4, NIMG = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [DW-1:0] in_data = '0, out_data;
  int checks = 0, failures = 0;
  logic [DW-1:0] img [NIMG][FH][FW][WPP];
  maxpool #(.FH(FH), .FW(FW), .WPP(WPP), .DW(DW), .EN(1'b1)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (img[n, h, w, k]) img[n][h][w][k] = DW'($urandom) & DW'($urandom);
    repeat (2) @(posedge clk); rst_n = 1;
    fork
      begin
        for (int n = 0; n < NIMG; n++) for (int h = 0; h < FH; h++)
          for (int w = 0; w < FW; w++) for (int k = 0; k < WPP; k++) begin
            @(negedge clk);
            while (($urandom % 3) == 0) begin in_valid = 0; @(negedge clk); end
            in_valid = 1; in_data = img[n][h][w][k];
            @(posedge clk); while (!in_ready) @(posedge clk);
          end
        @(negedge clk) in_valid = 0;
      end
      begin
        for (int n = 0; n < NIMG; n++) for (int h = 0; h < FH/2; h++)
          for (int w = 0; w < FW/2; w++) for (int k = 0; k < WPP; k++) begin
            logic [DW-1:0] e;
            e = img[n][2*h][2*w][k] | img[n][2*h][2*w+1][k] | img[n][2*h+1][2*w][k] | img[n][2*h+1][2*w+1][k];
            @(negedge clk) out_ready = ($urandom % 3) != 0;
            @(posedge clk);
            while (!(out_valid && out_ready)) begin @(negedge clk) out_ready = ($urandom % 3) != 0; @(posedge clk); end
            checks++;
            if (out_data !== e) begin failures++; $display("img %0d (%0d,%0d,%0d) got %b exp %b", n, h, w, k, out_data, e); end
          end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
