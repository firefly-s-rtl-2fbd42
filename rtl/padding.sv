// padding: zero padding of a streamed spike feature map ("same" convolution).
//
// The input arrives pixel by pixel in raster order (rows, then columns);
// each pixel is WPP consecutive words (channel groups x time steps). The
// module walks the padded (FH+2*PAD) x (FW+2*PAD) grid with row/column/word
// counters: inside the original image it forwards the input handshake, on a
// border pixel it emits WPP all-zero words without consuming input. PAD=0
// makes it a plain wire (the paper's bypass for 'valid' and fully connected
// layers). The zero constant and the enable follow the paper's figure;
// counters and handshake are this design's choice. Zero latency (combinational
// path from input to output), one word per cycle.
module padding #(
  parameter int unsigned FH  = 28,
  parameter int unsigned FW  = 28,
  parameter int unsigned WPP = 4,
  parameter int unsigned PAD = 1,
  parameter int unsigned DW  = 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data
);
  generate
    if (PAD == 0) begin : g_bypass
      assign out_valid = in_valid;
      assign in_ready  = out_ready;
      assign out_data  = in_data;
    end else begin : g_pad
      localparam int unsigned PH = FH + 2*PAD;
      localparam int unsigned PW = FW + 2*PAD;
      logic [$clog2(PH)-1:0] r;
      logic [$clog2(PW)-1:0] c;
      logic [$clog2(WPP+1)-1:0] w;
      logic border;
      assign border = (r < PAD) || (r >= PAD + FH) || (c < PAD) || (c >= PAD + FW);
      assign out_valid = border ? 1'b1 : in_valid;
      assign in_ready  = border ? 1'b0 : out_ready;
      assign out_data  = border ? '0 : in_data;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          r <= '0; c <= '0; w <= '0;
        end else if (out_valid && out_ready) begin
          if (w == ($clog2(WPP+1))'(WPP-1)) begin
            w <= '0;
            if (c == ($clog2(PW))'(PW-1)) begin
              c <= '0;
              r <= (r == ($clog2(PH))'(PH-1)) ? '0 : r + 1'b1;
            end else c <= c + 1'b1;
          end else w <= w + 1'b1;
        end
      end
    end
  endgenerate
endmodule
