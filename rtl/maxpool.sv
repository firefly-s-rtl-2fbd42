// maxpool: 2x2, stride-2 max pooling of a streamed spike feature map.
//
// Words arrive in raster order, WPP words per pixel (channel groups x time
// steps), each word DW parallel channels. For binary spikes the maximum is a
// bitwise OR, taken separately for every word (every time step). On an even
// row the module ORs column pairs and stores the result in a line FIFO of
// (FW/2)*WPP words; on the odd row it ORs the column pair with the stored
// line and emits the pooled word. An odd last row or column is dropped
// (floor). EN=0 bypasses the block. The line FIFO and the bypass follow the
// paper's figure; the exact buffering is this design's choice. Output is
// combinational from the input word (no added latency).
module maxpool #(
  parameter int unsigned FH  = 30,
  parameter int unsigned FW  = 30,
  parameter int unsigned WPP = 4,
  parameter int unsigned DW  = 16,
  parameter bit          EN  = 1'b1
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
    if (!EN) begin : g_bypass
      assign out_valid = in_valid;
      assign in_ready  = out_ready;
      assign out_data  = in_data;
    end else begin : g_pool
      localparam int unsigned LW = (FW/2) * WPP;
      localparam int unsigned LAW = (LW <= 1) ? 1 : $clog2(LW);
      localparam int unsigned HAW = (WPP <= 1) ? 1 : $clog2(WPP);
      logic [DW-1:0] hbuf [WPP];
      logic [DW-1:0] line [LW];
      logic [15:0] r, c, w;
      logic [LAW-1:0] lp;
      logic in_pool, odd_r, odd_c, emit, take;

      assign in_pool = (r < 16'(2*(FH/2))) && (c < 16'(2*(FW/2)));
      assign odd_r = r[0];
      assign odd_c = c[0];
      assign emit  = in_pool && odd_r && odd_c;
      assign out_valid = in_valid && emit;
      assign in_ready  = emit ? out_ready : 1'b1;
      assign out_data  = line[lp] | hbuf[HAW'(w)] | in_data;
      assign take = in_valid && in_ready;

      always_ff @(posedge clk) begin
        if (take && in_pool && !odd_c) hbuf[HAW'(w)] <= in_data;
        if (take && in_pool && !odd_r && odd_c) line[lp] <= hbuf[HAW'(w)] | in_data;
      end

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          r <= '0; c <= '0; w <= '0; lp <= '0;
        end else if (take) begin
          if (in_pool && odd_c) lp <= (lp == LAW'(LW-1)) ? '0 : lp + 1'b1;
          if (w == 16'(WPP-1)) begin
            w <= '0;
            if (c == 16'(FW-1)) begin
              c <= '0;
              r <= (r == 16'(FH-1)) ? '0 : r + 1'b1;
            end else c <= c + 1'b1;
          end else w <= w + 1'b1;
        end
      end
    end
  endgenerate
endmodule
