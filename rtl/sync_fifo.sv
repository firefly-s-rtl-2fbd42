// sync_fifo: small synchronous FIFO with valid/ready on both sides.
//
// A register array with read and write pointers and an occupancy counter.
// The head word is presented combinationally on out_data while out_valid is
// high; a word written in one cycle can be read in the next. `count` gives
// the occupancy, used by producers that must reserve space ahead of time.
// Used as the per-detector spike buffers (paper: "Buffer" stage and
// "Buffer & Pack" FIFOs); depth and width are parameters chosen by users.
module sync_fifo #(
  parameter int unsigned DW    = 8,
  parameter int unsigned DEPTH = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [DW-1:0]              in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [DW-1:0]              out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH <= 1) ? 1 : $clog2(DEPTH);
  logic [DW-1:0] mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;
endmodule
