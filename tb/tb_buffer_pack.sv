// tb_buffer_pack: four producers push random spikes at random times; the
// packed vectors must come out in order with bit j from producer j, and no
// vector may leave before every lane has a spike.
module tb_buffer_pack;
  localparam int N = 4, NV = 200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [N-1:0] in_valid = '0, in_ready, in_spike = '0, out_vec;
  logic out_valid, out_ready = 0;
  int checks = 0, failures = 0;
  logic [N-1:0] vecs [NV];
  buffer_pack #(.N(N), .DEPTH(4)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (vecs[i]) vecs[i] = N'($urandom);
    repeat (2) @(posedge clk); rst_n = 1;
    fork
      for (int j = 0; j < N; j++) begin
        automatic int jj = j;
        fork
          for (int i = 0; i < NV; i++) begin
            @(negedge clk);
            while (($urandom % 3) == 0) begin in_valid[jj] = 0; @(negedge clk); end
            in_valid[jj] = 1; in_spike[jj] = vecs[i][jj];
            @(posedge clk); while (!in_ready[jj]) @(posedge clk);
            @(negedge clk) in_valid[jj] = 0;
          end
        join_none
      end
      for (int i = 0; i < NV; i++) begin
        @(negedge clk) out_ready = ($urandom % 3) != 0;
        @(posedge clk);
        while (!(out_valid && out_ready)) begin @(negedge clk) out_ready = ($urandom % 3) != 0; @(posedge clk); end
        checks++;
        if (out_vec !== vecs[i]) begin failures++; $display("vec %0d got %b exp %b", i, out_vec, vecs[i]); end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
