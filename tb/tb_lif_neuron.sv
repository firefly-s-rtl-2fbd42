// tb_lif_neuron: random streams of weight and bias operations (with random
// enable gaps) into the LIF neuron, compared spike by spike with an integer
// model of V += (I - V) >>> 1, fire on V > Vth, reset to 0, clear per channel.
// A second instance with LEAK = 0 checks the IF variant (V += I).
module tb_lif_neuron;
  import ff_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en = 0, chan_last = 0;
  op_kind_e op = OP_NONE;
  logic signed [3:0] w_data = 0;
  logic signed [7:0] b_data = 0;
  logic signed [15:0] vth = 0, v_mem_l, v_mem_i;
  logic sv_l, sp_l, sv_i, sp_i;
  int checks = 0, failures = 0, fires = 0;
  lif_neuron #(.LEAK(1'b1)) u_lif (.clk, .rst_n, .en, .op, .w_data, .b_data, .vth, .chan_last,
                                   .spike_valid(sv_l), .spike(sp_l), .v_mem(v_mem_l));
  lif_neuron #(.LEAK(1'b0)) u_if  (.clk, .rst_n, .en, .op, .w_data, .b_data, .vth, .chan_last,
                                   .spike_valid(sv_i), .spike(sp_i), .v_mem(v_mem_i));

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int acc = 0, vl = 0, vi = 0, tcount = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int k;
      @(negedge clk);
      en = ($urandom % 8) != 0;
      k = $urandom % 6;
      op = (k < 4) ? OP_PAIR : (k == 4 ? OP_BIAS : OP_NONE);
      w_data = 4'($urandom); b_data = 8'(int'($urandom % 9) - 3); vth = 16'($urandom % 12);
      chan_last = (tcount == 3);
      @(posedge clk); #1;
      if (en) begin
        if (op == OP_PAIR) acc += w_data;
        if (op == OP_BIAS) begin
          int cur; bit el, ei;
          cur = acc + b_data; acc = 0;
          vl = vl + ((cur - vl) >>> 1);
          vi = vi + cur;
          el = vl > vth; ei = vi > vth;
          if (el || chan_last) vl = 0;
          if (ei || chan_last) vi = 0;
          tcount = (tcount + 1) % 4;
          checks++;
          if (!sv_l || sp_l !== el || !sv_i || sp_i !== ei) begin
            failures++; $display("op %0d: lif %b/%b if %b/%b", i, sp_l, el, sp_i, ei);
          end
          fires += el;
        end else begin
          checks++;
          if (sv_l || sv_i) begin failures++; $display("spike_valid without bias at %0d", i); end
        end
      end
    end
    checks++;
    if (fires == 0) begin failures++; $display("neuron never fired"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
