// tb_bias_squeeze: directed sequences for the four cases of the bias rule
// (pair, pair+last, bubble, bubble+last) with the downstream always ready,
// then with the downstream stalled, checking the issued operation and the
// upstream ready cycle by cycle against a hand-written expectation.
module tb_bias_squeeze;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_valid = 0, w_bubble = 0, w_last = 0, w_chan_last = 0, w_ready;
  logic [11:0] w_addr = '0, o_addr;
  logic o_valid, o_is_bias, o_chan_last, o_ready = 1;
  int checks = 0, failures = 0;
  bias_squeeze #(.AW(12)) dut (.*);

  initial begin
    repeat (1000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // drive one cycle, then compare the combinational outputs before the edge
  task automatic step(input bit v, b, l, cl, input int a, input bit ordy,
                      input bit e_ov, e_bias, e_wr, input int e_addr, input bit e_cl);
    @(negedge clk);
    w_valid = v; w_bubble = b; w_last = l; w_chan_last = cl; w_addr = 12'(a); o_ready = ordy;
    #1;
    checks++;
    if (o_valid !== e_ov || (e_ov && o_is_bias !== e_bias) || w_ready !== e_wr ||
        (e_ov && !e_bias && o_addr !== 12'(e_addr)) || (e_ov && e_bias && o_chan_last !== e_cl)) begin
      failures++;
      $display("t=%0t got ov=%b bias=%b wr=%b addr=%0d cl=%b exp ov=%b bias=%b wr=%b addr=%0d cl=%b",
        $time, o_valid, o_is_bias, w_ready, o_addr, o_chan_last, e_ov, e_bias, e_wr, e_addr, e_cl);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    //    v b l cl addr ordy | ov bias wr addr cl
    step(1,0,0,0, 5, 1,   1, 0, 1, 5, 0);   // pair
    step(1,0,1,1, 6, 1,   1, 0, 1, 6, 0);   // pair, last -> bias next cycle
    step(1,0,0,0, 7, 1,   1, 1, 0, 0, 1);   // bias cycle, weight held
    step(1,0,0,0, 7, 1,   1, 0, 1, 7, 0);   // held pair issued now
    step(1,1,0,0, 0, 1,   0, 0, 1, 0, 0);   // bubble: idle cycle
    step(1,1,1,0, 0, 1,   1, 1, 1, 0, 0);   // bubble on last: bias absorbs it
    step(0,0,0,0, 0, 1,   0, 0, 1, 0, 0);   // nothing
    step(1,0,1,0, 9, 0,   1, 0, 0, 9, 0);   // stalled downstream: no accept
    step(1,0,1,0, 9, 1,   1, 0, 1, 9, 0);   // accepted now
    step(0,0,0,0, 0, 0,   1, 1, 0, 0, 0);   // bias waits on stall
    step(0,0,0,0, 0, 1,   1, 1, 0, 0, 0);   // bias issued
    step(0,0,0,0, 0, 1,   0, 0, 1, 0, 0);   // idle
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
