// tb_averaging_ce: self-checking test of the averaging engine.
//
// Programs SR 132 with LogAvgSize 3 (K = 8) and SeqLen 16, checks readback
// RB 0..1, sends three windows of random powers and compares the averages
// (floor(sum/8)) and m_last. Then asserts Block Reset in the middle of a
// vector, checks that the engine is idle, reprograms K = 2 and checks that
// counting restarts at the first sample after the reset.
module tb_averaging_ce;
  import chsnd_pkg::*;

  logic clk = 0, rst_n = 1;
  logic set_stb = 0;
  logic [7:0] set_addr = 0;
  logic [31:0] set_data = 0;
  logic [63:0] rb_data;
  pwr_t s_data = '0, m_data;
  logic s_valid = 0, s_ready, m_valid, m_last, m_ready = 1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // falling edge so every flop resets before the first clock

  averaging_ce dut (.clk, .rst_n, .set_stb, .set_addr, .set_data, .rb_data,
                    .s_data, .s_valid, .s_ready, .m_data, .m_valid, .m_last, .m_ready);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); set_stb = 1; set_addr = a; set_data = d;
    @(negedge clk); set_stb = 0;
  endtask

  pwr_t outs [$];
  bit lasts [$];
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin outs.push_back(m_data); lasts.push_back(m_last); end

  task automatic send(input pwr_t v);
    s_data = v; s_valid = 1;
    @(posedge clk); while (!s_ready) @(posedge clk);
    @(negedge clk); s_valid = 0;
  endtask

  task automatic windows(input int len, input int k, input int nw);
    longint unsigned acc [];
    pwr_t exp_q [$];
    int bad = 0, lbad = 0;
    acc = new[len];
    outs.delete(); lasts.delete();
    for (int w = 0; w < nw; w++) begin
      for (int i = 0; i < len; i++) acc[i] = 0;
      for (int v = 0; v < k; v++)
        for (int i = 0; i < len; i++) begin
          pwr_t x = $urandom;
          acc[i] += x;
          send(x);
        end
      for (int i = 0; i < len; i++) exp_q.push_back(pwr_t'(acc[i] / k));
    end
    repeat (5) @(negedge clk);
    check(outs.size() == len * nw, $sformatf("%0d outputs, expected %0d", outs.size(), len * nw));
    for (int i = 0; i < outs.size() && i < exp_q.size(); i++) begin
      if (outs[i] != exp_q[i]) bad++;
      if (lasts[i] != ((i % len) == len - 1)) lbad++;
    end
    check(bad == 0 && lbad == 0, $sformatf("K %0d: %0d wrong averages, %0d wrong last", k, bad, lbad));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(SR_AVG_CFG, {16'd3, 16'd16});
    wr(SR_RB_ADDR, 0); check(rb_data == 64'd0, "readback block reset");
    wr(SR_RB_ADDR, 1); check(rb_data == {32'd0, 16'd3, 16'd16}, "readback config");
    windows(16, 8, 3);
    // partial vector, then block reset
    for (int i = 0; i < 5; i++) send($urandom);
    wr(SR_BLOCK_RESET, 1);
    s_valid = 1;
    repeat (3) @(negedge clk);
    check(!s_ready && !m_valid, "engine active in block reset");
    s_valid = 0;
    wr(SR_AVG_CFG, {16'd1, 16'd16});
    wr(SR_BLOCK_RESET, 0);
    windows(16, 2, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
