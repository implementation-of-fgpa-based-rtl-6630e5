// tb_averager: self-checking test of the averaging block.
//
// Configuration 1 is the paper's measurement setting: vectors of 255 powers,
// K = 16 (log_avg 4). Full-range random 32-bit inputs are sent for two
// averaging windows; each output must equal floor(sum of the 16 values at
// that position / 16), m_last must mark position 254, and with an always-ready
// output the input must be accepted every cycle (the rate drops by K only at
// the output). Configuration 2 uses K = 128 and vectors of 2 under random
// backpressure; configuration 3 checks that log_avg above 7 is treated as 7
// and K = 1 passes data through unchanged. A watchdog ends the run.
module tb_averager;
  import chsnd_pkg::*;

  logic clk = 0, rst_n = 1;
  logic [15:0] seq_len = 255, log_avg = 4;
  pwr_t s_data = '0, m_data;
  logic s_valid = 0, s_ready, m_valid, m_last, m_ready = 1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // falling edge so every flop resets before the first clock

  averager dut (.clk, .rst_n, .seq_len, .log_avg, .s_data, .s_valid, .s_ready,
                .m_data, .m_valid, .m_last, .m_ready);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  pwr_t outs [$];
  bit   lasts [$];
  always @(posedge clk) if (rst_n && m_valid && m_ready) begin outs.push_back(m_data); lasts.push_back(m_last); end

  task automatic run(input int len, input int lg, input int windows, input bit bp, input bit maxval);
    longint unsigned acc [];
    int k = 1 << ((lg > 7) ? 7 : lg);
    int bad = 0, lbad = 0, stalls = 0;
    pwr_t exp_q [$];
    acc = new[len];
    rst_n = 0; @(negedge clk); rst_n = 1;
    seq_len = 16'(len); log_avg = 16'(lg);
    outs.delete(); lasts.delete();
    for (int w = 0; w < windows; w++) begin
      for (int i = 0; i < len; i++) acc[i] = 0;
      for (int v = 0; v < k; v++)
        for (int i = 0; i < len; i++) begin
          pwr_t x = maxval ? 32'hFFFF_FFFF : $urandom;
          acc[i] += x;
          if (v == k - 1) exp_q.push_back(pwr_t'(acc[i] / k));
          s_data = x; s_valid = 1;
          @(posedge clk);
          while (!s_ready) begin stalls++; @(posedge clk); end
          @(negedge clk);
        end
    end
    s_valid = 0;
    repeat (40) @(negedge clk);
    check(outs.size() == exp_q.size(), $sformatf("len %0d K %0d: %0d outputs, expected %0d",
          len, k, outs.size(), exp_q.size()));
    for (int i = 0; i < outs.size() && i < exp_q.size(); i++) begin
      if (outs[i] != exp_q[i]) bad++;
      if (lasts[i] != ((i % len) == len - 1)) lbad++;
    end
    check(bad == 0, $sformatf("len %0d K %0d: %0d wrong averages", len, k, bad));
    check(lbad == 0, $sformatf("len %0d K %0d: m_last misplaced %0d", len, k, lbad));
    if (!bp) check(stalls == 0, $sformatf("input stalled %0d cycles with ready output", stalls));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(255, 4, 2, 0, 0);
    run(255, 4, 1, 0, 1);          // all-ones inputs: no accumulator overflow
    fork
      forever begin @(negedge clk); m_ready = ($urandom_range(0, 2) != 0); end
    join_none
    run(2, 7, 3, 1, 0);
    run(7, 9, 1, 1, 0);            // log_avg 9 -> K = 128
    run(5, 0, 4, 1, 0);            // K = 1
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
