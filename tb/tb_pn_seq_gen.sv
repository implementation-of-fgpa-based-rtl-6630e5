// tb_pn_seq_gen: self-checking test of the programmable LFSR.
//
// For three polynomials (the order-6 example x^6+x^5+1 with seed at stage 6,
// an order-8 and an order-10 maximal-length polynomial) the generator is
// loaded and stepped for two periods. Each chip is compared with a software
// model that keeps the sequence as a bit history and applies the linear
// recurrence a[t+1] = XOR over taps k of a[t+1-k]; the tb also checks that a
// period has 2^(N-1) ones (maximal length) and that the sequence repeats
// after 2^N-1 chips but not earlier. A watchdog ends the run.
module tb_pn_seq_gen;
  logic clk = 0, rst_n = 1;
  logic load = 0, step = 0;
  logic [9:0] poly = 0, seed = 0;
  logic [3:0] order = 0;
  logic pn_bit;
  logic [9:0] state;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // falling edge so every flop resets before the first clock

  pn_seq_gen dut (.clk, .rst_n, .load, .step, .poly, .seed, .order, .pn_bit, .state);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run_poly(input logic [9:0] p, input logic [9:0] s, input int n);
    int len = (1 << n) - 1;
    bit hist [0:4095];   // hist[t + 10] = a[t]; a[t] for t = -9..0 come from the seed
    bit seqv [0:4095];
    int ones = 0, mism = 0, per_ok;
    // initial state: stage k holds a[1-k]
    for (int k = 1; k <= 10; k++) hist[10 + 1 - k] = s[k-1];
    for (int t = 1; t < 2 * len + 10; t++) begin
      bit fb = 0;
      for (int k = 1; k <= 10; k++) if (p[k-1]) fb ^= hist[10 + t - k];
      hist[10 + t] = fb;
    end
    // output at time t is stage n = a[t+1-n]
    poly = p; seed = s; order = 4'(n);
    @(negedge clk); load = 1; @(negedge clk); load = 0;
    for (int t = 0; t < 2 * len; t++) begin
      seqv[t] = pn_bit;
      if (pn_bit !== hist[10 + t + 1 - n]) mism++;
      step = 1; @(negedge clk); step = 0;
    end
    check(mism == 0, $sformatf("order %0d: %0d chips differ from model", n, mism));
    for (int t = 0; t < len; t++) ones += seqv[t];
    check(ones == (1 << (n - 1)), $sformatf("order %0d: %0d ones in a period", n, ones));
    per_ok = 1;
    for (int t = 0; t < len; t++) if (seqv[t] != seqv[t + len]) per_ok = 0;
    check(per_ok == 1, $sformatf("order %0d: period not %0d", n, len));
    // not periodic with a shorter divisor period
    per_ok = 1;
    for (int d = 1; d < len; d++) begin
      if (len % d == 0) begin
        bit same = 1;
        for (int t = 0; t < len; t++) if (seqv[t] != seqv[(t + d) % len]) same = 0;
        if (same) per_ok = 0;
      end
    end
    check(per_ok == 1, $sformatf("order %0d: shorter period found", n));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // order-6 example: taps at stages 5 and 6, seed 1 at stage 6
    run_poly(10'h030, 10'h020, 6);
    // order 8: x^8+x^6+x^5+x^4+1, taps at stages 8,6,5,4
    run_poly(10'h0B8, 10'h001, 8);
    // order 10: x^10+x^7+1, taps at stages 10 and 7
    run_poly(10'h240, 10'h155, 10);
    // load has priority and the state matches the seed
    @(negedge clk); seed = 10'h2A5; load = 1; step = 1; @(negedge clk); load = 0; step = 0;
    check(state == 10'h2A5, "load did not take priority over step");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
