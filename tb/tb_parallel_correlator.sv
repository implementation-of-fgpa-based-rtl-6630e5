// tb_parallel_correlator: self-checking test of the real parallel correlator.
//
// Two instances: the default 512 taps and an odd size (37 taps, padded tree).
// Random samples are shifted in every cycle with random +1/-1/0
// coefficients; the output is compared with a direct sum over the sample
// history, LEVELS cycles later (the adder-tree depth). A full-scale case
// (all samples -32768, all coefficients -1) checks that the tree does not
// overflow, a stalled `adv` must hold the output, and `clear` must zero it.
module tb_parallel_correlator;
  localparam int NA = 512, NB = 37;
  localparam int LA = $clog2(NA), LB = $clog2(NB);
  logic clk = 0, rst_n = 1, clear = 0, shift = 0, adv = 1;
  logic signed [15:0] x_in = 0;
  logic [NA-1:0] en_a, pos_a;
  logic [NB-1:0] en_b, pos_b;
  logic signed [16+LA:0] y_a;
  logic signed [16+LB:0] y_b;
  int checks = 0, failures = 0;
  longint hist [$];      // hist[0] newest
  longint exp_a [$], exp_b [$];

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // falling edge so every flop resets before the first clock

  parallel_correlator dut_a (.clk, .rst_n, .clear, .shift, .x_in, .adv,
                             .coef_en(en_a), .coef_pos(pos_a), .y_out(y_a));
  parallel_correlator #(.N_TAPS(NB)) dut_b (.clk, .rst_n, .clear, .shift, .x_in, .adv,
                             .coef_en(en_b), .coef_pos(pos_b), .y_out(y_b));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic longint ref_sum(input int n, input logic [NA-1:0] en, input logic [NA-1:0] pos);
    longint s = 0;
    for (int l = 0; l < n; l++)
      if (en[l]) s += pos[l] ? hist[l] : -hist[l];
    return s;
  endfunction

  int bad_a = 0, bad_b = 0;
  initial begin
    for (int i = 0; i < NA; i++) hist.push_back(0);
    for (int i = 0; i < NA; i++) begin en_a[i] = $urandom_range(0, 5) != 0; pos_a[i] = $urandom_range(0, 1); end
    for (int i = 0; i < NB; i++) begin en_b[i] = $urandom_range(0, 5) != 0; pos_b[i] = $urandom_range(0, 1); end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // random stream; shift each cycle, compare with expectation queued per cycle
    for (int t = 0; t < 600; t++) begin
      x_in = 16'($urandom); shift = 1;
      @(posedge clk);
      hist.push_front(longint'(x_in)); void'(hist.pop_back());
      exp_a.push_back(ref_sum(NA, en_a, pos_a));
      exp_b.push_back(ref_sum(NB, NA'(en_b), NA'(pos_b)));
      @(negedge clk);
      // After the edge that shifted sample t, y holds the result of sample t-LEVELS.
      if (exp_a.size() == LA + 1) begin
        if (y_a != exp_a.pop_front()) bad_a++;
      end
      if (exp_b.size() == LB + 1) begin
        if (y_b != exp_b.pop_front()) bad_b++;
      end
    end
    check(bad_a == 0, $sformatf("512-tap mismatches: %0d", bad_a));
    check(bad_b == 0, $sformatf("37-tap mismatches: %0d", bad_b));
    // stall: adv low, y must not move even though shifting continues
    begin
      logic signed [16+LA:0] held;
      held = y_a; adv = 0;
      repeat (5) begin x_in = 16'($urandom); @(negedge clk); end
      check(y_a == held, "output moved while adv low");
    end
    // full scale: every tap -32768 with coefficient -1 gives +512*32768
    shift = 0; adv = 1;
    clear = 1; @(negedge clk); clear = 0;
    repeat (LA + 1) @(negedge clk);
    check(y_a == 0, "clear did not zero the taps");
    en_a = '1; pos_a = '0; x_in = -16'sd32768; shift = 1;
    repeat (NA) @(negedge clk);
    shift = 0;
    repeat (LA + 1) @(negedge clk);
    check(y_a == 512 * 32768, $sformatf("full scale sum %0d", y_a));
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
