// tb_correlator_ce: self-checking test of the correlator engine.
//
// Programs SR 133 (polynomial/seed) and SR 134 (length/order) for the order-8
// sequence of 255 chips, checks readback RB 0..3, then starts the engine by
// writing 0 and 1 to SR 132 (Block Start, through the edge detector). Samples
// sent before the start are dropped. A received signal (the spread sequence
// times a complex symbol, line-of-sight plus an echo 9 chips later, plus noise)
// is sent for three periods; every output is compared with a direct
// evaluation of the correlation power, and the two largest outputs of the
// last period must be the line-of-sight and echo positions. Block Reset
// (SR 131) must hold the engine idle.
module tb_correlator_ce;
  import chsnd_pkg::*;
  import chsnd_tb_pkg::*;

  localparam int L = 255;
  logic clk = 0, rst_n = 1;
  logic set_stb = 0;
  logic [7:0] set_addr = 0;
  logic [31:0] set_data = 0;
  logic [63:0] rb_data;
  sc16_t s_data = '0;
  pwr_t m_data;
  logic s_valid = 0, s_ready, m_valid, m_last, m_ready = 1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // falling edge so every flop resets before the first clock

  correlator_ce dut (.clk, .rst_n, .set_stb, .set_addr, .set_data, .rb_data,
                     .s_data, .s_valid, .s_ready, .m_data, .m_valid, .m_last, .m_ready);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); set_stb = 1; set_addr = a; set_data = d;
    @(negedge clk); set_stb = 0;
  endtask

  task automatic rb(input int a, input logic [31:0] exp, input string name);
    wr(SR_RB_ADDR, 32'(a));
    check(rb_data == {32'd0, exp}, $sformatf("readback %s: %h", name, rb_data));
  endtask

  chips_t c;
  longint hre [$], him [$];
  pwr_t outs [$];
  longint unsigned exps [$];
  bit running = 0;

  always @(posedge clk) if (rst_n) begin  // monitors ignore the reset period
    if (running && s_valid && s_ready) begin
      longint xr [], xi [];
      hre.push_front(longint'(s_data.re)); him.push_front(longint'(s_data.im));
      void'(hre.pop_back()); void'(him.pop_back());
      xr = new[L]; xi = new[L];
      for (int l = 0; l < L; l++) begin xr[l] = hre[l]; xi[l] = him[l]; end
      exps.push_back(corr_power(c, L, xr, xi, 16));
    end
    if (m_valid && m_ready) outs.push_back(m_data);
  end

  function automatic sc16_t rx(input int n);
    int a = c[n % L] ? 1 : -1;
    int b = (n >= 9) ? (c[(n - 9) % L] ? 1 : -1) : 0;
    return sc16_t'{re: 16'(2000 * a + 700 * b + $urandom_range(0, 400) - 200),
                   im: 16'(1200 * a - 500 * b + $urandom_range(0, 400) - 200)};
  endfunction

  initial begin
    int bad = 0, i1, i2;
    pwr_t p1, p2;
    c = pn_chips(10'h0B8, 10'h001, 8, L);
    for (int i = 0; i < L; i++) begin hre.push_back(0); him.push_back(0); end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(SR_COR_POLY_SEED, {16'h00B8, 16'h0001});
    wr(SR_COR_LENS, {16'(L), 16'd8});
    rb(0, 0, "block reset");
    rb(1, 0, "block start");
    rb(2, {16'h00B8, 16'h0001}, "poly/seed");
    rb(3, {16'(L), 16'd8}, "lens");
    // not started: samples dropped
    s_valid = 1; s_data = rx(3);
    repeat (10) @(negedge clk);
    s_valid = 0;
    repeat (20) @(negedge clk);
    check(outs.size() == 0, "output before start");
    wr(SR_COR_START, 0);
    wr(SR_COR_START, 1);
    rb(1, 1, "block start set");
    running = 1;
    for (int n = 0; n < 3 * L; n++) begin
      s_data = rx(n); s_valid = 1;
      @(posedge clk); while (!s_ready) @(posedge clk);
      @(negedge clk);
    end
    s_valid = 0;
    repeat (30) @(negedge clk);
    check(outs.size() == 3 * L, $sformatf("%0d outputs", outs.size()));
    for (int i = 0; i < outs.size() && i < exps.size(); i++) if (outs[i] != exps[i]) bad++;
    check(bad == 0, $sformatf("%0d power mismatches", bad));
    p1 = 0; p2 = 0; i1 = -1; i2 = -1;
    for (int i = 2 * L; i < 3 * L; i++) begin
      if (outs[i] > p1) begin p2 = p1; i2 = i1; p1 = outs[i]; i1 = i; end
      else if (outs[i] > p2) begin p2 = outs[i]; i2 = i; end
    end
    check(i1 == 2 * L + L - 1 && i2 == 2 * L + 8, $sformatf("peaks at %0d and %0d", i1 - 2 * L, i2 - 2 * L));
    // block reset
    wr(SR_BLOCK_RESET, 1);
    s_valid = 1;
    repeat (5) @(negedge clk);
    check(!s_ready && !m_valid, "engine active in block reset");
    s_valid = 0;
    wr(SR_BLOCK_RESET, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
