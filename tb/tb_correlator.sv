// tb_correlator: self-checking test of the complex correlator.
//
// The correlator (default 512 taps) is driven by a pn_seq_gen. Samples sent
// before the start pulse must be dropped. After start it loads the order-8
// sequence (length 255), during which the input must be held off for 255
// cycles. Then a received signal is sent: the spread sequence times a complex
// symbol through a two-path channel plus random noise. Every output is
// compared with a direct evaluation of |sum_l c[L-1-l] x[n-l]|^2 >> 16 over
// the sample history; m_last must mark every 255th output; the strongest
// output of each period must sit at the line-of-sight position. The rate
// (one output per cycle) and the latency (clog2(512)+3 = 12 cycles) are
// checked in a gap-free phase; a second phase adds random backpressure. A
// second start with the order-6 sequence (length 63) checks reprogramming.
module tb_correlator;
  import chsnd_pkg::*;
  import chsnd_tb_pkg::*;

  localparam int N = 512, LAT = $clog2(N) + 3;
  logic clk = 0, rst_n = 1, start = 0;
  logic [15:0] seq_len = 255;
  logic [9:0] poly = 10'h0B8, seed = 10'h001;
  logic [3:0] order = 8;
  logic pn_load, pn_step, pn_bit;
  sc16_t s_data = '0;
  logic s_valid = 0, s_ready;
  pwr_t m_data;
  logic m_valid, m_last, m_ready = 1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // falling edge so every flop resets before the first clock

  pn_seq_gen u_pn (.clk, .rst_n, .load(pn_load), .step(pn_step), .poly, .seed, .order,
                   .pn_bit, .state());
  correlator dut (.clk, .rst_n, .start, .seq_len, .pn_load, .pn_step, .pn_bit,
                  .s_data, .s_valid, .s_ready, .m_data, .m_valid, .m_last, .m_ready);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  chips_t c;
  int L;
  longint hre [$], him [$];          // newest first
  longint unsigned expq [$];
  int cyc = 0, in_cyc [$], lat_bad = 0, bad = 0, last_bad = 0, nout = 0, pre_out = 0;
  int first_out = -1, last_out = -1;

  always @(posedge clk) if (rst_n) begin  // monitors ignore the reset period
    cyc++;
    if (s_valid && s_ready && dut.state_q == 2'd2) begin
      longint xr [], xi [];
      hre.push_front(longint'(s_data.re)); him.push_front(longint'(s_data.im));
      void'(hre.pop_back()); void'(him.pop_back());
      xr = new[L]; xi = new[L];
      for (int l = 0; l < L; l++) begin xr[l] = hre[l]; xi[l] = him[l]; end
      expq.push_back(corr_power(c, L, xr, xi, 16));
      in_cyc.push_back(cyc);
    end
    if (m_valid && m_ready) begin
      longint unsigned e;
      int ic;
      if (expq.size() == 0) pre_out++;
      else begin
        e = expq.pop_front(); ic = in_cyc.pop_front();
        if (m_data != e) begin bad++; if (bad < 5) $display("FAIL: out %0d got %0d exp %0d", nout, m_data, e); end
        if (m_ready_always && cyc - ic != LAT) lat_bad++;
        if (m_last != ((nout % L) == L - 1)) last_bad++;
      end
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      nout++;
    end
  end

  bit m_ready_always = 1;

  // received sample n: A*sym*chip(n) + B*sym*chip(n-5) + noise
  function automatic sc16_t rx_sample(input int n, input int a, input int b);
    int cn = c[n % L] ? 1 : -1;
    int cd = (n >= 5) ? (c[(n - 5) % L] ? 1 : -1) : 0;
    int re = 3000 * (a * cn + b * cd) / 8 + $urandom_range(0, 200) - 100;
    int im = -1500 * (a * cn + b * cd) / 8 + $urandom_range(0, 200) - 100;
    return sc16_t'{re: 16'(re), im: 16'(im)};
  endfunction

  task automatic do_start(input int len);
    L = len;
    c = pn_chips(poly, seed, order, L);
    hre.delete(); him.delete();
    for (int i = 0; i < L; i++) begin hre.push_back(0); him.push_back(0); end
    nout = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
  endtask

  initial begin
    int hold, peaks_ok;
    longint unsigned pk; int pk_i;
    pwr_t outs [$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // before start: samples are accepted and dropped
    s_valid = 1; s_data = '{re: 100, im: 5};
    repeat (20) @(negedge clk);
    check(s_ready == 1, "input not accepted before start");
    s_valid = 0;
    repeat (LAT + 2) @(negedge clk);
    check(nout == 0, "output before start");
    // start: coefficient load holds the input off for L cycles
    do_start(255);
    s_valid = 1;
    hold = 0;
    while (!s_ready) begin hold++; @(negedge clk); end
    check(hold == 255, $sformatf("coefficient load took %0d cycles", hold));
    // phase 1: 4 periods gap-free, always ready
    for (int n = 0; n < 4 * L; n++) begin
      s_data = rx_sample(n, 8, 4);
      @(negedge clk);
    end
    s_valid = 0;
    repeat (LAT + 2) @(negedge clk);
    check(nout == 4 * L, $sformatf("phase 1 outputs %0d", nout));
    check(last_out - first_out + 1 == 4 * L, "phase 1 not one output per cycle");
    check(lat_bad == 0, $sformatf("latency not %0d cycles (%0d)", LAT, lat_bad));
    // phase 2: random backpressure, 3 more periods
    m_ready_always = 0;
    fork
      forever begin @(negedge clk); m_ready = ($urandom_range(0, 3) != 0); end
    join_none
    for (int n = 4 * L; n < 7 * L; n++) begin
      s_data = rx_sample(n, 8, 4); s_valid = 1;
      @(posedge clk); while (!s_ready) @(posedge clk);
      @(negedge clk);
    end
    s_valid = 0;
    repeat (200) @(negedge clk);
    check(nout == 7 * L, $sformatf("phase 2 outputs %0d", nout));
    check(bad == 0, $sformatf("%0d power mismatches", bad));
    check(last_bad == 0, "m_last misplaced");
    check(pre_out == 0, "unexpected outputs");
    // restart with the order-6 sequence, length 63; collect outputs and find peaks
    disable fork;
    m_ready = 1; m_ready_always = 1;
    poly = 10'h030; seed = 10'h020; order = 6; seq_len = 63;
    do_start(63);
    outs.delete();
    fork
      forever begin @(posedge clk); if (m_valid && m_ready) outs.push_back(m_data); end
    join_none
    for (int n = 0; n < 3 * L; n++) begin
      s_data = rx_sample(n, 8, 0); s_valid = 1;
      @(posedge clk); while (!s_ready) @(posedge clk);
      @(negedge clk);
    end
    s_valid = 0;
    repeat (LAT + 2) @(negedge clk);
    disable fork;
    // outputs at positions 62 + k*63 carry the full-sequence peak
    peaks_ok = 1;
    for (int p = 1; p < 3; p++) begin
      pk = 0; pk_i = -1;
      for (int i = p * L; i < (p + 1) * L; i++) if (outs[i] > pk) begin pk = outs[i]; pk_i = i; end
      if (pk_i != p * L + L - 1) peaks_ok = 0;
    end
    check(outs.size() == 3 * L, $sformatf("restart outputs %0d", outs.size()));
    check(peaks_ok == 1, "correlation peak not at the sequence end");
    check(bad == 0 && last_bad == 0, "restart values");
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
