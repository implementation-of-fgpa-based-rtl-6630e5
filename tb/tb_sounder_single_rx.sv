// tb_sounder_single_rx: end-to-end test of the single-receive-channel build
// (one receive chain with a 512-tap correlator) with a 511-chip sequence.
//
// Same structure and checks as tb_channel_sounder_top, with the top set to
// NUM_RX = 1 and CORR_TAPS = 512, an order-9 maximal-length polynomial
// (x^9 + x^5 + 1, 511 chips) and an averaging factor of 4: every averaged
// power delay profile value is compared with an independent model, the two
// strongest taps must sit at the modelled path delays (0 and 33 chips), and
// the same mechanisms (pre-start drop, start, coefficient-load hold-off,
// output backpressure, packets, readback, Block Reset) must each occur.
module tb_sounder_single_rx;
  import chsnd_pkg::*;
  import chsnd_tb_pkg::*;

  localparam int NRX = 1, L = 511, ORDER = 9, K = 4, LOGK = 2, NSYM = 2 * K;
  localparam logic [9:0] POLY = 10'h110, SEED = 10'h001;
  // channel model: gains in eighths at two delays per receive chain
  localparam int G0 [NRX] = '{8};
  localparam int G1 [NRX] = '{-4};
  localparam int D1 [NRX] = '{33};

  logic clk = 0, rst_n = 1;
  logic set_stb = 0;
  logic [3:0] set_dst = 0;
  logic [7:0] set_addr = 0;
  logic [31:0] set_data = 0;
  logic [63:0] rb_spreader, rb_correlator [NRX], rb_averaging [NRX];
  sc16_t tx_in_data = '0, tx_out_data;
  logic tx_in_valid = 0, tx_in_ready, tx_out_valid, tx_out_last;
  logic tx_out_ready = 1;
  sc16_t rx_in_data [NRX];
  logic [NRX-1:0] rx_in_valid = '0, rx_in_ready;
  pwr_t pdp_data [NRX];
  logic [NRX-1:0] pdp_valid, pdp_last, pdp_ready = '1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // falling edge so every flop resets before the first clock

  channel_sounder_top #(.NUM_RX(1), .CORR_TAPS(512)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input int dst, input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); set_stb = 1; set_dst = 4'(dst); set_addr = a; set_data = d;
    @(negedge clk); set_stb = 0;
  endtask

  // mechanism counters
  int n_dropped = 0, n_start = 0, n_load_hold = 0, n_out_stall = 0, n_in_stall = 0;
  int n_tx_hold = 0, n_pkt = 0, n_readback = 0, n_blkrst = 0;

  chips_t c;
  sc16_t txhist [$];                    // newest first, all transmitted chips
  sc16_t rxq [NRX][$];                  // samples waiting to enter each receive chain
  longint hre [NRX][$], him [NRX][$];   // accepted receive samples, newest first
  longint unsigned corrq [NRX][$];      // expected correlator outputs
  longint unsigned acc [NRX][L];
  int nacc [NRX], vecpos [NRX];
  pwr_t expq [NRX][$];
  pwr_t got [NRX][$];
  int bad [NRX], lbad [NRX], nout [NRX];
  bit started = 0;
  int cyc = 0, chip_first = -1, chip_last = -1, nchips = 0;

  function automatic int tx_part(input int delay, input int comp);
    if (txhist.size() <= delay) return 0;
    return (comp != 0) ? int'(txhist[delay].im) : int'(txhist[delay].re);
  endfunction

  // Transmit chips -> channel model -> receive queues.
  always @(posedge clk) if (rst_n) begin  // monitors ignore the reset period
    cyc++;
    if (tx_in_valid && !tx_in_ready) n_tx_hold++;
    if (tx_out_valid && tx_out_ready) begin
      if (chip_first < 0) chip_first = cyc;
      chip_last = cyc;
      nchips++;
      txhist.push_front(tx_out_data);
      for (int r = 0; r < NRX; r++) begin
        int re, im;
        re = (G0[r] * tx_part(0, 0) + G1[r] * tx_part(D1[r], 0)) / 8
             + $urandom_range(0, 256) - 128;
        im = (G0[r] * tx_part(0, 1) + G1[r] * tx_part(D1[r], 1)) / 8
             + $urandom_range(0, 256) - 128;
        rxq[r].push_back(sc16_t'{re: 16'(re), im: 16'(im)});
      end
    end
  end

  // Receive-side reference: correlation power per accepted sample, then averaging.
  always @(posedge clk) if (rst_n) begin  // monitors ignore the reset period
    for (int r = 0; r < NRX; r++) begin
      if (rx_in_valid[r] && !rx_in_ready[r]) begin
        if (started) n_in_stall++;
      end
      if (rx_in_valid[r] && rx_in_ready[r]) begin
        if (!started) n_dropped++;
        else begin
          longint xr [], xi [];
          longint unsigned p;
          void'(rxq[r].pop_front());
          hre[r].push_front(longint'(rx_in_data[r].re));
          him[r].push_front(longint'(rx_in_data[r].im));
          xr = new[L]; xi = new[L];
          for (int l = 0; l < L; l++) begin
            xr[l] = (l < hre[r].size()) ? hre[r][l] : 0;
            xi[l] = (l < him[r].size()) ? him[r][l] : 0;
          end
          p = corr_power(c, L, xr, xi, 16);
          acc[r][vecpos[r]] = (nacc[r] == 0 ? 0 : acc[r][vecpos[r]]) + p;
          if (nacc[r] == K - 1) expq[r].push_back(pwr_t'(acc[r][vecpos[r]] >> LOGK));
          vecpos[r]++;
          if (vecpos[r] == L) begin vecpos[r] = 0; nacc[r] = (nacc[r] + 1) % K; end
        end
      end
      if (pdp_valid[r] && !pdp_ready[r]) n_out_stall++;
      if (pdp_valid[r] && pdp_ready[r]) begin
        pwr_t e;
        got[r].push_back(pdp_data[r]);
        if (expq[r].size() == 0) bad[r]++;
        else begin
          e = expq[r].pop_front();
          if (pdp_data[r] != e) begin
            bad[r]++;
            if (bad[r] < 4) $display("FAIL: rx %0d value %0d got %0d exp %0d", r, nout[r], pdp_data[r], e);
          end
        end
        if (pdp_last[r] != ((nout[r] % L) == L - 1)) lbad[r]++;
        if (pdp_last[r]) n_pkt++;
        nout[r]++;
      end
    end
  end

  // Receive drivers: present the oldest queued sample; before start, random
  // samples are fed directly.
  bit prestart_feed = 0;
  always @(negedge clk) begin
    for (int r = 0; r < NRX; r++) begin
      if (prestart_feed) begin
        rx_in_valid[r] = 1;
        rx_in_data[r] = sc16_t'{re: 16'($urandom), im: 16'($urandom)};
      end else if (started && rxq[r].size() > 0) begin
        rx_in_valid[r] = 1;
        rx_in_data[r] = rxq[r][0];
      end else begin
        rx_in_valid[r] = 0;
      end
    end
  end

  initial begin
    int i1, i2, ok;
    pwr_t p1, p2;
    c = pn_chips(POLY, SEED, ORDER, L);
    for (int r = 0; r < NRX; r++) begin
      nacc[r] = 0; vecpos[r] = 0; bad[r] = 0; lbad[r] = 0; nout[r] = 0;
      rx_in_data[r] = '0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // program the engines
    wr(0, SR_SPR_POLY_SEED, {6'd0, POLY, 6'd0, SEED});
    wr(0, SR_SPR_LENS, {16'(L), 16'(ORDER)});
    for (int r = 0; r < NRX; r++) begin
      wr(2 * r + 1, SR_COR_POLY_SEED, {6'd0, POLY, 6'd0, SEED});
      wr(2 * r + 1, SR_COR_LENS, {16'(L), 16'(ORDER)});
      wr(2 * r + 2, SR_AVG_CFG, {16'(LOGK), 16'(L)});
    end
    // readback of every engine's configuration
    wr(0, SR_RB_ADDR, 2);
    check(rb_spreader[31:0] == {16'(L), 16'(ORDER)}, "spreader readback"); n_readback++;
    for (int r = 0; r < NRX; r++) begin
      wr(2 * r + 1, SR_RB_ADDR, 3);
      wr(2 * r + 2, SR_RB_ADDR, 1);
      check(rb_correlator[r][31:0] == {16'(L), 16'(ORDER)}, "correlator readback");
      check(rb_averaging[r][31:0] == {16'(LOGK), 16'(L)}, "averaging readback");
      n_readback += 2;
    end
    // samples arriving before start are dropped
    prestart_feed = 1;
    repeat (20) @(negedge clk);
    prestart_feed = 0;
    @(negedge clk);
    // start both correlators; wait for the coefficient load
    for (int r = 0; r < NRX; r++) wr(2 * r + 1, SR_COR_START, 0);
    @(negedge clk); set_stb = 1; set_addr = SR_COR_START; set_data = 1;
    for (int r = 0; r < NRX; r++) begin set_dst = 4'(2 * r + 1); @(negedge clk); end
    set_stb = 0;
    @(posedge clk);
    started = 1;
    n_start = NRX;
    repeat (2) @(negedge clk);
    while (rx_in_ready != '1) begin n_load_hold++; @(negedge clk); end
    // transmit: the same unit-magnitude symbol (0.7071 * 16384 on each part)
    fork
      begin
        tx_in_data = '{re: 16'sd11585, im: 16'sd11585};
        for (int s = 0; s < NSYM; s++) begin
          tx_in_valid = 1;
          @(posedge clk); while (!tx_in_ready) @(posedge clk);
          @(negedge clk);
        end
        tx_in_valid = 0;
      end
      begin
        // host backpressure for a while in the second window
        wait (nout[0] >= L + 10);
        @(negedge clk);
        repeat (600) begin @(negedge clk); pdp_ready = NRX'($urandom_range(0, 3)); end
        pdp_ready = '1;
      end
    join
    for (int r = 0; r < NRX; r++) wait (nout[r] == 2 * L);
    repeat (10) @(negedge clk);
    check(nchips == NSYM * L, $sformatf("%0d chips for %0d symbols", nchips, NSYM));
    check(chip_last - chip_first + 1 == NSYM * L, "chip stream not one per cycle");
    for (int r = 0; r < NRX; r++) begin
      check(bad[r] == 0, $sformatf("rx %0d: %0d profile values wrong", r, bad[r]));
      check(lbad[r] == 0, $sformatf("rx %0d: packet ends wrong", r));
      check(nout[r] * K == hre[r].size(), $sformatf("rx %0d: %0d outputs for %0d samples", r, nout[r], hre[r].size()));
      // strongest two taps of the last profile: line of sight and echo
      p1 = 0; p2 = 0; i1 = -1; i2 = -1;
      for (int i = L; i < 2 * L; i++) begin
        if (got[r][i] > p1) begin p2 = p1; i2 = i1; p1 = got[r][i]; i1 = i - L; end
        else if (got[r][i] > p2) begin p2 = got[r][i]; i2 = i - L; end
      end
      check(i1 == L - 1 && i2 == (L - 1 + D1[r]) % L,
            $sformatf("rx %0d: taps at %0d and %0d", r, i1, i2));
    end
    // block reset of the spreader stops the transmit stream
    wr(0, SR_BLOCK_RESET, 1);
    tx_in_valid = 1;
    repeat (4) @(negedge clk);
    check(!tx_in_ready && !tx_out_valid, "spreader active during block reset");
    if (!tx_in_ready) n_blkrst++;
    tx_in_valid = 0;
    wr(0, SR_BLOCK_RESET, 0);
    // every mechanism must have happened
    check(n_dropped > 0, "no pre-start samples dropped");
    check(n_start == NRX, "start pulses");
    check(n_load_hold > 0, "no coefficient-load hold-off");
    check(n_out_stall > 0, "no output backpressure");
    check(n_in_stall > 0, "backpressure never reached the receive input");
    check(n_tx_hold > 0, "spreader never held its input");
    check(n_pkt == 2 * NRX, $sformatf("%0d profile packets", n_pkt));
    check(n_readback > 0 && n_blkrst > 0, "readback / block reset");
    $display("mechanisms: dropped=%0d start=%0d load_hold=%0d out_stall=%0d in_stall=%0d tx_hold=%0d packets=%0d readback=%0d block_reset=%0d",
             n_dropped, n_start, n_load_hold, n_out_stall, n_in_stall, n_tx_hold, n_pkt, n_readback, n_blkrst);
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
