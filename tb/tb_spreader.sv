// tb_spreader: self-checking test of the spreader with a PN generator.
//
// Symbols (including -32768 to exercise saturation) are spread with the
// order-6 sequence (length 63). Every chip is compared with the symbol or its
// negation as given by the reference sequence; m_last must mark chip 62.
// Phase 1 keeps the output always ready and checks the rate: N symbols give
// N*63 chips in N*63 consecutive cycles. Phase 2 applies random backpressure
// and gaps in the input. A watchdog ends the run.
module tb_spreader;
  import chsnd_pkg::*;
  import chsnd_tb_pkg::*;

  localparam int L = 63;
  logic clk = 0, rst_n = 1;
  sc16_t s_data, m_data;
  logic s_valid = 0, s_ready, m_valid, m_last, m_ready = 0;
  logic pn_load, pn_step, pn_bit;
  int checks = 0, failures = 0;
  chips_t ref_c;
  sc16_t syms [$];

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // falling edge so every flop resets before the first clock

  pn_seq_gen u_pn (.clk, .rst_n, .load(pn_load), .step(pn_step), .poly(10'h030),
                   .seed(10'h020), .order(4'd6), .pn_bit, .state());
  spreader dut (.clk, .rst_n, .seq_len(16'(L)), .s_data, .s_valid, .s_ready,
                .m_data, .m_valid, .m_last, .m_ready, .pn_load, .pn_step, .pn_bit);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Output checker
  int chip_idx = 0, sym_idx = 0, out_cnt = 0, first_out = -1, last_out = -1, cyc = 0;
  int bad = 0;
  always @(posedge clk) if (rst_n) begin  // monitors ignore the reset period
    cyc++;
    if (m_valid && m_ready) begin
      sc16_t s, e;
      s = syms[sym_idx];
      e = ref_c[chip_idx] ? s : sc16_t'{re: neg16(s.re), im: neg16(s.im)};
      if (m_data !== e || m_last !== (chip_idx == L - 1)) begin
        bad++;
        if (bad < 5) $display("FAIL: sym %0d chip %0d got %h exp %h last %b", sym_idx, chip_idx, m_data, e, m_last);
      end
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      out_cnt++;
      chip_idx++;
      if (chip_idx == L) begin chip_idx = 0; sym_idx++; end
    end
  end

  task automatic send(input sc16_t v, input bit gaps);
    if (gaps) while ($urandom_range(0, 3) == 0) @(negedge clk);
    s_data = v; s_valid = 1;
    @(posedge clk); while (!s_ready) @(posedge clk);
    @(negedge clk); s_valid = 0;
  endtask

  initial begin
    ref_c = pn_chips(10'h030, 10'h020, 6, L);
    repeat (3) @(negedge clk);
    rst_n = 1;
    // Phase 1: full rate, always ready.
    m_ready = 1;
    for (int i = 0; i < 6; i++) syms.push_back(sc16_t'{re: 16'(i * 1000 - 2500), im: 16'(7 - i * 333)});
    syms[2] = sc16_t'{re: -16'sd32768, im: 16'sd32767};
    fork
      begin
        @(negedge clk);
        s_valid = 1;
        for (int i = 0; i < 6; i++) begin
          s_data = syms[i];
          @(posedge clk); while (!s_ready) @(posedge clk);
          @(negedge clk);
        end
        s_valid = 0;
      end
    join
    wait (out_cnt == 6 * L);
    check(bad == 0, "phase 1 chip values");
    check(last_out - first_out + 1 == 6 * L, $sformatf("phase 1 rate: %0d chips over %0d cycles",
          6 * L, last_out - first_out + 1));
    // Phase 2: random backpressure and input gaps.
    fork
      forever begin @(negedge clk); m_ready = ($urandom_range(0, 2) != 0); end
    join_none
    for (int i = 0; i < 10; i++) begin
      syms.push_back(sc16_t'{re: 16'($urandom), im: 16'($urandom)});
      send(syms[$], 1);
    end
    wait (out_cnt == 16 * L);
    check(bad == 0, "phase 2 chip values under backpressure");
    check(sym_idx == 16, "phase 2 symbol count");
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
