// tb_spreader_ce: self-checking test of the spreader engine.
//
// Programs the engine over its settings bus (SR 132 polynomial/seed,
// SR 133 sequence length/order) with the paper's measurement setting: an
// order-8 maximal-length sequence of 255 chips. Reads every register back
// through SR 255 / RB 0..2, spreads three symbols (one of them the
// unit-magnitude symbol at full scale) and compares all chips with the
// reference sequence, checks the 255x rate expansion, then checks that Block
// Reset (SR 131) holds the datapath idle and that it recovers.
module tb_spreader_ce;
  import chsnd_pkg::*;
  import chsnd_tb_pkg::*;

  localparam int L = 255;
  logic clk = 0, rst_n = 1;
  logic set_stb = 0;
  logic [7:0] set_addr = 0;
  logic [31:0] set_data = 0;
  logic [63:0] rb_data;
  sc16_t s_data = '0, m_data;
  logic s_valid = 0, s_ready, m_valid, m_last, m_ready = 1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial #1 rst_n = 0;  // falling edge so every flop resets before the first clock

  spreader_ce dut (.clk, .rst_n, .set_stb, .set_addr, .set_data, .rb_data,
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
  sc16_t syms [3];
  int nchips = 0, bad = 0, lbad = 0, first = -1, last = -1, cyc = 0;
  always @(posedge clk) if (rst_n) begin  // monitors ignore the reset period
    cyc++;
    if (m_valid && m_ready) begin
      sc16_t s, e;
      s = syms[nchips / L];
      e = c[nchips % L] ? s : sc16_t'{re: neg16(s.re), im: neg16(s.im)};
      if (m_data != e) bad++;
      if (m_last != ((nchips % L) == L - 1)) lbad++;
      if (first < 0) first = cyc;
      last = cyc;
      nchips++;
    end
  end

  initial begin
    c = pn_chips(10'h0B8, 10'h0A5, 8, L);
    syms[0] = '{re: 16'sd32767, im: 16'sd0};
    syms[1] = '{re: -16'sd23170, im: 16'sd23170};
    syms[2] = '{re: 16'sd5, im: -16'sd32768};
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(SR_SPR_POLY_SEED, {16'h00B8, 16'h00A5});
    wr(SR_SPR_LENS, {16'(L), 16'd8});
    rb(0, 32'd0, "block reset");
    rb(1, {16'h00B8, 16'h00A5}, "poly/seed");
    rb(2, {16'(L), 16'd8}, "lens");
    for (int i = 0; i < 3; i++) begin
      s_data = syms[i]; s_valid = 1;
      @(posedge clk); while (!s_ready) @(posedge clk);
      @(negedge clk);
    end
    s_valid = 0;
    repeat (L + 5) @(negedge clk);
    check(nchips == 3 * L, $sformatf("%0d chips for 3 symbols", nchips));
    check(bad == 0 && lbad == 0, $sformatf("chip errors %0d, last errors %0d", bad, lbad));
    check(last - first + 1 == 3 * L, "chips not one per cycle");
    // block reset holds the engine idle
    wr(SR_BLOCK_RESET, 32'd1);
    rb(0, 32'd1, "block reset set");
    s_data = syms[0]; s_valid = 1;
    repeat (5) @(negedge clk);
    check(!m_valid && !s_ready, "datapath active during block reset");
    s_valid = 0;
    wr(SR_BLOCK_RESET, 32'd0);
    nchips = 0; bad = 0; lbad = 0;
    s_data = syms[0]; s_valid = 1;
    @(posedge clk); while (!s_ready) @(posedge clk);
    @(negedge clk); s_valid = 0;
    repeat (L + 5) @(negedge clk);
    check(nchips == L && bad == 0 && lbad == 0, "spreading after block reset");
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
