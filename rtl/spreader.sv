// spreader: direct-sequence spectrum spreader for SC16 symbols.
//
// Every accepted input symbol is sent out `seq_len` times, once per chip of
// the PN sequence: unchanged when the chip is 1 and as its two's complement
// when the chip is 0 (a real +1/-1 sequence, so spreading needs no
// multiplier). The spreading factor therefore equals the sequence length, as
// in the paper. The PN bits come from a separate pn_seq_gen, which the
// spreader reloads with the seed at the start of every symbol, so each symbol
// carries the whole sequence from its first chip; the chip-to-sign mapping
// (1 -> +1), the reload per symbol and the saturation of -32768 to +32767 are
// this design's choices.
//
// Interface: AXI-stream style valid/ready on both sides. The output marks the
// last chip of a symbol with `m_last`. A new symbol is accepted in the same
// cycle as the last chip of the previous one leaves, so with a continuous
// input and an always-ready output the chip stream has no gaps: the output
// rate is `seq_len` times the input rate. First chip appears one cycle after
// the symbol is accepted.
module spreader
  import chsnd_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] seq_len,    // chips per symbol, 0 is taken as 1
  // input symbols
  input  sc16_t       s_data,
  input  logic        s_valid,
  output logic        s_ready,
  // output chips
  output sc16_t       m_data,
  output logic        m_valid,
  output logic        m_last,
  input  logic        m_ready,
  // PN generator control
  output logic        pn_load,
  output logic        pn_step,
  input  logic        pn_bit
);

  sc16_t       sym_q;
  logic        busy_q;
  logic [15:0] cnt_q;
  logic [15:0] last_idx;
  logic        s_fire, m_fire;

  assign last_idx = (seq_len == 16'd0) ? 16'd0 : seq_len - 16'd1;
  assign m_valid  = busy_q;
  assign m_last   = busy_q && (cnt_q == last_idx);
  assign m_data   = pn_bit ? sym_q : sc16_t'{re: neg_sat16(sym_q.re), im: neg_sat16(sym_q.im)};
  assign m_fire   = m_valid && m_ready;
  assign s_ready  = !busy_q || (m_fire && m_last);
  assign s_fire   = s_valid && s_ready;
  assign pn_load  = s_fire;
  assign pn_step  = m_fire && !m_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      cnt_q  <= '0;
      sym_q  <= '0;
    end else begin
      if (s_fire) begin
        sym_q  <= s_data;
        busy_q <= 1'b1;
        cnt_q  <= '0;
      end else if (m_fire) begin
        if (m_last) busy_q <= 1'b0;
        cnt_q <= cnt_q + 16'd1;
      end
    end
  end

  // Output must hold while stalled.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready |=> m_valid && $stable(m_data) && $stable(m_last));

endmodule
