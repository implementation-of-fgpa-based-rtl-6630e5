// spreader_ce: spectrum spreader computation engine.
//
// Wraps the spreader datapath with its setting registers, as in the
// spreader engine's block diagram: SR 131 Block Reset, SR 132 Polynomial and
// Seed, SR 133 Sequence Length and Polynomial Length (the order N), SR 255
// readback address; readback words RB 0..2 return the three settings. One
// pn_seq_gen supplies the chips. The register numbers follow the paper; the
// bit layout (first-named field in [31:16], second in [15:0]), the reset
// values (all zero), the 64-bit readback word and the meaning of Block Reset
// (bit 0 held high keeps the datapath in reset) are this design's choices.
//
// Interface: a settings bus (`set_stb` strobes `set_data` into register
// `set_addr`, one write per cycle) and a combinational readback word selected
// by the last SR 255 write. Symbols enter and chips leave on AXI-stream style
// valid/ready ports; timing is that of the spreader (one chip per cycle, the
// spreading factor equals the programmed sequence length).
//
// The readback word is 64 bits wide, as on the original settings bus; only
// the lower 32 bits carry a register, the upper 32 read as zero.
module spreader_ce
  import chsnd_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // settings bus
  input  logic        set_stb,
  input  logic [7:0]  set_addr,
  input  logic [31:0] set_data,
  output logic [63:0] rb_data,
  // input symbols (from host)
  input  sc16_t       s_data,
  input  logic        s_valid,
  output logic        s_ready,
  // spread chips (to DUC)
  output sc16_t       m_data,
  output logic        m_valid,
  output logic        m_last,
  input  logic        m_ready
);

  logic [31:0] sr_reset, sr_poly_seed, sr_lens;
  logic [7:0]  rb_addr;
  logic        dp_s_ready;
  logic        dp_rst_n;
  logic        pn_load, pn_step, pn_bit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr_reset     <= '0;
      sr_poly_seed <= '0;
      sr_lens      <= '0;
      rb_addr      <= '0;
    end else if (set_stb) begin
      case (set_addr)
        SR_BLOCK_RESET:   sr_reset     <= set_data;
        SR_SPR_POLY_SEED: sr_poly_seed <= set_data;
        SR_SPR_LENS:      sr_lens      <= set_data;
        SR_RB_ADDR:       rb_addr      <= set_data[7:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    case (rb_addr)
      8'd0:    rb_data = {32'd0, sr_reset};
      8'd1:    rb_data = {32'd0, sr_poly_seed};
      8'd2:    rb_data = {32'd0, sr_lens};
      default: rb_data = '0;
    endcase
  end

  assign dp_rst_n = rst_n && !sr_reset[0];
  // No input is taken while the engine is held in reset.
  assign s_ready  = dp_s_ready && !sr_reset[0];

  pn_seq_gen u_pn (
    .clk    (clk),
    .rst_n  (dp_rst_n),
    .load   (pn_load),
    .step   (pn_step),
    .poly   (sr_poly_seed[16 +: PN_MAX_ORDER]),
    .seed   (sr_poly_seed[0 +: PN_MAX_ORDER]),
    .order  (sr_lens[3:0]),
    .pn_bit (pn_bit),
    .state  ()
  );

  spreader u_spreader (
    .clk     (clk),
    .rst_n   (dp_rst_n),
    .seq_len (sr_lens[31:16]),
    .s_data  (s_data),
    .s_valid (s_valid),
    .s_ready (dp_s_ready),
    .m_data  (m_data),
    .m_valid (m_valid),
    .m_last  (m_last),
    .m_ready (m_ready),
    .pn_load (pn_load),
    .pn_step (pn_step),
    .pn_bit  (pn_bit)
  );

endmodule
