// correlator_ce: correlator computation engine.
//
// Wraps the correlator with its setting registers as in the correlator
// engine's block diagram: SR 131 Block Reset, SR 132 Block Start, SR 133
// Polynomial and Seed, SR 134 Sequence Length and Polynomial Length, SR 255
// readback address; readback words RB 0..3 return the four settings. Bit 0 of
// Block Start passes through an edge detector, so writing 0 then 1 starts
// (or restarts) the correlator. A pn_seq_gen, programmed like the spreader's,
// supplies the coefficients. The register numbers and the edge detector
// follow the paper; the bit layout (first-named field in [31:16], second in
// [15:0]), the zero reset values and the level meaning of Block Reset (bit 0
// held high keeps the datapath in reset) are this design's choices.
//
// Interface: settings bus as in spreader_ce; SC16 samples in, 32-bit unsigned
// correlation power out, AXI-stream style valid/ready, one output per input.
// The start pulse reaches the correlator two cycles after the SR 132 write.
//
// The readback word is 64 bits wide, as on the original settings bus; only
// the lower 32 bits carry a register, the upper 32 read as zero.
module correlator_ce
  import chsnd_pkg::*;
#(
  parameter int unsigned N_TAPS      = 512,
  parameter int unsigned POWER_SHIFT = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // settings bus
  input  logic        set_stb,
  input  logic [7:0]  set_addr,
  input  logic [31:0] set_data,
  output logic [63:0] rb_data,
  // input samples (from DDC)
  input  sc16_t       s_data,
  input  logic        s_valid,
  output logic        s_ready,
  // correlation power (to averaging)
  output pwr_t        m_data,
  output logic        m_valid,
  output logic        m_last,
  input  logic        m_ready
);

  logic [31:0] sr_reset, sr_start, sr_poly_seed, sr_lens;
  logic [7:0]  rb_addr;
  logic        dp_s_ready;
  logic        dp_rst_n, start_pulse;
  logic        pn_load, pn_step, pn_bit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr_reset     <= '0;
      sr_start     <= '0;
      sr_poly_seed <= '0;
      sr_lens      <= '0;
      rb_addr      <= '0;
    end else if (set_stb) begin
      case (set_addr)
        SR_BLOCK_RESET:   sr_reset     <= set_data;
        SR_COR_START:     sr_start     <= set_data;
        SR_COR_POLY_SEED: sr_poly_seed <= set_data;
        SR_COR_LENS:      sr_lens      <= set_data;
        SR_RB_ADDR:       rb_addr      <= set_data[7:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    case (rb_addr)
      8'd0:    rb_data = {32'd0, sr_reset};
      8'd1:    rb_data = {32'd0, sr_start};
      8'd2:    rb_data = {32'd0, sr_poly_seed};
      8'd3:    rb_data = {32'd0, sr_lens};
      default: rb_data = '0;
    endcase
  end

  assign dp_rst_n = rst_n && !sr_reset[0];
  // No input is taken while the engine is held in reset.
  assign s_ready  = dp_s_ready && !sr_reset[0];

  edge_detector u_edge (
    .clk   (clk),
    .rst_n (dp_rst_n),
    .level (sr_start[0]),
    .pulse (start_pulse)
  );

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

  correlator #(.N_TAPS(N_TAPS), .POWER_SHIFT(POWER_SHIFT)) u_corr (
    .clk     (clk),
    .rst_n   (dp_rst_n),
    .start   (start_pulse),
    .seq_len (sr_lens[31:16]),
    .pn_load (pn_load),
    .pn_step (pn_step),
    .pn_bit  (pn_bit),
    .s_data  (s_data),
    .s_valid (s_valid),
    .s_ready (dp_s_ready),
    .m_data  (m_data),
    .m_valid (m_valid),
    .m_last  (m_last),
    .m_ready (m_ready)
  );

endmodule
