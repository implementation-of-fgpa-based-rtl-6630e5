// averaging_ce: averaging computation engine.
//
// Wraps the averager with its setting registers as in the averaging engine's
// block diagram: SR 131 Block Reset, SR 132 LogAvgSize and SeqLen, SR 255
// readback address. RB 0 returns Block Reset and RB 1 returns SR 132 (the
// paper's diagram labels RB 1 "Polynomial, Seed", which this engine does not
// have; the configuration word is returned instead). The register numbers
// follow the paper; the bit layout (LogAvgSize in [31:16], SeqLen in [15:0]),
// the zero reset values and the level meaning of Block Reset are this
// design's choices. Writing SR 132 does not by itself realign the vector
// count: assert Block Reset around a reconfiguration so that counting
// restarts at the next sample.
//
// Interface: settings bus as in spreader_ce; 32-bit powers in, 32-bit
// averaged powers out at 1/K of the input rate, AXI-stream style valid/ready.
//
// The readback word is 64 bits wide, as on the original settings bus; only
// the lower 32 bits carry a register, the upper 32 read as zero.
module averaging_ce
  import chsnd_pkg::*;
#(
  parameter int unsigned MAX_LEN = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  // settings bus
  input  logic        set_stb,
  input  logic [7:0]  set_addr,
  input  logic [31:0] set_data,
  output logic [63:0] rb_data,
  // input powers (from correlator)
  input  pwr_t        s_data,
  input  logic        s_valid,
  output logic        s_ready,
  // averaged powers (to host)
  output pwr_t        m_data,
  output logic        m_valid,
  output logic        m_last,
  input  logic        m_ready
);

  logic [31:0] sr_reset, sr_cfg;
  logic [7:0]  rb_addr;
  logic        dp_s_ready;
  logic        dp_rst_n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr_reset <= '0;
      sr_cfg   <= '0;
      rb_addr  <= '0;
    end else if (set_stb) begin
      case (set_addr)
        SR_BLOCK_RESET: sr_reset <= set_data;
        SR_AVG_CFG:     sr_cfg   <= set_data;
        SR_RB_ADDR:     rb_addr  <= set_data[7:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    case (rb_addr)
      8'd0:    rb_data = {32'd0, sr_reset};
      8'd1:    rb_data = {32'd0, sr_cfg};
      default: rb_data = '0;
    endcase
  end

  assign dp_rst_n = rst_n && !sr_reset[0];
  // No input is taken while the engine is held in reset.
  assign s_ready  = dp_s_ready && !sr_reset[0];

  averager #(.MAX_LEN(MAX_LEN), .MAX_LOG_AVG(7)) u_avg (
    .clk     (clk),
    .rst_n   (dp_rst_n),
    .seq_len (sr_cfg[15:0]),
    .log_avg (sr_cfg[31:16]),
    .s_data  (s_data),
    .s_valid (s_valid),
    .s_ready (dp_s_ready),
    .m_data  (m_data),
    .m_valid (m_valid),
    .m_last  (m_last),
    .m_ready (m_ready)
  );

endmodule
