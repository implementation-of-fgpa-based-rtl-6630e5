// chsnd_pkg: types and constants shared by the channel sounder blocks.
//
// Samples travel as SC16 (signed complex, 16-bit real and 16-bit imaginary
// parts), packed with the real part in the upper half as in the USRP sample
// format. Correlation power and averaged power are 32-bit unsigned words.
// The setting-register numbers are the ones printed in the block diagrams of
// the three computation engines (spreader, correlator, averaging). How the two
// fields named in one register share its 32 bits is this design's choice: the
// first-named field sits in bits [31:16], the second in bits [15:0].
package chsnd_pkg;

  typedef struct packed {
    logic signed [15:0] re;
    logic signed [15:0] im;
  } sc16_t;

  typedef logic [31:0] pwr_t;

  // Longest LFSR the PN generator supports (polynomial order up to 10).
  localparam int unsigned PN_MAX_ORDER = 10;

  // Setting-register addresses (8-bit settings bus address).
  localparam logic [7:0] SR_BLOCK_RESET   = 8'd131;
  localparam logic [7:0] SR_SPR_POLY_SEED = 8'd132;  // spreader: Polynomial, Seed
  localparam logic [7:0] SR_SPR_LENS      = 8'd133;  // spreader: Seq Len, Poly Len
  localparam logic [7:0] SR_COR_START     = 8'd132;  // correlator: Block Start
  localparam logic [7:0] SR_COR_POLY_SEED = 8'd133;  // correlator: Polynomial, Seed
  localparam logic [7:0] SR_COR_LENS      = 8'd134;  // correlator: Seq Len, Poly Len
  localparam logic [7:0] SR_AVG_CFG       = 8'd132;  // averaging: LogAvgSize, SeqLen
  localparam logic [7:0] SR_RB_ADDR       = 8'd255;  // readback address

  // NoC IDs as printed on the block diagrams.
  localparam logic [63:0] NOC_ID_SPREADER   = 64'h0000_0000_0000_FFC0;
  localparam logic [63:0] NOC_ID_CORRELATOR = 64'h0000_0000_00FF_FFC1;
  localparam logic [63:0] NOC_ID_AVERAGING  = 64'h0000_0000_00FF_FFC2;

  // Two's complement of a 16-bit part, saturated so that -32768 maps to +32767.
  function automatic logic signed [15:0] neg_sat16(input logic signed [15:0] v);
    return (v == -16'sd32768) ? 16'sd32767 : -v;
  endfunction

endpackage
