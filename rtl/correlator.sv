// correlator: complex PN correlator producing the correlation power.
//
// Two parallel_correlator instances, one for the real and one for the
// imaginary part of the SC16 input, share one set of +1/-1 tap coefficients
// taken from the PN sequence. For each input sample the block outputs one
// 32-bit unsigned word, the squared magnitude of the complex correlation, so
// results leave at the input sample rate (the paper's reason for a parallel
// correlator). Up to N_TAPS chips are supported (512 in the paper).
//
// Operation: before the first start pulse, input samples are accepted and
// dropped. A `start` pulse clears the sample shift registers and the
// coefficients, reloads the PN generator with its seed and shifts `seq_len`
// chips into the coefficient register (one per cycle, input held off). After
// that tap l holds chip seq_len-1-l, so the output peaks when the last chip of
// a received sequence has entered, i.e. the correlator is matched to the PN
// sequence; taps at seq_len and above are unused. Then every accepted sample
// produces one output; `m_last` marks every seq_len-th output after start, so
// each output packet is one power delay profile.
//
// Scaling: re^2 + im^2 is formed at full width (2*(17+clog2(N_TAPS))+1 bits),
// shifted right by POWER_SHIFT and saturated to 32 bits. The paper only says
// the output is a 32-bit unsigned power; the shift, the start behaviour, the
// sequence ordering in the taps and the pipeline are this design's choices.
//
// Timing: fully pipelined, one sample per cycle; an output appears
// clog2(N_TAPS)+3 cycles after its sample is accepted. A stalled output
// (m_ready low) freezes the whole pipeline and holds off the input. Loading
// the coefficients after start takes seq_len cycles.
module correlator
  import chsnd_pkg::*;
#(
  parameter int unsigned N_TAPS      = 512,
  parameter int unsigned POWER_SHIFT = 16,
  localparam int unsigned LEVELS = $clog2(N_TAPS),
  localparam int unsigned ACC_W  = 16 + 1 + LEVELS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,      // one-cycle start pulse
  input  logic [15:0] seq_len,    // chips in the sequence, 1 .. N_TAPS
  // PN generator control
  output logic        pn_load,
  output logic        pn_step,
  input  logic        pn_bit,
  // input samples
  input  sc16_t       s_data,
  input  logic        s_valid,
  output logic        s_ready,
  // correlation power
  output pwr_t        m_data,
  output logic        m_valid,
  output logic        m_last,
  input  logic        m_ready
);

  typedef enum logic [1:0] {ST_IDLE, ST_LOAD, ST_RUN} state_t;

  localparam int unsigned SQ_W  = 2 * ACC_W;
  localparam int unsigned PWR_W = SQ_W + 1;

  state_t              state_q;
  logic [15:0]         len;
  logic [15:0]         load_cnt_q, out_cnt_q;
  logic [N_TAPS-1:0]   coef_en_q, coef_pos_q;
  logic                adv, in_fire, clear;
  logic                tap_vld_q;
  logic [LEVELS-1:0]   tree_vld_q;
  logic                sq_vld_q;
  logic signed [ACC_W-1:0] y_re, y_im;
  logic [SQ_W-1:0]     sq_re_q, sq_im_q;
  logic [PWR_W-1:0]    pwr_full, pwr_shifted;

  assign len = (seq_len == 16'd0) ? 16'd1 :
               (32'(seq_len) > N_TAPS) ? 16'(N_TAPS) : seq_len;

  assign adv     = !m_valid || m_ready;
  assign s_ready = (state_q == ST_IDLE) || (state_q == ST_RUN && adv);
  assign in_fire = s_valid && s_ready && (state_q == ST_RUN);
  assign clear   = start;
  assign pn_load = start;
  assign pn_step = (state_q == ST_LOAD);

  // Control and coefficient loading.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= ST_IDLE;
      load_cnt_q <= '0;
      coef_en_q  <= '0;
      coef_pos_q <= '0;
    end else if (start) begin
      state_q    <= ST_LOAD;
      load_cnt_q <= '0;
      coef_en_q  <= '0;
      coef_pos_q <= '0;
    end else if (state_q == ST_LOAD) begin
      coef_en_q  <= {coef_en_q[N_TAPS-2:0], 1'b1};
      coef_pos_q <= {coef_pos_q[N_TAPS-2:0], pn_bit};
      load_cnt_q <= load_cnt_q + 16'd1;
      if (load_cnt_q == len - 16'd1) state_q <= ST_RUN;
    end
  end

  parallel_correlator #(.N_TAPS(N_TAPS), .IN_W(16)) u_re (
    .clk(clk), .rst_n(rst_n), .clear(clear), .shift(in_fire), .x_in(s_data.re),
    .adv(adv), .coef_en(coef_en_q), .coef_pos(coef_pos_q), .y_out(y_re)
  );

  parallel_correlator #(.N_TAPS(N_TAPS), .IN_W(16)) u_im (
    .clk(clk), .rst_n(rst_n), .clear(clear), .shift(in_fire), .x_in(s_data.im),
    .adv(adv), .coef_en(coef_en_q), .coef_pos(coef_pos_q), .y_out(y_im)
  );

  // Valid tracking through the adder trees, squaring and output stage.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tap_vld_q  <= 1'b0;
      tree_vld_q <= '0;
      sq_vld_q   <= 1'b0;
      m_valid    <= 1'b0;
    end else if (start) begin
      tap_vld_q  <= 1'b0;
      tree_vld_q <= '0;
      sq_vld_q   <= 1'b0;
      m_valid    <= 1'b0;
    end else if (adv) begin
      tap_vld_q  <= in_fire;
      tree_vld_q <= {tree_vld_q[LEVELS-2:0], tap_vld_q};
      sq_vld_q   <= tree_vld_q[LEVELS-1];
      m_valid    <= sq_vld_q;
    end
  end

  // Sign-extend before squaring so the product is formed at full width.
  logic signed [SQ_W-1:0] re_ext, im_ext;
  assign re_ext = SQ_W'(y_re);
  assign im_ext = SQ_W'(y_im);

  assign pwr_full    = PWR_W'(sq_re_q) + PWR_W'(sq_im_q);
  assign pwr_shifted = pwr_full >> POWER_SHIFT;

  always_ff @(posedge clk) begin
    if (adv) begin
      sq_re_q <= SQ_W'(re_ext * re_ext);
      sq_im_q <= SQ_W'(im_ext * im_ext);
      m_data  <= (pwr_shifted > PWR_W'(32'hFFFF_FFFF)) ? 32'hFFFF_FFFF : pwr_shifted[31:0];
    end
  end

  // Packet boundary: every len-th output after start.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                out_cnt_q <= '0;
    else if (start)            out_cnt_q <= '0;
    else if (m_valid && m_ready) out_cnt_q <= m_last ? 16'd0 : out_cnt_q + 16'd1;
  end
  assign m_last = (out_cnt_q == len - 16'd1);

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready && !start |=> m_valid && $stable(m_data));

endmodule
