// averager: element-wise average of K consecutive correlation vectors.
//
// The input is a stream of 32-bit powers, read as vectors of `seq_len`
// values (one power delay profile each). The block adds K = 2**log_avg
// consecutive vectors element by element and outputs one vector of
// sum >> log_avg, so the output rate is the input rate divided by K. K must be
// a power of two no larger than 128, as in the paper, so the division is a
// right shift; log_avg above 7 is taken as 7. The paper gives only this
// function; the accumulator memory, its 39-bit width (no overflow for
// K <= 128), the counting of vectors from reset and the read-modify-write
// pipeline are this design's choices.
//
// Inside: an accumulator memory of MAX_LEN words with a synchronous read.
// Stage 1 holds the sample and the old accumulator word read for its
// position; its sum is written back (or, in the first vector, the sample
// alone) when stage 1 completes. In the K-th vector the sum is shifted and
// presented on the output. Because the write of position i and the read of
// the next position happen in the same cycle, seq_len must be at least 2.
//
// Interface and timing: AXI-stream style valid/ready, one input per cycle.
// An output appears one cycle after the sample that completes it; `m_last`
// marks the last element of each averaged vector. Only a stalled output holds
// off the input.
module averager
  import chsnd_pkg::*;
#(
  parameter int unsigned MAX_LEN     = 1024,
  parameter int unsigned MAX_LOG_AVG = 7,
  localparam int unsigned ADDR_W = $clog2(MAX_LEN),
  localparam int unsigned ACC_W  = 32 + MAX_LOG_AVG
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] seq_len,   // values per vector, 2 .. MAX_LEN
  input  logic [15:0] log_avg,   // log2 of the averaging factor K
  // input powers
  input  pwr_t        s_data,
  input  logic        s_valid,
  output logic        s_ready,
  // averaged powers
  output pwr_t        m_data,
  output logic        m_valid,
  output logic        m_last,
  input  logic        m_ready
);

  logic [ACC_W-1:0]  acc_mem [MAX_LEN];
  logic [ACC_W-1:0]  rd_q;
  logic [ADDR_W-1:0] idx_q, last_idx;
  logic [7:0]        vec_q, last_vec;
  logic [2:0]        shift;
  // stage 1
  logic              s1_vld_q, s1_first_q, s1_emit_q, s1_last_q;
  logic [ADDR_W-1:0] s1_idx_q;
  pwr_t              s1_data_q;
  logic [ACC_W-1:0]  s1_sum;
  logic              s1_done, s_fire;

  assign last_idx = (seq_len < 16'd2) ? ADDR_W'(1) :
                    (32'(seq_len) > MAX_LEN) ? ADDR_W'(MAX_LEN - 1) : ADDR_W'(seq_len - 16'd1);
  assign shift    = (32'(log_avg) > MAX_LOG_AVG) ? 3'(MAX_LOG_AVG) : log_avg[2:0];
  assign last_vec = 8'((32'd1 << shift) - 32'd1);

  assign s1_sum  = (s1_first_q ? '0 : rd_q) + ACC_W'(s1_data_q);
  assign s1_done = s1_vld_q && (!s1_emit_q || !m_valid || m_ready);
  assign s_ready = !s1_vld_q || s1_done;
  assign s_fire  = s_valid && s_ready;

  // Position and vector counters.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx_q <= '0;
      vec_q <= '0;
    end else if (s_fire) begin
      if (idx_q == last_idx) begin
        idx_q <= '0;
        vec_q <= (vec_q == last_vec) ? 8'd0 : vec_q + 8'd1;
      end else begin
        idx_q <= idx_q + 1'b1;
      end
    end
  end

  // Accumulator memory: synchronous read on accept, write on stage-1 completion.
  always_ff @(posedge clk) begin
    if (s_fire)  rd_q <= acc_mem[idx_q];
    if (s1_done) acc_mem[s1_idx_q] <= s1_sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_vld_q   <= 1'b0;
      s1_first_q <= 1'b0;
      s1_emit_q  <= 1'b0;
      s1_last_q  <= 1'b0;
      s1_idx_q   <= '0;
      s1_data_q  <= '0;
    end else if (s_fire) begin
      s1_vld_q   <= 1'b1;
      s1_first_q <= (vec_q == 8'd0);
      s1_emit_q  <= (vec_q == last_vec);
      s1_last_q  <= (idx_q == last_idx);
      s1_idx_q   <= idx_q;
      s1_data_q  <= s_data;
    end else if (s1_done) begin
      s1_vld_q   <= 1'b0;
    end
  end

  // Output register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m_data  <= '0;
      m_last  <= 1'b0;
    end else if (s1_done && s1_emit_q) begin
      m_valid <= 1'b1;
      m_data  <= 32'(s1_sum >> shift);
      m_last  <= s1_last_q;
    end else if (m_ready) begin
      m_valid <= 1'b0;
    end
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready |=> m_valid && $stable(m_data));

endmodule
