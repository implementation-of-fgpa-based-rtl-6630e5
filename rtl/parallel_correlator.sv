// parallel_correlator: one real-valued parallel correlator.
//
// Computes y[n] = sum_{l=0}^{N_TAPS-1} c_l * x[n-l] with one new sample per
// cycle. The newest N_TAPS samples sit in a shift register (tap 0 holds
// x[n]); the oldest drops out when a new one enters. Each tap coefficient is
// +1, -1 or 0, so the "product" is the sample, its two's complement or zero,
// picked by a multiplexer; the N_TAPS products are summed by a binary adder
// tree (N_TAPS must be at least 2). This follows the paper's parallel
// correlator (a shift register, a negate/select per tap and a binary adder
// tree); the zero coefficient, used
// for the taps beyond the programmed sequence length, and the register after
// every adder-tree level are this design's choices. The tree is padded to the
// next power of two with zero leaves and keeps the full width, so nothing
// overflows.
//
// Interface and timing: `shift` pushes `x_in` into tap 0; `clear` zeroes all
// taps. The tree advances by one level when `adv` is high; a result reaches
// `y_out` LEVELS = clog2(N_TAPS) advancing cycles after the shift register
// holds its samples. The caller tracks which results are valid.
module parallel_correlator #(
  parameter int unsigned N_TAPS = 512,
  parameter int unsigned IN_W   = 16,
  localparam int unsigned LEVELS = $clog2(N_TAPS),
  localparam int unsigned ACC_W  = IN_W + 1 + LEVELS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    shift,
  input  logic signed [IN_W-1:0]  x_in,
  input  logic                    adv,
  input  logic [N_TAPS-1:0]       coef_en,   // tap used
  input  logic [N_TAPS-1:0]       coef_pos,  // 1: +sample, 0: -sample
  output logic signed [ACC_W-1:0] y_out
);

  localparam int unsigned P = 1 << LEVELS;

  // heap[P + i] is the product of tap i (zero for padding leaves); heap[i]
  // for 1 <= i < P is the adder-tree register summing heap[2i] and
  // heap[2i+1]; heap[1] is the root. Every element has one driver.
  wire logic signed [ACC_W-1:0] heap [2*P];
  wire logic signed [IN_W-1:0]  taps [N_TAPS];

  assign heap[0] = '0;

  // Sample shift register (tap 0 = newest) and per-tap select of the
  // sample or its two's complement.
  for (genvar i = 0; i < N_TAPS; i++) begin : g_tap
    logic signed [IN_W-1:0] q;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)      q <= '0;
      else if (clear)  q <= '0;
      else if (shift)  q <= (i == 0) ? x_in : taps[(i == 0) ? 0 : i - 1];
    end
    assign taps[i] = q;
    assign heap[P + i] = !coef_en[i] ? '0 :
                         coef_pos[i] ? ACC_W'(q) : -ACC_W'(q);
  end

  for (genvar i = N_TAPS; i < P; i++) begin : g_pad
    assign heap[P + i] = '0;
  end

  // Registered binary adder tree.
  for (genvar i = 1; i < P; i++) begin : g_node
    logic signed [ACC_W-1:0] q;
    always_ff @(posedge clk) begin
      if (adv) q <= heap[2*i] + heap[2*i + 1];
    end
    assign heap[i] = q;
  end

  assign y_out = heap[1];

endmodule
