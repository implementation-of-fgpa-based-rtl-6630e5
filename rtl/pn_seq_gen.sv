// pn_seq_gen: programmable LFSR pseudo-noise sequence generator.
//
// A 10-stage shift register (stage 1 .. stage 10) is loaded with a seed. Each
// step, every stage is ANDed with the matching bit of the generator-polynomial
// register, the products are XORed together, and the result is shifted into
// stage 1 while every stage moves one place towards stage 10 (a Fibonacci
// LFSR). For a polynomial of order N the sequence bit is read from stage N, so
// any polynomial of order 1..10 is supported and the longest maximal-length
// sequence is 1023 chips. This structure, the 10-stage limit and the output
// tap follow the paper; bit k-1 of `poly` and `seed` holds stage k (the
// stage numbering printed in the paper's order-6 example, poly 0x030,
// seed 0x020).
//
// Interface: `load` copies `seed` into the register; `step` advances it by
// one chip; `load` wins if both are high. `pn_bit` is stage `order` of the
// current state, so the first chip after a load is available in the cycle
// after `load` and each `step` presents the next chip one cycle later.
// `order` values outside 1..10 are treated as 10.
module pn_seq_gen #(
  parameter int unsigned MAX_ORDER = chsnd_pkg::PN_MAX_ORDER
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 load,
  input  logic                 step,
  input  logic [MAX_ORDER-1:0] poly,
  input  logic [MAX_ORDER-1:0] seed,
  input  logic [3:0]           order,
  output logic                 pn_bit,
  output logic [MAX_ORDER-1:0] state
);

  logic feedback;
  logic [3:0] tap;

  assign feedback = ^(state & poly);
  assign tap      = (order == 4'd0 || 32'(order) > MAX_ORDER) ? 4'(MAX_ORDER - 1) : order - 4'd1;
  assign pn_bit   = state[tap];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       state <= '0;
    else if (load)    state <= seed;
    else if (step)    state <= {state[MAX_ORDER-2:0], feedback};
  end

endmodule
