// edge_detector: rising-edge detector for a setting-register bit.
//
// The correlator engine's Block Start register is a level written by the
// host; this block registers it and emits `pulse` for exactly one cycle, in
// the cycle after `level` goes from 0 to 1. The paper names the block and its
// place (between the start register and the correlator); detecting the
// rising edge, rather than either edge, is this design's choice.
module edge_detector (
  input  logic clk,
  input  logic rst_n,
  input  logic level,
  output logic pulse
);

  logic level_q, level_qq;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      level_q  <= 1'b0;
      level_qq <= 1'b0;
    end else begin
      level_q  <= level;
      level_qq <= level_q;
    end
  end

  assign pulse = level_q && !level_qq;

endmodule
