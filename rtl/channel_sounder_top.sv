// channel_sounder_top: the FPGA processing of a DSSS channel sounder.
//
// Transmit side: a spreader engine turns each SC16 symbol from the host into
// seq_len chips of a programmable PN sequence, for the up-converter and
// radio. Receive side: NUM_RX independent chains, each a correlator engine
// (power of the correlation with the same PN sequence, one value per received
// sample) followed by an averaging engine (mean of K successive power delay
// profiles), whose output goes to the host. The default, two receive chains
// with 256-tap correlators, is the dual-channel receiver the paper uses for
// its 16-antenna measurement; NUM_RX = 1 with CORR_TAPS = 512 gives its
// single-channel receiver.
//
// In the USRP the engines hang off a packet router (the RFNoC crossbar), and
// the up/down-converters, radio front ends, Ethernet and host are vendor
// parts; here the router's fixed routes are plain wires (correlator i feeds
// averager i) and the parts outside the design are ports. Putting the
// transmit engine and the receive chains in one module is this design's
// choice: on the hardware they run in different radios, and here they can
// also be tested as one link.
//
// Settings: one shared settings bus with a destination select stands in for
// the router's control packets: set_dst 0 is the spreader, 2*i+1 correlator
// i, 2*i+2 averager i. Each engine's readback word is a separate output.
// Streams are AXI-stream style valid/ready; timing is that of the engines.
module channel_sounder_top
  import chsnd_pkg::*;
#(
  parameter int unsigned NUM_RX      = 2,
  parameter int unsigned CORR_TAPS   = 256,
  parameter int unsigned POWER_SHIFT = 16,
  parameter int unsigned AVG_MAX_LEN = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  // settings bus
  input  logic              set_stb,
  input  logic [3:0]        set_dst,
  input  logic [7:0]        set_addr,
  input  logic [31:0]       set_data,
  output logic [63:0]       rb_spreader,
  output logic [63:0]       rb_correlator [NUM_RX],
  output logic [63:0]       rb_averaging  [NUM_RX],
  // transmit: symbols from host, chips to DUC
  input  sc16_t             tx_in_data,
  input  logic              tx_in_valid,
  output logic              tx_in_ready,
  output sc16_t             tx_out_data,
  output logic              tx_out_valid,
  output logic              tx_out_last,
  input  logic              tx_out_ready,
  // receive: samples from DDCs, averaged power delay profiles to host
  input  sc16_t             rx_in_data  [NUM_RX],
  input  logic [NUM_RX-1:0] rx_in_valid,
  output logic [NUM_RX-1:0] rx_in_ready,
  output pwr_t              pdp_data    [NUM_RX],
  output logic [NUM_RX-1:0] pdp_valid,
  output logic [NUM_RX-1:0] pdp_last,
  input  logic [NUM_RX-1:0] pdp_ready
);

  spreader_ce u_spreader_ce (
    .clk      (clk),
    .rst_n    (rst_n),
    .set_stb  (set_stb && set_dst == 4'd0),
    .set_addr (set_addr),
    .set_data (set_data),
    .rb_data  (rb_spreader),
    .s_data   (tx_in_data),
    .s_valid  (tx_in_valid),
    .s_ready  (tx_in_ready),
    .m_data   (tx_out_data),
    .m_valid  (tx_out_valid),
    .m_last   (tx_out_last),
    .m_ready  (tx_out_ready)
  );

  for (genvar i = 0; i < NUM_RX; i++) begin : g_rx
    pwr_t corr_data;
    logic corr_valid, corr_last, corr_ready;

    correlator_ce #(.N_TAPS(CORR_TAPS), .POWER_SHIFT(POWER_SHIFT)) u_correlator_ce (
      .clk      (clk),
      .rst_n    (rst_n),
      .set_stb  (set_stb && set_dst == 4'(2 * i + 1)),
      .set_addr (set_addr),
      .set_data (set_data),
      .rb_data  (rb_correlator[i]),
      .s_data   (rx_in_data[i]),
      .s_valid  (rx_in_valid[i]),
      .s_ready  (rx_in_ready[i]),
      .m_data   (corr_data),
      .m_valid  (corr_valid),
      .m_last   (corr_last),
      .m_ready  (corr_ready)
    );

    averaging_ce #(.MAX_LEN(AVG_MAX_LEN)) u_averaging_ce (
      .clk      (clk),
      .rst_n    (rst_n),
      .set_stb  (set_stb && set_dst == 4'(2 * i + 2)),
      .set_addr (set_addr),
      .set_data (set_data),
      .rb_data  (rb_averaging[i]),
      .s_data   (corr_data),
      .s_valid  (corr_valid),
      .s_ready  (corr_ready),
      .m_data   (pdp_data[i]),
      .m_valid  (pdp_valid[i]),
      .m_last   (pdp_last[i]),
      .m_ready  (pdp_ready[i])
    );
  end

endmodule
