// heps_forwarder: FPGA application of the pixel-detector readout system.
//
// In the detector the board sits between N_LINKS chains of front-end
// modules and a data-acquisition server. Each chain is reached over one
// 10 Gb Ethernet link through a front-end FMC, and each has its own 10 Gb
// Ethernet link to the server through an SFP+ FMC. This module forwards
// frames in both directions on each pair, data frames from the front-end to
// the server and command frames from the server to the front-end, through
// one pkt_fifo per direction and link. It also fans the external clock and
// trigger (gate) inputs of the two LEMO connectors out to every front-end
// connector. Link i of one side is always paired with link i of the other.
// Interface: frame words (ufc_pkg::beat_t) from and to the 10 GbE MACs,
// which are outside; receive sides have no ready, transmit sides do.
// Timing: one word per clock per direction per link; at 156.25 MHz that is
// 10 Gb/s each way on each of the four links. Store-and-forward: a frame
// leaves one clock after its last word arrived. The four-link pairing, the
// clock and trigger fan-out and the forwarding role follow the system
// description; buffering, drop policy and word format are this design's.
module heps_forwarder
  import ufc_pkg::*;
#(
  parameter int unsigned N_LINKS = 4,
  parameter int unsigned DEPTH   = 2048
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // front-end side (MAC receive / transmit)
  input  logic  [N_LINKS-1:0]       fe_rx_valid,
  input  beat_t [N_LINKS-1:0]       fe_rx_beat,
  output logic  [N_LINKS-1:0]       fe_tx_valid,
  input  logic  [N_LINKS-1:0]       fe_tx_ready,
  output beat_t [N_LINKS-1:0]       fe_tx_beat,
  // DAQ side
  input  logic  [N_LINKS-1:0]       daq_rx_valid,
  input  beat_t [N_LINKS-1:0]       daq_rx_beat,
  output logic  [N_LINKS-1:0]       daq_tx_valid,
  input  logic  [N_LINKS-1:0]       daq_tx_ready,
  output beat_t [N_LINKS-1:0]       daq_tx_beat,
  // overflow monitoring
  output logic  [N_LINKS-1:0][31:0] up_drops,     // front-end -> DAQ
  output logic  [N_LINKS-1:0][31:0] down_drops,   // DAQ -> front-end
  output logic  [N_LINKS-1:0]       up_overflow,
  output logic  [N_LINKS-1:0]       down_overflow,
  // clock and trigger distribution
  input  logic                      ext_clk,
  input  logic                      ext_gate,
  output logic  [N_LINKS-1:0]       fe_clk,
  output logic  [N_LINKS-1:0]       fe_trig
);

  assign fe_clk  = {N_LINKS{ext_clk}};
  assign fe_trig = {N_LINKS{ext_gate}};

  for (genvar i = 0; i < N_LINKS; i++) begin : g_link
    pkt_fifo #(.DEPTH(DEPTH)) u_up (
      .clk, .rst_n,
      .s_valid   (fe_rx_valid[i]),
      .s_beat    (fe_rx_beat[i]),
      .m_valid   (daq_tx_valid[i]),
      .m_ready   (daq_tx_ready[i]),
      .m_beat    (daq_tx_beat[i]),
      .overflow  (up_overflow[i]),
      .drop_count(up_drops[i])
    );
    pkt_fifo #(.DEPTH(DEPTH)) u_down (
      .clk, .rst_n,
      .s_valid   (daq_rx_valid[i]),
      .s_beat    (daq_rx_beat[i]),
      .m_valid   (fe_tx_valid[i]),
      .m_ready   (fe_tx_ready[i]),
      .m_beat    (fe_tx_beat[i]),
      .overflow  (down_overflow[i]),
      .drop_count(down_drops[i])
    );
  end

endmodule
