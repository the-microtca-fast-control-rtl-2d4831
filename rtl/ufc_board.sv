// ufc_board: the programmable logic and clock routing of the MicroTCA fast
// control board (uFC), a double-width AMC card built around a Kintex-7 FPGA
// with two FMC slots.
//
// Everything on the board that is logic rather than a bought chip is here:
//   ufc_cpld            JTAG bridge, FPGA reload/boot status, FPGA reset,
//                       25 MHz clock forwarding
//   clock_distribution  six 4:4 cross-point switches that route oscillator,
//                       AMC, FMC and LEMO clocks to the FPGA, to the PLL and
//                       to the AMC TCLKB/TCLKD outputs
//   heps_forwarder      the FPGA application of the pixel-detector readout:
//                       frame forwarding between four front-end 10 GbE links
//                       and four DAQ 10 GbE links, clock/trigger fan-out
// The FPGA, the CDCE62005 PLL, the 874001 clock buffer, the management
// microcontroller, memories and connectors are outside; their pins are
// this module's ports. The switch settings (sel_a .. sel_f) come from the
// management controller. The forwarder runs on app_clk, the 156.25 MHz
// user clock of the FPGA's 10 GbE MACs (outside), and is held in reset while
// the CPLD's fpga_reset is high; that reset is re-synchronised to app_clk
// here (asynchronous assertion, two-flop release). The LEMO clock input
// both feeds switch B and is fanned out to the front-end links with the
// LEMO gate input. Timing: clock and JTAG paths are combinational; the
// CPLD's clocked functions run on osc_25m.
module ufc_board
  import ufc_pkg::*;
#(
  parameter int unsigned PROG_CYCLES    = 25,
  parameter int unsigned TIMEOUT_CYCLES = 25_000_000,
  parameter int unsigned RESET_CYCLES   = 2500,
  parameter int unsigned N_LINKS        = 4,
  parameter int unsigned DEPTH          = 2048
) (
  // oscillators and board reset
  input  logic           osc_25m,
  input  logic           osc_156m25,
  input  logic           osc_125m,
  input  logic           osc_20m,
  input  logic           por_n,
  // external clock sources
  input  logic           fpga_to_a,
  input  logic           amc_fclka,
  input  logic           amc_tclka,
  input  logic           amc_tclkc,
  input  logic           lemo_clk_in,
  input  logic [3:0]     fmc0_clk_m2c,
  input  logic [3:0]     fmc1_clk_m2c,
  input  logic           pll_to_f0,
  input  logic           pll_to_f3,
  // clock switch configuration
  input  xpt_sel_t [3:0] sel_a,
  input  xpt_sel_t [3:0] sel_b,
  input  xpt_sel_t [3:0] sel_c,
  input  xpt_sel_t [3:0] sel_d,
  input  xpt_sel_t [3:0] sel_e,
  input  xpt_sel_t [3:0] sel_f,
  // routed clocks
  output logic           fpga_clk25,
  output logic           fpga_srcc14_a,
  output logic           fpga_b116_a,
  output logic           fpga_srcc14_b,
  output logic           to_874001,
  output logic           fpga_b118_c,
  output logic           fpga_mrcc16_c,
  output logic           fpga_b117_e,
  output logic           fpga_mrcc12_e,
  output logic           pll_in,
  output logic           fpga_mrcc14_d,
  output logic           fpga_b115_d,
  output logic           fpga_b116_d,
  output logic           fpga_b117_f,
  output logic           fpga_b118_f,
  output logic           amc_tclkb,
  output logic           amc_tclkd,
  // JTAG
  input  logic           jtag_sel_amc,
  input  logic           hdr_tck,
  input  logic           hdr_tms,
  input  logic           hdr_tdi,
  output logic           hdr_tdo,
  output logic           hdr_tdo_oe,
  input  logic           amc_tck,
  input  logic           amc_tms,
  input  logic           amc_tdi,
  output logic           amc_tdo,
  output logic           amc_tdo_oe,
  output logic           fpga_tck,
  output logic           fpga_tms,
  output logic           fpga_tdi,
  input  logic           fpga_tdo,
  output logic [1:0]     fmc_tck,
  output logic [1:0]     fmc_tms,
  output logic [1:0]     fmc_tdi,
  input  logic [1:0]     fmc_tdo,
  input  logic [1:0]     fmc_prsnt_l,
  // FPGA configuration and reset
  input  logic           mmc_reload_req,
  input  logic           mmc_reset_req,
  input  logic           fpga_init_b,
  input  logic           fpga_done,
  output logic           fpga_prog_b,
  output logic           fpga_reset,
  output cfg_state_t     cfg_state,
  output logic           cfg_busy,
  output logic           cfg_done,
  output logic           cfg_error,
  // readout application (FPGA firmware)
  input  logic                      app_clk,
  input  logic                      lemo_gate_in,
  input  logic  [N_LINKS-1:0]       fe_rx_valid,
  input  beat_t [N_LINKS-1:0]       fe_rx_beat,
  output logic  [N_LINKS-1:0]       fe_tx_valid,
  input  logic  [N_LINKS-1:0]       fe_tx_ready,
  output beat_t [N_LINKS-1:0]       fe_tx_beat,
  input  logic  [N_LINKS-1:0]       daq_rx_valid,
  input  beat_t [N_LINKS-1:0]       daq_rx_beat,
  output logic  [N_LINKS-1:0]       daq_tx_valid,
  input  logic  [N_LINKS-1:0]       daq_tx_ready,
  output beat_t [N_LINKS-1:0]       daq_tx_beat,
  output logic  [N_LINKS-1:0][31:0] up_drops,
  output logic  [N_LINKS-1:0][31:0] down_drops,
  output logic  [N_LINKS-1:0]       up_overflow,
  output logic  [N_LINKS-1:0]       down_overflow,
  output logic  [N_LINKS-1:0]       fe_clk,
  output logic  [N_LINKS-1:0]       fe_trig
);

  logic [1:0] app_rst_sync;

  ufc_cpld #(
    .PROG_CYCLES   (PROG_CYCLES),
    .TIMEOUT_CYCLES(TIMEOUT_CYCLES),
    .RESET_CYCLES  (RESET_CYCLES)
  ) u_cpld (.*);

  clock_distribution u_clk (.*);

  always_ff @(posedge app_clk or posedge fpga_reset) begin
    if (fpga_reset) app_rst_sync <= 2'b00;
    else            app_rst_sync <= {app_rst_sync[0], 1'b1};
  end

  heps_forwarder #(
    .N_LINKS(N_LINKS),
    .DEPTH  (DEPTH)
  ) u_app (
    .clk     (app_clk),
    .rst_n   (app_rst_sync[1]),
    .ext_clk (lemo_clk_in),
    .ext_gate(lemo_gate_in),
    .*
  );

endmodule
