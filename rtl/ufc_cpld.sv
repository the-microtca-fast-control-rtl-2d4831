// ufc_cpld: the logic of the board's CPLD.
//
// The CPLD sits between the JTAG sources, the FPGA, the FMC slots and the
// module management controller (MMC). It holds three functions:
//   jtag_chain_bridge  selects the JTAG master (cable header or AMC) and
//                      chains FPGA, FMC0 and FMC1, skipping empty slots
//   fpga_config_ctrl   firmware reload (PROG_B) and boot status (INIT_B,
//                      DONE) for the MMC
//   payload_reset_gen  the reset line to the FPGA
// and forwards the single-ended 25 MHz oscillator to an FPGA clock pin.
// That oscillator also clocks the CPLD's own registers (this design's
// choice). Timing: JTAG paths combinational; the clocked parts as in their
// own modules. por_n is the board's power-on reset.
module ufc_cpld
  import ufc_pkg::*;
#(
  parameter int unsigned PROG_CYCLES    = 25,
  parameter int unsigned TIMEOUT_CYCLES = 25_000_000,
  parameter int unsigned RESET_CYCLES   = 2500
) (
  input  logic       osc_25m,
  input  logic       por_n,
  output logic       fpga_clk25,
  // JTAG
  input  logic       jtag_sel_amc,
  input  logic       hdr_tck,
  input  logic       hdr_tms,
  input  logic       hdr_tdi,
  output logic       hdr_tdo,
  output logic       hdr_tdo_oe,
  input  logic       amc_tck,
  input  logic       amc_tms,
  input  logic       amc_tdi,
  output logic       amc_tdo,
  output logic       amc_tdo_oe,
  output logic       fpga_tck,
  output logic       fpga_tms,
  output logic       fpga_tdi,
  input  logic       fpga_tdo,
  output logic [1:0] fmc_tck,
  output logic [1:0] fmc_tms,
  output logic [1:0] fmc_tdi,
  input  logic [1:0] fmc_tdo,
  input  logic [1:0] fmc_prsnt_l,
  // FPGA configuration and reset
  input  logic       mmc_reload_req,
  input  logic       mmc_reset_req,
  input  logic       fpga_init_b,
  input  logic       fpga_done,
  output logic       fpga_prog_b,
  output logic       fpga_reset,
  output cfg_state_t cfg_state,
  output logic       cfg_busy,
  output logic       cfg_done,
  output logic       cfg_error
);

  assign fpga_clk25 = osc_25m;

  jtag_chain_bridge u_jtag (
    .sel_amc    (jtag_sel_amc),
    .hdr_tck, .hdr_tms, .hdr_tdi, .hdr_tdo, .hdr_tdo_oe,
    .amc_tck, .amc_tms, .amc_tdi, .amc_tdo, .amc_tdo_oe,
    .fpga_tck, .fpga_tms, .fpga_tdi, .fpga_tdo,
    .fmc_tck, .fmc_tms, .fmc_tdi, .fmc_tdo, .fmc_prsnt_l
  );

  fpga_config_ctrl #(
    .PROG_CYCLES   (PROG_CYCLES),
    .TIMEOUT_CYCLES(TIMEOUT_CYCLES)
  ) u_cfg (
    .clk       (osc_25m),
    .rst_n     (por_n),
    .reload_req(mmc_reload_req),
    .init_b    (fpga_init_b),
    .done      (fpga_done),
    .prog_b    (fpga_prog_b),
    .state     (cfg_state),
    .busy      (cfg_busy),
    .cfg_done  (cfg_done),
    .cfg_error (cfg_error)
  );

  payload_reset_gen #(
    .RESET_CYCLES(RESET_CYCLES)
  ) u_rst (
    .clk       (osc_25m),
    .por_n     (por_n),
    .reset_req (mmc_reset_req),
    .fpga_reset(fpga_reset)
  );

endmodule
