// jtag_chain_bridge: the CPLD's JTAG master selector and chain builder.
//
// Two JTAG masters can reach the board: the 14-pin cable header and the
// JTAG lines of the AMC backplane connector. sel_amc picks one (1 = AMC,
// 0 = header); its TCK and TMS go to every device, and its TDI enters the
// scan chain FPGA -> FMC0 -> FMC1 -> back to the master's TDO. An FMC slot
// is part of the chain only while its card is fitted, which the card
// signals by pulling PRSNT_M2C_L low; an empty slot is bypassed, so the
// master sees 1, 2 or 3 devices. A fitted card must connect its own TDI to
// TDO (through a device or a jumper) for the chain to close.
// The master selection and the automatic insertion of fitted cards follow
// the board description; the chain order, the select input, and driving
// TDO only towards the selected master (the *_tdo_oe outputs stand for the
// tri-state pin enables) are this design's choices.
// Timing: purely combinational, as the JTAG pins pass straight through the
// CPLD; the chain is rebuilt as soon as a present signal changes, so cards
// should not be inserted during a scan.
module jtag_chain_bridge (
  input  logic       sel_amc,
  // JTAG header (master 0)
  input  logic       hdr_tck,
  input  logic       hdr_tms,
  input  logic       hdr_tdi,
  output logic       hdr_tdo,
  output logic       hdr_tdo_oe,
  // AMC backplane JTAG (master 1)
  input  logic       amc_tck,
  input  logic       amc_tms,
  input  logic       amc_tdi,
  output logic       amc_tdo,
  output logic       amc_tdo_oe,
  // FPGA
  output logic       fpga_tck,
  output logic       fpga_tms,
  output logic       fpga_tdi,
  input  logic       fpga_tdo,
  // FMC0 / FMC1 slots, index = slot
  output logic [1:0] fmc_tck,
  output logic [1:0] fmc_tms,
  output logic [1:0] fmc_tdi,
  input  logic [1:0] fmc_tdo,
  input  logic [1:0] fmc_prsnt_l
);

  logic m_tck, m_tms, m_tdi, chain_tdo, fmc0_out;
  logic [1:0] fmc_present;

  assign fmc_present = ~fmc_prsnt_l;

  // master selection
  assign m_tck = sel_amc ? amc_tck : hdr_tck;
  assign m_tms = sel_amc ? amc_tms : hdr_tms;
  assign m_tdi = sel_amc ? amc_tdi : hdr_tdi;

  // clock and mode to every device
  assign fpga_tck = m_tck;
  assign fpga_tms = m_tms;
  assign fmc_tck  = {2{m_tck}};
  assign fmc_tms  = {2{m_tms}};

  // data chain: master -> FPGA -> [FMC0] -> [FMC1] -> master
  assign fpga_tdi   = m_tdi;
  assign fmc_tdi[0] = fpga_tdo;
  assign fmc0_out   = fmc_present[0] ? fmc_tdo[0] : fpga_tdo;
  assign fmc_tdi[1] = fmc0_out;
  assign chain_tdo  = fmc_present[1] ? fmc_tdo[1] : fmc0_out;

  // return to the selected master only
  assign hdr_tdo_oe = ~sel_amc;
  assign amc_tdo_oe =  sel_amc;
  assign hdr_tdo    = hdr_tdo_oe & chain_tdo;
  assign amc_tdo    = amc_tdo_oe & chain_tdo;

endmodule
