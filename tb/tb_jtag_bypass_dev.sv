// tb_jtag_bypass_dev: testbench model of a JTAG device left in BYPASS.
// Its one-bit bypass register samples TDI on the rising edge of TCK and
// drives TDO from the falling edge, as IEEE 1149.1 prescribes, so a chain
// of N such devices delays the data by N TCK periods. The TAP state machine
// is not modelled.
module tb_jtag_bypass_dev (
  input  logic tck,
  input  logic tdi,
  output logic tdo
);
  logic bypass_q = 1'b0;
  initial tdo = 1'b0;
  always @(posedge tck) bypass_q <= tdi;
  always @(negedge tck) tdo <= bypass_q;
endmodule
