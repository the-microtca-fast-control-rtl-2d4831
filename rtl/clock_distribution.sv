// clock_distribution: the board clock tree of six 4:4 cross-point switches.
//
// The switches route every clock source of the board to the FPGA clock pins,
// to the jitter-cleaning PLL and back to the AMC backplane:
//   A  oscillators 156.25 MHz (programmable), 125 MHz, 200 MHz, and an FPGA
//      output.  out0 -> D, out1 -> FPGA SRCC bank14, out2 -> FPGA bank116,
//      out3 -> F.
//   B  AMC FCLKA, TCLKA, TCLKC and the LEMO clock input.  out0 -> D,
//      out1 -> FPGA SRCC bank14, out2 -> 874001 buffer (to FPGA bank115),
//      out3 -> F.
//   C  FMC0 GBTCLK0, GBTCLK1, CLK0, CLK1.  out0 -> FPGA bank118,
//      out1 -> FPGA MRCC bank16, out2 -> D, out3 unused.
//   E  FMC1, the same four.  out0 -> FPGA bank117, out1 -> FPGA MRCC bank12,
//      out3 -> D, out2 unused.
//   D  second stage over A, B, C, E.  out0 -> PLL reference input,
//      out1 -> FPGA MRCC bank14, out2 -> FPGA bank115, out3 -> FPGA bank116.
//   F  two PLL outputs, A and B.  out0 -> FPGA bank117, out1 -> FPGA bank118,
//      out2 -> AMC TCLKB, out3 -> AMC TCLKD.
// The sources, destinations and switch letters are those of the board's
// clock diagram; which pin of a switch each line uses is read from that
// drawing (pin 0 at the top) and is this model's interpretation. The PLL
// (CDCE62005) and the 874001 buffer are analog parts and stay outside:
// their inputs leave as outputs, the two PLL outputs feeding F come in as
// inputs. The third oscillator is labelled 20 MHz in the diagram and 200 MHz
// in the board description; the port keeps the diagram's name.
// All paths are combinational. Each sel_x[o] picks the input of output o of
// switch x.
module clock_distribution
  import ufc_pkg::*;
(
  // switch A sources
  input  logic osc_156m25,
  input  logic osc_125m,
  input  logic osc_20m,
  input  logic fpga_to_a,
  // switch B sources
  input  logic amc_fclka,
  input  logic amc_tclka,
  input  logic amc_tclkc,
  input  logic lemo_clk_in,
  // switch C and E sources: {CLK1, CLK0, GBTCLK1, GBTCLK0}
  input  logic [3:0] fmc0_clk_m2c,
  input  logic [3:0] fmc1_clk_m2c,
  // PLL outputs into switch F
  input  logic pll_to_f0,
  input  logic pll_to_f3,
  // switch configuration
  input  xpt_sel_t [3:0] sel_a,
  input  xpt_sel_t [3:0] sel_b,
  input  xpt_sel_t [3:0] sel_c,
  input  xpt_sel_t [3:0] sel_d,
  input  xpt_sel_t [3:0] sel_e,
  input  xpt_sel_t [3:0] sel_f,
  // destinations
  output logic fpga_srcc14_a,
  output logic fpga_b116_a,
  output logic fpga_srcc14_b,
  output logic to_874001,
  output logic fpga_b118_c,
  output logic fpga_mrcc16_c,
  output logic fpga_b117_e,
  output logic fpga_mrcc12_e,
  output logic pll_in,
  output logic fpga_mrcc14_d,
  output logic fpga_b115_d,
  output logic fpga_b116_d,
  output logic fpga_b117_f,
  output logic fpga_b118_f,
  output logic amc_tclkb,
  output logic amc_tclkd
);

  logic [3:0] a_out, b_out, c_out, d_out, e_out, f_out;

  clk_xpoint_4x4 u_a (.clk_in({fpga_to_a, osc_20m, osc_125m, osc_156m25}),
                      .sel(sel_a), .clk_out(a_out));
  clk_xpoint_4x4 u_b (.clk_in({lemo_clk_in, amc_tclkc, amc_tclka, amc_fclka}),
                      .sel(sel_b), .clk_out(b_out));
  clk_xpoint_4x4 u_c (.clk_in(fmc0_clk_m2c), .sel(sel_c), .clk_out(c_out));
  clk_xpoint_4x4 u_e (.clk_in(fmc1_clk_m2c), .sel(sel_e), .clk_out(e_out));
  clk_xpoint_4x4 u_d (.clk_in({e_out[3], c_out[2], b_out[0], a_out[0]}),
                      .sel(sel_d), .clk_out(d_out));
  clk_xpoint_4x4 u_f (.clk_in({pll_to_f3, b_out[3], a_out[3], pll_to_f0}),
                      .sel(sel_f), .clk_out(f_out));

  assign fpga_srcc14_a = a_out[1];
  assign fpga_b116_a   = a_out[2];
  assign fpga_srcc14_b = b_out[1];
  assign to_874001     = b_out[2];
  assign fpga_b118_c   = c_out[0];
  assign fpga_mrcc16_c = c_out[1];
  assign fpga_b117_e   = e_out[0];
  assign fpga_mrcc12_e = e_out[1];
  assign pll_in        = d_out[0];
  assign fpga_mrcc14_d = d_out[1];
  assign fpga_b115_d   = d_out[2];
  assign fpga_b116_d   = d_out[3];
  assign fpga_b117_f   = f_out[0];
  assign fpga_b118_f   = f_out[1];
  assign amc_tclkb     = f_out[2];
  assign amc_tclkd     = f_out[3];

endmodule
