// tb_clock_distribution: checks every route of the six-switch clock tree.
// Random source levels and random switch settings are applied; each of the
// sixteen destinations is compared with a reference that follows the
// board's clock diagram path by path (source list per switch pin, then the
// second-stage switches D and F over the first-stage outputs).
module tb_clock_distribution;
  import ufc_pkg::*;
  logic osc_156m25, osc_125m, osc_20m, fpga_to_a;
  logic amc_fclka, amc_tclka, amc_tclkc, lemo_clk_in;
  logic [3:0] fmc0_clk_m2c, fmc1_clk_m2c;
  logic pll_to_f0, pll_to_f3;
  xpt_sel_t [3:0] sel_a, sel_b, sel_c, sel_d, sel_e, sel_f;
  logic fpga_srcc14_a, fpga_b116_a, fpga_srcc14_b, to_874001, fpga_b118_c,
        fpga_mrcc16_c, fpga_b117_e, fpga_mrcc12_e, pll_in, fpga_mrcc14_d,
        fpga_b115_d, fpga_b116_d, fpga_b117_f, fpga_b118_f, amc_tclkb, amc_tclkd;
  int checks = 0, failures = 0;

  clock_distribution dut (.*);

  function automatic logic pick(logic [3:0] v, xpt_sel_t s);
    return v[s];
  endfunction

  task automatic chk(string name, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %b expected %b", name, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] a_src, b_src, d_src, f_src;
    for (int n = 0; n < 4000; n++) begin
      {osc_156m25, osc_125m, osc_20m, fpga_to_a} = 4'($urandom);
      {amc_fclka, amc_tclka, amc_tclkc, lemo_clk_in} = 4'($urandom);
      fmc0_clk_m2c = 4'($urandom); fmc1_clk_m2c = 4'($urandom);
      {pll_to_f0, pll_to_f3} = 2'($urandom);
      sel_a = 8'($urandom); sel_b = 8'($urandom); sel_c = 8'($urandom);
      sel_d = 8'($urandom); sel_e = 8'($urandom); sel_f = 8'($urandom);
      #1;
      // pin order of the first-stage switches, pin 0 first
      a_src = {fpga_to_a, osc_20m, osc_125m, osc_156m25};
      b_src = {lemo_clk_in, amc_tclkc, amc_tclka, amc_fclka};
      // D pins: A out0, B out0, C out2, E out3
      d_src = {pick(fmc1_clk_m2c, sel_e[3]), pick(fmc0_clk_m2c, sel_c[2]),
               pick(b_src, sel_b[0]), pick(a_src, sel_a[0])};
      // F pins: PLL, A out3, B out3, PLL
      f_src = {pll_to_f3, pick(b_src, sel_b[3]), pick(a_src, sel_a[3]), pll_to_f0};
      chk("fpga_srcc14_a", fpga_srcc14_a, pick(a_src, sel_a[1]));
      chk("fpga_b116_a",   fpga_b116_a,   pick(a_src, sel_a[2]));
      chk("fpga_srcc14_b", fpga_srcc14_b, pick(b_src, sel_b[1]));
      chk("to_874001",     to_874001,     pick(b_src, sel_b[2]));
      chk("fpga_b118_c",   fpga_b118_c,   pick(fmc0_clk_m2c, sel_c[0]));
      chk("fpga_mrcc16_c", fpga_mrcc16_c, pick(fmc0_clk_m2c, sel_c[1]));
      chk("fpga_b117_e",   fpga_b117_e,   pick(fmc1_clk_m2c, sel_e[0]));
      chk("fpga_mrcc12_e", fpga_mrcc12_e, pick(fmc1_clk_m2c, sel_e[1]));
      chk("pll_in",        pll_in,        pick(d_src, sel_d[0]));
      chk("fpga_mrcc14_d", fpga_mrcc14_d, pick(d_src, sel_d[1]));
      chk("fpga_b115_d",   fpga_b115_d,   pick(d_src, sel_d[2]));
      chk("fpga_b116_d",   fpga_b116_d,   pick(d_src, sel_d[3]));
      chk("fpga_b117_f",   fpga_b117_f,   pick(f_src, sel_f[0]));
      chk("fpga_b118_f",   fpga_b118_f,   pick(f_src, sel_f[1]));
      chk("amc_tclkb",     amc_tclkb,     pick(f_src, sel_f[2]));
      chk("amc_tclkd",     amc_tclkd,     pick(f_src, sel_f[3]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
