// tb_ufc_cpld: checks the CPLD as a whole with models of the FPGA's JTAG
// and configuration pins and of two FMC cards: the 25 MHz clock reaches
// the FPGA, the chain length seen by each master follows the fitted cards,
// a reload pulses PROG_B for PROG_CYCLES and ends in CFG_DONE, and a
// payload reset request gives a RESET_CYCLES-long reset.
module tb_ufc_cpld;
  import ufc_pkg::*;
  localparam int unsigned PC = 25, TO = 20000, RC = 100;
  logic osc_25m = 0, por_n = 0, fpga_clk25;
  logic jtag_sel_amc = 0;
  logic hdr_tck = 0, hdr_tms = 0, hdr_tdi = 0, hdr_tdo, hdr_tdo_oe;
  logic amc_tck = 0, amc_tms = 0, amc_tdi = 0, amc_tdo, amc_tdo_oe;
  logic fpga_tck, fpga_tms, fpga_tdi, fpga_tdo;
  logic [1:0] fmc_tck, fmc_tms, fmc_tdi, fmc_tdo, fmc_prsnt_l;
  logic mmc_reload_req = 0, mmc_reset_req = 0;
  logic fpga_init_b, fpga_done, fpga_prog_b, fpga_reset;
  cfg_state_t cfg_state;
  logic cfg_busy, cfg_done, cfg_error;
  int checks = 0, failures = 0;
  int clk25_edges = 0;

  ufc_cpld #(.PROG_CYCLES(PC), .TIMEOUT_CYCLES(TO), .RESET_CYCLES(RC)) dut (.*);

  tb_jtag_bypass_dev u_fpga (.tck(fpga_tck),   .tdi(fpga_tdi),   .tdo(fpga_tdo));
  tb_jtag_bypass_dev u_fmc0 (.tck(fmc_tck[0]), .tdi(fmc_tdi[0]), .tdo(fmc_tdo[0]));
  tb_jtag_bypass_dev u_fmc1 (.tck(fmc_tck[1]), .tdi(fmc_tdi[1]), .tdo(fmc_tdo[1]));
  tb_fpga_cfg_model #(.CLEAR_CYCLES(30), .LOAD_CYCLES(150)) u_cfgm (
    .clk(osc_25m), .prog_b(fpga_prog_b), .crc_fail(1'b0), .hang(1'b0),
    .init_b(fpga_init_b), .done(fpga_done));

  always #20 osc_25m = ~osc_25m;
  always @(posedge fpga_clk25) clk25_edges++;

  task automatic chk(string name, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got %0d expected %0d", name, got, exp);
    end
  endtask

  // shift 32 random bits through the selected master, return the delay
  task automatic chain_delay(output int delay);
    logic [31:0] s;
    logic [39:0] r;
    s = $urandom;
    for (int b = 0; b < 40; b++) begin
      if (jtag_sel_amc) amc_tdi = (b < 32) ? s[b] : 1'b0;
      else              hdr_tdi = (b < 32) ? s[b] : 1'b0;
      #50; if (jtag_sel_amc) amc_tck = 1; else hdr_tck = 1;
      #50; if (jtag_sel_amc) amc_tck = 0; else hdr_tck = 0;
      #1 r[b] = jtag_sel_amc ? amc_tdo : hdr_tdo;
    end
    delay = -1;
    for (int d = 3; d >= 0; d--) if (r[d +: 32] == s) delay = d + 1;
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d, n;
    repeat (3) @(posedge osc_25m);
    #1 por_n = 1;
    // clock forwarding: 25 edges in 1 us
    clk25_edges = 0;
    #1000;
    chk("25 MHz forwarded", clk25_edges, 25);
    // JTAG chain for both masters and all card combinations
    for (int m = 0; m < 2; m++)
      for (int p = 0; p < 4; p++) begin
        jtag_sel_amc = m[0];
        fmc_prsnt_l  = ~p[1:0];
        chain_delay(d);
        chk($sformatf("chain length master %0d cards %0d", m, p), d, 1 + p[0] + p[1]);
      end
    // power-on reset released
    n = 0;
    while (fpga_reset && n < 1000) begin @(posedge osc_25m); #1; n++; end
    chk("por reset released", fpga_reset, 0);
    // reload
    n = 0;
    while (cfg_state != CFG_DONE && n < 100) begin @(posedge osc_25m); #1; n++; end
    chk("boot status done", cfg_state, CFG_DONE);
    @(posedge osc_25m); #1 mmc_reload_req = 1;
    n = 0;
    while (fpga_prog_b && n < 20) begin @(posedge osc_25m); #1; n++; end
    mmc_reload_req = 0;
    n = 0;
    while (!fpga_prog_b && n < 100) begin @(posedge osc_25m); #1; n++; end
    chk("prog width", n, PC);
    n = 0;
    while (cfg_state != CFG_DONE && n < 1000) begin @(posedge osc_25m); #1; n++; end
    chk("reload done", cfg_done, 1);
    // payload reset
    mmc_reset_req = 1;
    n = 0;
    while (!fpga_reset && n < 20) begin @(posedge osc_25m); #1; n++; end
    chk("reset latency", n, 3);
    mmc_reset_req = 0;
    n = 0;
    while (fpga_reset && n < 1000) begin @(posedge osc_25m); #1; n++; end
    chk("reset width", n, RC);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
