// tb_jtag_chain_bridge: checks the CPLD JTAG bridge two ways.
// 1. Static routing: random pin levels, every output compared with a
//    reference that walks the chain FPGA -> FMC0 -> FMC1 and skips empty
//    slots.
// 2. Chain length: the three devices are bypass-register models; for every
//    master and every combination of fitted FMC cards a random bit stream
//    is clocked in and must return delayed by exactly the number of
//    devices in the chain (1 to 3 TCK periods).
module tb_jtag_chain_bridge;
  logic sel_amc;
  logic hdr_tck, hdr_tms, hdr_tdi, hdr_tdo, hdr_tdo_oe;
  logic amc_tck, amc_tms, amc_tdi, amc_tdo, amc_tdo_oe;
  logic fpga_tck, fpga_tms, fpga_tdi, fpga_tdo;
  logic [1:0] fmc_tck, fmc_tms, fmc_tdi, fmc_tdo, fmc_prsnt_l;
  logic use_models;
  logic fpga_tdo_drv, fpga_tdo_mdl;
  logic [1:0] fmc_tdo_drv, fmc_tdo_mdl;
  int checks = 0, failures = 0;

  assign fpga_tdo = use_models ? fpga_tdo_mdl : fpga_tdo_drv;
  assign fmc_tdo  = use_models ? fmc_tdo_mdl  : fmc_tdo_drv;

  jtag_chain_bridge dut (.*);

  tb_jtag_bypass_dev u_fpga (.tck(fpga_tck),   .tdi(fpga_tdi),   .tdo(fpga_tdo_mdl));
  tb_jtag_bypass_dev u_fmc0 (.tck(fmc_tck[0]), .tdi(fmc_tdi[0]), .tdo(fmc_tdo_mdl[0]));
  tb_jtag_bypass_dev u_fmc1 (.tck(fmc_tck[1]), .tdi(fmc_tdi[1]), .tdo(fmc_tdo_mdl[1]));

  task automatic chk(string name, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %b expected %b", name, got, exp);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic m_tck, m_tms, m_tdi, last, ret;
    logic [63:0] stream;
    int ndev;
    use_models = 0;
    // 1. static routing
    for (int n = 0; n < 2000; n++) begin
      {sel_amc, hdr_tck, hdr_tms, hdr_tdi, amc_tck, amc_tms, amc_tdi} = 7'($urandom);
      fpga_tdo_drv = 1'($urandom); fmc_tdo_drv = 2'($urandom); fmc_prsnt_l = 2'($urandom);
      #1;
      m_tck = sel_amc ? amc_tck : hdr_tck;
      m_tms = sel_amc ? amc_tms : hdr_tms;
      m_tdi = sel_amc ? amc_tdi : hdr_tdi;
      chk("fpga_tck", fpga_tck, m_tck);
      chk("fpga_tms", fpga_tms, m_tms);
      chk("fpga_tdi", fpga_tdi, m_tdi);
      for (int i = 0; i < 2; i++) begin
        chk("fmc_tck", fmc_tck[i], m_tck);
        chk("fmc_tms", fmc_tms[i], m_tms);
      end
      last = fpga_tdo_drv;
      chk("fmc0_tdi", fmc_tdi[0], last);
      if (fmc_prsnt_l[0] == 1'b0) last = fmc_tdo_drv[0];
      chk("fmc1_tdi", fmc_tdi[1], last);
      if (fmc_prsnt_l[1] == 1'b0) last = fmc_tdo_drv[1];
      chk("hdr_tdo_oe", hdr_tdo_oe, !sel_amc);
      chk("amc_tdo_oe", amc_tdo_oe, sel_amc);
      chk("hdr_tdo", hdr_tdo, !sel_amc && last);
      chk("amc_tdo", amc_tdo, sel_amc && last);
    end
    // 2. chain length through bypass models
    use_models = 1;
    hdr_tck = 0; amc_tck = 0; hdr_tms = 0; amc_tms = 0;
    for (int m = 0; m < 2; m++) begin
      for (int p = 0; p < 4; p++) begin
        sel_amc = m[0];
        fmc_prsnt_l = ~p[1:0];
        ndev = 1 + p[0] + p[1];
        stream = {$urandom, $urandom};
        for (int b = 0; b < 64 + 4; b++) begin
          if (sel_amc) amc_tdi = (b < 64) ? stream[b] : 1'b0;
          else         hdr_tdi = (b < 64) ? stream[b] : 1'b0;
          #5;
          if (sel_amc) amc_tck = 1; else hdr_tck = 1;
          #5;
          if (sel_amc) amc_tck = 0; else hdr_tck = 0;
          #1;
          ret = sel_amc ? amc_tdo : hdr_tdo;
          // after the falling edge of cycle b, TDO shows the bit shifted in
          // ndev-1 cycles earlier
          if (b - (ndev - 1) >= 0 && b - (ndev - 1) < 64)
            chk($sformatf("chain m=%0d p=%0d bit %0d", m, p, b), ret, stream[b - (ndev - 1)]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
