// tb_ufc_board: end-to-end test of the board logic at its default sizes.
//
// Every clock source runs at its own frequency (oscillators at their
// nominal values, 200 MHz for the IO-delay oscillator, distinct made-up
// frequencies for the AMC, FMC, LEMO and PLL clocks). For a series of
// switch settings the rising edges on all sixteen routed clock outputs are
// counted over a 4 us window and compared with the count expected from the
// source the settings select; the reference walks the clock diagram switch
// by switch. Then the JTAG chain length is measured from both masters with
// every combination of fitted FMC cards, the FPGA is reloaded once
// successfully and once with a CRC error, and a payload reset is issued.
// The readout application forwards frames on all four links in both
// directions once the power-on reset has released it, and one DAQ link is
// stalled until its buffer overflows and drops two frames.
// Each mechanism is counted; one that never happened is a failure.
module tb_ufc_board;
  import ufc_pkg::*;

  // ---------------- clocks (periods in ps) ----------------
  localparam int NSRC = 18;
  // 0 osc_156m25, 1 osc_125m, 2 osc_20m (200 MHz), 3 fpga_to_a,
  // 4 fclka, 5 tclka, 6 tclkc, 7 lemo, 8..11 fmc0, 12..15 fmc1,
  // 16 pll_to_f0, 17 pll_to_f3
  localparam int PER [NSRC] = '{6400, 8000, 5000, 20000, 10000, 16000, 25000,
                                100000, 3000, 3600, 4400, 12000, 4800, 5600,
                                7200, 14000, 2500, 9000};
  localparam int WINDOW_PS = 4_000_000;
  logic [NSRC-1:0] src = '0;
  for (genvar i = 0; i < NSRC; i++) begin : g_src
    always #(PER[i] / 2 * 1ps) src[i] = ~src[i];
  end

  logic osc_25m = 0, por_n = 0;
  always #20ns osc_25m = ~osc_25m;

  // ---------------- DUT ----------------
  xpt_sel_t [3:0] sel_a, sel_b, sel_c, sel_d, sel_e, sel_f;
  logic fpga_clk25, fpga_srcc14_a, fpga_b116_a, fpga_srcc14_b, to_874001,
        fpga_b118_c, fpga_mrcc16_c, fpga_b117_e, fpga_mrcc12_e, pll_in,
        fpga_mrcc14_d, fpga_b115_d, fpga_b116_d, fpga_b117_f, fpga_b118_f,
        amc_tclkb, amc_tclkd;
  logic jtag_sel_amc = 0;
  logic hdr_tck = 0, hdr_tms = 0, hdr_tdi = 0, hdr_tdo, hdr_tdo_oe;
  logic amc_tck = 0, amc_tms = 0, amc_tdi = 0, amc_tdo, amc_tdo_oe;
  logic fpga_tck, fpga_tms, fpga_tdi, fpga_tdo;
  logic [1:0] fmc_tck, fmc_tms, fmc_tdi, fmc_tdo, fmc_prsnt_l = 2'b11;
  logic mmc_reload_req = 0, mmc_reset_req = 0;
  logic fpga_init_b, fpga_done, fpga_prog_b, fpga_reset;
  logic crc_fail = 0;
  cfg_state_t cfg_state;
  logic cfg_busy, cfg_done, cfg_error;

  ufc_board dut (
    .osc_25m, .osc_156m25(src[0]), .osc_125m(src[1]), .osc_20m(src[2]), .por_n,
    .fpga_to_a(src[3]), .amc_fclka(src[4]), .amc_tclka(src[5]), .amc_tclkc(src[6]),
    .lemo_clk_in(src[7]), .fmc0_clk_m2c(src[11:8]), .fmc1_clk_m2c(src[15:12]),
    .pll_to_f0(src[16]), .pll_to_f3(src[17]),
    .sel_a, .sel_b, .sel_c, .sel_d, .sel_e, .sel_f,
    .fpga_clk25, .fpga_srcc14_a, .fpga_b116_a, .fpga_srcc14_b, .to_874001,
    .fpga_b118_c, .fpga_mrcc16_c, .fpga_b117_e, .fpga_mrcc12_e, .pll_in,
    .fpga_mrcc14_d, .fpga_b115_d, .fpga_b116_d, .fpga_b117_f, .fpga_b118_f,
    .amc_tclkb, .amc_tclkd,
    .jtag_sel_amc, .hdr_tck, .hdr_tms, .hdr_tdi, .hdr_tdo, .hdr_tdo_oe,
    .amc_tck, .amc_tms, .amc_tdi, .amc_tdo, .amc_tdo_oe,
    .fpga_tck, .fpga_tms, .fpga_tdi, .fpga_tdo,
    .fmc_tck, .fmc_tms, .fmc_tdi, .fmc_tdo, .fmc_prsnt_l,
    .mmc_reload_req, .mmc_reset_req, .fpga_init_b, .fpga_done,
    .fpga_prog_b, .fpga_reset, .cfg_state, .cfg_busy, .cfg_done, .cfg_error,
    .app_clk, .lemo_gate_in, .fe_rx_valid, .fe_rx_beat, .fe_tx_valid, .fe_tx_ready,
    .fe_tx_beat, .daq_rx_valid, .daq_rx_beat, .daq_tx_valid, .daq_tx_ready,
    .daq_tx_beat, .up_drops, .down_drops, .up_overflow, .down_overflow,
    .fe_clk, .fe_trig);

  // readout application
  localparam int NL = 4;
  logic app_clk = 0, lemo_gate_in = 0;
  always #3.2ns app_clk = ~app_clk;
  logic  [NL-1:0] fe_rx_valid = '0, fe_tx_valid, fe_tx_ready = '1;
  beat_t [NL-1:0] fe_rx_beat = '0, fe_tx_beat;
  logic  [NL-1:0] daq_rx_valid = '0, daq_tx_valid, daq_tx_ready = '1;
  beat_t [NL-1:0] daq_rx_beat = '0, daq_tx_beat;
  logic  [NL-1:0][31:0] up_drops, down_drops;
  logic  [NL-1:0] up_overflow, down_overflow, fe_clk, fe_trig;

  tb_jtag_bypass_dev u_fpga (.tck(fpga_tck),   .tdi(fpga_tdi),   .tdo(fpga_tdo));
  tb_jtag_bypass_dev u_fmc0 (.tck(fmc_tck[0]), .tdi(fmc_tdi[0]), .tdo(fmc_tdo[0]));
  tb_jtag_bypass_dev u_fmc1 (.tck(fmc_tck[1]), .tdi(fmc_tdi[1]), .tdo(fmc_tdo[1]));
  tb_fpga_cfg_model #(.CLEAR_CYCLES(60), .LOAD_CYCLES(400)) u_cfgm (
    .clk(osc_25m), .prog_b(fpga_prog_b), .crc_fail, .hang(1'b0),
    .init_b(fpga_init_b), .done(fpga_done));

  // ---------------- edge counters on the 17 clock outputs ----------------
  localparam int NDST = 17;
  logic [NDST-1:0] dst;
  assign dst = {fpga_clk25, amc_tclkd, amc_tclkb, fpga_b118_f, fpga_b117_f,
                fpga_b116_d, fpga_b115_d, fpga_mrcc14_d, pll_in,
                fpga_mrcc12_e, fpga_b117_e, fpga_mrcc16_c, fpga_b118_c,
                to_874001, fpga_srcc14_b, fpga_b116_a, fpga_srcc14_a};
  int edges [NDST];
  logic counting = 0;
  for (genvar i = 0; i < NDST; i++) begin : g_cnt
    always @(posedge dst[i]) if (counting) edges[i]++;
  end

  // ---------------- checking ----------------
  int checks = 0, failures = 0;
  int n_route = 0, n_two_stage = 0, n_pll_path = 0, n_reconfig = 0;
  int n_master_hdr = 0, n_master_amc = 0, n_fmc_bypass = 0, n_fmc_insert = 0;
  int n_reload_ok = 0, n_reload_err = 0, n_payload_reset = 0;

  task automatic chk(string name, int got, int exp, int tol = 0);
    checks++;
    if (got > exp + tol || got < exp - tol) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d expected %0d", name, got, exp);
    end
  endtask

  // expected source index of each routed output, walking the clock diagram
  function automatic int a_src(xpt_sel_t s); return 0 + s; endfunction
  function automatic int b_src(xpt_sel_t s); return 4 + s; endfunction
  function automatic int c_src(xpt_sel_t s); return 8 + s; endfunction
  function automatic int e_src(xpt_sel_t s); return 12 + s; endfunction
  function automatic int d_src(xpt_sel_t s);
    case (s)
      2'd0: return a_src(sel_a[0]);
      2'd1: return b_src(sel_b[0]);
      2'd2: return c_src(sel_c[2]);
      default: return e_src(sel_e[3]);
    endcase
  endfunction
  function automatic int f_src(xpt_sel_t s);
    case (s)
      2'd0: return 16;
      2'd1: return a_src(sel_a[3]);
      2'd2: return b_src(sel_b[3]);
      default: return 17;
    endcase
  endfunction

  task automatic check_clocks();
    int exp_src [NDST-1];
    exp_src = '{a_src(sel_a[1]), a_src(sel_a[2]), b_src(sel_b[1]), b_src(sel_b[2]),
                c_src(sel_c[0]), c_src(sel_c[1]), e_src(sel_e[0]), e_src(sel_e[1]),
                d_src(sel_d[0]), d_src(sel_d[1]), d_src(sel_d[2]), d_src(sel_d[3]),
                f_src(sel_f[0]), f_src(sel_f[1]), f_src(sel_f[2]), f_src(sel_f[3])};
    #1ns;
    foreach (edges[i]) edges[i] = 0;
    counting = 1;
    #(WINDOW_PS * 1ps);
    counting = 0;
    for (int i = 0; i < NDST - 1; i++) begin
      chk($sformatf("clock output %0d from source %0d", i, exp_src[i]),
          edges[i], WINDOW_PS / PER[exp_src[i]], 1);
    end
    chk("25 MHz to FPGA", edges[NDST-1], WINDOW_PS / 40000, 1);
    n_route += NDST - 1;
    for (int o = 0; o < 4; o++) begin
      if (sel_d[o] >= 2) n_two_stage++;
      if (sel_f[o] == 0 || sel_f[o] == 3) n_pll_path++;
    end
    n_reconfig++;
  endtask

  // frame scoreboards: expected words per link and direction
  beat_t up_q[NL][$], down_q[NL][$], pend[$];
  int n_up_words = 0, n_down_words = 0, n_overflow = 0, n_fanout = 0, seqn = 0;
  always @(negedge app_clk) begin
    beat_t e;
    for (int i = 0; i < NL; i++) begin
      if (daq_tx_valid[i] && daq_tx_ready[i]) begin
        e = up_q[i].pop_front();
        checks++;
        if (daq_tx_beat[i] !== e) begin
          failures++;
          if (failures < 20) $display("FAIL up link %0d word %h expected %h", i, daq_tx_beat[i], e);
        end
        n_up_words++;
      end
      if (fe_tx_valid[i] && fe_tx_ready[i]) begin
        e = down_q[i].pop_front();
        checks++;
        if (fe_tx_beat[i] !== e) begin
          failures++;
          if (failures < 20) $display("FAIL down link %0d word %h expected %h", i, fe_tx_beat[i], e);
        end
        n_down_words++;
      end
    end
    if (|up_overflow) n_overflow++;
  end

  // send one frame on one link; keep = the frame is expected to arrive
  task automatic send_frame(bit up, int link, int len, bit keep);
    beat_t b;
    pend.delete();
    for (int w = 0; w < len; w++) begin
      @(negedge app_clk);
      b.data = {8'(link), 24'(seqn++), 32'($urandom)};
      b.keep = 8'hff;
      b.last = (w == len - 1);
      pend.push_back(b);
      if (up) begin fe_rx_beat[link] = b;  fe_rx_valid[link] = 1; end
      else    begin daq_rx_beat[link] = b; daq_rx_valid[link] = 1; end
    end
    @(negedge app_clk);
    fe_rx_valid[link] = 0; daq_rx_valid[link] = 0;
    if (keep)
      foreach (pend[k]) if (up) up_q[link].push_back(pend[k]); else down_q[link].push_back(pend[k]);
  endtask

  task automatic chain_delay(output int delay);
    logic [31:0] s;
    logic [39:0] r;
    s = $urandom;
    for (int b = 0; b < 40; b++) begin
      if (jtag_sel_amc) amc_tdi = (b < 32) ? s[b] : 1'b0;
      else              hdr_tdi = (b < 32) ? s[b] : 1'b0;
      #50ns; if (jtag_sel_amc) amc_tck = 1; else hdr_tck = 1;
      #50ns; if (jtag_sel_amc) amc_tck = 0; else hdr_tck = 0;
      #1ns r[b] = jtag_sel_amc ? amc_tdo : hdr_tdo;
    end
    delay = -1;
    for (int d = 3; d >= 0; d--) if (r[d +: 32] == s) delay = d + 1;
  endtask

  task automatic mech(string name, int n);
    checks++;
    $display("mechanism %-28s happened %0d times", name, n);
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism %s never happened", name);
    end
  endtask

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int d, n;
    // ---- clock tree: identity settings, then random settings ----
    sel_a = {2'd3, 2'd2, 2'd1, 2'd0}; sel_b = {2'd3, 2'd2, 2'd1, 2'd0};
    sel_c = {2'd3, 2'd2, 2'd1, 2'd0}; sel_e = {2'd3, 2'd2, 2'd1, 2'd0};
    sel_d = {2'd3, 2'd2, 2'd1, 2'd0}; sel_f = {2'd3, 2'd2, 2'd1, 2'd0};
    check_clocks();
    for (int k = 0; k < 12; k++) begin
      sel_a = 8'($urandom); sel_b = 8'($urandom); sel_c = 8'($urandom);
      sel_d = 8'($urandom); sel_e = 8'($urandom); sel_f = 8'($urandom);
      check_clocks();
    end

    // ---- power-on reset ----
    @(posedge osc_25m); #1ns por_n = 1;
    n = 0;
    while (fpga_reset && n < 5000) begin @(posedge osc_25m); #1ns; n++; end
    chk("power-on reset length", n, 2501);

    // ---- readout forwarding ----
    repeat (4) @(posedge app_clk);
    for (int l = 0; l < NL; l++) begin
      send_frame(1, l, 16, 1);
      send_frame(0, l, 4, 1);
      send_frame(1, l, 1 + $urandom_range(0, 60), 1);
    end
    repeat (100) @(posedge app_clk);
    for (int l = 0; l < NL; l++) begin
      chk("up frames delivered", up_q[l].size(), 0);
      chk("down frames delivered", down_q[l].size(), 0);
    end
    // stall DAQ link 0: 20 frames of 100 words fit in 2048, the next two drop
    daq_tx_ready[0] = 0;
    for (int f = 0; f < 22; f++) send_frame(1, 0, 100, f < 20);
    chk("frames dropped on overflow", up_drops[0], 2);
    daq_tx_ready[0] = 1;
    repeat (2100) @(posedge app_clk);
    chk("stalled link drained", up_q[0].size(), 0);
    // clock and gate fan-out to the front-end connectors
    for (int k = 0; k < 4; k++) begin
      lemo_gate_in = k[0];
      #1ns;
      chk("fe_trig fan-out", fe_trig, {NL{lemo_gate_in}});
      chk("fe_clk fan-out", fe_clk, {NL{src[7]}});
      n_fanout++;
      #37ns;
    end

    // ---- JTAG ----
    for (int m = 0; m < 2; m++)
      for (int p = 0; p < 4; p++) begin
        jtag_sel_amc = m[0];
        fmc_prsnt_l  = ~p[1:0];
        chain_delay(d);
        chk($sformatf("chain length master %0d cards %0d", m, p), d, 1 + p[0] + p[1]);
        if (m == 0) n_master_hdr++; else n_master_amc++;
        n_fmc_bypass += 2 - p[0] - p[1];
        n_fmc_insert += p[0] + p[1];
      end

    // ---- FPGA reload, successful then CRC error ----
    n = 0;
    while (cfg_state != CFG_DONE && n < 100) begin @(posedge osc_25m); #1ns; n++; end
    chk("boot status done", cfg_state, CFG_DONE);
    for (int t = 0; t < 2; t++) begin
      crc_fail = t[0];
      @(posedge osc_25m); #1ns mmc_reload_req = 1;
      n = 0;
      while (fpga_prog_b && n < 20) begin @(posedge osc_25m); #1ns; n++; end
      chk("prog latency", n, 3);
      mmc_reload_req = 0;
      n = 0;
      while (!fpga_prog_b && n < 100) begin @(posedge osc_25m); #1ns; n++; end
      chk("prog width", n, 25);
      n = 0;
      while (cfg_busy && n < 2000) begin @(posedge osc_25m); #1ns; n++; end
      if (t == 0) begin
        chk("reload ends done", cfg_state, CFG_DONE);
        if (cfg_done) n_reload_ok++;
      end else begin
        chk("reload ends in error", cfg_state, CFG_ERROR);
        if (cfg_error) n_reload_err++;
      end
    end

    // ---- payload reset ----
    mmc_reset_req = 1;
    n = 0;
    while (!fpga_reset && n < 20) begin @(posedge osc_25m); #1ns; n++; end
    chk("payload reset latency", n, 3);
    mmc_reset_req = 0;
    n = 0;
    while (fpga_reset && n < 5000) begin @(posedge osc_25m); #1ns; n++; end
    chk("payload reset length", n, 2500);
    if (n == 2500) n_payload_reset++;

    mech("clock route checked", n_route);
    mech("two-stage route via D", n_two_stage);
    mech("PLL output via F", n_pll_path);
    mech("switch reconfiguration", n_reconfig);
    mech("JTAG master header", n_master_hdr);
    mech("JTAG master AMC", n_master_amc);
    mech("FMC slot bypassed", n_fmc_bypass);
    mech("FMC card in chain", n_fmc_insert);
    mech("firmware reload done", n_reload_ok);
    mech("firmware reload error", n_reload_err);
    mech("payload reset", n_payload_reset);
    mech("frame words forwarded up", n_up_words);
    mech("frame words forwarded down", n_down_words);
    mech("buffer overflow drop", n_overflow);
    mech("clock/trigger fan-out", n_fanout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
