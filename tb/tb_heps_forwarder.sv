// tb_heps_forwarder: runs the detector readout workload through the
// four-link forwarder at its default sizes.
// Upstream, each front-end link sends 1 KiB frames (128 words) with idle
// gaps so that the four links together carry 2.39 GB/s, a little above
// the 2.3 GB/s readout rate of the 1M-pixel prototype (16-bit pixels at
// 1.2 kHz); downstream the DAQ
// sends short command frames. Every frame must come out on the paired link
// unchanged and in order, with no drops, and the measured upstream output
// rate must reach 2.3 GB/s. A second phase drives all links at full line
// rate (one word per clock) and requires one word per clock out on each
// link, i.e. 4 x 10 Gb/s. Clock and trigger fan-out is checked as well.
module tb_heps_forwarder;
  import ufc_pkg::*;
  localparam int N = 4;
  localparam int FRAME_WORDS = 128;
  localparam real CLK_MHZ = 156.25;
  logic clk = 0, rst_n = 0;
  logic  [N-1:0] fe_rx_valid = '0, fe_tx_valid, fe_tx_ready = '1;
  beat_t [N-1:0] fe_rx_beat = '0, fe_tx_beat;
  logic  [N-1:0] daq_rx_valid = '0, daq_tx_valid, daq_tx_ready = '1;
  beat_t [N-1:0] daq_rx_beat = '0, daq_tx_beat;
  logic  [N-1:0][31:0] up_drops, down_drops;
  logic  [N-1:0] up_overflow, down_overflow, fe_clk, fe_trig;
  logic ext_clk = 0, ext_gate = 0;
  int checks = 0, failures = 0;

  heps_forwarder dut (.*);

  always #3.2ns clk = ~clk;

  beat_t up_q[N][$], down_q[N][$];
  longint up_words_out = 0, down_words_out = 0;
  int up_pos[N], down_pos[N], up_gap[N], down_gap[N];
  bit gen_on = 0, full_rate = 0;
  int seq = 0;

  task automatic chk(string name, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d expected %0d at %t", name, got, exp, $time);
    end
  endtask

  function automatic beat_t mk(int link, bit last);
    beat_t b;
    b.data = {8'(link), 24'(seq), 32'($urandom)};
    b.keep = 8'hff;
    b.last = last;
    seq++;
    return b;
  endfunction

  // traffic generators and scoreboards, evaluated on the falling edge
  task automatic chk_beat(string name, beat_t got, beat_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %h expected %h at %t", name, got, exp, $time);
    end
  endtask

  always @(negedge clk) if (rst_n) begin
    beat_t e;
    for (int i = 0; i < N; i++) begin
      // outputs of the previous rising edge
      if (daq_tx_valid[i] && daq_tx_ready[i]) begin
        e = up_q[i].pop_front();
        chk_beat($sformatf("up link %0d word", i), daq_tx_beat[i], e);
        up_words_out++;
      end
      if (fe_tx_valid[i] && fe_tx_ready[i]) begin
        e = down_q[i].pop_front();
        chk_beat($sformatf("down link %0d word", i), fe_tx_beat[i], e);
        down_words_out++;
      end
      // upstream: 128-word frames; gap tuned for 2.3 GB/s in total
      fe_rx_valid[i] = 0;
      if (gen_on || up_pos[i] != 0) begin
        if (up_gap[i] > 0) up_gap[i]--;
        else begin
          fe_rx_beat[i]  = mk(i, up_pos[i] == FRAME_WORDS - 1);
          fe_rx_valid[i] = 1;
          up_q[i].push_back(fe_rx_beat[i]);
          up_pos[i]++;
          if (up_pos[i] == FRAME_WORDS) begin
            up_pos[i] = 0;
            // 128 words busy out of 128+140: 0.48 of 10 Gb/s per link,
            // 2.39 GB/s over four links
            up_gap[i] = full_rate ? 0 : 140;
          end
        end
      end
      // downstream: 4-word command frames
      daq_rx_valid[i] = 0;
      if (gen_on || down_pos[i] != 0) begin
        if (down_gap[i] > 0) down_gap[i]--;
        else begin
          daq_rx_beat[i]  = mk(i, down_pos[i] == 3);
          daq_rx_valid[i] = 1;
          down_q[i].push_back(daq_rx_beat[i]);
          down_pos[i]++;
          if (down_pos[i] == 4) begin
            down_pos[i] = 0;
            down_gap[i] = full_rate ? 0 : $urandom_range(50, 500);
          end
        end
      end
    end
  end

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint w0;
    real gbytes_per_s;
    int cycles;
    foreach (up_gap[i]) begin up_gap[i] = 37 * i; down_gap[i] = 11 * i; up_pos[i] = 0; down_pos[i] = 0; end
    repeat (3) @(posedge clk);
    #1ns rst_n = 1;
    // fan-out
    for (int k = 0; k < 8; k++) begin
      {ext_clk, ext_gate} = 2'(k);
      #1ns;
      chk("fe_clk fan-out", fe_clk, {N{ext_clk}});
      chk("fe_trig fan-out", fe_trig, {N{ext_gate}});
    end
    // phase 1: detector readout rate
    @(negedge clk) gen_on = 1;
    repeat (2000) @(posedge clk);
    w0 = up_words_out;
    cycles = 20000;
    repeat (cycles) @(posedge clk);
    gbytes_per_s = real'(up_words_out - w0) * 8.0 * CLK_MHZ * 1.0e6 / cycles / 1.0e9;
    $display("upstream rate %0.3f GB/s over %0d clocks", gbytes_per_s, cycles);
    checks++;
    if (gbytes_per_s < 2.3) begin failures++; $display("FAIL readout rate below 2.3 GB/s"); end
    // phase 2: full line rate on all links, DAQ always ready
    @(negedge clk) full_rate = 1;
    repeat (2000) @(posedge clk);
    w0 = up_words_out;
    repeat (4000) @(posedge clk);
    chk("full rate: words out per clock x4000", up_words_out - w0, 4 * 4000);
    @(negedge clk) gen_on = 0;
    repeat (3000) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      chk($sformatf("up link %0d drained", i), up_q[i].size(), 0);
      chk($sformatf("down link %0d drained", i), down_q[i].size(), 0);
      chk($sformatf("up link %0d drops", i), up_drops[i], 0);
      chk($sformatf("down link %0d drops", i), down_drops[i], 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
