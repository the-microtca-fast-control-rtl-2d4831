// tb_pkt_fifo: checks the store-and-forward frame buffer against a
// reference queue model, cycle by cycle.
// Phases: (1) random frames with random gaps and random m_ready;
// (2) back-to-back frames with m_ready high, where output throughput must
// be one word per clock and a frame must be offered exactly one clock after
// its last word; (3) m_ready held low until the buffer overflows, where the
// overflowing frame must be dropped whole, counted once, and every complete
// frame before it delivered intact; (4) traffic again after the drop.
module tb_pkt_fifo;
  import ufc_pkg::*;
  localparam int unsigned DEPTH = 64;
  logic clk = 0, rst_n = 0;
  logic s_valid = 0, m_valid, m_ready = 0, overflow;
  beat_t s_beat = '0, m_beat;
  logic [31:0] drop_count;
  int checks = 0, failures = 0;

  pkt_fifo #(.DEPTH(DEPTH)) dut (.*);

  always #3.2ns clk = ~clk;

  // reference model
  beat_t exp_q[$];       // words of complete frames
  beat_t pend_q[$];      // words of the frame being received
  int    m_frames = 0, m_drops = 0, m_overflows = 0;
  bit    m_dropping = 0;
  int    words_out = 0, frames_in = 0, seq = 0;

  task automatic chk(string name, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s got %0d expected %0d at %t", name, got, exp, $time);
    end
  endtask

  // one clock: inputs are set by the caller before this is called
  task automatic step();
    bit pop;
    #1ns;
    chk("m_valid", m_valid, m_frames > 0);
    pop = m_valid && m_ready;
    if (pop) begin
      beat_t e = exp_q.pop_front();
      chk("m_beat", m_beat, e);
      if (e.last) m_frames--;
      words_out++;
    end
    if (s_valid) begin
      if (m_dropping) begin
        if (s_beat.last) m_dropping = 0;
      end else if (exp_q.size() + pend_q.size() + (pop ? 1 : 0) == DEPTH) begin
        pend_q.delete();
        m_drops++;
        m_dropping = !s_beat.last;
      end else begin
        pend_q.push_back(s_beat);
        if (s_beat.last) begin
          foreach (pend_q[i]) exp_q.push_back(pend_q[i]);
          pend_q.delete();
          m_frames++;
          frames_in++;
        end
      end
    end
    @(posedge clk);
    #1ns;
    chk("drop_count", drop_count, m_drops);
  endtask

  task automatic send_word(bit last, bit valid);
    s_valid = valid;
    s_beat.data = {32'(seq), 32'($urandom)};
    s_beat.keep = last ? 8'($urandom) | 8'h01 : 8'hff;
    s_beat.last = last;
    if (valid) seq++;
  endtask

  initial begin
    #5ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int len, t0, ovf_seen;
    repeat (3) @(posedge clk);
    #1ns rst_n = 1;
    @(negedge clk);
    // (1) random traffic
    for (int f = 0; f < 200; f++) begin
      len = 1 + $urandom_range(0, 20);
      for (int w = 0; w < len; w++) begin
        m_ready = $urandom_range(0, 3) != 0;
        send_word(w == len - 1, 1);
        step();
        while ($urandom_range(0, 4) == 0) begin
          send_word(0, 0); m_ready = $urandom_range(0, 1); step();
        end
      end
    end
    s_valid = 0; m_ready = 1;
    while (exp_q.size() > 0) step();
    // (2) throughput and latency: frames of 16 words back to back
    m_ready = 1;
    send_word(0, 0); step();
    for (int w = 0; w < 16; w++) begin
      send_word(w == 15, 1);
      step();
    end
    s_valid = 0;
    #1ns chk("offered one clock after last word", m_valid, 1);
    t0 = words_out;
    for (int f = 0; f < 20; f++)
      for (int w = 0; w < 16; w++) begin
        send_word(w == 15, 1);
        step();
      end
    chk("throughput: words out in 320 clocks", words_out - t0, 320);
    s_valid = 0;
    while (exp_q.size() > 0) step();
    // (3) overflow: output stalled
    ovf_seen = drop_count;
    m_ready = 0;
    for (int f = 0; f < 6; f++)
      for (int w = 0; w < 20; w++) begin
        send_word(w == 19, 1);
        step();
      end
    s_valid = 0;
    chk("frames kept before overflow", m_frames, DEPTH / 20);
    chk("frames dropped", drop_count - ovf_seen, 3);
    m_ready = 1;
    while (exp_q.size() > 0) step();
    // (4) after the drop
    for (int f = 0; f < 20; f++) begin
      len = 1 + $urandom_range(0, 30);
      for (int w = 0; w < len; w++) begin
        send_word(w == len - 1, 1); step();
      end
    end
    s_valid = 0;
    while (exp_q.size() > 0) step();
    chk("all frames delivered", m_frames, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
