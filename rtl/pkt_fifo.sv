// pkt_fifo: store-and-forward frame buffer between two 10 Gb/s Ethernet MACs.
//
// Words of a frame arrive on the s_* side one per clock when s_valid is
// high; a receiving MAC cannot be stalled, so there is no ready on this
// side. A frame becomes visible on the m_* side only once its last word has
// been stored, so the transmitting MAC, once started, never runs dry in the
// middle of a frame. The m_* side is a valid/ready stream: a word moves
// when m_valid and m_ready are both high.
// Overflow: if a word arrives while the buffer is full, the partly stored
// frame is discarded (the write pointer returns to the frame's first word)
// and the rest of that frame is ignored up to its last word; drop_count
// counts such frames and overflow pulses for one clock. Frames already
// complete are never lost.
// Timing: one word per clock in and out (10 Gb/s at 156.25 MHz with 64-bit
// words); the first word of a frame is offered the clock after its last
// word was written. Read is asynchronous from the memory array.
// DEPTH = 2048 words (16 KiB, room for a 9 KiB jumbo frame) is this design's
// choice, as are the drop policy and the word format.
module pkt_fifo
  import ufc_pkg::*;
#(
  parameter int unsigned DEPTH = 2048
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_valid,
  input  beat_t       s_beat,
  output logic        m_valid,
  input  logic        m_ready,
  output beat_t       m_beat,
  output logic        overflow,
  output logic [31:0] drop_count
);

  localparam int unsigned AW = $clog2(DEPTH);

  beat_t         mem [DEPTH];
  logic [AW:0]   wr_commit, wr_cur, rd_ptr;   // one extra bit: full vs empty
  logic [AW:0]   used;
  logic [AW:0]   frames;                      // complete frames stored
  logic          dropping, full, push, pop, commit, pop_last;

  assign used     = wr_cur - rd_ptr;
  assign full     = (used == (AW+1)'(DEPTH));
  assign push     = s_valid && !dropping && !full;
  assign commit   = push && s_beat.last;
  assign m_valid  = (frames != '0);
  assign m_beat   = mem[rd_ptr[AW-1:0]];
  assign pop      = m_valid && m_ready;
  assign pop_last = pop && m_beat.last;

  always_ff @(posedge clk) begin
    if (push) mem[wr_cur[AW-1:0]] <= s_beat;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_commit  <= '0;
      wr_cur     <= '0;
      rd_ptr     <= '0;
      frames     <= '0;
      dropping   <= 1'b0;
      overflow   <= 1'b0;
      drop_count <= '0;
    end else begin
      overflow <= 1'b0;
      if (s_valid && dropping) begin
        if (s_beat.last) dropping <= 1'b0;
      end else if (s_valid && full) begin
        wr_cur     <= wr_commit;
        dropping   <= !s_beat.last;
        overflow   <= 1'b1;
        drop_count <= drop_count + 1'b1;
      end else if (push) begin
        wr_cur <= wr_cur + 1'b1;
        if (s_beat.last) wr_commit <= wr_cur + 1'b1;
      end
      if (pop) rd_ptr <= rd_ptr + 1'b1;
      if (commit && !pop_last)      frames <= frames + 1'b1;
      else if (pop_last && !commit) frames <= frames - 1'b1;
    end
  end

  // a frame is only read out once it is complete
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> used != '0);

endmodule
