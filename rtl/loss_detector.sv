// loss_detector: packet-loss detection over a window of WINDOW sequence
// numbers. A WINDOW-bit register has one bit per sequence number modulo
// WINDOW; a received packet sets its bit. A packet is checked once the
// newest received sequence number is CHECK_DIST ahead of it: with the default
// numbers, receiving packet 512 makes the detector check packet 1. If the bit
// is clear the packet is declared lost (loss_valid pulses for one clock with
// loss_seq); either way the bit is cleared so that the slot is free for the
// sequence number WINDOW later.
//
// The checks are driven by a check pointer that advances by one per clock
// while the newest sequence number is at least CHECK_DIST ahead of it. With
// in-order traffic this is exactly one check per received packet; after a
// gap it catches up by one per clock, so a packet is still checked when the
// packet CHECK_DIST after it is itself lost. The first packet after reset
// opens the window. A late packet is recorded if it is not older than the
// check pointer and not more than WINDOW-1 ahead of it; otherwise it is
// ignored. Sequence numbers are SEQ_W bits and wrap.
//
// The WINDOW = 1024-bit register and the "receive 512, check 1" rule are the
// paper's. The paper calls the register a shift register; this one is
// addressed by sequence number, which keeps the same bits without moving
// them. The check pointer and the treatment of the first and late packets are
// this design's.
module loss_detector #(
  parameter int unsigned WINDOW     = 1024,
  parameter int unsigned CHECK_DIST = 511,
  parameter int unsigned SEQ_W      = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             seq_valid,
  input  logic [SEQ_W-1:0] seq,
  output logic             loss_valid,
  output logic [SEQ_W-1:0] loss_seq,
  output logic [31:0]      checked_count,
  output logic [31:0]      loss_count
);
  localparam int unsigned IW = $clog2(WINDOW);

  logic [WINDOW-1:0] seen;
  logic              started;
  logic [SEQ_W-1:0]  newest, chk;

  logic [SEQ_W-1:0] d_in, d_new, ahead;
  logic             in_win, is_newer, do_check, chk_hit;

  always_comb begin
    d_in     = seq - chk;                 // how far the arriving packet is ahead of the check pointer
    d_new    = seq - newest;
    in_win   = (d_in < SEQ_W'(WINDOW));
    is_newer = (d_new != '0) && !d_new[SEQ_W-1];
    ahead    = newest - chk;
    do_check = started && (ahead >= SEQ_W'(CHECK_DIST)) && !ahead[SEQ_W-1];
    chk_hit  = seen[chk[IW-1:0]] || (seq_valid && seq == chk);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen          <= '0;
      started       <= 1'b0;
      newest        <= '0;
      chk           <= '0;
      loss_valid    <= 1'b0;
      loss_seq      <= '0;
      checked_count <= '0;
      loss_count    <= '0;
    end else begin
      loss_valid <= 1'b0;
      if (do_check) begin
        seen[chk[IW-1:0]] <= 1'b0;
        chk               <= chk + 1'b1;
        checked_count     <= checked_count + 1'b1;
        if (!chk_hit) begin
          loss_valid <= 1'b1;
          loss_seq   <= chk;
          loss_count <= loss_count + 1'b1;
        end
      end
      if (seq_valid) begin
        if (!started) begin
          started         <= 1'b1;
          newest          <= seq;
          chk             <= seq;
          seen            <= '0;
          seen[seq[IW-1:0]] <= 1'b1;
        end else begin
          if (in_win && !(do_check && seq == chk)) seen[seq[IW-1:0]] <= 1'b1;
          if (is_newer) newest <= seq;
        end
      end
    end
  end

  initial begin
    assert (CHECK_DIST < WINDOW) else $error("CHECK_DIST must be below WINDOW");
  end
endmodule
