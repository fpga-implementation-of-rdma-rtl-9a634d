// address_resolver: turns each received header (buffer ID, sequence number,
// payload length) into the physical address where the payload must be
// written. It reads the buffer's base address and size from rx_phys_table and
// keeps a write pointer per buffer: the packet goes to base + pointer, and the
// pointer then advances by the payload length rounded up to 64 bytes, so
// every packet starts 64-byte aligned. When a packet would run past the end of
// the buffer it is written at the base instead (the buffer is used as a ring;
// packets are never split). The pointer of a buffer is cleared whenever the
// host rewrites that table entry. A packet for a buffer that is not in the
// table, or larger than its buffer, produces an event and a descriptor with
// drop set, so the data mover discards its payload.
//
// Every header's sequence number is also passed to the loss detector
// (seq_valid, one clock). A small FSM handles one header at a time: the
// header is taken while the table read starts (IDLE, or OUT when the previous
// descriptor leaves), then looked up and computed (LOOK), then offered until
// desc_ready (OUT); two clocks per packet when not stalled, enough for
// minimum-size frames at 100 Gb/s (one per 2.2 clocks at 322 MHz). The
// resolving of the destination from a table is the paper's; the pointer and
// ring policy, alignment and events are this design's.
module address_resolver
  import rdma_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  hdr_info_t          hdr,
  input  logic               hdr_valid,
  output logic               hdr_ready,
  output logic [AW-1:0]      tbl_rd_addr,
  input  logic [PADDR_W-1:0] tbl_phys,
  input  logic [31:0]        tbl_size,
  input  logic               tbl_valid,
  input  logic               clr_en,
  input  logic [AW-1:0]      clr_addr,
  output desc_t              desc,
  output logic               desc_valid,
  input  logic               desc_ready,
  output logic               seq_valid,
  output logic [SEQ_W-1:0]   seq,
  output logic               evt_valid,
  output event_t             evt
);
  typedef enum logic [1:0] {S_IDLE, S_LOOK, S_OUT} state_e;
  state_e     state;
  hdr_info_t  h;
  logic [31:0] wptr [ENTRIES];

  logic        known;
  logic [31:0] alen, cur, nxt;
  logic        wrap, too_big;

  assign hdr_ready   = (state == S_IDLE) || (state == S_OUT && desc_ready);
  assign tbl_rd_addr = hdr.lbuf[AW-1:0];
  assign desc_valid  = (state == S_OUT);

  always_comb begin
    known   = tbl_valid && (h.lbuf < ID_W'(ENTRIES));
    alen    = (32'(h.len) + 32'd63) & ~32'd63;
    cur     = wptr[h.lbuf[AW-1:0]];
    too_big = alen > tbl_size;
    wrap    = (cur + alen) > tbl_size;
    nxt     = wrap ? alen : cur + alen;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      h         <= '0;
      desc      <= '0;
      seq_valid <= 1'b0;
      seq       <= '0;
      evt_valid <= 1'b0;
      evt       <= '{code: EVT_NONE, seq: '0};
      for (int i = 0; i < ENTRIES; i++) wptr[i] <= '0;
    end else begin
      seq_valid <= 1'b0;
      evt_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (hdr_valid) begin
          h     <= hdr;
          state <= S_LOOK;
        end
        S_LOOK: begin
          seq_valid <= 1'b1;
          seq       <= h.seq;
          desc.len  <= h.len;
          desc.seq  <= h.seq;
          if (!known || too_big) begin
            desc.drop <= 1'b1;
            desc.addr <= '0;
            evt_valid <= 1'b1;
            evt       <= '{code: known ? EVT_OVERSIZE : EVT_UNKNOWN, seq: h.lbuf};
          end else begin
            desc.drop <= 1'b0;
            desc.addr <= tbl_phys + PADDR_W'(wrap ? 32'd0 : cur);
            wptr[h.lbuf[AW-1:0]] <= nxt;
          end
          state <= S_OUT;
        end
        default: if (desc_ready) begin
          if (hdr_valid) begin
            h     <= hdr;
            state <= S_LOOK;
          end else begin
            state <= S_IDLE;
          end
        end
      endcase
      if (clr_en) wptr[clr_addr] <= '0;
    end
  end
endmodule
