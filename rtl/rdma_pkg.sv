// rdma_pkg: constants and types shared by the RDMA-over-UDP transmitter and
// receiver. The datapath is a 512-bit AXI stream (64 bytes per clock, byte 0
// in bits [7:0]), which is the width at which a 100 GbE MAC is fed at about
// 320 MHz. Each data packet carries a 42-byte Ethernet II + IPv4 + UDP header;
// the UDP source port holds the destination local-buffer ID and the UDP
// destination port holds a 16-bit packet sequence number. The 64-byte width is
// the paper's; the header field layout and values are this design's choice.
package rdma_pkg;

  localparam int unsigned DATA_W    = 512;
  localparam int unsigned KEEP_W    = DATA_W / 8;
  localparam int unsigned BEAT_B    = KEEP_W;     // bytes per beat
  localparam int unsigned HDR_BYTES = 42;         // 14 Eth + 20 IPv4 + 8 UDP
  localparam int unsigned SEQ_W     = 16;
  localparam int unsigned ID_W      = 16;
  localparam int unsigned LEN_W     = 16;
  localparam int unsigned PADDR_W   = 64;

  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  IP_PROTO_UDP   = 8'd17;
  localparam logic [7:0]  IP_TTL         = 8'd64;

  // Header fields as seen by the receiver.
  typedef struct packed {
    logic [ID_W-1:0]  lbuf;   // UDP source port
    logic [SEQ_W-1:0] seq;    // UDP destination port
    logic [LEN_W-1:0] len;    // payload bytes (UDP length - 8)
  } hdr_info_t;

  // Resolved destination of one packet.
  typedef struct packed {
    logic [PADDR_W-1:0] addr;
    logic [LEN_W-1:0]   len;
    logic [SEQ_W-1:0]   seq;
    logic               drop;  // payload must be discarded
  } desc_t;

  typedef enum logic [1:0] {
    EVT_NONE    = 2'd0,
    EVT_LOSS    = 2'd1,
    EVT_UNKNOWN = 2'd2,
    EVT_OVERSIZE = 2'd3
  } evt_code_e;

  typedef struct packed {
    evt_code_e        code;
    logic [SEQ_W-1:0] seq;   // missing sequence number, or the offending buffer ID
  } event_t;

  // Keep mask with the low n bytes set (n = 0..BEAT_B).
  function automatic logic [KEEP_W-1:0] keep_mask(input int unsigned n);
    logic [KEEP_W-1:0] m;
    for (int i = 0; i < KEEP_W; i++) m[i] = (i < n);
    return m;
  endfunction

  // Number of set bits of a contiguous keep mask.
  function automatic int unsigned keep_count(input logic [KEEP_W-1:0] k);
    int unsigned c;
    c = 0;
    for (int i = 0; i < KEEP_W; i++) c += int'(k[i]);
    return c;
  endfunction

endpackage
