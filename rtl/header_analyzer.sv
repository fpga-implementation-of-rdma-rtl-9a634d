// header_analyzer: receive-side parser. It checks the 42-byte Ethernet II +
// IPv4 + UDP header at the start of each frame (EtherType 0x0800, IPv4 with
// IHL 5, protocol UDP, destination MAC and IP equal to this board's, UDP
// length >= 9), hands the transfer information to the address resolver
// (hdr_lbuf = UDP source port = local-buffer ID, hdr_seq = UDP destination
// port = sequence number, hdr_len = UDP length - 8 = payload bytes) and
// forwards the payload with the header removed. Frames that fail the check are
// discarded whole and counted in drop_count.
//
// Realignment: the first beat's bytes 42..63 are kept as a 22-byte carry;
// each following output beat is the carry plus the first 42 bytes of the next
// input beat. If the last input beat has more than 42 bytes an extra beat
// drains the carry. A frame that fits in one beat is trimmed to hdr_len, which
// removes Ethernet minimum-size padding. Output and header side are
// registered; the header word waits in hdr_valid until the resolver takes it,
// and the next frame's first beat is held back until then. Frames flagged bad
// by the MAC (s_axis_tuser on the last beat) are only counted in err_count:
// their header has already been passed on when the flag arrives.
//
// The paper says only that the header is analysed to resolve the destination
// buffer; the checks, the field positions and the realignment are this
// design's.
module header_analyzer
  import rdma_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [47:0]        my_mac,
  input  logic [31:0]        my_ip,
  input  logic [DATA_W-1:0]  s_axis_tdata,
  input  logic [KEEP_W-1:0]  s_axis_tkeep,
  input  logic               s_axis_tlast,
  input  logic               s_axis_tuser,
  input  logic               s_axis_tvalid,
  output logic               s_axis_tready,
  output hdr_info_t          hdr,
  output logic               hdr_valid,
  input  logic               hdr_ready,
  output logic [DATA_W-1:0]  m_axis_tdata,
  output logic [KEEP_W-1:0]  m_axis_tkeep,
  output logic               m_axis_tlast,
  output logic               m_axis_tvalid,
  input  logic               m_axis_tready,
  output logic [31:0]        drop_count,
  output logic [31:0]        err_count
);
  localparam int unsigned HB   = HDR_BYTES;     // 42
  localparam int unsigned CB   = BEAT_B - HB;   // 22 carried bytes

  function automatic logic [63:0] get(input logic [DATA_W-1:0] d, input int unsigned pos,
                                      input int unsigned nbytes);
    logic [63:0] v;
    v = '0;
    for (int unsigned i = 0; i < nbytes; i++) v = {v[55:0], d[8*(pos+i) +: 8]};
    return v;
  endfunction

  // header fields of the current input beat
  logic [47:0] f_dmac;
  logic [15:0] f_etype, f_udplen, f_sport, f_dport;
  logic [7:0]  f_verihl, f_proto;
  logic [31:0] f_dip;
  logic        f_ok;
  int unsigned nin;
  logic [15:0] f_plen;

  always_comb begin
    f_dmac   = 48'(get(s_axis_tdata, 0, 6));
    f_etype  = 16'(get(s_axis_tdata, 12, 2));
    f_verihl = 8'(get(s_axis_tdata, 14, 1));
    f_proto  = 8'(get(s_axis_tdata, 23, 1));
    f_dip    = 32'(get(s_axis_tdata, 30, 4));
    f_sport  = 16'(get(s_axis_tdata, 34, 2));
    f_dport  = 16'(get(s_axis_tdata, 36, 2));
    f_udplen = 16'(get(s_axis_tdata, 38, 2));
    f_plen   = f_udplen - 16'd8;
    nin      = keep_count(s_axis_tkeep);
    f_ok     = (f_dmac == my_mac) && (f_etype == ETHERTYPE_IPV4) && (f_verihl == 8'h45)
            && (f_proto == IP_PROTO_UDP) && (f_dip == my_ip) && (f_udplen > 16'd8)
            && (nin >= HB) && (!s_axis_tlast || (nin - HB) >= int'(f_plen));
  end

  typedef enum logic [1:0] {S_HDR, S_BODY, S_DROP} state_e;
  state_e          state;
  logic            flush;
  logic [6:0]      flush_n;
  logic [CB*8-1:0] carry;
  logic            can_load;

  assign can_load      = !m_axis_tvalid || m_axis_tready;
  assign s_axis_tready = (state == S_DROP) ? 1'b1 :
                         (state == S_HDR)  ? (can_load && !flush && (!hdr_valid || hdr_ready)) :
                                             (can_load && !flush);

  wire take = s_axis_tvalid && s_axis_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_HDR;
      flush         <= 1'b0;
      flush_n       <= '0;
      carry         <= '0;
      hdr           <= '0;
      hdr_valid     <= 1'b0;
      m_axis_tvalid <= 1'b0;
      m_axis_tdata  <= '0;
      m_axis_tkeep  <= '0;
      m_axis_tlast  <= 1'b0;
      drop_count    <= '0;
      err_count     <= '0;
    end else begin
      if (hdr_valid && hdr_ready) hdr_valid <= 1'b0;
      if (can_load) m_axis_tvalid <= 1'b0;
      if (take && s_axis_tlast && s_axis_tuser) err_count <= err_count + 1'b1;

      if (can_load && flush) begin
        m_axis_tvalid <= 1'b1;
        m_axis_tdata  <= {{(DATA_W-CB*8){1'b0}}, carry};
        m_axis_tkeep  <= keep_mask(int'(flush_n));
        m_axis_tlast  <= 1'b1;
        flush         <= 1'b0;
      end else if (take) begin
        unique case (state)
          S_HDR: begin
            if (!f_ok) begin
              drop_count <= drop_count + 1'b1;
              if (!s_axis_tlast) state <= S_DROP;
            end else begin
              hdr_valid <= 1'b1;
              hdr       <= '{lbuf: f_sport, seq: f_dport, len: f_plen};
              carry     <= s_axis_tdata[DATA_W-1 -: CB*8];
              if (s_axis_tlast) begin
                // whole frame in one beat: payload = bytes 42.., trimmed to the UDP length
                m_axis_tvalid <= 1'b1;
                m_axis_tdata  <= {{(DATA_W-CB*8){1'b0}}, s_axis_tdata[DATA_W-1 -: CB*8]};
                m_axis_tkeep  <= keep_mask(int'(f_plen));
                m_axis_tlast  <= 1'b1;
              end else begin
                state <= S_BODY;
              end
            end
          end
          S_BODY: begin
            m_axis_tvalid <= 1'b1;
            m_axis_tdata  <= {s_axis_tdata[HB*8-1:0], carry};
            carry         <= s_axis_tdata[DATA_W-1 -: CB*8];
            if (s_axis_tlast) begin
              state <= S_HDR;
              if (nin <= HB) begin
                m_axis_tkeep <= keep_mask(CB + nin);
                m_axis_tlast <= 1'b1;
              end else begin
                m_axis_tkeep <= '1;
                m_axis_tlast <= 1'b0;
                flush        <= 1'b1;
                flush_n      <= 7'(nin - HB);
              end
            end else begin
              m_axis_tkeep <= '1;
              m_axis_tlast <= 1'b0;
            end
          end
          default: begin  // S_DROP
            if (s_axis_tlast) state <= S_HDR;
          end
        endcase
      end
    end
  end
endmodule
