// header_insert: puts a 42-byte Ethernet II + IPv4 + UDP header in front of
// every payload packet coming from the DMA, producing complete frames for the
// 100 GbE MAC. The header is built from the configuration (MAC and IP
// addresses, destination local-buffer ID) and from the packet's payload length
// (s_axis_tuser, constant over the packet): EtherType 0x0800, IPv4 IHL 5, DF,
// TTL 64, protocol UDP, IP identification = sequence number, header checksum
// computed here; UDP source port = local-buffer ID, UDP destination port =
// 16-bit sequence number, UDP checksum 0. The sequence number advances by one
// per packet and returns to 0 on seq_clear.
//
// Realignment: output beat k holds 42 carried bytes followed by the first 22
// bytes of input beat k, and the remaining 42 input bytes are carried to the
// next output beat. On the first beat the carry is the header itself. When the
// last input beat has more than 22 bytes one extra output beat drains the
// carry, so a packet of B payload beats leaves in B or B+1 beats. The output is
// registered (one clock latency); input is accepted whenever the output
// register is free or being read, except during the drain beat.
//
// The paper gives the function: a header made of the UDP header and the
// destination buffer identification, concatenated with the DMA stream. The
// field values, the use of the two UDP ports and the realignment are this
// design's choices.
//
// rst_n also disables the assertions below (`disable iff`); lint flags that
// as a mixed synchronous/asynchronous use of the reset, which it is not in
// the circuit.
module header_insert
  import rdma_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [47:0]        cfg_src_mac,
  input  logic [47:0]        cfg_dst_mac,
  input  logic [31:0]        cfg_src_ip,
  input  logic [31:0]        cfg_dst_ip,
  input  logic [ID_W-1:0]    cfg_lbuf,
  input  logic               seq_clear,
  output logic [SEQ_W-1:0]   seq,
  input  logic [DATA_W-1:0]  s_axis_tdata,
  input  logic [KEEP_W-1:0]  s_axis_tkeep,
  input  logic               s_axis_tlast,
  input  logic [LEN_W-1:0]   s_axis_tuser,
  input  logic               s_axis_tvalid,
  output logic               s_axis_tready,
  output logic [DATA_W-1:0]  m_axis_tdata,
  output logic [KEEP_W-1:0]  m_axis_tkeep,
  output logic               m_axis_tlast,
  output logic               m_axis_tvalid,
  input  logic               m_axis_tready
);
  localparam int unsigned HB    = HDR_BYTES;        // 42
  localparam int unsigned SPLIT = BEAT_B - HB;      // 22 input bytes per output beat

  // ---------------- header construction ----------------
  logic [HB*8-1:0] hdr;
  logic [15:0]     ip_len, udp_len, ip_csum;
  logic [19:0]     csum_acc;
  logic [16:0]     csum_f1;

  always_comb begin
    ip_len  = 16'(s_axis_tuser) + 16'd28;
    udp_len = 16'(s_axis_tuser) + 16'd8;
    csum_acc = 20'h04500 + 20'(ip_len) + 20'(seq) + 20'h04000 + 20'({IP_TTL, IP_PROTO_UDP})
             + 20'(cfg_src_ip[31:16]) + 20'(cfg_src_ip[15:0])
             + 20'(cfg_dst_ip[31:16]) + 20'(cfg_dst_ip[15:0]);
    csum_f1 = 17'(csum_acc[15:0]) + 17'(csum_acc[19:16]);
    ip_csum = ~(csum_f1[15:0] + 16'(csum_f1[16]));
  end

  // byte i of the header sits in hdr[8*i +: 8]; fields are big-endian
  function automatic logic [HB*8-1:0] put(input logic [HB*8-1:0] h, input int unsigned pos,
                                          input logic [63:0] v, input int unsigned nbytes);
    logic [HB*8-1:0] r;
    r = h;
    for (int unsigned i = 0; i < nbytes; i++) r[8*(pos+i) +: 8] = v[8*(nbytes-1-i) +: 8];
    return r;
  endfunction

  always_comb begin
    hdr = '0;
    hdr = put(hdr,  0, 64'(cfg_dst_mac), 6);
    hdr = put(hdr,  6, 64'(cfg_src_mac), 6);
    hdr = put(hdr, 12, 64'(ETHERTYPE_IPV4), 2);
    hdr = put(hdr, 14, 64'h45, 1);
    hdr = put(hdr, 15, 64'h00, 1);
    hdr = put(hdr, 16, 64'(ip_len), 2);
    hdr = put(hdr, 18, 64'(seq), 2);
    hdr = put(hdr, 20, 64'h4000, 2);
    hdr = put(hdr, 22, 64'(IP_TTL), 1);
    hdr = put(hdr, 23, 64'(IP_PROTO_UDP), 1);
    hdr = put(hdr, 24, 64'(ip_csum), 2);
    hdr = put(hdr, 26, 64'(cfg_src_ip), 4);
    hdr = put(hdr, 30, 64'(cfg_dst_ip), 4);
    hdr = put(hdr, 34, 64'(cfg_lbuf), 2);
    hdr = put(hdr, 36, 64'(seq), 2);
    hdr = put(hdr, 38, 64'(udp_len), 2);
    hdr = put(hdr, 40, 64'h0000, 2);
  end

  // ---------------- realignment ----------------
  logic            first;     // next input beat starts a packet
  logic            flush;     // a drain beat is pending
  logic [6:0]      flush_n;
  logic [HB*8-1:0] carry;
  logic            can_load;
  logic [HB*8-1:0] c_eff;
  int unsigned     nin;

  assign can_load      = !m_axis_tvalid || m_axis_tready;
  assign s_axis_tready = can_load && !flush;
  assign c_eff         = first ? hdr : carry;
  assign nin           = keep_count(s_axis_tkeep);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first         <= 1'b1;
      flush         <= 1'b0;
      flush_n       <= '0;
      carry         <= '0;
      seq           <= '0;
      m_axis_tvalid <= 1'b0;
      m_axis_tdata  <= '0;
      m_axis_tkeep  <= '0;
      m_axis_tlast  <= 1'b0;
    end else begin
      if (seq_clear) seq <= '0;
      if (can_load) begin
        if (flush) begin
          m_axis_tvalid <= 1'b1;
          m_axis_tdata  <= {{(DATA_W-HB*8){1'b0}}, carry};
          m_axis_tkeep  <= keep_mask(int'(flush_n));
          m_axis_tlast  <= 1'b1;
          flush         <= 1'b0;
        end else if (s_axis_tvalid) begin
          m_axis_tvalid <= 1'b1;
          m_axis_tdata  <= {s_axis_tdata[SPLIT*8-1:0], c_eff};
          carry         <= s_axis_tdata[DATA_W-1:SPLIT*8];
          first         <= s_axis_tlast;
          if (s_axis_tlast) begin
            if (!seq_clear) seq <= seq + 1'b1;
            if (nin <= SPLIT) begin
              m_axis_tkeep <= keep_mask(HB + nin);
              m_axis_tlast <= 1'b1;
            end else begin
              m_axis_tkeep <= '1;
              m_axis_tlast <= 1'b0;
              flush        <= 1'b1;
              flush_n      <= 7'(nin - SPLIT);
            end
          end else begin
            m_axis_tkeep <= '1;
            m_axis_tlast <= 1'b0;
          end
        end else begin
          m_axis_tvalid <= 1'b0;
        end
      end
    end
  end

  // AXI-stream rule: data held stable while stalled
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_axis_tvalid && !m_axis_tready |=> m_axis_tvalid && $stable(m_axis_tdata) && $stable(m_axis_tlast));
endmodule
