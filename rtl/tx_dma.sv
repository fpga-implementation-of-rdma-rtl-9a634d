// tx_dma: memory-to-stream DMA of the transmitter. After start it reads
// `length` bytes from DDR4, beginning at the 64-byte aligned `src_addr`,
// through an AXI4 read master and streams them out as a 512-bit AXI stream cut
// into packets of `pkt_bytes` payload bytes (the last packet of a transfer may
// be shorter). Every beat of a packet carries the packet's payload length in
// tuser so that the header inserter can fill the IP and UDP length fields on
// the first beat.
//
// Read bursts are INCR, 64 bytes per beat, at most MAX_BURST beats and never
// across a 4 KB boundary; all bursts are issued as soon as the address channel
// accepts them, and read data flows straight to the stream (rready = tready),
// so the memory holds the data while the stream is stalled. One beat per clock
// when neither side stalls. `done` pulses for one clock with the last beat.
//
// The paper uses a vendor DMA configured by the detector controller; its
// function (read via AXI4, send as AXI stream) is the paper's, the burst
// policy, the packet cutting and tuser are this design's choices.
//
// rst_n also disables the assertions below (`disable iff`); lint flags that
// as a mixed synchronous/asynchronous use of the reset, which it is not in
// the circuit.
module tx_dma
  import rdma_pkg::*;
#(
  parameter int unsigned ADDR_W    = 64,
  parameter int unsigned MAX_BURST = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  // command
  input  logic                start,
  input  logic [ADDR_W-1:0]   src_addr,
  input  logic [31:0]         length,
  input  logic [15:0]         pkt_bytes,
  output logic                busy,
  output logic                done,
  // AXI4 read master
  output logic [ADDR_W-1:0]   m_axi_araddr,
  output logic [7:0]          m_axi_arlen,
  output logic [2:0]          m_axi_arsize,
  output logic [1:0]          m_axi_arburst,
  output logic                m_axi_arvalid,
  input  logic                m_axi_arready,
  input  logic [DATA_W-1:0]   m_axi_rdata,
  input  logic [1:0]          m_axi_rresp,
  input  logic                m_axi_rlast,
  input  logic                m_axi_rvalid,
  output logic                m_axi_rready,
  // AXI stream out
  output logic [DATA_W-1:0]   m_axis_tdata,
  output logic [KEEP_W-1:0]   m_axis_tkeep,
  output logic                m_axis_tlast,
  output logic [LEN_W-1:0]    m_axis_tuser,
  output logic                m_axis_tvalid,
  input  logic                m_axis_tready
);
  logic [ADDR_W-1:0] ar_addr;
  logic [25:0]       ar_beats_left;
  logic [31:0]       bytes_left;     // bytes of the transfer not yet streamed
  logic [31:0]       pkt_left;       // bytes of the current packet not yet streamed
  logic [15:0]       pkt_size_q;
  logic [LEN_W-1:0]  cur_pkt_len;

  // burst size: min(beats left, MAX_BURST, beats to the next 4 KB boundary)
  logic [12:0] to_4k;
  logic [25:0] burst_beats;
  always_comb begin
    to_4k = 13'd64 - {7'd0, ar_addr[11:6]};
    burst_beats = ar_beats_left;
    if (burst_beats > 26'(MAX_BURST)) burst_beats = 26'(MAX_BURST);
    if (burst_beats > 26'(to_4k))     burst_beats = 26'(to_4k);
  end

  assign m_axi_araddr  = ar_addr;
  assign m_axi_arlen   = 8'(burst_beats - 1'b1);
  assign m_axi_arsize  = 3'($clog2(KEEP_W));
  assign m_axi_arburst = 2'b01;
  assign m_axi_arvalid = busy && (ar_beats_left != '0);

  // stream side
  logic [6:0] beat_bytes;
  assign beat_bytes    = (pkt_left >= 32'(BEAT_B)) ? 7'(BEAT_B) : 7'(pkt_left);
  assign m_axis_tdata  = m_axi_rdata;
  assign m_axis_tkeep  = keep_mask(int'(beat_bytes));
  assign m_axis_tlast  = (pkt_left <= 32'(BEAT_B));
  assign m_axis_tuser  = cur_pkt_len;
  assign m_axis_tvalid = busy && m_axi_rvalid;
  assign m_axi_rready  = busy && m_axis_tready;

  wire beat = m_axis_tvalid && m_axis_tready;

  // next packet length after this one
  logic [31:0] rest;
  assign rest = bytes_left - 32'(beat_bytes);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy          <= 1'b0;
      done          <= 1'b0;
      ar_addr       <= '0;
      ar_beats_left <= '0;
      bytes_left    <= '0;
      pkt_left      <= '0;
      pkt_size_q    <= '0;
      cur_pkt_len   <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start && length != 0) begin
          busy          <= 1'b1;
          ar_addr       <= src_addr;
          ar_beats_left <= 26'((length + 32'(BEAT_B - 1)) >> $clog2(BEAT_B));
          bytes_left    <= length;
          pkt_size_q    <= pkt_bytes;
          pkt_left      <= (length < 32'(pkt_bytes)) ? length : 32'(pkt_bytes);
          cur_pkt_len   <= (length < 32'(pkt_bytes)) ? LEN_W'(length) : pkt_bytes;
        end
      end else begin
        if (m_axi_arvalid && m_axi_arready) begin
          ar_addr       <= ar_addr + ADDR_W'(burst_beats * 26'(BEAT_B));
          ar_beats_left <= ar_beats_left - burst_beats;
        end
        if (beat) begin
          bytes_left <= rest;
          if (m_axis_tlast) begin
            pkt_left    <= (rest < 32'(pkt_size_q)) ? rest : 32'(pkt_size_q);
            cur_pkt_len <= (rest < 32'(pkt_size_q)) ? LEN_W'(rest) : pkt_size_q;
          end else begin
            pkt_left <= pkt_left - 32'(beat_bytes);
          end
          if (rest == 0) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  // packets are cut on beat boundaries
  property p_pkt_multiple;
    @(posedge clk) disable iff (!rst_n) (start && !busy) |-> (pkt_bytes != 0 && pkt_bytes[5:0] == 0 && src_addr[5:0] == 0);
  endproperty
  a_pkt_multiple: assert property (p_pkt_multiple);

  // unused AXI response fields
  logic unused;
  assign unused = ^{m_axi_rresp, m_axi_rlast};
endmodule
