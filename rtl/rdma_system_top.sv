// rdma_system_top: the whole RDMA-over-UDP data path, detector-side
// transmitter (rdma_frontend) and backend receiver (rdma_backend), in one
// module. In a real installation the two halves sit on different FPGAs joined
// through their 100G MACs and an Ethernet network; those parts, the DDR4 that
// holds the images and the PCIe endpoint that writes into host memory are not
// part of this RTL, so their connections are ports: the transmit LBUS (tx_*)
// and receive LBUS (rx_*) meet the MACs, the AXI4 read port (m_axi_*) meets
// the DDR4 interconnect, and the write stream (wr_*) with the event port and
// irq meets the PCIe endpoint. Both halves run on one clock here.
//
// rst_n is an asynchronous, active-low reset for every register. It is also
// the `disable iff` condition of the handshake assertions inside the blocks,
// which lint reports as a reset used both synchronously and asynchronously;
// the assertions are not circuitry, so the warning is expected.
module rdma_system_top
  import rdma_pkg::*;
#(
  parameter int unsigned TX_ENTRIES = 256,
  parameter int unsigned RX_ENTRIES = 256,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned WINDOW     = 1024,
  parameter int unsigned CHECK_DIST = 511,
  localparam int unsigned TAW       = $clog2(TX_ENTRIES),
  localparam int unsigned RAW       = $clog2(RX_ENTRIES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // ---------------- transmitter (frontend) ----------------
  input  logic                  tx_cfg_tbl_wr,
  input  logic [TAW-1:0]        tx_cfg_tbl_addr,
  input  logic [ID_W-1:0]       tx_cfg_tbl_lbuf,
  input  logic [31:0]           tx_cfg_tbl_ip,
  input  logic [31:0]           tx_cfg_tbl_size,
  input  logic [47:0]           tx_cfg_src_mac,
  input  logic [47:0]           tx_cfg_dst_mac,
  input  logic [31:0]           tx_cfg_src_ip,
  input  logic [TAW-1:0]        tx_cfg_entry,
  input  logic                  tx_cfg_seq_clear,
  output logic [31:0]           tx_entry_size,
  output logic [SEQ_W-1:0]      tx_seq,
  input  logic                  dma_start,
  input  logic [63:0]           dma_addr,
  input  logic [31:0]           dma_length,
  input  logic [15:0]           dma_pkt_bytes,
  output logic                  dma_busy,
  output logic                  dma_done,
  output logic [63:0]           m_axi_araddr,
  output logic [7:0]            m_axi_arlen,
  output logic [2:0]            m_axi_arsize,
  output logic [1:0]            m_axi_arburst,
  output logic                  m_axi_arvalid,
  input  logic                  m_axi_arready,
  input  logic [DATA_W-1:0]     m_axi_rdata,
  input  logic [1:0]            m_axi_rresp,
  input  logic                  m_axi_rlast,
  input  logic                  m_axi_rvalid,
  output logic                  m_axi_rready,
  output logic [3:0][127:0]     tx_data,
  output logic [3:0]            tx_ena,
  output logic [3:0]            tx_sop,
  output logic [3:0]            tx_eop,
  output logic [3:0]            tx_err,
  output logic [3:0][3:0]       tx_mty,
  input  logic                  tx_rdy,
  // ---------------- receiver (backend) ----------------
  input  logic [47:0]           rx_my_mac,
  input  logic [31:0]           rx_my_ip,
  input  logic                  rx_cfg_tbl_wr,
  input  logic [RAW-1:0]        rx_cfg_tbl_addr,
  input  logic [PADDR_W-1:0]    rx_cfg_tbl_phys,
  input  logic [31:0]           rx_cfg_tbl_size,
  input  logic                  rx_cfg_tbl_valid,
  input  logic [3:0][127:0]     rx_data,
  input  logic [3:0]            rx_ena,
  input  logic [3:0]            rx_sop,
  input  logic [3:0]            rx_eop,
  input  logic [3:0]            rx_err,
  input  logic [3:0][3:0]       rx_mty,
  output logic                  wr_valid,
  input  logic                  wr_ready,
  output logic [PADDR_W-1:0]    wr_addr,
  output logic [DATA_W-1:0]     wr_data,
  output logic [KEEP_W-1:0]     wr_keep,
  output logic                  wr_last,
  output logic                  evt_valid,
  input  logic                  evt_ready,
  output event_t                evt,
  output logic                  irq,
  output logic [31:0]           rx_pkt_count,
  output logic [31:0]           rx_drop_count,
  output logic [31:0]           rx_hdr_drop_count,
  output logic [31:0]           rx_mac_err_count,
  output logic [31:0]           rx_loss_count,
  output logic [31:0]           rx_checked_count,
  output logic [31:0]           rx_evt_overflow,
  output logic [4:0]            rx_evt_level,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] rx_fifo_level,
  output logic [6:0]            rx_desc_level,
  output logic                  rx_overflow
);
  rdma_frontend #(.ENTRIES(TX_ENTRIES)) u_front (
    .clk, .rst_n,
    .cfg_tbl_wr (tx_cfg_tbl_wr), .cfg_tbl_addr (tx_cfg_tbl_addr), .cfg_tbl_lbuf (tx_cfg_tbl_lbuf),
    .cfg_tbl_ip (tx_cfg_tbl_ip), .cfg_tbl_size (tx_cfg_tbl_size),
    .cfg_src_mac (tx_cfg_src_mac), .cfg_dst_mac (tx_cfg_dst_mac), .cfg_src_ip (tx_cfg_src_ip),
    .cfg_entry (tx_cfg_entry), .cfg_seq_clear (tx_cfg_seq_clear),
    .entry_size (tx_entry_size), .tx_seq,
    .dma_start, .dma_addr, .dma_length, .dma_pkt_bytes, .dma_busy, .dma_done,
    .m_axi_araddr, .m_axi_arlen, .m_axi_arsize, .m_axi_arburst, .m_axi_arvalid, .m_axi_arready,
    .m_axi_rdata, .m_axi_rresp, .m_axi_rlast, .m_axi_rvalid, .m_axi_rready,
    .tx_data, .tx_ena, .tx_sop, .tx_eop, .tx_err, .tx_mty, .tx_rdy
  );

  rdma_backend #(.ENTRIES(RX_ENTRIES), .FIFO_DEPTH(FIFO_DEPTH), .WINDOW(WINDOW),
                 .CHECK_DIST(CHECK_DIST)) u_back (
    .clk, .rst_n,
    .my_mac (rx_my_mac), .my_ip (rx_my_ip),
    .cfg_tbl_wr (rx_cfg_tbl_wr), .cfg_tbl_addr (rx_cfg_tbl_addr), .cfg_tbl_phys (rx_cfg_tbl_phys),
    .cfg_tbl_size (rx_cfg_tbl_size), .cfg_tbl_valid (rx_cfg_tbl_valid),
    .rx_data, .rx_ena, .rx_sop, .rx_eop, .rx_err, .rx_mty,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_keep, .wr_last,
    .evt_valid, .evt_ready, .evt, .irq,
    .pkt_count (rx_pkt_count), .drop_count (rx_drop_count), .hdr_drop_count (rx_hdr_drop_count),
    .mac_err_count (rx_mac_err_count), .loss_count (rx_loss_count),
    .checked_count (rx_checked_count), .evt_overflow (rx_evt_overflow), .evt_level (rx_evt_level),
    .fifo_level (rx_fifo_level), .desc_level (rx_desc_level), .rx_overflow
  );
endmodule
