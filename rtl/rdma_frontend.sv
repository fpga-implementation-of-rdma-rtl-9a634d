// rdma_frontend: transmitter data channel of the detector side. The DMA reads
// an image from DDR4 (AXI4 read master, brought out as ports because the
// interconnect and memory are outside) and streams it as packets; the header
// inserter prefixes each packet with an Ethernet/IPv4/UDP header whose
// destination IP and local-buffer ID come from the selected entry of the
// local-buffer table; the bridge hands the frames to the 100G MAC over LBUS.
//
//   DDR4 --AXI4--> tx_dma --AXIS+len--> header_insert --AXIS--> axis_to_lbus --LBUS--> CMAC
//                                         ^ dst IP, LBUF#
//                                    tx_lbuf_table[cfg_entry]
//
// Configuration (table writes, MAC/IP addresses, entry select, DMA command)
// comes from the detector controller, outside this module. cfg_entry must be
// stable for one clock before a transfer starts (table read latency) and
// during it. Block order and roles are the paper's; port formats are this
// design's.
module rdma_frontend
  import rdma_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // controller: local-buffer table
  input  logic                  cfg_tbl_wr,
  input  logic [AW-1:0]         cfg_tbl_addr,
  input  logic [ID_W-1:0]       cfg_tbl_lbuf,
  input  logic [31:0]           cfg_tbl_ip,
  input  logic [31:0]           cfg_tbl_size,
  // controller: header configuration
  input  logic [47:0]           cfg_src_mac,
  input  logic [47:0]           cfg_dst_mac,
  input  logic [31:0]           cfg_src_ip,
  input  logic [AW-1:0]         cfg_entry,
  input  logic                  cfg_seq_clear,
  output logic [31:0]           entry_size,
  output logic [SEQ_W-1:0]      tx_seq,
  // controller: DMA command
  input  logic                  dma_start,
  input  logic [63:0]           dma_addr,
  input  logic [31:0]           dma_length,
  input  logic [15:0]           dma_pkt_bytes,
  output logic                  dma_busy,
  output logic                  dma_done,
  // AXI4 read master towards DDR4
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
  // LBUS towards the CMAC
  output logic [3:0][127:0]     tx_data,
  output logic [3:0]            tx_ena,
  output logic [3:0]            tx_sop,
  output logic [3:0]            tx_eop,
  output logic [3:0]            tx_err,
  output logic [3:0][3:0]       tx_mty,
  input  logic                  tx_rdy
);
  logic [DATA_W-1:0] d_tdata, h_tdata;
  logic [KEEP_W-1:0] d_tkeep, h_tkeep;
  logic [LEN_W-1:0]  d_tuser;
  logic              d_tlast, d_tvalid, d_tready;
  logic              h_tlast, h_tvalid, h_tready;
  logic [ID_W-1:0]   e_lbuf;
  logic [31:0]       e_ip;

  tx_lbuf_table #(.ENTRIES(ENTRIES), .ID_W(ID_W)) u_table (
    .clk,
    .wr_en (cfg_tbl_wr), .wr_addr (cfg_tbl_addr), .wr_lbuf (cfg_tbl_lbuf),
    .wr_ip (cfg_tbl_ip), .wr_size (cfg_tbl_size),
    .rd_addr (cfg_entry), .rd_lbuf (e_lbuf), .rd_ip (e_ip), .rd_size (entry_size)
  );

  tx_dma #(.ADDR_W(64)) u_dma (
    .clk, .rst_n,
    .start (dma_start), .src_addr (dma_addr), .length (dma_length), .pkt_bytes (dma_pkt_bytes),
    .busy (dma_busy), .done (dma_done),
    .m_axi_araddr, .m_axi_arlen, .m_axi_arsize, .m_axi_arburst, .m_axi_arvalid, .m_axi_arready,
    .m_axi_rdata, .m_axi_rresp, .m_axi_rlast, .m_axi_rvalid, .m_axi_rready,
    .m_axis_tdata (d_tdata), .m_axis_tkeep (d_tkeep), .m_axis_tlast (d_tlast),
    .m_axis_tuser (d_tuser), .m_axis_tvalid (d_tvalid), .m_axis_tready (d_tready)
  );

  header_insert u_hdr (
    .clk, .rst_n,
    .cfg_src_mac, .cfg_dst_mac, .cfg_src_ip, .cfg_dst_ip (e_ip), .cfg_lbuf (e_lbuf),
    .seq_clear (cfg_seq_clear), .seq (tx_seq),
    .s_axis_tdata (d_tdata), .s_axis_tkeep (d_tkeep), .s_axis_tlast (d_tlast),
    .s_axis_tuser (d_tuser), .s_axis_tvalid (d_tvalid), .s_axis_tready (d_tready),
    .m_axis_tdata (h_tdata), .m_axis_tkeep (h_tkeep), .m_axis_tlast (h_tlast),
    .m_axis_tvalid (h_tvalid), .m_axis_tready (h_tready)
  );

  axis_to_lbus u_bridge (
    .clk, .rst_n,
    .s_axis_tdata (h_tdata), .s_axis_tkeep (h_tkeep), .s_axis_tlast (h_tlast),
    .s_axis_tvalid (h_tvalid), .s_axis_tready (h_tready),
    .tx_data, .tx_ena, .tx_sop, .tx_eop, .tx_err, .tx_mty, .tx_rdy
  );
endmodule
