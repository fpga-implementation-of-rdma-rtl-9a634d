// rdma_backend: receiver data path of the backend PCIe board. Frames from the
// 100G MAC (LBUS) are bridged to AXIS, their headers checked and stripped by
// the header analyzer, the destination buffer resolved to a physical address
// through the host-written table, and the payload buffered in the data mover
// and written to host memory through the PCIe endpoint's write stream under
// control of the driver FSM. Every header's sequence number feeds the loss
// detector; lost packets and unknown buffers become events and an interrupt.
//
//   CMAC --LBUS--> lbus_to_axis --> header_analyzer --payload--> data_mover --wr_*--> PCIe EP
//                                        |hdr                        ^ cmd
//                                  address_resolver --desc--> rx_driver --evt/irq--> host
//                                   |tbl      |seq                 ^ loss
//                              rx_phys_table  loss_detector -------+
//
// The receive LBUS cannot be stalled: if a beat arrives while the analyzer
// cannot take it (payload FIFO full), rx_overflow is set and stays set until
// reset. A descriptor FIFO of DESC_DEPTH entries between the resolver and
// the driver lets headers be resolved while earlier payloads are still being
// written. Block order and roles are the paper's; formats are this design's.
module rdma_backend
  import rdma_pkg::*;
#(
  parameter int unsigned ENTRIES    = 256,
  parameter int unsigned FIFO_DEPTH = 512,
  parameter int unsigned WINDOW     = 1024,
  parameter int unsigned CHECK_DIST = 511,
  parameter int unsigned DESC_DEPTH = 64,
  localparam int unsigned AW        = $clog2(ENTRIES)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // own addresses
  input  logic [47:0]           my_mac,
  input  logic [31:0]           my_ip,
  // host: physical-address table
  input  logic                  cfg_tbl_wr,
  input  logic [AW-1:0]         cfg_tbl_addr,
  input  logic [PADDR_W-1:0]    cfg_tbl_phys,
  input  logic [31:0]           cfg_tbl_size,
  input  logic                  cfg_tbl_valid,
  // LBUS from the CMAC
  input  logic [3:0][127:0]     rx_data,
  input  logic [3:0]            rx_ena,
  input  logic [3:0]            rx_sop,
  input  logic [3:0]            rx_eop,
  input  logic [3:0]            rx_err,
  input  logic [3:0][3:0]       rx_mty,
  // write stream to the PCIe endpoint
  output logic                  wr_valid,
  input  logic                  wr_ready,
  output logic [PADDR_W-1:0]    wr_addr,
  output logic [DATA_W-1:0]     wr_data,
  output logic [KEEP_W-1:0]     wr_keep,
  output logic                  wr_last,
  // events to the host
  output logic                  evt_valid,
  input  logic                  evt_ready,
  output event_t                evt,
  output logic                  irq,
  // status
  output logic [31:0]           pkt_count,
  output logic [31:0]           drop_count,
  output logic [31:0]           hdr_drop_count,
  output logic [31:0]           mac_err_count,
  output logic [31:0]           loss_count,
  output logic [31:0]           checked_count,
  output logic [31:0]           evt_overflow,
  output logic [4:0]            evt_level,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_level,
  output logic [$clog2(DESC_DEPTH+1)-1:0] desc_level,
  output logic                  rx_overflow
);
  logic [DATA_W-1:0] l_tdata, p_tdata;
  logic [KEEP_W-1:0] l_tkeep, p_tkeep;
  logic              l_tlast, l_tuser, l_tvalid, l_tready;
  logic              p_tlast, p_tvalid, p_tready;
  hdr_info_t         hdr;
  logic              hdr_valid, hdr_ready;
  logic [AW-1:0]     tbl_rd_addr;
  logic [PADDR_W-1:0] tbl_phys;
  logic [31:0]       tbl_size;
  logic              tbl_valid;
  desc_t             desc, q_desc;
  logic              desc_valid, desc_ready, q_desc_valid, q_desc_ready;
  logic              seq_valid;
  logic [SEQ_W-1:0]  seq;
  logic              res_evt_valid;
  event_t            res_evt;
  logic              loss_valid;
  logic [SEQ_W-1:0]  loss_seq;
  logic              mv_cmd_valid, mv_cmd_ready, mv_cmd_drop, mv_done;
  logic [PADDR_W-1:0] mv_cmd_addr;

  lbus_to_axis u_bridge (
    .clk, .rst_n,
    .rx_data, .rx_ena, .rx_sop, .rx_eop, .rx_err, .rx_mty,
    .m_axis_tdata (l_tdata), .m_axis_tkeep (l_tkeep), .m_axis_tlast (l_tlast),
    .m_axis_tuser (l_tuser), .m_axis_tvalid (l_tvalid)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rx_overflow <= 1'b0;
    else if (l_tvalid && !l_tready) rx_overflow <= 1'b1;
  end

  header_analyzer u_hdr (
    .clk, .rst_n, .my_mac, .my_ip,
    .s_axis_tdata (l_tdata), .s_axis_tkeep (l_tkeep), .s_axis_tlast (l_tlast),
    .s_axis_tuser (l_tuser), .s_axis_tvalid (l_tvalid), .s_axis_tready (l_tready),
    .hdr, .hdr_valid, .hdr_ready,
    .m_axis_tdata (p_tdata), .m_axis_tkeep (p_tkeep), .m_axis_tlast (p_tlast),
    .m_axis_tvalid (p_tvalid), .m_axis_tready (p_tready),
    .drop_count (hdr_drop_count), .err_count (mac_err_count)
  );

  rx_phys_table #(.ENTRIES(ENTRIES), .ADDR_W(PADDR_W)) u_table (
    .clk, .rst_n,
    .wr_en (cfg_tbl_wr), .wr_addr (cfg_tbl_addr), .wr_phys (cfg_tbl_phys),
    .wr_size (cfg_tbl_size), .wr_valid (cfg_tbl_valid),
    .rd_addr (tbl_rd_addr), .rd_phys (tbl_phys), .rd_size (tbl_size), .rd_valid (tbl_valid)
  );

  address_resolver #(.ENTRIES(ENTRIES)) u_res (
    .clk, .rst_n,
    .hdr, .hdr_valid, .hdr_ready,
    .tbl_rd_addr, .tbl_phys, .tbl_size, .tbl_valid,
    .clr_en (cfg_tbl_wr), .clr_addr (cfg_tbl_addr),
    .desc, .desc_valid, .desc_ready,
    .seq_valid, .seq,
    .evt_valid (res_evt_valid), .evt (res_evt)
  );

  // descriptors wait here while earlier packets are still being written
  sync_fifo #(.WIDTH($bits(desc_t)), .DEPTH(DESC_DEPTH)) u_desc_q (
    .clk, .rst_n,
    .wr_valid (desc_valid),   .wr_ready (desc_ready),   .wr_data (desc),
    .rd_valid (q_desc_valid), .rd_ready (q_desc_ready), .rd_data (q_desc),
    .count    (desc_level)
  );

  loss_detector #(.WINDOW(WINDOW), .CHECK_DIST(CHECK_DIST), .SEQ_W(SEQ_W)) u_loss (
    .clk, .rst_n,
    .seq_valid, .seq,
    .loss_valid, .loss_seq, .checked_count, .loss_count
  );

  data_mover #(.FIFO_DEPTH(FIFO_DEPTH)) u_mover (
    .clk, .rst_n,
    .s_axis_tdata (p_tdata), .s_axis_tkeep (p_tkeep), .s_axis_tlast (p_tlast),
    .s_axis_tvalid (p_tvalid), .s_axis_tready (p_tready),
    .cmd_valid (mv_cmd_valid), .cmd_ready (mv_cmd_ready), .cmd_addr (mv_cmd_addr),
    .cmd_drop (mv_cmd_drop), .done (mv_done),
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_keep, .wr_last,
    .fifo_level
  );

  rx_driver u_drv (
    .clk, .rst_n,
    .desc (q_desc), .desc_valid (q_desc_valid), .desc_ready (q_desc_ready),
    .mv_cmd_valid, .mv_cmd_ready, .mv_cmd_addr, .mv_cmd_drop, .mv_done,
    .loss_valid, .loss_seq,
    .res_evt_valid, .res_evt,
    .evt_valid, .evt_ready, .evt, .irq,
    .pkt_count, .drop_count, .evt_overflow, .evt_level
  );
endmodule
