// tb_rdma_frontend: the transmitter at its default sizes. Local-buffer table
// entries 2 and 5 are written, then three DMA transfers are run from the
// behavioural DDR4 model (random AXI stalls) with the MAC's tx_rdy withdrawn
// at random: the paper's 598-byte packet to entry 2, 10000 bytes in 4 KB
// packets to entry 5, and 48199 bytes (a 48241-byte frame, the largest size
// of the paper's bandwidth sweep) as one packet to entry 2. Frames are
// rebuilt from the LBUS outputs and compared byte for byte with the reference
// frame (addresses from the configuration and table, buffer ID, sequence
// number, lengths, checksum, payload = memory content). Also checks the table
// size read-back.
module tb_rdma_frontend;
  import tb_util_pkg::*;
  localparam logic [47:0] SMAC = 48'h02_00_00_00_00_01, DMAC = 48'h02_00_00_00_00_99;
  localparam logic [31:0] SIP = 32'hC0A8_0001;
  logic clk = 0, rst_n = 0;
  logic cfg_tbl_wr = 0, cfg_seq_clear = 0;
  logic [7:0] cfg_tbl_addr = 0, cfg_entry = 0;
  logic [15:0] cfg_tbl_lbuf = 0;
  logic [31:0] cfg_tbl_ip = 0, cfg_tbl_size = 0, entry_size;
  logic [47:0] cfg_src_mac = SMAC, cfg_dst_mac = DMAC;
  logic [31:0] cfg_src_ip = SIP;
  logic [15:0] tx_seq;
  logic dma_start = 0, dma_busy, dma_done;
  logic [63:0] dma_addr = 0;
  logic [31:0] dma_length = 0;
  logic [15:0] dma_pkt_bytes = 0;
  logic [63:0] m_axi_araddr;
  logic [7:0] m_axi_arlen;
  logic [2:0] m_axi_arsize;
  logic [1:0] m_axi_arburst;
  logic m_axi_arvalid, m_axi_arready, m_axi_rlast, m_axi_rvalid, m_axi_rready;
  logic [511:0] m_axi_rdata;
  logic [1:0] m_axi_rresp;
  logic [3:0][127:0] tx_data;
  logic [3:0] tx_ena, tx_sop, tx_eop, tx_err;
  logic [3:0][3:0] tx_mty;
  logic tx_rdy = 1;
  int bursts, axi_err;
  int checks = 0, failures = 0;

  rdma_frontend dut (.*);
  axi_rd_mem_model #(.LATENCY(10), .STALL(1)) ddr (.clk, .rst_n, .araddr(m_axi_araddr),
    .arlen(m_axi_arlen), .arsize(m_axi_arsize), .arburst(m_axi_arburst), .arvalid(m_axi_arvalid),
    .arready(m_axi_arready), .rdata(m_axi_rdata), .rresp(m_axi_rresp), .rlast(m_axi_rlast),
    .rvalid(m_axi_rvalid), .rready(m_axi_rready), .bursts(bursts), .errors(axi_err));

  always #1.5625 clk = ~clk;
  always @(negedge clk) tx_rdy = ($urandom_range(0, 5) != 0);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic byte unsigned mem_byte(longint unsigned a);
    return byte'((a * 37) ^ (a >> 7) ^ (a >> 15));
  endfunction

  bytes_t expq[$];
  bytes_t got;
  int unsigned nfr = 0;

  always @(posedge clk) if (rst_n && tx_ena != 0) begin
    bit ended;
    ended = 0;
    for (int i = 0; i < 4; i++) if (tx_ena[i] && !ended) begin
      for (int j = 0; j < 16 - (tx_eop[i] ? int'(tx_mty[i]) : 0); j++) got.push_back(tx_data[i][127-8*j -: 8]);
      if (tx_eop[i]) ended = 1;
    end
    if (ended) begin
      if (expq.size() == 0) check(0, "unexpected frame");
      else check(got == expq.pop_front(), $sformatf("frame %0d, %0d bytes", nfr, got.size()));
      got.delete();
      nfr++;
    end
  end

  int unsigned seq = 0;
  task automatic xfer(int unsigned entry, int unsigned lbuf, int unsigned ip, longint unsigned a,
                      int unsigned len, int unsigned pkt);
    int unsigned off = 0, pl;
    @(negedge clk);
    cfg_entry = 8'(entry);
    while (off < len) begin
      bytes_t p;
      pl = (len - off < pkt) ? len - off : pkt;
      for (int unsigned j = 0; j < pl; j++) p.push_back(mem_byte(a + off + j));
      expq.push_back(make_frame(DMAC, SMAC, SIP, ip, lbuf, seq, p));
      seq++;
      off += pl;
    end
    @(negedge clk);
    dma_addr = a; dma_length = len; dma_pkt_bytes = 16'(pkt); dma_start = 1;
    @(negedge clk);
    dma_start = 0;
    @(posedge dma_done);
    wait (expq.size() == 0);
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg_tbl_wr = 1; cfg_tbl_addr = 2; cfg_tbl_lbuf = 16'd11; cfg_tbl_ip = 32'hC0A8_0063; cfg_tbl_size = 32'h10_0000;
    @(negedge clk);
    cfg_tbl_addr = 5; cfg_tbl_lbuf = 16'd3; cfg_tbl_ip = 32'hC0A8_0064; cfg_tbl_size = 32'h20_0000;
    @(negedge clk);
    cfg_tbl_wr = 0;
    cfg_entry = 5;
    repeat (2) @(negedge clk);
    check(entry_size == 32'h20_0000, "entry size read-back");
    xfer(2, 11, 32'hC0A8_0063, 64'h0001_0000, 598, 1024);
    xfer(5, 3, 32'hC0A8_0064, 64'h0002_0FC0, 10000, 4096);
    xfer(2, 11, 32'hC0A8_0063, 64'h0010_0000, 48199, 48256);
    check(nfr == 1 + 3 + 1, $sformatf("%0d frames", nfr));
    check(tx_seq == 16'(seq), "sequence number");
    check(axi_err == 0, "AXI burst rules");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
