// tb_rdma_system_top: end-to-end test of the whole data path at the default
// sizes (no parameter is overridden). A behavioural DDR4 holds the images,
// a link model joins the transmit LBUS to the receive LBUS one clock later
// (and can delete a chosen frame, as a lossy network would), and a host
// memory model takes the PCIe write stream. Phases:
//   A  twenty 598-byte single-packet transfers (the packet size of the
//      paper's RoCE comparison);
//   B  one transfer per frame size of the paper's bandwidth sweep (241, 881,
//      1521, 6641, 32241, 48241 bytes including the 42-byte header), with
//      tx_rdy and host always ready, measuring clocks per beat on both sides;
//   C  a 64 KB image cut into 4 KB packets, twice, into a 64 KB ring buffer,
//      with tx_rdy and host write stalls;
//   D  560 transfers of 64-byte packets with one frame deleted by the link,
//      which the loss detector must report 511 packets later;
//   E  a transfer to a buffer the receiver does not know, and one to a
//      foreign IP address.
// Every payload that reaches the host is checked byte for byte at the
// address predicted by a reference ring-buffer model; the event FIFO must
// hold exactly the expected events. Each mechanism (multi-packet cut, drain
// beat in the header inserter, tx back-pressure, host back-pressure, ring
// wrap, header drop, unknown buffer, packet loss) is counted and must occur.
module tb_rdma_system_top;
  import rdma_pkg::*;
  import tb_util_pkg::*;
  localparam logic [47:0] TXMAC = 48'h02_00_00_00_00_01, RXMAC = 48'h02_00_00_00_00_99;
  localparam logic [31:0] TXIP = 32'hC0A8_0001, RXIP = 32'hC0A8_0063;
  logic clk = 0, rst_n = 0;
  // frontend
  logic tx_cfg_tbl_wr = 0, tx_cfg_seq_clear = 0;
  logic [7:0] tx_cfg_tbl_addr = 0, tx_cfg_entry = 0;
  logic [15:0] tx_cfg_tbl_lbuf = 0;
  logic [31:0] tx_cfg_tbl_ip = 0, tx_cfg_tbl_size = 0, tx_entry_size;
  logic [47:0] tx_cfg_src_mac = TXMAC, tx_cfg_dst_mac = RXMAC;
  logic [31:0] tx_cfg_src_ip = TXIP;
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
  logic [3:0][127:0] tx_data, rx_data;
  logic [3:0] tx_ena, tx_sop, tx_eop, tx_err, rx_ena, rx_sop, rx_eop, rx_err;
  logic [3:0][3:0] tx_mty, rx_mty;
  logic tx_rdy = 1;
  // backend
  logic [47:0] rx_my_mac = RXMAC;
  logic [31:0] rx_my_ip = RXIP;
  logic rx_cfg_tbl_wr = 0, rx_cfg_tbl_valid = 0;
  logic [7:0] rx_cfg_tbl_addr = 0;
  logic [63:0] rx_cfg_tbl_phys = 0;
  logic [31:0] rx_cfg_tbl_size = 0;
  logic wr_valid, wr_ready, wr_last;
  logic [63:0] wr_addr;
  logic [511:0] wr_data;
  logic [63:0] wr_keep;
  logic evt_valid, evt_ready = 0, irq;
  event_t evt;
  logic [31:0] rx_pkt_count, rx_drop_count, rx_hdr_drop_count, rx_mac_err_count, rx_loss_count,
               rx_checked_count, rx_evt_overflow;
  logic [4:0] rx_evt_level;
  logic [9:0] rx_fifo_level;
  logic [6:0] rx_desc_level;
  logic rx_overflow;
  int bursts, axi_err, hbeats, hstalls, hpackets;
  int checks = 0, failures = 0;
  bit stall_tx = 0, stall_host = 0;

  rdma_system_top dut (.*);

  axi_rd_mem_model #(.LATENCY(12), .STALL(0)) ddr (.clk, .rst_n, .araddr(m_axi_araddr),
    .arlen(m_axi_arlen), .arsize(m_axi_arsize), .arburst(m_axi_arburst), .arvalid(m_axi_arvalid),
    .arready(m_axi_arready), .rdata(m_axi_rdata), .rresp(m_axi_rresp), .rlast(m_axi_rlast),
    .rvalid(m_axi_rvalid), .rready(m_axi_rready), .bursts(bursts), .errors(axi_err));
  pcie_wr_mem_model host (.clk, .rst_n, .stall_en(stall_host), .wr_valid, .wr_ready, .wr_addr,
    .wr_data, .wr_keep, .wr_last, .beats(hbeats), .stalls(hstalls), .packets(hpackets));

  always #1.5625 clk = ~clk;
  always @(negedge clk) tx_rdy = stall_tx ? ($urandom_range(0, 4) != 0) : 1'b1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic byte unsigned mem_byte(longint unsigned a);
    return byte'((a * 37) ^ (a >> 7) ^ (a >> 15));
  endfunction

  // ---------------- link model: LBUS tx -> rx, optional frame deletion ----------------
  int unsigned link_frame = 0;   // frames seen on the link
  int unsigned kill_frame = '1;  // index of the frame to delete
  bit killing = 0;
  always @(posedge clk) begin
    logic kill;
    kill = killing || ((tx_ena & tx_sop) != 0 && link_frame == kill_frame);
    rx_data <= tx_data;
    rx_ena  <= kill ? 4'b0 : tx_ena;
    rx_sop  <= tx_sop;
    rx_eop  <= tx_eop;
    rx_err  <= tx_err;
    rx_mty  <= tx_mty;
    if (rst_n && (tx_ena & tx_sop) != 0) killing = kill;
    if (rst_n && (tx_ena & tx_eop) != 0) begin
      link_frame++;
      killing = 0;
    end
  end

  // ---------------- mechanism counters ----------------
  int unsigned n_tx_stall = 0, n_multi = 0, n_drain = 0, n_wrap = 0;
  always @(posedge clk) if (rst_n && dut.u_front.u_hdr.s_axis_tvalid && !tx_rdy && dut.u_front.h_tvalid)
    n_tx_stall++;
  always @(posedge clk) if (rst_n && dut.u_front.u_hdr.flush && dut.u_front.u_hdr.can_load) n_drain++;

  // ---------------- reference model of where payloads land ----------------
  typedef struct { longint unsigned addr, src; int unsigned len; } land_t;
  land_t lands[$];
  longint unsigned rbase[int], rsize[int], rwp[int];
  event_t exp_evt[$];

  // entries: tx entry -> (lbuf, ip)
  task automatic tx_entry(int e, int lbuf, logic [31:0] ip);
    @(negedge clk);
    tx_cfg_tbl_wr = 1; tx_cfg_tbl_addr = 8'(e); tx_cfg_tbl_lbuf = 16'(lbuf); tx_cfg_tbl_ip = ip;
    tx_cfg_tbl_size = 32'h10_0000;
    @(negedge clk);
    tx_cfg_tbl_wr = 0;
  endtask

  task automatic rx_entry(int id, longint unsigned base, longint unsigned size);
    @(negedge clk);
    rx_cfg_tbl_wr = 1; rx_cfg_tbl_addr = 8'(id); rx_cfg_tbl_phys = base; rx_cfg_tbl_size = 32'(size);
    rx_cfg_tbl_valid = 1;
    @(negedge clk);
    rx_cfg_tbl_wr = 0;
    rbase[id] = base; rsize[id] = size; rwp[id] = 0;
  endtask

  // one DMA transfer through tx entry e; lbuf/known/foreign describe what the receiver will do
  task automatic xfer(int e, int lbuf, bit deliver, longint unsigned a, int unsigned len,
                      int unsigned pkt, int unsigned drop_idx = '1);
    int unsigned off = 0, pl, al, k = 0;
    @(negedge clk);
    tx_cfg_entry = 8'(e);
    while (off < len) begin
      pl = (len - off < pkt) ? len - off : pkt;
      if (deliver && k != drop_idx) begin
        al = ((pl + 63) / 64) * 64;
        if (rwp[lbuf] + al > rsize[lbuf]) begin rwp[lbuf] = 0; n_wrap++; end
        lands.push_back('{addr: rbase[lbuf] + rwp[lbuf], src: a + off, len: pl});
        rwp[lbuf] += al;
      end
      off += pl;
      k++;
    end
    if (k > 1) n_multi++;
    @(negedge clk);
    dma_addr = a; dma_length = len; dma_pkt_bytes = 16'(pkt); dma_start = 1;
    @(negedge clk);
    dma_start = 0;
    @(posedge dma_done);
  endtask

  task automatic drain();
    int unsigned idle = 0;
    while (idle < 200) begin
      @(negedge clk);
      if (wr_valid || dma_busy || tx_ena != 0 || rx_fifo_level != 0 || rx_desc_level != 0) idle = 0;
      else idle++;
    end
  endtask

  // throughput of one large frame with no stalls
  task automatic rate(int unsigned frame_bytes);
    int unsigned pl, t0, t1, r0, r1, tbeats, rbeats, tc, rc;
    pl = frame_bytes - 42;
    fork
      xfer(0, 0, 1, 64'h0100_0000, pl, 16'hFFC0);
      begin
        tc = 0;
        while ((tx_ena & tx_sop) == 0) begin @(posedge clk); tc++; end
        t0 = tc;
        while ((tx_ena & tx_eop) == 0) begin @(posedge clk); tc++; end
        t1 = tc;
      end
      begin
        rc = 0;
        while (!wr_valid) begin @(posedge clk); rc++; end
        r0 = rc;
        while (!(wr_valid && wr_ready && wr_last)) begin @(posedge clk); rc++; end
        r1 = rc;
      end
    join
    tbeats = (frame_bytes + 63) / 64;
    rbeats = (pl + 63) / 64;
    check(t1 - t0 + 1 == tbeats, $sformatf("%0d-byte frame: %0d clocks on the transmit LBUS for %0d beats",
                                           frame_bytes, t1 - t0 + 1, tbeats));
    check(r1 - r0 + 1 == rbeats, $sformatf("%0d-byte frame: %0d clocks of host writes for %0d beats",
                                           frame_bytes, r1 - r0 + 1, rbeats));
    drain();
  endtask

  event_t got_evt[$];
  always @(posedge clk) if (rst_n && evt_valid && evt_ready) got_evt.push_back(evt);

  initial begin
    int unsigned bad = 0, nlatest = 0;
    int unsigned sweep[$] = '{241, 881, 1521, 6641, 32241, 48241};
    repeat (3) @(negedge clk);
    rst_n = 1;
    // configuration: tx entries 0,1 -> buffers 0,1; entry 2 -> buffer 7 (unknown); entry 3 -> foreign IP
    tx_entry(0, 0, RXIP);
    tx_entry(1, 1, RXIP);
    tx_entry(2, 7, RXIP);
    tx_entry(3, 0, 32'hC0A8_0077);
    rx_entry(0, 64'h20_0000_0000, 1 << 18);
    rx_entry(1, 64'h30_0000_0000, 1 << 16);
    // A: Table I packet size
    for (int i = 0; i < 20; i++) xfer(0, 0, 1, 64'h0000_1000 + 64'(i) * 1024, 598, 1024);
    drain();
    // B: bandwidth sweep sizes, rate measured without stalls
    foreach (sweep[i]) rate(sweep[i]);
    // C: image in 4 KB packets into the 64 KB ring, with stalls
    stall_tx = 1;
    stall_host = 1;
    xfer(1, 1, 1, 64'h0200_0000, 65536, 4096);
    xfer(1, 1, 1, 64'h0300_0000, 65536 - 100, 4096);
    drain();
    // D: loss detection: 560 small packets, the link deletes the 10th
    kill_frame = link_frame + 10;
    for (int i = 0; i < 560; i++) xfer(0, 0, 1, 64'h0400_0000 + 64'(i) * 64, 64, 64, (i == 10) ? 0 : '1);
    exp_evt.push_back('{code: EVT_LOSS, seq: 16'(kill_frame)});
    drain();
    // E: unknown buffer and foreign IP
    xfer(2, 7, 0, 64'h0500_0000, 700, 1024);
    exp_evt.push_back('{code: EVT_UNKNOWN, seq: 16'd7});
    xfer(3, 0, 0, 64'h0500_0000, 700, 1024);
    drain();
    stall_tx = 0;
    stall_host = 0;

    // ---------------- checks ----------------
    for (int k = 0; k < lands.size(); k++) begin
      bit latest = 1;
      for (int m = k + 1; m < lands.size() && latest; m++)
        if (lands[m].addr < lands[k].addr + lands[k].len && lands[k].addr < lands[m].addr + lands[m].len)
          latest = 0;
      if (latest) begin
        nlatest++;
        for (int unsigned j = 0; j < lands[k].len; j++)
          if (host.rd(lands[k].addr + j) != int'(mem_byte(lands[k].src + j))) bad++;
      end
    end
    check(bad == 0, $sformatf("%0d payload bytes wrong in host memory (%0d packets checked)", bad, nlatest));
    check(rx_pkt_count == lands.size() && hpackets == lands.size(),
          $sformatf("%0d packets written, %0d expected", rx_pkt_count, lands.size()));
    check(rx_hdr_drop_count == 1, $sformatf("%0d frames dropped by the header analyzer", rx_hdr_drop_count));
    check(rx_drop_count == 1, $sformatf("%0d packets dropped for unknown buffers", rx_drop_count));
    check(!rx_overflow && axi_err == 0 && rx_mac_err_count == 0, "no overflow, AXI or MAC errors");
    check(irq, "interrupt pending");
    evt_ready = 1;
    repeat (30) @(negedge clk);
    check(got_evt.size() == exp_evt.size(), $sformatf("%0d events, %0d expected", got_evt.size(), exp_evt.size()));
    foreach (exp_evt[i])
      check(i < got_evt.size() && got_evt[i] == exp_evt[i], $sformatf("event %0d: got %0d/%0d expected %0d/%0d", i,
            got_evt[i].code, got_evt[i].seq, exp_evt[i].code, exp_evt[i].seq));
    check(!irq, "interrupt cleared");
    // every mechanism happened
    $display("mechanisms: multi-packet %0d, drain beats %0d, tx stalls %0d, host stalls %0d, wraps %0d, header drops %0d, unknown %0d, losses %0d",
             n_multi, n_drain, n_tx_stall, hstalls, n_wrap, rx_hdr_drop_count, rx_drop_count, rx_loss_count);
    check(n_multi > 0, "multi-packet transfer happened");
    check(n_drain > 0, "header-insert drain beat happened");
    check(n_tx_stall > 0, "transmit back-pressure happened");
    check(hstalls > 0, "host write back-pressure happened");
    check(n_wrap > 0, "ring-buffer wrap happened");
    check(rx_hdr_drop_count > 0, "header drop happened");
    check(rx_drop_count > 0, "unknown-buffer drop happened");
    check(rx_loss_count == 1, "packet loss detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
