// tb_tx_dma: runs the DMA against the behavioural AXI4 memory. Transfers: the
// paper's 598-byte single packet; 10000 bytes cut into 4 KB packets starting
// 64 bytes below a 4 KB boundary; a 32 KB transfer as one packet; each once
// with no stalls and once with random stalls on both sides. Every streamed
// byte is compared with the memory content at its address; tlast must fall
// at each packet end, tkeep must cover exactly the valid bytes, tuser must
// hold the packet length, bursts must respect 4 KB boundaries. Without stalls
// the transfer must take no more than beats + latency + 4 clocks.
module tb_tx_dma;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  logic [63:0] src_addr = '0;
  logic [31:0] length = '0;
  logic [15:0] pkt_bytes = '0;
  logic busy, done;
  logic [63:0] m_axi_araddr;
  logic [7:0] m_axi_arlen;
  logic [2:0] m_axi_arsize;
  logic [1:0] m_axi_arburst;
  logic m_axi_arvalid, m_axi_arready, m_axi_rlast, m_axi_rvalid, m_axi_rready;
  logic [511:0] m_axi_rdata, m_axis_tdata;
  logic [1:0] m_axi_rresp;
  logic [63:0] m_axis_tkeep;
  logic m_axis_tlast, m_axis_tvalid, m_axis_tready = 1;
  logic [15:0] m_axis_tuser;
  int bursts_s, errors_s, bursts_f, errors_f;
  int checks = 0, failures = 0;
  bit stall;
  localparam int LAT = 8;

  tx_dma dut (.*, .m_axi_arready(m_axi_arready), .m_axi_rdata(m_axi_rdata),
              .m_axi_rvalid(m_axi_rvalid), .m_axi_rlast(m_axi_rlast));

  // two memory models, one with stalls, muxed by the stall flag
  logic ar_f, ar_s, rv_f, rv_s, rl_f, rl_s;
  logic [511:0] rd_f, rd_s;
  logic [1:0] rr_f, rr_s;
  axi_rd_mem_model #(.LATENCY(LAT), .STALL(0)) mem_f (.clk, .rst_n, .araddr(m_axi_araddr),
    .arlen(m_axi_arlen), .arsize(m_axi_arsize), .arburst(m_axi_arburst),
    .arvalid(m_axi_arvalid && !stall), .arready(ar_f), .rdata(rd_f), .rresp(rr_f), .rlast(rl_f),
    .rvalid(rv_f), .rready(m_axi_rready && !stall), .bursts(bursts_f), .errors(errors_f));
  axi_rd_mem_model #(.LATENCY(LAT), .STALL(1)) mem_s (.clk, .rst_n, .araddr(m_axi_araddr),
    .arlen(m_axi_arlen), .arsize(m_axi_arsize), .arburst(m_axi_arburst),
    .arvalid(m_axi_arvalid && stall), .arready(ar_s), .rdata(rd_s), .rresp(rr_s), .rlast(rl_s),
    .rvalid(rv_s), .rready(m_axi_rready && stall), .bursts(bursts_s), .errors(errors_s));
  assign m_axi_arready = stall ? ar_s : ar_f;
  assign m_axi_rvalid  = stall ? rv_s : rv_f;
  assign m_axi_rlast   = stall ? rl_s : rl_f;
  assign m_axi_rdata   = stall ? rd_s : rd_f;
  assign m_axi_rresp   = stall ? rr_s : rr_f;

  always #1.5625 clk = ~clk;
  always @(negedge clk) m_axis_tready = stall ? ($urandom_range(0, 2) != 0) : 1'b1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic byte unsigned mem_byte(longint unsigned a);
    return byte'((a * 37) ^ (a >> 7) ^ (a >> 15));
  endfunction

  task automatic xfer(longint unsigned a, int unsigned len, int unsigned pkt);
    int unsigned pos = 0, in_pkt = 0, cyc = 0, bad = 0, pkts = 0, exp_pkts;
    int unsigned plen, nb;
    @(negedge clk);
    src_addr = a; length = len; pkt_bytes = 16'(pkt); start = 1;
    @(negedge clk);
    start = 0;
    while (1) begin
      @(posedge clk);
      cyc++;
      if (m_axis_tvalid && m_axis_tready) begin
        plen = (len - (pos - in_pkt) < pkt) ? len - (pos - in_pkt) : pkt;
        nb = (plen - in_pkt > 64) ? 64 : plen - in_pkt;
        if (m_axis_tuser != 16'(plen)) bad++;
        for (int j = 0; j < 64; j++) begin
          if (m_axis_tkeep[j] != (j < nb)) bad++;
          if (j < nb && m_axis_tdata[8*j +: 8] != mem_byte(a + pos + j)) bad++;
        end
        pos += nb;
        in_pkt += nb;
        if (m_axis_tlast != (in_pkt == plen)) bad++;
        if (in_pkt == plen) begin in_pkt = 0; pkts++; end
      end
      if (done) break;
      if (cyc > 100000) break;
    end
    exp_pkts = (len + pkt - 1) / pkt;
    check(bad == 0, $sformatf("transfer %0d bytes at %h: %0d mismatches", len, a, bad));
    check(pos == len, $sformatf("streamed %0d of %0d bytes", pos, len));
    check(pkts == exp_pkts, $sformatf("%0d packets, expected %0d", pkts, exp_pkts));
    check(!busy, "busy after done");
    if (!stall)
      check(cyc <= (len + 63) / 64 + LAT + 4, $sformatf("took %0d clocks for %0d beats", cyc, (len + 63) / 64));
  endtask

  initial begin
    stall = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      stall = (s == 1);
      xfer(64'h1000, 598, 1024);
      xfer(64'h3FC0, 10000, 4096);
      xfer(64'h10000, 32768, 32768);
    end
    check(errors_f == 0 && errors_s == 0, "AXI burst rules");
    check(bursts_f >= 1 + 4 + 8, $sformatf("%0d bursts", bursts_f));
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
