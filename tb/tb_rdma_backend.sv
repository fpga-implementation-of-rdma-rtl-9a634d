// tb_rdma_backend: the receiver at its default sizes, fed on its LBUS input
// with 900 frames built by the reference model (payloads of 1..1500 bytes,
// buffer IDs 0..3 with 16 KB ring buffers) with sequence numbers 0..899.
// Frames 100 and 300 are never sent, frame 50 targets the unknown buffer 9
// and frame 60 has a foreign MAC address. The host memory model stalls the
// write stream at random. Checks: every accepted payload lands at the
// address a reference ring-buffer model predicts, byte for byte; the event
// FIFO reports the unknown buffer and exactly the losses the 512-packet rule
// can see by the end (60, 100 and 300, all at least 511 behind the newest
// sequence number 899); counters; irq; no receive overflow.
module tb_rdma_backend;
  import rdma_pkg::*;
  import tb_util_pkg::*;
  localparam logic [47:0] MYMAC = 48'h02_00_00_00_00_99;
  localparam logic [31:0] MYIP  = 32'hC0A8_0063;
  localparam int N = 900;
  logic clk = 0, rst_n = 0;
  logic [47:0] my_mac = MYMAC;
  logic [31:0] my_ip = MYIP;
  logic cfg_tbl_wr = 0, cfg_tbl_valid = 0;
  logic [7:0] cfg_tbl_addr = 0;
  logic [63:0] cfg_tbl_phys = 0;
  logic [31:0] cfg_tbl_size = 0;
  logic [3:0][127:0] rx_data = '0;
  logic [3:0] rx_ena = 0, rx_sop = 0, rx_eop = 0, rx_err = 0;
  logic [3:0][3:0] rx_mty = '0;
  logic wr_valid, wr_ready, wr_last;
  logic [63:0] wr_addr;
  logic [511:0] wr_data;
  logic [63:0] wr_keep;
  logic evt_valid, evt_ready = 0, irq;
  event_t evt;
  logic [31:0] pkt_count, drop_count, hdr_drop_count, mac_err_count, loss_count, checked_count,
               evt_overflow;
  logic [4:0] evt_level;
  logic [9:0] fifo_level;
  logic [6:0] desc_level;
  logic rx_overflow;
  int beats, stalls, packets;
  int checks = 0, failures = 0;

  rdma_backend dut (.*);
  pcie_wr_mem_model host (.clk, .rst_n, .stall_en(1'b1), .wr_valid, .wr_ready, .wr_addr, .wr_data,
                                       .wr_keep, .wr_last, .beats, .stalls, .packets);
  always #1.5625 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one frame onto the LBUS, packets starting in segment 0
  task automatic lbus_send(bytes_t f);
    int unsigned nb, n;
    nb = nbeats(f.size());
    for (int unsigned b = 0; b < nb; b++) begin
      for (int i = 0; i < 4; i++) begin
        n = 0;
        for (int j = 0; j < 16; j++) begin
          rx_data[i][127-8*j -: 8] = (64*b + 16*i + j < f.size()) ? f[64*b + 16*i + j] : 8'h00;
          if (64*b + 16*i + j < f.size()) n++;
        end
        rx_ena[i] = (n != 0);
        rx_sop[i] = (i == 0 && b == 0);
        rx_eop[i] = (n != 0) && (64*b + 16*i + n == f.size());
        rx_mty[i] = rx_eop[i] ? 4'(16 - n) : 4'(0);
        rx_err[i] = 0;
      end
      @(negedge clk);
      rx_ena = 0; rx_sop = 0; rx_eop = 0;
    end
  endtask

  event_t got_evt[$];
  always @(posedge clk) if (rst_n && evt_valid && evt_ready) got_evt.push_back(evt);
  int irq_seen = 0;
  always @(posedge clk) if (irq) irq_seen++;

  typedef struct { longint unsigned addr; int unsigned len, seed; } land_t;
  land_t lands[$];

  initial begin
    longint unsigned wp[4] = '{0, 0, 0, 0};
    longint unsigned base[4];
    int unsigned id, len, al, nacc = 0, bad = 0;
    bytes_t f;
    for (int i = 0; i < 4; i++) base[i] = 64'h10_0000_0000 + 64'(i) * 64'h100_0000;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      cfg_tbl_wr = 1; cfg_tbl_addr = 8'(i); cfg_tbl_phys = base[i]; cfg_tbl_size = 16384; cfg_tbl_valid = 1;
    end
    @(negedge clk);
    cfg_tbl_wr = 0;
    for (int s = 0; s < N; s++) begin
      if (s == 100 || s == 300) continue;
      id = s % 4;
      len = 1 + $urandom_range(0, 1499);
      if (s == 50) id = 9;
      f = make_frame(s == 60 ? 48'h02_00_00_00_00_55 : MYMAC, 48'h02_00_00_00_00_01,
                     32'hC0A8_0001, MYIP, id, s, make_payload(s, len));
      while (f.size() < 60) f.push_back(8'h00);
      if (id < 4 && s != 60) begin
        al = ((len + 63) / 64) * 64;
        if (wp[id] + al > 16384) wp[id] = 0;
        lands.push_back('{addr: base[id] + wp[id], len: len, seed: s});
        wp[id] += al;
        nacc++;
      end
      lbus_send(f);
      repeat ($urandom_range(4, 12)) @(negedge clk);
    end
    repeat (2000) @(negedge clk);
    // the last write to each location is the one that must be there
    for (int k = 0; k < lands.size(); k++) begin
      bit latest = 1;
      for (int m = k + 1; m < lands.size(); m++)
        if (lands[m].addr < lands[k].addr + lands[k].len && lands[k].addr < lands[m].addr + lands[m].len)
          latest = 0;
      if (latest) begin
        bytes_t p;
        p = make_payload(lands[k].seed, lands[k].len);
        foreach (p[j]) if (host.rd(lands[k].addr + j) != int'(p[j])) bad++;
      end
    end
    check(bad == 0, $sformatf("%0d payload bytes wrong in host memory", bad));
    check(pkt_count == nacc && packets == nacc, $sformatf("%0d/%0d packets written, %0d expected",
                                                          pkt_count, packets, nacc));
    check(drop_count == 1, $sformatf("drop_count %0d", drop_count));
    check(hdr_drop_count == 1, $sformatf("hdr_drop_count %0d", hdr_drop_count));
    check(checked_count == N - 511, $sformatf("checked %0d", checked_count));
    check(loss_count == 3, $sformatf("loss_count %0d", loss_count));
    check(irq_seen > 0 && irq, "interrupt raised");
    evt_ready = 1;
    repeat (20) @(negedge clk);
    check(got_evt.size() == 4, $sformatf("%0d events", got_evt.size()));
    if (got_evt.size() == 4) begin
      check(got_evt[0].code == EVT_UNKNOWN && got_evt[0].seq == 9, "unknown-buffer event");
      check(got_evt[1].code == EVT_LOSS && got_evt[1].seq == 60, "loss event 60");
      check(got_evt[2].code == EVT_LOSS && got_evt[2].seq == 100, "loss event 100");
      check(got_evt[3].code == EVT_LOSS && got_evt[3].seq == 300, "loss event 300");
    end
    check(!irq, "interrupt cleared after reading events");
    check(!rx_overflow && stalls > 0, $sformatf("overflow %0d, %0d stalled clocks", rx_overflow, stalls));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
