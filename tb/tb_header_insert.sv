// tb_header_insert: sends payload packets of lengths that hit every
// realignment case (1, 21, 22, 23 bytes, one beat, 64+22, 64+23, the 598-byte
// packet of the paper's comparison, 4 KB) through the header inserter, with
// random gaps on the input and random back-pressure on the output in the
// second half. Every output frame is compared byte by byte with a frame built
// by the reference model (header fields, IPv4 checksum, payload), the
// sequence number must count up by one per packet, and each frame must use
// exactly ceil((42+P)/64) beats, i.e. full line rate apart from the header.
module tb_header_insert;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [47:0] cfg_src_mac = 48'h02_00_00_00_00_01, cfg_dst_mac = 48'h02_00_00_00_00_99;
  logic [31:0] cfg_src_ip = 32'hC0A8_0001, cfg_dst_ip = 32'hC0A8_0063;
  logic [15:0] cfg_lbuf = 16'd7;
  logic seq_clear = 0;
  logic [15:0] seq;
  logic [511:0] s_axis_tdata = '0, m_axis_tdata;
  logic [63:0] s_axis_tkeep = '0, m_axis_tkeep;
  logic s_axis_tlast = 0, s_axis_tvalid = 0, s_axis_tready;
  logic [15:0] s_axis_tuser = '0;
  logic m_axis_tlast, m_axis_tvalid, m_axis_tready = 1;
  int checks = 0, failures = 0;
  bit stall = 0;
  int unsigned lens[$] = '{1, 21, 22, 23, 64, 86, 87, 598, 4096, 150};
  bytes_t got;
  int unsigned nframes = 0, obeats = 0;

  header_insert dut (.*);

  always #1.5625 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(negedge clk) m_axis_tready = stall ? ($urandom_range(0, 2) != 0) : 1'b1;

  // output monitor
  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready) begin
    bytes_t exp;
    int unsigned k, P;
    for (int j = 0; j < 64; j++) if (m_axis_tkeep[j]) got.push_back(m_axis_tdata[8*j +: 8]);
    obeats++;
    if (m_axis_tlast) begin
      k = nframes % lens.size();
      P = lens[k];
      exp = make_frame(cfg_dst_mac, cfg_src_mac, cfg_src_ip, cfg_dst_ip, cfg_lbuf, nframes,
                       make_payload(k, P));
      check(got == exp, $sformatf("frame %0d (payload %0d): %0d bytes, expected %0d",
                                  nframes, P, got.size(), exp.size()));
      check(obeats == nbeats(42 + P), $sformatf("frame %0d used %0d beats", nframes, obeats));
      got.delete();
      obeats = 0;
      nframes++;
    end
  end

  task automatic send_pkt(int unsigned k);
    bytes_t p;
    int unsigned nb;
    p = make_payload(k, lens[k]);
    nb = nbeats(p.size());
    for (int unsigned b = 0; b < nb; b++) begin
      if (stall) while ($urandom_range(0, 3) == 0) @(negedge clk);
      beat_of(p, b, s_axis_tdata, s_axis_tkeep);
      s_axis_tlast = (b == nb - 1);
      s_axis_tuser = 16'(lens[k]);
      s_axis_tvalid = 1;
      @(posedge clk);
      while (!s_axis_tready) @(posedge clk);
      @(negedge clk);
      s_axis_tvalid = 0;
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int unsigned k = 0; k < lens.size(); k++) send_pkt(k);
    stall = 1;
    for (int unsigned k = 0; k < lens.size(); k++) send_pkt(k);
    stall = 0;
    repeat (20) @(negedge clk);
    check(nframes == 2 * lens.size(), $sformatf("%0d frames out", nframes));
    check(seq == 16'(2 * lens.size()), "sequence counter");
    seq_clear = 1;
    @(negedge clk);
    seq_clear = 0;
    check(seq == 0, "sequence clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
