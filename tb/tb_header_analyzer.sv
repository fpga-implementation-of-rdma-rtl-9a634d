// tb_header_analyzer: feeds frames built by the reference model: good frames
// with payloads hitting every realignment case (1, 18, 22, 23, 64, 106, 107,
// 598, 4096 bytes; frames under 60 bytes are padded as Ethernet requires)
// and bad frames (foreign MAC, foreign IP, wrong EtherType, TCP protocol,
// runt). Output and header side are stalled at random. Checks: each good
// frame gives one header (buffer ID, sequence, length) and exactly its
// payload bytes; bad frames give nothing and are counted; a frame marked
// with the MAC error flag is counted in err_count.
module tb_header_analyzer;
  import tb_util_pkg::*;
  localparam logic [47:0] MYMAC = 48'h02_00_00_00_00_99;
  localparam logic [31:0] MYIP  = 32'hC0A8_0063;
  logic clk = 0, rst_n = 0;
  logic [47:0] my_mac = MYMAC;
  logic [31:0] my_ip = MYIP;
  logic [511:0] s_axis_tdata = '0, m_axis_tdata;
  logic [63:0] s_axis_tkeep = '0, m_axis_tkeep;
  logic s_axis_tlast = 0, s_axis_tuser = 0, s_axis_tvalid = 0, s_axis_tready;
  rdma_pkg::hdr_info_t hdr;
  logic hdr_valid, hdr_ready = 1;
  logic m_axis_tlast, m_axis_tvalid, m_axis_tready = 1;
  logic [31:0] drop_count, err_count;
  int checks = 0, failures = 0;

  typedef struct { int unsigned lbuf, seq, len, seed; bit good; int kind; } fr_t;
  fr_t frames[$];
  fr_t exp_h[$];
  fr_t exp_p[$];
  bytes_t got;

  header_analyzer dut (.*);

  always #1.5625 clk = ~clk;
  always @(negedge clk) begin
    m_axis_tready = ($urandom_range(0, 3) != 0);
    hdr_ready     = ($urandom_range(0, 2) != 0);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && hdr_valid && hdr_ready) begin
    fr_t e;
    if (exp_h.size() == 0) check(0, "unexpected header");
    else begin
      e = exp_h.pop_front();
      check(hdr.lbuf == 16'(e.lbuf) && hdr.seq == 16'(e.seq) && hdr.len == 16'(e.len),
            $sformatf("header seq %0d: got %0d/%0d/%0d", e.seq, hdr.lbuf, hdr.seq, hdr.len));
    end
  end

  always @(posedge clk) if (rst_n && m_axis_tvalid && m_axis_tready) begin
    fr_t e;
    for (int j = 0; j < 64; j++) if (m_axis_tkeep[j]) got.push_back(m_axis_tdata[8*j +: 8]);
    if (m_axis_tlast) begin
      if (exp_p.size() == 0) check(0, "unexpected payload");
      else begin
        e = exp_p.pop_front();
        check(got == make_payload(e.seed, e.len),
              $sformatf("payload seq %0d: %0d bytes, expected %0d", e.seq, got.size(), e.len));
      end
      got.delete();
    end
  end

  initial begin
    int unsigned plens[$] = '{1, 18, 22, 23, 64, 106, 107, 598, 4096, 300};
    bytes_t f;
    int unsigned nb, ndrop = 0, nerr = 0;
    // good frames interleaved with bad ones
    foreach (plens[i]) begin
      frames.push_back('{lbuf: i + 3, seq: 100 + i, len: plens[i], seed: i, good: 1, kind: 0});
      if (i < 5) frames.push_back('{lbuf: 1, seq: 900 + i, len: 80, seed: 50 + i, good: 0, kind: i + 1});
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (frames[k]) begin
      fr_t fr;
      fr = frames[k];
      f = make_frame(fr.kind != 1 ? MYMAC : 48'h02_00_00_00_00_55, 48'h02_00_00_00_00_01,
                     32'hC0A8_0001, fr.kind == 2 ? 32'hC0A8_0064 : MYIP, fr.lbuf, fr.seq,
                     make_payload(fr.seed, fr.len));
      if (fr.kind == 3) f[12] = 8'h86;           // EtherType 0x86DD
      if (fr.kind == 4) f[23] = 8'd6;            // TCP
      if (fr.kind == 5) f = f[0:29];             // runt
      while (f.size() < 60) f.push_back(8'h00);  // Ethernet padding
      if (fr.good) begin exp_h.push_back(fr); exp_p.push_back(fr); end
      else ndrop++;
      nb = nbeats(f.size());
      for (int unsigned b = 0; b < nb; b++) begin
        if ($urandom_range(0, 4) == 0) @(negedge clk);
        beat_of(f, b, s_axis_tdata, s_axis_tkeep);
        s_axis_tlast = (b == nb - 1);
        s_axis_tuser = s_axis_tlast && (k == 8);
        s_axis_tvalid = 1;
        @(posedge clk);
        while (!s_axis_tready) @(posedge clk);
        @(negedge clk);
        s_axis_tvalid = 0;
      end
      if (k == 8) nerr++;
    end
    repeat (50) @(negedge clk);
    check(exp_h.size() == 0, $sformatf("%0d headers missing", exp_h.size()));
    check(exp_p.size() == 0, $sformatf("%0d payloads missing", exp_p.size()));
    check(drop_count == ndrop, $sformatf("drop_count %0d expected %0d", drop_count, ndrop));
    check(err_count == nerr, "err_count");
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
