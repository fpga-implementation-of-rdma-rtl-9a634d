// tb_axis_to_lbus: sends frames of 1..200 and 1500 bytes through the bridge
// while tx_rdy is randomly withdrawn, and rebuilds each frame from the LBUS
// outputs using the CMAC convention (first byte of a segment in bits
// [127:120], mty empty bytes in the eop segment). Checks: bytes equal to the
// frame sent, exactly one sop (segment 0, first beat) and one eop per frame,
// no enabled segment after the eop, and one LBUS beat per accepted AXI beat.
module tb_axis_to_lbus;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [511:0] s_axis_tdata = '0;
  logic [63:0] s_axis_tkeep = '0;
  logic s_axis_tlast = 0, s_axis_tvalid = 0, s_axis_tready;
  logic [3:0][127:0] tx_data;
  logic [3:0] tx_ena, tx_sop, tx_eop, tx_err;
  logic [3:0][3:0] tx_mty;
  logic tx_rdy = 1;
  int checks = 0, failures = 0;
  int unsigned lens[$];
  bytes_t got;
  int unsigned nframes = 0, sops = 0, lbeats = 0, abeats = 0;
  bit in_frame = 0, bad = 0;

  axis_to_lbus dut (.*);

  always #1.5625 clk = ~clk;
  always @(negedge clk) tx_rdy = ($urandom_range(0, 4) != 0);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && s_axis_tvalid && s_axis_tready) abeats++;

  always @(posedge clk) if (rst_n && tx_ena != 0) begin
    bit ended;
    ended = 0;
    lbeats++;
    if (tx_sop != 0) begin
      if (tx_sop != 4'b0001 || in_frame) bad = 1;
      in_frame = 1;
      sops++;
    end
    for (int i = 0; i < 4; i++) begin
      if (tx_ena[i]) begin
        if (ended) bad = 1;
        for (int j = 0; j < 16 - (tx_eop[i] ? int'(tx_mty[i]) : 0); j++)
          got.push_back(tx_data[i][127-8*j -: 8]);
        if (tx_eop[i]) ended = 1;
      end
    end
    if (ended) begin
      bytes_t exp;
      exp = make_payload(nframes, lens[nframes]);
      check(got == exp && !bad, $sformatf("frame %0d (%0d bytes) got %0d bytes", nframes,
                                          lens[nframes], got.size()));
      got.delete();
      bad = 0;
      in_frame = 0;
      nframes++;
    end
  end

  initial begin
    bytes_t p;
    for (int n = 1; n <= 200; n++) lens.push_back(n);
    lens.push_back(1500);
    lens.push_back(64);
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (lens[k]) begin
      p = make_payload(k, lens[k]);
      for (int unsigned b = 0; b < nbeats(p.size()); b++) begin
        beat_of(p, b, s_axis_tdata, s_axis_tkeep);
        s_axis_tlast = (b == nbeats(p.size()) - 1);
        s_axis_tvalid = 1;
        @(posedge clk);
        while (!s_axis_tready) @(posedge clk);
        @(negedge clk);
        s_axis_tvalid = 0;
      end
    end
    repeat (5) @(negedge clk);
    check(nframes == lens.size(), $sformatf("%0d frames", nframes));
    check(sops == lens.size(), $sformatf("%0d sops", sops));
    check(lbeats == abeats, $sformatf("%0d LBUS beats for %0d AXI beats", lbeats, abeats));
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
