// tb_lbus_to_axis: encodes frames of 1..200 and 1500 bytes onto the receive
// LBUS the way the CMAC presents them (packets start in segment 0, first byte
// of a segment in bits [127:120], mty on the eop segment, idle clocks between
// some beats) and checks that the AXI stream out of the bridge carries the
// same bytes with tkeep and tlast right, one clock after each LBUS beat, and
// that tuser marks exactly the frames sent with the error flag.
module tb_lbus_to_axis;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0][127:0] rx_data = '0;
  logic [3:0] rx_ena = 0, rx_sop = 0, rx_eop = 0, rx_err = 0;
  logic [3:0][3:0] rx_mty = '0;
  logic [511:0] m_axis_tdata;
  logic [63:0] m_axis_tkeep;
  logic m_axis_tlast, m_axis_tuser, m_axis_tvalid;
  int checks = 0, failures = 0;
  int unsigned lens[$];
  bytes_t got;
  int unsigned nframes = 0, lb = 0, ab = 0;

  lbus_to_axis dut (.*);

  always #1.5625 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && m_axis_tvalid) begin
    ab++;
    for (int j = 0; j < 64; j++) if (m_axis_tkeep[j]) got.push_back(m_axis_tdata[8*j +: 8]);
    if (m_axis_tlast) begin
      check(got == make_payload(nframes, lens[nframes]),
            $sformatf("frame %0d (%0d bytes) got %0d", nframes, lens[nframes], got.size()));
      check(m_axis_tuser == (nframes % 7 == 3), $sformatf("frame %0d error flag", nframes));
      got.delete();
      nframes++;
    end
  end

  initial begin
    bytes_t p;
    int unsigned n, nb;
    for (int i = 1; i <= 200; i++) lens.push_back(i);
    lens.push_back(1500);
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (lens[k]) begin
      p = make_payload(k, lens[k]);
      nb = nbeats(p.size());
      for (int unsigned b = 0; b < nb; b++) begin
        if ($urandom_range(0, 3) == 0) @(negedge clk);
        for (int i = 0; i < 4; i++) begin
          n = 0;
          for (int j = 0; j < 16; j++) begin
            if (64 * b + 16 * i + j < p.size()) begin
              rx_data[i][127-8*j -: 8] = p[64*b + 16*i + j];
              n++;
            end else rx_data[i][127-8*j -: 8] = 8'hA5;
          end
          rx_ena[i] = (n != 0);
          rx_sop[i] = (i == 0 && b == 0);
          rx_eop[i] = (n != 0) && (64 * b + 16 * i + n == p.size());
          rx_mty[i] = rx_eop[i] ? 4'(16 - n) : 4'(0);
          rx_err[i] = rx_eop[i] && (k % 7 == 3);
        end
        lb++;
        @(negedge clk);
        rx_ena = 0; rx_sop = 0; rx_eop = 0; rx_err = 0;
      end
    end
    repeat (5) @(negedge clk);
    check(nframes == lens.size(), $sformatf("%0d frames", nframes));
    check(ab == lb, $sformatf("%0d AXI beats for %0d LBUS beats", ab, lb));
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
