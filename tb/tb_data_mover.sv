// tb_data_mover: fills the payload FIFO with packets of 1..3000 bytes while
// commands arrive in order, some with drop set. Each written beat must carry
// the packet's bytes with the right keep and an address of the command's base
// plus 64 per beat; dropped packets must produce no writes; done must pulse
// once per command. The write side is stalled at random. A second phase
// fills the FIFO (512 beats) before any command to check that it holds a
// full FIFO of data and then applies back-pressure.
module tb_data_mover;
  import tb_util_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [511:0] s_axis_tdata = '0, wr_data;
  logic [63:0] s_axis_tkeep = '0, wr_keep;
  logic s_axis_tlast = 0, s_axis_tvalid = 0, s_axis_tready;
  logic cmd_valid = 0, cmd_ready, cmd_drop = 0, done;
  logic [63:0] cmd_addr = '0, wr_addr;
  logic wr_valid, wr_ready = 1, wr_last;
  logic [9:0] fifo_level;
  int checks = 0, failures = 0;

  data_mover dut (.*);
  always #1.5625 clk = ~clk;
  always @(negedge clk) wr_ready = ($urandom_range(0, 3) != 0);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  typedef struct { int unsigned len, seed; longint unsigned addr; bit drop; } pk_t;
  pk_t pk[$];
  pk_t wq[$];
  bytes_t got;
  int unsigned beatn = 0, ndone = 0, nwr_pk = 0;

  always @(posedge clk) if (rst_n) begin
    if (done) ndone++;
    if (wr_valid && wr_ready) begin
      if (wq.size() == 0) check(0, "write with no packet expected");
      else begin
        check(wr_addr == wq[0].addr + 64 * beatn, $sformatf("beat %0d address %h", beatn, wr_addr));
        for (int j = 0; j < 64; j++) if (wr_keep[j]) got.push_back(wr_data[8*j +: 8]);
        beatn++;
        if (wr_last) begin
          check(got == make_payload(wq[0].seed, wq[0].len), $sformatf("packet %0d bytes", wq[0].len));
          void'(wq.pop_front());
          got.delete();
          beatn = 0;
          nwr_pk++;
        end
      end
    end
  end

  task automatic feed(int first, int last_i);
    for (int k = first; k <= last_i; k++) begin
      bytes_t p;
      p = make_payload(pk[k].seed, pk[k].len);
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
  endtask

  task automatic cmds(int first, int last_i);
    for (int k = first; k <= last_i; k++) begin
      @(negedge clk);
      cmd_valid = 1; cmd_addr = pk[k].addr; cmd_drop = pk[k].drop;
      @(posedge clk);
      while (!cmd_ready) @(posedge clk);
      if (!pk[k].drop) wq.push_back(pk[k]);
      @(negedge clk);
      cmd_valid = 0;
    end
  endtask

  initial begin
    int unsigned nwr = 0;
    for (int k = 0; k < 60; k++)
      pk.push_back('{len: 1 + $urandom_range(0, 2999), seed: k, addr: 64'h8000_0000 + 64'(k) * 8192,
                     drop: (k % 5 == 2)});
    // 9 packets of 3648 bytes = 513 beats, more than the FIFO holds
    for (int k = 60; k < 69; k++) pk.push_back('{len: 3648, seed: k, addr: 64'h9000_0000 + 64'(k) * 8192, drop: 0});
    foreach (pk[k]) if (!pk[k].drop) nwr++;
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      feed(0, 59);
      cmds(0, 59);
    join
    wait (wq.size() == 0);
    // phase 2: fill the FIFO before any command
    fork
      feed(60, 68);
      begin
        repeat (700) @(negedge clk);
        check(fifo_level == 10'd512 && !s_axis_tready, $sformatf("FIFO full at %0d", fifo_level));
        cmds(60, 68);
      end
    join
    wait (wq.size() == 0);
    repeat (5) @(negedge clk);
    check(ndone == pk.size(), $sformatf("%0d done pulses", ndone));
    check(nwr_pk == nwr, $sformatf("%0d packets written, expected %0d", nwr_pk, nwr));
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
