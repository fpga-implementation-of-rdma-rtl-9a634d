// tb_loss_detector: checks the 1024-bit window loss detector at its default
// size. Run 1 sends sequence numbers 1..2000 in order, one every two clocks,
// with 5, 600, 1100 and 1101 missing and 700 arriving late (after 900). A
// reference model records what was received; the test checks that exactly the
// missing packets are reported, each one at the moment packet seq+511 has
// been received (the "receive 512, check 1" rule), and that the number of
// checks equals the number of packets at least 511 behind the newest. Run 2
// crosses the 16-bit sequence wrap with 65535 and 0 missing.
module tb_loss_detector;
  localparam int unsigned WINDOW = 1024, DIST = 511;
  logic clk = 0, rst_n = 0;
  logic seq_valid = 0;
  logic [15:0] seq = 0;
  logic loss_valid;
  logic [15:0] loss_seq;
  logic [31:0] checked_count, loss_count;
  int checks = 0, failures = 0;
  int cycles = 0;
  int unsigned last_sent;
  int unsigned exp_loss[$];
  int unsigned got_loss[$];

  loss_detector dut (.*);

  always #1.5625 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // collect loss events and check their timing
  always @(posedge clk) if (rst_n && loss_valid) begin
    got_loss.push_back(loss_seq);
    check(16'(loss_seq + DIST) == 16'(last_sent),
          $sformatf("loss %0d reported when newest sent was %0d", loss_seq, last_sent));
  end

  task automatic send(int unsigned s);
    @(negedge clk);
    seq_valid = 1;
    seq = 16'(s);
    @(negedge clk);
    seq_valid = 0;
    last_sent = s;
  endtask

  task automatic run(int unsigned first, int unsigned n, int unsigned miss[$], int unsigned late,
                     int unsigned late_after);
    int unsigned s;
    rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    got_loss.delete();
    for (int unsigned i = 0; i < n; i++) begin
      s = (first + i) & 16'hFFFF;
      if (!(s inside {miss}) && s != late) send(s);
      if (s == late_after && late != '1) send(late);
    end
    repeat (10) @(negedge clk);
    // reference: packets first..first+n-1-DIST are checked
    exp_loss.delete();
    foreach (miss[i]) if (((miss[i] - first) & 16'hFFFF) <= n - 1 - DIST) exp_loss.push_back(miss[i]);
    check(checked_count == n - DIST, $sformatf("checked %0d expected %0d", checked_count, n - DIST));
    check(got_loss.size() == exp_loss.size(), $sformatf("%0d losses reported, %0d expected",
                                                         got_loss.size(), exp_loss.size()));
    foreach (exp_loss[i])
      check(i < got_loss.size() && got_loss[i] == exp_loss[i],
            $sformatf("loss %0d: expected seq %0d", i, exp_loss[i]));
    check(loss_count == exp_loss.size(), "loss_count");
  endtask

  initial begin
    run(1, 2000, '{5, 600, 1100, 1101}, 700, 900);
    run(65000, 1600, '{65535, 0}, '1, 0);
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
