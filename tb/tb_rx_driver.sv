// tb_rx_driver: drives 50 descriptors (every fourth with drop set) into the
// driver FSM against a model of the data mover that accepts a command at
// random and reports done a random number of clocks later. Checks that the
// commands come out in order with the descriptor's address and drop flag,
// that a new command is never issued before the previous done, and the
// packet and drop counters. Events: loss pulses and resolver events,
// including both in the same clock, must reach the host in arrival order
// (loss first) with irq high while any is pending; then 20 events without
// reads must fill the 16-entry FIFO and count 4 overflows.
module tb_rx_driver;
  import rdma_pkg::*;
  logic clk = 0, rst_n = 0;
  desc_t desc = '0;
  logic desc_valid = 0, desc_ready;
  logic mv_cmd_valid, mv_cmd_ready = 0, mv_cmd_drop, mv_done = 0;
  logic [63:0] mv_cmd_addr;
  logic loss_valid = 0, res_evt_valid = 0;
  logic [15:0] loss_seq = 0;
  event_t res_evt = '{code: EVT_NONE, seq: '0};
  logic evt_valid, evt_ready = 0, irq;
  event_t evt;
  logic [31:0] pkt_count, drop_count, evt_overflow;
  logic [4:0] evt_level;
  int checks = 0, failures = 0;

  rx_driver dut (.*);
  always #1.5625 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  desc_t sent[$];
  bit busy = 0;
  int unsigned ncmd = 0;

  // data mover model
  initial forever begin
    @(negedge clk);
    mv_cmd_ready = !busy && ($urandom_range(0, 1) == 1);
    @(posedge clk);
    if (mv_cmd_valid && mv_cmd_ready) begin
      desc_t e;
      e = sent.pop_front();
      check(mv_cmd_addr == e.addr && mv_cmd_drop == e.drop, $sformatf("command %0d", ncmd));
      ncmd++;
      busy = 1;
      @(negedge clk);
      mv_cmd_ready = 0;
      repeat ($urandom_range(0, 6)) @(negedge clk);
      check(!mv_cmd_valid, "command issued while the mover is busy");
      mv_done = 1;
      @(negedge clk);
      mv_done = 0;
      busy = 0;
    end
  end

  event_t evq[$];
  always @(posedge clk) if (rst_n && evt_valid && evt_ready) begin
    event_t e;
    e = evq.pop_front();
    check(evt == e, $sformatf("event %0d/%0d, expected %0d/%0d", evt.code, evt.seq, e.code, e.seq));
  end

  initial begin
    int unsigned ndrop = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 50; k++) begin
      @(negedge clk);
      desc = '{addr: 64'h4000_0000 + 64'(k * 4096), len: 16'(k), seq: 16'(k), drop: (k % 4 == 1)};
      if (desc.drop) ndrop++;
      desc_valid = 1;
      @(posedge clk);
      while (!desc_ready) @(posedge clk);
      sent.push_back(desc);
      @(negedge clk);
      desc_valid = 0;
    end
    wait (sent.size() == 0 && !busy);
    repeat (10) @(negedge clk);
    check(pkt_count == 50 - ndrop && drop_count == ndrop, "packet counters");
    // events with the host reading at random
    check(!irq, "irq low with no event");
    fork
      for (int k = 0; k < 12; k++) begin
        @(negedge clk);
        loss_valid = (k % 3 != 1);
        loss_seq = 16'(k);
        res_evt_valid = (k % 2 == 1);
        res_evt = '{code: EVT_UNKNOWN, seq: 16'(100 + k)};
        if (loss_valid) evq.push_back('{code: EVT_LOSS, seq: 16'(k)});
        if (res_evt_valid) evq.push_back(res_evt);
        @(negedge clk);
        loss_valid = 0; res_evt_valid = 0;
        check(irq, "irq high with an event pending");
      end
      repeat (60) begin
        @(negedge clk);
        evt_ready = ($urandom_range(0, 2) == 0);
      end
    join
    evt_ready = 1;
    wait (evq.size() == 0);
    @(negedge clk);
    evt_ready = 0;
    @(negedge clk);
    check(!irq && evt_overflow == 0, "all events delivered");
    // overflow
    for (int k = 0; k < 20; k++) begin
      @(negedge clk);
      loss_valid = 1; loss_seq = 16'(500 + k);
      if (k < 16) evq.push_back('{code: EVT_LOSS, seq: 16'(500 + k)});
    end
    @(negedge clk);
    loss_valid = 0;
    check(evt_level == 16 && evt_overflow == 4, $sformatf("level %0d overflow %0d", evt_level, evt_overflow));
    evt_ready = 1;
    wait (evq.size() == 0);
    @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
