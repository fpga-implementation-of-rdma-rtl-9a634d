// tb_address_resolver: drives headers into the resolver with a block-RAM
// model of the physical-address table (one clock read latency). Buffers: ID 1
// (4 KB), ID 2 (1 MB), ID 3 not valid. The header list fills buffer 1 exactly,
// wraps it, sends a packet larger than buffer 1, packets for the unknown
// buffer 3 and for ID 300 (outside the table), and clears buffer 1 through a
// table write. A reference model computes each expected descriptor (address
// = base + pointer, pointer advanced by the length rounded up to 64 and
// reset to the base when the packet would overrun) and event. Descriptor
// back-pressure is random. Also checks one sequence number per header and a
// descriptor no later than 2 clocks after its header is taken.
module tb_address_resolver;
  import rdma_pkg::*;
  logic clk = 0, rst_n = 0;
  hdr_info_t hdr = '0;
  logic hdr_valid = 0, hdr_ready;
  logic [7:0] tbl_rd_addr, clr_addr = 0;
  logic [63:0] tbl_phys;
  logic [31:0] tbl_size;
  logic tbl_valid, clr_en = 0;
  desc_t desc;
  logic desc_valid, desc_ready = 1, seq_valid, evt_valid;
  logic [15:0] seq;
  event_t evt;
  int checks = 0, failures = 0;

  address_resolver dut (.*);
  always #1.5625 clk = ~clk;

  // table model
  logic [63:0] t_phys [256];
  logic [31:0] t_size [256];
  logic        t_vld  [256];
  always @(posedge clk) begin
    tbl_phys  <= t_phys[tbl_rd_addr];
    tbl_size  <= t_size[tbl_rd_addr];
    tbl_valid <= t_vld[tbl_rd_addr];
  end

  always @(negedge clk) desc_ready = ($urandom_range(0, 2) != 0);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference
  longint unsigned wp [int];
  typedef struct { longint unsigned addr; int unsigned len, seq; bit drop; int code; int unsigned id; } exp_t;
  exp_t exp_q[$];
  exp_t evq[$];
  int unsigned seqs_seen = 0, nevt = 0, last_take = 0, cyc = 0;

  function automatic exp_t model(int unsigned id, int unsigned len, int unsigned sq);
    exp_t e;
    longint unsigned al;
    e = '{addr: 0, len: len, seq: sq, drop: 0, code: 0, id: id};
    al = ((len + 63) / 64) * 64;
    if (id >= 256 || !t_vld[id]) begin e.drop = 1; e.code = 2; end
    else if (al > t_size[id]) begin e.drop = 1; e.code = 3; end
    else begin
      if (!wp.exists(id)) wp[id] = 0;
      if (wp[id] + al > t_size[id]) wp[id] = 0;
      e.addr = t_phys[id] + wp[id];
      wp[id] += al;
    end
    if (e.drop) evq.push_back(e);
    return e;
  endfunction

  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n) begin
    if (hdr_valid && hdr_ready) last_take = cyc;
    if (seq_valid) seqs_seen++;
    if (evt_valid) nevt++;
    if (desc_valid && desc_ready) begin
      exp_t e;
      e = exp_q.pop_front();
      check(desc.drop == e.drop && (e.drop || desc.addr == e.addr) && desc.len == 16'(e.len)
            && desc.seq == 16'(e.seq),
            $sformatf("seq %0d: got addr %h drop %0d, expected %h drop %0d", e.seq, desc.addr,
                      desc.drop, e.addr, e.drop));
    end
    if (desc_valid && $past(!desc_valid)) check(cyc - last_take <= 2, "descriptor latency");
  end

  always @(posedge clk) if (rst_n && evt_valid) begin
    exp_t e;
    e = evq.pop_front();
    check(int'(evt.code) == e.code && evt.seq == 16'(e.id),
          $sformatf("event %0d/%0d, expected %0d/%0d", evt.code, evt.seq, e.code, e.id));
  end

  task automatic send(int unsigned id, int unsigned len, int unsigned sq);
    @(negedge clk);
    hdr = '{lbuf: 16'(id), seq: 16'(sq), len: 16'(len)};
    hdr_valid = 1;
    @(posedge clk);
    while (!hdr_ready) @(posedge clk);
    exp_q.push_back(model(id, len, sq));
    @(negedge clk);
    hdr_valid = 0;
  endtask

  initial begin
    int unsigned sq = 0, ndrop = 0;
    for (int i = 0; i < 256; i++) begin t_vld[i] = 0; t_phys[i] = 0; t_size[i] = 0; end
    t_phys[1] = 64'h1_0000_0000; t_size[1] = 4096;  t_vld[1] = 1;
    t_phys[2] = 64'h2_0000_0000; t_size[2] = 1 << 20; t_vld[2] = 1;
    t_phys[3] = 64'h3_0000_0000; t_size[3] = 4096;  t_vld[3] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 4; k++) send(1, 1000, sq++);     // fills 4096 exactly
    send(1, 1, sq++);                                     // wraps
    send(2, 598, sq++);
    send(2, 4096, sq++);
    send(3, 100, sq++);                                   // unknown
    send(300, 100, sq++);                                 // outside table
    send(1, 5000, sq++);                                  // larger than buffer
    send(1, 130, sq++);
    // clear buffer 1 by a table write
    @(negedge clk);
    clr_en = 1; clr_addr = 8'd1;
    @(negedge clk);
    clr_en = 0;
    wp.delete(1);
    send(1, 64, sq++);
    for (int k = 0; k < 40; k++) send(2 - (k % 2), 64 + $urandom_range(0, 2000), sq++);
    repeat (20) @(negedge clk);
    check(exp_q.size() == 0, $sformatf("%0d descriptors missing", exp_q.size()));
    check(seqs_seen == sq, $sformatf("%0d sequence numbers for %0d headers", seqs_seen, sq));
    check(nevt == 3, $sformatf("%0d events", nevt));
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
