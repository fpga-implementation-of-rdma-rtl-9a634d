// tb_tx_lbuf_table: writes 256 entries (LBUF#, IP address, size) with
// generated values, then reads them back in a scrambled order and checks each
// field one clock after the read address, plus a rewrite of one entry.
module tb_tx_lbuf_table;
  logic clk = 0;
  logic wr_en = 0;
  logic [7:0] wr_addr = 0, rd_addr = 0;
  logic [15:0] wr_lbuf = 0, rd_lbuf;
  logic [31:0] wr_ip = 0, wr_size = 0, rd_ip, rd_size;
  int checks = 0, failures = 0;

  tx_lbuf_table dut (.*);
  always #1.5625 clk = ~clk;

  function automatic logic [79:0] val(int unsigned i, int unsigned v);
    return {16'(i * 3 + v), 32'hC0A8_0000 + 32'(i ^ v), 32'(i * 4096 + v * 64)};
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic rd(int unsigned a, int unsigned v);
    @(negedge clk);
    rd_addr = 8'(a);
    @(negedge clk);
    check({rd_lbuf, rd_ip, rd_size} == val(a, v), $sformatf("entry %0d", a));
  endtask

  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 8'(i);
      {wr_lbuf, wr_ip, wr_size} = val(i, 0);
    end
    @(negedge clk);
    wr_en = 0;
    for (int i = 0; i < 256; i++) rd((i * 97) % 256, 0);
    @(negedge clk);
    wr_en = 1; wr_addr = 8'd200; {wr_lbuf, wr_ip, wr_size} = val(200, 5);
    @(negedge clk);
    wr_en = 0;
    rd(200, 5);
    rd(199, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
