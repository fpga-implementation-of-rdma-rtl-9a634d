// tb_rx_phys_table: checks that every buffer is unknown after reset, then
// writes 256 entries (64-bit physical address, size, valid for even IDs) and
// reads them back in scrambled order one clock after the address; finally
// invalidates one entry.
module tb_rx_phys_table;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_valid = 0, rd_valid;
  logic [7:0] wr_addr = 0, rd_addr = 0;
  logic [63:0] wr_phys = 0, rd_phys;
  logic [31:0] wr_size = 0, rd_size;
  int checks = 0, failures = 0;

  rx_phys_table dut (.*);
  always #1.5625 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [63:0] phys(int unsigned i);
    return 64'h0000_0010_0000_0000 + 64'(i) * 64'h20_0000 + 64'(i * 64);
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 256; i += 17) begin
      @(negedge clk) rd_addr = 8'(i);
      @(negedge clk) check(!rd_valid, $sformatf("entry %0d valid after reset", i));
    end
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 8'(i); wr_phys = phys(i); wr_size = 32'(4096 * (i + 1)); wr_valid = (i % 2 == 0);
    end
    @(negedge clk) wr_en = 0;
    for (int k = 0; k < 256; k++) begin
      int i;
      i = (k * 61) % 256;
      @(negedge clk) rd_addr = 8'(i);
      @(negedge clk) check(rd_phys == phys(i) && rd_size == 32'(4096 * (i + 1)) && rd_valid == (i % 2 == 0),
                           $sformatf("entry %0d", i));
    end
    @(negedge clk);
    wr_en = 1; wr_addr = 8'd10; wr_valid = 0;
    @(negedge clk) wr_en = 0; rd_addr = 8'd10;
    @(negedge clk) check(!rd_valid, "entry 10 invalidated");
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
