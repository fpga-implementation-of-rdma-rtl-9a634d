// pcie_wr_mem_model: behavioural stand-in for the PCIe endpoint DMA and host
// memory in the testbenches (not synthesizable, not part of the design). It
// takes the receiver's write stream (address per 64-byte beat, byte keep) at
// random moments when stall_en is high and stores the bytes in a sparse memory
// that the testbench reads with rd(). It counts beats and stalled clocks.
module pcie_wr_mem_model (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         stall_en,
  input  logic         wr_valid,
  output logic         wr_ready,
  input  logic [63:0]  wr_addr,
  input  logic [511:0] wr_data,
  input  logic [63:0]  wr_keep,
  input  logic         wr_last,
  output int           beats,
  output int           stalls,
  output int           packets
);
  byte unsigned mem [longint unsigned];

  function automatic int rd(longint unsigned a);
    return mem.exists(a) ? int'(mem[a]) : -1;
  endfunction

  always @(negedge clk) wr_ready <= stall_en ? ($urandom_range(0, 3) != 0) : 1'b1;

  always @(posedge clk) begin
    if (!rst_n) begin
      beats = 0; stalls = 0; packets = 0;
    end else if (wr_valid) begin
      if (!wr_ready) stalls++;
      else begin
        beats++;
        if (wr_last) packets++;
        for (int j = 0; j < 64; j++) if (wr_keep[j]) mem[wr_addr + j] = wr_data[8*j +: 8];
      end
    end
  end
endmodule
