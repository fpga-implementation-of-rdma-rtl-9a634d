// rx_phys_table: receiver block RAM that translates a local-buffer ID into
// the physical address of that buffer in the data receiver's memory. The host
// library writes one entry per allocated buffer at initialisation (physical
// base address, size in bytes, valid); the address resolver reads an entry
// with one clock of latency (block-RAM timing). Valid bits are flops so that
// after reset every buffer is unknown. The physical-address table is the
// paper's; storing the size and a valid bit is this design's choice.
module rx_phys_table #(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned ADDR_W  = 64,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [AW-1:0]     wr_addr,
  input  logic [ADDR_W-1:0] wr_phys,
  input  logic [31:0]       wr_size,
  input  logic              wr_valid,
  input  logic [AW-1:0]     rd_addr,
  output logic [ADDR_W-1:0] rd_phys,
  output logic [31:0]       rd_size,
  output logic              rd_valid
);
  typedef struct packed {
    logic [ADDR_W-1:0] phys;
    logic [31:0]       size;
  } entry_t;

  entry_t             mem [ENTRIES];
  entry_t             q;
  logic [ENTRIES-1:0] vld;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= '{phys: wr_phys, size: wr_size};
    q <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld      <= '0;
      rd_valid <= 1'b0;
    end else begin
      if (wr_en) vld[wr_addr] <= wr_valid;
      rd_valid <= vld[rd_addr];
    end
  end

  assign rd_phys = q.phys;
  assign rd_size = q.size;
endmodule
