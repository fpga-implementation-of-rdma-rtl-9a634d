// tx_lbuf_table: transmitter block RAM of destination descriptors. Each entry
// holds the three parameters that identify a local buffer of a data receiver:
// its buffer ID (LBUF#), the receiver's IP address (IPADD) and the buffer size
// (SIZE). The controller writes entries at initialisation through the write
// port; the header inserter reads the selected entry through the read port,
// which returns data one clock after rd_addr (block-RAM timing). The three
// fields are the paper's; entry count and read latency are this design's.
module tx_lbuf_table #(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned ID_W    = 16,
  localparam int unsigned AW     = $clog2(ENTRIES)
) (
  input  logic            clk,
  input  logic            wr_en,
  input  logic [AW-1:0]   wr_addr,
  input  logic [ID_W-1:0] wr_lbuf,
  input  logic [31:0]     wr_ip,
  input  logic [31:0]     wr_size,
  input  logic [AW-1:0]   rd_addr,
  output logic [ID_W-1:0] rd_lbuf,
  output logic [31:0]     rd_ip,
  output logic [31:0]     rd_size
);
  typedef struct packed {
    logic [ID_W-1:0] lbuf;
    logic [31:0]     ip;
    logic [31:0]     size;
  } entry_t;

  entry_t mem [ENTRIES];
  entry_t q;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= '{lbuf: wr_lbuf, ip: wr_ip, size: wr_size};
    q <= mem[rd_addr];
  end

  assign rd_lbuf = q.lbuf;
  assign rd_ip   = q.ip;
  assign rd_size = q.size;
endmodule
