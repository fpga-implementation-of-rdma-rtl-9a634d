// sync_fifo: single-clock first-word-fall-through FIFO used for the payload
// buffer of the data mover and the event queue of the receive driver.
// Storage is an array (maps to block RAM or LUT RAM); count gives occupancy.
// Write when wr_valid && wr_ready, read when rd_valid && rd_ready; the head
// word is visible on rd_data while rd_valid is high. Helper of this design.
module sync_fifo #(
  parameter int unsigned WIDTH = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_valid,
  output logic                     wr_ready,
  input  logic [WIDTH-1:0]         wr_data,
  output logic                     rd_valid,
  input  logic                     rd_ready,
  output logic [WIDTH-1:0]         rd_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;

  wire do_wr = wr_valid && wr_ready;
  wire do_rd = rd_valid && rd_ready;

  assign wr_ready = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign rd_valid = (count != '0);
  assign rd_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      if (do_wr && !do_rd)      count <= count + 1'b1;
      else if (do_rd && !do_wr) count <= count - 1'b1;
    end
  end
endmodule
