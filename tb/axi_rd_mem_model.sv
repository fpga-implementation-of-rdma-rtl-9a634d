// axi_rd_mem_model: behavioural AXI4 read slave standing in for the DDR4
// memory and its controller in the testbenches (not synthesizable, not part
// of the design). The content is a fixed function of the byte address,
// mem_byte(a), so no storage is needed and testbenches can compute what they
// expect. Read addresses are queued (arready randomly low when STALL is set);
// each burst's data starts LATENCY clocks after its address and beats are
// given with random gaps when STALL is set. The model checks INCR bursts of
// 64-byte beats that do not cross a 4 KB boundary, and counts bursts.
module axi_rd_mem_model #(
  parameter int LATENCY = 8,
  parameter bit STALL   = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [63:0]  araddr,
  input  logic [7:0]   arlen,
  input  logic [2:0]   arsize,
  input  logic [1:0]   arburst,
  input  logic         arvalid,
  output logic         arready,
  output logic [511:0] rdata,
  output logic [1:0]   rresp,
  output logic         rlast,
  output logic         rvalid,
  input  logic         rready,
  output int           bursts,
  output int           errors
);
  typedef struct { longint unsigned addr; int unsigned len; longint unsigned t; } ar_t;
  ar_t q[$];
  longint unsigned now = 0;
  int unsigned beat = 0;

  function automatic byte unsigned mem_byte(longint unsigned a);
    return byte'((a * 37) ^ (a >> 7) ^ (a >> 15));
  endfunction

  assign rresp = 2'b00;

  always @(posedge clk) now++;

  always @(negedge clk) arready <= STALL ? ($urandom_range(0, 3) != 0) : 1'b1;

  always @(posedge clk) begin
    if (!rst_n) begin
      q.delete();
      bursts = 0;
      errors = 0;
      beat = 0;
    end else begin
      if (arvalid && arready) begin
        q.push_back('{addr: araddr, len: arlen + 1, t: now + LATENCY});
        bursts++;
        if (arsize != 3'd6 || arburst != 2'b01) errors++;
        if ((araddr & 12'hFFF) + (arlen + 1) * 64 > 4096) errors++;
      end
      if (rvalid && rready) begin
        beat++;
        if (rlast) begin
          void'(q.pop_front());
          beat = 0;
        end
      end
    end
  end

  // present data
  always @(negedge clk) begin
    rvalid <= 1'b0;
    rlast  <= 1'b0;
    if (rst_n && q.size() != 0 && q[0].t <= now && !(STALL && $urandom_range(0, 3) == 0)) begin
      rvalid <= 1'b1;
      rlast  <= (beat == q[0].len - 1);
      for (int j = 0; j < 64; j++) rdata[8*j +: 8] <= mem_byte(q[0].addr + 64 * beat + j);
    end
  end
endmodule
