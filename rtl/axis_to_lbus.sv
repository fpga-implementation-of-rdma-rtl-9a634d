// axis_to_lbus: bridge from the 512-bit AXI stream of the transmitter to the
// transmit LBUS of the 100G CMAC hard MAC. LBUS carries each clock four
// 128-bit segments, each with enable, start-of-packet, end-of-packet, error and
// a 4-bit "empty bytes" count (mty) valid on the eop segment; the first byte
// of a segment sits in bits [127:120]. AXI byte 16*i+j (bits 8*(16*i+j)+:8)
// therefore goes to segment i, bits 127-8*j -: 8. Each AXI beat becomes one
// LBUS beat whose packet start is always in segment 0; segments past the one
// holding the last byte are disabled.
//
// Timing: tready = tx_rdy; an accepted beat appears on the LBUS outputs on the
// next clock (registered), and enables are low on clocks with nothing
// accepted. The paper only says an AXIS-to-LBUS bridge was built; the LBUS
// rules follow the CMAC convention and the mapping is this design's.
//
// rst_n also disables the assertions below (`disable iff`); lint flags that
// as a mixed synchronous/asynchronous use of the reset, which it is not in
// the circuit.
module axis_to_lbus
  import rdma_pkg::*;
#(
  parameter int unsigned SEGS = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [DATA_W-1:0]     s_axis_tdata,
  input  logic [KEEP_W-1:0]     s_axis_tkeep,
  input  logic                  s_axis_tlast,
  input  logic                  s_axis_tvalid,
  output logic                  s_axis_tready,
  output logic [SEGS-1:0][127:0] tx_data,
  output logic [SEGS-1:0]       tx_ena,
  output logic [SEGS-1:0]       tx_sop,
  output logic [SEGS-1:0]       tx_eop,
  output logic [SEGS-1:0]       tx_err,
  output logic [SEGS-1:0][3:0]  tx_mty,
  input  logic                  tx_rdy
);
  logic in_pkt;   // a packet has started and not yet ended
  int unsigned n;

  assign s_axis_tready = tx_rdy;
  assign n = keep_count(s_axis_tkeep);

  wire take = s_axis_tvalid && s_axis_tready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt  <= 1'b0;
      tx_data <= '0;
      tx_ena  <= '0;
      tx_sop  <= '0;
      tx_eop  <= '0;
      tx_err  <= '0;
      tx_mty  <= '0;
    end else begin
      tx_ena <= '0;
      tx_sop <= '0;
      tx_eop <= '0;
      tx_err <= '0;
      tx_mty <= '0;
      if (take) begin
        in_pkt <= !s_axis_tlast;
        for (int i = 0; i < SEGS; i++) begin
          for (int j = 0; j < 16; j++)
            tx_data[i][127-8*j -: 8] <= s_axis_tdata[8*(16*i+j) +: 8];
          tx_ena[i] <= (n > 16*i);
          if (s_axis_tlast && (n > 16*i) && (n <= 16*(i+1))) begin
            tx_eop[i] <= 1'b1;
            tx_mty[i] <= 4'(16*(i+1) - n);
          end
        end
        tx_sop[0] <= !in_pkt;
      end
    end
  end

  a_keep_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    s_axis_tvalid |-> s_axis_tkeep[0]);
endmodule
