// lbus_to_axis: bridge from the receive LBUS of the 100G CMAC hard MAC to a
// 512-bit AXI stream. Segment i of an LBUS beat (first byte in bits
// [127:120]) becomes bytes 16*i..16*i+15 of the AXI beat (byte 0 in bits
// [7:0]); tkeep covers the enabled segments, minus the mty empty bytes of the
// eop segment, and tlast marks the beat holding an eop. tuser is set on the
// last beat when the MAC flagged the packet as bad (err on the eop segment).
//
// The receive LBUS has no back-pressure, so the output has none either
// (downstream must take a beat per clock). One clock latency. This bridge
// expects every packet to start in segment 0, which an assertion checks; a
// MAC configured to start packets in other segments would need a realigning
// stage that is not built here. The paper only says an LBUS-to-AXIS bridge
// was built; the rest is this design's.
//
// rst_n also disables the assertions below (`disable iff`); lint flags that
// as a mixed synchronous/asynchronous use of the reset, which it is not in
// the circuit.
module lbus_to_axis
  import rdma_pkg::*;
#(
  parameter int unsigned SEGS = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [SEGS-1:0][127:0] rx_data,
  input  logic [SEGS-1:0]        rx_ena,
  input  logic [SEGS-1:0]        rx_sop,
  input  logic [SEGS-1:0]        rx_eop,
  input  logic [SEGS-1:0]        rx_err,
  input  logic [SEGS-1:0][3:0]   rx_mty,
  output logic [DATA_W-1:0]      m_axis_tdata,
  output logic [KEEP_W-1:0]      m_axis_tkeep,
  output logic                   m_axis_tlast,
  output logic                   m_axis_tuser,
  output logic                   m_axis_tvalid
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_axis_tvalid <= 1'b0;
      m_axis_tdata  <= '0;
      m_axis_tkeep  <= '0;
      m_axis_tlast  <= 1'b0;
      m_axis_tuser  <= 1'b0;
    end else begin
      m_axis_tvalid <= |rx_ena;
      m_axis_tlast  <= |(rx_ena & rx_eop);
      m_axis_tuser  <= |(rx_ena & rx_eop & rx_err);
      for (int i = 0; i < SEGS; i++) begin
        for (int j = 0; j < 16; j++) begin
          m_axis_tdata[8*(16*i+j) +: 8] <= rx_data[i][127-8*j -: 8];
          m_axis_tkeep[16*i+j]          <= rx_ena[i] && !(rx_eop[i] && (j >= 16 - int'(rx_mty[i])));
        end
      end
    end
  end

  a_sop_seg0: assert property (@(posedge clk) disable iff (!rst_n)
    (rx_ena & rx_sop & ~SEGS'(1)) == '0);
endmodule
