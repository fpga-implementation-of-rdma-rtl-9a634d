// rx_driver: control state machine of the receiver. For every descriptor
// produced by the address resolver it commands the data mover (destination
// address, drop), waits until the mover reports the packet done, and counts
// written and dropped packets; then it takes the next descriptor. States:
// IDLE (wait for a descriptor), CMD (command offered to the mover), WAIT
// (mover busy). It also gathers the events of the receiver - lost packets
// from the loss detector, unknown or oversize buffers from the resolver - into
// an event FIFO of EVT_DEPTH entries read by the host (evt_valid/evt_ready);
// irq is high while the FIFO holds an event. When both sources fire in the
// same clock the resolver's event waits one clock in a holding register;
// events arriving with the FIFO full are counted in evt_overflow.
//
// The paper gives a driver FSM that controls the process and an event path
// to the host interrupt; the states, event codes and FIFO are this design's.
//
// The descriptor arrives as the shared desc_t struct, of which only the
// address and the drop flag steer the mover; its length and sequence fields
// are left unread on purpose (lint reports them as unused bits).
module rx_driver
  import rdma_pkg::*;
#(
  parameter int unsigned EVT_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  desc_t              desc,        // len and seq fields are not needed here
  input  logic               desc_valid,
  output logic               desc_ready,
  output logic               mv_cmd_valid,
  input  logic               mv_cmd_ready,
  output logic [PADDR_W-1:0] mv_cmd_addr,
  output logic               mv_cmd_drop,
  input  logic               mv_done,
  input  logic               loss_valid,
  input  logic [SEQ_W-1:0]   loss_seq,
  input  logic               res_evt_valid,
  input  event_t             res_evt,
  output logic               evt_valid,
  input  logic               evt_ready,
  output event_t             evt,
  output logic               irq,
  output logic [31:0]        pkt_count,
  output logic [31:0]        drop_count,
  output logic [31:0]        evt_overflow,
  output logic [$clog2(EVT_DEPTH+1)-1:0] evt_level
);
  typedef enum logic [1:0] {S_IDLE, S_CMD, S_WAIT} state_e;
  state_e state;
  logic [PADDR_W-1:0] d_addr;
  logic               d_drop;

  assign desc_ready   = (state == S_IDLE);
  assign mv_cmd_valid = (state == S_CMD);
  assign mv_cmd_addr  = d_addr;
  assign mv_cmd_drop  = d_drop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      d_addr     <= '0;
      d_drop     <= 1'b0;
      pkt_count  <= '0;
      drop_count <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (desc_valid) begin
          d_addr <= desc.addr;
          d_drop <= desc.drop;
          state <= S_CMD;
        end
        S_CMD: if (mv_cmd_ready) state <= S_WAIT;
        default: if (mv_done) begin
          state <= S_IDLE;
          if (d_drop) drop_count <= drop_count + 1'b1;
          else        pkt_count  <= pkt_count + 1'b1;
        end
      endcase
    end
  end

  // ---------------- events ----------------
  logic   hold_v;
  event_t hold;
  logic   q_wv, q_wr;
  event_t q_wd;

  always_comb begin
    q_wv = 1'b0;
    q_wd = '{code: EVT_NONE, seq: '0};
    if (loss_valid) begin
      q_wv = 1'b1;
      q_wd = '{code: EVT_LOSS, seq: loss_seq};
    end else if (hold_v) begin
      q_wv = 1'b1;
      q_wd = hold;
    end else if (res_evt_valid) begin
      q_wv = 1'b1;
      q_wd = res_evt;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold_v       <= 1'b0;
      hold         <= '{code: EVT_NONE, seq: '0};
      evt_overflow <= '0;
    end else begin
      if ((q_wv && !q_wr) || (loss_valid && hold_v && res_evt_valid))
        evt_overflow <= evt_overflow + 1'b1;
      if (loss_valid) begin
        if (res_evt_valid && !hold_v) begin
          hold_v <= 1'b1;
          hold   <= res_evt;
        end
      end else if (hold_v) begin
        hold_v <= res_evt_valid;
        hold   <= res_evt;
      end
    end
  end

  sync_fifo #(.WIDTH($bits(event_t)), .DEPTH(EVT_DEPTH)) u_evt (
    .clk, .rst_n,
    .wr_valid (q_wv), .wr_ready (q_wr), .wr_data (q_wd),
    .rd_valid (evt_valid), .rd_ready (evt_ready), .rd_data (evt),
    .count    (evt_level)
  );

  assign irq = evt_valid;
endmodule
