// data_mover: payload buffer and mover of the receiver. Payload beats from the
// header analyzer are stored in a FIFO of FIFO_DEPTH 64-byte beats, which
// decouples the line rate of the MAC from the pace of the PCIe endpoint. For
// each command (destination address, drop) it takes the beats of one packet
// from the FIFO, up to and including the one with tlast, and either writes
// them to the PCIe endpoint's write stream (wr_addr = address + 64*k for beat
// k, wr_keep = payload byte enables) or, when drop is set, discards them at
// one beat per clock. `done` pulses for one clock after the last beat.
//
// The paper places a DDR4 or a FIFO between the header analyser and the PCIe
// endpoint "for synchronization"; the FIFO variant is built. Depth, command
// format and write-stream format are this design's choices.
//
// rst_n also disables the assertions below (`disable iff`); lint flags that
// as a mixed synchronous/asynchronous use of the reset, which it is not in
// the circuit.
module data_mover
  import rdma_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 512
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [DATA_W-1:0]  s_axis_tdata,
  input  logic [KEEP_W-1:0]  s_axis_tkeep,
  input  logic               s_axis_tlast,
  input  logic               s_axis_tvalid,
  output logic               s_axis_tready,
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  logic [PADDR_W-1:0] cmd_addr,
  input  logic               cmd_drop,
  output logic               done,
  output logic               wr_valid,
  input  logic               wr_ready,
  output logic [PADDR_W-1:0] wr_addr,
  output logic [DATA_W-1:0]  wr_data,
  output logic [KEEP_W-1:0]  wr_keep,
  output logic               wr_last,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_level
);
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [KEEP_W-1:0] keep;
    logic              last;
  } beat_t;

  beat_t f_in, f_out;
  logic  f_valid, f_ready;

  assign f_in = '{data: s_axis_tdata, keep: s_axis_tkeep, last: s_axis_tlast};

  sync_fifo #(.WIDTH($bits(beat_t)), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_valid (s_axis_tvalid), .wr_ready (s_axis_tready), .wr_data (f_in),
    .rd_valid (f_valid),       .rd_ready (f_ready),       .rd_data (f_out),
    .count    (fifo_level)
  );

  typedef enum logic [1:0] {S_IDLE, S_MOVE, S_DROP} state_e;
  state_e state;
  logic [PADDR_W-1:0] addr;

  assign cmd_ready = (state == S_IDLE);
  assign wr_valid  = (state == S_MOVE) && f_valid;
  assign wr_addr   = addr;
  assign wr_data   = f_out.data;
  assign wr_keep   = f_out.keep;
  assign wr_last   = f_out.last;
  assign f_ready   = (state == S_MOVE) ? wr_ready : (state == S_DROP);

  wire pop = f_valid && f_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      addr  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          addr  <= cmd_addr;
          state <= cmd_drop ? S_DROP : S_MOVE;
        end
        default: if (pop) begin
          addr <= addr + PADDR_W'(BEAT_B);
          if (f_out.last) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
      endcase
    end
  end

  a_wr_hold: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid && !wr_ready |=> wr_valid && $stable(wr_addr) && $stable(wr_data));
endmodule
