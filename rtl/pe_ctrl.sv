// pe_ctrl: time-step controller of a processing element.
//
// The whole chip advances in lock-step time steps; a pulse on i_tick begins
// the next one (the host issues it once every PE reports o_done and the
// network is empty). On i_tick the controller advances its step counter,
// empties the spike-array slot that will collect the spikes arriving during
// this step, and starts the core on the slot collected during the previous
// step. When the core ends it writes the new output array, starts the network
// interface sending it and, when learning is on, starts the learning block on
// the step WIN steps back. o_done returns high when all three are finished.
// Slot numbering: the step counter modulo DEPTH selects the slot in the
// pre-synaptic memory; the recurrent memory of remote spikes is double
// buffered. A controller that manages the core by time step follows the
// paper; the slot scheme and the handshake are this design's choices.
module pe_ctrl #(
  parameter int DEPTH = 8,
  parameter int WIN   = 2,
  parameter int SW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          i_tick,
  output logic          o_done,
  output logic [SW-1:0] o_cur_slot,     // step being computed
  output logic [SW-1:0] o_recv_slot,    // slot collecting incoming spikes
  output logic [SW-1:0] o_prev_slot,    // previous step (own recurrent spikes)
  output logic [SW-1:0] o_tc_slot,      // learning step
  output logic          o_clr,          // empty o_recv_slot
  output logic          o_snpc_start,
  input  logic          i_snpc_end,
  output logic          o_out_we,
  output logic          o_send_start,
  output logic          o_learn_start,
  input  logic          i_send_busy,
  input  logic          i_learn_busy
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_RUN, S_WAIT} state_e;
  state_e state;
  logic [SW-1:0] cur;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur   <= '0;
    end else begin
      unique case (state)
        S_IDLE:  if (i_tick) begin
          cur   <= cur + 1'b1;
          state <= S_START;
        end
        S_START: state <= S_RUN;
        S_RUN:   if (i_snpc_end) state <= S_WAIT;
        S_WAIT:  if (!i_send_busy && !i_learn_busy) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign o_cur_slot    = cur;
  assign o_recv_slot   = cur + 1'b1;
  assign o_prev_slot   = cur - 1'b1;
  assign o_tc_slot     = cur - SW'(WIN);
  assign o_clr         = (state == S_START);
  assign o_snpc_start  = (state == S_START);
  assign o_out_we      = (state == S_RUN) && i_snpc_end;
  assign o_send_start  = o_out_we;
  assign o_learn_start = o_out_we;
  assign o_done        = (state == S_IDLE);
endmodule
