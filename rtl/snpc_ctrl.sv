// snpc_ctrl: time-step sequencer of the spiking neural processing core.
//
// A time step starts with i_start and ends with the o_end pulse. In between
// the controller runs the phases in this order:
//   FWD  - the forward spike array is loaded into the input decoder; every
//          decoded index reads one weight row and the row is integrated by all
//          neurons one cycle later;
//   RECL - the core's own spikes of the previous step are decoded and applied
//          through the fixed negative recurrent weight;
//   RECR - the same for recurrent spikes that arrived from other cores of the
//          same layer;
//   LEAK - one cycle: every neuron adds -LEAK;
//   FIRE - one cycle: every neuron compares with its threshold;
//   END  - the new output spike array is written to the output memory.
// A phase ends when its decoder is empty and its last read has been used.
// START/END and the controller driving the decoder and the neurons follow the
// core drawing; the phase order and the separate recurrent phases are this
// design's choices. Latency: o_end rises 8 + L + R + (F + 2, or 1 when F = 0)
// cycles after the edge that samples i_start, for F forward, L local and R
// remote recurrent spikes.
module snpc_ctrl (
  input  logic clk,
  input  logic rst_n,
  input  logic i_start,
  input  logic i_fwd_valid,     // forward decoder has an index
  input  logic i_fwd_valid_q,   // a weight row is arriving
  input  logic i_rec_valid,     // recurrent decoder has an index
  output logic o_fwd_load,
  output logic o_fwd_run,
  output logic o_rec_load,
  output logic o_rec_local,     // recurrent source is this core
  output logic o_rec_run,
  output logic o_leak,
  output logic o_fire,
  output logic o_end,
  output logic o_busy
);
  typedef enum logic [3:0] {
    S_IDLE, S_FWD_LD, S_FWD, S_RECL_LD, S_RECL, S_RECR_LD, S_RECR, S_LEAK, S_FIRE, S_END
  } state_e;
  state_e state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else begin
      unique case (state)
        S_IDLE:    if (i_start) state <= S_FWD_LD;
        S_FWD_LD:  state <= S_FWD;
        S_FWD:     if (!i_fwd_valid && !i_fwd_valid_q) state <= S_RECL_LD;
        S_RECL_LD: state <= S_RECL;
        S_RECL:    if (!i_rec_valid) state <= S_RECR_LD;
        S_RECR_LD: state <= S_RECR;
        S_RECR:    if (!i_rec_valid) state <= S_LEAK;
        S_LEAK:    state <= S_FIRE;
        S_FIRE:    state <= S_END;
        S_END:     state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end

  assign o_fwd_load  = (state == S_FWD_LD);
  assign o_fwd_run   = (state == S_FWD);
  assign o_rec_load  = (state == S_RECL_LD) || (state == S_RECR_LD);
  assign o_rec_local = (state == S_RECL_LD) || (state == S_RECL);
  assign o_rec_run   = (state == S_RECL) || (state == S_RECR);
  assign o_leak      = (state == S_LEAK);
  assign o_fire      = (state == S_FIRE);
  assign o_end       = (state == S_END);
  assign o_busy      = (state != S_IDLE);
endmodule
