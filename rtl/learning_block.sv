// learning_block: simplified STDP with a fixed weight step of +1 / -1.
//
// Run once per time step for the "calculating" step tc, WIN steps behind the
// step the core has just finished, so that the spikes after tc are known.
// 1. The post-synaptic array of tc is read (read block). If no neuron fired in
//    tc the run ends at once.
// 2. A counter walks the pre-synaptic arrays of steps tc-WIN .. tc+WIN. Arrays
//    of steps up to tc are OR-ed into the register spike_before, later ones
//    into spike_after.
// 3. For each post-synaptic neuron j that fired (decoded lowest first), the
//    spike_before vector and then the spike_after vector are decoded with the
//    same lowest-index-first decoder as the core. Each index i is sent as
//    address_0 = {i, j}; the weight comes back on data_0 one cycle later, is
//    incremented (before) or decremented (after), saturated to [WMIN, WMAX],
//    and written to address_1, the registered copy of address_0.
// Steps 1-3, the OR registers, the multiplexed decoder input and the
// address_0/address_1 pipeline follow the learning-block drawing. WIN, the
// saturation bounds and the handshake (i_start pulse, o_done pulse) are this
// design's choices. The paper's weight normalisation (constant sum of a
// neuron's weights) is not performed here.
// Timing: o_done comes 1 cycle after the start edge when no neuron fired in
// tc, otherwise 2 + (2*WIN+1) + P*((B+3) + (A+3) + 1) cycles after it, for P
// post-synaptic spikes, B inputs in spike_before and A in spike_after: one
// weight update per cycle.
module learning_block #(
  parameter int N     = 256,
  parameter int ROWS  = 256,
  parameter int W     = 8,
  parameter int DEPTH = 8,
  parameter int WIN   = 2,
  parameter int WMIN  = 0,
  parameter int WMAX  = 127,
  parameter int IW    = $clog2(N),
  parameter int RW    = $clog2(ROWS),
  parameter int SW    = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                i_start,
  input  logic [SW-1:0]       i_tc_slot,   // slot of the calculating step
  output logic                o_busy,
  output logic                o_done,      // one-cycle pulse
  // pre_syn / post_syn memories
  output logic [SW-1:0]       o_pre_slot,
  input  logic [ROWS-1:0]     i_pre_data,
  output logic [SW-1:0]       o_post_slot,
  input  logic [N-1:0]        i_post_data,
  // weight memory
  output logic                o_rd_en,
  output logic [RW+IW-1:0]    o_addr_0,
  input  logic [W-1:0]        i_data_0,
  output logic                o_wr_en,
  output logic [RW+IW-1:0]    o_addr_1,
  output logic [W-1:0]        o_data_1
);
  typedef enum logic [2:0] {S_IDLE, S_POST, S_SCAN, S_NEXT, S_UPD, S_DRAIN, S_PCHK, S_DONE} state_e;
  state_e state;

  logic [ROWS-1:0] spike_before, spike_after;
  logic [$clog2(2*WIN+2)-1:0] cnt;
  logic phase_after;                        // 0: before (+1), 1: after (-1)
  logic [SW-1:0] tc_q;

  // post-synaptic decoder
  logic          post_load, post_ready, post_valid, post_vq, post_empty;
  logic [IW-1:0] post_idx;
  // pre-synaptic decoder
  logic          pre_load, pre_ready, pre_valid, pre_vq, pre_empty;
  logic [RW-1:0] pre_idx;

  spike_decoder #(.N(N)) u_post (
    .clk, .rst_n, .i_load(post_load), .i_spike_array(i_post_data), .i_ready(post_ready),
    .o_index(post_idx), .o_valid(post_valid), .o_valid_q(post_vq), .o_empty(post_empty));

  spike_decoder #(.N(ROWS)) u_pre (
    .clk, .rst_n, .i_load(pre_load),
    .i_spike_array(phase_after ? spike_after : spike_before), .i_ready(pre_ready),
    .o_index(pre_idx), .o_valid(pre_valid), .o_valid_q(pre_vq), .o_empty(pre_empty));

  assign o_post_slot = (state == S_IDLE) ? i_tc_slot : tc_q;
  assign o_pre_slot  = SW'(tc_q - SW'(WIN) + SW'(cnt));
  assign post_load   = (state == S_POST);
  assign pre_load    = (state == S_NEXT);
  assign pre_ready   = (state == S_UPD);
  assign post_ready  = (state == S_DRAIN) && !pre_vq && phase_after;
  assign o_rd_en     = (state == S_UPD) && pre_valid;
  assign o_addr_0    = {pre_idx, post_idx};
  assign o_busy      = (state != S_IDLE);
  assign o_done      = (state == S_DONE);

  // weights are signed W-bit values
  logic signed [W+1:0] w_old, w_new;
  assign w_old    = (W+2)'($signed(i_data_0));
  always_comb begin
    w_new = phase_after ? w_old - 1 : w_old + 1;
    if (w_new > (W+2)'(WMAX)) w_new = (W+2)'(WMAX);
    if (w_new < (W+2)'(WMIN)) w_new = (W+2)'(WMIN);
  end
  assign o_wr_en  = pre_vq;
  assign o_data_1 = w_new[W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      spike_before <= '0;
      spike_after  <= '0;
      cnt          <= '0;
      phase_after  <= 1'b0;
      tc_q         <= '0;
      o_addr_1     <= '0;
    end else begin
      if (o_rd_en) o_addr_1 <= o_addr_0;
      unique case (state)
        S_IDLE: if (i_start) begin
          tc_q  <= i_tc_slot;
          state <= (|i_post_data) ? S_POST : S_DONE;   // skip when no post spike
          spike_before <= '0;
          spike_after  <= '0;
          cnt          <= '0;
        end
        S_POST: state <= S_SCAN;
        S_SCAN: begin
          if (cnt <= ($bits(cnt))'(WIN)) spike_before <= spike_before | i_pre_data;
          else                           spike_after  <= spike_after  | i_pre_data;
          if (cnt == ($bits(cnt))'(2*WIN)) begin
            state       <= S_NEXT;
            phase_after <= 1'b0;
          end
          cnt <= cnt + 1'b1;
        end
        S_NEXT: state <= S_UPD;
        S_UPD:  if (!pre_valid) state <= S_DRAIN;
        S_DRAIN: if (!pre_vq) begin
          if (!phase_after) begin
            phase_after <= 1'b1;
            state       <= S_NEXT;
          end else begin
            phase_after <= 1'b0;
            state       <= S_PCHK;   // post_ready pops the current neuron
          end
        end
        S_PCHK: state <= post_valid ? S_NEXT : S_DONE;
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
