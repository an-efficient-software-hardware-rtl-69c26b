// snpc: spiking neural processing core, N LIF neurons with an N_PRE x N weight
// crossbar, fixed-weight recurrent connections and STDP learning.
//
// Per time step (i_start .. o_end pulse, sequenced by snpc_ctrl):
// the forward spike array i_spike_in (one bit per pre-synaptic input) is
// decoded into the indices of its set bits, one per cycle; each index reads a
// whole weight row (the weights of that input to all N neurons) and all
// neurons add their weight in the next cycle, so only non-zero products
// (spike = 1) are ever accumulated and no multiplier exists. The recurrent
// arrays are then decoded the same way and applied with the fixed negative
// weight W_REC, then every neuron leaks and checks its threshold. o_spike_out
// holds the new output array from o_end on.
// Learning (i_learn_start, while i_learn is high) runs the learning block on a
// past step; it and the network side share the single-weight port of the
// weight memory, the learning block having priority. Thresholds are loaded
// one neuron at a time (i_thres_we, i_thres_idx). The external weight read
// returns data one cycle after i_ext_r_en.
// The structure (decoder, shared-address weight memory, neuron array,
// learning block, controller with start/end) follows the paper's core drawing.
module snpc #(
  parameter int N          = 256,
  parameter int N_PRE      = 256,
  parameter int W          = 8,
  parameter int V_W        = 16,
  parameter int DEPTH      = 8,
  parameter int WIN        = 2,
  parameter int LEAK       = 1,
  parameter int REFRAC     = 2,
  parameter int W_REC      = -16,
  parameter int THETA_PLUS = 4,
  parameter int TH_DECAY   = 1,
  parameter int IW         = $clog2(N),
  parameter int RW         = $clog2(N_PRE),
  parameter int SW         = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  i_start,
  output logic                  o_end,
  output logic                  o_busy,
  input  logic [N_PRE-1:0]      i_spike_in,
  input  logic [N-1:0]          i_rec_local,
  input  logic [N-1:0]          i_rec_remote,
  output logic [N-1:0]          o_spike_out,
  // learning
  input  logic                  i_learn,
  input  logic                  i_learn_start,
  input  logic [SW-1:0]         i_tc_slot,
  output logic                  o_learn_done,
  output logic                  o_learn_busy,
  output logic [SW-1:0]         o_pre_slot,
  input  logic [N_PRE-1:0]      i_pre_data,
  output logic [SW-1:0]         o_post_slot,
  input  logic [N-1:0]          i_post_data,
  // threshold load
  input  logic                  i_thres_we,
  input  logic [IW-1:0]         i_thres_idx,
  input  logic signed [V_W-1:0] i_thres,
  // serial weight access from the network interface
  input  logic                  i_ext_w_en,
  input  logic                  i_ext_r_en,
  input  logic [RW+IW-1:0]      i_ext_addr,
  input  logic [W-1:0]          i_ext_w_data,
  output logic [W-1:0]          o_ext_r_data
);
  logic fwd_load, fwd_run, rec_load, rec_local, rec_run, leak, fire;
  logic fwd_valid, fwd_vq, fwd_empty, rec_valid, rec_vq, rec_empty;
  logic [RW-1:0] fwd_idx;
  logic [IW-1:0] rec_idx;
  logic [N-1:0][W-1:0] row;
  logic [N-1:0] xb_valid;
  logic signed [W-1:0] xb_w;

  // learning block <-> weight memory
  logic          l_rd_en, l_wr_en;
  logic [RW+IW-1:0] l_addr0, l_addr1;
  logic [W-1:0]  l_data0, l_data1;

  snpc_ctrl u_ctrl (
    .clk, .rst_n, .i_start,
    .i_fwd_valid(fwd_valid), .i_fwd_valid_q(fwd_vq), .i_rec_valid(rec_valid),
    .o_fwd_load(fwd_load), .o_fwd_run(fwd_run), .o_rec_load(rec_load),
    .o_rec_local(rec_local), .o_rec_run(rec_run), .o_leak(leak), .o_fire(fire),
    .o_end, .o_busy);

  spike_decoder #(.N(N_PRE)) u_fwd_dec (
    .clk, .rst_n, .i_load(fwd_load), .i_spike_array(i_spike_in), .i_ready(fwd_run),
    .o_index(fwd_idx), .o_valid(fwd_valid), .o_valid_q(fwd_vq), .o_empty(fwd_empty));

  spike_decoder #(.N(N)) u_rec_dec (
    .clk, .rst_n, .i_load(rec_load),
    .i_spike_array(rec_local ? i_rec_local : i_rec_remote), .i_ready(rec_run),
    .o_index(rec_idx), .o_valid(rec_valid), .o_valid_q(rec_vq), .o_empty(rec_empty));

  weight_sram #(.ROWS(N_PRE), .N(N), .W(W)) u_wmem (
    .clk,
    .i_rd_en(fwd_valid && fwd_run), .i_rd_row(fwd_idx), .o_rd_data(row),
    .i_b_en(o_learn_busy ? l_rd_en : i_ext_r_en),
    .i_b_addr(o_learn_busy ? l_addr0 : i_ext_addr),
    .o_b_data(l_data0),
    .i_w_en(o_learn_busy ? l_wr_en : i_ext_w_en),
    .i_w_addr(o_learn_busy ? l_addr1 : i_ext_addr),
    .i_w_data(o_learn_busy ? l_data1 : i_ext_w_data));
  assign o_ext_r_data = l_data0;

  recurrent_crossbar #(.N(N), .W(W), .W_REC(W_REC)) u_xbar (
    .i_valid(rec_valid && rec_run), .i_local(rec_local), .i_index(rec_idx),
    .o_valid(xb_valid), .o_weight(xb_w));

  for (genvar j = 0; j < N; j++) begin : g_neuron
    logic signed [V_W-1:0] v_unused, th_unused;
    lif_neuron #(.V_W(V_W), .W_W(W), .LEAK(LEAK), .REFRAC(REFRAC),
                 .THETA_PLUS(THETA_PLUS), .TH_DECAY(TH_DECAY)) u_lif (
      .clk, .rst_n,
      .i_thres_we(i_thres_we && (i_thres_idx == IW'(j))), .i_thres(i_thres),
      .i_learn,
      .i_valid((fwd_vq && fwd_run) || xb_valid[j]),
      .i_wspike(rec_run ? xb_w : row[j]),
      .i_leak(leak), .i_fire(fire),
      .o_spike(o_spike_out[j]), .o_V(v_unused), .o_thres(th_unused));
  end

  learning_block #(.N(N), .ROWS(N_PRE), .W(W), .DEPTH(DEPTH), .WIN(WIN)) u_learn (
    .clk, .rst_n, .i_start(i_learn_start && i_learn), .i_tc_slot,
    .o_busy(o_learn_busy), .o_done(o_learn_done),
    .o_pre_slot, .i_pre_data, .o_post_slot, .i_post_data,
    .o_rd_en(l_rd_en), .o_addr_0(l_addr0), .i_data_0(l_data0),
    .o_wr_en(l_wr_en), .o_addr_1(l_addr1), .o_data_1(l_data1));
endmodule
