// pe: processing element, one node of the mesh: network interface, spike
// memories, core and controller.
//
// Spikes arriving from the router are converted by the network interface into
// bits of the spike array being collected in the pre-synaptic spike memory
// (recurrent spikes of the same layer go to a small double-buffered memory of
// their own). On each time step the controller starts the core on the array
// collected during the previous step; the core's output array is stored in
// the post-synaptic spike memory, fed back as the core's own recurrent input
// in the next step, sent out by the network interface, and read by the
// learning block together with the pre-synaptic history. Memory-access flits
// load weights, thresholds and tables. The composition (controller, network
// interface, two spike memories of N-bit arrays, core) follows the processing
// element drawing.
module pe
  import snn_pkg::*;
#(
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
  parameter int CPE_W      = 2,
  parameter int N_DEST     = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pe_addr_t i_my_addr,
  input  logic     i_tick,
  output logic     o_done,
  // router local port
  input  flit_t    i_flit,
  input  logic     i_flit_valid,
  output logic     o_stop,
  output flit_t    o_flit,
  output logic     o_flit_valid,
  input  logic     i_stop,
  output logic     o_parity_err,
  output logic [N-1:0] o_spike_out       // latest output array, for observation
);
  localparam int IW = $clog2(N);
  localparam int RW = $clog2(N_PRE);
  localparam int SW = $clog2(DEPTH);

  logic [SW-1:0] cur_slot, recv_slot, prev_slot, tc_slot, pre_slot, post_slot;
  logic clr, snpc_start, snpc_end, snpc_busy, out_we, send_start, learn_start;
  logic send_busy, learn_busy, learn_done, learn;
  logic set, rset;
  logic [RW-1:0] set_idx;
  logic [IW-1:0] rset_idx;
  logic w_en, r_en;
  logic [RW+IW-1:0] maddr;
  logic [W-1:0] w_data, r_data;
  logic th_we;
  logic [IW-1:0] th_idx;
  logic signed [V_W-1:0] th;
  logic [N_PRE-1:0] spike_in, pre_data;
  logic [N-1:0] rec_local, rec_remote, post_data, spike_out, rec_unused;

  pe_ctrl #(.DEPTH(DEPTH), .WIN(WIN)) u_ctrl (
    .clk, .rst_n, .i_tick, .o_done,
    .o_cur_slot(cur_slot), .o_recv_slot(recv_slot), .o_prev_slot(prev_slot),
    .o_tc_slot(tc_slot), .o_clr(clr), .o_snpc_start(snpc_start), .i_snpc_end(snpc_end),
    .o_out_we(out_we), .o_send_start(send_start), .o_learn_start(learn_start),
    .i_send_busy(send_busy), .i_learn_busy(learn_busy));

  ni #(.N(N), .N_PRE(N_PRE), .W(W), .V_W(V_W), .CPE_W(CPE_W), .N_DEST(N_DEST)) u_ni (
    .clk, .rst_n, .i_my_addr,
    .i_flit, .i_flit_valid, .o_stop, .o_flit, .o_flit_valid, .i_stop,
    .o_set(set), .o_set_idx(set_idx), .o_rset(rset), .o_rset_idx(rset_idx),
    .i_send_start(send_start), .i_out_array(spike_out), .o_send_busy(send_busy),
    .o_w_en(w_en), .o_r_en(r_en), .o_addr(maddr), .o_w_data(w_data), .i_r_data(r_data),
    .i_mem_busy(learn_busy),
    .o_th_we(th_we), .o_th_idx(th_idx), .o_th(th), .o_learn(learn), .o_parity_err);

  // pre-synaptic spike memory (input arrays, kept DEPTH steps for learning)
  spike_memory #(.N(N_PRE), .DEPTH(DEPTH)) u_pre_mem (
    .clk, .rst_n,
    .i_clr(clr), .i_clr_slot(recv_slot),
    .i_set(set), .i_set_slot(recv_slot), .i_set_idx(set_idx),
    .i_wr(1'b0), .i_wr_slot('0), .i_wr_data('0),
    .i_rda_slot(cur_slot), .o_rda_data(spike_in),
    .i_rdb_slot(pre_slot), .o_rdb_data(pre_data));

  // remote recurrent spikes, double buffered
  spike_memory #(.N(N), .DEPTH(2)) u_rec_mem (
    .clk, .rst_n,
    .i_clr(clr), .i_clr_slot(recv_slot[0]),
    .i_set(rset), .i_set_slot(recv_slot[0]), .i_set_idx(rset_idx),
    .i_wr(1'b0), .i_wr_slot(1'b0), .i_wr_data('0),
    .i_rda_slot(cur_slot[0]), .o_rda_data(rec_remote),
    .i_rdb_slot(1'b0), .o_rdb_data(rec_unused));

  // post-synaptic spike memory (output arrays)
  spike_memory #(.N(N), .DEPTH(DEPTH)) u_post_mem (
    .clk, .rst_n,
    .i_clr(1'b0), .i_clr_slot('0),
    .i_set(1'b0), .i_set_slot('0), .i_set_idx('0),
    .i_wr(out_we), .i_wr_slot(cur_slot), .i_wr_data(spike_out),
    .i_rda_slot(prev_slot), .o_rda_data(rec_local),
    .i_rdb_slot(post_slot), .o_rdb_data(post_data));

  snpc #(.N(N), .N_PRE(N_PRE), .W(W), .V_W(V_W), .DEPTH(DEPTH), .WIN(WIN), .LEAK(LEAK),
         .REFRAC(REFRAC), .W_REC(W_REC), .THETA_PLUS(THETA_PLUS), .TH_DECAY(TH_DECAY)) u_snpc (
    .clk, .rst_n, .i_start(snpc_start), .o_end(snpc_end), .o_busy(snpc_busy),
    .i_spike_in(spike_in), .i_rec_local(rec_local), .i_rec_remote(rec_remote),
    .o_spike_out(spike_out),
    .i_learn(learn), .i_learn_start(learn_start), .i_tc_slot(tc_slot),
    .o_learn_done(learn_done), .o_learn_busy(learn_busy),
    .o_pre_slot(pre_slot), .i_pre_data(pre_data), .o_post_slot(post_slot), .i_post_data(post_data),
    .i_thres_we(th_we), .i_thres_idx(th_idx), .i_thres(th),
    .i_ext_w_en(w_en), .i_ext_r_en(r_en), .i_ext_addr(maddr), .i_ext_w_data(w_data),
    .o_ext_r_data(r_data));

  assign o_spike_out = spike_out;
endmodule
