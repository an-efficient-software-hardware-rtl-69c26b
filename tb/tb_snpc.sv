// tb_snpc: a 16-neuron core with random weights and thresholds runs 40 time
// steps of random forward and remote recurrent spikes (its own previous spikes
// are the local recurrent input). Output spikes are compared with an integer
// model of the LIF equations; the step latency is checked against the
// controller's formula. Then a learning run is started on a past step and the
// weights, read back through the external port, are compared with the STDP
// model. Counts how often each mechanism happened (spike, refractory,
// inhibition, learning).
module tb_snpc;
  localparam int N = 16, NP = 16, DEPTH = 8, WIN = 2, LEAK = 1, REFRAC = 2, W_REC = -16;
  logic clk = 0, rst_n = 1;
  logic start, o_end, busy;
  logic [NP-1:0] spike_in;
  logic [N-1:0] rec_local, rec_remote, spike_out;
  logic learn, learn_start, learn_done, learn_busy;
  logic [2:0] tc, pre_slot, post_slot;
  logic [NP-1:0] pre_mem [DEPTH];
  logic [N-1:0] post_mem [DEPTH];
  logic th_we;
  logic [3:0] th_idx;
  logic signed [15:0] th;
  logic ew, er;
  logic [7:0] eaddr, ewd, erd;
  int checks = 0, failures = 0;
  int wm [NP][N];
  int v [N], rc [N], thr [N];
  int n_spk = 0, n_ref = 0, n_inh = 0;

  snpc #(.N(N), .N_PRE(NP), .DEPTH(DEPTH), .WIN(WIN), .LEAK(LEAK), .REFRAC(REFRAC), .W_REC(W_REC),
         .THETA_PLUS(0), .TH_DECAY(0)) dut (
    .clk, .rst_n, .i_start(start), .o_end, .o_busy(busy), .i_spike_in(spike_in),
    .i_rec_local(rec_local), .i_rec_remote(rec_remote), .o_spike_out(spike_out),
    .i_learn(learn), .i_learn_start(learn_start), .i_tc_slot(tc), .o_learn_done(learn_done),
    .o_learn_busy(learn_busy), .o_pre_slot(pre_slot), .i_pre_data(pre_mem[pre_slot]),
    .o_post_slot(post_slot), .i_post_data(post_mem[post_slot]),
    .i_thres_we(th_we), .i_thres_idx(th_idx), .i_thres(th),
    .i_ext_w_en(ew), .i_ext_r_en(er), .i_ext_addr(eaddr), .i_ext_w_data(ewd), .o_ext_r_data(erd));

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // asynchronous reset needs an edge
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    start = 0; spike_in = 0; rec_local = 0; rec_remote = 0; learn = 0; learn_start = 0; tc = 0;
    th_we = 0; th_idx = 0; th = 0; ew = 0; er = 0; eaddr = 0; ewd = 0;
    for (int s = 0; s < DEPTH; s++) begin pre_mem[s] = '0; post_mem[s] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // weights and thresholds
    for (int r = 0; r < NP; r++)
      for (int c = 0; c < N; c++) begin
        wm[r][c] = $urandom % 40;
        @(negedge clk); ew = 1; eaddr = 8'({r[3:0], c[3:0]}); ewd = 8'(wm[r][c]);
      end
    for (int c = 0; c < N; c++) begin
      thr[c] = 60 + $urandom % 60; v[c] = 0; rc[c] = 0;
      @(negedge clk); ew = 0; th_we = 1; th_idx = 4'(c); th = 16'(thr[c]);
    end
    @(negedge clk); th_we = 0;
    for (int t = 0; t < 40; t++) begin
      int cyc, F, L, R;
      spike_in = 16'($urandom) & 16'($urandom);
      rec_remote = (t % 4 == 0) ? 16'(1 << ($urandom % 16)) : '0;
      F = $countones(spike_in); L = $countones(rec_local); R = $countones(rec_remote);
      // model
      for (int j = 0; j < N; j++) begin
        if (rc[j] == 0) begin
          for (int i = 0; i < NP; i++) if (spike_in[i]) v[j] += wm[i][j];
          for (int k = 0; k < N; k++) if (rec_local[k] && k != j) begin v[j] += W_REC; n_inh++; end
          for (int k = 0; k < N; k++) if (rec_remote[k]) begin v[j] += W_REC; n_inh++; end
          v[j] -= LEAK;
        end
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!o_end) begin @(negedge clk); cyc++; end
      check(cyc == 8 + L + R + ((F > 0) ? F + 2 : 1), $sformatf("step latency %0d", cyc));
      for (int j = 0; j < N; j++) begin
        bit s;
        s = (rc[j] == 0) && (v[j] >= thr[j]);
        if (rc[j] != 0) n_ref++;
        if (s) begin v[j] = 0; rc[j] = REFRAC; n_spk++; end
        else if (rc[j] > 0) rc[j]--;
        check(spike_out[j] == s, $sformatf("t%0d neuron %0d spike %0d exp %0d", t, j, spike_out[j], s));
      end
      pre_mem[3'(t)] = spike_in; post_mem[3'(t)] = spike_out;
      rec_local = spike_out;
    end
    // learning on step 37 (slots 35..39 are in the memories)
    begin
      logic [NP-1:0] bef, aft;
      int tcs = 37;
      bef = pre_mem[3'(tcs - 2)] | pre_mem[3'(tcs - 1)] | pre_mem[3'(tcs)];
      aft = pre_mem[3'(tcs + 1)] | pre_mem[3'(tcs + 2)];
      if (post_mem[3'(tcs)] == '0) post_mem[3'(tcs)] = 16'h0101;
      for (int j = 0; j < N; j++) if (post_mem[3'(tcs)][j]) begin
        for (int i = 0; i < NP; i++) if (bef[i]) wm[i][j] = (wm[i][j] >= 127) ? 127 : wm[i][j] + 1;
        for (int i = 0; i < NP; i++) if (aft[i]) wm[i][j] = (wm[i][j] <= 0) ? 0 : wm[i][j] - 1;
      end
      @(negedge clk); learn = 1; tc = 3'(tcs); learn_start = 1; @(negedge clk); learn_start = 0;
      while (!learn_done) @(negedge clk);
      @(negedge clk);
      for (int r = 0; r < NP; r++)
        for (int c = 0; c < N; c++) begin
          er = 1; eaddr = 8'({r[3:0], c[3:0]}); @(negedge clk); er = 0;
          check(int'(erd) == wm[r][c], $sformatf("learned w[%0d][%0d] %0d exp %0d", r, c, erd, wm[r][c]));
        end
    end
    check(n_spk > 0, "spikes happened");
    check(n_ref > 0, "refractory happened");
    check(n_inh > 0, "recurrent inhibition happened");
    $display("spikes=%0d refractory=%0d inhibitions=%0d", n_spk, n_ref, n_inh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
