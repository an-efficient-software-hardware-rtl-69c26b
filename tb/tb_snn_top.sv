// tb_snn_top: end-to-end test of the chip on a 2 x 1 x 2 mesh with 16-neuron
// cores (MX=2, MY=1, MZ=2, N=N_PRE=16).
//
// Network: the host (West port of node (0,0,0)) feeds random input spikes to
// layer-1 core A at (1,0,0). A sends its spikes to B (0,0,1) and C (1,0,1),
// one layer up through the vertical links; B and C inhibit each other through
// remote recurrent connections and send their spikes to the host. All tables,
// weights and thresholds are loaded by memory-access flits from the host.
// Phase 1 (inference, 40 steps): the spike flits reaching the host are
// compared, per source, with three core models; weights of every core are read
// back through read-request / reply flits. Phase 2 (learning on in B, 12
// steps): the learning block must run and change weights, seen by read-back.
// Finally a flit with a wrong parity bit must be flagged and dropped.
// The host pulls stop at random (back-pressure through the mesh). Each
// mechanism is counted and a count of zero is a failure.
module tb_snn_top;
  import snn_pkg::*;
  import snn_model_pkg::*;
  localparam int N = 16;
  localparam pe_addr_t HOST = 9'h1FF;
  localparam pe_addr_t A = 9'h001, B = 9'h040, C = 9'h041;
  logic clk = 0, rst_n = 1;
  logic tick = 0, all_done, perr;
  flit_t hin, hout;
  logic hin_v, hin_stop, hout_v, hout_stop;
  int checks = 0, failures = 0;
  flit_t rx_b [$], rx_c [$], rx_reply [$];
  core_model ma, mb, mc;
  int n_host_stop = 0, n_tsv = 0, n_xlink = 0, n_rset = 0, n_learn = 0, n_par = 0,
      n_replies = 0, n_wchanged = 0, n_spk_b = 0, n_spk_c = 0, n_inner_stop = 0;

  snn_top #(.MX(2), .MY(1), .MZ(2), .N(N), .N_PRE(N)) dut (
    .clk, .rst_n, .i_tick(tick), .o_all_done(all_done), .o_parity_err(perr),
    .i_host_flit(hin), .i_host_valid(hin_v), .o_host_stop(hin_stop),
    .o_host_flit(hout), .o_host_valid(hout_v), .i_host_stop(hout_stop));

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // asynchronous reset needs an edge
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // host receive side and mechanism monitors
  always @(negedge clk) hout_stop <= 1'($urandom % 4 == 0);
  always_ff @(posedge clk) begin
    if (hout_v && !hout_stop) begin
      if (f_is_mem(hout)) rx_reply.push_back(hout);
      else if (f_src(hout) == B) rx_b.push_back(hout);
      else rx_c.push_back(hout);
    end
    if (hout_stop) n_host_stop++;
    for (int r = 0; r < 4; r++) begin
      if (dut.rout_valid[r][P_U] && !dut.rin_stop[r][P_U]) n_tsv++;
      if (dut.rout_valid[r][P_W] && !dut.rin_stop[r][P_W] && r != 0) n_xlink++;
      if (dut.rout_stop[r] != '0) n_inner_stop++;   // an input buffer of a router is full
    end
    if (dut.g_z[1].g_y[0].g_x[0].u_pe.rset || dut.g_z[1].g_y[0].g_x[1].u_pe.rset) n_rset++;
    if (perr) n_par++;
  end
  logic lb_q = 0;
  always_ff @(posedge clk) begin
    lb_q <= dut.g_z[1].g_y[0].g_x[0].u_pe.learn_busy;
    if (dut.g_z[1].g_y[0].g_x[0].u_pe.learn_busy && !lb_q) n_learn++;
  end

  task automatic send(flit_t f);
    @(negedge clk); hin = f; hin_v = 1; #2;
    while (hin_stop) begin @(negedge clk); #2; end
    @(posedge clk); #1 hin_v = 0;
  endtask
  function automatic flit_t cfg(pe_addr_t pe, mem_type_e mt, logic [18:0] d);
    return mk_mem(pe, mt, 1'b1, d);
  endfunction
  function automatic logic [18:0] t1(pe_addr_t src, bit rec, int conn);
    return {2'd0, 4'd0, src, 1'b1, rec, 2'(conn)};
  endfunction
  function automatic logic [18:0] dst(int i, pe_addr_t pe);
    return {2'd2, 5'd0, 2'(i), 1'b1, pe};
  endfunction

  task automatic load_core(pe_addr_t pe, core_model m, int wmax, int tmin);
    send(cfg(pe, MEM_OTHER, {3'd0, 16'd0}));
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        m.w[r][c] = $urandom % wmax;
        send(cfg(pe, MEM_WEIGHT, 19'(m.w[r][c])));
      end
    send(cfg(pe, MEM_OTHER, {3'd2, 16'd0}));
    for (int c = 0; c < N; c++) begin
      m.thr[c] = tmin + $urandom % 50;
      send(cfg(pe, MEM_OTHER, {3'd1, 16'(m.thr[c])}));
    end
  endtask

  // read weight (row r, column c) of a core through the network
  task automatic read_w(pe_addr_t pe, int r, int c, output int val);
    int k;
    send(cfg(pe, MEM_OTHER, {3'd0, 16'(r * N + c)}));
    send(mk_mem(pe, MEM_WEIGHT, 1'b0, {10'd0, HOST}));
    k = 0;
    while (rx_reply.size() == 0 && k < 200) begin @(negedge clk); k++; end
    val = -1;
    if (rx_reply.size() > 0) begin
      flit_t f;
      f = rx_reply.pop_front();
      check(f_mtype(f) == MEM_REPLY && f_data(f)[18:10] == pe, "reply type and source");
      val = int'(f_data(f)[7:0]);
      n_replies++;
    end else check(0, "no reply");
  endtask

  task automatic step();
    repeat (20) @(negedge clk);    // input spikes still in flight must arrive first
    @(negedge clk); tick = 1; @(negedge clk); tick = 0;
    while (!all_done) @(negedge clk);
    repeat (60) @(negedge clk);    // network drain
  endtask

  task automatic cmp(ref flit_t q [$], input pe_addr_t src, input bit spk [], input int t, ref int cnt);
    int e;
    e = 0;
    for (int j = 0; j < N; j++) if (spk[j]) begin
      check(e < q.size() && q[e] == mk_spike(HOST, src, 13'(j)),
            $sformatf("t%0d src %h neuron %0d", t, src, j));
      e++; cnt++;
    end
    check(e == q.size(), $sformatf("t%0d src %h flits %0d exp %0d", t, src, q.size(), e));
    q.delete();
  endtask

  initial begin
    bit in_a [], zero [], oa [], ob [], oc [], pa [], pb [], pc [];
    int v, wb0 [N][N], diff;
    hin = '0; hin_v = 0;
    ma = new(N, N, 1, 2, -16); mb = new(N, N, 1, 2, -16); mc = new(N, N, 1, 2, -16);
    in_a = new[N]; zero = new[N]; pa = new[N]; pb = new[N]; pc = new[N];
    repeat (3) @(negedge clk); rst_n = 1;
    // tables
    send(cfg(A, MEM_SPARSE, t1(HOST, 0, 0)));
    send(cfg(A, MEM_SPARSE, {2'd1, 7'd0, 2'd0, 8'd0}));
    send(cfg(A, MEM_SPARSE, dst(0, B)));
    send(cfg(A, MEM_SPARSE, dst(1, C)));
    send(cfg(B, MEM_SPARSE, t1(A, 0, 0)));
    send(cfg(B, MEM_SPARSE, t1(C, 1, 1)));
    send(cfg(B, MEM_SPARSE, {2'd1, 7'd0, 2'd0, 8'd0}));
    send(cfg(B, MEM_SPARSE, {2'd1, 7'd0, 2'd1, 8'd0}));
    send(cfg(B, MEM_SPARSE, dst(0, HOST)));
    send(cfg(B, MEM_SPARSE, dst(1, C)));
    send(cfg(C, MEM_SPARSE, t1(A, 0, 0)));
    send(cfg(C, MEM_SPARSE, t1(B, 1, 1)));
    send(cfg(C, MEM_SPARSE, {2'd1, 7'd0, 2'd0, 8'd0}));
    send(cfg(C, MEM_SPARSE, {2'd1, 7'd0, 2'd1, 8'd0}));
    send(cfg(C, MEM_SPARSE, dst(0, HOST)));
    send(cfg(C, MEM_SPARSE, dst(1, B)));
    load_core(A, ma, 40, 50);
    load_core(B, mb, 50, 40);
    load_core(C, mc, 50, 40);
    // read-back of a few weights
    for (int k = 0; k < 6; k++) begin
      int r, c;
      r = $urandom % N; c = $urandom % N;
      read_w(A, r, c, v); check(v == ma.w[r][c], $sformatf("A w[%0d][%0d]=%0d exp %0d", r, c, v, ma.w[r][c]));
      read_w(C, r, c, v); check(v == mc.w[r][c], $sformatf("C w[%0d][%0d]=%0d exp %0d", r, c, v, mc.w[r][c]));
    end
    // phase 1: inference
    for (int t = 0; t < 40; t++) begin
      for (int i = 0; i < N; i++) in_a[i] = ($urandom % 3 == 0);
      for (int i = 0; i < N; i++) if (in_a[i]) send(mk_spike(A, HOST, 13'(i)));
      step();
      ma.step(in_a, zero, oa);
      mb.step(pa, pc, ob);
      mc.step(pa, pb, oc);
      cmp(rx_b, B, ob, t, n_spk_b);
      cmp(rx_c, C, oc, t, n_spk_c);
      pa = oa; pb = ob; pc = oc;
    end
    // phase 2: learning in B
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) wb0[r][c] = mb.w[r][c];
    send(cfg(B, MEM_OTHER, {3'd3, 15'd0, 1'b1}));
    for (int t = 0; t < 12; t++) begin
      for (int i = 0; i < N; i++) in_a[i] = ($urandom % 2 == 0);
      for (int i = 0; i < N; i++) if (in_a[i]) send(mk_spike(A, HOST, 13'(i)));
      step();
      rx_b.delete(); rx_c.delete();
    end
    send(cfg(B, MEM_OTHER, {3'd3, 15'd0, 1'b0}));
    repeat (20) @(negedge clk);
    diff = 0;
    for (int r = 0; r < N; r++) begin
      read_w(B, r, r, v);
      check(v >= 0 && v <= 127 && (v - wb0[r][r] <= 12) && (wb0[r][r] - v <= 12),
            $sformatf("B w[%0d][%0d]=%0d within 12 steps of %0d", r, r, v, wb0[r][r]));
      if (v != wb0[r][r]) diff++;
    end
    n_wchanged = diff;
    // corrupted flit: parity bit flipped
    begin
      flit_t f;
      f = mk_spike(A, HOST, 13'd3);
      f[32] = ~f[32];
      send(f);
      repeat (30) @(negedge clk);
    end
    // mechanism counts
    $display("spikes B=%0d C=%0d A-fired=%0d tsv=%0d xlink=%0d host_stop=%0d inner_stop=%0d",
             n_spk_b, n_spk_c, ma.n_fire, n_tsv, n_xlink, n_host_stop, n_inner_stop);
    $display("rec_remote_flits=%0d inh_local=%0d inh_remote=%0d refrac=%0d learn_runs=%0d w_changed=%0d replies=%0d parity=%0d",
             n_rset, mb.n_inh_local + mc.n_inh_local, mb.n_inh_remote + mc.n_inh_remote,
             ma.n_refrac + mb.n_refrac + mc.n_refrac, n_learn, n_wchanged, n_replies, n_par);
    check(n_spk_b > 0 && n_spk_c > 0, "output spikes reached the host");
    check(ma.n_fire > 0, "layer 1 fired");
    check(n_tsv > 0, "flits crossed the vertical links");
    check(n_xlink > 0, "flits crossed X links");
    check(n_host_stop > 0, "host back-pressure");
    check(n_inner_stop > 0, "router buffers filled (stop raised)");
    check(n_rset > 0, "remote recurrent spikes received");
    check(mb.n_inh_local + mc.n_inh_local > 0, "local recurrent inhibition");
    check(mb.n_inh_remote + mc.n_inh_remote > 0, "remote recurrent inhibition");
    check(ma.n_refrac + mb.n_refrac + mc.n_refrac > 0, "refractory periods");
    check(n_learn > 0, "learning block ran");
    check(n_wchanged > 0, "learning changed weights");
    check(n_replies > 0, "read replies");
    check(n_par > 0, "parity error flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
