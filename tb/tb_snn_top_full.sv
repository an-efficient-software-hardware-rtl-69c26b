// tb_snn_top_full: the chip at its default size (3 x 4 x 3 nodes, 256 neurons
// and 256 x 256 synapses per core), no parameter overrides.
//
// The host programs the core at the far corner node (2,3,2), five hops in X
// and Y and two vertical hops away: address tables, its output destination
// (the host), 4 x 16 weights and 16 thresholds. The other 240 neurons of the
// core keep their reset threshold and never fire. Ten time steps of random
// input spikes on inputs 0..3 follow; the output spike flits that reach the
// host are compared with the core model. Every core of the chip runs each step
// and o_all_done must rise after each tick. One weight is read back.
module tb_snn_top_full;
  import snn_pkg::*;
  import snn_model_pkg::*;
  localparam int N = 256;
  localparam pe_addr_t HOST = 9'h1FF;
  localparam pe_addr_t T = 9'({3'd2, 3'd3, 3'd2});
  logic clk = 0, rst_n = 1;
  logic tick = 0, all_done, perr;
  flit_t hin, hout;
  logic hin_v, hin_stop, hout_v, hout_stop;
  int checks = 0, failures = 0, nspk = 0;
  flit_t rx [$];
  core_model m;

  snn_top dut (
    .clk, .rst_n, .i_tick(tick), .o_all_done(all_done), .o_parity_err(perr),
    .i_host_flit(hin), .i_host_valid(hin_v), .o_host_stop(hin_stop),
    .o_host_flit(hout), .o_host_valid(hout_v), .i_host_stop(hout_stop));

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // asynchronous reset needs an edge
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  always @(negedge clk) hout_stop <= 1'($urandom % 4 == 0);
  always_ff @(posedge clk) if (hout_v && !hout_stop) rx.push_back(hout);

  task automatic send(flit_t f);
    @(negedge clk); hin = f; hin_v = 1; #2;
    while (hin_stop) begin @(negedge clk); #2; end
    @(posedge clk); #1 hin_v = 0;
  endtask
  function automatic flit_t cfg(mem_type_e mt, logic [18:0] d);
    return mk_mem(T, mt, 1'b1, d);
  endfunction

  initial begin
    bit in_spk [], zero [], out_spk [];
    int k, t0;
    hin = '0; hin_v = 0;
    m = new(N, N, 1, 2, -16);
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) m.w[r][c] = 0;
    in_spk = new[N]; zero = new[N];
    repeat (3) @(negedge clk); rst_n = 1;
    send(cfg(MEM_SPARSE, {2'd0, 4'd0, HOST, 1'b1, 1'b0, 2'd0}));
    send(cfg(MEM_SPARSE, {2'd1, 7'd0, 2'd0, 8'd0}));
    send(cfg(MEM_SPARSE, {2'd2, 5'd0, 2'd0, 1'b1, HOST}));
    for (int r = 0; r < 4; r++) begin
      send(cfg(MEM_OTHER, {3'd0, 16'(r * N)}));
      for (int c = 0; c < 16; c++) begin
        m.w[r][c] = 10 + $urandom % 40;
        send(cfg(MEM_WEIGHT, 19'(m.w[r][c])));
      end
    end
    send(cfg(MEM_OTHER, {3'd2, 16'd0}));
    for (int c = 0; c < 16; c++) begin
      m.thr[c] = 30 + $urandom % 40;
      send(cfg(MEM_OTHER, {3'd1, 16'(m.thr[c])}));
    end
    // read back w[2][5]
    send(cfg(MEM_OTHER, {3'd0, 16'(2 * N + 5)}));
    send(mk_mem(T, MEM_WEIGHT, 1'b0, {10'd0, HOST}));
    repeat (100) @(negedge clk);
    check(rx.size() == 1 && f_mtype(rx[0]) == MEM_REPLY && int'(f_data(rx[0])[7:0]) == m.w[2][5],
          "weight read-back");
    rx.delete();
    for (int t = 0; t < 10; t++) begin
      for (int i = 0; i < N; i++) in_spk[i] = (i < 4) && ($urandom % 2 == 0);
      for (int i = 0; i < 4; i++) if (in_spk[i]) send(mk_spike(T, HOST, 13'(i)));
      repeat (40) @(negedge clk);
      @(negedge clk); tick = 1; @(negedge clk); tick = 0;
      t0 = 0;
      @(negedge clk);
      check(!all_done, "cores busy after the tick");
      while (!all_done) begin @(negedge clk); t0++; end
      // core latency is at least 8 + inputs + (fired + 2) cycles
      check(t0 >= 8 && t0 < 400, $sformatf("step length %0d cycles", t0));
      repeat (100) @(negedge clk);
      m.step(in_spk, zero, out_spk);
      k = 0;
      for (int j = 0; j < N; j++) if (out_spk[j]) begin
        check(k < rx.size() && rx[k] == mk_spike(HOST, T, 13'(j)), $sformatf("t%0d neuron %0d", t, j));
        k++; nspk++;
      end
      check(k == rx.size(), $sformatf("t%0d %0d flits, expected %0d", t, rx.size(), k));
      rx.delete();
    end
    check(nspk > 0, "output spikes");
    check(!perr, "no parity error");
    $display("spikes=%0d", nspk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
