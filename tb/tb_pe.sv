// tb_pe: one processing element (16 neurons, 16 inputs) driven through its
// router-side port as the network would drive it. Memory-access flits load
// the address tables, the destination table, 256 weights (burst) and the
// thresholds; then 30 time steps of random input spike flits are sent, each
// followed by a tick. Output spike flits are collected from the local port
// (under random stops) and compared with the core model step by step.
module tb_pe;
  import snn_pkg::*;
  import snn_model_pkg::*;
  localparam int N = 16;
  localparam pe_addr_t ME = 9'h009, HOST = 9'h1FF;
  logic clk = 0, rst_n = 1;
  logic tick, done, fin_v, ostop, fout_v, istop, perr;
  flit_t fin, fout;
  logic [N-1:0] spk;
  int checks = 0, failures = 0, nspk = 0, stops = 0;
  flit_t out_q [$];
  core_model m;

  pe #(.N(N), .N_PRE(N)) dut (.clk, .rst_n, .i_my_addr(ME), .i_tick(tick), .o_done(done),
    .i_flit(fin), .i_flit_valid(fin_v), .o_stop(ostop), .o_flit(fout), .o_flit_valid(fout_v),
    .i_stop(istop), .o_parity_err(perr), .o_spike_out(spk));

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
  always_ff @(posedge clk) begin
    if (fout_v && !istop) out_q.push_back(fout);
    if (fout_v && istop) stops++;
  end
  always @(negedge clk) istop <= 1'($urandom % 3 == 0);

  task automatic send(flit_t f);
    @(negedge clk); fin = f; fin_v = 1; #2;
    while (ostop) begin @(negedge clk); #2; end
    @(posedge clk); #1 fin_v = 0;
  endtask
  function automatic flit_t cfg(mem_type_e mt, logic [18:0] d);
    return mk_mem(ME, mt, 1'b1, d);
  endfunction

  initial begin
    bit in_spk [], rem [], out_spk [];
    fin = '0; fin_v = 0; tick = 0;
    m = new(N, N, 1, 2, -16);
    in_spk = new[N]; rem = new[N];
    repeat (2) @(negedge clk); rst_n = 1;
    send(cfg(MEM_SPARSE, {2'd0, 4'd0, HOST, 1'b1, 1'b0, 2'd0}));   // host -> conn 0
    send(cfg(MEM_SPARSE, {2'd1, 7'd0, 2'd0, 8'd0}));                // base 0
    send(cfg(MEM_SPARSE, {2'd2, 5'd0, 2'd1, 1'b1, HOST}));          // spikes to host
    send(cfg(MEM_OTHER, {3'd0, 16'd0}));
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        m.w[r][c] = $urandom % 40;
        send(cfg(MEM_WEIGHT, 19'(m.w[r][c])));
      end
    send(cfg(MEM_OTHER, {3'd2, 16'd0}));
    for (int c = 0; c < N; c++) begin
      m.thr[c] = 50 + $urandom % 50;
      send(cfg(MEM_OTHER, {3'd1, 16'(m.thr[c])}));
    end
    for (int t = 0; t < 30; t++) begin
      for (int i = 0; i < N; i++) begin in_spk[i] = ($urandom % 3 == 0); rem[i] = 0; end
      for (int i = 0; i < N; i++) if (in_spk[i]) send(mk_spike(ME, HOST, 13'(i)));
      repeat (3) @(negedge clk);
      @(negedge clk); tick = 1; @(negedge clk); tick = 0;
      while (!done) @(negedge clk);
      repeat (6) @(negedge clk);
      m.step(in_spk, rem, out_spk);
      begin
        int e;
        e = 0;
        for (int j = 0; j < N; j++) if (out_spk[j]) begin
          check(e < out_q.size() && out_q[e] == mk_spike(HOST, ME, 13'(j)),
                $sformatf("t%0d spike flit of neuron %0d", t, j));
          e++; nspk++;
        end
        check(e == out_q.size(), $sformatf("t%0d flit count %0d exp %0d", t, out_q.size(), e));
      end
      out_q.delete();
    end
    check(nspk > 0 && stops > 0, "spikes sent and stops happened");
    check(!perr, "no parity error");
    $display("spikes=%0d stops=%0d", nspk, stops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
