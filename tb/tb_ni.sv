// tb_ni: network interface with 16 neurons. Programs the address tables,
// destination table and thresholds with memory-access flits, then checks:
// spike flits become the right pre-synaptic index (base + neuron ID) or a
// recurrent index, unmapped sources and bad parity are dropped, weight
// writes and reads use the running burst address, a read returns a reply flit
// with this PE's address and the data, a busy memory stalls the input (stop),
// and an output spike array leaves as one flit per spike and destination in
// ascending neuron order under random output stops.
module tb_ni;
  import snn_pkg::*;
  localparam int N = 16;
  localparam pe_addr_t ME = 9'h049, HOST = 9'h1FF;
  logic clk = 0, rst_n = 1;
  flit_t fin, fout;
  logic fin_v, ostop, fout_v, istop;
  logic set, rset, send_start, send_busy, w_en, r_en, mem_busy, th_we, learn, perr;
  logic [3:0] set_idx, rset_idx, th_idx;
  logic [N-1:0] out_arr;
  logic [7:0] addr, w_data, r_data;
  logic signed [15:0] th;
  int checks = 0, failures = 0;
  int set_q [$], rset_q [$], w_q [$], th_q [$];
  flit_t out_q [$];
  logic [7:0] mem [256];
  int stalls = 0, perrs = 0;

  ni #(.N(N), .N_PRE(N)) dut (.clk, .rst_n, .i_my_addr(ME), .i_flit(fin), .i_flit_valid(fin_v),
    .o_stop(ostop), .o_flit(fout), .o_flit_valid(fout_v), .i_stop(istop),
    .o_set(set), .o_set_idx(set_idx), .o_rset(rset), .o_rset_idx(rset_idx),
    .i_send_start(send_start), .i_out_array(out_arr), .o_send_busy(send_busy),
    .o_w_en(w_en), .o_r_en(r_en), .o_addr(addr), .o_w_data(w_data), .i_r_data(r_data),
    .i_mem_busy(mem_busy), .o_th_we(th_we), .o_th_idx(th_idx), .o_th(th), .o_learn(learn),
    .o_parity_err(perr));

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // asynchronous reset needs an edge
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // memory model and monitors
  always_ff @(posedge clk) begin
    if (r_en) r_data <= mem[addr];
    if (w_en) begin mem[addr] <= w_data; w_q.push_back({addr, w_data}); end
    if (set)  set_q.push_back(set_idx);
    if (rset) rset_q.push_back(rset_idx);
    if (th_we) th_q.push_back({th_idx, th});
    if (fout_v && !istop) out_q.push_back(fout);
    if (perr) perrs++;
    if (fin_v && ostop) stalls++;
  end

  task automatic send(flit_t f);
    @(negedge clk); fin = f; fin_v = 1; #2;
    while (ostop) begin @(negedge clk); #2; end
    @(posedge clk); #1 fin_v = 0;
  endtask
  function automatic flit_t cfg(mem_type_e mt, logic [18:0] d);
    return mk_mem(ME, mt, 1'b1, d);
  endfunction

  initial begin
    int base [4];
    fin = '0; fin_v = 0; istop = 0; send_start = 0; out_arr = 0; mem_busy = 0; r_data = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // tables: source 0x011 -> conn 1 (base 4), 0x012 -> conn 2 recurrent (base 0), 0x013 unmapped
    base[1] = 4; base[2] = 0;
    send(cfg(MEM_SPARSE, {2'd1, 7'd0, 2'd1, 8'd4}));
    send(cfg(MEM_SPARSE, {2'd1, 7'd0, 2'd2, 8'd0}));
    send(cfg(MEM_SPARSE, {2'd0, 4'd0, 9'h011, 1'b1, 1'b0, 2'd1}));
    send(cfg(MEM_SPARSE, {2'd0, 4'd0, 9'h012, 1'b1, 1'b1, 2'd2}));
    // destinations: entry 0 -> 0x002, entry 2 -> host
    send(cfg(MEM_SPARSE, {2'd2, 5'd0, 2'd0, 1'b1, 9'h002}));
    send(cfg(MEM_SPARSE, {2'd2, 5'd0, 2'd2, 1'b1, HOST}));
    // spikes
    for (int k = 0; k < 20; k++) begin
      int nid;
      nid = $urandom % 12;
      send(mk_spike(ME, 9'h011, 13'(nid)));
      send(mk_spike(ME, 9'h012, 13'(nid)));
      send(mk_spike(ME, 9'h013, 13'(nid)));
      repeat (2) @(negedge clk);
      check(set_q.size() == 1 && set_q[0] == nid + 4, "forward index = base + nid");
      check(rset_q.size() == 1 && rset_q[0] == nid, "recurrent index");
      set_q.delete(); rset_q.delete();
    end
    // bad parity is dropped
    begin
      flit_t bad;
      bad = mk_spike(ME, 9'h011, 13'd3); bad[32] = ~bad[32];
      send(bad);
      repeat (2) @(negedge clk);
      check(set_q.size() == 0 && perrs == 1, "bad parity dropped");
    end
    // weight burst write from address 0x20, with the memory busy for a while
    send(cfg(MEM_OTHER, {3'd0, 16'h0020}));
    fork
      begin mem_busy = 1; repeat (6) @(negedge clk); mem_busy = 0; end
      for (int k = 0; k < 8; k++) send(cfg(MEM_WEIGHT, 19'(8'(k * 7 + 1))));
    join
    repeat (2) @(negedge clk);
    check(w_q.size() == 8, $sformatf("eight weight writes %0d", w_q.size()));
    foreach (w_q[k]) check(w_q[k] == {8'(8'h20 + k), 8'(k * 7 + 1)}, "burst address and data");
    check(stalls > 0, "input stalled while memory busy");
    // read back two words from 0x21
    send(cfg(MEM_OTHER, {3'd0, 16'h0021}));
    send(mk_mem(ME, MEM_WEIGHT, 1'b0, 19'(HOST)));
    send(mk_mem(ME, MEM_WEIGHT, 1'b0, 19'(HOST)));
    repeat (10) @(negedge clk);
    check(out_q.size() == 2, $sformatf("two replies %0d", out_q.size()));
    for (int k = 0; k < 2 && k < out_q.size(); k++) begin
      check(f_dest(out_q[k]) == HOST && f_is_mem(out_q[k]) && f_mtype(out_q[k]) == MEM_REPLY, "reply header");
      check(f_data(out_q[k]) == {ME, 2'b00, 8'((k + 1) * 7 + 1)}, "reply data: source address and weight");
      check(f_parity_ok(out_q[k]), "reply parity");
    end
    out_q.delete();
    // thresholds: pointer 3, then three values
    send(cfg(MEM_OTHER, {3'd2, 16'd3}));
    for (int k = 0; k < 3; k++) send(cfg(MEM_OTHER, {3'd1, 16'(100 + k)}));
    send(cfg(MEM_OTHER, {3'd3, 16'd1}));
    repeat (2) @(negedge clk);
    check(th_q.size() == 3, "three thresholds");
    foreach (th_q[k]) check(th_q[k] == {4'(3 + k), 16'(100 + k)}, "threshold pointer and value");
    check(learn == 1'b1, "learn enable");
    // output spikes with random stops
    for (int r = 0; r < 5; r++) begin
      logic [N-1:0] a;
      int e;
      a = 16'($urandom);
      @(negedge clk); out_arr = a; send_start = 1; @(negedge clk); send_start = 0;
      while (send_busy || fout_v) begin istop = 1'($urandom); @(negedge clk); end
      istop = 0; @(negedge clk);
      check(out_q.size() == 2 * $countones(a), $sformatf("two flits per spike %0d %0d", out_q.size(), $countones(a)));
      e = 0;
      for (int i = 0; i < N; i++) if (a[i]) begin
        if (e + 1 < out_q.size()) begin
          check(out_q[e] == mk_spike(9'h002, ME, 13'(i)), "spike to entry 0");
          check(out_q[e + 1] == mk_spike(HOST, ME, 13'(i)), "spike to entry 2");
        end
        e += 2;
      end
      out_q.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
