// tb_router: random traffic on all seven inputs of router (1,1,1) with random
// downstream stops. Every flit must leave exactly once, through the port the
// dimension-order rule gives, with flits of one input to one output in
// order; no flit may be offered to a stopped output. Counts back-pressure
// (stop) events on inputs and outputs.
module tb_router;
  import snn_pkg::*;
  logic clk = 0, rst_n = 1;
  flit_t fin [N_PORTS], fout [N_PORTS];
  logic [N_PORTS-1:0] iv, ostop, ov, istop;
  pe_addr_t me;
  int checks = 0, failures = 0;
  flit_t exp_q [N_PORTS][N_PORTS][$];   // [in][out]
  int sent = 0, recvd = 0, in_stops = 0, out_stops = 0;

  router dut (.clk, .rst_n, .i_my_addr(me), .i_flit(fin), .i_valid(iv), .o_stop(ostop),
    .o_flit(fout), .o_valid(ov), .i_stop(istop));

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // asynchronous reset needs an edge
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic port_e ref_route(pe_addr_t d, pe_addr_t m);
    if (d[2:0] > m[2:0]) return P_E;
    if (d[2:0] < m[2:0]) return P_W;
    if (d[5:3] > m[5:3]) return P_N;
    if (d[5:3] < m[5:3]) return P_S;
    if (d[8:6] > m[8:6]) return P_U;
    if (d[8:6] < m[8:6]) return P_D;
    return P_L;
  endfunction

  logic [N_PORTS-1:0] acc;
  initial begin
    iv = 0; istop = 0; me = mk_addr(1, 1, 1);
    for (int p = 0; p < N_PORTS; p++) fin[p] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      for (int p = 0; p < N_PORTS; p++) begin
        iv[p]  = (t < 2800) && ($urandom % 2 == 0);
        fin[p] = mk_spike(mk_addr($urandom % 3, $urandom % 3, $urandom % 3), 9'(p), 13'(t));
      end
      istop = (t < 2800) ? 7'($urandom) & 7'($urandom) : '0;
      #1;
      acc = iv & ~ostop;
      in_stops  += $countones(iv & ostop);
      out_stops += $countones(istop);
      for (int o = 0; o < N_PORTS; o++) if (ov[o]) begin
        int src;
        src = int'(f_src(fout[o]));
        check(!istop[o], "no flit into a stopped output");
        check(exp_q[src][o].size() > 0 && fout[o] == exp_q[src][o][0], $sformatf("flit order / port t%0d o%0d src%0d qs%0d got %h exp %h", t, o, src, exp_q[src][o].size(), fout[o], exp_q[src][o].size() ? exp_q[src][o][0] : 0));
        if (exp_q[src][o].size() > 0) void'(exp_q[src][o].pop_front());
        recvd++;
      end
      for (int p = 0; p < N_PORTS; p++) if (acc[p]) begin
        exp_q[p][int'(ref_route(f_dest(fin[p]), me))].push_back(fin[p]);
        sent++;
      end
      @(negedge clk);
    end
    check(sent == recvd, $sformatf("all delivered sent=%0d recvd=%0d", sent, recvd));
    check(in_stops > 0 && out_stops > 0, "back-pressure happened");
    $display("sent=%0d input_stops=%0d output_stops=%0d", sent, in_stops, out_stops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
