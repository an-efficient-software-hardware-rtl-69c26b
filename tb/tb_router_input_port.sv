// tb_router_input_port: FIFO order, stop when full, and the dimension-order
// route (X, then Y, then Z, Local at the destination, West for the host at
// node 0) for random destinations seen from router (1,1,1).
module tb_router_input_port;
  import snn_pkg::*;
  logic clk = 0, rst_n = 1;
  flit_t fin, head;
  logic valid, stop, pop, hv;
  port_e route;
  pe_addr_t me;
  int checks = 0, failures = 0;
  flit_t q [$];

  router_input_port #(.DEPTH(4)) dut (.clk, .rst_n, .i_my_addr(me), .i_flit(fin), .i_valid(valid),
    .o_stop(stop), .i_pop(pop), .o_head(head), .o_head_valid(hv), .o_route(route));

  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // asynchronous reset needs an edge
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic port_e ref_route(pe_addr_t d, pe_addr_t m);
    bit host = (d == 9'h1FF);
    if (host) d = 0;
    if (d[2:0] > m[2:0]) return P_E;
    if (d[2:0] < m[2:0]) return P_W;
    if (d[5:3] > m[5:3]) return P_N;
    if (d[5:3] < m[5:3]) return P_S;
    if (d[8:6] > m[8:6]) return P_U;
    if (d[8:6] < m[8:6]) return P_D;
    return host ? P_W : P_L;
  endfunction

  int stops = 0;
  bit push_m, pop_m;
  initial begin
    valid = 0; pop = 0; fin = '0; me = mk_addr(1, 1, 1);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      valid = ($urandom % 3 != 0);
      fin = mk_spike(9'($urandom % 3) | (9'($urandom % 3) << 3) | (9'($urandom % 3) << 6), 9'd5, 13'(t));
      if (t % 97 == 0) fin = mk_spike(9'h1FF, 9'd5, 13'(t));
      pop = ($urandom % 3 == 0);
      if (t % 200 == 100) me = (me == 0) ? mk_addr(1, 1, 1) : pe_addr_t'(0);
      #1;
      if (hv) begin
        check(head == q[0], $sformatf("FIFO order t%0d size%0d cnt%0d", t, q.size(), dut.count));
        check(route == ref_route(f_dest(head), me), "route");
      end
      check(stop == (q.size() == 4), "stop when full");
      if (stop) stops++;
      push_m = valid && !stop;
      pop_m  = pop && q.size() > 0;
      @(negedge clk);
      if (pop_m) void'(q.pop_front());
      if (push_m) q.push_back(fin);
    end
    check(stops > 0, "buffer became full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
