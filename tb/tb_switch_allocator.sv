// tb_switch_allocator: random requests; every grant must match a request for
// that output, at most one per output, none to a stopped output, every
// requested free output must be granted (work conserving), and round robin:
// two inputs that keep requesting one output alternate.
module tb_switch_allocator;
  import snn_pkg::*;
  logic clk = 0, rst_n = 1;
  logic [6:0] req, ostop, pop;
  port_e route [7];
  logic [6:0][6:0] grant;
  int checks = 0, failures = 0;

  switch_allocator dut (.clk, .rst_n, .i_req(req), .i_route(route), .i_out_stop(ostop),
    .o_grant(grant), .o_pop(pop));
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
  initial begin
    req = 0; ostop = 0;
    for (int i = 0; i < 7; i++) route[i] = P_L;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      req = 7'($urandom); ostop = 7'($urandom) & 7'($urandom);
      for (int i = 0; i < 7; i++) route[i] = port_e'($urandom % 7);
      #1;
      for (int o = 0; o < 7; o++) begin
        bit any_req;
        any_req = 0;
        for (int i = 0; i < 7; i++) begin
          if (grant[o][i]) check(req[i] && route[i] == port_e'(o), "grant matches request");
          any_req |= req[i] && route[i] == port_e'(o);
        end
        check($countones(grant[o]) <= 1, "one grant per output");
        check(!(ostop[o] && grant[o] != 0), "no grant to stopped output");
        check((grant[o] != 0) == (any_req && !ostop[o]), "work conserving");
      end
      @(negedge clk);
    end
    // fairness: inputs 2 and 5 both want output E
    req = 7'b0100100; ostop = 0; route[2] = P_E; route[5] = P_E;
    begin
      int last = -1;
      for (int t = 0; t < 10; t++) begin
        int g;
        #1; g = grant[P_E][2] ? 2 : 5;
        check(g != last, "round robin alternates");
        last = g;
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
