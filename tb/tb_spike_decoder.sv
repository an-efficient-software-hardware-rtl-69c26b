// tb_spike_decoder: checks that the decoder emits the set bits of random
// arrays in ascending order, one per cycle, that the delayed valid follows one
// cycle later, that i_ready low holds the output, and the paper's example
// "1010" -> 1, 3.
module tb_spike_decoder;
  localparam int N = 32;
  logic clk = 0, rst_n = 1;
  logic load, ready;
  logic [N-1:0] arr;
  logic [$clog2(N)-1:0] idx;
  logic valid, vq, empty;
  int checks = 0, failures = 0;

  spike_decoder #(.N(N)) dut (.clk, .rst_n, .i_load(load), .i_spike_array(arr), .i_ready(ready),
    .o_index(idx), .o_valid(valid), .o_valid_q(vq), .o_empty(empty));

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

  task automatic run(logic [N-1:0] a, bit stall);
    int exp [$];
    int cycles = 0;
    for (int i = 0; i < N; i++) if (a[i]) exp.push_back(i);
    @(negedge clk); load = 1; arr = a; ready = 1;
    @(negedge clk); load = 0;
    check(empty == (a == 0), "empty after load");
    foreach (exp[k]) begin
      if (stall && k == 1) begin
        ready = 0;
        @(negedge clk);
        check(valid && idx == exp[k], "held while not ready");
        ready = 1;
      end
      check(valid && idx == exp[k], $sformatf("index %0d exp %0d got %0d", k, exp[k], idx));
      @(negedge clk);
      check(vq == 1'b1, "delayed valid");
      cycles++;
    end
    check(!valid && empty, "empty at end");
    check(cycles == exp.size(), "one index per cycle");
  endtask

  initial begin
    load = 0; ready = 0; arr = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(32'b1010, 0);
    for (int t = 0; t < 40; t++) run($urandom, t % 3 == 0);
    run('0, 0);
    run('1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
