// tb_address_generator: set, step and wrap of the burst address counter.
module tb_address_generator;
  logic clk = 0, rst_n = 1, set, step;
  logic [7:0] set_addr, addr;
  int checks = 0, failures = 0, model;

  address_generator #(.AW(8)) dut (.clk, .rst_n, .i_set(set), .i_set_addr(set_addr),
    .i_step(step), .o_addr(addr));
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // asynchronous reset needs an edge
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    set = 0; step = 0; set_addr = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    model = 0;
    check(addr == 0, "reset");
    for (int t = 0; t < 600; t++) begin
      set = ($urandom % 50 == 0); step = $urandom % 2; set_addr = 8'($urandom);
      @(negedge clk);
      if (set) model = set_addr; else if (step) model = (model + 1) % 256;
      check(addr == 8'(model), "address");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
