// tb_spike_memory: random set / clear / write operations on a small ring of
// spike arrays, compared with a model after every cycle on both read ports.
module tb_spike_memory;
  localparam int N = 16, DEPTH = 4;
  logic clk = 0, rst_n = 1;
  logic clr, set, wr;
  logic [1:0] clr_slot, set_slot, wr_slot, rda, rdb;
  logic [3:0] set_idx;
  logic [N-1:0] wr_data, da, db;
  logic [N-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  spike_memory #(.N(N), .DEPTH(DEPTH)) dut (.clk, .rst_n, .i_clr(clr), .i_clr_slot(clr_slot),
    .i_set(set), .i_set_slot(set_slot), .i_set_idx(set_idx), .i_wr(wr), .i_wr_slot(wr_slot),
    .i_wr_data(wr_data), .i_rda_slot(rda), .o_rda_data(da), .i_rdb_slot(rdb), .o_rdb_data(db));

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
    clr = 0; set = 0; wr = 0; clr_slot = 0; set_slot = 0; wr_slot = 0; set_idx = 0; wr_data = 0;
    rda = 0; rdb = 0;
    for (int s = 0; s < DEPTH; s++) model[s] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      clr = ($urandom % 8 == 0); set = ($urandom % 2 == 0); wr = ($urandom % 10 == 0);
      clr_slot = 2'($urandom); set_slot = 2'($urandom); wr_slot = 2'($urandom);
      set_idx = 4'($urandom); wr_data = 16'($urandom);
      @(negedge clk);
      if (clr) model[clr_slot] = '0;
      if (set) model[set_slot][set_idx] = 1'b1;   // Spike_in |= 1 << idx
      if (wr)  model[wr_slot] = wr_data;
      clr = 0; set = 0; wr = 0;
      rda = 2'($urandom); rdb = 2'($urandom);
      #1;
      check(da == model[rda], "port a");
      check(db == model[rdb], "port b");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
