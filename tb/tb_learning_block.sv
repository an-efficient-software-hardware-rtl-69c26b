// tb_learning_block: random pre/post spike histories and weights; the block
// runs on a calculating step and the weight memory (modelled here with the
// one-cycle read latency of the real one) must end equal to a reference:
// for every post neuron that fired at tc, +1 (saturating at WMAX) for each
// input that fired in tc-WIN..tc, then -1 (saturating at WMIN) for each input
// that fired in tc+1..tc+WIN. Also checks that a step without post spikes is
// skipped within 3 cycles, and the cycle count of a run.
module tb_learning_block;
  localparam int N = 8, ROWS = 8, DEPTH = 8, WIN = 2, WMIN = 0, WMAX = 127;
  logic clk = 0, rst_n = 1;
  logic start, busy, done, rd_en, wr_en;
  logic [2:0] tc, pre_slot, post_slot;
  logic [ROWS-1:0] pre_mem [DEPTH];
  logic [N-1:0] post_mem [DEPTH];
  logic [5:0] a0, a1;
  logic [7:0] d0, d1;
  logic [7:0] wmem [64];
  int model [ROWS][N];
  int checks = 0, failures = 0, skips = 0, runs = 0;

  learning_block #(.N(N), .ROWS(ROWS), .DEPTH(DEPTH), .WIN(WIN), .WMIN(WMIN), .WMAX(WMAX)) dut (
    .clk, .rst_n, .i_start(start), .i_tc_slot(tc), .o_busy(busy), .o_done(done),
    .o_pre_slot(pre_slot), .i_pre_data(pre_mem[pre_slot]), .o_post_slot(post_slot),
    .i_post_data(post_mem[post_slot]), .o_rd_en(rd_en), .o_addr_0(a0), .i_data_0(d0),
    .o_wr_en(wr_en), .o_addr_1(a1), .o_data_1(d1));

  always_ff @(posedge clk) begin
    if (rd_en) d0 <= wmem[a0];
    if (wr_en) wmem[a1] <= d1;
  end

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

  initial begin
    start = 0; tc = 0; d0 = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int cyc, exp_cyc, nb, na, np;
      logic [ROWS-1:0] bef, aft;
      for (int s = 0; s < DEPTH; s++) begin
        pre_mem[s]  = 8'($urandom) & 8'($urandom);
        post_mem[s] = (t % 5 == 0) ? '0 : 8'($urandom) & 8'($urandom);
      end
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < N; c++) begin
          model[r][c] = (t % 2) ? ($urandom % 6) : (120 + $urandom % 8);   // near both bounds
          wmem[r * N + c] = 8'(model[r][c]);
        end
      tc = 3'($urandom);
      bef = '0; aft = '0;
      for (int k = -WIN; k <= 0; k++)  bef |= pre_mem[3'(int'(tc) + k)];
      for (int k = 1; k <= WIN; k++)   aft  |= pre_mem[3'(int'(tc) + k)];
      nb = $countones(bef); na = $countones(aft); np = $countones(post_mem[tc]);
      for (int j = 0; j < N; j++) if (post_mem[tc][j]) begin
        for (int i = 0; i < ROWS; i++) if (bef[i]) model[i][j] = (model[i][j] + 1 > WMAX) ? WMAX : model[i][j] + 1;
        for (int i = 0; i < ROWS; i++) if (aft[i])  model[i][j] = (model[i][j] - 1 < WMIN) ? WMIN : model[i][j] - 1;
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      // idle->post->scan(2WIN+1)->per post neuron: 2 x (load + spikes + drain) + check
      exp_cyc = (np == 0) ? 1 : 2 + (2 * WIN + 1) + np * ((1 + nb + 1 + 1) + (1 + na + 1 + 1)) + np;
      check(cyc == exp_cyc, $sformatf("cycles %0d exp %0d", cyc, exp_cyc));
      if (np == 0) begin skips++; check(cyc <= 3, "skip when no post spike"); end
      else runs++;
      @(negedge clk);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < N; c++)
          check(int'(wmem[r * N + c]) == model[r][c], $sformatf("t%0d w[%0d][%0d]=%0d exp %0d", t, r, c, wmem[r * N + c], model[r][c]));
    end
    check(skips > 0 && runs > 0, "both skip and update happened");
    $display("runs=%0d skips=%0d", runs, skips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
