// tb_weight_sram: writes random weights one at a time, then checks whole-row
// reads and single-weight reads (one-cycle latency) against a model array.
module tb_weight_sram;
  localparam int ROWS = 16, N = 8, W = 8;
  logic clk = 0;
  logic rd_en, b_en, w_en;
  logic [3:0] rd_row;
  logic [6:0] b_addr, w_addr;
  logic [W-1:0] w_data, b_data;
  logic [N-1:0][W-1:0] rd_data;
  logic [W-1:0] model [ROWS][N];
  int checks = 0, failures = 0;

  weight_sram #(.ROWS(ROWS), .N(N), .W(W)) dut (.clk, .i_rd_en(rd_en), .i_rd_row(rd_row),
    .o_rd_data(rd_data), .i_b_en(b_en), .i_b_addr(b_addr), .o_b_data(b_data),
    .i_w_en(w_en), .i_w_addr(w_addr), .i_w_data(w_data));

  always #5 clk = ~clk;
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
    rd_en = 0; b_en = 0; w_en = 0; rd_row = 0; b_addr = 0; w_addr = 0; w_data = 0;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < N; c++) begin
        @(negedge clk); w_en = 1; w_addr = 7'({r[3:0], c[2:0]}); w_data = 8'($urandom);
        model[r][c] = w_data;
      end
    @(negedge clk); w_en = 0;
    for (int r = 0; r < ROWS; r++) begin
      rd_en = 1; rd_row = 4'(r);
      @(negedge clk); rd_en = 0;
      for (int c = 0; c < N; c++) check(rd_data[c] == model[r][c], $sformatf("row %0d col %0d", r, c));
    end
    for (int k = 0; k < 50; k++) begin
      int r, c;
      r = $urandom % ROWS; c = $urandom % N;
      b_en = 1; b_addr = 7'({r[3:0], c[2:0]});
      @(negedge clk); b_en = 0;
      check(b_data == model[r][c], "single read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
