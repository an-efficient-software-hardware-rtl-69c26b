// tb_address_lut: programs random table entries and checks the translation
// index = base[conn[src]] + neuron ID, the hit and recurrent flags, unmapped
// sources, and the destination table.
module tb_address_lut;
  logic clk = 0, rst_n = 1;
  logic t1_we, t1_valid, t1_rec, t2_we, d_we, d_valid;
  logic [8:0] t1_src, src, d_addr;
  logic [1:0] t1_conn, t2_conn, d_idx;
  logic [7:0] t2_base, index;
  logic [12:0] nid;
  logic hit, rec;
  logic [3:0] dv;
  logic [3:0][8:0] dest;
  int checks = 0, failures = 0;
  bit m_valid [512], m_rec [512];
  int m_conn [512], m_base [4], m_dv [4], m_d [4];

  address_lut dut (.clk, .rst_n, .i_t1_we(t1_we), .i_t1_src(t1_src), .i_t1_valid(t1_valid),
    .i_t1_rec(t1_rec), .i_t1_conn(t1_conn), .i_t2_we(t2_we), .i_t2_conn(t2_conn), .i_t2_base(t2_base),
    .i_d_we(d_we), .i_d_idx(d_idx), .i_d_valid(d_valid), .i_d_addr(d_addr),
    .i_src(src), .i_nid(nid), .o_hit(hit), .o_rec(rec), .o_index(index),
    .o_dest_valid(dv), .o_dest(dest));

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
    t1_we = 0; t2_we = 0; d_we = 0; t1_src = 0; t1_valid = 0; t1_rec = 0; t1_conn = 0;
    t2_conn = 0; t2_base = 0; d_idx = 0; d_valid = 0; d_addr = 0; src = 0; nid = 0;
    for (int i = 0; i < 512; i++) begin m_valid[i] = 0; m_rec[i] = 0; m_conn[i] = 0; end
    for (int i = 0; i < 4; i++) begin m_base[i] = 0; m_dv[i] = 0; m_d[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      @(negedge clk); t2_we = 1; t2_conn = 2'(k); t2_base = 8'($urandom); m_base[k] = t2_base;
      d_we = 1; d_idx = 2'(k); d_valid = 1'($urandom); d_addr = 9'($urandom);
      m_dv[k] = d_valid; m_d[k] = d_addr;
    end
    @(negedge clk); t2_we = 0; d_we = 0;
    for (int k = 0; k < 40; k++) begin
      @(negedge clk); t1_we = 1; t1_src = 9'($urandom); t1_valid = 1'($urandom % 4 != 0);
      t1_rec = 1'($urandom); t1_conn = 2'($urandom);
      m_valid[t1_src] = t1_valid; m_rec[t1_src] = t1_rec; m_conn[t1_src] = t1_conn;
    end
    @(negedge clk); t1_we = 0;
    for (int k = 0; k < 400; k++) begin
      src = 9'($urandom); nid = 13'($urandom % 256);
      #1;
      check(hit == m_valid[src], "hit");
      if (m_valid[src]) begin
        check(rec == m_rec[src], "rec");
        check(index == 8'(m_base[m_conn[src]] + nid), "index = base + nid");
      end
      @(negedge clk);
    end
    for (int k = 0; k < 4; k++) begin
      check(dv[k] == m_dv[k], "dest valid");
      check(dest[k] == 9'(m_d[k]), "dest addr");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
