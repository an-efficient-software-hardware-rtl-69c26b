// tb_router_crossbar: random one-hot grants; each output must carry the flit
// of its granted input and be valid exactly when granted.
module tb_router_crossbar;
  import snn_pkg::*;
  flit_t fin [7], fout [7];
  logic [6:0][6:0] grant;
  logic [6:0] ov;
  int checks = 0, failures = 0;

  router_crossbar dut (.i_flit(fin), .i_grant(grant), .o_flit(fout), .o_valid(ov));
  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    for (int t = 0; t < 300; t++) begin
      int sel [7];
      for (int i = 0; i < 7; i++) fin[i] = {13'($urandom), 32'($urandom)};
      for (int o = 0; o < 7; o++) begin
        sel[o] = $urandom % 8;
        grant[o] = (sel[o] < 7) ? 7'(1 << sel[o]) : '0;
      end
      #1;
      for (int o = 0; o < 7; o++) begin
        check(ov[o] == (sel[o] < 7), "valid");
        if (sel[o] < 7) check(fout[o] == fin[sel[o]], "data");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
