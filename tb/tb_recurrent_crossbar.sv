// tb_recurrent_crossbar: every index, local and remote: the fixed weight must
// reach every neuron except the firing one (local) or all of them (remote).
module tb_recurrent_crossbar;
  localparam int N = 16;
  logic valid, local_src;
  logic [3:0] idx;
  logic [N-1:0] ov;
  logic signed [7:0] w;
  int checks = 0, failures = 0;

  recurrent_crossbar #(.N(N), .W(8), .W_REC(-20)) dut (.i_valid(valid), .i_local(local_src),
    .i_index(idx), .o_valid(ov), .o_weight(w));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int v = 0; v < 2; v++)
      for (int l = 0; l < 2; l++)
        for (int i = 0; i < N; i++) begin
          logic [N-1:0] exp;
          valid = v[0]; local_src = l[0]; idx = 4'(i);
          #1;
          exp = v ? (l ? ~(N'(1) << i) : '1) : '0;
          check(ov == exp, $sformatf("v%0d l%0d i%0d", v, l, i));
          check(w == -20, "weight");
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
