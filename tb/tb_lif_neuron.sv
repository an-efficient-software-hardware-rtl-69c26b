// tb_lif_neuron: drives random time steps (weighted inputs, leak, fire) into
// one neuron and compares spike, membrane potential and threshold with an
// integer model of V(t) = V(t-1) + sum(w) - LEAK, fire at V >= threshold,
// reset to 0, REFRAC silent steps, and the adaptive threshold when learning.
module tb_lif_neuron;
  localparam int LEAK = 3, REFRAC = 2, THETA_PLUS = 5, TH_DECAY = 1;
  logic clk = 0, rst_n = 1;
  logic thres_we, learn, valid, leak, fire;
  logic signed [15:0] thres;
  logic signed [7:0] w;
  logic spike;
  logic signed [15:0] v_o, th_o;
  int checks = 0, failures = 0;
  int fires = 0, refrac_blocks = 0;

  lif_neuron #(.LEAK(LEAK), .REFRAC(REFRAC), .THETA_PLUS(THETA_PLUS), .TH_DECAY(TH_DECAY)) dut (
    .clk, .rst_n, .i_thres_we(thres_we), .i_thres(thres), .i_learn(learn), .i_valid(valid),
    .i_wspike(w), .i_leak(leak), .i_fire(fire), .o_spike(spike), .o_V(v_o), .o_thres(th_o));

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

  function automatic int sat(int x);
    return x > 32767 ? 32767 : (x < -32768 ? -32768 : x);
  endfunction

  int mv, mth, mbase, mrc;
  bit mspk;

  initial begin
    thres_we = 0; learn = 0; valid = 0; leak = 0; fire = 0; thres = 0; w = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); thres_we = 1; thres = 100; @(negedge clk); thres_we = 0;
    mv = 0; mth = 100; mbase = 100; mrc = 0;
    for (int step = 0; step < 300; step++) begin
      learn = (step >= 150);
      for (int k = 0; k < ($urandom % 6); k++) begin
        valid = 1; w = 8'($signed($urandom % 120) - 30);
        @(negedge clk);
        if (mrc == 0) mv = sat(mv + w); else refrac_blocks++;
      end
      valid = 0; leak = 1; @(negedge clk); leak = 0;
      if (mrc == 0) mv = sat(mv - LEAK);
      check(v_o == mv, $sformatf("step %0d V %0d exp %0d", step, v_o, mv));
      fire = 1; @(negedge clk); fire = 0;
      if (mrc == 0 && mv >= mth) begin
        mspk = 1; mv = 0; mrc = REFRAC; fires++;
        if (learn) mth = mth + THETA_PLUS;
      end else begin
        mspk = 0;
        if (mrc > 0) mrc--;
        if (learn && mth > mbase) mth = (mth - mbase > TH_DECAY) ? mth - TH_DECAY : mbase;
      end
      check(spike == mspk, $sformatf("step %0d spike %0d exp %0d", step, spike, mspk));
      check(v_o == mv, "V after fire");
      check(th_o == mth, $sformatf("step %0d thres %0d exp %0d", step, th_o, mth));
    end
    check(fires > 10, "neuron fired");
    check(refrac_blocks > 0, "refractory blocked inputs");
    $display("fires=%0d refractory_blocked_inputs=%0d", fires, refrac_blocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
