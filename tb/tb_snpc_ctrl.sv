// tb_snpc_ctrl: feeds the controller decoder status signals shaped like a
// real step (F forward spikes, L local and R remote recurrent spikes) and
// checks the phase order and the step latency: o_end rises 8 + L + R +
// (F+2, or 1 when F = 0) cycles after the clock edge that samples i_start.
module tb_snpc_ctrl;
  logic clk = 0, rst_n = 1, start;
  logic fwd_valid, fwd_vq, rec_valid;
  logic fwd_load, fwd_run, rec_load, rec_local, rec_run, leak, fire, o_end, busy;
  int checks = 0, failures = 0;
  int fcnt, rcnt, vq_d;

  snpc_ctrl dut (.clk, .rst_n, .i_start(start), .i_fwd_valid(fwd_valid), .i_fwd_valid_q(fwd_vq),
    .i_rec_valid(rec_valid), .o_fwd_load(fwd_load), .o_fwd_run(fwd_run), .o_rec_load(rec_load),
    .o_rec_local(rec_local), .o_rec_run(rec_run), .o_leak(leak), .o_fire(fire), .o_end(o_end),
    .o_busy(busy));

  // decoder models: count down the spikes while running
  assign fwd_valid = fcnt > 0;
  assign rec_valid = rcnt > 0;
  assign fwd_vq    = vq_d != 0;

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

  int F, L, R;
  always_ff @(posedge clk) begin
    vq_d <= (fwd_run && fcnt > 0);
    if (fwd_load) fcnt <= F; else if (fwd_run && fcnt > 0) fcnt <= fcnt - 1;
    if (rec_load) rcnt <= rec_local ? L : R; else if (rec_run && rcnt > 0) rcnt <= rcnt - 1;
  end

  initial begin
    start = 0; fcnt = 0; rcnt = 0; vq_d = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int cyc, order;
      bit ok;
      cyc = 0; order = 0; ok = 1;
      F = $urandom % 10; L = $urandom % 5; R = $urandom % 5;
      @(negedge clk); start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!o_end) begin
        if (leak)  begin ok &= (order == 0) && (fcnt == 0) && (rcnt == 0); order = 1; if (!ok) $display("leak cyc%0d f%0d r%0d", cyc, fcnt, rcnt); end
        if (fire)  begin ok &= (order == 1); order = 2; end
        @(negedge clk); cyc++;
      end
      check(ok && order == 2, $sformatf("phase order F%0d L%0d R%0d ok%0d order%0d", F, L, R, ok, order));
      check(cyc == 8 + L + R + ((F > 0) ? F + 2 : 1),
            $sformatf("latency %0d F%0d L%0d R%0d", cyc, F, L, R));
      @(negedge clk);
      check(!busy, "idle after end");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
