// tb_pe_ctrl: ticks the controller through 20 steps with random core, send
// and learning durations; checks the slot numbers, the clear/start pulse one
// cycle after the tick, the write/send/learn pulse with the core's end, and
// that o_done only returns when send and learning are both finished.
module tb_pe_ctrl;
  localparam int DEPTH = 8, WIN = 2;
  logic clk = 0, rst_n = 1;
  logic tick, done, clr, sstart, send_end, out_we, send_start, learn_start, send_busy, learn_busy;
  logic [2:0] cur, recv, prev, tcs;
  int checks = 0, failures = 0;

  pe_ctrl #(.DEPTH(DEPTH), .WIN(WIN)) dut (.clk, .rst_n, .i_tick(tick), .o_done(done),
    .o_cur_slot(cur), .o_recv_slot(recv), .o_prev_slot(prev), .o_tc_slot(tcs), .o_clr(clr),
    .o_snpc_start(sstart), .i_snpc_end(send_end), .o_out_we(out_we), .o_send_start(send_start),
    .o_learn_start(learn_start), .i_send_busy(send_busy), .i_learn_busy(learn_busy));

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
    tick = 0; send_end = 0; send_busy = 0; learn_busy = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 1; t <= 20; t++) begin
      int ds, dl;
      check(done, "done before tick");
      @(negedge clk); tick = 1; @(negedge clk); tick = 0;
      check(clr && sstart, "clear and start after tick");
      check(cur == 3'(t) && recv == 3'(t + 1) && prev == 3'(t - 1) && tcs == 3'(t - WIN), $sformatf("slots t%0d cur%0d recv%0d prev%0d tc%0d", t, cur, recv, prev, tcs));
      repeat (1 + $urandom % 5) begin @(negedge clk); check(!done && !out_we, "running"); end
      send_end = 1; #1;
      check(out_we && send_start && learn_start, "write, send and learn start with end");
      @(negedge clk); send_end = 0;
      ds = $urandom % 6; dl = $urandom % 6;
      send_busy = ds > 0; learn_busy = dl > 0;
      for (int k = 0; k < 6; k++) begin
        #1 check(!done || k > 0 && !send_busy && !learn_busy || k == 0 && ds == 0 && dl == 0 , "done only when idle");
        @(negedge clk);
        if (k + 1 >= ds) send_busy = 0;
        if (k + 1 >= dl) learn_busy = 0;
      end
      repeat (2) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
