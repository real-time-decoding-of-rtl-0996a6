// tb_window_ctrl: drives the decoder controller with a modelled detector
// window (a count of pending windows) and a modelled decoder that finishes
// a random number of clocks after start with a random iteration count and
// success flag. Checks: one decoder start per window, ack and frame update
// exactly once per decode and only after done, no start while a decode is
// running, and the statistics counters.
module tb_window_ctrl;
  import relay_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, win_valid, win_ack, dec_start, dec_done = 0, dec_success = 0;
  logic [IT_W-1:0] dec_iters = 0;
  logic frame_upd, idle;
  logic [31:0] n_windows, n_converged, n_iters;
  int checks = 0, failures = 0;
  int pending = 0, running = 0, starts = 0, acks = 0, exp_conv = 0, exp_it = 0, done_seen = 0;

  window_ctrl dut (.*);
  always #5 clk = ~clk;
  assign win_valid = (pending > 0);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // decoder model
  initial begin
    forever begin
      @(posedge clk);
      if (dec_start) begin
        int d;
        checks++;
        if (running) begin failures++; $display("start while running"); end
        running = 1; starts++;
        d = $urandom_range(1, 20);
        repeat (d) @(posedge clk);
        #1 dec_done = 1; dec_success = 1'($urandom_range(0, 1)); dec_iters = IT_W'($urandom_range(0, 99));
        exp_conv += dec_success; exp_it += dec_iters; done_seen++;
        @(posedge clk); #1 dec_done = 0; running = 0;
      end
    end
  end

  always @(posedge clk) if (rst_n && win_ack) begin
    checks++;
    if (!frame_upd || acks + 1 != done_seen) begin failures++; $display("ack without matching done"); end
    acks++; pending--;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      pending++;
      repeat ($urandom_range(0, 30)) @(negedge clk);
    end
    wait (pending == 0);
    repeat (5) @(posedge clk);
    checks++; if (starts != 40 || acks != 40) begin failures++; $display("starts %0d acks %0d", starts, acks); end
    checks++; if (n_windows != 40) failures++;
    checks++; if (int'(n_converged) != exp_conv) failures++;
    checks++; if (int'(n_iters) != exp_it) failures++;
    checks++; if (!idle) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
