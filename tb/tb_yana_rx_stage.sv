// tb_yana_rx_stage: random traffic on the external and feedback inputs with
// random downstream backpressure. Checks that every accepted event comes out
// exactly once and in order per source, that feedback has priority, and that
// `enable` low blocks both inputs.
module tb_yana_rx_stage;
  import yana_pkg::*;
  logic clk = 0, rst = 1, enable;
  always #5 clk = ~clk;
  logic ext_valid, ext_ready, fb_valid, fb_ready, out_valid, out_ready, idle;
  event_t ext_event, fb_event, out_event;
  int checks = 0, failures = 0;
  event_t exp_q[$];
  int n_conflict = 0, n_disabled = 0;
  bit ext_acc = 0, fb_acc = 0;

  yana_rx_stage dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ext_valid = 0; fb_valid = 0; out_ready = 0; enable = 1;
    ext_event = '0; fb_event = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      enable    = ($urandom_range(0, 19) != 0);
      out_ready = ($urandom_range(0, 3) != 0);
      if (!ext_valid || ext_acc) begin
        ext_valid = $urandom_range(0, 1);
        ext_event = event_t'({2'd0, 27'($urandom)});
      end
      if (!fb_valid || fb_acc) begin
        fb_valid = $urandom_range(0, 2) == 0;
        fb_event = event_t'({2'd1, 27'($urandom)});
      end
      #1;
      if (!enable) begin
        n_disabled++;
        check(!ext_ready && !fb_ready, "enable low blocks inputs");
      end
      if (fb_valid && ext_valid) begin
        n_conflict++;
        check(!ext_ready, "feedback has priority");
      end
      check(idle == !out_valid, "idle");
      @(posedge clk);
      if (out_valid && out_ready) begin
        check(exp_q.size() > 0 && out_event == exp_q[0], "output order");
        if (exp_q.size() > 0) void'(exp_q.pop_front());
      end
      fb_acc  = fb_valid && fb_ready;
      ext_acc = ext_valid && ext_ready;
      if (fb_valid && fb_ready) exp_q.push_back(fb_event);
      else if (ext_valid && ext_ready) exp_q.push_back(ext_event);
    end
    check(n_conflict > 100 && n_disabled > 50, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
