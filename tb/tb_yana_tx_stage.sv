// tb_yana_tx_stage: random packets with random destination cores and random
// backpressure on both exits. Checks that packets for CORE_ID go to the
// feedback path, all others to the external output, each exactly once and in
// order, with stable data while stalled.
module tb_yana_tx_stage;
  import yana_pkg::*;
  localparam logic [1:0] ID = 2'd1;
  logic clk = 0, rst = 1, enable;
  always #5 clk = ~clk;
  logic in_valid, in_ready, fb_valid, fb_ready, ext_valid, ext_ready, idle;
  event_t in_event, fb_event, ext_event;
  int checks = 0, failures = 0;
  event_t q_fb[$], q_ext[$];
  int n_fb = 0, n_ext = 0;
  bit in_acc = 0;

  yana_tx_stage #(.CORE_ID(ID)) dut (.*);

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
    in_valid = 0; fb_ready = 0; ext_ready = 0; enable = 1; in_event = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      enable    = ($urandom_range(0, 19) != 0);
      fb_ready  = ($urandom_range(0, 3) != 0);
      ext_ready = ($urandom_range(0, 3) != 0);
      if (!in_valid || in_acc) begin
        in_valid = $urandom_range(0, 3) != 0;
        in_event = event_t'($urandom);
      end
      #1;
      check(!(fb_valid && ext_valid), "one exit at a time");
      @(posedge clk);
      if (fb_valid && fb_ready) begin
        n_fb++;
        check(q_fb.size() > 0 && fb_event == q_fb[0] && fb_event.core == ID, "feedback packet");
        if (q_fb.size() > 0) void'(q_fb.pop_front());
      end
      if (ext_valid && ext_ready) begin
        n_ext++;
        check(q_ext.size() > 0 && ext_event == q_ext[0] && ext_event.core != ID, "external packet");
        if (q_ext.size() > 0) void'(q_ext.pop_front());
      end
      in_acc = in_valid && in_ready;
      if (in_acc) begin
        if (in_event.core == ID) q_fb.push_back(in_event);
        else q_ext.push_back(in_event);
      end
    end
    check(n_fb > 200 && n_ext > 600, "both exits used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
