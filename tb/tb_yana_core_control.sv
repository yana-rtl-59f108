// tb_yana_core_control: checks the clearing sweep after reset (every neuron
// address exactly once, in N_NEURONS cycles, done low meanwhile), that
// done_core follows the stages' idle signal, that a new timestep is taken
// over after one cycle (done low in between) and the bank select.
module tb_yana_core_control;
  import yana_pkg::*;
  localparam int NN = 32;
  logic clk = 0, reset = 1, stage_idle, wbank, clr_en, done_core;
  always #5 clk = ~clk;
  ts_t timestep, ts_q;
  logic [NEURON_W-1:0] clr_addr;
  int checks = 0, failures = 0;
  bit seen [NN];

  yana_core_control #(.N_NEURONS(NN)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_clr;
    timestep = 0; stage_idle = 1;
    repeat (2) @(posedge clk);
    @(negedge clk) reset = 0;
    n_clr = 0;
    for (int k = 0; k < NN; k++) seen[k] = 0;
    while (clr_en) begin
      check(!done_core, "not done while clearing");
      check(!seen[clr_addr], "address cleared once");
      seen[clr_addr] = 1;
      n_clr++;
      @(negedge clk);
    end
    check(n_clr == NN, $sformatf("sweep length %0d", n_clr));
    for (int k = 0; k < NN; k++) check(seen[k], "every address cleared");
    check(done_core, "done after sweep");
    for (int step = 1; step < 40; step++) begin
      @(negedge clk);
      stage_idle = 1;
      #1 check(done_core, "done when idle");
      @(negedge clk);
      timestep = ts_t'(step);
      #1 check(!done_core, "not done before timestep taken over");
      @(negedge clk);
      check(ts_q == ts_t'(step) && wbank == !ts_q[0], "timestep registered, bank select");
      check(done_core, "done again");
      stage_idle = 0;
      #1 check(!done_core, "busy stage blocks done");
      repeat ($urandom_range(0, 3)) @(negedge clk);
      check(!done_core, "still busy");
    end
    @(negedge clk); stage_idle = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
