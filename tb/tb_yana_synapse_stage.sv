// tb_yana_synapse_stage: several timesteps of random events at full rate
// (one per cycle, with frequent repeats of the same neuron to exercise the
// bypass) into the write bank while the previous bank is drained through the
// hot-neuron and read-and-clear ports. Checks the hot list (each hit neuron
// exactly once, in order of first hit), every weight sum against a
// saturating reference model, the clearing of read sums, and the reset sweep.
module tb_yana_synapse_stage;
  import yana_pkg::*;
  localparam int NN = 16, NSY = 64;
  logic clk = 0, rst = 1, enable = 1, wbank = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, hot_valid, hot_ready, sum_rd_en, wr_en, clr_en, idle, bypass_hit;
  event_t in_event;
  logic [NEURON_W-1:0] hot_id, sum_rd_addr, clr_addr;
  sum_t sum_rd_data;
  logic [SYNAPSE_W-1:0] wr_addr;
  logic [WEIGHT_W-1:0] wr_data;
  int checks = 0, failures = 0, n_bypass = 0, n_sat = 0;
  logic signed [WEIGHT_W-1:0] w_m [NSY];
  longint sum_m [2][NN];
  int hot_m [2][$];

  yana_synapse_stage #(.N_NEURONS(NN), .N_SYNAPSES(NSY)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (bypass_hit) n_bypass++;

  localparam longint SMAX = (1 << (SUM_W - 1)) - 1;
  localparam longint SMIN = -(1 << (SUM_W - 1));

  // event driver for one timestep into bank b
  task automatic drive_events(input int b, input int n, input bit big);
    for (int k = 0; k < n; k++) begin
      event_t e;
      int nn, ss;
      nn = (k > 0 && $urandom_range(0, 2) == 0) ? int'(in_event.neuron) : $urandom_range(0, NN - 1);
      if (big) nn = 3;
      ss = $urandom_range(0, NSY - 1);
      e = '{core: 2'd1, neuron: NEURON_W'(nn), synapse: SYNAPSE_W'(ss)};
      @(negedge clk);
      in_valid = 1; in_event = e;
      check(in_ready, "one event per cycle");
      if (!hot_m[b].size() || !(nn inside {hot_m[b]})) hot_m[b].push_back(nn);
      sum_m[b][nn] = sum_m[b][nn] + longint'(w_m[ss]);
      if (sum_m[b][nn] > SMAX) begin sum_m[b][nn] = SMAX; n_sat++; end
      if (sum_m[b][nn] < SMIN) begin sum_m[b][nn] = SMIN; n_sat++; end
    end
    @(negedge clk); in_valid = 0;
  endtask

  // neuron-side drain of bank b
  task automatic drain(input int b);
    while (hot_m[b].size() > 0) begin
      int nn;
      @(negedge clk);
      check(hot_valid, "hot list not empty");
      nn = hot_m[b].pop_front();
      check(int'(hot_id) == nn, $sformatf("hot order exp %0d got %0d", nn, hot_id));
      hot_ready = 1; sum_rd_en = 1; sum_rd_addr = hot_id;
      @(negedge clk);
      hot_ready = 0; sum_rd_en = 0;
      check(longint'(sum_rd_data) == sum_m[b][nn], $sformatf("sum n=%0d exp %0d got %0d", nn, sum_m[b][nn], sum_rd_data));
      sum_m[b][nn] = 0;
    end
    @(negedge clk);
    check(!hot_valid, "hot list drained");
  endtask

  initial begin
    in_valid = 0; in_event = '0; hot_ready = 0; sum_rd_en = 0; sum_rd_addr = 0;
    wr_en = 0; wr_addr = 0; wr_data = 0; clr_en = 0; clr_addr = 0;
    for (int b = 0; b < 2; b++) for (int n = 0; n < NN; n++) sum_m[b][n] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    // reset sweep clears the (random) sum memories
    for (int n = 0; n < NN; n++) begin
      @(negedge clk); clr_en = 1; clr_addr = NEURON_W'(n);
    end
    for (int s = 0; s < NSY; s++) begin
      w_m[s] = (s == 5) ? 8'sd127 : WEIGHT_W'($urandom);
      @(negedge clk); clr_en = 0; wr_en = 1; wr_addr = SYNAPSE_W'(s); wr_data = w_m[s];
    end
    @(negedge clk); wr_en = 0;
    // timestep 0: fill bank 1 (wbank = !ts[0] -> ts=0 writes bank 1)
    wbank = 1;
    drive_events(1, 60, 0);
    repeat (3) @(negedge clk);
    check(idle, "idle after events");
    for (int ts = 1; ts < 8; ts++) begin
      int wb, rb;
      wb = (ts % 2 == 0) ? 1 : 0;
      rb = 1 - wb;
      @(negedge clk); wbank = wb[0];
      fork
        drive_events(wb, 40 + 10 * ts, 0);
        drain(rb);
      join
      repeat (3) @(negedge clk);
    end
    // saturation: many +127 into one neuron
    begin
      int wb = 1;
      @(negedge clk); wbank = 1;
      for (int k = 0; k < 300; k++) begin
        @(negedge clk); in_valid = 1; in_event = '{core: 2'd1, neuron: 4'd3, synapse: 17'd5};
        if (!(3 inside {hot_m[1]})) hot_m[1].push_back(3);
        sum_m[1][3] = sum_m[1][3] + 127;
        if (sum_m[1][3] > SMAX) begin sum_m[1][3] = SMAX; n_sat++; end
      end
      @(negedge clk); in_valid = 0;
      repeat (3) @(negedge clk); wbank = 0;
      // drain both banks (bank 0 holds the previous timestep's leftover)
      drain(1);
    end
    check(n_bypass > 20, "bypass exercised");
    $display("bypass hits %0d", n_bypass);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
