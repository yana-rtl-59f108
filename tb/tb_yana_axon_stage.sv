// tb_yana_axon_stage: programs a random mapping table and packet memory,
// sends random spiking-neuron ids and checks that each produces exactly its
// packet list, in order, under random backpressure. Also checks the
// throughput of one packet per cycle without backpressure (2 + count cycles
// per neuron) and that empty lists emit nothing.
module tb_yana_axon_stage;
  import yana_pkg::*;
  localparam int NS = 16, NP = 256;
  logic clk = 0, rst = 1, enable = 1;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, idle, stall;
  logic [NEURON_W-1:0] in_id;
  event_t out_event;
  logic map_wr_en, pkt_wr_en;
  logic [NEURON_W-1:0] map_wr_addr;
  map_entry_t map_wr_data;
  logic [SYNAPSE_W-1:0] pkt_wr_addr;
  event_t pkt_wr_data;
  int checks = 0, failures = 0, n_stall = 0;
  map_entry_t map_m [NS];
  event_t pkt_m [NP];
  event_t exp_q[$];

  yana_axon_stage #(.N_SOURCES(NS), .N_PACKETS(NP)) dut (.*);

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

  // collect outputs
  bit bp = 0;
  always @(posedge clk) if (!rst) begin
    if (stall) n_stall++;
    if (out_valid && out_ready) begin
      check(exp_q.size() > 0 && out_event == exp_q[0], "packet order/content");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
  end
  always @(negedge clk) out_ready <= bp ? ($urandom_range(0, 2) == 0) : 1'b1;

  task automatic send(input int id);
    @(negedge clk);
    in_valid = 1; in_id = NEURON_W'(id);
    do @(posedge clk); while (!in_ready);
    for (int k = 0; k < map_m[id].count; k++) exp_q.push_back(pkt_m[(map_m[id].base + k) % NP]);
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    in_valid = 0; in_id = 0; map_wr_en = 0; pkt_wr_en = 0;
    map_wr_addr = 0; map_wr_data = '0; pkt_wr_addr = 0; pkt_wr_data = '0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int p = 0; p < NP; p++) begin
      pkt_m[p] = event_t'($urandom);
      @(negedge clk); pkt_wr_en = 1; pkt_wr_addr = SYNAPSE_W'(p); pkt_wr_data = pkt_m[p];
    end
    for (int s = 0; s < NS; s++) begin
      map_m[s].base  = SYNAPSE_W'($urandom_range(0, NP - 40));
      map_m[s].count = (s % 5 == 0) ? '0 : COUNT_W'($urandom_range(1, 30));
      @(negedge clk); pkt_wr_en = 0; map_wr_en = 1; map_wr_addr = NEURON_W'(s); map_wr_data = map_m[s];
    end
    @(negedge clk); map_wr_en = 0;
    // throughput without backpressure: neuron 1
    begin
      int t0, t1;
      @(negedge clk);
      t0 = $time;
      send(1);
      wait (exp_q.size() == 0);
      @(posedge clk);
      t1 = $time;
      // accepted at t0+5, LOAD, EMIT count cycles, last packet taken 1 cycle later
      check((t1 - t0) / 10 <= int'(map_m[1].count) + 4, "one packet per cycle");
    end
    send(0);  // empty list
    repeat (5) @(posedge clk);
    check(idle && exp_q.size() == 0, "empty list emits nothing");
    bp = 1;
    for (int r = 0; r < 300; r++) send($urandom_range(0, NS - 1));
    wait (exp_q.size() == 0);
    repeat (5) @(posedge clk);
    check(idle, "idle at end");
    check(n_stall > 50, "backpressure stalls seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
