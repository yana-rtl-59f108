// tb_yana_multicast_core: programs source lists into the input multicast
// core, sends bursts of source ids and checks that every source expands into
// exactly its destination packets, in order, under random backpressure, and
// that `idle` is only high with no work left.
module tb_yana_multicast_core;
  import yana_pkg::*;
  localparam int NI = 32, NP = 512;
  logic clk = 0, reset = 1, enable = 1;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready, idle, stall;
  logic [NEURON_W-1:0] in_id;
  event_t out_event;
  mem_wr_t mems_data;
  logic [N_MEMS-1:0] mems_wena;
  int checks = 0, failures = 0, n_out = 0;
  int base_m [NI], cnt_m [NI];
  event_t pkt_m [NP];
  event_t exp_q[$];

  yana_multicast_core #(.N_INPUTS(NI), .N_PACKETS(NP), .FIFO_DEPTH(4)) dut (.*);

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

  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);
  always @(posedge clk) if (!reset && out_valid && out_ready) begin
    n_out++;
    check(exp_q.size() > 0 && out_event == exp_q[0], "packet order/content");
    if (exp_q.size() > 0) void'(exp_q.pop_front());
  end

  task automatic wr(input mem_sel_e m, input int a, input longint d);
    @(negedge clk);
    mems_wena = N_MEMS'(1) << m; mems_data = '{addr: SYNAPSE_W'(a), data: MEM_DATA_W'(d)};
    @(negedge clk);
    mems_wena = '0;
  endtask

  initial begin
    in_valid = 0; in_id = 0; mems_data = '0; mems_wena = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) reset = 0;
    for (int p = 0; p < NP; p++) begin
      pkt_m[p] = '{core: 2'd1, neuron: NEURON_W'($urandom), synapse: SYNAPSE_W'($urandom)};
      wr(MEM_PACKET, p, longint'(pkt_m[p]));
    end
    for (int s = 0; s < NI; s++) begin
      base_m[s] = $urandom_range(0, NP - 20);
      cnt_m[s]  = $urandom_range(0, 16);
      wr(MEM_MAP, s, longint'({SYNAPSE_W'(base_m[s]), COUNT_W'(cnt_m[s])}));
    end
    check(idle, "idle before input");
    for (int k = 0; k < 400; k++) begin
      int s;
      s = $urandom_range(0, NI - 1);
      @(negedge clk);
      in_valid = 1; in_id = NEURON_W'(s);
      forever begin #1; if (in_ready) break; @(negedge clk); end
      for (int j = 0; j < cnt_m[s]; j++) exp_q.push_back(pkt_m[base_m[s] + j]);
      @(posedge clk);
      #1 in_valid = 0;
      if (k % 50 == 0) begin
        #2 check(!idle || cnt_m[s] == 0, "busy after input");
      end
    end
    while (!idle) @(negedge clk);
    check(exp_q.size() == 0, "all packets delivered");
    check(n_out > 1000, "traffic volume");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
