// tb_yana_shd_workload: the network shape of the latency experiments run on
// this architecture, at full size on the default system: 700 input channels
// (the channel count of the Spiking Heidelberg Digits data set), a dense
// layer to 100 hidden LIF neurons and a dense layer to 20 LI output neurons.
// The input is synthetic (random events at a fixed rate over 100 timesteps),
// since the data set itself is not part of this testbench.
//
// Three runs are made, each reset, programmed and checked against an
// event-level model of the three cores (all 20 output potentials):
//   A  S_spat = 0    full input
//   B  S_spat = 0    half of the input events dropped (higher temporal sparsity)
//   C  S_spat = 0.9  input->hidden weights pruned by magnitude, full input
// The run-time in cycles is printed for each, and the test checks that it
// falls with both sparsities (B and C faster than A, C at most half of A),
// the trend of the published latency measurements.
module tb_yana_shd_workload;
  import yana_pkg::*;
  localparam int NI = 700, NH = 100, NO = 20, T = 100;
  localparam int NM = DEF_N_MAX;
  logic clk = 0, rst = 1, enable = 1;
  always #5 clk = ~clk;
  logic s_axis_input_tvalid, s_axis_input_tready, s_axis_cmd_tvalid, s_axis_cmd_tready;
  logic m_axis_output_tvalid, m_axis_output_tready, busy;
  logic [31:0] s_axis_input_tdata, m_axis_output_tdata;
  logic [63:0] s_axis_cmd_tdata;
  ts_t timestep;
  logic mech_bypass, mech_feedback, mech_spike, mech_expired, mech_axon_stall, mech_ts_advance;
  int checks = 0, failures = 0, c_spike = 0;

  yana_system dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) if (!rst) c_spike += int'(mech_spike);
  assign m_axis_output_tready = 1'b1;

  // ------------------------------------------------ network
  logic signed [7:0] w_ih [NI*NH];   // hidden synapse index i*NH + h
  logic signed [7:0] w_ho [NH*NO];   // output synapse index h*NO + o
  bit keep [NI*NH];
  longint lut [NM];
  longint inv_tau [2] = '{8192, 8192};
  longint thr = 60;
  in_word_t full_sample [$], sample [$];

  // ------------------------------------------------ model (0 hidden, 1 output)
  longint u_m [2][NH], last_m [2][NH], acc_m [2][NH];
  bit hot_m [2][NH];

  function automatic longint fl(longint v);
    if (v >= 0) return v / 32768;
    return -((-v + 32767) / 32768);
  endfunction
  function automatic longint leakf(longint d);
    return (d == 0) ? 32768 : (d > NM) ? 0 : lut[d-1];
  endfunction
  function automatic void model_reset();
    for (int c = 0; c < 2; c++) for (int n = 0; n < NH; n++) begin
      u_m[c][n] = 0; last_m[c][n] = 0; acc_m[c][n] = 0; hot_m[c][n] = 0;
    end
  endfunction
  function automatic void step(int c, longint t);
    longint a_now [NH];
    bit h_now [NH];
    for (int n = 0; n < NH; n++) begin
      a_now[n] = acc_m[c][n]; h_now[n] = hot_m[c][n]; acc_m[c][n] = 0; hot_m[c][n] = 0;
    end
    for (int n = 0; n < NH; n++) if (h_now[n]) begin
      longint a;
      a = fl(u_m[c][n] * leakf(t - last_m[c][n])) + fl(a_now[n] * inv_tau[c]);
      if (a > 32767) a = 32767;
      if (a < -32768) a = -32768;
      last_m[c][n] = t;
      if (c == 0 && a > thr) begin
        u_m[c][n] = 0;
        for (int o = 0; o < NO; o++) begin
          acc_m[1][o] += longint'(w_ho[n*NO + o]); hot_m[1][o] = 1;
        end
      end else u_m[c][n] = a;
    end
  endfunction
  function automatic void model_run();
    int si;
    si = 0;
    model_reset();
    for (int t = 0; t < T; t++) begin
      if (t > 0) begin step(1, t); step(0, t); end
      while (si < sample.size() && sample[si].ts == 16'(t)) begin
        int src;
        src = int'(sample[si].src);
        for (int h = 0; h < NH; h++) if (keep[src*NH + h]) begin
          acc_m[0][h] += longint'(w_ih[src*NH + h]); hot_m[0][h] = 1;
        end
        si++;
      end
    end
  endfunction

  // ------------------------------------------------ host side
  task automatic cmd(input opcode_e op, input int core, input mem_sel_e m, input int a, input longint d);
    command_t c;
    c = '{op: op, core: CORE_W'(core), mem: m, rsvd: '0, addr: SYNAPSE_W'(a), data: MEM_DATA_W'(d)};
    @(negedge clk);
    s_axis_cmd_tvalid = 1; s_axis_cmd_tdata = c;
    forever begin #1; if (s_axis_cmd_tready) break; @(negedge clk); end
    @(posedge clk);
    #1 s_axis_cmd_tvalid = 0;
  endtask
  task automatic put_input(input in_word_t w);
    @(negedge clk);
    s_axis_input_tvalid = 1; s_axis_input_tdata = w;
    forever begin #1; if (s_axis_input_tready) break; @(negedge clk); end
    @(posedge clk);
    #1 s_axis_input_tvalid = 0;
  endtask
  logic [31:0] res_q[$];
  always @(posedge clk) if (m_axis_output_tvalid && m_axis_output_tready) res_q.push_back(m_axis_output_tdata);

  // programs the input multicast lists from keep[]; hidden packets are i*NH+h
  task automatic program_input_lists();
    int p;
    p = 0;
    for (int i = 0; i < NI; i++) begin
      int base;
      base = p;
      for (int h = 0; h < NH; h++) if (keep[i*NH + h]) begin
        event_t e;
        e = '{core: ID_HIDDEN, neuron: NEURON_W'(h), synapse: SYNAPSE_W'(i*NH + h)};
        cmd(OP_WRITE, ID_INPUT, MEM_PACKET, p, longint'(e));
        p++;
      end
      cmd(OP_WRITE, ID_INPUT, MEM_MAP, i, longint'({SYNAPSE_W'(base), COUNT_W'(p - base)}));
    end
  endtask

  task automatic run_and_check(input string name, output longint cycles);
    cmd(OP_RESET, 0, MEM_WEIGHT, 0, 0);
    foreach (sample[k]) put_input(sample[k]);
    res_q.delete();
    cmd(OP_RUN, 0, MEM_WEIGHT, 0, T);
    for (int n = 0; n < NO; n++) cmd(OP_READ, ID_OUTPUT, MEM_WEIGHT, n, 0);
    model_run();
    while (res_q.size() < NO + 1) @(negedge clk);
    check(res_q[0][31:28] == RES_RUN_DONE, {name, ": run-done word"});
    cycles = longint'(res_q[0][27:0]);
    for (int n = 0; n < NO; n++) begin
      longint e;
      e = fl(u_m[1][n] * leakf((T - 1) - last_m[1][n]));
      check(res_q[n + 1] == {RES_POTENTIAL, 12'(n), 16'(e)},
            $sformatf("%s: output %0d got %0d exp %0d", name, n, $signed(res_q[n + 1][15:0]), e));
    end
    $display("%s: %0d input events, %0d cycles (%0d us at 100 MHz), hidden spikes so far %0d",
             name, sample.size(), cycles, cycles / 100, c_spike);
  endtask

  initial begin
    real f;
    longint cyc_a, cyc_b, cyc_c;
    int order [$];
    s_axis_input_tvalid = 0; s_axis_input_tdata = 0; s_axis_cmd_tvalid = 0; s_axis_cmd_tdata = 0;
    f = 1.0;
    for (int k = 0; k < NM; k++) begin f = f * 0.9; lut[k] = longint'($rtoi(f * 32768.0)); end
    for (int s = 0; s < NI*NH; s++) begin w_ih[s] = 8'($signed($urandom_range(0, 100)) - 45); keep[s] = 1; end
    for (int s = 0; s < NH*NO; s++) w_ho[s] = 8'($signed($urandom_range(0, 100)) - 50);
    for (int t = 0; t < T - 4; t++)
      for (int i = 0; i < NI; i++)
        if ($urandom_range(0, 99) < 3) full_sample.push_back('{ts: 16'(t), src: 16'(i)});

    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    cmd(OP_RESET, 0, MEM_WEIGHT, 0, 0);
    program_input_lists();
    for (int s = 0; s < NI*NH; s++) cmd(OP_WRITE, ID_HIDDEN, MEM_WEIGHT, s, longint'(unsigned'(w_ih[s])));
    for (int h = 0; h < NH; h++) begin
      for (int o = 0; o < NO; o++) begin
        event_t e;
        e = '{core: ID_OUTPUT, neuron: NEURON_W'(o), synapse: SYNAPSE_W'(h*NO + o)};
        cmd(OP_WRITE, ID_HIDDEN, MEM_PACKET, h*NO + o, longint'(e));
      end
      cmd(OP_WRITE, ID_HIDDEN, MEM_MAP, h, longint'({SYNAPSE_W'(h*NO), COUNT_W'(NO)}));
    end
    for (int s = 0; s < NH*NO; s++) cmd(OP_WRITE, ID_OUTPUT, MEM_WEIGHT, s, longint'(unsigned'(w_ho[s])));
    for (int c = 0; c < 2; c++) begin
      int core;
      core = (c == 0) ? ID_HIDDEN : ID_OUTPUT;
      for (int k = 0; k < NM; k++) cmd(OP_WRITE, core, MEM_PARAM, k, lut[k]);
      cmd(OP_WRITE, core, MEM_PARAM, NM, inv_tau[c]);
      cmd(OP_WRITE, core, MEM_PARAM, NM + 1, (c == 0) ? thr : 32767);
    end

    // A: dense, full input
    sample = full_sample;
    run_and_check("A S_spat=0.0 full input", cyc_a);
    // B: dense, every second input event dropped
    sample.delete();
    foreach (full_sample[k]) if (k % 2 == 0) sample.push_back(full_sample[k]);
    run_and_check("B S_spat=0.0 half input", cyc_b);
    // C: prune 90 % of the input->hidden weights by magnitude (keep w > 47 or w < -42 of -45..55)
    begin
      int kept;
      kept = 0;
      for (int s = 0; s < NI*NH; s++) begin
        keep[s] = (w_ih[s] > 8'sd47 || w_ih[s] < -8'sd42);
        kept += int'(keep[s]);
      end
      $display("pruning keeps %0d of %0d weights", kept, NI*NH);
    end
    program_input_lists();
    sample = full_sample;
    run_and_check("C S_spat=0.9 full input", cyc_c);
    check(cyc_b < cyc_a, "fewer input events -> shorter run");
    check(cyc_c * 2 < cyc_a, "pruned weights -> much shorter run");
    check(c_spike > 0, "hidden neurons spiked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
