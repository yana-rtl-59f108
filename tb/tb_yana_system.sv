// tb_yana_system: end-to-end test of the three-core system at its default
// sizes (1024 neurons and 2^17 synapses per core). Acting as the host, it
// writes commands and a sample of input events into the AXI4-Stream
// buffers: reset, programming of a random sparse network (input multicast
// lists, hidden weights / packet lists with recurrent and forward targets,
// output weights, neuron parameters), a RUN over the sample and a READ of
// every used output neuron. The returned potentials are compared with an
// independent event-level model of the multicast, LIF and LI cores. `enable`
// and the result-buffer tready are toggled at random. Counts the mechanisms
// of the design (weight-sum bypass, feedback, spikes, leak expiry, axon
// stall, timestep advance, stall by enable) and fails if one never happened.
module tb_yana_system;
  import yana_pkg::*;
  localparam int NI = 24, NH = 40, NO = 10;   // used inputs, hidden, outputs
  localparam int HSYN = 96, OSYN = 48;        // used weights per core
  localparam int NM = DEF_N_MAX, T = 64;
  logic clk = 0, rst = 1, enable = 1;
  always #5 clk = ~clk;
  logic s_axis_input_tvalid, s_axis_input_tready, s_axis_cmd_tvalid, s_axis_cmd_tready;
  logic m_axis_output_tvalid, m_axis_output_tready, busy;
  logic [31:0] s_axis_input_tdata, m_axis_output_tdata;
  logic [63:0] s_axis_cmd_tdata;
  ts_t timestep;
  logic mech_bypass, mech_feedback, mech_spike, mech_expired, mech_axon_stall, mech_ts_advance;
  int checks = 0, failures = 0;
  int c_bypass = 0, c_fb = 0, c_spike = 0, c_exp = 0, c_stall = 0, c_adv = 0, c_dis = 0;

  yana_system dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    c_bypass += int'(mech_bypass);
    c_fb     += int'(mech_feedback);
    c_spike  += int'(mech_spike);
    c_exp    += int'(mech_expired);
    c_stall  += int'(mech_axon_stall || dut.u_input_core.stall);
    c_adv    += int'(mech_ts_advance);
  end
  always @(negedge clk) begin
    m_axis_output_tready <= ($urandom_range(0, 1) == 0);
    if (busy && $urandom_range(0, 11) == 0) begin enable <= 1'b0; c_dis++; end
    else enable <= 1'b1;
  end

  // ------------------------------------------------ network
  int in_base [NI], in_cnt [NI];
  event_t in_pkt [$];
  int h_base [NH], h_cnt [NH];
  event_t h_pkt [$];
  logic signed [7:0] hw [HSYN], ow [OSYN];
  longint lut [NM];
  longint inv_tau [2] = '{32768, 16384};
  longint thr [2] = '{200, 32767};
  in_word_t sample [$];

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
  function automatic void arrive(event_t e);
    if (e.core == ID_HIDDEN) begin
      acc_m[0][e.neuron] += longint'(hw[e.synapse]); hot_m[0][e.neuron] = 1;
    end else begin
      acc_m[1][e.neuron] += longint'(ow[e.synapse]); hot_m[1][e.neuron] = 1;
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
      if (c == 0 && a > thr[0]) begin
        u_m[c][n] = 0;
        for (int k = 0; k < h_cnt[n]; k++) arrive(h_pkt[h_base[n] + k]);
      end else u_m[c][n] = a;
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

  initial begin
    real f;
    s_axis_input_tvalid = 0; s_axis_input_tdata = 0; s_axis_cmd_tvalid = 0; s_axis_cmd_tdata = 0;
    f = 1.0;
    for (int k = 0; k < NM; k++) begin f = f * 0.8; lut[k] = longint'($rtoi(f * 32768.0)); end
    for (int c = 0; c < 2; c++) for (int n = 0; n < NH; n++) begin
      u_m[c][n] = 0; last_m[c][n] = 0; acc_m[c][n] = 0; hot_m[c][n] = 0;
    end
    // network
    for (int s = 0; s < HSYN; s++) hw[s] = 8'($signed($urandom_range(0, 120)) - 20);
    for (int s = 0; s < OSYN; s++) ow[s] = 8'($signed($urandom_range(0, 100)) - 50);
    for (int i = 0; i < NI; i++) begin
      in_base[i] = in_pkt.size(); in_cnt[i] = $urandom_range(4, 16);
      for (int k = 0; k < in_cnt[i]; k++)
        in_pkt.push_back('{core: ID_HIDDEN, neuron: NEURON_W'($urandom_range(0, NH - 1)),
                           synapse: SYNAPSE_W'($urandom_range(0, HSYN - 1))});
    end
    for (int h = 0; h < NH; h++) begin
      h_base[h] = h_pkt.size(); h_cnt[h] = $urandom_range(0, 14);
      for (int k = 0; k < h_cnt[h]; k++)
        if ($urandom_range(0, 1) == 0)
          h_pkt.push_back('{core: ID_HIDDEN, neuron: NEURON_W'($urandom_range(0, NH - 1)),
                            synapse: SYNAPSE_W'($urandom_range(0, HSYN - 1))});
        else
          h_pkt.push_back('{core: ID_OUTPUT, neuron: NEURON_W'($urandom_range(0, NO - 1)),
                            synapse: SYNAPSE_W'($urandom_range(0, OSYN - 1))});
    end
    // sample: sorted by timestep, a few quiet gaps
    for (int t = 0; t < T - 5; t++) begin
      int ne;
      ne = (t >= 20 && t < 42) ? 0 : $urandom_range(0, 14);
      for (int k = 0; k < ne; k++) sample.push_back('{ts: 16'(t), src: 16'($urandom_range(0, NI - 1))});
    end

    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    cmd(OP_RESET, 0, MEM_WEIGHT, 0, 0);
    foreach (in_pkt[k]) cmd(OP_WRITE, ID_INPUT, MEM_PACKET, k, longint'(in_pkt[k]));
    for (int i = 0; i < NI; i++) cmd(OP_WRITE, ID_INPUT, MEM_MAP, i, longint'({SYNAPSE_W'(in_base[i]), COUNT_W'(in_cnt[i])}));
    for (int s = 0; s < HSYN; s++) cmd(OP_WRITE, ID_HIDDEN, MEM_WEIGHT, s, longint'(unsigned'(hw[s])));
    foreach (h_pkt[k]) cmd(OP_WRITE, ID_HIDDEN, MEM_PACKET, k, longint'(h_pkt[k]));
    for (int h = 0; h < NH; h++) cmd(OP_WRITE, ID_HIDDEN, MEM_MAP, h, longint'({SYNAPSE_W'(h_base[h]), COUNT_W'(h_cnt[h])}));
    for (int s = 0; s < OSYN; s++) cmd(OP_WRITE, ID_OUTPUT, MEM_WEIGHT, s, longint'(unsigned'(ow[s])));
    for (int c = 0; c < 2; c++) begin
      int core;
      core = (c == 0) ? ID_HIDDEN : ID_OUTPUT;
      for (int k = 0; k < NM; k++) cmd(OP_WRITE, core, MEM_PARAM, k, lut[k]);
      cmd(OP_WRITE, core, MEM_PARAM, NM, inv_tau[c]);
      cmd(OP_WRITE, core, MEM_PARAM, NM + 1, thr[c]);
    end
    foreach (sample[k]) put_input(sample[k]);
    cmd(OP_RUN, 0, MEM_WEIGHT, 0, T);
    for (int n = 0; n < NO; n++) cmd(OP_READ, ID_OUTPUT, MEM_WEIGHT, n, 0);

    // model of the run
    begin
      int si = 0;
      for (int t = 0; t < T; t++) begin
        if (t > 0) begin step(1, t); step(0, t); end
        while (si < sample.size() && sample[si].ts == 16'(t)) begin
          int src;
          src = int'(sample[si].src);
          for (int k = 0; k < in_cnt[src]; k++) arrive(in_pkt[in_base[src] + k]);
          si++;
        end
      end
    end

    // results: RUN_DONE, then NO potentials
    while (res_q.size() < NO + 1) @(negedge clk);
    check(res_q[0][31:28] == RES_RUN_DONE, "run-done word first");
    $display("run took %0d cycles for %0d timesteps and %0d input events", res_q[0][27:0], T, sample.size());
    for (int n = 0; n < NO; n++) begin
      longint e;
      e = fl(u_m[1][n] * leakf((T - 1) - last_m[1][n]));
      check(res_q[n + 1] == {RES_POTENTIAL, 12'(n), 16'(e)},
            $sformatf("output %0d: got %0d exp %0d", n, $signed(res_q[n + 1][15:0]), e));
    end
    check(timestep == ts_t'(T - 1), "final timestep");
    $display("bypass %0d feedback %0d spikes %0d expired %0d axon-stall %0d ts-advance %0d enable-low %0d",
             c_bypass, c_fb, c_spike, c_exp, c_stall, c_adv, c_dis);
    check(c_bypass > 0, "bypass happened");
    check(c_fb > 0, "feedback happened");
    check(c_spike > 0, "spikes happened");
    check(c_exp > 0, "leak expiry happened");
    check(c_stall > 0, "axon stall happened");
    check(c_adv == T - 1, "every timestep advanced once");
    check(c_dis > 0, "enable stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
