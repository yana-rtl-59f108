// tb_yana_core: a small recurrent network on one core (16 neurons, 64
// synapses). Each neuron's packet list mixes internal targets (fed back to
// the core) and external targets (leaving on event_out). The testbench sends
// random external events every timestep, advances the timestep when
// done_core is high, toggles `enable` and stalls event_out at random, and
// compares, timestep by timestep, the packets leaving the core with an
// independent event-level model of the deferred LIF network. At the end the
// potentials are read back. Counts bypass, feedback, spike, expiry and axon
// stall events and fails if one never happened.
module tb_yana_core;
  import yana_pkg::*;
  localparam int NN = 16, NSY = 64, NM = 4, T = 40;
  logic clk = 0, reset = 1, enable = 1;
  always #5 clk = ~clk;
  ts_t timestep = 0;
  logic event_in_valid, event_in_ready, event_out_valid, event_out_ready, done_core;
  event_t event_in, event_out;
  mem_wr_t mems_data;
  logic [N_MEMS-1:0] mems_wena;
  logic rd_req, rd_ack, rd_valid;
  logic [NEURON_W-1:0] rd_addr;
  u_t rd_data;
  logic mech_bypass, mech_feedback, mech_spike, mech_expired, mech_axon_stall;
  int checks = 0, failures = 0;
  int c_bypass = 0, c_fb = 0, c_spike = 0, c_exp = 0, c_stall = 0, c_dis = 0;

  yana_core #(.N_NEURONS(NN), .N_SYNAPSES(NSY), .N_MAX(NM), .CORE_ID(2'd1),
              .IN_FIFO_DEPTH(4), .OUT_FIFO_DEPTH(4)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s @%0t", what, $time); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!reset) begin
    c_bypass += int'(mech_bypass);
    c_fb     += int'(mech_feedback);
    c_spike  += int'(mech_spike);
    c_exp    += int'(mech_expired);
    c_stall  += int'(mech_axon_stall);
  end

  // ------------------------------------------------ network and model
  logic signed [7:0] w_m [NSY];
  int  base_m [NN], cnt_m [NN];
  event_t pkt_m [NSY];
  longint lut [NM];
  longint inv_tau = 32768, thr = 150;
  longint u_m [NN], last_m [NN], acc_m [NN];
  bit hot_m [NN];
  event_t out_got[$], out_exp[$];

  function automatic longint fl(longint v);
    if (v >= 0) return v / 32768;
    return -((-v + 32767) / 32768);
  endfunction

  // one packet arriving in the current timestep (applied next timestep)
  function automatic void model_arrive(event_t e);
    acc_m[e.neuron] += longint'(w_m[e.synapse]);
    hot_m[e.neuron] = 1;
  endfunction

  // neuron updates at timestep t from the previous timestep's arrivals
  function automatic void model_step(longint t);
    longint a_now [NN];
    bit h_now [NN];
    for (int n = 0; n < NN; n++) begin
      a_now[n] = acc_m[n]; h_now[n] = hot_m[n]; acc_m[n] = 0; hot_m[n] = 0;
    end
    for (int n = 0; n < NN; n++) if (h_now[n]) begin
      longint nn_, f, a;
      nn_ = t - last_m[n];
      f = (nn_ == 0) ? 32768 : (nn_ > NM) ? 0 : lut[nn_-1];
      a = fl(u_m[n] * f) + fl(a_now[n] * inv_tau);
      if (a > 32767) a = 32767;
      if (a < -32768) a = -32768;
      last_m[n] = t;
      if (a > thr) begin
        u_m[n] = 0;
        for (int k = 0; k < cnt_m[n]; k++) begin
          event_t p = pkt_m[(base_m[n] + k) % NSY];
          if (p.core == 2'd1) model_arrive(p);
          else out_exp.push_back(p);
        end
      end else u_m[n] = a;
    end
  endfunction

  function automatic bit same_multiset(ref event_t a[$], ref event_t b[$]);
    event_t x[$], y[$];
    x = a; y = b;
    if (x.size() != y.size()) return 0;
    x.sort(); y.sort();
    foreach (x[k]) if (x[k] != y[k]) return 0;
    return 1;
  endfunction

  // ------------------------------------------------ drivers
  always @(negedge clk) begin
    event_out_ready <= ($urandom_range(0, 2) == 0);
    if ($urandom_range(0, 15) == 0) begin enable <= 1'b0; c_dis++; end
    else enable <= 1'b1;
  end
  always @(posedge clk) if (event_out_valid && event_out_ready) out_got.push_back(event_out);

  task automatic wr(input mem_sel_e m, input int a, input longint d);
    @(negedge clk);
    mems_wena = N_MEMS'(1) << m; mems_data = '{addr: SYNAPSE_W'(a), data: MEM_DATA_W'(d)};
    @(negedge clk);
    mems_wena = '0;
  endtask

  task automatic send(input event_t e);
    @(negedge clk);
    event_in_valid = 1; event_in = e;
    forever begin #1; if (event_in_ready) break; @(negedge clk); end
    @(posedge clk);
    #1 event_in_valid = 0;
  endtask

  task automatic wait_done();
    do @(negedge clk); while (!done_core);
  endtask

  initial begin
    real f;
    event_in_valid = 0; event_in = '0; mems_data = '0; mems_wena = '0;
    rd_req = 0; rd_addr = 0;
    f = 1.0;
    for (int k = 0; k < NM; k++) begin f = f * 0.75; lut[k] = longint'($rtoi(f * 32768.0)); end
    for (int n = 0; n < NN; n++) begin u_m[n] = 0; last_m[n] = 0; acc_m[n] = 0; hot_m[n] = 0; end
    for (int s = 0; s < NSY; s++) begin
      w_m[s] = 8'($signed($urandom_range(0, 160)) - 30);
      pkt_m[s] = '{core: ($urandom_range(0, 1) == 0) ? 2'd2 : 2'd1,
                   neuron: NEURON_W'($urandom_range(0, NN - 1)),
                   synapse: SYNAPSE_W'($urandom_range(0, NSY - 1))};
    end
    for (int n = 0; n < NN; n++) begin
      base_m[n] = $urandom_range(0, NSY - 1);
      cnt_m[n]  = $urandom_range(0, 12);
    end
    repeat (3) @(posedge clk);
    @(negedge clk) reset = 0;
    for (int s = 0; s < NSY; s++) wr(MEM_WEIGHT, s, longint'(unsigned'(w_m[s])));
    for (int s = 0; s < NSY; s++) wr(MEM_PACKET, s, longint'(pkt_m[s]));
    for (int n = 0; n < NN; n++) wr(MEM_MAP, n, longint'({SYNAPSE_W'(base_m[n]), COUNT_W'(cnt_m[n])}));
    for (int k = 0; k < NM; k++) wr(MEM_PARAM, k, lut[k]);
    wr(MEM_PARAM, NM, inv_tau);
    wr(MEM_PARAM, NM + 1, thr);
    wait_done();
    for (int t = 0; t < T; t++) begin
      int ne;
      if (t > 0) begin
        @(negedge clk) timestep = ts_t'(t);
        model_step(t);
      end
      ne = (t < T - 6) ? $urandom_range(0, 12) : 0;
      if (t % 9 == 8) ne = 0;   // quiet steps let neurons expire
      for (int k = 0; k < ne; k++) begin
        event_t e;
        e = '{core: 2'd1, neuron: NEURON_W'($urandom_range(0, NN - 1)),
              synapse: SYNAPSE_W'($urandom_range(0, NSY - 1))};
        if (k > 0 && $urandom_range(0, 2) == 0) e.neuron = event_in.neuron;
        send(e);
        model_arrive(e);
      end
      wait_done();
      @(negedge clk); @(negedge clk);
      check(same_multiset(out_got, out_exp),
            $sformatf("t=%0d outgoing packets: got %0d exp %0d", t, out_got.size(), out_exp.size()));
      out_got.delete(); out_exp.delete();
    end
    // read back every potential, leaked to the last timestep
    for (int n = 0; n < NN; n++) begin
      longint e, d;
      d = (T - 1) - last_m[n];
      e = fl(u_m[n] * ((d == 0) ? 32768 : (d > NM) ? 0 : lut[d-1]));
      @(negedge clk); rd_req = 1; rd_addr = NEURON_W'(n);
      forever begin #1; if (rd_ack) break; @(negedge clk); end
      @(negedge clk); rd_req = 0;
      while (!rd_valid) @(negedge clk);
      check(longint'(rd_data) == e, $sformatf("potential n=%0d exp %0d got %0d", n, e, rd_data));
    end
    $display("bypass %0d feedback %0d spikes %0d expired %0d axon-stall %0d disabled %0d",
             c_bypass, c_fb, c_spike, c_exp, c_stall, c_dis);
    check(c_bypass > 0, "bypass happened");
    check(c_fb > 0, "feedback happened");
    check(c_spike > 0, "spikes happened");
    check(c_exp > 0, "leak expiry happened");
    check(c_stall > 0, "axon stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
