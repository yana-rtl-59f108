// tb_yana_neuron_stage: the testbench plays the synapse stage (hot list and
// read-and-clear weight sums). Over many timesteps, some far apart so that
// n > N_MAX occurs, random neurons become hot with random sums. Every spike
// and every stored potential (read back through the read-out port) is
// compared with an independent model of the deferred LIF update. Also checks
// one neuron update per cycle and the reset sweep.
module tb_yana_neuron_stage;
  import yana_pkg::*;
  localparam int NN = 16, NM = 4;
  logic clk = 0, rst = 1, enable = 1;
  always #5 clk = ~clk;
  ts_t timestep;
  logic hot_valid, hot_ready, sum_rd_en, spk_valid, spk_ready, prm_wr_en;
  logic rd_req, rd_ack, rd_valid, clr_en, idle, upd_fire, upd_expired;
  logic [NEURON_W-1:0] hot_id, sum_rd_addr, spk_id, rd_addr, clr_addr;
  sum_t sum_rd_data;
  logic [SYNAPSE_W-1:0] prm_wr_addr;
  logic [U_W-1:0] prm_wr_data;
  u_t rd_data;
  int checks = 0, failures = 0, n_spk = 0, n_exp = 0, n_upd = 0;

  yana_neuron_stage #(.N_NEURONS(NN), .N_MAX(NM), .SPIKE_EN(1'b1)) dut (.*);

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

  // parameters: tau = 8
  longint lut [NM];
  longint inv_tau = 4096, thr = 3000;
  // reference state
  longint u_m [NN];
  longint last_m [NN];
  sum_t   sums [NN];
  int     hot_q[$];
  int     spk_exp[$];

  function automatic longint fl(longint v);
    if (v >= 0) return v / 32768;
    return -((-v + 32767) / 32768);
  endfunction
  function automatic longint model_u(int nn, longint t, longint i, output bit spk);
    longint n, f, a;
    n = (t - last_m[nn]) & 16'hFFFF;
    f = (n == 0) ? 32768 : (n > NM) ? 0 : lut[n-1];
    a = fl(u_m[nn] * f) + fl(i * inv_tau);
    if (a > 32767) a = 32767;
    if (a < -32768) a = -32768;
    spk = (a > thr);
    return a;
  endfunction

  // synapse-stage stand-in
  always @(negedge clk) begin
    hot_valid <= hot_q.size() > 0;
    hot_id    <= (hot_q.size() > 0) ? NEURON_W'(hot_q[0]) : '0;
  end
  always @(posedge clk) begin
    if (sum_rd_en) sum_rd_data <= sums[sum_rd_addr];
    if (hot_valid && hot_ready) void'(hot_q.pop_front());
    if (upd_fire) n_upd++;
    if (upd_expired) n_exp++;
    if (spk_valid) begin
      n_spk++;
      check(spk_exp.size() > 0 && int'(spk_id) == spk_exp[0], "spike id/order");
      if (spk_exp.size() > 0) void'(spk_exp.pop_front());
    end
  end

  task automatic prm(input int a, input longint d);
    @(negedge clk); prm_wr_en = 1; prm_wr_addr = SYNAPSE_W'(a); prm_wr_data = U_W'(d);
    @(negedge clk); prm_wr_en = 0;
  endtask

  task automatic readout(input int nn);
    bit s;
    longint e;
    e = model_u(nn, timestep, 0, s);
    @(negedge clk); rd_req = 1; rd_addr = NEURON_W'(nn);
    forever begin #1; if (rd_ack) break; @(negedge clk); end
    @(negedge clk); rd_req = 0;
    while (!rd_valid) @(negedge clk);
    check(longint'(rd_data) == e, $sformatf("readout n=%0d exp %0d got %0d", nn, e, rd_data));
  endtask

  initial begin
    real f;
    spk_ready = 1; hot_valid = 0; hot_id = 0; prm_wr_en = 0; prm_wr_addr = 0; prm_wr_data = 0;
    rd_req = 0; rd_addr = 0; clr_en = 0; clr_addr = 0; timestep = 0;
    f = 1.0;
    for (int k = 0; k < NM; k++) begin f = f * (1.0 - 1.0 / 8.0); lut[k] = longint'($rtoi(f * 32768.0)); end
    for (int n = 0; n < NN; n++) begin u_m[n] = 0; last_m[n] = 0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < NN; n++) begin @(negedge clk); clr_en = 1; clr_addr = NEURON_W'(n); end
    @(negedge clk); clr_en = 0;
    for (int k = 0; k < NM; k++) prm(k, lut[k]);
    prm(NM, inv_tau);
    prm(NM + 1, thr);
    for (int step = 0; step < 60; step++) begin
      int t0, nh;
      timestep = timestep + ((step % 7 == 6) ? ts_t'(NM + 2) : ts_t'($urandom_range(1, 2)));
      // choose hot set and sums, compute expectation
      nh = $urandom_range(1, NN);
      hot_q.delete();
      begin
        int perm[NN];
        for (int n = 0; n < NN; n++) perm[n] = n;
        perm.shuffle();
        for (int h = 0; h < nh; h++) begin
          int nn; bit s; longint e;
          nn = perm[h];
          sums[nn] = sum_t'($signed($urandom_range(0, 40000)) - 8000);
          e = model_u(nn, timestep, sums[nn], s);
          if (s) begin spk_exp.push_back(nn); e = 0; end
          u_m[nn] = e; last_m[nn] = timestep;
        end
        @(negedge clk);
        for (int h = 0; h < nh; h++) hot_q.push_back(perm[h]);
      end
      t0 = $time;
      while (hot_q.size() != 0 || hot_valid) @(negedge clk);
      check(($time - t0) / 10 <= nh + 2, "one neuron per cycle");
      repeat (3) @(posedge clk);
      check(idle && spk_exp.size() == 0, "all expected spikes seen");
      if (step % 5 == 0) for (int n = 0; n < NN; n += 3) readout(n);
    end
    check(n_spk > 50 && n_exp > 10, "spikes and expiries exercised");
    $display("spikes %0d expired %0d updates %0d", n_spk, n_exp, n_upd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
