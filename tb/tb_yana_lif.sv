// tb_yana_lif: the fixed-point LIF update against an independent integer
// model of u~ = u*(1-1/tau)^n + i/tau with LUT leak, expiry for n > N_MAX,
// saturation, threshold spike and reset, and the LI (no spike) mode.
module tb_yana_lif;
  import yana_pkg::*;
  localparam int NM = 8;
  u_t u, u_th, u_tilde, u_next;
  sum_t i;
  ts_t n;
  coef_t leak_lut [NM];
  coef_t inv_tau;
  logic spike_en, spike;
  int checks = 0, failures = 0;
  int n_spike = 0, n_expired = 0, n_sat = 0;

  yana_lif #(.N_MAX(NM)) dut (.*);

  function automatic longint floor_shift(longint v);
    // floor(v / 2^15)
    if (v >= 0) return v / 32768;
    return -((-v + 32767) / 32768);
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // tau = 4: (1 - 1/4)^n in Q1.15
    real f;
    f = 1.0;
    for (int k = 0; k < NM; k++) begin
      f = f * 0.75;
      leak_lut[k] = coef_t'($rtoi(f * 32768.0 + 0.5));
    end
    inv_tau = 16'd8192;  // 0.25
    for (int it = 0; it < 4000; it++) begin
      longint leak_f, exp_acc, exp_t;
      int exp_next;
      bit exp_spike;
      u        = u_t'($urandom);
      i        = sum_t'($signed($urandom_range(0, 32'h3F_FFFF)) - 32'sh20_0000);
      if (it % 4 == 0) i = sum_t'($signed($urandom_range(0, 2000)) - 1000);
      n        = ts_t'($urandom_range(0, NM + 3));
      u_th     = u_t'($urandom_range(0, 20000));
      spike_en = (it % 5 != 0);
      #1;
      leak_f = (n == 0) ? 32768 : (n > NM) ? 0 : longint'(leak_lut[n-1]);
      exp_acc = floor_shift(longint'(u) * leak_f) + floor_shift(longint'(i) * 8192);
      exp_t = exp_acc > 32767 ? 32767 : exp_acc < -32768 ? -32768 : exp_acc;
      if (exp_t != exp_acc) n_sat++;
      exp_spike = spike_en && (exp_t > longint'(u_th));
      exp_next = exp_spike ? 0 : int'(exp_t);
      checks++;
      if (longint'(u_tilde) != exp_t || int'(u_next) != exp_next || spike != exp_spike) begin
        failures++;
        $display("FAIL u=%0d i=%0d n=%0d: got %0d/%0d/%0b exp %0d/%0d/%0b",
                 u, i, n, u_tilde, u_next, spike, exp_t, exp_next, exp_spike);
      end
      if (exp_spike) n_spike++;
      if (n > NM) n_expired++;
    end
    // directed: expired neuron keeps only the input term
    u = 16'sd10000; i = 24'sd400; n = ts_t'(NM + 1); u_th = 16'sd30000; spike_en = 1; #1;
    checks++; if (u_next != 16'sd100) begin failures++; $display("FAIL expired"); end
    // directed: n = 1, u=1000 -> 750 + i/4
    u = 16'sd1000; i = 24'sd40; n = 1; #1;
    checks++; if (u_next != 16'sd760) begin failures++; $display("FAIL n=1 got %0d", u_next); end
    checks++; if (n_spike < 100 || n_expired < 100 || n_sat < 10) begin
      failures++; $display("FAIL coverage spike=%0d expired=%0d sat=%0d", n_spike, n_expired, n_sat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
