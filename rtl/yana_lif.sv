// yana_lif: fixed-point leaky integrate-and-fire update of one neuron, the
// arithmetic of the neuron stage. It evaluates the forward-Euler solution
//
//   u~ = u * (1 - 1/tau)^n + (1/tau) * i
//   u' = 0   if spike_en and u~ > u_th   (spike)
//   u' = u~  otherwise
//
// where n is the number of timesteps since the neuron's previous update and
// i its accumulated weight sum. The power (1 - 1/tau)^n is not computed: it
// is looked up in a table of N_MAX precomputed entries (entry k holds the
// factor for n = k+1). For n = 0 the factor is one. For n > N_MAX the old
// potential is taken as 0; the input term is still added, so that input
// after a long silence is not lost (the architecture's wording, "the
// membrane potential is rounded to 0", leaves open whether the input of that
// timestep survives; this implementation keeps it).
//
// Number formats (this implementation's choice): u and u_th signed U_W bits,
// i signed SUM_W bits, leak factors and 1/tau unsigned Q1.15. Each product is
// shifted right arithmetically by FRAC_W (rounding towards -inf), the sum is
// saturated to U_W bits. Two multipliers. Purely combinational.
module yana_lif
  import yana_pkg::*;
#(
  parameter int unsigned N_MAX = DEF_N_MAX
) (
  input  u_t    u,
  input  sum_t  i,
  input  ts_t   n,
  input  coef_t leak_lut [N_MAX],
  input  coef_t inv_tau,
  input  u_t    u_th,
  input  logic  spike_en,
  output u_t    u_tilde,
  output u_t    u_next,
  output logic  spike
);
  localparam int unsigned PL_W = U_W + COEF_W + 1;    // u * factor
  localparam int unsigned PI_W = SUM_W + COEF_W + 1;  // i * 1/tau
  localparam int unsigned ACC_W = PI_W + 1;
  localparam int unsigned IDX_W = (N_MAX > 1) ? $clog2(N_MAX) : 1;

  coef_t                    factor;
  logic signed [PL_W-1:0]   prod_leak;
  logic signed [PI_W-1:0]   prod_in;
  logic signed [ACC_W-1:0]  acc;

  localparam logic signed [ACC_W-1:0] U_MAX = ACC_W'((1 << (U_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] U_MIN = -ACC_W'(1 << (U_W - 1));

  always_comb begin
    if (n == '0)                  factor = COEF_ONE;
    else if (n > ts_t'(N_MAX))    factor = '0;
    else                          factor = leak_lut[IDX_W'(n - 1'b1)];
  end

  assign prod_leak = PL_W'(u) * $signed({1'b0, factor});
  assign prod_in   = PI_W'(i) * $signed({1'b0, inv_tau});
  assign acc       = ACC_W'(prod_leak >>> FRAC_W) + ACC_W'(prod_in >>> FRAC_W);

  always_comb begin
    if (acc > U_MAX)      u_tilde = u_t'(U_MAX);
    else if (acc < U_MIN) u_tilde = u_t'(U_MIN);
    else                  u_tilde = u_t'(acc);
    spike  = spike_en && (u_tilde > u_th);
    u_next = spike ? '0 : u_tilde;
  end
endmodule
