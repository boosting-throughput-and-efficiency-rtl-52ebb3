// iow_burst_ne: input-output-weighted LIF neuron element for burst coding.
//
// Burst coding gives every neuron a burst function g: after a step in which
// the neuron fired, g grows by the burst constant beta, otherwise it returns
// to 1. A neuron's firing thresholds are g*u_th, 2*g*u_th, ..., and each of
// its spikes carries the amplitude g*u_th to its targets, so consecutive
// spikes of a burst transmit more charge. In the input-output-weighted form
// a spike of weight w stands for w merged spikes, so the update becomes
//     g <- beta^w * g   if the neuron fired with weight w in the last step
//     g <- 1            otherwise
// beta^w is read from a small table (BETA_POW, filled at elaboration) and
// applied with a multiplier, since g*u_th is in general not a power of two.
//
// Datapath per compressed step (zero-order synapse: no SP state):
//     I   = sum_i +/-( (w_i * g_i * u_th) >> G_F ) << k_i     (multipliers)
//     V   = Vm - (Vm >>> k_m) + I
//     thr = (g * u_th) >> G_F
//     n   = largest n <= N_MAX with V >= n*thr    (comparator bank)
//     Vm' = V - n*thr,  w_out = n,  g_out = g
// g and g_i are unsigned fixed point with G_F fractional bits; input spikes
// from the compression units carry g_i = 1.0. Values saturate at G_MAX and at
// ACC_W bits.
//
// Timing: registers update on step; w_out/g_out hold the last step's spike.
// clear resets Vm to 0 and g to 1.0.
//
// From the paper: the burst function with exponent w, thresholds k*g*u_th,
// reset by n*g*u_th, zero-order synapse and a multiplier for
// g*u_th*w_i*w_spike. This design's choices: the burst function belongs to
// the presynaptic neuron and travels with its spike (as in the burst-coding
// scheme the paper builds on), the exponent is the weight of the spike fired
// in the previous step, BETA = 2.0, G_F, G_MAX, U_TH and widths.
module iow_burst_ne
  import tc_pkg::*;
#(
  parameter int unsigned FAN_IN = 8,
  parameter int unsigned ACC_W  = 32,
  parameter int          U_TH   = 64,
  parameter int unsigned N_MAX  = 16,
  parameter int unsigned G_W    = 16,
  parameter int unsigned G_F    = 8,
  parameter int unsigned BETA   = 512        // 2.0 in Q.G_F
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    step,
  input  wspike_t                 w_in  [FAN_IN],
  input  logic [G_W-1:0]          g_in  [FAN_IN],
  input  syn_w_t                  syn   [FAN_IN],
  input  shift_t                  k_m,
  output wspike_t                 w_out,
  output logic [G_W-1:0]          g_out,
  output logic signed [ACC_W-1:0] vm
);

  localparam longint GMAX = (64'sd1 <<< G_W) - 1;
  localparam longint ONE  = 64'sd1 <<< G_F;
  localparam longint SMAX = (64'sd1 <<< (ACC_W - 1)) - 1;
  localparam longint SMIN = -SMAX - 1;

  typedef logic [G_W-1:0] gpow_t [N_MAX+1];

  function automatic gpow_t build_pow();
    gpow_t  p;
    longint v;
    v = ONE;
    for (int unsigned w = 0; w <= N_MAX; w++) begin
      p[w] = G_W'(v);
      v = (v * longint'(BETA)) >>> G_F;
      if (v > GMAX) v = GMAX;
    end
    return p;
  endfunction

  localparam gpow_t BETA_POW = build_pow();

  function automatic longint sat(input longint v);
    if (v > SMAX) return SMAX;
    if (v < SMIN) return SMIN;
    return v;
  endfunction

  logic [G_W-1:0] g;
  longint         cur, term, v_pre, thr, vm_n, g_next;
  wspike_t        n_fire;

  always_comb begin
    cur = 0;
    for (int unsigned i = 0; i < FAN_IN; i++) begin
      term = (longint'(w_in[i]) * longint'(g_in[i]) * longint'(U_TH)) >>> G_F;
      term = term <<< syn[i].k;
      if (syn[i].en) cur = syn[i].neg ? cur - term : cur + term;
    end
    v_pre = sat(longint'(vm) - (longint'(vm) >>> k_m) + cur);
    thr   = (longint'(g) * longint'(U_TH)) >>> G_F;
    if (thr < 1) thr = 1;
    n_fire = '0;
    for (int unsigned n = 1; n <= N_MAX; n++) begin
      if (v_pre >= longint'(n) * thr) n_fire = wspike_t'(n);
    end
    vm_n = sat(v_pre - longint'(n_fire) * thr);
    if (n_fire != '0) begin
      g_next = (longint'(g) * longint'(BETA_POW[n_fire])) >>> G_F;
      if (g_next > GMAX) g_next = GMAX;
    end else begin
      g_next = ONE;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vm    <= '0;
      g     <= G_W'(ONE);
      w_out <= '0;
      g_out <= G_W'(ONE);
    end else if (clear) begin
      vm    <= '0;
      g     <= G_W'(ONE);
      w_out <= '0;
      g_out <= G_W'(ONE);
    end else if (step) begin
      vm    <= ACC_W'(vm_n);
      g     <= G_W'(g_next);
      w_out <= n_fire;
      g_out <= g;
    end
  end

endmodule
