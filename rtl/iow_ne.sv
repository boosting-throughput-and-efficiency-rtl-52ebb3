// iow_ne: input-output-weighted leaky integrate-and-fire neuron element.
//
// The neuron takes FAN_IN weighted input spikes (each a count 0..16 of merged
// raw spikes) and produces a weighted output spike. It has the two parts of
// the published neuron element:
//
//  Synaptic unit (SU). Each synaptic weight is +/-2^k, so the product of the
//  input spike weight and the synaptic weight is the spike weight shifted
//  left by k. The products are summed into the synaptic response SP, which
//  decays with the (scaled) synaptic time constant 2^k_s:
//      SP' = SP - (SP >>> k_s) + sum_i +/-(w_i << k_i)
//  Neural unit (NU). The membrane potential integrates SP' with a leak of
//  time constant 2^k_m:
//      V   = Vm - (Vm >>> k_m) + SP'
//  A bank of comparators against the threshold set {u_th, 2u_th, ..., N_MAX
//  u_th} finds the largest n with V >= n*u_th. The output spike weight is n
//  (0 = no spike) and the reset subtracts n*u_th from V, so an input burst
//  that drives V several thresholds high in one compressed step is passed on
//  as one spike of weight n instead of being cut to a single binary spike.
//
// Timing: one compressed time step per step strobe. SP, Vm and w_out are
// registers updated on step; w_out holds the spike of the last step.
// clear zeroes the state between samples. Arithmetic saturates at ACC_W bits.
//
// From the paper: the SU/NU structure, power-of-two weights realised as
// shifts, shift-based decay, the multi-threshold firing and reset rule. This
// design's choices: one first-order SP stage as drawn in the neuron figure
// (the text mentions a second-order synapse), SP' feeding V in the same
// step, the word width, U_TH and N_MAX = 16 (the largest compression ratio),
// and that the shifts k_s/k_m come from the shared global controller.
module iow_ne
  import tc_pkg::*;
#(
  parameter int unsigned FAN_IN = 8,
  parameter int unsigned ACC_W  = 24,
  parameter int          U_TH   = 64,
  parameter int unsigned N_MAX  = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    step,
  input  wspike_t                 w_in  [FAN_IN],
  input  syn_w_t                  syn   [FAN_IN],
  input  shift_t                  k_s,
  input  shift_t                  k_m,
  output wspike_t                 w_out,
  output logic signed [ACC_W-1:0] vm
);

  localparam logic signed [ACC_W+1:0] SMAX = (ACC_W + 2)'((1 <<< (ACC_W - 1)) - 1);
  localparam logic signed [ACC_W+1:0] SMIN = -SMAX - 1;

  function automatic logic signed [ACC_W-1:0] sat(input logic signed [ACC_W+1:0] v);
    if (v > SMAX) return SMAX[ACC_W-1:0];
    if (v < SMIN) return SMIN[ACC_W-1:0];
    return v[ACC_W-1:0];
  endfunction

  logic signed [ACC_W-1:0] sp;
  logic signed [ACC_W-1:0] sp_n, v_pre, vm_n;
  logic signed [ACC_W+1:0] cur;
  wspike_t                 n_fire;

  always_comb begin
    // synaptic unit: weighted spikes times power-of-two weights
    cur = '0;
    for (int unsigned i = 0; i < FAN_IN; i++) begin
      if (syn[i].en) begin
        if (syn[i].neg) cur = cur - $signed((ACC_W + 2)'(w_in[i]) << syn[i].k);
        else            cur = cur + $signed((ACC_W + 2)'(w_in[i]) << syn[i].k);
      end
    end
    sp_n  = sat((ACC_W + 2)'(sp) - (ACC_W + 2)'(sp >>> k_s) + cur);
    // neural unit: leaky integration
    v_pre = sat((ACC_W + 2)'(vm) - (ACC_W + 2)'(vm >>> k_m) + (ACC_W + 2)'(sp_n));
    // comparator bank against n*u_th
    n_fire = '0;
    for (int unsigned n = 1; n <= N_MAX; n++) begin
      if ((ACC_W + 2)'(v_pre) >= $signed((ACC_W + 2)'(n * U_TH))) n_fire = wspike_t'(n);
    end
    vm_n = sat((ACC_W + 2)'(v_pre) - $signed((ACC_W + 2)'(n_fire) * (ACC_W + 2)'(U_TH)));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp    <= '0;
      vm    <= '0;
      w_out <= '0;
    end else if (clear) begin
      sp    <= '0;
      vm    <= '0;
      w_out <= '0;
    end else if (step) begin
      sp    <= sp_n;
      vm    <= vm_n;
      w_out <= n_fire;
    end
  end

endmodule
