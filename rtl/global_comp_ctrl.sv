// global_comp_ctrl: global compression controller.
//
// It holds the user's compression-ratio command and from it drives the whole
// accelerator: the ratio N_cmp of every input spike compression unit and the
// decay shifts of every time constant in the network. Because every time
// constant is scaled by the same rule, one controller serves all neurons:
// it holds one table (tc_lut) and one time-averaging sequencer (tc_avg) per
// distinct time constant - synaptic (tau_s), membrane (tau_m) and the
// learning trace (tau_c) - and broadcasts the shift to use in the current
// compressed step.
//
// Interface: ratio_cmd is loaded when ratio_we is high; 0 is taken as 1 and
// values above MAXR as MAXR. n_cmp is the registered ratio. k_s, k_m, k_c are
// combinational and valid for the step in progress; the sequencers advance on
// step. Loading a new ratio or clear restarts the averaging pattern.
//
// The paper draws the time-constant LUT inside each neuron element and also
// says all constants are scaled by one common unit in this controller; this
// design follows the latter and shares one table per time constant. Reset
// value of the ratio (1:1) is this design's choice.
module global_comp_ctrl
  import tc_pkg::*;
#(
  parameter int unsigned K_S_NOM = 3,     // tau_s = 8 steps uncompressed
  parameter int unsigned K_M_NOM = 5,     // tau_m = 32 steps uncompressed
  parameter int unsigned K_C_NOM = 6,     // tau_c = 64 steps uncompressed
  parameter int unsigned P_W     = 4,
  parameter int unsigned MAXR    = MAX_RATIO
) (
  input  logic   clk,
  input  logic   rst_n,
  input  ratio_t ratio_cmd,
  input  logic   ratio_we,
  input  logic   clear,
  input  logic   step,
  output ratio_t n_cmp,
  output shift_t k_s,
  output shift_t k_m,
  output shift_t k_c,
  output logic   avg_hi        // some time constant uses its larger value this step
);

  ratio_t         ratio_q;
  shift_t         ks_lo, km_lo, kc_lo;
  logic [P_W:0]   ks_n, km_n, kc_n;
  logic           hs, hm, hc;
  logic           restart;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ratio_q <= ratio_t'(1);
    else if (ratio_we) begin
      if (ratio_cmd == '0)                 ratio_q <= ratio_t'(1);
      else if (ratio_cmd > ratio_t'(MAXR)) ratio_q <= ratio_t'(MAXR);
      else                                 ratio_q <= ratio_cmd;
    end
  end

  assign n_cmp   = ratio_q;
  assign restart = clear | ratio_we;
  assign avg_hi  = hs | hm | hc;

  tc_lut #(.K_NOM(K_S_NOM), .P_W(P_W), .MAXR(MAXR)) u_lut_s (.ratio(ratio_q), .k_lo(ks_lo), .n_hi(ks_n));
  tc_lut #(.K_NOM(K_M_NOM), .P_W(P_W), .MAXR(MAXR)) u_lut_m (.ratio(ratio_q), .k_lo(km_lo), .n_hi(km_n));
  tc_lut #(.K_NOM(K_C_NOM), .P_W(P_W), .MAXR(MAXR)) u_lut_c (.ratio(ratio_q), .k_lo(kc_lo), .n_hi(kc_n));

  tc_avg #(.P_W(P_W)) u_avg_s (.clk, .rst_n, .clear(restart), .step, .k_lo(ks_lo), .n_hi(ks_n), .k_now(k_s), .use_hi(hs));
  tc_avg #(.P_W(P_W)) u_avg_m (.clk, .rst_n, .clear(restart), .step, .k_lo(km_lo), .n_hi(km_n), .k_now(k_m), .use_hi(hm));
  tc_avg #(.P_W(P_W)) u_avg_c (.clk, .rst_n, .clear(restart), .step, .k_lo(kc_lo), .n_hi(kc_n), .k_now(k_c), .use_hi(hc));

endmodule
