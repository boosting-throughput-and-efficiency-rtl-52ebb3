// lsm_reservoir: recurrent hidden layer (liquid) of the liquid state machine.
//
// N_RES input-output-weighted neurons receive the N_IN compressed input
// channels and the weighted spikes all reservoir neurons emitted in the
// previous compressed step. As usual for a liquid state machine the
// reservoir synapses are fixed, not trained: the connectivity is sparse and
// random, generated at elaboration by tc_pkg::syn_hash from SEED, with
// connection probabilities P_IN/256 (input to reservoir) and P_RES/256
// (reservoir to reservoir, no self loops), a share INH/256 of inhibitory
// presynaptic neurons, and weights +/-2^k with k up to K_MAX_IN / K_MAX_RES.
// Unconnected synapses are constant zero and vanish in synthesis.
//
// BURST = 0 builds the layer from iow_ne (IOW LIF), BURST = 1 from
// iow_burst_ne (burst coding); g_res then carries each neuron's burst
// amplitude, otherwise it is constant 1.0.
//
// Timing: all neurons update together on step (one compressed time step per
// strobe); w_res is registered inside the neurons, so the recurrent input is
// the previous step's output.
//
// From the paper: a recurrent reservoir of 135 neurons fed by the input
// layer, neurons replaced by their IOW versions. This design's choices: the
// connection statistics, weights and SEED (the paper gives none).
module lsm_reservoir
  import tc_pkg::*;
#(
  parameter int unsigned N_IN      = 78,
  parameter int unsigned N_RES     = 135,
  parameter bit          BURST     = 1'b0,
  parameter int unsigned SEED      = 32'h1234_5678,
  parameter int unsigned P_IN      = 32,
  parameter int unsigned P_RES     = 26,
  parameter int unsigned INH       = 51,
  parameter int unsigned K_MAX_IN  = 3,
  parameter int unsigned K_MAX_RES = 2,
  parameter int          U_TH      = 64,
  parameter int unsigned G_W       = 16,
  parameter int unsigned G_F       = 8
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           step,
  input  wspike_t        w_in  [N_IN],
  input  shift_t         k_s,
  input  shift_t         k_m,
  output wspike_t        w_res [N_RES],
  output logic [G_W-1:0] g_res [N_RES]
);

  localparam int unsigned FI = N_IN + N_RES;

  wspike_t        fan_w [FI];
  logic [G_W-1:0] fan_g [FI];

  always_comb begin
    for (int unsigned i = 0; i < N_IN; i++) begin
      fan_w[i] = w_in[i];
      fan_g[i] = G_W'(1 << G_F);
    end
    for (int unsigned i = 0; i < N_RES; i++) begin
      fan_w[N_IN + i] = w_res[i];
      fan_g[N_IN + i] = g_res[i];
    end
  end

  for (genvar j = 0; j < N_RES; j++) begin : g_neu
    syn_w_t syn [FI];
    for (genvar i = 0; i < FI; i++) begin : g_syn
      if (i < N_IN) begin : g_in
        localparam syn_w_t S = syn_hash(SEED, i, j, P_IN, 0, K_MAX_IN);
        assign syn[i] = S;
      end else if (i - N_IN == j) begin : g_self
        assign syn[i] = SYN_NONE;
      end else begin : g_rec
        localparam syn_w_t S = syn_hash(SEED + 1, i, j, P_RES, INH, K_MAX_RES);
        assign syn[i] = S;
      end
    end

    if (BURST) begin : g_burst
      iow_burst_ne #(.FAN_IN(FI), .U_TH(U_TH), .G_W(G_W), .G_F(G_F)) u_ne (
        .clk, .rst_n, .clear, .step,
        .w_in(fan_w), .g_in(fan_g), .syn(syn), .k_m(k_m),
        .w_out(w_res[j]), .g_out(g_res[j]), .vm());
    end else begin : g_lif
      iow_ne #(.FAN_IN(FI), .U_TH(U_TH)) u_ne (
        .clk, .rst_n, .clear, .step,
        .w_in(fan_w), .syn(syn), .k_s(k_s), .k_m(k_m),
        .w_out(w_res[j]), .vm());
      assign g_res[j] = G_W'(1 << G_F);
    end
  end

endmodule
