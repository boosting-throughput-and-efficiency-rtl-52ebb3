// ptc_snn_top: liquid state machine accelerator with programmable time
// compression (PTC-SNN).
//
// A spiking network normally advances one time step per update and needs
// many steps per sample. Here every input channel first passes through an
// input spike compression unit (iscu) that merges N_cmp raw steps into one
// weighted spike, so the network runs N_cmp times fewer steps per sample.
// All neurons are input-output-weighted (iow_ne, or iow_burst_ne when
// BURST = 1) so weighted spikes are consumed and produced without losing
// spike counts, and every time constant is rescaled for the compressed step
// by the global compression controller (global_comp_ctrl), which is
// programmed with the ratio at run time (1:1 .. 16:1).
//
// Data path, one compressed step:
//   raw spikes -> N_IN x iscu -> lsm_reservoir (N_RES, recurrent, fixed)
//              -> readout_layer (N_OUT, trained weights, spike counters)
//
// Interface
//   ratio_cmd/ratio_we  compression ratio command (takes effect next cycle)
//   serial_mode         1: each channel delivers one raw bit per s_valid;
//                       a compressed step happens every N_cmp accepted bits.
//                       0: each channel delivers a window of raw bits per
//                       p_valid (bit t = raw step t, bits >= N_cmp ignored);
//                       one compressed step per p_valid.
//   clear               resets all neuron state and counters (new sample)
//   wr_*                readout weight write port (training engine / host)
//   out_w, out_cnt      readout spikes of the last step and their sums
//   res_w               reservoir spikes (for the training engine)
//   k_c                 scaled learning-trace time constant shift for the
//                       training engine, which is outside this design
//   step_res, step_out  strobes of the reservoir and readout updates
//
// Timing: an input window accepted in cycle t is compressed in t+1
// (step_res), the reservoir updates at the end of that cycle and the readout
// one cycle later (step_out) using the fresh reservoir spikes and the same
// time-constant shifts. In parallel mode one sample of T raw steps takes
// ceil(T/N_cmp) windows, i.e. that many cycles plus two of latency.
//
// Sizes follow the paper's TI46 configuration (78 input channels, 135
// reservoir neurons); the 26 readout neurons (one per spoken letter) and all
// time constants and thresholds are this design's choices.
module ptc_snn_top
  import tc_pkg::*;
#(
  parameter int unsigned N_IN    = 78,
  parameter int unsigned N_RES   = 135,
  parameter int unsigned N_OUT   = 26,
  parameter bit          BURST   = 1'b0,
  parameter int unsigned K_S_NOM = 3,
  parameter int unsigned K_M_NOM = 5,
  parameter int unsigned K_C_NOM = 6,
  parameter int          U_TH    = 64,
  parameter int unsigned SEED    = 32'h1234_5678,
  parameter int unsigned CNT_W   = 16,
  localparam int unsigned ROW_W  = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int unsigned COL_W  = (N_RES > 1) ? $clog2(N_RES) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  ratio_t               ratio_cmd,
  input  logic                 ratio_we,
  input  logic                 serial_mode,
  input  logic [N_IN-1:0]      s_in,
  input  logic                 s_valid,
  input  logic [MAX_RATIO-1:0] p_in [N_IN],
  input  logic                 p_valid,
  input  logic                 clear,
  input  logic                 wr_en,
  input  logic [ROW_W-1:0]     wr_row,
  input  logic [COL_W-1:0]     wr_col,
  input  syn_w_t               wr_data,
  output wspike_t              out_w   [N_OUT],
  output logic [CNT_W-1:0]     out_cnt [N_OUT],
  output wspike_t              res_w   [N_RES],
  output ratio_t               n_cmp,
  output shift_t               k_c,
  output logic                 avg_hi,
  output logic                 step_res,
  output logic                 step_out
);

  wspike_t        in_w  [N_IN];
  logic           in_v  [N_IN];
  logic [15:0]    res_g [N_RES];
  shift_t         k_s, k_m, k_s_d, k_m_d;

  // ---------------- global compression controller ----------------
  global_comp_ctrl #(.K_S_NOM(K_S_NOM), .K_M_NOM(K_M_NOM), .K_C_NOM(K_C_NOM)) u_gcc (
    .clk, .rst_n, .ratio_cmd, .ratio_we, .clear, .step(step_res),
    .n_cmp, .k_s, .k_m, .k_c, .avg_hi);

  // ---------------- input layer: one ISCU per channel ----------------
  for (genvar c = 0; c < N_IN; c++) begin : g_iscu
    iscu u_iscu (
      .clk, .rst_n, .clear, .n_cmp, .serial_mode,
      .s_in(s_in[c]), .s_valid, .p_in(p_in[c]), .p_valid,
      .w_spike(in_w[c]), .w_valid(in_v[c]));
  end

  // all ISCUs share ratio, mode and strobes, so channel 0 times the step
  assign step_res = in_v[0] & ~clear;

  // ---------------- hidden layer: reservoir ----------------
  lsm_reservoir #(.N_IN(N_IN), .N_RES(N_RES), .BURST(BURST), .SEED(SEED), .U_TH(U_TH)) u_res (
    .clk, .rst_n, .clear, .step(step_res), .w_in(in_w), .k_s, .k_m,
    .w_res(res_w), .g_res(res_g));

  // readout follows one cycle later with the same time-constant shifts
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_out <= 1'b0;
      k_s_d    <= '0;
      k_m_d    <= '0;
    end else begin
      step_out <= step_res;
      if (step_res) begin
        k_s_d <= k_s;
        k_m_d <= k_m;
      end
    end
  end

  // ---------------- output layer: readout ----------------
  readout_layer #(.N_RES(N_RES), .N_OUT(N_OUT), .BURST(BURST), .U_TH(U_TH), .CNT_W(CNT_W)) u_ro (
    .clk, .rst_n, .clear, .step(step_out), .w_res(res_w), .g_res(res_g),
    .k_s(k_s_d), .k_m(k_m_d), .wr_en, .wr_row, .wr_col, .wr_data,
    .w_out(out_w), .out_cnt);

  // every ISCU must produce its compressed spike in the same cycle
  always_ff @(posedge clk) begin
    for (int c = 1; c < N_IN; c++)
      assert (in_v[c] == in_v[0]) else $error("ISCU %0d out of step", c);
  end

endmodule
