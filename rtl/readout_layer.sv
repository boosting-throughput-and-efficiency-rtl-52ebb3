// readout_layer: trained output layer of the liquid state machine.
//
// N_OUT input-output-weighted neurons (the output elements) are fully
// connected to the N_RES reservoir neurons. These are the only plastic
// synapses of the network: their weights (+/-2^k or absent, tc_pkg::syn_w_t)
// live in a register array that a training engine or host writes through a
// simple write port (wr_en, wr_row = output neuron, wr_col = reservoir
// neuron, wr_data). The array resets to "no connection".
//
// Each output neuron also accumulates the weights of the spikes it emits
// since the last clear in out_cnt (saturating at CNT_W bits); the class
// decision of a sample is the neuron with the largest count. Because weights
// are counts of merged spikes, out_cnt equals the spike count an
// uncompressed readout neuron would have produced, which is what makes the
// compressed and uncompressed networks comparable.
//
// BURST selects iow_burst_ne instead of iow_ne, as in lsm_reservoir.
//
// Timing: neurons update on step; a write takes effect in the next cycle;
// out_cnt adds the spike weight registered by the neurons one cycle after
// the step that produced it.
//
// From the paper: fully connected readout with plastic synapses, IOW neurons.
// This design's choices: the write port, the spike-weight counters, widths.
module readout_layer
  import tc_pkg::*;
#(
  parameter int unsigned N_RES = 135,
  parameter int unsigned N_OUT = 26,
  parameter bit          BURST = 1'b0,
  parameter int          U_TH  = 64,
  parameter int unsigned CNT_W = 16,
  parameter int unsigned G_W   = 16,
  parameter int unsigned G_F   = 8,
  localparam int unsigned ROW_W = (N_OUT > 1) ? $clog2(N_OUT) : 1,
  localparam int unsigned COL_W = (N_RES > 1) ? $clog2(N_RES) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             step,
  input  wspike_t          w_res [N_RES],
  input  logic [G_W-1:0]   g_res [N_RES],
  input  shift_t           k_s,
  input  shift_t           k_m,
  input  logic             wr_en,
  input  logic [ROW_W-1:0] wr_row,
  input  logic [COL_W-1:0] wr_col,
  input  syn_w_t           wr_data,
  output wspike_t          w_out   [N_OUT],
  output logic [CNT_W-1:0] out_cnt [N_OUT]
);

  syn_w_t wmem [N_OUT][N_RES];
  logic   step_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_OUT; r++)
        for (int c = 0; c < N_RES; c++) wmem[r][c] <= SYN_NONE;
    end else if (wr_en && (int'(wr_row) < N_OUT) && (int'(wr_col) < N_RES)) begin
      wmem[wr_row][wr_col] <= wr_data;
    end
  end

  for (genvar j = 0; j < N_OUT; j++) begin : g_out
    if (BURST) begin : g_burst
      logic [G_W-1:0] g_unused;
      iow_burst_ne #(.FAN_IN(N_RES), .U_TH(U_TH), .G_W(G_W), .G_F(G_F)) u_ne (
        .clk, .rst_n, .clear, .step,
        .w_in(w_res), .g_in(g_res), .syn(wmem[j]), .k_m(k_m),
        .w_out(w_out[j]), .g_out(g_unused), .vm());
    end else begin : g_lif
      iow_ne #(.FAN_IN(N_RES), .U_TH(U_TH)) u_ne (
        .clk, .rst_n, .clear, .step,
        .w_in(w_res), .syn(wmem[j]), .k_s(k_s), .k_m(k_m),
        .w_out(w_out[j]), .vm());
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)      out_cnt[j] <= '0;
      else if (clear)  out_cnt[j] <= '0;
      else if (step_d) begin
        if ({1'b0, out_cnt[j]} + (CNT_W + 1)'(w_out[j]) > (CNT_W + 1)'({CNT_W{1'b1}}))
          out_cnt[j] <= '1;
        else
          out_cnt[j] <= out_cnt[j] + CNT_W'(w_out[j]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     step_d <= 1'b0;
    else            step_d <= step & ~clear;
  end

endmodule
