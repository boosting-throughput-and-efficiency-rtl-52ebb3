// tc_avg: time-averaging sequencer for one scaled time constant.
//
// Given the table entry of tc_lut (k_lo, n_hi), it tells the datapath which
// decay shift to use in the current compressed time step: k_lo + 1 in n_hi
// of every 2^P_W steps and k_lo otherwise, so that the time-averaged time
// constant 2^k_lo * (1 + n_hi/2^P_W) equals the scaled value. The choice is
// made by a phase accumulator (acc += n_hi modulo 2^P_W, use the larger
// constant on wrap-around), which spreads the larger constant evenly over
// the period: with n_hi/2^P_W = 1/4 the pattern is three steps of 2^k_lo
// then one of 2^(k_lo+1), as in the paper's example of an averaged time
// constant of 5 from 4 and 8.
//
// Timing: k_now is combinational from the accumulator and the inputs and is
// valid for the step in progress; the accumulator advances on each step
// strobe. clear restarts the pattern. The accumulator scheme is this
// design's choice; the paper gives only the usage-frequency rule.
module tc_avg
  import tc_pkg::*;
#(
  parameter int unsigned P_W = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         step,
  input  shift_t       k_lo,
  input  logic [P_W:0] n_hi,
  output shift_t       k_now,
  output logic         use_hi
);

  logic [P_W-1:0] acc;
  logic [P_W+1:0] sum;

  always_comb begin
    sum    = {2'b00, acc} + {1'b0, n_hi};
    use_hi = (sum >= (P_W + 2)'(1 << P_W));
    k_now  = use_hi ? k_lo + shift_t'(1) : k_lo;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (clear) acc <= '0;
    else if (step)  acc <= sum[P_W-1:0];
  end

endmodule
