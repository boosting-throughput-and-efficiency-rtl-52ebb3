// iscu: input spike compression unit, one per input spike channel.
//
// It turns N_cmp consecutive raw binary time steps of one channel into a
// single weighted spike whose weight is the number of raw spikes in that
// window, so the spike count is preserved exactly while the train becomes
// N_cmp times shorter. The structure follows the published block diagram:
// a demultiplexer performing serial-in/parallel-out (SIPO) into N_cmp lanes,
// an adder over the lanes and a D register holding the compressed weight.
//
// Two input modes, as in the paper:
//  * serial (serial_mode=1): one raw bit per s_valid cycle. Bit number c of a
//    window goes to lane c. When the N_cmp-th bit arrives the lanes plus that
//    bit are summed and registered. A compressed spike is therefore produced
//    every N_cmp accepted bits.
//  * parallel (serial_mode=0): the channel delivers a whole window at once in
//    p_in (bit t = raw step t of the window, only bits 0..N_cmp-1 are used);
//    the SIPO is skipped and the bits are summed on p_valid.
//
// Timing: w_spike/w_valid are registered; w_valid pulses for one cycle, the
// cycle after the last bit of a window (serial) or after p_valid (parallel).
// w_spike keeps its value until the next window completes.
//
// Own choices (the paper gives no such detail): a single clock with input
// valid strobes instead of the separate N_cmp-times faster demux clock drawn
// in the figure; a ratio of 0 is treated as 1; changing n_cmp or serial_mode
// restarts the serial window (clear does too).
module iscu
  import tc_pkg::*;
#(
  parameter int unsigned MAXR = MAX_RATIO
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,        // restart the serial window
  input  ratio_t          n_cmp,        // compression ratio 1..MAXR
  input  logic            serial_mode,
  input  logic            s_in,
  input  logic            s_valid,
  input  logic [MAXR-1:0] p_in,
  input  logic            p_valid,
  output wspike_t         w_spike,
  output logic            w_valid
);

  logic [MAXR-1:0] lane;          // SIPO lanes (demux outputs)
  ratio_t          cnt;           // next lane to fill
  ratio_t          n_eff;
  ratio_t          n_prev;
  logic            mode_prev;
  logic [MAXR-1:0] mask;
  wspike_t         sum_serial, sum_par;
  logic            last;

  always_comb begin
    n_eff = (n_cmp == '0) ? ratio_t'(1) : ((n_cmp > ratio_t'(MAXR)) ? ratio_t'(MAXR) : n_cmp);
    for (int unsigned b = 0; b < MAXR; b++) mask[b] = (b < n_eff);
    last = (cnt == n_eff - ratio_t'(1));
    // adder over the lanes already filled plus the bit arriving now
    sum_serial = wspike_t'(s_in);
    sum_par    = '0;
    for (int unsigned b = 0; b < MAXR; b++) begin
      if (b < cnt) sum_serial = sum_serial + wspike_t'(lane[b]);
      sum_par = sum_par + wspike_t'(p_in[b] && mask[b]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lane      <= '0;
      cnt       <= '0;
      w_spike   <= '0;
      w_valid   <= 1'b0;
      n_prev    <= ratio_t'(1);
      mode_prev <= 1'b0;
    end else begin
      w_valid   <= 1'b0;
      n_prev    <= n_eff;
      mode_prev <= serial_mode;
      if (clear || n_eff != n_prev || serial_mode != mode_prev) begin
        cnt  <= '0;
        lane <= '0;
      end else if (serial_mode) begin
        if (s_valid) begin
          lane[cnt[$clog2(MAXR)-1:0]] <= s_in;
          if (last) begin
            cnt     <= '0;
            w_spike <= sum_serial;
            w_valid <= 1'b1;
          end else begin
            cnt <= cnt + ratio_t'(1);
          end
        end
      end else if (p_valid) begin
        w_spike <= sum_par;
        w_valid <= 1'b1;
      end
    end
  end

endmodule
