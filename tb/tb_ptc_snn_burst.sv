// tb_ptc_snn_burst: end-to-end test of the accelerator built with
// burst-coding neurons (BURST = 1), the configuration for burst-coded SNNs.
//
// A small network (6 inputs, 12 reservoir neurons, 4 readout neurons) runs
// the same random raw trains at ratios 1, 2, 4, 8 and 16 in both input
// modes. Checked: compressed step counts, cycle counts, preserved input
// spike counts, readout sums equal to the sum of the readout spike weights
// seen on every readout step, identical results in serial and parallel
// mode, and that bursts (reservoir spikes sent with amplitude g > 1) and
// weighted spikes occur. The burst neuron datapath itself is compared with
// a reference model in the reservoir and neuron testbenches.
module tb_ptc_snn_burst;
  import tc_pkg::*;

  localparam int NI = 6, NR = 12, NO = 4, UTH = 32, T = 64;

  logic             clk = 1'b0, rst_n = 1'b0;
  ratio_t           ratio_cmd = 5'd1;
  logic             ratio_we = 1'b0, serial_mode = 1'b0;
  logic [NI-1:0]    s_in = '0;
  logic             s_valid = 1'b0;
  logic [15:0]      p_in [NI];
  logic             p_valid = 1'b0, clear = 1'b0;
  logic             wr_en = 1'b0;
  logic [1:0]       wr_row = '0;
  logic [3:0]       wr_col = '0;
  syn_w_t           wr_data = '0;
  wspike_t          out_w [NO];
  logic [15:0]      out_cnt [NO];
  wspike_t          res_w [NR];
  ratio_t           n_cmp;
  shift_t           k_c;
  logic             avg_hi, step_res, step_out;

  ptc_snn_top #(.N_IN(NI), .N_RES(NR), .N_OUT(NO), .BURST(1'b1), .U_TH(UTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int m_burst = 0, m_wres = 0, steps_seen = 0;
  longint comp_in, acc_out [NO];
  bit mon_on = 0;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) begin
    if (mon_on) begin
      if (step_res) begin
        steps_seen++;
        for (int i = 0; i < NI; i++) comp_in += dut.in_w[i];
      end
      #1;
      if (dut.u_ro.step_d) for (int o = 0; o < NO; o++) acc_out[o] += out_w[o];
      if (step_res) for (int j = 0; j < NR; j++) begin
        if (res_w[j] != 0 && dut.res_g[j] > 16'd256) m_burst++;
        if (res_w[j] > 1) m_wres++;
      end
    end
  end

  task automatic run_sample(input logic [T-1:0] raw [NI], input int r, input bit serial, output longint sums [NO]);
    int nwin, c0, c1;
    longint raw_cnt;
    nwin = (T + r - 1) / r;
    clear <= 1'b1;
    @(posedge clk);
    clear <= 1'b0;
    serial_mode <= serial;
    @(posedge clk);
    @(posedge clk);
    steps_seen = 0; comp_in = 0; raw_cnt = 0;
    for (int o = 0; o < NO; o++) acc_out[o] = 0;
    for (int i = 0; i < NI; i++) for (int t = 0; t < T; t++) raw_cnt += raw[i][t];
    mon_on = 1;
    c0 = $time / 10;
    if (!serial) begin
      for (int w = 0; w < nwin; w++) begin
        for (int i = 0; i < NI; i++) begin
          logic [15:0] win;
          win = '0;
          for (int b = 0; b < r; b++) if (w * r + b < T) win[b] = raw[i][w * r + b];
          p_in[i] <= win;
        end
        p_valid <= 1'b1;
        @(posedge clk);
      end
      p_valid <= 1'b0;
    end else begin
      for (int t = 0; t < nwin * r; t++) begin
        logic [NI-1:0] bits;
        for (int i = 0; i < NI; i++) bits[i] = (t < T) ? raw[i][t] : 1'b0;
        s_in <= bits;
        s_valid <= 1'b1;
        @(posedge clk);
      end
      s_valid <= 1'b0;
    end
    @(posedge clk);
    @(posedge clk);
    #2;
    c1 = $time / 10;
    check(steps_seen == nwin, $sformatf("ratio %0d: %0d steps, expected %0d", r, steps_seen, nwin));
    if (!serial) check(c1 - c0 == nwin + 2, $sformatf("ratio %0d: %0d cycles, expected %0d", r, c1 - c0, nwin + 2));
    check(comp_in == raw_cnt, $sformatf("ratio %0d: compressed %0d spikes, raw %0d", r, comp_in, raw_cnt));
    @(posedge clk);
    #2;
    for (int o = 0; o < NO; o++) begin
      check(longint'(out_cnt[o]) == acc_out[o], $sformatf("ratio %0d: out_cnt[%0d] %0d, spikes seen %0d", r, o, out_cnt[o], acc_out[o]));
      sums[o] = out_cnt[o];
    end
    mon_on = 0;
  endtask

  initial begin
    logic [T-1:0] raw [NI];
    longint sp [NO], ss [NO];
    int ratios [5] = '{1, 2, 4, 8, 16};
    longint total;
    for (int i = 0; i < NI; i++) p_in[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int r = 0; r < NO; r++)
      for (int c = 0; c < NR; c++) begin
        syn_w_t s;
        s.en = 1'b1; s.neg = ($urandom_range(0, 9) < 2); s.k = 3'($urandom_range(0, 1));
        wr_en <= 1'b1; wr_row <= 2'(r); wr_col <= 4'(c); wr_data <= s;
        @(posedge clk);
      end
    wr_en <= 1'b0;
    total = 0;
    for (int i = 0; i < NI; i++) for (int t = 0; t < T; t++) raw[i][t] = ($urandom_range(0, 99) < 40);
    foreach (ratios[k]) begin
      ratio_cmd <= ratio_t'(ratios[k]); ratio_we <= 1'b1;
      @(posedge clk);
      ratio_we <= 1'b0;
      @(posedge clk);
      run_sample(raw, ratios[k], 1'b0, sp);
      run_sample(raw, ratios[k], 1'b1, ss);
      for (int o = 0; o < NO; o++) begin
        check(sp[o] == ss[o], $sformatf("ratio %0d: serial %0d != parallel %0d", ratios[k], ss[o], sp[o]));
        total += sp[o];
      end
    end
    $display("burst spikes %0d, weighted reservoir spikes %0d, readout spike weight %0d", m_burst, m_wres, total);
    check(m_burst > 0, "no burst spike");
    check(m_wres > 0, "no weighted reservoir spike");
    check(total > 0, "readout never fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
