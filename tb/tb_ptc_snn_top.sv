// tb_ptc_snn_top: end-to-end testbench of the time-compressed LSM.
//
// A small network (4 input channels, 10 reservoir neurons, 3 readout
// neurons) runs several samples of random raw spike trains, each of T = 48
// raw steps, at ratios 1, 2, 3, 4, 5, 8 and 16, in both input modes
// (parallel windows and serial bits). A reference model kept here follows
// the whole network: it compresses the raw trains itself (spike counts per
// window), rebuilds the reservoir connectivity from the same hash, and
// updates reservoir and readout neurons every compressed step; it takes the
// time-constant shifts from the controller, which has its own testbench.
// Checked:
//  * every reservoir and readout spike and the readout spike-weight sums;
//  * the compressed input keeps the raw spike count;
//  * the number of compressed steps per sample is ceil(T/ratio) and, in
//    parallel mode, the sample takes exactly that many cycles plus 2;
//  * serial and parallel mode give identical readout sums for the same train.
// Each mechanism must happen at least once: ratio change, serial mode,
// parallel mode, weighted input spike (>1), weighted reservoir spike (>1),
// time averaging using the larger constant, readout weight writes, clear.
module tb_ptc_snn_top;
  import tc_pkg::*;

  localparam int NI = 4, NR = 10, NO = 3, UTH = 16, T = 48;
  localparam int unsigned SD = 32'h1234_5678;

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

  ptc_snn_top #(.N_IN(NI), .N_RES(NR), .N_OUT(NO), .U_TH(UTH), .SEED(SD)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int m_ratio_change = 0, m_serial = 0, m_parallel = 0, m_win = 0, m_wres = 0, m_avg = 0, m_wr = 0, m_clear = 0;

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

  function automatic syn_w_t conn(input int i, input int j);
    if (i < NI) return syn_hash(SD, i, j, 32, 0, 3);
    if (i - NI == j) return SYN_NONE;
    return syn_hash(SD + 1, i, j, 26, 51, 2);
  endfunction

  // ---------------- reference model ----------------
  syn_w_t  wm [NO][NR];
  longint  r_sp [NR], r_vm [NR], r_w [NR];
  longint  o_sp [NO], o_vm [NO], o_w [NO], o_cnt [NO];
  longint  raw_in_spikes, comp_in_spikes;
  int      steps_seen;
  bit      ref_on = 0;

  function automatic longint fire(inout longint v);
    longint n;
    n = (v >= UTH) ? v / UTH : 0;
    if (n > 16) n = 16;
    v = v - n * UTH;
    return n;
  endfunction

  task automatic ref_reset();
    for (int j = 0; j < NR; j++) begin r_sp[j] = 0; r_vm[j] = 0; r_w[j] = 0; end
    for (int j = 0; j < NO; j++) begin o_sp[j] = 0; o_vm[j] = 0; o_w[j] = 0; o_cnt[j] = 0; end
  endtask

  always @(posedge clk) begin
    longint cur, v, nw [NR], nin [NI];
    int ks, km;
    if (ref_on) begin
      // readout first: it uses the reservoir spikes of the previous step
      if (step_out) begin
        ks = dut.k_s_d; km = dut.k_m_d;
        for (int r = 0; r < NO; r++) begin
          cur = 0;
          for (int c = 0; c < NR; c++)
            if (wm[r][c].en) cur += (wm[r][c].neg ? -1 : 1) * r_w[c] * (longint'(1) << wm[r][c].k);
          o_sp[r] = o_sp[r] - (o_sp[r] >>> ks) + cur;
          v = o_vm[r] - (o_vm[r] >>> km) + o_sp[r];
          o_w[r] = fire(v);
          o_vm[r] = v;
          o_cnt[r] += o_w[r];
        end
      end
      if (step_res) begin
        steps_seen++;
        ks = dut.k_s; km = dut.k_m;
        if (avg_hi) m_avg++;
        for (int i = 0; i < NI; i++) begin
          nin[i] = dut.in_w[i];
          comp_in_spikes += nin[i];
          if (nin[i] > 1) m_win++;
        end
        for (int j = 0; j < NR; j++) begin
          cur = 0;
          for (int i = 0; i < NI + NR; i++) begin
            syn_w_t s;
            s = conn(i, j);
            if (s.en) cur += (s.neg ? -1 : 1) * ((i < NI) ? nin[i] : r_w[i - NI]) * (longint'(1) << s.k);
          end
          r_sp[j] = r_sp[j] - (r_sp[j] >>> ks) + cur;
          v = r_vm[j] - (r_vm[j] >>> km) + r_sp[j];
          nw[j] = fire(v);
          r_vm[j] = v;
        end
        for (int j = 0; j < NR; j++) begin
          r_w[j] = nw[j];
          if (nw[j] > 1) m_wres++;
        end
      end
      #1;
      if (step_out) for (int r = 0; r < NO; r++)
        check(longint'(out_w[r]) == o_w[r], $sformatf("readout %0d: %0d expected %0d", r, out_w[r], o_w[r]));
      if (step_res) for (int j = 0; j < NR; j++)
        check(longint'(res_w[j]) == r_w[j], $sformatf("reservoir %0d: %0d expected %0d", j, res_w[j], r_w[j]));
    end
  end

  // independent check of the compressed input: the ISCU weights of one step
  // are the raw spike counts of the window the testbench sent
  // (done through comp_in_spikes vs raw_in_spikes per sample)

  task automatic set_ratio(input int r);
    ratio_cmd <= ratio_t'(r);
    ratio_we  <= 1'b1;
    @(posedge clk);
    ratio_we  <= 1'b0;
    @(posedge clk);
    m_ratio_change++;
  endtask

  task automatic do_clear();
    clear <= 1'b1;
    @(posedge clk);
    clear <= 1'b0;
    ref_reset();
    m_clear++;
  endtask

  task automatic write_weights();
    for (int r = 0; r < NO; r++)
      for (int c = 0; c < NR; c++) begin
        wm[r][c].en  = ($urandom_range(0, 9) < 9);
        wm[r][c].neg = ($urandom_range(0, 9) < 2);
        wm[r][c].k   = 3'($urandom_range(0, 2));
        if (!wm[r][c].en) wm[r][c] = '0;
        wr_en <= 1'b1; wr_row <= 2'(r); wr_col <= 4'(c); wr_data <= wm[r][c];
        @(posedge clk);
        m_wr++;
      end
    wr_en <= 1'b0;
  endtask

  // run one sample of raw trains at ratio r; returns the readout sums
  task automatic run_sample(input logic [T-1:0] raw [NI], input int r, input bit serial,
                            output longint sums [NO]);
    int nwin, c0, c1;
    nwin = (T + r - 1) / r;
    do_clear();
    serial_mode <= serial;
    @(posedge clk);
    @(posedge clk);
    steps_seen = 0;
    raw_in_spikes = 0;
    comp_in_spikes = 0;
    for (int i = 0; i < NI; i++) for (int t = 0; t < T; t++) raw_in_spikes += raw[i][t];
    ref_on = 1;
    c0 = $time / 10;
    if (!serial) begin
      m_parallel++;
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
      m_serial++;
      for (int t = 0; t < nwin * r; t++) begin
        logic [NI-1:0] bits;
        for (int i = 0; i < NI; i++) bits[i] = (t < T) ? raw[i][t] : 1'b0;
        s_in <= bits;
        s_valid <= 1'b1;
        @(posedge clk);
      end
      s_valid <= 1'b0;
    end
    // wait for the pipeline: compression register + readout
    @(posedge clk);
    @(posedge clk);
    #2;
    c1 = $time / 10;
    check(steps_seen == nwin, $sformatf("ratio %0d: %0d compressed steps, expected %0d", r, steps_seen, nwin));
    if (!serial) check(c1 - c0 == nwin + 2, $sformatf("ratio %0d: sample took %0d cycles, expected %0d", r, c1 - c0, nwin + 2));
    check(raw_in_spikes == comp_in_spikes, $sformatf("ratio %0d: compressed input has %0d spikes, raw %0d", r, comp_in_spikes, raw_in_spikes));
    @(posedge clk);
    #1;
    for (int o = 0; o < NO; o++) begin
      check(longint'(out_cnt[o]) == o_cnt[o], $sformatf("ratio %0d: readout sum %0d = %0d expected %0d", r, o, out_cnt[o], o_cnt[o]));
      sums[o] = out_cnt[o];
    end
    ref_on = 0;
  endtask

  initial begin
    logic [T-1:0] raw [NI];
    longint sp [NO], ss [NO];
    int ratios [7] = '{1, 2, 3, 4, 5, 8, 16};
    int total_out;
    for (int i = 0; i < NI; i++) p_in[i] = '0;
    ref_reset();
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    write_weights();
    total_out = 0;
    for (int smp = 0; smp < 3; smp++) begin
      for (int i = 0; i < NI; i++)
        for (int t = 0; t < T; t++) raw[i][t] = ($urandom_range(0, 99) < 45);
      foreach (ratios[k]) begin
        set_ratio(ratios[k]);
        check(n_cmp == ratio_t'(ratios[k]), "ratio not loaded");
        run_sample(raw, ratios[k], 1'b0, sp);
        run_sample(raw, ratios[k], 1'b1, ss);
        for (int o = 0; o < NO; o++) begin
          check(sp[o] == ss[o], $sformatf("ratio %0d: serial sum %0d != parallel %0d", ratios[k], ss[o], sp[o]));
          total_out += sp[o];
        end
      end
      if (smp == 1) write_weights();
    end
    $display("mechanisms: ratio changes %0d, parallel samples %0d, serial samples %0d, weighted input spikes %0d, weighted reservoir spikes %0d, averaging steps %0d, weight writes %0d, clears %0d, readout spike weight %0d",
             m_ratio_change, m_parallel, m_serial, m_win, m_wres, m_avg, m_wr, m_clear, total_out);
    check(m_ratio_change > 0, "no ratio change");
    check(m_parallel > 0, "no parallel-mode sample");
    check(m_serial > 0, "no serial-mode sample");
    check(m_win > 0, "no weighted input spike");
    check(m_wres > 0, "no weighted reservoir spike");
    check(m_avg > 0, "time averaging never used the larger constant");
    check(m_wr > 0, "no readout weight write");
    check(m_clear > 0, "no clear");
    check(total_out > 0, "readout never fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
