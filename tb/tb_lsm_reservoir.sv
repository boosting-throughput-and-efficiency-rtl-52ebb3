// tb_lsm_reservoir: self-checking testbench of the recurrent reservoir.
//
// Two small reservoirs (4 inputs, 8 neurons), one of IOW LIF neurons and one
// of burst-coding neurons, are driven with random weighted input spikes.
// A reference network model kept here rebuilds the fixed connectivity from
// the same hash and seed, updates every neuron's state with the recurrent
// spikes of the previous step, and every step's reservoir spikes (and burst
// amplitudes) are compared. It requires recurrent activity (a reservoir
// neuron firing in a step without input from the input layer) to occur.
module tb_lsm_reservoir;
  import tc_pkg::*;

  localparam int NI = 4, NR = 8, UTH = 64;
  localparam int unsigned SD = 32'hC0FFEE;
  localparam int PIN = 128, PRES = 80, INHP = 51;

  logic        clk = 1'b0, rst_n = 1'b0, clear = 1'b0, step = 1'b0;
  wspike_t     w_in [NI];
  shift_t      k_s = 4'd2, k_m = 4'd4;
  wspike_t     wl [NR], wb [NR];
  logic [15:0] gl [NR], gb [NR];
  int checks = 0, failures = 0, recur = 0;

  lsm_reservoir #(.N_IN(NI), .N_RES(NR), .BURST(1'b0), .SEED(SD), .P_IN(PIN), .P_RES(PRES), .INH(INHP), .U_TH(UTH))
    u_lif (.clk, .rst_n, .clear, .step, .w_in, .k_s, .k_m, .w_res(wl), .g_res(gl));
  lsm_reservoir #(.N_IN(NI), .N_RES(NR), .BURST(1'b1), .SEED(SD), .P_IN(PIN), .P_RES(PRES), .INH(INHP), .U_TH(UTH))
    u_bst (.clk, .rst_n, .clear, .step, .w_in, .k_s, .k_m, .w_res(wb), .g_res(gb));

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic syn_w_t conn(input int i, input int j);
    if (i < NI) return syn_hash(SD, i, j, PIN, 0, 3);
    if (i - NI == j) return SYN_NONE;
    return syn_hash(SD + 1, i, j, PRES, INHP, 2);
  endfunction

  initial begin
    longint sp [NR], vl [NR], vb [NR], g [NR], gout [NR];
    longint ol [NR], ob [NR], nl [NR], nb [NR], ng [NR];
    longint fw [NI + NR], fg [NI + NR], fwb [NI + NR];
    longint cur, curb, v, thr, n, t;
    syn_w_t s;
    bit any_in;
    for (int i = 0; i < NI; i++) w_in[i] = '0;
    for (int j = 0; j < NR; j++) begin sp[j] = 0; vl[j] = 0; vb[j] = 0; g[j] = 256; gout[j] = 256; ol[j] = 0; ob[j] = 0; end
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int st = 0; st < 1500; st++) begin
      any_in = 0;
      for (int i = 0; i < NI; i++) begin
        w_in[i] = wspike_t'((st % 40 < 20 && $urandom_range(0, 2) == 0) ? $urandom_range(1, 8) : 0);
        if (w_in[i] != 0) any_in = 1;
      end
      k_s = shift_t'($urandom_range(1, 3));
      k_m = shift_t'($urandom_range(3, 5));
      for (int i = 0; i < NI; i++) begin fw[i] = w_in[i]; fwb[i] = w_in[i]; fg[i] = 256; end
      for (int j = 0; j < NR; j++) begin fw[NI + j] = ol[j]; fwb[NI + j] = ob[j]; fg[NI + j] = gout[j]; end
      for (int j = 0; j < NR; j++) begin
        cur = 0; curb = 0;
        for (int i = 0; i < NI + NR; i++) begin
          s = conn(i, j);
          if (s.en) begin
            cur  += (s.neg ? -1 : 1) * fw[i] * (longint'(1) << s.k);
            t = ((fwb[i] * fg[i] * UTH) >>> 8) << s.k;
            curb += s.neg ? -t : t;
          end
        end
        // LIF
        sp[j] = sp[j] - (sp[j] >>> k_s) + cur;
        v = vl[j] - (vl[j] >>> k_m) + sp[j];
        n = (v >= UTH) ? v / UTH : 0;
        if (n > 16) n = 16;
        vl[j] = v - n * UTH;
        nl[j] = n;
        // burst
        v = vb[j] - (vb[j] >>> k_m) + curb;
        thr = (g[j] * UTH) >>> 8;
        n = (v >= thr) ? v / thr : 0;
        if (n > 16) n = 16;
        vb[j] = v - n * thr;
        nb[j] = n;
        ng[j] = g[j];
        if (n > 0) begin g[j] = g[j] << n; if (g[j] > 65535) g[j] = 65535; end
        else g[j] = 256;
      end
      for (int j = 0; j < NR; j++) begin ol[j] = nl[j]; ob[j] = nb[j]; gout[j] = ng[j]; end
      step <= 1'b1;
      @(posedge clk);
      step <= 1'b0;
      #1;
      for (int j = 0; j < NR; j++) begin
        check(longint'(wl[j]) == ol[j], $sformatf("LIF step %0d n%0d: %0d expected %0d", st, j, wl[j], ol[j]));
        check(longint'(wb[j]) == ob[j], $sformatf("burst step %0d n%0d: %0d expected %0d", st, j, wb[j], ob[j]));
        check(longint'(gb[j]) == gout[j], $sformatf("burst step %0d n%0d: g %0d expected %0d", st, j, gb[j], gout[j]));
        if (!any_in && ol[j] != 0) recur++;
      end
    end
    check(recur > 0, "no recurrent activity without input");
    $display("recurrent-only firing events: %0d", recur);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
