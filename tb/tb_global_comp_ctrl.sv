// tb_global_comp_ctrl: self-checking testbench of the global compression
// controller.
//
// For every ratio command 0..20 it checks that n_cmp is the command clamped
// to 1..16, and that over one 16-step averaging period the mean of the three
// broadcast time constants 2^k_s, 2^k_m, 2^k_c equals the scaled constant
// 1/(1-(1-2^-K)^g) (computed here in floating point) for K = 3, 5, 6 within
// the averaging resolution. It also checks that a new command restarts the
// averaging pattern and that the shifts only move on step.
module tb_global_comp_ctrl;
  import tc_pkg::*;

  logic   clk = 1'b0, rst_n = 1'b0, clear = 1'b0, step = 1'b0, ratio_we = 1'b0;
  ratio_t ratio_cmd = '0;
  ratio_t n_cmp;
  shift_t k_s, k_m, k_c;
  logic   avg_hi;
  int checks = 0, failures = 0, hi_seen = 0;

  global_comp_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic real tau_c(input int k, input int g);
    return 1.0 / (1.0 - ((1.0 - 1.0 / real'(2 ** k)) ** g));
  endfunction

  initial begin
    int g, exp_n;
    real ss, sm, sc, ts, tm, tc;
    shift_t k0;
    repeat (2) @(posedge clk);
    #1;
    check(n_cmp == 1, "reset ratio is not 1");
    rst_n <= 1'b1;
    @(posedge clk);
    for (int cmd = 0; cmd <= 20; cmd++) begin
      ratio_cmd <= ratio_t'(cmd);
      ratio_we  <= 1'b1;
      @(posedge clk);
      ratio_we  <= 1'b0;
      #1;
      exp_n = (cmd == 0) ? 1 : (cmd > 16 ? 16 : cmd);
      check(n_cmp == ratio_t'(exp_n), $sformatf("cmd %0d: n_cmp %0d", cmd, n_cmp));
      g = exp_n;
      ss = 0; sm = 0; sc = 0;
      for (int s = 0; s < 16; s++) begin
        #1;
        ss += real'(2 ** k_s); sm += real'(2 ** k_m); sc += real'(2 ** k_c);
        hi_seen += avg_hi;
        step <= 1'b1;
        @(posedge clk);
      end
      step <= 1'b0;
      ts = tau_c(3, g); tm = tau_c(5, g); tc = tau_c(6, g);
      check((ss / 16.0 > ts * 0.95 - 0.1) && (ss / 16.0 < ts * 1.05 + 0.1), $sformatf("g=%0d tau_s avg %f vs %f", g, ss / 16.0, ts));
      check((sm / 16.0 > tm * 0.95 - 0.1) && (sm / 16.0 < tm * 1.05 + 0.1), $sformatf("g=%0d tau_m avg %f vs %f", g, sm / 16.0, tm));
      check((sc / 16.0 > tc * 0.95 - 0.1) && (sc / 16.0 < tc * 1.05 + 0.1), $sformatf("g=%0d tau_c avg %f vs %f", g, sc / 16.0, tc));
    end
    check(hi_seen > 0, "time averaging never used the larger constant");

    // shifts do not move without step; a new command restarts the pattern
    ratio_cmd <= 5'd2; ratio_we <= 1'b1;
    @(posedge clk);
    ratio_we <= 1'b0;
    #1;
    k0 = k_m;
    repeat (5) @(posedge clk);
    #1;
    check(k_m == k0, "k_m moved without step");
    check(k_m == 4, $sformatf("ratio 2: tau_m shift %0d, expected 4 (tau 16.5)", k_m));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
