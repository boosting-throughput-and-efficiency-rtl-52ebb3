// tb_tc_lut: self-checking testbench of the time-constant configuration table.
//
// For tau_nom = 2^3, 2^5 and 2^6 and every ratio g = 1..16 the expected
// scaled constant tau_c = 1/(1-(1-1/tau_nom)^g) is computed here in floating
// point. The table entry must satisfy 2^k_lo <= tau_c < 2^(k_lo+1) (or sit
// on the boundary after rounding) and its time average 2^k_lo*(1+n_hi/16)
// must match tau_c to within half an averaging quantum plus a small margin.
// At g = 1 the entry must be exactly (K_NOM, 0).
module tb_tc_lut;
  import tc_pkg::*;

  ratio_t       ratio;
  shift_t       k3, k5, k6;
  logic [4:0]   n3, n5, n6;
  int checks = 0, failures = 0;

  tc_lut #(.K_NOM(3)) u3 (.ratio, .k_lo(k3), .n_hi(n3));
  tc_lut #(.K_NOM(5)) u5 (.ratio, .k_lo(k5), .n_hi(n5));
  tc_lut #(.K_NOM(6)) u6 (.ratio, .k_lo(k6), .n_hi(n6));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_entry(input int knom, input int g, input shift_t k, input logic [4:0] n);
    real tau, avg, tol, lo;
    tau = 1.0 / (1.0 - ((1.0 - 1.0 / real'(2 ** knom)) ** g));
    lo  = real'(2 ** k);
    avg = lo * (1.0 + real'(n) / 16.0);
    tol = lo / 32.0 + 0.02 * tau;
    checks++;
    if (avg < tau - tol || avg > tau + tol || n > 15 || tau < lo * 0.97 || tau >= 2.0 * lo * 1.03) begin
      failures++;
      $display("FAIL K=%0d g=%0d: tau=%f table k=%0d n=%0d avg=%f", knom, g, tau, k, n, avg);
    end
    if (g == 1) begin
      checks++;
      if (k != shift_t'(knom) || n != 0) begin
        failures++;
        $display("FAIL K=%0d g=1: k=%0d n=%0d", knom, k, n);
      end
    end
  endtask

  initial begin
    for (int g = 1; g <= 16; g++) begin
      ratio = ratio_t'(g);
      #1;
      check_entry(3, g, k3, n3);
      check_entry(5, g, k5, n5);
      check_entry(6, g, k6, n6);
    end
    // ratio 0 reads as 1
    ratio = '0;
    #1;
    checks++;
    if (k5 != 5 || n5 != 0) begin failures++; $display("FAIL ratio 0"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
