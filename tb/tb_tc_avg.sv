// tb_tc_avg: self-checking testbench of the time-averaging sequencer.
//
// 1. The example of an averaged time constant of 5 from 4 (2^2) and 8 (2^3):
//    k_lo = 2, n_hi = 4 of 16 must give three steps of 4 then one of 8,
//    repeating, and an average of exactly 5.
// 2. For every k_lo in 0..6 and n_hi in 0..15, over one period of 16 steps
//    exactly n_hi steps must use k_lo+1 and the mean constant must be
//    2^k_lo*(1+n_hi/16).
// 3. The sequencer must hold its phase when step is low and restart on clear.
module tb_tc_avg;
  import tc_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0, clear = 1'b0, step = 1'b0;
  shift_t     k_lo = '0;
  logic [4:0] n_hi = '0;
  shift_t     k_now;
  logic       use_hi;
  int checks = 0, failures = 0;

  tc_avg dut (.*);
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

  initial begin
    int sum, nh;
    int pattern [8];
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // 1: example 4/8 -> 5
    k_lo <= 2; n_hi <= 4; clear <= 1'b1;
    @(posedge clk);
    clear <= 1'b0;
    sum = 0;
    for (int s = 0; s < 8; s++) begin
      #1;
      pattern[s] = 1 << k_now;
      sum += pattern[s];
      step <= 1'b1;
      @(posedge clk);
    end
    step <= 1'b0;
    check(pattern[0] == 4 && pattern[1] == 4 && pattern[2] == 4 && pattern[3] == 8, "example: first period not 4,4,4,8");
    check(pattern[4] == 4 && pattern[5] == 4 && pattern[6] == 4 && pattern[7] == 8, "example: second period not 4,4,4,8");
    check(sum == 40, $sformatf("example: average %0d/8, expected 5", sum));

    // 2: all entries
    for (int k = 0; k <= 6; k++) begin
      for (int n = 0; n < 16; n++) begin
        k_lo <= shift_t'(k); n_hi <= 5'(n); clear <= 1'b1;
        @(posedge clk);
        clear <= 1'b0;
        sum = 0; nh = 0;
        for (int s = 0; s < 16; s++) begin
          #1;
          sum += 1 << k_now;
          nh  += use_hi;
          if (!(k_now == shift_t'(k) || k_now == shift_t'(k + 1))) begin
            checks++; failures++; $display("FAIL k=%0d n=%0d: shift %0d", k, n, k_now);
          end
          step <= 1'b1;
          @(posedge clk);
        end
        step <= 1'b0;
        check(nh == n, $sformatf("k=%0d n=%0d: %0d high steps", k, n, nh));
        check(sum == 16 * (1 << k) + n * (1 << k), $sformatf("k=%0d n=%0d: sum %0d", k, n, sum));
      end
    end

    // 3: hold without step, restart on clear
    k_lo <= 2; n_hi <= 4; clear <= 1'b1;
    @(posedge clk);
    clear <= 1'b0;
    step <= 1'b1;
    repeat (3) @(posedge clk);
    step <= 1'b0;
    repeat (5) @(posedge clk);
    #1;
    check(k_now == 3, "hold: fourth step should use the larger constant");
    clear <= 1'b1;
    @(posedge clk);
    clear <= 1'b0;
    #1;
    check(k_now == 2, "clear: pattern not restarted");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
