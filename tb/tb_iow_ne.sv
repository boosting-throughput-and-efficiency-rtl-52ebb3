// tb_iow_ne: self-checking testbench of the IOW LIF neuron element.
//
// A neuron with 6 synapses is driven for many compressed steps with random
// weighted input spikes (0..16), random power-of-two synaptic weights of
// both signs and random decay shifts. A reference model kept here computes
// SP, Vm and the output weight with a division (n = floor(V/u_th), capped
// at 16) instead of the comparator bank, and every step's w_out, vm is
// compared with it. It also checks that multi-threshold spikes (weight > 1)
// occur, that the state holds without step, and that clear zeroes it.
module tb_iow_ne;
  import tc_pkg::*;

  localparam int FI = 6;
  localparam int UTH = 64;

  logic    clk = 1'b0, rst_n = 1'b0, clear = 1'b0, step = 1'b0;
  wspike_t w_in [FI];
  syn_w_t  syn  [FI];
  shift_t  k_s = 4'd3, k_m = 4'd5;
  wspike_t w_out;
  logic signed [23:0] vm;
  int checks = 0, failures = 0, multi = 0, single = 0;

  iow_ne #(.FAN_IN(FI), .U_TH(UTH)) dut (.*);
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

  initial begin
    longint r_sp, r_vm, cur, v, n;
    for (int i = 0; i < FI; i++) begin w_in[i] = '0; syn[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    r_sp = 0; r_vm = 0;
    for (int s = 0; s < 3000; s++) begin
      if (s % 500 == 0) begin
        for (int i = 0; i < FI; i++) begin
          syn[i].en  = ($urandom_range(0, 9) < 8);
          syn[i].neg = ($urandom_range(0, 9) < 3);
          syn[i].k   = 3'($urandom_range(0, 4));
        end
      end
      for (int i = 0; i < FI; i++) w_in[i] = wspike_t'(($urandom_range(0, 3) == 0) ? $urandom_range(0, 16) : 0);
      k_s = shift_t'($urandom_range(1, 5));
      k_m = shift_t'($urandom_range(2, 7));
      // reference
      cur = 0;
      for (int i = 0; i < FI; i++)
        if (syn[i].en) cur += (syn[i].neg ? -1 : 1) * longint'(w_in[i]) * (longint'(1) << syn[i].k);
      r_sp = r_sp - (r_sp >>> k_s) + cur;
      v = r_vm - (r_vm >>> k_m) + r_sp;
      n = (v >= UTH) ? v / UTH : 0;
      if (n > 16) n = 16;
      r_vm = v - n * UTH;
      step <= 1'b1;
      @(posedge clk);
      step <= 1'b0;
      #1;
      check(w_out == wspike_t'(n), $sformatf("step %0d: w_out %0d, expected %0d", s, w_out, n));
      check(longint'(vm) == r_vm, $sformatf("step %0d: vm %0d, expected %0d", s, vm, r_vm));
      if (n > 1) multi++;
      if (n == 1) single++;
      // random idle cycles: nothing may change without step
      if ($urandom_range(0, 3) == 0) begin
        @(posedge clk);
        #1;
        check(longint'(vm) == r_vm, "state changed without step");
      end
    end
    check(multi > 0, "no multi-threshold output spike happened");
    check(single > 0, "no single-threshold output spike happened");
    $display("weighted spikes: %0d with weight 1, %0d with weight > 1", single, multi);
    clear <= 1'b1;
    @(posedge clk);
    clear <= 1'b0;
    #1;
    check(vm == 0 && w_out == 0, "clear did not reset the neuron");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
