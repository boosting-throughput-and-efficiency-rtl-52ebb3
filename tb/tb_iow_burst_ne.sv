// tb_iow_burst_ne: self-checking testbench of the burst-coding IOW neuron.
//
// Random weighted spikes with random presynaptic burst amplitudes g_i drive
// a 5-synapse neuron (beta = 2.0, u_th = 64, 8 fractional bits of g). A
// reference model kept here tracks Vm and the neuron's own burst function g
// (g <- 2^w * g after a spike of weight w, else 1, saturating) and computes
// the output weight by division, n = floor(V / (g*u_th)) capped at 16. Every
// step's w_out, g_out and vm are compared. It also requires that bursts
// (a spike sent with g > 1) and multi-threshold spikes both occur.
module tb_iow_burst_ne;
  import tc_pkg::*;

  localparam int FI = 5;
  localparam int UTH = 64;
  localparam longint ONE = 256;
  localparam longint GMAX = 65535;

  logic        clk = 1'b0, rst_n = 1'b0, clear = 1'b0, step = 1'b0;
  wspike_t     w_in [FI];
  logic [15:0] g_in [FI];
  syn_w_t      syn  [FI];
  shift_t      k_m = 4'd4;
  wspike_t     w_out;
  logic [15:0] g_out;
  logic signed [31:0] vm;
  int checks = 0, failures = 0, bursts = 0, multi = 0;

  iow_burst_ne #(.FAN_IN(FI), .U_TH(UTH)) dut (.*);
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
    longint r_vm, r_g, r_gout, cur, v, thr, n, t;
    for (int i = 0; i < FI; i++) begin w_in[i] = '0; g_in[i] = 16'(ONE); syn[i] = '0; end
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    r_vm = 0; r_g = ONE;
    for (int s = 0; s < 3000; s++) begin
      if (s % 400 == 0) begin
        for (int i = 0; i < FI; i++) begin
          syn[i].en  = ($urandom_range(0, 9) < 9);
          syn[i].neg = ($urandom_range(0, 9) < 2);
          syn[i].k   = 3'($urandom_range(0, 2));
        end
      end
      for (int i = 0; i < FI; i++) begin
        w_in[i] = wspike_t'(($urandom_range(0, 2) == 0) ? $urandom_range(0, 6) : 0);
        g_in[i] = 16'(ONE * (1 << $urandom_range(0, 2)) + 64 * $urandom_range(0, 3));
      end
      k_m = shift_t'($urandom_range(2, 6));
      // reference
      cur = 0;
      for (int i = 0; i < FI; i++) begin
        t = ((longint'(w_in[i]) * longint'(g_in[i]) * UTH) / ONE) * (longint'(1) << syn[i].k);
        if (syn[i].en) cur += syn[i].neg ? -t : t;
      end
      v = r_vm - (r_vm >>> k_m) + cur;
      thr = (r_g * UTH) / ONE;
      n = (v >= thr) ? v / thr : 0;
      if (n > 16) n = 16;
      r_vm = v - n * thr;
      r_gout = r_g;
      if (n > 0) begin
        r_g = r_g * (longint'(1) << n);
        if (r_g > GMAX) r_g = GMAX;
      end else r_g = ONE;
      step <= 1'b1;
      @(posedge clk);
      step <= 1'b0;
      #1;
      check(w_out == wspike_t'(n), $sformatf("step %0d: w_out %0d, expected %0d", s, w_out, n));
      check(longint'(g_out) == r_gout, $sformatf("step %0d: g_out %0d, expected %0d", s, g_out, r_gout));
      check(longint'(vm) == r_vm, $sformatf("step %0d: vm %0d, expected %0d", s, vm, r_vm));
      if (n > 0 && r_gout > ONE) bursts++;
      if (n > 1) multi++;
    end
    check(bursts > 0, "no burst spike (g > 1) happened");
    check(multi > 0, "no multi-threshold spike happened");
    $display("burst spikes %0d, multi-threshold spikes %0d", bursts, multi);
    clear <= 1'b1;
    @(posedge clk);
    clear <= 1'b0;
    #1;
    check(vm == 0 && g_out == 16'(ONE), "clear did not reset the neuron");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
