// tb_readout_layer: self-checking testbench of the trained readout layer.
//
// A 6-input, 3-neuron readout is programmed through its write port with
// random power-of-two weights, driven with random weighted reservoir spikes
// and compared step by step with a reference model kept here (weights,
// SP, Vm, output weights and the per-neuron spike-weight sums). Halfway the
// weights are rewritten (as a training engine would); clear must zero the
// counters, and the counters must equal the sum of the output weights.
module tb_readout_layer;
  import tc_pkg::*;

  localparam int NR = 6, NO = 3, UTH = 64;

  logic        clk = 1'b0, rst_n = 1'b0, clear = 1'b0, step = 1'b0;
  wspike_t     w_res [NR];
  logic [15:0] g_res [NR];
  shift_t      k_s = 4'd2, k_m = 4'd4;
  logic        wr_en = 1'b0;
  logic [1:0]  wr_row = '0;
  logic [2:0]  wr_col = '0;
  syn_w_t      wr_data = '0;
  wspike_t     w_out [NO];
  logic [15:0] out_cnt [NO];
  int checks = 0, failures = 0, writes = 0;

  readout_layer #(.N_RES(NR), .N_OUT(NO), .U_TH(UTH)) dut (.*);
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

  syn_w_t wm [NO][NR];

  task automatic program_weights();
    for (int r = 0; r < NO; r++)
      for (int c = 0; c < NR; c++) begin
        wm[r][c].en  = ($urandom_range(0, 9) < 8);
        wm[r][c].neg = ($urandom_range(0, 9) < 3);
        wm[r][c].k   = 3'($urandom_range(0, 3));
        if (!wm[r][c].en) wm[r][c] = '0;
        wr_en <= 1'b1; wr_row <= 2'(r); wr_col <= 3'(c); wr_data <= wm[r][c];
        @(posedge clk);
        writes++;
      end
    // an out-of-range row must be ignored
    wr_row <= 2'd3; wr_col <= 3'd0; wr_data <= 5'b11111;
    @(posedge clk);
    wr_en <= 1'b0;
  endtask

  initial begin
    longint sp [NO], vm [NO], cnt [NO], cur, v, n;
    longint exp_w [NO];
    for (int c = 0; c < NR; c++) begin w_res[c] = '0; g_res[c] = 16'd256; end
    for (int r = 0; r < NO; r++) begin sp[r] = 0; vm[r] = 0; cnt[r] = 0; exp_w[r] = 0; end
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    program_weights();
    for (int st = 0; st < 2000; st++) begin
      if (st == 1000) program_weights();
      for (int c = 0; c < NR; c++) w_res[c] = wspike_t'(($urandom_range(0, 2) == 0) ? $urandom_range(0, 10) : 0);
      for (int r = 0; r < NO; r++) begin
        cur = 0;
        for (int c = 0; c < NR; c++)
          if (wm[r][c].en) cur += (wm[r][c].neg ? -1 : 1) * longint'(w_res[c]) * (longint'(1) << wm[r][c].k);
        sp[r] = sp[r] - (sp[r] >>> k_s) + cur;
        v = vm[r] - (vm[r] >>> k_m) + sp[r];
        n = (v >= UTH) ? v / UTH : 0;
        if (n > 16) n = 16;
        vm[r] = v - n * UTH;
        exp_w[r] = n;
        cnt[r] += n;
      end
      step <= 1'b1;
      @(posedge clk);
      step <= 1'b0;
      #1;
      for (int r = 0; r < NO; r++)
        check(longint'(w_out[r]) == exp_w[r], $sformatf("step %0d out %0d: %0d expected %0d", st, r, w_out[r], exp_w[r]));
      @(posedge clk);
      #1;
      for (int r = 0; r < NO; r++)
        check(longint'(out_cnt[r]) == cnt[r], $sformatf("step %0d out %0d: count %0d expected %0d", st, r, out_cnt[r], cnt[r]));
    end
    for (int r = 0; r < NO; r++) check(cnt[r] > 0, $sformatf("output %0d never fired", r));
    clear <= 1'b1;
    @(posedge clk);
    clear <= 1'b0;
    #1;
    for (int r = 0; r < NO; r++) check(out_cnt[r] == 0 && w_out[r] == 0, "clear did not reset");
    $display("weight writes %0d", writes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
