// tb_iscu: self-checking testbench of the input spike compression unit.
//
// 1. The 4:1 example train 1011000101000010 (first bit first) must become
//    the weighted train 3,1,1,1 (lanes 1000, 0010, 1001, 1100 summed).
// 2. Random serial trains at every ratio 1..16: each window's weight must be
//    its spike count, produced one cycle after the window's last bit, and the
//    total spike count must be preserved.
// 3. Random parallel windows at every ratio: weight = count of the low N_cmp
//    bits, one cycle after p_valid.
module tb_iscu;
  import tc_pkg::*;

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  logic            clear = 1'b0;
  ratio_t          n_cmp = 5'd4;
  logic            serial_mode = 1'b1;
  logic            s_in = 1'b0, s_valid = 1'b0;
  logic [15:0]     p_in = '0;
  logic            p_valid = 1'b0;
  wspike_t         w_spike;
  logic            w_valid;

  int checks = 0, failures = 0;

  iscu dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // send one serial bit; return the compressed output seen right after it
  task automatic send_bit(input logic b, output logic v, output wspike_t w);
    s_in    <= b;
    s_valid <= 1'b1;
    @(posedge clk);
    s_valid <= 1'b0;
    #1;
    v = w_valid;
    w = w_spike;
  endtask

  initial begin
    logic [15:0] fig_train;
    int          exp_w [4];
    logic        v;
    wspike_t     w;
    int          k;
    int          tot_in, tot_out, win_cnt;

    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    // --- 1: the 4:1 example --------------------------------------------------
    fig_train = 16'b1011000101000010;        // printed left to right = time order
    exp_w = '{3, 1, 1, 1};
    n_cmp <= 5'd4;
    serial_mode <= 1'b1;
    repeat (2) @(posedge clk);
    k = 0;
    for (int t = 0; t < 16; t++) begin
      send_bit(fig_train[15 - t], v, w);
      if ((t % 4) == 3) begin
        check(v == 1'b1, $sformatf("example: no output after bit %0d", t));
        check(w == wspike_t'(exp_w[k]), $sformatf("example: window %0d weight %0d, expected %0d", k, w, exp_w[k]));
        k++;
      end else begin
        check(v == 1'b0, $sformatf("example: early output after bit %0d", t));
      end
    end

    // --- 2: random serial at every ratio -------------------------------------
    for (int r = 1; r <= 16; r++) begin
      n_cmp <= ratio_t'(r);
      @(posedge clk);
      @(posedge clk);
      tot_in = 0;
      tot_out = 0;
      for (int wdw = 0; wdw < 6; wdw++) begin
        win_cnt = 0;
        for (int t = 0; t < r; t++) begin
          logic b;
          b = ($urandom_range(0, 99) < 40);
          win_cnt += b;
          tot_in += b;
          send_bit(b, v, w);
          if (t == r - 1) begin
            check(v == 1'b1, $sformatf("serial r=%0d: missing output", r));
            check(w == wspike_t'(win_cnt), $sformatf("serial r=%0d: weight %0d, expected %0d", r, w, win_cnt));
            tot_out += w;
          end else begin
            check(v == 1'b0, $sformatf("serial r=%0d: early output", r));
          end
        end
      end
      check(tot_in == tot_out, $sformatf("serial r=%0d: spike count %0d vs %0d", r, tot_out, tot_in));
    end

    // --- 3: random parallel windows at every ratio ---------------------------
    serial_mode <= 1'b0;
    for (int r = 1; r <= 16; r++) begin
      n_cmp <= ratio_t'(r);
      @(posedge clk);
      @(posedge clk);
      for (int wdw = 0; wdw < 8; wdw++) begin
        logic [15:0] pat;
        pat = 16'($urandom);
        win_cnt = 0;
        for (int b = 0; b < r; b++) win_cnt += pat[b];
        p_in    <= pat;
        p_valid <= 1'b1;
        @(posedge clk);
        p_valid <= 1'b0;
        #1;
        check(w_valid == 1'b1, $sformatf("parallel r=%0d: missing output", r));
        check(w_spike == wspike_t'(win_cnt), $sformatf("parallel r=%0d: weight %0d, expected %0d", r, w_spike, win_cnt));
        @(posedge clk);
        #1;
        check(w_valid == 1'b0, "parallel: valid longer than one cycle");
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
