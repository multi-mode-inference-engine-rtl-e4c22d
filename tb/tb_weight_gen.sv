// Test of the weight generator against the GFID weight schedule.
//
// For each convolution mode the testbench loads the W_f weights of a filter
// row (one ring period, zero-padded) through In #1 (and In #4 where there are
// two logical tiles) and then checks every PE's weight for 40 cycles against
// the schedule: PE k of a logical tile sees weight number
// (t - k*S) mod (tsub*S) at cycle t, or zero where that number is >= W_f.
// 1x1 mode must hold each PE's own weight; fully-connected mode must pass
// In #k through. A separate run reproduces the weight passing between two
// output rows of the paper's 3x3 example (6 output pixels per row): with
// set 3 handing over for cycles 6..8, PE 1 must see W1 again at cycle 8, not
// 6, and PEs 2 and 3 one and two cycles after it.
module tb_weight_gen;
  import mmie_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mode_e mode = M_C3;
  logic load = 0;
  logic [3:0] load_idx = 0;
  logic [NPE-1:0] long_tap = 0;
  word_t in_w [NPE];
  word_t out_w [NPE];
  word_t wa [11], wb [11];
  int checks = 0, failures = 0;

  weight_gen dut (.*);

  task automatic chk(int k, word_t exp, string what);
    checks++;
    if (out_w[k] !== exp) begin
      failures++;
      $display("FAIL %s PE %0d got %0d exp %0d", what, k + 1, out_w[k], exp);
    end
  endtask

  task automatic run_mode(mode_e m);
    int wf = wf_of(m), s = str_of(m), ts = tsub_of(m), per = per_of(m), dl = dly_of(m);
    for (int i = 0; i < 11; i++) begin
      wa[i] = word_t'($urandom_range(1, 30000));
      wb[i] = word_t'($urandom_range(1, 30000));
    end
    @(negedge clk);
    mode = m;
    for (int t = 0; t < 40 + dl; t++) begin
      for (int k = 0; k < NPE; k++) in_w[k] = '0;
      load = (t < dl);
      load_idx = 4'(t);
      if (m == M_C1) begin
        for (int k = 0; k < NPE; k++) in_w[k] = wa[k];
      end else if (t < dl) begin
        in_w[0] = wa[t];
        in_w[3] = wb[t];
      end
      #1;
      if (m == M_C1) begin
        if (t >= 1) for (int k = 0; k < NPE; k++) chk(k, wa[k], m.name());
      end else begin
        for (int k = 0; k < NPE; k++) begin
          int kk = k % ts;
          int sub = k / ts;
          int idx;
          if (t >= kk * s) begin
            idx = (t - kk*s) % per;
            chk(k, (idx < wf) ? ((sub == 0) ? wa[idx] : wb[idx]) : 16'sd0, m.name());
          end
        end
      end
      @(negedge clk);
    end
    load = 0;
  endtask

  initial begin
    for (int k = 0; k < NPE; k++) in_w[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_mode(M_C3);
    run_mode(M_C5);
    run_mode(M_C1);
    run_mode(M_C7);
    run_mode(M_C11);
    // fully connected: pass-through
    @(negedge clk);
    mode = M_FC;
    for (int n = 0; n < 10; n++) begin
      for (int k = 0; k < NPE; k++) in_w[k] = word_t'($urandom);
      #1;
      for (int k = 0; k < NPE; k++) chk(k, in_w[k], "FC");
      @(negedge clk);
    end
    // weight passing between rows, 3x3, W_out = 6 (paper's FID example)
    mode = M_C3;
    wa[0] = 16'sd101; wa[1] = 16'sd102; wa[2] = 16'sd103;
    for (int t = 0; t < 16; t++) begin
      for (int k = 0; k < NPE; k++) in_w[k] = '0;
      load = (t < 3); load_idx = 4'(t);
      if (t < 3) in_w[0] = wa[t];
      long_tap = (t >= 6 && t <= 8) ? 6'b000100 : 6'b0;
      #1;
      // PE1: pixels 1, 4 at cycles 0, 3; pixel 7 at cycle 8; pixel 10 at 11
      if (t < 6)  chk(0, wa[t % 3], "pass");
      if (t >= 8) chk(0, wa[(t - 8) % 3], "pass");
      // PE2: pixels 2, 5 at 1, 4; pixel 8 at 9
      if (t >= 1 && t < 7) chk(1, wa[(t - 1) % 3], "pass");
      if (t >= 9) chk(1, wa[(t - 9) % 3], "pass");
      // PE3: pixels 3, 6 at 2, 5; pixel 9 at 10
      if (t >= 2 && t < 8) chk(2, wa[(t - 2) % 3], "pass");
      if (t >= 10) chk(2, wa[(t - 10) % 3], "pass");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
