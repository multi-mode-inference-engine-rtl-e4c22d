// Test of one reconfigurable tile on its own.
//
// The testbench plays the controller: for a job of C_in x W_f passes it
// streams the input rows of each pass, gives the tile its filter-row weights
// on In #k during the first dly cycles of the pass, and afterwards reads
// every PE memory address through the drain port. Each result is compared
// with a direct convolution (same fixed-point format). Jobs in all five
// convolution modes, two or three output rows so that weights are passed
// between rows, and one fully-connected job of 7 steps are run. The number of
// cycles a pass takes in the tile is the number of input pixels it streams,
// H_out x W_in (plus one lead cycle in 1x1 mode): the stream is not stalled.
module tb_tile;
  import mmie_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mode_e mode = M_C3;
  logic [7:0] w_in = 0, w_out = 0;
  strm_t strm = '0;
  word_t in_w [NPE];
  logic fc_step = 0, fc_first = 0, drain = 0;
  logic [2:0] drain_pe = 0;
  logic [5:0] drain_addr = 0;
  word_t y;

  tile #(.L(64)) dut (.*);

  word_t X [2][64][64];
  word_t W [6][2][11][11];
  int checks = 0, failures = 0;

  function automatic word_t quant(acc_t a);
    acc_t q;
    if (a < 0) a = 0;
    q = a >>> 2;
    return (q > 32767) ? 16'sd32767 : word_t'(q);
  endfunction

  function automatic acc_t pterm(word_t x, word_t w);
    logic signed [31:0] p;
    p = x * w;
    return acc_t'(p >>> 13);
  endfunction

  task automatic run(mode_e m, int wo, int ho, int cin);
    int wf = wf_of(m), s = str_of(m), ts = tsub_of(m), ns = nsub_of(m), dl = dly_of(m), ld = lead_of(m);
    int win = s*(wo-1) + wf;
    for (int c = 0; c < 2; c++) for (int r = 0; r < 64; r++) for (int i = 0; i < 64; i++)
      X[c][r][i] = word_t'($urandom_range(0, 2047));
    for (int o = 0; o < 6; o++) for (int c = 0; c < 2; c++) for (int r = 0; r < 11; r++) for (int i = 0; i < 11; i++)
      W[o][c][r][i] = word_t'($urandom_range(0, 32767) - 16384);
    @(negedge clk);
    mode = m; w_in = 8'(win); w_out = 8'(wo);
    for (int c = 0; c < cin; c++)
      for (int r = 0; r < wf; r++)
        for (int pc = 0; pc < ld + ho*win; pc++) begin
          int q = pc - ld;
          strm.start = (pc == 0);
          strm.act   = 1;
          strm.pxv   = (pc >= ld);
          strm.first = (c == 0 && r == 0);
          strm.pix   = (pc >= ld) ? X[c][(q / win)*s + r][q % win] : 16'sd0;
          for (int k = 0; k < NPE; k++) in_w[k] = '0;
          if (pc < dl) begin
            if (m == M_C1) begin
              for (int b = 0; b < 3; b++) begin
                in_w[b]     = W[b][c][0][0];
                in_w[3 + b] = W[3 + b][c][0][0];
              end
            end else if (pc < wf) begin
              in_w[0] = W[0][c][r][pc];
              in_w[3] = W[1][c][r][pc];
            end
          end
          @(negedge clk);
        end
    strm = '0;
    repeat (2) @(negedge clk);
    drain = 1;
    for (int j = 0; j < wo*ho; j++)
      for (int sub = 0; sub < ns; sub++) begin
        acc_t sum = 0;
        int z = j / wo, t = j % wo;
        drain_pe = 3'(sub*ts + j % ts);
        drain_addr = 6'(j / ts);
        for (int c = 0; c < cin; c++)
          for (int r = 0; r < wf; r++)
            for (int i = 0; i < wf; i++)
              sum += pterm(X[c][z*s + r][t*s + i], W[sub][c][r][i]);
        #1;
        checks++;
        if (y !== quant(sum)) begin
          failures++;
          if (failures < 10) $display("FAIL %s pixel %0d sub %0d got %0d exp %0d", m.name(), j, sub, y, quant(sum));
        end
        @(negedge clk);
      end
    drain = 0;
  endtask

  initial begin
    for (int k = 0; k < NPE; k++) in_w[k] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(M_C3, 7, 3, 2);
    run(M_C5, 10, 2, 1);
    run(M_C1, 6, 2, 2);
    run(M_C7, 9, 2, 1);
    run(M_C11, 5, 3, 1);
    // fully connected, 7 steps
    begin
      acc_t sum [NPE];
      mode = M_FC;
      for (int k = 0; k < NPE; k++) sum[k] = 0;
      for (int n = 0; n < 7; n++) begin
        @(negedge clk);
        fc_step = 1; fc_first = (n == 0);
        strm.pix = word_t'($urandom_range(0, 4095));
        for (int k = 0; k < NPE; k++) begin
          in_w[k] = word_t'($urandom_range(0, 32767) - 8192);
          sum[k] += pterm(strm.pix, in_w[k]);
        end
      end
      @(negedge clk);
      fc_step = 0; drain = 1; drain_addr = 0;
      for (int k = 0; k < NPE; k++) begin
        drain_pe = 3'(k); #1;
        checks++;
        if (y !== quant(sum[k])) begin failures++; $display("FAIL FC PE %0d", k); end
        @(negedge clk);
      end
      drain = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
