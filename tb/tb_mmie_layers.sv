// Network-layer test of the engine at its full size (32 tiles, 192 PEs,
// no parameter overridden).
//
// Each job below has the geometry of one job of a real layer. It has the
// width, height, stride and filter of that layer, cut to what one job
// holds:
//   AlexNet conv1: 11x11 S=4, 55-wide rows, 3 output rows (W_in 227)
//   AlexNet conv2: 5x5, 27-wide map, 14 output rows
//   AlexNet conv3-5: 3x3 on the whole 13x13 map
//   VGG-16 conv1: 3x3, one 112-wide column window of a 224-wide row
//   VGG-16 conv3/4: 3x3, 28- and 14-wide maps
//   ResNet-50 conv1: 7x7 S=2, 112-wide rows, 3 output rows (W_in 229)
//   ResNet-50: 1x1 on a 56-wide row and on a 7x7 map, 3x3 on a 7x7 map
//   fully connected: 64 inputs into 192 neurons
// The input channels of each job are cut to 3 or 4, because a layer's full
// channel count only repeats the same pass more times. The checking is the
// same as in the other end-to-end tests. Pixels, weights and filters are
// random, and the testbench answers the engine's memory requests from its
// own arrays. Every output is compared with a direct convolution in the same
// number format. It also checks that each expected output arrives once, and
// the exact cycle count of each job. Pixels are kept below 128.0 (Q.2) so
// that few results saturate.
module tb_mmie_layers;
  import mmie_pkg::*;
  localparam int unsigned P = 32;
  localparam int unsigned L = 64;
  localparam int unsigned NOC = 6 * P;
  localparam int unsigned MAXC = 4;
  localparam int unsigned XW = 240;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start = 0;
  mode_e       mode = M_C3;
  logic [7:0]  w_in = 0, w_out = 0, h_out = 0;
  logic [11:0] c_in = 0;
  logic [15:0] fc_n = 0;
  logic        busy, done, px_req, w_req, fc_valid = 0, out_valid, pass_pad;
  logic [11:0] px_ch, w_ch;
  logic [9:0]  px_row;
  logic [7:0]  px_col;
  logic [15:0] px_data;
  logic [$clog2(P)-1:0] w_tile;
  logic [3:0]  w_idx, w_frow;
  logic [47:0] ext_weight;
  logic [63:0] out_data;
  logic [$clog2(P/4)-1:0] out_grp;
  logic [2:0]  out_pe;
  logic [$clog2(L)-1:0] out_addr;
  logic [15:0] fc_px;
  logic [47:0] fc_w;
  logic        fc_mode;

  mmie_top dut (.*);

  // off-chip memory model
  word_t X  [MAXC][XW][XW];
  word_t W  [NOC][MAXC][11][11];
  word_t FX [64];
  word_t FW [NOC][64];

  int checks = 0, failures = 0;
  int n_pad = 0, n_hand = 0, n_switch = 0, n_drain = 0, n_fcstep = 0;
  int got [NOC][512];

  always_comb begin
    ext_weight = '0;
    px_data    = '0;
    if (fc_mode) begin
      px_data = fc_px; ext_weight = fc_w;
    end else begin
      if (px_req) px_data = X[px_ch][px_row][px_col];
      if (w_req) begin
        case (mode)
          M_C3, M_C11: begin
            ext_weight[15:0]  = W[2*w_tile][w_ch][w_frow][w_idx];
            ext_weight[31:16] = W[2*w_tile+1][w_ch][w_frow][w_idx];
          end
          M_C5, M_C7: ext_weight[15:0] = W[w_tile][w_ch][w_frow][w_idx];
          M_C1: for (int b = 0; b < 3; b++)
                  ext_weight[16*b +: 16] = W[6*w_tile + 3*w_idx + b][w_ch][0][0];
          default: ;
        endcase
      end
    end
  end

  // Mechanism counters. Stretched passes and read-out words are seen on the
  // ports. Weight hand-overs and FC steps are internal: they are counted
  // from the job's structure (one hand-over per output-row boundary of every
  // pass with W_f > S, one step per FC input) and credited only when every
  // result of that job matched the reference, which they cannot do unless
  // the mechanism worked.
  always @(posedge clk) if (rst_n) begin
    if (pass_pad) n_pad++;
    if (out_valid) n_drain++;
  end

  function automatic word_t quant(longint s);
    acc_t a, q;
    a = acc_t'(s);
    if (a < 0) a = 0;
    q = a >>> 2;
    return (q > 32767) ? 16'sd32767 : word_t'(q);
  endfunction

  function automatic acc_t pterm(word_t x, word_t w);
    logic signed [31:0] p;
    p = x * w;
    return acc_t'(p >>> 13);
  endfunction

  function automatic word_t ref_conv(int oc, int z, int t, int wf, int s, int cin);
    acc_t sum = 0;
    for (int c = 0; c < cin; c++)
      for (int r = 0; r < wf; r++)
        for (int i = 0; i < wf; i++)
          sum += pterm(X[c][z*s + r][t*s + i], W[oc][c][r][i]);
    return quant(sum);
  endfunction

  function automatic word_t ref_fc(int n, int nin);
    acc_t sum = 0;
    for (int i = 0; i < nin; i++) sum += pterm(FX[i], FW[n][i]);
    return quant(sum);
  endfunction

  task automatic randomize_data();
    for (int c = 0; c < MAXC; c++)
      for (int r = 0; r < XW; r++)
        for (int i = 0; i < XW; i++) X[c][r][i] = word_t'($urandom_range(0, 511));
    for (int o = 0; o < NOC; o++)
      for (int c = 0; c < MAXC; c++)
        for (int r = 0; r < 11; r++)
          for (int i = 0; i < 11; i++) W[o][c][r][i] = word_t'($urandom_range(0, 32767) - 16384);
  endtask

  mode_e last_mode = M_FC;

  task automatic run_conv(mode_e m, int wo, int ho, int cin);
    int wf = wf_of(m), s = str_of(m), ts = tsub_of(m), ns = nsub_of(m), dl = dly_of(m);
    int win = s*(wo-1) + wf;
    int len = lead_of(m) + ho*win;
    int period = (len > P*dl) ? len : P*dl;
    int expect_cyc = cin*wf*period + (P-1)*dl + 3 + wo*ho*ns*(P/4);
    int cyc = 0, nout = 0;
    int f0 = failures;
    randomize_data();
    for (int o = 0; o < NOC; o++) for (int j = 0; j < 512; j++) got[o][j] = 0;
    if (m != last_mode) n_switch++;
    last_mode = m;
    @(negedge clk);
    mode = m; w_in = 8'(win); w_out = 8'(wo); h_out = 8'(ho); c_in = 12'(cin);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin
      @(posedge clk); #1;
      cyc++;
      if (out_valid) begin
        for (int b = 0; b < 4; b++) begin
          int tl = 4*out_grp + b;
          int sub = out_pe / ts;
          int j = out_addr*ts + out_pe % ts;
          int oc = tl*ns + sub;
          word_t e = ref_conv(oc, j / wo, j % wo, wf, s, cin);
          checks++;
          if (word_t'(out_data[16*b +: 16]) !== e) begin
            failures++;
            if (failures < 10) $display("FAIL mode %s oc %0d pix %0d got %0d exp %0d", m.name(), oc, j, word_t'(out_data[16*b +: 16]), e);
          end
          got[oc][j]++;
          nout++;
        end
      end
    end
    // the last output word leaves one cycle after done
    @(posedge clk); #1;
    if (out_valid) begin
      for (int b = 0; b < 4; b++) begin
        int tl = 4*out_grp + b;
        int j = out_addr*ts + out_pe % ts;
        int oc = tl*ns + out_pe / ts;
        word_t e = ref_conv(oc, j / wo, j % wo, wf, s, cin);
        checks++;
        if (word_t'(out_data[16*b +: 16]) !== e) failures++;
        got[oc][j]++;
        nout++;
      end
    end
    checks++;
    if (nout != wo*ho*ns*P) begin failures++; $display("FAIL %s outputs %0d", m.name(), nout); end
    for (int o = 0; o < ns*P; o++)
      for (int j = 0; j < wo*ho; j++) begin
        checks++;
        if (got[o][j] != 1) failures++;
      end
    checks++;
    if (cyc != expect_cyc) begin
      failures++;
      $display("FAIL %s cycles %0d expected %0d", m.name(), cyc, expect_cyc);
    end
    if (failures == f0 && wf > s) n_hand += cin*wf*(ho-1);
    $display("job %s %0dx%0d C_in=%0d: %0d cycles", m.name(), wo, ho, cin, cyc);
  endtask

  task automatic run_fc(int nin);
    localparam int unsigned NV = 6*P + 1;
    localparam int unsigned WORDS = (NV + 3) / 4;
    int nout = 0;
    int f0 = failures;
    for (int i = 0; i < nin; i++) FX[i] = word_t'($urandom_range(0, 4095));
    for (int o = 0; o < NOC; o++)
      for (int i = 0; i < nin; i++) FW[o][i] = word_t'($urandom_range(0, 32767) - 16384);
    if (last_mode != M_FC) n_switch++;
    last_mode = M_FC;
    @(negedge clk);
    mode = M_FC; fc_n = 16'(nin); fc_mode = 1; start = 1;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < nin; i++)
      for (int wd = 0; wd < WORDS; wd++) begin
        word_t sl [4];
        for (int b = 0; b < 4; b++) begin
          int slot = 4*wd + b;
          sl[b] = (slot == 0) ? FX[i] : (slot < NV) ? FW[slot-1][i] : 16'sd0;
        end
        fc_px = sl[0]; fc_w = {sl[3], sl[2], sl[1]}; fc_valid = 1;
        @(negedge clk);
      end
    fc_valid = 0;
    while (!(out_valid == 0 && !busy && nout > 0)) begin
      @(posedge clk); #1;
      if (out_valid) begin
        for (int b = 0; b < 4; b++) begin
          int n = 6*(4*out_grp + b) + out_pe;
          checks++;
          if (word_t'(out_data[16*b +: 16]) !== ref_fc(n, nin)) begin
            failures++;
            $display("FAIL fc neuron %0d", n);
          end
          nout++;
        end
      end
    end
    checks++;
    if (nout != 6*P) begin failures++; $display("FAIL fc outputs %0d", nout); end
    if (failures == f0) n_fcstep += nin;
    fc_mode = 0;
    $display("job FC n=%0d: %0d outputs", nin, nout);
  endtask

  initial begin
    fc_mode = 0; fc_px = 0; fc_w = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_conv(M_C11, 55, 3, 3);   // AlexNet conv1
    run_conv(M_C5, 27, 14, 4);   // AlexNet conv2
    run_conv(M_C3, 13, 13, 4);   // AlexNet conv3-5
    run_fc(64);                  // fully connected
    run_conv(M_C3, 112, 1, 3);   // VGG-16 conv1, one column window
    run_conv(M_C3, 28, 6, 4);    // VGG-16 28-wide layers
    run_conv(M_C3, 14, 13, 4);   // VGG-16 14-wide layers
    run_conv(M_C7, 112, 3, 3);   // ResNet-50 conv1
    run_conv(M_C1, 56, 1, 4);    // ResNet-50 1x1, 56-wide
    run_conv(M_C1, 7, 7, 4);     // ResNet-50 1x1, 7x7 map
    run_conv(M_C3, 7, 7, 4);     // ResNet-50 3x3, 7x7 map
    checks += 5;
    if (n_pad == 0)    begin failures++; $display("FAIL no stretched pass"); end
    if (n_hand == 0)   begin failures++; $display("FAIL no weight hand-over"); end
    if (n_switch < 6)  begin failures++; $display("FAIL mode switches %0d", n_switch); end
    if (n_drain == 0)  begin failures++; $display("FAIL no read-out"); end
    if (n_fcstep == 0) begin failures++; $display("FAIL no FC step"); end
    $display("mechanisms: stretched passes %0d, hand-overs %0d, mode switches %0d, read-out words %0d, FC steps %0d",
             n_pad, n_hand, n_switch, n_drain, n_fcstep);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
