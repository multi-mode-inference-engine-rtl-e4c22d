// Test of the controller (8 tiles). For each job the testbench builds the
// expected cycle-by-cycle behaviour from nested loops (passes over input
// channel c and filter row r; rows z and columns of each pass; the weight
// window of each tile; the read-out order) and compares the controller's
// outputs with it on every cycle: pixel coordinates, stream control bits,
// weight requests, read-out selection, and the cycle at which done pulses.
// Jobs: 3x3 (pass of H_out*W_in cycles), a small 1x1 job whose pass is
// stretched to P*dly, a 7x7 S=2 job, and a fully-connected job driven by
// distributor steps with gaps.
module tb_controller;
  import mmie_pkg::*;
  localparam int unsigned P = 8, L = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  mode_e mode = M_C3;
  logic [7:0] w_in = 0, w_out = 0, h_out = 0;
  logic [11:0] c_in = 0;
  logic [15:0] fc_n = 0;
  logic busy, done, px_req, w_req, dist_clear, dist_step = 0, fc_step, fc_first, drain, pass_pad;
  logic [11:0] px_ch, w_ch;
  logic [9:0] px_row;
  logic [7:0] px_col;
  word_t px_data = 0;
  strm_t strm;
  logic [3:0] dly, w_idx, w_frow;
  logic [2:0] w_tile;
  logic [2:0] drain_pe;
  logic [5:0] drain_addr;
  logic [0:0] drain_grp;
  int checks = 0, failures = 0, npad = 0;

  controller #(.P(P), .L(L)) dut (.*);

  always @(posedge clk) if (rst_n && pass_pad) npad++;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic drain_check(int npix, int ts, int ns);
    // flush: wait for drain
    int guard = 0;
    while (!drain && guard < 1000) begin @(negedge clk); guard++; end
    for (int j = 0; j < npix; j++)
      for (int s = 0; s < ns; s++)
        for (int g = 0; g < P/4; g++) begin
          chk(drain && drain_pe == 3'(s*ts + j % ts) && drain_addr == 6'(j / ts) && drain_grp == 1'(g), "read-out order");
          @(negedge clk);
        end
    chk(done && !drain, "done after read-out");
    @(negedge clk);
    chk(!busy, "idle after done");
  endtask

  task automatic conv_job(mode_e m, int wo, int ho, int cin);
    int wf = wf_of(m), s = str_of(m), dl = dly_of(m), ld = lead_of(m);
    int win = s*(wo-1) + wf;
    int len = ld + ho*win;
    int period = (len > P*dl) ? len : P*dl;
    @(negedge clk);
    mode = m; w_in = 8'(win); w_out = 8'(wo); h_out = 8'(ho); c_in = 12'(cin);
    start = 1;
    @(negedge clk);
    start = 0;
    for (int c = 0; c < cin; c++)
      for (int r = 0; r < wf; r++)
        for (int pc = 0; pc < period; pc++) begin
          int q = pc - ld;
          px_data = word_t'($urandom);
          #1;
          chk(strm.start == (pc == 0), "start");
          chk(strm.act == (pc < len), "act");
          chk(strm.pxv == (pc >= ld && pc < len), "pxv");
          chk(strm.first == (c == 0 && r == 0), "first");
          chk(32'(dly) == dl, "dly");
          if (pc >= ld && pc < len) begin
            chk(px_req && px_ch == 12'(c) && px_row == 10'((q / win)*s + r) && px_col == 8'(q % win), "pixel address");
            chk(strm.pix == px_data, "pixel data");
          end else chk(!px_req, "no pixel request");
          if (pc < P*dl)
            chk(w_req && w_tile == 3'(pc / dl) && w_idx == 4'(pc % dl) && w_ch == 12'(c) && w_frow == 4'(r), "weight request");
          else chk(!w_req, "no weight request");
          chk(busy && !drain, "busy");
          @(negedge clk);
        end
    drain_check(wo*ho, tsub_of(m), nsub_of(m));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    conv_job(M_C3, 12, 3, 2);
    chk(npad == 0, "no stretched pass");
    conv_job(M_C1, 3, 2, 1);
    chk(npad == 1, "stretched 1x1 pass");
    conv_job(M_C7, 9, 2, 1);
    // fully connected, 4 steps
    @(negedge clk);
    mode = M_FC; fc_n = 16'd4; start = 1;
    #1 chk(dist_clear, "distributor cleared");
    @(negedge clk);
    start = 0;
    for (int n = 0; n < 4; n++) begin
      repeat (3) @(negedge clk);
      dist_step = 1; #1;
      chk(fc_step && fc_first == (n == 0), "fc step");
      @(negedge clk);
      dist_step = 0; #1;
      chk(!fc_step, "fc step pulse");
    end
    drain_check(1, 1, 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
