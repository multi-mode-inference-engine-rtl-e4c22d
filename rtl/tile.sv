// Reconfigurable 1D tile: a weight generator and six PEs sharing one pixel.
//
// All six PEs take the same input activation pixel; each takes its own
// weight from the weight generator. Depending on the mode the six PEs act as
// nsub logical tiles of tsub PEs (2 x 3 for 3x3 and 11x11, 1 x 6 for 5x5 and
// 7x7, 6 x 1 for 1x1); the logical tiles of one tile work on different
// output channels in lock step.
//
// Convolution pass. A pass streams, for one filter row r and one input
// channel, the input rows z*S + r (z = 0..H_out-1) one pixel per cycle,
// W_in pixels per row. Output pixel j (raster order, j = z*W_out + t) starts
// in the cycle in which input column t*S of its row arrives, runs for W_f
// cycles, and is computed by PE (j mod tsub) of every logical tile, which
// keeps its sum at address j / tsub. The scheduler in this module follows
// the stream with counters and tells each PE when to accumulate, into which
// address, and whether to start from zero (first pass). When the last pixel
// of a row starts it also opens the weight hand-over window of that PE's
// register set (long_tap) for one ring period, starting S cycles later.
// Weight loading: the tile's In #k inputs are read during the first dly
// cycles of a pass (cycle count kept here from strm.start).
//
// Fully-connected mode: every PE accumulates x*In#k into address 0 whenever
// fc_step is high, from zero when fc_first is high.
//
// Constraint: the weight hand-over at the end of the first output row of a
// pass reads register W_f of a set, which holds a valid weight only once the
// ring has run for (tsub-1)*S + W_f cycles. A convolution job therefore needs
// S*W_out >= (tsub-1)*S + W_f, i.e. W_out >= 5 (3x3, 11x11), 10 (5x5),
// 9 (7x7) or 1 (1x1); an assertion checks it at every pass start. Every
// layer of AlexNet, VGG-16 and ResNet-50 meets it.
//
// Read-out: when drain is high no PE writes, and y is the ReLU output of PE
// drain_pe at address drain_addr (combinational).
// The scheduler is this design's own; the structure (shared pixel, weight
// generator, K = 6 PEs, L-word memories) follows the paper.
module tile
  import mmie_pkg::*;
#(
  parameter int unsigned L = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  mode_e                mode,
  input  logic [7:0]           w_in,     // W_in, pixels per input row
  input  logic [7:0]           w_out,    // W_out, output pixels per row
  input  strm_t                strm,     // pixel stream with pass control
  input  word_t                in_w [NPE],
  input  logic                 fc_step,
  input  logic                 fc_first,
  input  logic                 drain,
  input  logic [2:0]           drain_pe,
  input  logic [$clog2(L)-1:0] drain_addr,
  output word_t                y
);
  localparam int unsigned LA = $clog2(L);

  int unsigned wf, st, ts, per, dl;
  always_comb begin
    wf  = wf_of(mode);
    st  = str_of(mode);
    ts  = tsub_of(mode);
    per = per_of(mode);
    dl  = dly_of(mode);
  end

  // ---------------- stream position counters ----------------
  logic [4:0]  lcyc_q;                 // cycles since pass start (saturating)
  logic [7:0]  col_q, t_q;
  logic [2:0]  sph_q, jm_q;
  logic [LA-1:0] ja_q;
  logic [4:0]  lc;
  logic [7:0]  col_c, t_c;
  logic [2:0]  sph_c, jm_c;
  logic [LA-1:0] ja_c;
  logic        pstart;                 // an output pixel starts this cycle
  logic        last_in_row;

  always_comb begin
    lc    = strm.start ? '0 : lcyc_q;
    col_c = strm.start ? '0 : col_q;
    t_c   = strm.start ? '0 : t_q;
    sph_c = strm.start ? '0 : sph_q;
    jm_c  = strm.start ? '0 : jm_q;
    ja_c  = strm.start ? '0 : ja_q;
    pstart      = (mode != M_FC) && strm.act && strm.pxv && (sph_c == 0) && (t_c < w_out);
    last_in_row = (t_c == w_out - 8'd1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lcyc_q <= '0; col_q <= '0; t_q <= '0; sph_q <= '0; jm_q <= '0; ja_q <= '0;
    end else if (strm.act) begin
      lcyc_q <= (lc == 5'd31) ? lc : lc + 5'd1;
      col_q <= col_c; t_q <= t_c; sph_q <= sph_c; jm_q <= jm_c; ja_q <= ja_c;
      if (strm.pxv) begin
        if (col_c == w_in - 8'd1) begin
          col_q <= '0; t_q <= '0; sph_q <= '0;
        end else begin
          col_q <= col_c + 8'd1;
          sph_q <= (32'(sph_c) == st - 1) ? '0 : sph_c + 3'd1;
          if (pstart) t_q <= t_c + 8'd1;
        end
        if (pstart) begin
          if (32'(jm_c) == ts - 1) begin
            jm_q <= '0;
            ja_q <= ja_c + LA'(1);
          end else begin
            jm_q <= jm_c + 3'd1;
          end
        end
      end
    end
  end

  // row-width constraint of the weight hand-over (see header)
  always_ff @(posedge clk) begin
    if (rst_n && strm.start && mode != M_FC)
      assert (32'(w_out) * st >= (ts - 1) * st + wf)
        else $error("W_out %0d too small for mode %s", w_out, mode.name());
  end

  // ---------------- per-PE windows and hand-over windows ----------------
  logic [NPE-1:0]  sel;           // PE k starts a pixel this cycle
  logic [3:0]      cnt_q  [NPE];  // remaining cycles of the PE's pixel
  logic [LA-1:0]   addr_q [NPE];
  logic [4:0]      tw_q   [NPE];  // hand-over countdown of register set k
  logic [NPE-1:0]  long_tap;
  logic [NPE-1:0]  pe_en, pe_clr;
  logic [LA-1:0]   pe_addr [NPE];

  always_comb begin
    for (int k = 0; k < NPE; k++) begin
      sel[k]      = pstart && (32'(k) % ts == 32'(jm_c));
      long_tap[k] = (tw_q[k] >= 5'd2) && (32'(tw_q[k]) <= per + 1);
      if (drain) begin
        pe_en[k]   = 1'b0;
        pe_clr[k]  = 1'b0;
        pe_addr[k] = drain_addr;
      end else if (mode == M_FC) begin
        pe_en[k]   = fc_step;
        pe_clr[k]  = fc_first;
        pe_addr[k] = '0;
      end else begin
        pe_en[k]   = sel[k] || (cnt_q[k] != 0);
        pe_clr[k]  = sel[k] && strm.first;
        pe_addr[k] = sel[k] ? ja_c : addr_q[k];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NPE; k++) begin
        cnt_q[k] <= '0; addr_q[k] <= '0; tw_q[k] <= '0;
      end
    end else begin
      for (int k = 0; k < NPE; k++) begin
        if (sel[k]) begin
          cnt_q[k]  <= 4'(wf - 1);
          addr_q[k] <= ja_c;
        end else if (cnt_q[k] != 0) begin
          cnt_q[k] <= cnt_q[k] - 4'd1;
        end
        if (sel[k] && last_in_row)
          tw_q[k] <= 5'(st + per);
        else if (tw_q[k] != 0)
          tw_q[k] <= tw_q[k] - 5'd1;
      end
    end
  end

  // ---------------- weight generator and PEs ----------------
  logic  load;
  word_t pe_w [NPE];
  word_t pe_y [NPE];

  always_comb load = (mode != M_FC) && strm.act && (32'(lc) < dl);

  weight_gen u_wg (
    .clk     (clk),
    .rst_n   (rst_n),
    .mode    (mode),
    .load    (load),
    .load_idx(lc[3:0]),
    .long_tap(long_tap),
    .in_w    (in_w),
    .out_w   (pe_w)
  );

  for (genvar k = 0; k < NPE; k++) begin : g_pe
    pe #(.L(L)) u_pe (
      .clk (clk),
      .en  (pe_en[k]),
      .clr (pe_clr[k]),
      .addr(pe_addr[k]),
      .x   (strm.pix),
      .w   (pe_w[k]),
      .y   (pe_y[k])
    );
  end

  always_comb y = pe_y[drain_pe];
endmodule
