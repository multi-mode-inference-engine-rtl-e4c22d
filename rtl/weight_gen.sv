// Reconfigurable weight generator of one 6-PE tile.
//
// Six register sets of eleven registers each. In front of each set sits an
// input multiplexer; behind it a tap multiplexer picks one register of the
// set. The input multiplexer's output is the weight of that set's PE
// (Out #k) and also enters register 1 of the set; register i+1 takes register
// i every cycle. Which paths are used depends on the mode, as in the paper's
// six per-mode drawings of this unit:
//   3x3 S=1, 11x11 S=4 : two rings of three sets (1-2-3, 4-5-6). Sets 1 and 4
//                        load from In #1 and In #4, then take the tap of set
//                        3 / set 6; the other sets take the tap of the set
//                        before them. The tap is register S (1 or 4).
//   5x5 S=1, 7x7 S=2   : one ring over all six sets, loaded through In #1,
//                        tap register S (1 or 2).
//   1x1 S=1            : each set loops on its own register 1 after taking
//                        its single weight from In #k.
//   fully connected    : In #k goes straight to Out #k.
// A ring of tsub sets with tap S repeats its content every tsub*S cycles, so
// each PE sees the W_f weights of a filter row S cycles after its left-hand
// neighbour, which is the GFID schedule. Shorter filters are padded with zero
// weights during loading (load_idx >= W_f), as the paper does for 5x5 in six
// PEs, 7x7 (7 of 12 registers) and 11x11 (11 of 12).
// When a logical tile moves from one output row to the next, the set whose PE
// computed the last pixel of the row must hand the weights on W_f cycles
// later instead of S; during such a hand-over the tile asserts long_tap[k]
// for one ring period and the tap multiplexer picks register W_f. This is the
// paper's use of the eleven registers for weight passing; the exact window
// is derived in this design.
// Timing: out_w is combinational from in_w during loading (the PE multiplies
// it in the same cycle); all registers update on the rising clock edge and
// are cleared by the asynchronous active-low reset.
module weight_gen
  import mmie_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  mode_e       mode,
  input  logic        load,          // tile is in its weight-load window
  input  logic [3:0]  load_idx,      // cycle within that window
  input  logic [NPE-1:0] long_tap,   // set k hands over with W_f delay
  input  word_t       in_w  [NPE],   // In #1..#6
  output word_t       out_w [NPE]    // Out #1..#6, one weight per PE
);
  word_t r  [NPE][NREG];
  word_t im [NPE];   // input multiplexer outputs
  word_t dm [NPE];   // tap multiplexer outputs

  int unsigned wf, st;
  always_comb begin
    wf = wf_of(mode);
    st = str_of(mode);
  end

  // tap multiplexers
  always_comb begin
    for (int k = 0; k < NPE; k++) begin
      int unsigned tap;
      tap   = long_tap[k] ? wf : st;
      dm[k] = r[k][tap-1];
    end
  end

  // input multiplexers
  always_comb begin
    word_t ld;
    for (int k = 0; k < NPE; k++) begin
      ld = (32'(load_idx) < wf) ? in_w[k] : '0;
      case (mode)
        M_FC:  im[k] = in_w[k];
        M_C1:  im[k] = (load && load_idx == ((k < 3) ? 4'd0 : 4'd1)) ? in_w[k] : dm[k];
        M_C3, M_C11: begin
          if (k == 0 || k == 3) im[k] = load ? ld : dm[k+2];
          else                  im[k] = dm[k-1];
        end
        default: begin // M_C5, M_C7
          if (k == 0) im[k] = load ? ld : dm[NPE-1];
          else        im[k] = dm[k-1];
        end
      endcase
      out_w[k] = im[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NPE; k++)
        for (int i = 0; i < NREG; i++) r[k][i] <= '0;
    end else begin
      for (int k = 0; k < NPE; k++) begin
        r[k][0] <= im[k];
        for (int i = 1; i < NREG; i++) r[k][i] <= r[k][i-1];
      end
    end
  end
endmodule
