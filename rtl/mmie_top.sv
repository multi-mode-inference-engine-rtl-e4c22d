// Multi-mode inference engine (MMIE), top level.
//
// P reconfigurable 6-PE tiles (P = 32, 192 PEs) share one stream of input
// pixels; each tile runs a different set of filters, so the engine computes
// up to 2P (3x3, 11x11), P (5x5, 7x7) or 6P (1x1) output channels, or 6P
// fully-connected neurons, at once. Pipelining stages make tile i run
// i*dly cycles behind tile 0, so that the 48-bit off-chip weight bus loads
// the tiles one after another. In fully-connected mode the distributor
// collects each step's 192 weights and one input from both off-chip buses
// and feeds all PEs at once. Results are read out of the PE memories through
// the output multiplexer, 4 x 16 bits per cycle.
//
// Interface. Configuration (mode, w_in, w_out, h_out, c_in, fc_n) must be
// stable from start until done. Convolution: when px_req is high, px_data
// must carry input pixel (px_ch, px_row, px_col) of the job in the same
// cycle; when w_req is high, ext_weight must carry in the same cycle the
// weights for tile w_tile, filter row w_frow, input channel w_ch, column
// w_idx of the filter row (zero for w_idx >= W_f), in lanes of 16 bits:
//   3x3, 11x11 : lane 0 filter of output channel 2*tile, lane 1 of 2*tile+1
//   5x5, 7x7   : lane 0 filter of output channel tile
//   1x1        : w_idx 0: lanes 0..2 channels 6*tile+0..2,
//                w_idx 1: lanes 0..2 channels 6*tile+3..5
// Fully connected: words {ext_weight, px_data} with fc_valid, 49 words per
// input (see distributor). Output: out_valid with out_data holding tiles
// 4*out_grp..4*out_grp+3 (tile 4*out_grp in bits 15:0) of PE out_pe at
// address out_addr; in convolution PE k of a tile belongs to logical tile
// k / tsub and to output pixel out_addr*tsub + k mod tsub.
// The architecture (tiles, pipelining stages, distributor, multiplexed
// 64-bit output, controller, 16-bit pixel and 48-bit weight buses) follows
// the paper's architecture drawing; the request interfaces, the lane
// assignment and the read-out order are this design's own.
module mmie_top
  import mmie_pkg::*;
#(
  parameter int unsigned P = 32,
  parameter int unsigned L = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  mode_e       mode,
  input  logic [7:0]  w_in,
  input  logic [7:0]  w_out,
  input  logic [7:0]  h_out,
  input  logic [11:0]  c_in,
  input  logic [15:0] fc_n,
  output logic        busy,
  output logic        done,
  output logic        px_req,
  output logic [11:0]  px_ch,
  output logic [9:0]  px_row,
  output logic [7:0]  px_col,
  input  logic [15:0] px_data,
  output logic        w_req,
  output logic [$clog2(P)-1:0] w_tile,
  output logic [3:0]  w_idx,
  output logic [11:0]  w_ch,
  output logic [3:0]  w_frow,
  input  logic [47:0] ext_weight,
  input  logic        fc_valid,
  output logic        out_valid,
  output logic [63:0] out_data,
  output logic [$clog2(P/4)-1:0] out_grp,
  output logic [2:0]  out_pe,
  output logic [$clog2(L)-1:0] out_addr,
  output logic        pass_pad
);
  localparam int unsigned GW = $clog2(P/4);

  strm_t  c_strm;
  strm_t  s0;
  logic [3:0] dly;
  logic   dist_clear, dist_step, fc_step, fc_first;
  logic   drain;
  logic [2:0] drain_pe;
  logic [$clog2(L)-1:0] drain_addr;
  logic [GW-1:0] drain_grp;
  word_t  dpix;
  word_t  dw [6*P];
  word_t  ty [P];

  controller #(.P(P), .L(L)) u_ctrl (
    .clk, .rst_n, .start, .mode, .w_in, .w_out, .h_out, .c_in, .fc_n,
    .busy, .done, .px_req, .px_ch, .px_row, .px_col,
    .px_data(word_t'(px_data)), .strm(c_strm), .dly,
    .w_req, .w_tile, .w_idx, .w_ch, .w_frow,
    .dist_clear, .dist_step, .fc_step, .fc_first,
    .drain, .drain_pe, .drain_addr, .drain_grp, .pass_pad
  );

  distributor #(.NW(6*P)) u_dist (
    .clk, .rst_n,
    .clear   (dist_clear),
    .in_valid(fc_valid),
    .in_word ({ext_weight, px_data}),
    .step    (dist_step),
    .pix     (dpix),
    .w       (dw)
  );

  // pixel multiplexer in front of tile 0: pipelined stream or distributor
  always_comb begin
    s0 = c_strm;
    if (mode == M_FC) s0.pix = dpix;
  end

  for (genvar i = 0; i < P; i++) begin : g_tile
    word_t in_w [NPE];
    logic  mine;
    strm_t sin, sout;   // stream into this tile, and after its stage

    if (i == 0) begin : g_first
      assign sin = s0;
    end else begin : g_next
      assign sin = g_tile[i-1].sout;
    end
    pipe_stage u_stage (.clk, .rst_n, .dly(dly), .din(sin), .dout(sout));

    // weight multiplexers: off-chip bus (convolution) or distributor (FC)
    always_comb begin
      mine = w_req && (32'(w_tile) == i);
      for (int k = 0; k < NPE; k++) in_w[k] = '0;
      if (mode == M_FC) begin
        for (int k = 0; k < NPE; k++) in_w[k] = dw[6*i + k];
      end else if (mine) begin
        in_w[0] = word_t'(ext_weight[15:0]);
        in_w[1] = word_t'(ext_weight[31:16]);
        in_w[2] = word_t'(ext_weight[47:32]);
        in_w[3] = (mode == M_C3 || mode == M_C11) ? word_t'(ext_weight[31:16])
                                                  : word_t'(ext_weight[15:0]);
        in_w[4] = word_t'(ext_weight[31:16]);
        in_w[5] = word_t'(ext_weight[47:32]);
      end
    end

    tile #(.L(L)) u_tile (
      .clk, .rst_n, .mode, .w_in, .w_out,
      .strm      (sin),
      .in_w      (in_w),
      .fc_step   (fc_step),
      .fc_first  (fc_first),
      .drain     (drain),
      .drain_pe  (drain_pe),
      .drain_addr(drain_addr),
      .y         (ty[i])
    );
  end

  out_mux #(.P(P)) u_omux (
    .clk, .rst_n,
    .in_valid (drain),
    .sel      (drain_grp),
    .y        (ty),
    .out_valid(out_valid),
    .out_data (out_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_grp <= '0; out_pe <= '0; out_addr <= '0;
    end else begin
      out_grp <= drain_grp; out_pe <= drain_pe; out_addr <= drain_addr;
    end
  end
endmodule
