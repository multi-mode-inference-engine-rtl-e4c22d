// Controller: sequences one job of the engine.
//
// A convolution job computes N = W_out x H_out output pixels for every
// output channel the tiles hold (the host splits larger layers into such
// jobs). It runs C_in x H_f passes (H_f = W_f), filter row r fastest, then
// channel c. Pass (c, r) streams input rows z*S + r, z = 0..H_out-1, of
// channel c, W_in pixels each, one per cycle, after lead cycles (1 in 1x1
// mode, else 0). For every streamed pixel the controller raises px_req with
// its coordinates; the pixel must be on px_data in the same cycle. In pass
// cycles i*dly .. i*dly+dly-1 it raises w_req for tile i with w_idx counting
// the cycles; the weights for that tile must be on the weight bus in the same
// cycle (which lane carries which filter is given in the top module).
// A pass occupies max(len, P*dly) cycles so that the weight bus is never
// wanted by two tiles at once (pass_pad counts passes that needed the
// padding). After the last pass it waits for the last tile, (P-1)*dly
// cycles behind, and then reads the results out: for each pixel j and each
// logical tile s of a 6-PE tile it selects PE s*tsub + j mod tsub at address
// j / tsub and, one group of four tiles per cycle, sends it to the output
// multiplexer. The computation stops while results are read out.
// A fully-connected job counts fc_n steps of the distributor (one input
// each) and then reads out address 0 of every PE.
// The paper names this block and describes the order of the computation; the
// state machine, the request interface and the read-out order are this
// design's own.
module controller
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
  // pixel stream to tile 0
  output logic        px_req,
  output logic [11:0]  px_ch,
  output logic [9:0]  px_row,
  output logic [7:0]  px_col,
  input  word_t       px_data,
  output strm_t       strm,
  output logic [3:0]  dly,
  // weight requests
  output logic        w_req,
  output logic [$clog2(P)-1:0] w_tile,
  output logic [3:0]  w_idx,
  output logic [11:0]  w_ch,
  output logic [3:0]  w_frow,
  // fully connected
  output logic        dist_clear,
  input  logic        dist_step,
  output logic        fc_step,
  output logic        fc_first,
  // read-out
  output logic        drain,
  output logic [2:0]  drain_pe,
  output logic [$clog2(L)-1:0] drain_addr,
  output logic [$clog2(P/4)-1:0] drain_grp,
  output logic        pass_pad     // pulse: this pass was stretched to P*dly
);
  typedef enum logic [2:0] {S_IDLE, S_PASS, S_FC, S_FLUSH, S_DRAIN, S_DONE} state_e;
  state_e st_q;

  localparam int unsigned LA = $clog2(L);
  localparam int unsigned GW = $clog2(P/4);

  mode_e       mode_q;
  logic [15:0] len, period, pc_q, flush_q, nstep_q;
  logic [11:0]  c_q;
  logic [3:0]  r_q;
  logic [7:0]  col_q;
  logic [9:0]  z_q;
  logic [$clog2(P)-1:0] wt_q;
  logic [3:0]  wi_q;
  logic [15:0] npix, j_q;
  logic [2:0]  jm_q, s_q;
  logic [LA-1:0] ja_q;
  logic [GW-1:0] g_q;
  int unsigned wf, str, ts, ns, dl, ld;

  always_comb begin
    wf  = wf_of(mode_q);
    str = str_of(mode_q);
    ts  = tsub_of(mode_q);
    ns  = nsub_of(mode_q);
    dl  = dly_of(mode_q);
    ld  = lead_of(mode_q);
    len    = 16'(ld) + 16'(h_out) * 16'(w_in);
    period = (len > 16'(P * dl)) ? len : 16'(P * dl);
    npix   = (mode_q == M_FC) ? 16'd1 : 16'(w_out) * 16'(h_out);
    dly    = 4'(dl);
  end

  // pass outputs
  always_comb begin
    logic in_pass;
    in_pass     = (st_q == S_PASS);
    strm.start  = in_pass && pc_q == 0;
    strm.act    = in_pass && pc_q < len;
    strm.pxv    = in_pass && pc_q >= 16'(ld) && pc_q < len;
    strm.first  = (c_q == 0) && (r_q == 0);
    strm.pix    = strm.pxv ? px_data : '0;
    px_req      = strm.pxv;
    px_ch       = c_q;
    px_row      = 10'(z_q * 10'(str)) + 10'(r_q);
    px_col      = col_q;
    w_req       = in_pass && pc_q < 16'(P * dl);
    w_tile      = wt_q;
    w_idx       = wi_q;
    w_ch        = c_q;
    w_frow      = r_q;
    dist_clear  = (st_q == S_IDLE) && start && mode == M_FC;
    fc_step     = (st_q == S_FC) && dist_step;
    fc_first    = nstep_q == 0;
    drain       = (st_q == S_DRAIN);
    drain_pe    = 3'(32'(s_q) * ts + 32'(jm_q));
    drain_addr  = ja_q;
    drain_grp   = g_q;
    busy        = (st_q != S_IDLE);
    done        = (st_q == S_DONE);
    pass_pad    = in_pass && pc_q == 0 && len < 16'(P * dl);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; mode_q <= M_C3;
      pc_q <= '0; flush_q <= '0; nstep_q <= '0;
      c_q <= '0; r_q <= '0; col_q <= '0; z_q <= '0; wt_q <= '0; wi_q <= '0;
      j_q <= '0; jm_q <= '0; s_q <= '0; ja_q <= '0; g_q <= '0;
    end else begin
      case (st_q)
        S_IDLE: if (start) begin
          mode_q <= mode;
          pc_q <= '0; c_q <= '0; r_q <= '0; col_q <= '0; z_q <= '0;
          wt_q <= '0; wi_q <= '0; nstep_q <= '0;
          st_q <= (mode == M_FC) ? S_FC : S_PASS;
        end
        S_PASS: begin
          // pixel coordinates
          if (strm.pxv) begin
            if (col_q == w_in - 8'd1) begin
              col_q <= '0;
              z_q   <= z_q + 10'd1;
            end else col_q <= col_q + 8'd1;
          end
          // weight-bus owner
          if (w_req) begin
            if (32'(wi_q) == dl - 1) begin
              wi_q <= '0;
              wt_q <= wt_q + 1'b1;
            end else wi_q <= wi_q + 4'd1;
          end
          if (pc_q == period - 16'd1) begin
            pc_q <= '0; col_q <= '0; z_q <= '0; wt_q <= '0; wi_q <= '0;
            if (32'(r_q) == wf - 1) begin
              r_q <= '0;
              if (c_q == c_in - 12'd1) begin
                st_q    <= S_FLUSH;
                flush_q <= 16'((P - 1) * dl + 2);
              end else c_q <= c_q + 12'd1;
            end else r_q <= r_q + 4'd1;
          end else pc_q <= pc_q + 16'd1;
        end
        S_FC: if (dist_step) begin
          nstep_q <= nstep_q + 16'd1;
          if (nstep_q == fc_n - 16'd1) begin
            st_q    <= S_FLUSH;
            flush_q <= 16'd2;
          end
        end
        S_FLUSH: begin
          if (flush_q == 0) begin
            st_q <= S_DRAIN;
            j_q <= '0; jm_q <= '0; ja_q <= '0; s_q <= '0; g_q <= '0;
          end else flush_q <= flush_q - 16'd1;
        end
        S_DRAIN: begin
          if (32'(g_q) == P / 4 - 1) begin
            g_q <= '0;
            if (32'(s_q) == ns - 1) begin
              s_q <= '0;
              if (j_q == npix - 16'd1) st_q <= S_DONE;
              else begin
                j_q <= j_q + 16'd1;
                if (32'(jm_q) == ts - 1) begin
                  jm_q <= '0;
                  ja_q <= ja_q + LA'(1);
                end else jm_q <= jm_q + 3'd1;
              end
            end else s_q <= s_q + 3'd1;
          end else g_q <= g_q + 1'b1;
        end
        default: st_q <= S_IDLE; // S_DONE
      endcase
    end
  end
endmodule
