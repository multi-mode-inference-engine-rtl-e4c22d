// Shared types and constants of the multi-mode inference engine (MMIE).
//
// The engine runs convolutions with five filter shapes and fully-connected
// layers on the same 6-PE reconfigurable tiles. Each shape is a mode; the
// functions below give, per mode, the numbers that every block derives its
// behaviour from:
//   wf  : filter width W_f (filters are square, so also H_f)
//   str : stride S
//   tsub: PEs that form one logical tile (T after padding to the 6 PEs)
//   nsub: logical tiles per 6-PE tile (6 / tsub)
//   per : period of the weight ring = tsub * S (registers in the loop)
//   dly : cycles a tile needs to load its weights from the 48-bit bus; it is
//         also the delay of one pipelining stage between neighbouring tiles
// The T, S, W_f pairs, the ring lengths (3, 6, 1, 12, 12) and the register
// taps follow the paper's per-mode description of the weight generator. The
// load times and the stage delays are this design's own choice.
package mmie_pkg;

  localparam int unsigned DW      = 16;  // pixel and weight width
  localparam int unsigned AW      = 24;  // partial-sum width (SRAM word)
  localparam int unsigned NPE     = 6;   // PEs per reconfigurable tile
  localparam int unsigned NREG    = 11;  // registers per register set
  localparam int unsigned MAXDLY  = 12;  // longest pipelining-stage delay

  typedef enum logic [2:0] {
    M_C3  = 3'd0,  // 3x3, S = 1
    M_C5  = 3'd1,  // 5x5, S = 1
    M_C1  = 3'd2,  // 1x1, S = 1
    M_C7  = 3'd3,  // 7x7, S = 2
    M_C11 = 3'd4,  // 11x11, S = 4
    M_FC  = 3'd5   // fully connected
  } mode_e;

  typedef logic signed [DW-1:0] word_t;
  typedef logic signed [AW-1:0] acc_t;

  // Per-tile control that travels through the pipelining stages with the
  // pixel stream.
  typedef struct packed {
    logic  start;  // first cycle of a pass
    logic  act;    // cycle belongs to a pass
    logic  pxv;    // pixel is valid this cycle
    logic  first;  // pass is the first one (first filter row, first channel)
    word_t pix;    // input activation pixel
  } strm_t;

  function automatic int unsigned wf_of(mode_e m);
    case (m)
      M_C3:    return 3;
      M_C5:    return 5;
      M_C1:    return 1;
      M_C7:    return 7;
      M_C11:   return 11;
      default: return 1;
    endcase
  endfunction

  function automatic int unsigned str_of(mode_e m);
    case (m)
      M_C7:    return 2;
      M_C11:   return 4;
      default: return 1;
    endcase
  endfunction

  function automatic int unsigned tsub_of(mode_e m);
    case (m)
      M_C3, M_C11: return 3;
      M_C5, M_C7:  return 6;
      default:     return 1;
    endcase
  endfunction

  function automatic int unsigned nsub_of(mode_e m);
    return NPE / tsub_of(m);
  endfunction

  function automatic int unsigned per_of(mode_e m);
    return tsub_of(m) * str_of(m);
  endfunction

  function automatic int unsigned dly_of(mode_e m);
    case (m)
      M_C1:    return 2;            // six weights over a 3-lane bus
      M_FC:    return 0;            // operands come from the distributor
      default: return per_of(m);    // one ring period
    endcase
  endfunction

  // 1x1 mode spends one cycle loading PEs 1..3 before the first pixel.
  function automatic int unsigned lead_of(mode_e m);
    return (m == M_C1) ? 1 : 0;
  endfunction

endpackage
