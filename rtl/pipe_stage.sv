// Pipelining stage between two neighbouring tiles.
//
// The tiles share one stream of input pixels, but only one tile at a time
// may load its weights from the off-chip weight bus. Each stage therefore
// delays the pixel stream (with its pass control) by the number of cycles
// one tile spends loading its weights, so that tile i runs i*dly cycles
// behind tile 0 and the weight bus serves the tiles one after the other.
// It is a shift register of MAXDLY (12) entries with a multiplexer picking
// the tap; dly = 0 bypasses it. The paper describes the stages as shift
// registers and multiplexers whose shift depends on W_f; the delays per mode
// (3, 6, 2, 12, 12 cycles for 3x3, 5x5, 1x1, 7x7, 11x11; 0 for fully
// connected) are this design's choice. Registers are cleared by reset.
module pipe_stage
  import mmie_pkg::*;
#(
  parameter int unsigned DEPTH = MAXDLY
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [3:0]  dly,
  input  strm_t       din,
  output strm_t       dout
);
  strm_t sr [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) sr[i] <= '0;
    end else begin
      sr[0] <= din;
      for (int i = 1; i < DEPTH; i++) sr[i] <= sr[i-1];
    end
  end

  always_comb begin
    if (dly == 0 || 32'(dly) > DEPTH) dout = din;
    else                              dout = sr[dly-1];
  end
endmodule
