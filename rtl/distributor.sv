// Distributor: gathers the operands of one fully-connected step.
//
// In fully-connected mode every PE needs its own weight each step, which is
// far more than the 48-bit weight bus plus the 16-bit pixel bus can deliver
// per cycle. The distributor shifts in one 64-bit word (four 16-bit values)
// per valid input cycle into a chain of WORDS registers. Once it holds
// 1 + NW values (the input pixel in slot 0, then the weight of PE k of tile
// i in slot 1 + 6*i + k; NW = 192 for 32 tiles, so 193 values in 49 words)
// it copies them to its output registers and pulses step for one cycle, and
// the tiles perform one multiply-accumulate. The off-chip side thus runs
// WORDS times as many transfers as the tiles run steps, which stands for the
// lower clock of the tiles in this mode. Word w carries slots 4w..4w+3,
// slot 4w in bits 15:0; words arrive in order w = 0, 1, ...
// The paper also decodes run-length compressed weights here; its format is
// not given, and this block does not decode it.
// Timing: step and the operands appear the cycle after the last word.
module distributor
  import mmie_pkg::*;
#(
  parameter int unsigned NW = 192
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,       // restart collecting at word 0
  input  logic        in_valid,
  input  logic [63:0] in_word,
  output logic        step,
  output word_t       pix,
  output word_t       w [NW]
);
  localparam int unsigned NV    = NW + 1;
  localparam int unsigned WORDS = (NV + 3) / 4;

  logic [63:0]              sr [WORDS];
  logic [$clog2(WORDS+1)-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0;
      step  <= 1'b0;
      pix   <= '0;
      for (int i = 0; i < NW; i++) w[i] <= '0;
      for (int i = 0; i < WORDS; i++) sr[i] <= '0;
    end else begin
      step <= 1'b0;
      if (clear) begin
        cnt_q <= '0;
      end else if (in_valid) begin
        // newest word at the end of the chain
        for (int i = 0; i < WORDS - 1; i++) sr[i] <= sr[i+1];
        sr[WORDS-1] <= in_word;
        if (32'(cnt_q) == WORDS - 1) begin
          cnt_q <= '0;
          step  <= 1'b1;
          pix   <= word_t'(sr[1][15:0]);
          for (int s = 1; s < NV; s++) begin
            // after this shift, word v sits in sr[v+1] (v < WORDS-1) or is in_word
            if (s / 4 == WORDS - 1) w[s-1] <= word_t'(in_word[16*(s%4) +: 16]);
            else                    w[s-1] <= word_t'(sr[s/4 + 1][16*(s%4) +: 16]);
          end
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
      end
    end
  end
endmodule
