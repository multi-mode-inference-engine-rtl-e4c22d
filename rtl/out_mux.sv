// Output multiplexer: four 16-bit tile outputs onto the 64-bit output bus.
//
// After the last pass of a job the finished output pixels are read out of
// the PE memories; every tile presents one ReLU-ed 16-bit value and this
// multiplexer forwards the values of tiles 4g..4g+3 (group sel) as one
// 64-bit word, tile 4g in bits 15:0. The paper's architecture drawing shows
// p 16-bit tile outputs entering a multiplexer with a 64-bit output; the
// grouping by four consecutive tiles and the output register are this
// design's choice. Timing: one cycle from sel/in_valid to out_data/out_valid.
module out_mux
  import mmie_pkg::*;
#(
  parameter int unsigned P = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [$clog2(P/4)-1:0]     sel,
  input  word_t                      y [P],
  output logic                       out_valid,
  output logic [63:0]                out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int b = 0; b < 4; b++) out_data[16*b +: 16] <= y[4*sel + b];
    end
  end
endmodule
