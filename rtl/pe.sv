// Processing element (PE): one multiply-accumulate lane of a tile.
//
// Structure as in the paper's PE drawing: a multiplier of the shared input
// pixel (In1) and the PE's own weight (In2), an adder whose other operand is
// the word read from the PE's L x 24-bit partial-sum memory, a write-back of
// the adder output into that memory, and a ReLU on the adder output.
//
// Every enabled cycle performs  mem[addr] <= base + x*w  with
// base = 0 on the first cycle of an output pixel in the first pass, and
// base = mem[addr] otherwise. A pixel therefore accumulates over W_f cycles in
// one pass, and over C_in x H_f passes in all. When en is low nothing is
// written and the adder sees a zero product, so y = ReLU(mem[addr]): this is
// how the final sums are read out after the last pass.
//
// Number formats (design choice; the paper only states 16-bit pixels with 2
// fractional bits and 16-bit weights with 15): the 32-bit product, 17
// fractional bits, is shifted right by PSH = 13 into a 24-bit partial sum with
// 4 fractional bits, and y is the ReLU of the sum shifted right by OSH = 2 and
// saturated to 16 bits, i.e. a pixel with 2 fractional bits again. Partial
// sums wrap on overflow. Timing: y and the memory read are combinational;
// the write happens at the clock edge.
module pe
  import mmie_pkg::*;
#(
  parameter int unsigned L   = 64,
  parameter int unsigned PSH = 13,
  parameter int unsigned OSH = 2
) (
  input  logic                 clk,
  input  logic                 en,     // accumulate and write back
  input  logic                 clr,    // start from zero instead of mem[addr]
  input  logic [$clog2(L)-1:0] addr,
  input  word_t                x,      // input activation pixel
  input  word_t                w,      // weight from the weight generator
  output word_t                y       // ReLU(adder), requantised to 16 bits
);
  logic signed [2*DW-1:0] prod;
  acc_t                   prod_s, base, sum;
  logic [AW-1:0]          rdata;
  acc_t                   relu;
  acc_t                   yq;

  pe_sram #(.L(L), .AW(AW)) u_mem (
    .clk  (clk),
    .we   (en),
    .addr (addr),
    .wdata(sum),
    .rdata(rdata)
  );

  always_comb begin
    prod   = x * w;
    prod_s = en ? acc_t'(prod >>> PSH) : '0;
    base   = clr ? '0 : acc_t'(rdata);
    sum    = base + prod_s;
    relu   = sum[AW-1] ? '0 : sum;
    yq     = relu >>> OSH;
    y      = (yq > acc_t'(32767)) ? word_t'(16'sd32767) : word_t'(yq);
  end
endmodule
