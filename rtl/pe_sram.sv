// Partial-sum memory of one processing element: L words of AW bits.
//
// Each PE keeps the running sums of the output pixels it is responsible for
// here while the filter rows and input channels are streamed through it. The
// paper gives L = 64 words of 24 bits per PE. It is written as a plain array
// with one write port (synchronous, when we is high) and one asynchronous read
// port, so that the PE can read a sum, add a product and write it back in the
// same cycle; a word written at one clock edge is visible on rdata in the
// next cycle. An ASIC would map this to a register file or SRAM macro with
// the same ports; the asynchronous read is this design's choice.
module pe_sram #(
  parameter int unsigned L  = 64,
  parameter int unsigned AW = 24
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [$clog2(L)-1:0] addr,
  input  logic [AW-1:0]        wdata,
  output logic [AW-1:0]        rdata
);
  logic [AW-1:0] mem [L];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
  end

  assign rdata = mem[addr];
endmodule
