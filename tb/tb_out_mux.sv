// Test of the output multiplexer with 32 tile outputs: for random group
// selections the 64-bit word one cycle later must hold tiles 4g..4g+3,
// tile 4g in the low 16 bits, and out_valid must follow in_valid by one
// cycle.
module tb_out_mux;
  import mmie_pkg::*;
  localparam int unsigned P = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic [2:0] sel = 0;
  word_t y [P];
  logic out_valid;
  logic [63:0] out_data;
  int checks = 0, failures = 0;

  out_mux #(.P(P)) dut (.*);

  initial begin
    for (int i = 0; i < P; i++) y[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      logic [63:0] exp;
      logic v;
      for (int i = 0; i < P; i++) y[i] = word_t'($urandom);
      sel = 3'($urandom_range(0, 7));
      v = ($urandom_range(0, 3) != 0);
      in_valid = v;
      for (int b = 0; b < 4; b++) exp[16*b +: 16] = y[4*sel + b];
      @(negedge clk);
      checks++;
      if (out_valid !== v) begin failures++; $display("FAIL valid"); end
      if (v) begin
        checks++;
        if (out_data !== exp) begin failures++; $display("FAIL data sel %0d", sel); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
