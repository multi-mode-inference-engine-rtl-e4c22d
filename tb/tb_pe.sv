// Test of the processing element. Drives random multiply-accumulate
// sequences into random addresses: each pixel starts with clr (from zero) or
// without (continuing the stored sum) and accumulates a random number of
// products; a testbench model holds the expected 24-bit sums. Read-out
// (en low) must give ReLU(sum) >> 2 saturated to 16 bits, which is checked
// for positive, negative and overflowing sums.
module tb_pe;
  import mmie_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0, clr = 0;
  logic [5:0] addr = 0;
  word_t x = 0, w = 0, y;
  acc_t model [64];
  logic init [64];
  int checks = 0, failures = 0;

  pe #(.L(64)) dut (.*);

  function automatic word_t q(acc_t s);
    acc_t r;
    if (s < 0) return 16'sd0;
    r = s >>> 2;
    return (r > 32767) ? 16'sd32767 : word_t'(r);
  endfunction

  task automatic rd(int a);
    @(negedge clk); en = 0; clr = 0; addr = 6'(a); #1;
    checks++;
    if (y !== q(model[a])) begin
      failures++;
      $display("FAIL addr %0d got %0d exp %0d", a, y, q(model[a]));
    end
  endtask

  initial begin
    for (int i = 0; i < 64; i++) init[i] = 0;
    for (int n = 0; n < 300; n++) begin
      int a = $urandom_range(0, 63);
      int k = $urandom_range(1, 11);
      logic c = !init[a] || ($urandom_range(0, 3) == 0);
      for (int i = 0; i < k; i++) begin
        logic signed [31:0] p;
        @(negedge clk);
        en = 1; clr = c && (i == 0); addr = 6'(a);
        x = word_t'($urandom); w = word_t'($urandom);
        if (n % 3 == 0) x = word_t'($urandom_range(0, 4095));
        p = x * w;
        if (clr) model[a] = 0;
        model[a] = model[a] + acc_t'(p >>> 13);
      end
      init[a] = 1;
      rd(a);
    end
    // saturation: large positive products
    @(negedge clk); en = 1; clr = 1; addr = 6'd5; x = 16'sd32767; w = 16'sd32767;
    model[5] = acc_t'((32'sd32767 * 32'sd32767) >>> 13);
    for (int i = 0; i < 4; i++) begin
      @(negedge clk); clr = 0; model[5] = model[5] + acc_t'((32'sd32767 * 32'sd32767) >>> 13);
    end
    rd(5);
    checks++;
    if (y != 16'sd32767) begin failures++; $display("FAIL no saturation %0d", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
