// Test of the PE partial-sum memory: writes random words to random
// addresses, keeps a copy in a testbench array and reads every address
// back; also checks that a word written at one edge is readable in the next
// cycle and that a cycle without write enable changes nothing.
module tb_pe_sram;
  localparam int unsigned L = 64, AW = 24;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [5:0] addr = 0;
  logic [AW-1:0] wdata = 0, rdata;
  logic [AW-1:0] model [L];
  int checks = 0, failures = 0;

  pe_sram #(.L(L), .AW(AW)) dut (.*);

  task automatic chk(logic [AW-1:0] exp);
    checks++;
    if (rdata !== exp) begin
      failures++;
      $display("FAIL addr %0d got %h exp %h", addr, rdata, exp);
    end
  endtask

  initial begin
    for (int i = 0; i < L; i++) begin
      @(negedge clk); we = 1; addr = 6'(i); wdata = AW'($urandom); model[i] = wdata;
    end
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      we = 1; addr = 6'($urandom_range(0, L-1)); wdata = AW'($urandom); model[addr] = wdata;
      @(negedge clk);
      we = 0; #1; chk(model[addr]);   // visible the cycle after the write
      wdata = ~wdata;
      @(negedge clk); #1; chk(model[addr]);   // no write without we
    end
    we = 0;
    for (int i = 0; i < L; i++) begin
      @(negedge clk); addr = 6'(i); #1; chk(model[i]);
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
