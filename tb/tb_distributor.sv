// Test of the distributor at its full size (192 weights + 1 pixel = 193
// values in 49 words of 64 bits). Several steps are sent, with gaps between
// words; after the 49th word of a step, step must pulse exactly once, one
// cycle later, with the pixel from slot 0 and weight k from slot k+1.
// Also checks that clear restarts the word count.
module tb_distributor;
  import mmie_pkg::*;
  localparam int unsigned NW = 192;
  localparam int unsigned NV = NW + 1;
  localparam int unsigned WORDS = (NV + 3) / 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0;
  logic [63:0] in_word = 0;
  logic step;
  word_t pix;
  word_t w [NW];
  word_t slot [WORDS*4];
  int checks = 0, failures = 0, nstep = 0;

  distributor #(.NW(NW)) dut (.*);

  always @(posedge clk) if (rst_n && step) nstep++;

  task automatic send_step(bit gaps);
    for (int s = 0; s < WORDS*4; s++) slot[s] = word_t'($urandom);
    for (int wd = 0; wd < WORDS; wd++) begin
      @(negedge clk);
      in_valid = 1;
      in_word = {slot[4*wd+3], slot[4*wd+2], slot[4*wd+1], slot[4*wd]};
      if (gaps && wd % 5 == 2) begin
        @(negedge clk); in_valid = 0;   // one idle cycle
      end
    end
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!step) begin failures++; $display("FAIL no step"); end
    checks++;
    if (pix !== slot[0]) begin failures++; $display("FAIL pixel"); end
    for (int k = 0; k < NW; k++) begin
      checks++;
      if (w[k] !== slot[k+1]) begin
        failures++;
        if (failures < 5) $display("FAIL w[%0d] %0d exp %0d", k, w[k], slot[k+1]);
      end
    end
    @(negedge clk);
    checks++;
    if (step) begin failures++; $display("FAIL step longer than a cycle"); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    send_step(0);
    send_step(1);
    // a partial step, then clear, then a full one
    for (int wd = 0; wd < 10; wd++) begin
      @(negedge clk); in_valid = 1; in_word = {$urandom, $urandom};
    end
    @(negedge clk); in_valid = 0; clear = 1;
    @(negedge clk); clear = 0;
    send_step(0);
    checks++;
    if (nstep != 3) begin failures++; $display("FAIL steps %0d", nstep); end
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
