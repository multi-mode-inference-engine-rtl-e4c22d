// Test of the pipelining stage: for every delay 0..12 a random stream is
// pushed through and the output must equal the input of dly cycles before
// (the same cycle for dly = 0).
module tb_pipe_stage;
  import mmie_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [3:0] dly = 0;
  strm_t din = '0, dout;
  strm_t hist [64];
  int checks = 0, failures = 0;

  pipe_stage dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int d = 0; d <= 12; d++) begin
      dly = 4'(d);
      for (int t = 0; t < 40; t++) begin
        din = strm_t'({$urandom, $urandom});
        hist[t] = din;
        #1;
        if (t >= d) begin
          checks++;
          if (dout !== hist[t - d]) begin
            failures++;
            $display("FAIL dly %0d t %0d", d, t);
          end
        end
        @(negedge clk);
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
