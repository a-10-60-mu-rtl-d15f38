// tb_spad: self-checking test of the shared scratch pad. Random words are shifted
// in with random gaps; after every cycle all 16 registers are compared with a
// model in which group g holds the word shifted in g shifts ago.
module tb_spad;
  import cnn_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic shift;
  logic [31:0] in_word;
  logic signed [7:0] regs [16];
  logic [31:0] hist [4];
  int checks = 0, failures = 0;

  spad dut (.*);

  initial begin
    shift = 0; in_word = 0;
    for (int g = 0; g < 4; g++) hist[g] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      shift = ($urandom % 3) != 0;
      in_word = $urandom;
      @(posedge clk);
      if (shift) begin
        for (int g = 3; g > 0; g--) hist[g] = hist[g-1];
        hist[0] = in_word;
      end
      #1;
      for (int g = 0; g < 4; g++)
        for (int e = 0; e < 4; e++) begin
          checks++;
          if (regs[g*4+e] !== hist[g][e*8 +: 8]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
