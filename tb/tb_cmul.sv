// tb_cmul: self-checking test of the mixed-bit-width multiplier.
// Random weights, activations and segment selects are streamed in every cycle in
// all four modes. The expected result is the sum over weight segments of
// (segment as a signed b-bit number) x (A0 or A1), computed here directly from
// that definition, and must appear exactly 4 cycles after the input.
module tb_cmul;
  import cnn_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  bw_mode_e mode;
  logic [7:0] asel, w;
  logic signed [7:0] a0, a1;
  logic signed [15:0] out;
  int checks = 0, failures = 0, cyc = 0;

  cmul dut (.*);

  function automatic int ref_mul(bw_mode_e m, logic [7:0] wv, logic [7:0] as,
                                 logic signed [7:0] x0, logic signed [7:0] x1);
    int b, s, acc;
    b = (m == BW8) ? 8 : (m == BW4) ? 4 : (m == BW2) ? 2 : 1;
    acc = 0;
    for (s = 0; s < 8 / b; s++) begin
      int val;
      val = 0;
      for (int i = 0; i < b; i++) if (wv[s*b+i]) val += (1 << i);
      if (wv[s*b+b-1]) val -= (1 << b);
      acc += val * (as[s*b] ? int'(x1) : int'(x0));
    end
    return acc;
  endfunction

  int exp_q[$];
  int lat_q[$];
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    in_valid = 0; mode = BW8; asel = 0; w = 0; a0 = 0; a1 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      mode = bw_mode_e'(t / 500);
      w  = 8'($urandom);
      a0 = 8'($urandom);
      a1 = 8'($urandom);
      if (t % 50 == 0) begin w = 8'h80; a0 = -128; a1 = -128; end
      begin
        int b;
        b = (mode == BW8) ? 8 : (mode == BW4) ? 4 : (mode == BW2) ? 2 : 1;
        asel = 0;
        for (int s = 0; s < 8 / b; s++)
          if ($urandom % 2) for (int i = 0; i < b; i++) asel[s*b+i] = 1'b1;
      end
      if (in_valid) begin
        exp_q.push_back(ref_mul(mode, w, asel, a0, a1));
        lat_q.push_back(cyc + 4);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("missing %0d results", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int e, l;
    checks++;
    if (exp_q.size() == 0) begin
      failures++;
      $display("unexpected output");
    end else begin
      e = exp_q.pop_front();
      l = lat_q.pop_front();
      if (int'(out) != e || cyc != l) begin
        failures++;
        if (failures < 10) $display("mismatch out=%0d exp=%0d cyc=%0d exp_cyc=%0d", out, e, cyc, l);
      end
    end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
