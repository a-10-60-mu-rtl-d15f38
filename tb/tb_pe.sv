// tb_pe: self-checking test of the PE. Random 8-bit and 4-bit MAC streams of
// random length are accumulated; each sum restarts on 'first'. Every acc_valid
// is checked against a running sum of products computed here, and must come
// 5 cycles after its input (4 CMUL stages + accumulator register).
module tb_pe;
  import cnn_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic in_valid, first, acc_valid;
  bw_mode_e mode;
  logic [7:0] asel, w;
  logic signed [7:0] a0, a1;
  logic signed [23:0] acc;
  int checks = 0, failures = 0, cyc = 0;

  pe dut (.*);

  function automatic int prod(bw_mode_e m, logic [7:0] wv, logic signed [7:0] x0,
                              logic signed [7:0] x1);
    if (m == BW8) return int'($signed(wv)) * int'(x0);
    return int'($signed(wv[3:0])) * int'(x0) + int'($signed(wv[7:4])) * int'(x1);
  endfunction

  int exp_q[$], lat_q[$];
  int run;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    in_valid = 0; first = 0; mode = BW8; asel = 0; w = 0; a0 = 0; a1 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run = 0;
    for (int t = 0; t < 1500; t++) begin
      @(negedge clk);
      mode = (t < 750) ? BW8 : BW4;
      asel = (mode == BW4) ? 8'hF0 : 8'h00;
      in_valid = ($urandom % 5) != 0;
      first = in_valid && (($urandom % 8) == 0 || t == 0);
      w = 8'($urandom); a0 = 8'($urandom); a1 = 8'($urandom);
      if (in_valid) begin
        run = (first ? 0 : run) + prod(mode, w, a0, a1);
        exp_q.push_back(run);
        lat_q.push_back(cyc + 5);
      end
    end
    @(negedge clk) in_valid = 0; first = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && acc_valid) begin
    int e, l;
    checks++;
    if (exp_q.size() == 0) failures++;
    else begin
      e = exp_q.pop_front();
      l = lat_q.pop_front();
      if (int'(acc) != e || cyc != l) begin
        failures++;
        if (failures < 10) $display("mismatch acc=%0d exp=%0d cyc=%0d/%0d", acc, e, cyc, l);
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
