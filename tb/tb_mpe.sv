// tb_mpe: self-checking test of the mixed PE in its three operations.
// Windows of random length are fed with 'first' on their first element. For
// OP_CONV the output is the running MAC sum (5 cycles latency); for OP_MAX the
// running maximum of a0 and for OP_AVG the running sum of a0 shifted right by
// pool_shift (1 cycle latency). All expected values are computed here.
module tb_mpe;
  import cnn_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic in_valid, first, out_valid;
  bw_mode_e mode;
  pe_op_e op;
  logic [3:0] pool_shift;
  logic [7:0] asel, w;
  logic signed [7:0] a0, a1;
  logic signed [23:0] out;
  int checks = 0, failures = 0, cyc = 0;
  int n_conv = 0, n_max = 0, n_avg = 0;

  mpe dut (.*);

  int exp_q[$], lat_q[$];
  int run_acc, run_max, run_sum;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    in_valid = 0; first = 0; mode = BW8; asel = 0; w = 0; a0 = 0; a1 = 0;
    op = OP_CONV; pool_shift = 2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int ph = 0; ph < 3; ph++) begin
      @(negedge clk);
      in_valid = 0;
      repeat (8) @(negedge clk);  // let the previous operation drain
      op = pe_op_e'(ph);
      for (int t = 0; t < 600; t++) begin
        in_valid = ($urandom % 4) != 0;
        first = in_valid && (($urandom % 4) == 0 || t == 0);
        w = 8'($urandom); a0 = 8'($urandom); a1 = 8'($urandom);
        if (in_valid) begin
          run_acc = (first ? 0 : run_acc) + int'($signed(w)) * int'(a0);
          run_max = (first || int'(a0) > run_max) ? int'(a0) : run_max;
          run_sum = (first ? 0 : run_sum) + int'(a0);
          case (op)
            OP_CONV: begin exp_q.push_back(run_acc); lat_q.push_back(cyc + 5); end
            OP_MAX:  begin exp_q.push_back(run_max); lat_q.push_back(cyc + 1); end
            default: begin exp_q.push_back(run_sum >>> pool_shift); lat_q.push_back(cyc + 1); end
          endcase
        end
        @(negedge clk);
      end
      in_valid = 0; first = 0;
    end
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_conv == 0 || n_max == 0 || n_avg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int e, l;
    checks++;
    case (op) OP_CONV: n_conv++; OP_MAX: n_max++; default: n_avg++; endcase
    if (exp_q.size() == 0) failures++;
    else begin
      e = exp_q.pop_front();
      l = lat_q.pop_front();
      if (int'(out) != e || cyc != l) begin
        failures++;
        if (failures < 10) $display("op=%0d out=%0d exp=%0d cyc=%0d/%0d", op, out, e, cyc, l);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
