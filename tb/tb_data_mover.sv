// tb_data_mover: self-checking test of the download/upload unit with a DDR model
// that grants and answers with random delays. Downloads into the activation
// buffer, the weight memory and the index memory are checked word by word in
// the buffers; an upload of activation words back to DDR is checked in the DDR
// model. Every command must end with one done pulse.
module tb_data_mover;
  import cnn_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;  // a real falling edge for the asynchronous reset
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done;
  dm_cmd_t cmd;
  logic ddr_req, ddr_we, ddr_gnt, ddr_rvalid;
  logic [31:0] ddr_addr, ddr_wdata, ddr_rdata;
  logic act_re, act_we, wib_we, wib_wsel;
  logic [13:0] act_raddr, act_waddr, wib_waddr;
  logic [31:0] act_rdata, act_wdata, wib_wdata;
  logic [31:0] wmem [16384], imem [16384];
  int checks = 0, failures = 0, n_done = 0;

  data_mover dut (.*);
  ddr_model #(.DEPTH(4096)) u_ddr (.clk, .req(ddr_req), .we(ddr_we), .addr(ddr_addr),
    .wdata(ddr_wdata), .gnt(ddr_gnt), .rvalid(ddr_rvalid), .rdata(ddr_rdata));
  act_buffer #(.DEPTH(16384)) u_act (.clk, .re(act_re), .raddr(act_raddr), .rdata(act_rdata),
    .we(act_we), .waddr(act_waddr), .wdata(act_wdata));

  always @(posedge clk) begin
    if (wib_we && !wib_wsel) wmem[wib_waddr] <= wib_wdata;
    if (wib_we &&  wib_wsel) imem[wib_waddr] <= wib_wdata;
    if (rst_n && done) n_done++;
  end

  task automatic run(logic up, dm_target_e tg, int da, int ba, int len);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1;
    cmd = '{upload: up, target: tg, ddr_addr: 32'(da), buf_addr: 20'(ba), len: 20'(len)};
    @(negedge clk); cmd_valid = 0;
    while (!cmd_ready) @(negedge clk);
  endtask

  initial begin
    cmd_valid = 0; cmd = '0;
    for (int i = 0; i < 4096; i++) u_ddr.mem[i] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, TGT_ACT, 100, 2000, 300);
    for (int i = 0; i < 300; i++) begin
      checks++; if (u_act.mem[2000+i] !== u_ddr.mem[100+i]) failures++;
    end
    run(0, TGT_WGT, 1000, 64, 128);
    run(0, TGT_IDX, 1500, 32, 97);
    for (int i = 0; i < 128; i++) begin
      checks++; if (wmem[64+i] !== u_ddr.mem[1000+i]) failures++;
    end
    for (int i = 0; i < 97; i++) begin
      checks++; if (imem[32+i] !== u_ddr.mem[1500+i]) failures++;
    end
    run(1, TGT_ACT, 3000, 2100, 150);
    repeat (4) @(negedge clk);
    for (int i = 0; i < 150; i++) begin
      checks++; if (u_ddr.mem[3000+i] !== u_act.mem[2100+i]) failures++;
    end
    checks++;
    if (n_done != 4) begin failures++; $display("done pulses %0d", n_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
