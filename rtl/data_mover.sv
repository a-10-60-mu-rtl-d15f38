// data_mover: the data download / upload unit between the DDR controller's user
// port and the on-chip buffers.
//
// A command (dm_cmd_t) names a direction, a target buffer, a DDR word address, a
// buffer word address and a length in 32-bit words.
//  * Download (upload = 0): reads are issued to DDR one per accepted request
//    (ddr_req && ddr_gnt); every returned word (ddr_rvalid, in order) is written
//    to the target at buf_addr + k. Targets: activation buffer, weight memory or
//    index memory (32-bit slices, see weight_index_buffer).
//  * Upload (upload = 1): words of the activation buffer are read (1 cycle) and
//    written to DDR, one request at a time.
// cmd_ready is high while idle; done pulses for one cycle when the last word has
// been written.
//
// DDR user port (own choice; the paper's DDR IP is a vendor block whose user
// interface is not given): request/grant with write enable, 32-bit word address
// and data, and in-order read data with a valid strobe. Any read latency works.
//
// The paper only names this unit; its whole behaviour here is this design's.
module data_mover
  import cnn_pkg::*;
#(
  parameter int unsigned ACT_AW = 14,
  parameter int unsigned WIB_AW = 14
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  dm_cmd_t           cmd,
  output logic              done,
  // DDR user port
  output logic              ddr_req,
  output logic              ddr_we,
  output logic [31:0]       ddr_addr,
  output logic [31:0]       ddr_wdata,
  input  logic              ddr_gnt,
  input  logic              ddr_rvalid,
  input  logic [31:0]       ddr_rdata,
  // activation buffer
  output logic              act_re,
  output logic [ACT_AW-1:0] act_raddr,
  input  logic [31:0]       act_rdata,
  output logic              act_we,
  output logic [ACT_AW-1:0] act_waddr,
  output logic [31:0]       act_wdata,
  // weight / index buffer
  output logic              wib_we,
  output logic              wib_wsel,
  output logic [WIB_AW-1:0] wib_waddr,
  output logic [31:0]       wib_wdata
);

  typedef enum logic [2:0] {S_IDLE, S_DL, S_UL_RD, S_UL_WAIT, S_UL_WR} state_e;

  state_e      state;
  dm_cmd_t     c;
  logic [19:0] n_req, n_rsp;

  assign cmd_ready = (state == S_IDLE);

  // DDR request side
  always_comb begin
    ddr_req   = 1'b0;
    ddr_we    = 1'b0;
    ddr_addr  = c.ddr_addr + 32'(n_req);
    ddr_wdata = act_rdata;
    if (state == S_DL && n_req < c.len) ddr_req = 1'b1;
    if (state == S_UL_WR) begin
      ddr_req = 1'b1;
      ddr_we  = 1'b1;
    end
  end

  // Buffer write side (download)
  always_comb begin
    act_we    = (state == S_DL) && ddr_rvalid && (c.target == TGT_ACT);
    wib_we    = (state == S_DL) && ddr_rvalid && (c.target != TGT_ACT);
    wib_wsel  = (c.target == TGT_IDX);
    act_waddr = ACT_AW'(c.buf_addr + n_rsp);
    wib_waddr = WIB_AW'(c.buf_addr + n_rsp);
    act_wdata = ddr_rdata;
    wib_wdata = ddr_rdata;
    act_re    = (state == S_UL_RD);
    act_raddr = ACT_AW'(c.buf_addr + n_req);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c     <= '0;
      n_req <= '0;
      n_rsp <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c     <= cmd;
          n_req <= '0;
          n_rsp <= '0;
          if (cmd.len == 0)    done  <= 1'b1;
          else if (cmd.upload) state <= S_UL_RD;
          else                 state <= S_DL;
        end
        S_DL: begin
          if (ddr_req && ddr_gnt) n_req <= n_req + 1'b1;
          if (ddr_rvalid) begin
            n_rsp <= n_rsp + 1'b1;
            if (n_rsp + 1'b1 == c.len) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end
          end
        end
        S_UL_RD:   state <= S_UL_WAIT;
        S_UL_WAIT: state <= S_UL_WR;
        S_UL_WR: if (ddr_gnt) begin
          n_req <= n_req + 1'b1;
          if (n_req + 1'b1 == c.len) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_UL_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A read response can only arrive for a request that was issued
  a_rsp_after_req: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_DL && ddr_rvalid) |-> (n_rsp < n_req));

endmodule
