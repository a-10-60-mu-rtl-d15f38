// spad: the single scratch pad shared by all PEs and MPEs of one SPE.
//
// It holds SPAD_GROUPS x GROUP_SZ = 4 x 4 = 16 activation registers (InReg).
// When shift is high, the IN word (GROUP_SZ activations, one per input channel of
// a channel group) is written into group 0 and every group moves one place down
// (group g takes group g-1), so four shifts fill the pad. All 16 registers are
// visible at once on regs, where register g*GROUP_SZ + e is element e of group g;
// the select MUXes of the PEs read them in parallel.
//
// Timing: regs shows a shifted-in word from the next cycle on.
//
// From the paper's figure: 16 Reg in four dashed groups of four, IN entering the
// first group and arrows from each group to the next. Own choices: the width of
// IN (one group per shift) and the reset to zero.
module spad
  import cnn_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    shift,
  input  logic [WORD_W-1:0]       in_word,
  output logic signed [ACT_W-1:0] regs [SPAD_REGS]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < SPAD_REGS; r++) regs[r] <= '0;
    end else if (shift) begin
      for (int e = 0; e < GROUP_SZ; e++)
        regs[e] <= in_word[e*ACT_W +: ACT_W];
      for (int g = 1; g < SPAD_GROUPS; g++)
        for (int e = 0; e < GROUP_SZ; e++)
          regs[g*GROUP_SZ+e] <= regs[(g-1)*GROUP_SZ+e];
    end
  end

endmodule
