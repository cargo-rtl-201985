// reg_pc_map: the register-to-PC map of the critical-region identification
// hardware (Table II of the working example).
//
// One entry per architectural register holds the PC of the last committed
// instruction that wrote the register, or DEAD / INVALID. Two combinational
// read ports return the producer of an instruction's two source registers; a
// source that is not used reads as NONE. Following the paper, every time the
// smallest-PC instruction of the context cache commits (root_reset), the
// argument, stack and frame registers are set to DEAD and the rest to
// INVALID; this marks the roots of the dependence chains. After reset, and
// on flush at the start of an epoch, every entry is INVALID.
//
// Timing: reads are combinational; a write and a root_reset in the same
// cycle apply the reset first and the write on top, so the root instruction's
// own destination points at it afterwards (as RAX does in the example).
module reg_pc_map
  import cargo_pkg::*;
#(
  parameter int unsigned NREGS_P = NREGS
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    flush,
  input  logic    root_reset,
  input  logic    wr_en,
  input  reg_id_t wr_reg,
  input  word_t   wr_pc,
  input  logic    rd1_v,
  input  reg_id_t rd1_reg,
  input  logic    rd2_v,
  input  reg_id_t rd2_reg,
  output pred_t   rd1_pred,
  output pred_t   rd2_pred
);

  pred_t map_q [NREGS_P];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(NREGS_P); i++) map_q[i] <= '{kind: PK_INVALID, pc: '0};
    end else begin
      if (flush) begin
        for (int i = 0; i < int'(NREGS_P); i++) map_q[i] <= '{kind: PK_INVALID, pc: '0};
      end else if (root_reset) begin
        for (int i = 0; i < int'(NREGS_P); i++)
          map_q[i] <= '{kind: (DEAD_MASK[i] ? PK_DEAD : PK_INVALID), pc: '0};
      end
      if (wr_en && !flush) map_q[wr_reg] <= '{kind: PK_PC, pc: wr_pc};
    end
  end

  always_comb begin
    rd1_pred = rd1_v ? map_q[rd1_reg] : '{kind: PK_NONE, pc: '0};
    rd2_pred = rd2_v ? map_q[rd2_reg] : '{kind: PK_NONE, pc: '0};
  end

endmodule
