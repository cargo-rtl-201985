// bwd_edge_tracker: handles backward branches that jump over the whole
// critical region (edge H of the paper's control-flow figure).
//
// Such a branch starts after the region and lands before it, so it is never
// allocated by the forward-edge rule, yet control may flow back into the
// region through it with register values it produced. Following the paper,
// the register values are checkpointed just before the branch is taken; only
// one such branch is tracked at a time (a newer one replaces it). When a
// committed instruction next falls inside the region span, the values it
// reads are compared with the checkpoint of the same registers; if every
// value it reads matches, add_valid pulses for one cycle with the branch's PC,
// decoded op and target so the context cache can allocate it. The checkpoint
// is dropped after that first re-entry either way. Which "used values" are
// compared (the sources of the first re-entering instruction) is this
// design's reading of the paper.
//
// Interface: cm_* is the commit stream, regs the architectural register
// values before the commit, min_pc/max_pc the region span. Timing: the
// checkpoint is captured and the comparison made in the commit's cycle;
// add_* is registered, one cycle later.
module bwd_edge_tracker
  import cargo_pkg::*;
#(
  parameter int unsigned NREGS_P = NREGS
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    flush,
  input  logic    cm_valid,
  input  commit_t cm,
  input  word_t   regs [NREGS_P],
  input  logic    rgn_nonempty,
  input  word_t   min_pc,
  input  word_t   max_pc,
  output logic    active,
  output logic    add_valid,
  output word_t   add_pc,
  output uop_t    add_uop,
  output word_t   add_target
);

  word_t chk_q [NREGS_P];
  logic  act_q;
  word_t br_pc_q, br_tgt_q;
  uop_t  br_uop_q;

  logic bypass, reenter, match;
  always_comb begin
    bypass  = cm_valid && rgn_nonempty && is_branch(cm.uop.op) && cm.br_taken &&
              (cm.br_target < cm.pc) && (cm.pc > max_pc) && (cm.br_target < min_pc);
    reenter = cm_valid && act_q && rgn_nonempty && (cm.pc >= min_pc) && (cm.pc <= max_pc);
    match   = 1'b1;
    if (cm.uop.src1_v && chk_q[cm.uop.src1] != cm.src1_val) match = 1'b0;
    if (cm.uop.src2_v && chk_q[cm.uop.src2] != cm.src2_val) match = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q     <= 1'b0;
      add_valid <= 1'b0;
      add_pc    <= '0;
      add_uop   <= '0;
      add_target<= '0;
      br_pc_q   <= '0;
      br_tgt_q  <= '0;
      br_uop_q  <= '0;
      for (int i = 0; i < int'(NREGS_P); i++) chk_q[i] <= '0;
    end else begin
      add_valid <= 1'b0;
      if (flush) begin
        act_q <= 1'b0;
      end else if (bypass) begin
        act_q    <= 1'b1;
        br_pc_q  <= cm.pc;
        br_tgt_q <= cm.br_target;
        br_uop_q <= cm.uop;
        for (int i = 0; i < int'(NREGS_P); i++) chk_q[i] <= regs[i];
      end else if (reenter) begin
        act_q      <= 1'b0;
        add_valid  <= match;
        add_pc     <= br_pc_q;
        add_uop    <= br_uop_q;
        add_target <= br_tgt_q;
      end
    end
  end

  assign active = act_q;

endmodule
