// tb_bwd_edge_tracker: a taken backward branch that jumps over the region
// span is checkpointed; on re-entry the branch is reported when the values
// read match the checkpoint and not when they differ. A backward branch that
// lands inside the span is ignored.
module tb_bwd_edge_tracker;
  import cargo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic cm_valid = 0, active, add_valid;
  commit_t cm;
  word_t regs [16];
  word_t add_pc, add_target;
  uop_t add_uop;
  int adds = 0;

  bwd_edge_tracker dut (.clk, .rst_n, .flush(1'b0), .cm_valid, .cm, .regs,
    .rgn_nonempty(1'b1), .min_pc(64'h100), .max_pc(64'h200), .active,
    .add_valid, .add_pc, .add_uop, .add_target);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n && add_valid) adds++;

  task automatic commit(input word_t pc, input op_e op, input logic taken, input word_t tgt,
                        input logic s1v, input reg_id_t s1, input word_t s1val);
    @(negedge clk);
    cm = '0; cm.pc = pc; cm.uop.op = op; cm.br_taken = taken; cm.br_target = tgt;
    cm.uop.src1_v = s1v; cm.uop.src1 = s1; cm.src1_val = s1val;
    cm_valid = 1;
    @(negedge clk); cm_valid = 0;
  endtask

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cm = '0;
    for (int i = 0; i < 16; i++) regs[i] = 64'h1000 + 64'(i);
    repeat (2) @(posedge clk); rst_n = 1;
    // branch landing inside the span: not a bypass
    commit(64'h300, OP_JMP, 1, 64'h150, 0, '0, '0);
    chk(!active, "in-span target ignored");
    // bypass branch, re-entry reads RBX with the checkpointed value
    commit(64'h300, OP_JNE, 1, 64'h50, 0, '0, '0);
    chk(active, "bypass checkpointed");
    regs[RBX] = 64'hdead;   // later change must not affect the checkpoint
    commit(64'h180, OP_LOAD, 0, '0, 1, RBX, 64'h1003);
    @(negedge clk);
    chk(adds == 1, "matching re-entry adds the branch");
    chk(add_pc == 64'h300 && add_target == 64'h50 && add_uop.op == OP_JNE, "added branch fields");
    chk(!active, "checkpoint dropped");
    // bypass again, re-entry with a different value
    commit(64'h280, OP_JMP, 1, 64'h80, 0, '0, '0);
    commit(64'h180, OP_LOAD, 0, '0, 1, RCX, 64'h9999);
    @(negedge clk);
    chk(adds == 1, "mismatching re-entry adds nothing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
