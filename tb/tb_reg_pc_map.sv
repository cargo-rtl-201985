// tb_reg_pc_map: self-checking test of the register-to-PC map.
// Checks reset to INVALID, producer recording, the root reset to DEAD for
// argument/stack registers and INVALID for the rest, write-over-reset
// ordering, NONE for unused sources, and flush.
module tb_reg_pc_map;
  import cargo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic flush = 0, root = 0, wr_en = 0, rd1_v = 1, rd2_v = 1;
  reg_id_t wr_reg = '0, r1 = '0, r2 = '0;
  word_t wr_pc = '0;
  pred_t p1, p2;

  reg_pc_map dut (.clk, .rst_n, .flush, .root_reset(root), .wr_en, .wr_reg, .wr_pc,
                  .rd1_v, .rd1_reg(r1), .rd2_v, .rd2_reg(r2), .rd1_pred(p1), .rd2_pred(p2));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 16; r++) begin
      r1 = reg_id_t'(r); #1;
      chk(p1.kind == PK_INVALID, $sformatf("reg %0d INVALID after reset", r));
    end
    @(negedge clk); wr_en = 1; wr_reg = RAX; wr_pc = 64'h41b571;
    @(negedge clk); wr_reg = RBX; wr_pc = 64'h41b578;
    @(negedge clk); wr_en = 0; r1 = RAX; r2 = RBX; #1;
    chk(p1.kind == PK_PC && p1.pc == 64'h41b571, "RAX -> 0x41b571");
    chk(p2.kind == PK_PC && p2.pc == 64'h41b578, "RBX -> 0x41b578");
    // root reset with a simultaneous write of RAX
    @(negedge clk); root = 1; wr_en = 1; wr_reg = RAX; wr_pc = 64'h41b571;
    @(negedge clk); root = 0; wr_en = 0;
    for (int r = 0; r < 16; r++) begin
      r1 = reg_id_t'(r); #1;
      if (r == 0) chk(p1.kind == PK_PC && p1.pc == 64'h41b571, "root write wins for RAX");
      else if (DEAD_MASK[r]) chk(p1.kind == PK_DEAD, $sformatf("reg %0d DEAD after root", r));
      else chk(p1.kind == PK_INVALID, $sformatf("reg %0d INVALID after root", r));
    end
    rd2_v = 0; #1;
    chk(p2.kind == PK_NONE, "unused source reads NONE");
    @(negedge clk); flush = 1;
    @(negedge clk); flush = 0; r1 = RAX; #1;
    chk(p1.kind == PK_INVALID, "flush clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
