// tb_reg_state_table: a tracked register whose IN value equals a NIC
// argument becomes READY-DYN with that argument's number; a tracked register
// with a valid prediction becomes READY with the predicted value and follows
// it; an untracked register stays NONE; flush clears the states.
module tb_reg_state_table;
  import cargo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic track_valid = 0, arg_valid = 0, obs = 0, flush = 0, dyn;
  reg_id_t track_reg = '0, obs_reg = '0;
  logic [3:0] arg_id = '0;
  word_t arg_val = '0, obs_val = '0;
  logic [15:0] pv = '0;
  word_t pval [16];
  reg_ctx_t ctx [16];

  reg_state_table dut (.clk, .rst_n, .flush, .track_valid, .track_reg, .arg_valid, .arg_id,
    .arg_val, .obs_in_valid(obs), .obs_reg, .obs_val, .pred_valid(pv), .pred_val(pval),
    .ctx, .ev_dyn_match(dyn));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (300) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) pval[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    // arguments of recent packets (as in the paper's example list)
    foreach (ctx[i]) ;
    @(negedge clk); arg_valid = 1; arg_id = 1; arg_val = 64'd1234;
    @(negedge clk); arg_id = 2; arg_val = 64'd4;
    @(negedge clk); arg_id = 1; arg_val = 64'd16;
    @(negedge clk); arg_valid = 0;
    // RDX tracked, its IN value 16 matches argument 1
    track_valid = 1; track_reg = RDX;
    @(negedge clk); track_valid = 0;
    chk(ctx[RDX].state == RS_TRACK, "RDX tracked");
    obs = 1; obs_reg = RDX; obs_val = 64'd16; #1;
    chk(dyn, "argument match flagged");
    @(negedge clk); obs = 0;
    chk(ctx[RDX].state == RS_READY_DYN && ctx[RDX].arg_id == 4'd1, "RDX READY-DYN arg 1");
    // RAX tracked, IN value matches nothing; predictor supplies 0x780240
    track_valid = 1; track_reg = RAX; obs = 1; obs_reg = RAX; obs_val = 64'h780240;
    @(negedge clk); track_valid = 0; obs = 0;
    chk(ctx[RAX].state == RS_TRACK, "RAX waits for prediction");
    pv[RAX] = 1; pval[RAX] = 64'h780240;
    @(negedge clk);
    chk(ctx[RAX].state == RS_READY && ctx[RAX].value == 64'h780240, "RAX READY with value");
    pval[RAX] = 64'h780300;
    @(negedge clk);
    chk(ctx[RAX].value == 64'h780300, "READY value follows predictor");
    pv[RAX] = 0;
    @(negedge clk);
    chk(ctx[RAX].state == RS_TRACK, "prediction lost -> TRACK");
    chk(ctx[RBX].state == RS_NONE, "untracked stays NONE");
    chk(ctx[RDX].state == RS_READY_DYN, "READY-DYN sticky");
    flush = 1; @(negedge clk); flush = 0;
    chk(ctx[RDX].state == RS_NONE, "flush clears");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
