// tb_reg_value_predictor: checks the IN/GEN predictor against a small model
// of the paper's rules: a slot is valid when 8*GEN usage > IN usage, the
// prediction is the valid slot with most GEN usage, GEN keeps the first and
// the latest value, a register holds at most 8 IN values and then replaces
// its least used one.
module tb_reg_value_predictor;
  import cargo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, gen_valid = 0;
  reg_id_t in_reg = '0, gen_reg = '0, gen_rd_reg = '0;
  word_t in_val = '0, gen_val = '0;
  logic [15:0] pv;
  word_t pval [16];
  logic [5:0] pslot [16];
  logic grv;
  word_t gfirst, glast;

  reg_value_predictor dut (.clk, .rst_n, .flush(1'b0), .in_valid, .in_reg, .in_val,
    .gen_valid, .gen_reg, .gen_val, .pred_valid(pv), .pred_val(pval), .pred_slot(pslot),
    .gen_rd_reg, .gen_rd_valid(grv), .gen_rd_first(gfirst), .gen_rd_last(glast));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic inv(input reg_id_t r, input word_t v);
    @(negedge clk); in_valid = 1; in_reg = r; in_val = v;
    @(negedge clk); in_valid = 0;
  endtask
  task automatic genv(input reg_id_t r, input word_t v);
    @(negedge clk); gen_valid = 1; gen_reg = r; gen_val = v;
    @(negedge clk); gen_valid = 0;
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // RAX: IN 0x780240 seen 7 times, one GEN: 8*1 > 7 -> valid
    for (int i = 0; i < 7; i++) inv(RAX, 64'h780240);
    #1 chk(!pv[RAX], "no prediction without GEN");
    genv(RAX, 64'h1235);
    #1 chk(pv[RAX] && pval[RAX] == 64'h780240, "8*GEN > IN: valid");
    // one more IN of the same value: 8*1 > 8 false -> no longer valid
    inv(RAX, 64'h780240);
    #1 chk(!pv[RAX], "8*GEN == IN: not valid");
    genv(RAX, 64'h1300);
    #1 chk(pv[RAX], "valid again");
    gen_rd_reg = RAX; #1;
    chk(grv && gfirst == 64'h1235 && glast == 64'h1300, "GEN table keeps first and latest");
    // a second IN value for RAX with more GEN uses wins
    inv(RAX, 64'h900000);
    for (int i = 0; i < 3; i++) genv(RAX, 64'h77);
    #1 chk(pv[RAX] && pval[RAX] == 64'h900000, "slot with most GEN uses predicted");
    // RBX: 8 distinct IN values fill its chain; value k seen k+1 times
    for (int k = 0; k < 8; k++)
      for (int j = 0; j <= k; j++) inv(RBX, 64'h5000 + 64'(k));
    // the once-seen value 0x5000 gets one GEN use: now valid (8 > 1)
    inv(RBX, 64'h5000);
    genv(RBX, 64'h1);
    genv(RBX, 64'h2);
    #1 chk(pv[RBX] && pval[RBX] == 64'h5000, "0x5000 predicted");
    // a ninth value replaces the least-seen one (0x5001, seen twice)
    inv(RBX, 64'h6000);
    genv(RBX, 64'h3); genv(RBX, 64'h4); genv(RBX, 64'h5);
    #1 chk(pv[RBX] && pval[RBX] == 64'h6000, "ninth value installed and predicted");
    inv(RBX, 64'h5001);
    #1 chk(pslot[RBX] != 6'(RBX) || pval[RBX] == 64'h6000, "prediction unchanged by returning value");
    // other registers untouched
    #1 chk(!pv[RCX], "RCX has no prediction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
