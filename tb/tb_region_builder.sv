// tb_region_builder: drives the epoch controller with a small configuration
// (8-miss epochs, 16-entry 4-way cache) and a stand-in cache array read
// through the sweep port. For three epochs with random valid/ready entries
// and a receiver that accepts at random, checks that: nothing is sent before
// the 8th miss; exactly the valid READY entries are sent, in index order,
// each once, held while not accepted; rgn_last follows with the register
// context and is held until accepted; flush is a single pulse after it;
// sweeping covers the whole sweep; misses during the sweep are not counted.
module tb_region_builder;
  import cargo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic l2_miss = 0, rgn_valid, rgn_ready = 0, rgn_last, flush, sweeping;
  logic [1:0] rd_set, rd_way;
  ctx_entry_t rd_entry;
  reg_ctx_t ctx [16], rgn_ctx [16];
  rgn_inst_t rgn_inst;
  ctx_entry_t arr [16];

  assign rd_entry = arr[{rd_set, rd_way}];

  region_builder #(.EPOCH_MISSES(8), .ENTRIES(16), .WAYS(4)) dut (
    .clk, .rst_n, .l2_miss, .rd_set, .rd_way, .rd_entry, .ctx,
    .rgn_valid, .rgn_inst, .rgn_ready, .rgn_last, .rgn_ctx, .flush, .sweeping);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 16; r++) ctx[r] = '{state: reg_state_e'(r % 4), arg_id: 4'(r), value: 64'(r * 3)};
    for (int i = 0; i < 16; i++) arr[i] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int ep = 0; ep < 3; ep++) begin
      word_t expq [$];
      int flushes, lastacc;
      for (int i = 0; i < 16; i++) begin
        arr[i] = '0;
        arr[i].valid = 1'($urandom_range(1)); arr[i].ready = 1'($urandom_range(1));
        arr[i].pc = 64'h1000 * 64'(ep + 1) + 64'(i);
        if (arr[i].valid && arr[i].ready) expq.push_back(arr[i].pc);
      end
      // 8 misses spread over time, nothing is sent meanwhile
      for (int m = 0; m < 8; m++) begin
        @(negedge clk); l2_miss = 1; #1;
        chk(!rgn_valid && !rgn_last && !sweeping, "idle while counting");
        @(negedge clk); l2_miss = 0;
      end
      // sweep with random acceptance and misses that must be ignored
      flushes = 0; lastacc = 0;
      for (int c = 0; c < 200; c++) begin
        @(negedge clk);
        rgn_ready = 1'($urandom_range(1));
        l2_miss   = (flushes == 0) && 1'($urandom_range(1));
        #1;
        if (rgn_valid && rgn_ready) begin
          chk(expq.size() > 0 && rgn_inst.pc == expq[0], "region instruction in order");
          if (expq.size() > 0) void'(expq.pop_front());
        end
        if (rgn_last) begin
          chk(expq.size() == 0, "rgn_last after all instructions");
          chk(rgn_ctx[5] == ctx[5] && rgn_ctx[14] == ctx[14], "context with rgn_last");
        end
        if (rgn_last && rgn_ready) lastacc++;
        if (flush) flushes++;
        if (flush) chk(sweeping, "flush inside the sweep window");
      end
      chk(flushes == 1, "one flush pulse per epoch");
      chk(lastacc == 1, "rgn_last accepted exactly once");
      @(negedge clk); l2_miss = 0; rgn_ready = 0;
      #1 chk(!sweeping, "back to counting");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
