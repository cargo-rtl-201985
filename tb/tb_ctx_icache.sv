// tb_ctx_icache: walks the context instruction cache through the paper's
// working example and its replacement rule.
//  1. An L2-missing load (0x41b578) is allocated with #ACCESS = 1 and the
//     producers from the map; its missing producer 0x41b571 is marked and is
//     allocated when it next commits; the readiness sweep then makes both
//     READY (0x41b571 has only DEAD/NONE producers).
//  2. A hit increments #ACCESS.
//  3. A branch inside the region span is allocated READY; one outside is not.
//  4. A full set replaces its least-accessed way.
//  5. flush empties the cache.
module tb_ctx_icache;
  import cargo_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic flush = 0, acc_valid = 0, hit, alloc, nonempty;
  commit_t acc;
  pred_t p1, p2, e1, e2;
  word_t min_pc, max_pc;
  logic [3:0] rd_set = '0, rd_way = '0;
  ctx_entry_t rd_entry;
  logic ev_m, ev_p, ev_b, ev_e;
  int evicts = 0;

  ctx_icache dut (.clk, .rst_n, .flush, .acc_valid, .acc, .acc_pred1(p1), .acc_pred2(p2),
    .acc_hit(hit), .acc_alloc(alloc), .acc_eff_pred1(e1), .acc_eff_pred2(e2),
    .add_valid(1'b0), .add_pc('0), .add_uop('0), .add_target('0),
    .rgn_nonempty(nonempty), .min_pc, .max_pc, .rd_set, .rd_way, .rd_entry,
    .ev_alloc_miss(ev_m), .ev_alloc_pend(ev_p), .ev_alloc_br(ev_b), .ev_evict(ev_e));

  always @(posedge clk) if (rst_n && ev_e) evicts++;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic commit(input word_t pc, input op_e op, input logic miss,
                        input pred_t q1, input pred_t q2, input word_t tgt);
    @(negedge clk);
    acc = '0; acc.pc = pc; acc.uop.op = op; acc.l2_miss = miss; acc.br_target = tgt;
    acc.br_taken = 1'b1;
    p1 = q1; p2 = q2; acc_valid = 1;
    @(negedge clk); acc_valid = 0;
  endtask

  // find an entry by PC through the read port
  task automatic find(input word_t pc, output logic found, output ctx_entry_t e);
    found = 0; e = '0;
    rd_set = pc[3:0];
    for (int w = 0; w < 16; w++) begin
      rd_way = 4'(w); #1;
      if (rd_entry.valid && rd_entry.pc == pc) begin found = 1; e = rd_entry; end
    end
  endtask

  localparam pred_t DEADP = '{kind: PK_DEAD, pc: '0};
  localparam pred_t NONEP = '{kind: PK_NONE, pc: '0};

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic f; ctx_entry_t e;
    acc = '0; p1 = NONEP; p2 = NONEP;
    repeat (2) @(posedge clk); rst_n = 1;
    // 1. the load at 0x41b578 misses; its base comes from 0x41b571, index DEAD
    commit(64'h41b578, OP_LOAD, 1, '{kind: PK_PC, pc: 64'h41b571}, DEADP, '0);
    find(64'h41b578, f, e);
    chk(f && e.access == 1 && e.pred1.kind == PK_PC && e.pred1.pc == 64'h41b571 &&
        e.pred2.kind == PK_DEAD, "0x41b578 allocated with producers");
    find(64'h41b571, f, e);
    chk(!f, "producer not yet allocated");
    // the producer commits (no miss): allocated because it was marked
    commit(64'h41b571, OP_LOAD, 0, DEADP, NONEP, '0);
    find(64'h41b571, f, e);
    chk(f && e.access == 1, "marked producer allocated on next execution");
    chk(nonempty && min_pc == 64'h41b571 && max_pc == 64'h41b578, "region span");
    // a non-critical instruction is not allocated
    commit(64'h41b573, OP_ADD, 0, NONEP, NONEP, '0);
    find(64'h41b573, f, e);
    chk(!f, "non-critical instruction not allocated");
    // readiness sweep: 256 entries per pass, two passes cover the chain
    repeat (600) @(posedge clk);
    find(64'h41b571, f, e);  chk(f && e.ready, "0x41b571 READY");
    find(64'h41b578, f, e);  chk(f && e.ready, "0x41b578 READY");
    // 2. hits
    commit(64'h41b578, OP_LOAD, 1, '{kind: PK_PC, pc: 64'h41b571}, DEADP, '0);
    commit(64'h41b578, OP_LOAD, 0, '{kind: PK_PC, pc: 64'h41b571}, DEADP, '0);
    find(64'h41b578, f, e);  chk(e.access == 3, "#ACCESS counts hits");
    // 3. branches
    commit(64'h41b575, OP_JE, 0, NONEP, NONEP, 64'h41b578);
    find(64'h41b575, f, e);
    chk(f && e.ready && e.pred1.pc == 64'h41b578, "in-span branch allocated READY");
    commit(64'h41c000, OP_JMP, 0, NONEP, NONEP, 64'h41d000);
    find(64'h41c000, f, e);  chk(!f, "out-of-span branch ignored");
    commit(64'h41c100, OP_JNE, 0, NONEP, NONEP, 64'h41b576);
    find(64'h41c100, f, e);  chk(f, "branch into the span allocated");
    // 4. fill set 14 with 16 loads; give all but way of 0x205e extra hits
    for (int k = 0; k < 16; k++) commit(64'h200e + 64'(k) * 16, OP_LOAD, 1, DEADP, NONEP, '0);
    for (int k = 0; k < 16; k++)
      if (k != 5) commit(64'h200e + 64'(k) * 16, OP_LOAD, 1, DEADP, NONEP, '0);
    chk(evicts == 0, "no eviction while the set had room");
    commit(64'h300e, OP_LOAD, 1, DEADP, NONEP, '0);
    chk(evicts == 1, "eviction on a full set");
    find(64'h205e, f, e);  chk(!f, "least-accessed way replaced");
    find(64'h300e, f, e);  chk(f, "new entry present");
    find(64'h204e, f, e);  chk(f && e.access == 2, "other ways kept");
    // 5. flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    find(64'h41b578, f, e);  chk(!f && !nonempty, "flush empties the cache");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
