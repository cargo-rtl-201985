// ctx_icache: the context instruction cache that collects a program's
// critical region (Fig. 8; Table I of the working example).
//
// Organisation follows the paper: 256 entries, 16-way set associative; each
// entry holds the instruction PC, its decoded operation, two producer links
// (PRED1, PRED2), a READY bit, a VALID bit and an access counter. The set is
// taken from the low PC bits (this design's choice).
//
// One committed instruction is presented per cycle on the acc_* port together
// with the producers of its two sources, read from the register-to-PC map.
//   * Hit: the access counter is incremented (saturating).
//   * Miss, and the instruction missed in the L2 cache, or its PC was marked
//     earlier as a missing producer: a way is allocated with #ACCESS = 1 and
//     the producers from the map. A PC-relative load gets PRED1 = DEAD.
//   * Miss, and the instruction is a branch whose own PC or whose target lies
//     inside the PC span of the current region: it is allocated with PRED1 =
//     its target and is READY at once (the paper's forward-edge rule).
//   * Miss, and the instruction is a compare (TEST/CMP) whose PC lies inside
//     the span: it is allocated like a critical instruction so the region's
//     conditional branches have their flags on the NIC. The paper does not
//     say how flags reach the NIC; this rule is this design's own choice.
//   * Hit: #ACCESS is incremented; a producer stored as INVALID is replaced
//     by the map's current answer (this design's choice, so an entry first
//     seen before any region root still learns its DEAD inputs).
//   * Every PC-valued producer that is not in the cache is put on a small
//     pending list and is allocated the next time it commits (the paper:
//     "it is marked for allocation on its next execution").
// Victim choice: an invalid way, else the way with the smallest access count
// (the paper names the counter as the replacement input; least-count is this
// design's reading). Readiness is re-evaluated continuously by a sweep that
// visits one entry per cycle: an entry is READY when each producer is DEAD,
// NONE, or a valid READY entry. A separate add_* port lets the backward-edge
// tracker insert a branch that bypasses the region. The region span (min_pc,
// max_pc) grows on allocation and is cleared by flush; it is not shrunk on
// eviction (a simplification).
//
// Timing: lookups are combinational and all state updates take one cycle.
// rd_set/rd_way give combinational read access for the region builder.
module ctx_icache
  import cargo_pkg::*;
#(
  parameter int unsigned ENTRIES = 256,
  parameter int unsigned WAYS    = 16,
  parameter int unsigned PEND    = 8,
  localparam int unsigned SETS   = ENTRIES / WAYS,
  localparam int unsigned SETB   = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAYB   = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       flush,
  // commit access
  input  logic       acc_valid,
  input  commit_t    acc,
  input  pred_t      acc_pred1,
  input  pred_t      acc_pred2,
  output logic       acc_hit,
  output logic       acc_alloc,
  output pred_t      acc_eff_pred1,   // producers of the accessed entry
  output pred_t      acc_eff_pred2,
  // branch insertion from the backward-edge tracker
  input  logic       add_valid,
  input  word_t      add_pc,
  input  uop_t       add_uop,
  input  word_t      add_target,
  // region span
  output logic       rgn_nonempty,
  output word_t      min_pc,
  output word_t      max_pc,
  // read port for the region builder
  input  logic [SETB-1:0] rd_set,
  input  logic [WAYB-1:0] rd_way,
  output ctx_entry_t rd_entry,
  // event pulses for statistics
  output logic       ev_alloc_miss,
  output logic       ev_alloc_pend,
  output logic       ev_alloc_br,
  output logic       ev_evict
);

  ctx_entry_t  mem_q  [SETS][WAYS];
  word_t       pend_pc_q [PEND];
  logic [PEND-1:0] pend_v_q;
  logic [$clog2(PEND)-1:0] pend_wp_q;
  logic        span_v_q;
  word_t       min_q, max_q;
  logic [SETB-1:0] sw_set_q;
  logic [WAYB-1:0] sw_way_q;

  function automatic logic [SETB-1:0] set_of(word_t pc);
    return pc[SETB-1:0];
  endfunction

  // Fully combinational lookup of one PC
  typedef struct packed {
    logic            hit;
    logic [WAYB-1:0] way;
    logic            ready;
  } look_t;

  function automatic look_t lookup(word_t pc);
    look_t r;
    r = '0;
    for (int w = 0; w < int'(WAYS); w++) begin
      if (mem_q[set_of(pc)][w].valid && mem_q[set_of(pc)][w].pc == pc) begin
        r.hit   = 1'b1;
        r.way   = WAYB'(w);
        r.ready = mem_q[set_of(pc)][w].ready;
      end
    end
    return r;
  endfunction

  function automatic logic pred_ok(pred_t p);
    look_t l;
    case (p.kind)
      PK_DEAD, PK_NONE: return 1'b1;
      PK_PC: begin
        l = lookup(p.pc);
        return l.hit && l.ready;
      end
      default: return 1'b0;
    endcase
  endfunction

  function automatic logic in_span(word_t pc);
    return span_v_q && (pc >= min_q) && (pc <= max_q);
  endfunction

  // ---------------- access path ----------------
  look_t      acc_l, p1_l, p2_l, add_l;
  logic       is_pend;
  logic       want_miss, want_pend, want_br, want_cmp, want_add, do_alloc;
  pred_t      hit_p1, hit_p2;
  logic [WAYB-1:0] victim;
  logic       victim_valid;
  ctx_entry_t new_e;
  logic [SETB-1:0] alloc_set;
  logic       push1, push2;

  always_comb begin
    acc_l   = lookup(acc.pc);
    p1_l    = lookup(acc_pred1.pc);
    p2_l    = lookup(acc_pred2.pc);
    add_l   = lookup(add_pc);
    is_pend = 1'b0;
    for (int i = 0; i < int'(PEND); i++)
      if (pend_v_q[i] && pend_pc_q[i] == acc.pc) is_pend = 1'b1;

    want_miss = acc_valid && !acc_l.hit && acc.l2_miss && !is_branch(acc.uop.op);
    want_pend = acc_valid && !acc_l.hit && is_pend && !want_miss;
    want_br   = acc_valid && !acc_l.hit && is_branch(acc.uop.op) && !is_pend &&
                (in_span(acc.pc) || in_span(acc.br_target));
    // compares inside the span produce the flags the region's branches read
    want_cmp  = acc_valid && !acc_l.hit && !is_pend && !want_miss &&
                (acc.uop.op == OP_TEST || acc.uop.op == OP_CMP) && in_span(acc.pc);
    want_add  = add_valid && !add_l.hit && !(acc_valid && !acc_l.hit &&
                (want_miss || want_pend || want_br || want_cmp));

    alloc_set = want_add ? set_of(add_pc) : set_of(acc.pc);
    do_alloc  = want_miss || want_pend || want_br || want_cmp || want_add;

    // victim: first invalid way, else least accessed
    victim       = '0;
    victim_valid = 1'b1;
    for (int w = int'(WAYS) - 1; w >= 0; w--) begin
      if (!mem_q[alloc_set][w].valid) begin
        victim       = WAYB'(w);
        victim_valid = 1'b0;
      end
    end
    if (victim_valid) begin
      for (int w = 0; w < int'(WAYS); w++)
        if (mem_q[alloc_set][w].access < mem_q[alloc_set][victim].access) victim = WAYB'(w);
    end

    new_e        = '0;
    new_e.valid  = 1'b1;
    new_e.access = 16'd1;
    if (want_add) begin
      new_e.pc    = add_pc;
      new_e.uop   = add_uop;
      new_e.pred1 = '{kind: PK_PC, pc: add_target};
      new_e.pred2 = '{kind: PK_DEAD, pc: '0};
      new_e.ready = 1'b1;
    end else if (want_br) begin
      new_e.pc    = acc.pc;
      new_e.uop   = acc.uop;
      new_e.pred1 = '{kind: PK_PC, pc: acc.br_target};
      new_e.pred2 = '{kind: PK_DEAD, pc: '0};
      new_e.ready = 1'b1;
    end else begin
      new_e.pc    = acc.pc;
      new_e.uop   = acc.uop;
      new_e.pred1 = (acc.uop.op == OP_LOAD && acc.uop.rip_rel) ? '{kind: PK_DEAD, pc: '0}
                                                                : acc_pred1;
      new_e.pred2 = acc_pred2;
      new_e.ready = 1'b0;
    end

    acc_hit       = acc_valid && acc_l.hit;
    acc_alloc     = do_alloc && !want_add;
    // a producer stored as INVALID (unknown when the entry was allocated)
    // is replaced by the map's current answer on a later hit
    hit_p1 = mem_q[set_of(acc.pc)][acc_l.way].pred1;
    hit_p2 = mem_q[set_of(acc.pc)][acc_l.way].pred2;
    if (!is_branch(acc.uop.op) && hit_p1.kind == PK_INVALID) hit_p1 = acc_pred1;
    if (!is_branch(acc.uop.op) && hit_p2.kind == PK_INVALID) hit_p2 = acc_pred2;
    acc_eff_pred1 = acc_l.hit ? hit_p1 : new_e.pred1;
    acc_eff_pred2 = acc_l.hit ? hit_p2 : new_e.pred2;

    // producers missing from the cache are marked for later allocation
    push1 = (want_miss || want_pend || want_cmp) && new_e.pred1.kind == PK_PC && !p1_l.hit &&
            new_e.pred1.pc != acc.pc;
    push2 = (want_miss || want_pend || want_cmp) && new_e.pred2.kind == PK_PC && !p2_l.hit &&
            new_e.pred2.pc != acc.pc && !(push1 && new_e.pred2.pc == new_e.pred1.pc);
    for (int i = 0; i < int'(PEND); i++) begin
      if (pend_v_q[i] && pend_pc_q[i] == new_e.pred1.pc) push1 = 1'b0;
      if (pend_v_q[i] && pend_pc_q[i] == new_e.pred2.pc) push2 = 1'b0;
    end

    ev_alloc_miss = want_miss;
    ev_alloc_pend = want_pend;
    ev_alloc_br   = want_br || want_cmp || want_add;
    ev_evict      = do_alloc && victim_valid;
  end

  // ---------------- readiness sweep ----------------
  ctx_entry_t sw_e;
  logic       sw_ready;
  always_comb begin
    sw_e     = mem_q[sw_set_q][sw_way_q];
    sw_ready = is_branch(sw_e.uop.op) ? sw_e.ready : (pred_ok(sw_e.pred1) && pred_ok(sw_e.pred2));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(SETS); s++)
        for (int w = 0; w < int'(WAYS); w++) mem_q[s][w] <= '0;
      pend_v_q  <= '0;
      pend_wp_q <= '0;
      for (int i = 0; i < int'(PEND); i++) pend_pc_q[i] <= '0;
      span_v_q  <= 1'b0;
      min_q     <= '0;
      max_q     <= '0;
      sw_set_q  <= '0;
      sw_way_q  <= '0;
    end else if (flush) begin
      for (int s = 0; s < int'(SETS); s++)
        for (int w = 0; w < int'(WAYS); w++) mem_q[s][w].valid <= 1'b0;
      pend_v_q <= '0;
      span_v_q <= 1'b0;
    end else begin
      // sweep (lower priority than the access write below)
      if (sw_e.valid) mem_q[sw_set_q][sw_way_q].ready <= sw_ready;
      {sw_set_q, sw_way_q} <= {sw_set_q, sw_way_q} + 1'b1;

      if (acc_valid && acc_l.hit) begin
        if (mem_q[set_of(acc.pc)][acc_l.way].access != 16'hFFFF)
          mem_q[set_of(acc.pc)][acc_l.way].access <= mem_q[set_of(acc.pc)][acc_l.way].access + 1'b1;
        mem_q[set_of(acc.pc)][acc_l.way].pred1 <= hit_p1;
        mem_q[set_of(acc.pc)][acc_l.way].pred2 <= hit_p2;
      end
      if (do_alloc) begin
        mem_q[alloc_set][victim] <= new_e;
        if (!span_v_q || new_e.pc < min_q) min_q <= new_e.pc;
        if (!span_v_q || new_e.pc > max_q) max_q <= new_e.pc;
        span_v_q <= 1'b1;
      end
      if (want_pend) begin
        for (int i = 0; i < int'(PEND); i++)
          if (pend_pc_q[i] == acc.pc) pend_v_q[i] <= 1'b0;
      end
      if (push1 && push2) begin
        pend_pc_q[pend_wp_q]        <= new_e.pred1.pc;
        pend_v_q[pend_wp_q]         <= 1'b1;
        pend_pc_q[pend_wp_q + 1'b1] <= new_e.pred2.pc;
        pend_v_q[pend_wp_q + 1'b1]  <= 1'b1;
        pend_wp_q <= pend_wp_q + 2'd2;
      end else if (push1 || push2) begin
        pend_pc_q[pend_wp_q] <= push1 ? new_e.pred1.pc : new_e.pred2.pc;
        pend_v_q[pend_wp_q]  <= 1'b1;
        pend_wp_q <= pend_wp_q + 1'b1;
      end
    end
  end

  assign rgn_nonempty = span_v_q;
  assign min_pc       = min_q;
  assign max_pc       = max_q;
  assign rd_entry     = mem_q[rd_set][rd_way];

endmodule
