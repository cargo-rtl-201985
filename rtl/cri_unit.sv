// cri_unit: critical region identification hardware, the block the paper
// places next to the CPU core.
//
// Input is the core's stream of committed instructions (one commit_t per
// cycle) and the arguments NIC user routines computed for recent packets.
// Output, once per epoch, is a critical region: a stream of READY
// instructions followed by one beat carrying the register context.
//
// Inside:
//   * a shadow copy of the architectural registers, written from the commit
//     stream, supplies checkpoint values;
//   * reg_pc_map gives the producers of each commit's sources; it is reset
//     to DEAD/INVALID whenever the smallest-PC cached instruction commits
//     (root_reset, the start of one invocation of the region);
//   * ctx_icache collects critical instructions, producers and branches;
//   * bwd_edge_tracker adds branches that bypass the region backwards;
//   * register candidates: a cached instruction with no known producer for
//     either source (both DEAD or unused) needs its destination value; one
//     with a DEAD source and a known other producer needs that source value
//     (the two cases of the paper's example, RAX and RDX). The first value
//     of such a register seen in an invocation is its IN value; later values
//     written to it by cached instructions in the same invocation are GEN
//     values;
//   * reg_value_predictor and reg_state_table turn those observations into
//     READY / READY-DYN register state;
//   * region_builder ends the epoch after EPOCH_MISSES L2 misses, ships the
//     region and flushes everything. The cache is not updated while the
//     region is being swept.
//
// Timing: every structure is updated in the commit's cycle edge; the region
// appears EPOCH_MISSES misses after the previous flush.
module cri_unit
  import cargo_pkg::*;
#(
  parameter int unsigned ENTRIES      = 256,
  parameter int unsigned WAYS         = 16,
  parameter int unsigned EPOCH_MISSES = 4096
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cm_valid,
  input  commit_t   cm,
  input  logic      arg_valid,
  input  logic [3:0] arg_id,
  input  word_t     arg_val,
  output logic      rgn_valid,
  output rgn_inst_t rgn_inst,
  input  logic      rgn_ready,
  output logic      rgn_last,
  output reg_ctx_t  rgn_ctx [NREGS],
  // observation of the predictor's GEN table for one register
  input  reg_id_t   gen_rd_reg,
  output logic      gen_rd_valid,
  output word_t     gen_rd_first,
  output word_t     gen_rd_last,
  // statistics pulses
  output logic      ev_alloc_miss,
  output logic      ev_alloc_pend,
  output logic      ev_alloc_br,
  output logic      ev_bwd_add,
  output logic      ev_evict,
  output logic      ev_root,
  output logic      ev_dyn_match,
  output logic      ev_epoch
);

  localparam int unsigned SETS = ENTRIES / WAYS;
  localparam int unsigned SETB = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAYB = (WAYS > 1) ? $clog2(WAYS) : 1;

  logic   flush, sweeping, acc_v;
  word_t  regs_q [NREGS];
  pred_t  p1, p2, e1, e2;
  logic   hit, alloc, nonempty, root;
  word_t  min_pc, max_pc;
  logic   add_v;
  word_t  add_pc, add_tgt;
  uop_t   add_uop;
  logic [SETB-1:0] rd_set;
  logic [WAYB-1:0] rd_way;
  ctx_entry_t rd_entry;
  logic [NREGS-1:0] pred_valid;
  word_t  pred_val [NREGS];
  logic [$clog2(48)-1:0] pred_slot [NREGS];
  reg_ctx_t ctx [NREGS];
  logic [NREGS-1:0] seen_q;

  assign acc_v = cm_valid && !sweeping;
  assign root  = acc_v && nonempty && (cm.pc == min_pc);

  // shadow architectural registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < int'(NREGS); i++) regs_q[i] <= '0;
    else if (cm_valid && cm.uop.dst_v) regs_q[cm.uop.dst] <= cm.dst_val;
  end

  reg_pc_map u_map (
    .clk, .rst_n, .flush, .root_reset(root),
    .wr_en(acc_v && cm.uop.dst_v), .wr_reg(cm.uop.dst), .wr_pc(cm.pc),
    .rd1_v(cm.uop.src1_v), .rd1_reg(cm.uop.src1),
    .rd2_v(cm.uop.src2_v), .rd2_reg(cm.uop.src2),
    .rd1_pred(p1), .rd2_pred(p2)
  );

  ctx_icache #(.ENTRIES(ENTRIES), .WAYS(WAYS)) u_cache (
    .clk, .rst_n, .flush,
    .acc_valid(acc_v), .acc(cm), .acc_pred1(p1), .acc_pred2(p2),
    .acc_hit(hit), .acc_alloc(alloc), .acc_eff_pred1(e1), .acc_eff_pred2(e2),
    .add_valid(add_v && !sweeping), .add_pc, .add_uop, .add_target(add_tgt),
    .rgn_nonempty(nonempty), .min_pc, .max_pc,
    .rd_set, .rd_way, .rd_entry,
    .ev_alloc_miss, .ev_alloc_pend, .ev_alloc_br, .ev_evict
  );

  logic bwd_active;
  bwd_edge_tracker u_bwd (
    .clk, .rst_n, .flush,
    .cm_valid(acc_v), .cm, .regs(regs_q),
    .rgn_nonempty(nonempty), .min_pc, .max_pc,
    .active(bwd_active),
    .add_valid(add_v), .add_pc, .add_uop, .add_target(add_tgt)
  );

  // register candidates and IN / GEN observations
  logic    in_cache, cand_v, in_v, gen_v;
  reg_id_t cand_reg;
  word_t   cand_val;
  always_comb begin
    in_cache = hit || alloc;
    cand_v   = 1'b0;
    cand_reg = '0;
    cand_val = '0;
    if (in_cache && !is_branch(cm.uop.op)) begin
      if ((e1.kind == PK_DEAD || e1.kind == PK_NONE) &&
          (e2.kind == PK_DEAD || e2.kind == PK_NONE) && cm.uop.dst_v) begin
        cand_v = 1'b1; cand_reg = cm.uop.dst; cand_val = cm.dst_val;
      end else if (e2.kind == PK_DEAD && cm.uop.src2_v) begin
        cand_v = 1'b1; cand_reg = cm.uop.src2; cand_val = cm.src2_val;
      end else if (e1.kind == PK_DEAD && cm.uop.src1_v && !cm.uop.rip_rel) begin
        cand_v = 1'b1; cand_reg = cm.uop.src1; cand_val = cm.src1_val;
      end
    end
    in_v  = cand_v && !(seen_q[cand_reg] && !root);
    gen_v = in_cache && cm.uop.dst_v && seen_q[cm.uop.dst] && !root &&
            ctx[cm.uop.dst].state != RS_NONE && !(in_v && cand_reg == cm.uop.dst);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) seen_q <= '0;
    else if (flush) seen_q <= '0;
    else begin
      if (root) seen_q <= '0;
      if (in_v) seen_q[cand_reg] <= 1'b1;
    end
  end

  reg_value_predictor u_pred (
    .clk, .rst_n, .flush,
    .in_valid(in_v), .in_reg(cand_reg), .in_val(cand_val),
    .gen_valid(gen_v), .gen_reg(cm.uop.dst), .gen_val(cm.dst_val),
    .pred_valid, .pred_val, .pred_slot,
    .gen_rd_reg, .gen_rd_valid, .gen_rd_first, .gen_rd_last
  );

  reg_state_table u_state (
    .clk, .rst_n, .flush,
    .track_valid(cand_v), .track_reg(cand_reg),
    .arg_valid, .arg_id, .arg_val,
    .obs_in_valid(in_v), .obs_reg(cand_reg), .obs_val(cand_val),
    .pred_valid, .pred_val, .ctx, .ev_dyn_match
  );

  region_builder #(.EPOCH_MISSES(EPOCH_MISSES), .ENTRIES(ENTRIES), .WAYS(WAYS)) u_build (
    .clk, .rst_n, .l2_miss(cm_valid && cm.l2_miss),
    .rd_set, .rd_way, .rd_entry, .ctx,
    .rgn_valid, .rgn_inst, .rgn_ready, .rgn_last, .rgn_ctx,
    .flush, .sweeping
  );

  assign ev_bwd_add = add_v && !sweeping;
  assign ev_root    = root;
  assign ev_epoch   = flush;

endmodule
