// reg_value_predictor: the IN/GEN register value predictor (Tables IV and V
// of the working example).
//
// For a register whose value the critical region needs but cannot compute
// (a chain root), the predictor learns which incoming ("IN") value is the
// one most often followed by values generated ("GEN") inside the region.
//
// IN table, IN_ENTRIES = 48 entries (paper: "48 entry level 1"). The first IN
// value of register r lives in the fixed slot r; further values of the same
// register go to free slots 16..47 and are chained from the fixed slot by
// next pointers, up to MAX_IN_PER_REG = 8 per register. When a register
// already has eight values, or no slot is free, its least frequently seen
// value (smallest IN usage) is overwritten. Each slot counts IN usage (times
// this value arrived) and GEN usage (GEN values seen while it was the
// register's current IN value) and points to a GEN table entry.
// GEN table, GEN_ENTRIES = 132 entries (paper: "132 entry level 2"), each
// holding the first GEN value and the most recent one.
//
// A slot is valid ("READY") when its IN-to-GEN transition probability
// GEN usage / IN usage exceeds 1/8, computed as 8*GEN > IN. The paper also
// says the IN value correlated with the most GEN values is the most probable
// one; so the prediction for a register is its valid slot with the highest
// GEN usage. Where the paper allocates further slots "randomly", this design
// takes the lowest-numbered free slot, and it searches a register's values
// associatively instead of walking the chain; the chain pointers are kept as
// the paper describes.
//
// Timing: one IN and one GEN event per cycle, state updated at the clock
// edge; predictions are combinational from the state.
module reg_value_predictor
  import cargo_pkg::*;
#(
  parameter int unsigned IN_ENTRIES     = 48,
  parameter int unsigned GEN_ENTRIES    = 132,
  parameter int unsigned MAX_IN_PER_REG = 8,
  parameter int unsigned CNT_W          = 16,
  localparam int unsigned INB  = $clog2(IN_ENTRIES),
  localparam int unsigned GENB = $clog2(GEN_ENTRIES)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    flush,
  input  logic    in_valid,
  input  reg_id_t in_reg,
  input  word_t   in_val,
  input  logic    gen_valid,
  input  reg_id_t gen_reg,
  input  word_t   gen_val,
  output logic [NREGS-1:0] pred_valid,
  output word_t            pred_val [NREGS],
  output logic [INB-1:0]   pred_slot [NREGS],
  // read port onto the GEN table: first and latest GEN value of the slot
  // that currently predicts register gen_rd_reg
  input  reg_id_t          gen_rd_reg,
  output logic             gen_rd_valid,
  output word_t            gen_rd_first,
  output word_t            gen_rd_last
);

  typedef struct packed {
    logic             valid;
    reg_id_t          rreg;
    word_t            value;
    logic [CNT_W-1:0] in_use;
    logic [CNT_W-1:0] gen_use;
    logic             gptr_v;
    logic [GENB-1:0]  gptr;
    logic             next_v;
    logic [INB-1:0]   next;
  } in_ent_t;

  typedef struct packed {
    word_t val1;
    word_t valn;
  } gen_ent_t;

  in_ent_t  in_q  [IN_ENTRIES];
  gen_ent_t gen_q [GEN_ENTRIES];
  logic [GEN_ENTRIES-1:0] gen_used_q;
  logic [NREGS-1:0]       cur_v_q;
  logic [INB-1:0]         cur_q [NREGS];

  function automatic logic slot_ready(in_ent_t e);
    return e.valid && ({e.gen_use, 3'b000} > {3'b000, e.in_use});
  endfunction

  // ---------- IN event decode ----------
  logic           m_hit;
  logic [INB-1:0] m_idx;
  int unsigned    r_cnt;
  logic           free_v;
  logic [INB-1:0] free_idx;
  logic           tail_v;
  logic [INB-1:0] tail_idx;
  logic [INB-1:0] lfu_idx;
  logic [INB-1:0] in_tgt;
  logic           in_new_slot, in_link;

  always_comb begin
    m_hit = 1'b0; m_idx = '0; r_cnt = 0;
    tail_v = 1'b0; tail_idx = '0; lfu_idx = INB'(in_reg);
    for (int i = 0; i < int'(IN_ENTRIES); i++) begin
      if (in_q[i].valid && in_q[i].rreg == in_reg) begin
        r_cnt++;
        if (in_q[i].value == in_val) begin m_hit = 1'b1; m_idx = INB'(i); end
        if (!in_q[i].next_v) begin tail_v = 1'b1; tail_idx = INB'(i); end
        if (in_q[i].in_use < in_q[lfu_idx].in_use) lfu_idx = INB'(i);
      end
    end
    free_v = 1'b0; free_idx = '0;
    for (int i = int'(IN_ENTRIES) - 1; i >= int'(NREGS); i--) begin
      if (!in_q[i].valid) begin free_v = 1'b1; free_idx = INB'(i); end
    end
    in_new_slot = 1'b0; in_link = 1'b0;
    if (m_hit)                                 in_tgt = m_idx;
    else if (!in_q[INB'(in_reg)].valid)            begin in_tgt = INB'(in_reg); in_new_slot = 1'b1; end
    else if (r_cnt < MAX_IN_PER_REG && free_v) begin in_tgt = free_idx; in_new_slot = 1'b1; in_link = tail_v; end
    else                                       in_tgt = lfu_idx;
  end

  // ---------- GEN event decode ----------
  logic            gfree_v;
  logic [GENB-1:0] gfree_idx;
  logic [INB-1:0]  g_slot;
  always_comb begin
    gfree_v = 1'b0; gfree_idx = '0;
    for (int i = int'(GEN_ENTRIES) - 1; i >= 0; i--)
      if (!gen_used_q[i]) begin gfree_v = 1'b1; gfree_idx = GENB'(i); end
    g_slot = cur_q[gen_reg];
  end

  logic do_gen;
  assign do_gen = gen_valid && cur_v_q[gen_reg] && in_q[g_slot].valid &&
                  !(in_valid && in_reg == gen_reg);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(IN_ENTRIES); i++) in_q[i] <= '0;
      for (int i = 0; i < int'(GEN_ENTRIES); i++) gen_q[i] <= '0;
      gen_used_q <= '0;
      cur_v_q    <= '0;
      for (int i = 0; i < int'(NREGS); i++) cur_q[i] <= '0;
    end else if (flush) begin
      for (int i = 0; i < int'(IN_ENTRIES); i++) in_q[i].valid <= 1'b0;
      gen_used_q <= '0;
      cur_v_q    <= '0;
    end else begin
      if (in_valid) begin
        cur_v_q[in_reg] <= 1'b1;
        cur_q[in_reg]   <= in_tgt;
        if (m_hit) begin
          if (in_q[in_tgt].in_use != '1) in_q[in_tgt].in_use <= in_q[in_tgt].in_use + 1'b1;
        end else begin
          // new value (fresh slot or replacement of the least used one)
          in_q[in_tgt].valid   <= 1'b1;
          in_q[in_tgt].rreg    <= in_reg;
          in_q[in_tgt].value   <= in_val;
          in_q[in_tgt].in_use  <= CNT_W'(1);
          in_q[in_tgt].gen_use <= '0;
          in_q[in_tgt].gptr_v  <= 1'b0;
          if (in_new_slot) in_q[in_tgt].next_v <= 1'b0;
          if (!in_new_slot && in_q[in_tgt].gptr_v) gen_used_q[in_q[in_tgt].gptr] <= 1'b0;
          if (in_link) begin
            in_q[tail_idx].next_v <= 1'b1;
            in_q[tail_idx].next   <= in_tgt;
          end
        end
      end
      if (do_gen) begin
        if (in_q[g_slot].gen_use != '1) in_q[g_slot].gen_use <= in_q[g_slot].gen_use + 1'b1;
        if (in_q[g_slot].gptr_v) begin
          gen_q[in_q[g_slot].gptr].valn <= gen_val;
        end else if (gfree_v) begin
          in_q[g_slot].gptr_v   <= 1'b1;
          in_q[g_slot].gptr     <= gfree_idx;
          gen_used_q[gfree_idx] <= 1'b1;
          gen_q[gfree_idx]      <= '{val1: gen_val, valn: gen_val};
        end
      end
    end
  end

  // ---------- prediction ----------
  always_comb begin
    for (int r = 0; r < int'(NREGS); r++) begin
      pred_valid[r] = 1'b0;
      pred_val[r]   = '0;
      pred_slot[r]  = '0;
      for (int i = 0; i < int'(IN_ENTRIES); i++) begin
        if (in_q[i].rreg == reg_id_t'(r) && slot_ready(in_q[i]) &&
            (!pred_valid[r] || in_q[i].gen_use > in_q[pred_slot[r]].gen_use)) begin
          pred_valid[r] = 1'b1;
          pred_val[r]   = in_q[i].value;
          pred_slot[r]  = INB'(i);
        end
      end
    end
  end

  always_comb begin
    gen_rd_valid = pred_valid[gen_rd_reg] && in_q[pred_slot[gen_rd_reg]].gptr_v;
    gen_rd_first = gen_q[in_q[pred_slot[gen_rd_reg]].gptr].val1;
    gen_rd_last  = gen_q[in_q[pred_slot[gen_rd_reg]].gptr].valn;
  end

endmodule
