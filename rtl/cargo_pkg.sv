// cargo_pkg: types and constants shared by the CARGO critical-region offload
// design.
//
// The identification hardware beside the CPU core watches committed
// instructions. Each commit is described by a commit_t record carrying the
// instruction's PC, a small decoded form of the instruction (uop_t), the
// register values it read and wrote, and whether its data access missed in
// the L2 cache. The decoded form is this design's own choice: the paper keeps
// an OP column per cached instruction (its Fig. 10, Table I) but does not
// define an encoding. It covers the instruction classes the paper names:
// independent and dependent loads, ALU operations, register copies, compares
// and branches.
//
// Producer links (PRED1/PRED2 of the context cache, the register-to-PC map)
// are pred_t values: a full PC, DEAD (value must come from a prediction or a
// NIC argument), INVALID (unknown) or NONE (operand not used). The paper's
// Fig. 10 prints producers as PCs; its area paragraph instead speaks of
// "two 4 bit predecessor instructions". The full-PC form is followed here.
package cargo_pkg;

  localparam int unsigned XLEN  = 64;   // PC and register width (8-byte PC, Sec. 6.5)
  localparam int unsigned NREGS = 16;   // architectural integer registers

  typedef logic [XLEN-1:0] word_t;
  typedef logic [3:0]      reg_id_t;

  // x86-64 register numbering
  localparam reg_id_t RAX = 4'd0, RCX = 4'd1, RDX = 4'd2, RBX = 4'd3,
                      RSP = 4'd4, RBP = 4'd5, RSI = 4'd6, RDI = 4'd7,
                      R8  = 4'd8, R9  = 4'd9;

  // Registers set to DEAD when a region invocation starts (Sec. 4.1/4.4):
  // the function argument registers plus stack and frame pointer.
  localparam logic [NREGS-1:0] DEAD_MASK =
      (16'h1 << RBP) | (16'h1 << RSP) | (16'h1 << RSI) | (16'h1 << RDI) |
      (16'h1 << RCX) | (16'h1 << RDX) | (16'h1 << R8)  | (16'h1 << R9);

  typedef enum logic [1:0] {
    PK_INVALID = 2'd0,
    PK_DEAD    = 2'd1,
    PK_NONE    = 2'd2,
    PK_PC      = 2'd3
  } pred_kind_e;

  typedef struct packed {
    pred_kind_e kind;
    word_t      pc;
  } pred_t;

  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_LOAD = 4'd1,  // dst = mem[base + (idx << scale) + disp], 8 or 1 byte
    OP_MOV  = 4'd2,  // dst = src1
    OP_ADD  = 4'd3,  // dst = src1 + (src2 or disp)
    OP_TEST = 4'd4,  // ZF = (src1 & src2) == 0
    OP_CMP  = 4'd5,  // ZF = (src1 == src2)
    OP_JMP  = 4'd6,
    OP_JE   = 4'd7,
    OP_JNE  = 4'd8
  } op_e;

  typedef struct packed {
    op_e        op;
    logic       dst_v;     // writes dst
    reg_id_t    dst;
    logic       src1_v;    // reads src1 (load: base register)
    reg_id_t    src1;
    logic       src2_v;    // reads src2 (load: index register)
    reg_id_t    src2;
    logic       rip_rel;   // load address is PC relative
    logic [1:0] scale;     // index shift
    logic       byte_ld;   // 1-byte zero-extending load (movzbl)
    logic [31:0] disp;     // displacement / immediate / branch offset
  } uop_t;

  typedef struct packed {
    word_t  pc;
    uop_t   uop;
    word_t  src1_val;
    word_t  src2_val;
    word_t  dst_val;
    logic   l2_miss;     // data access missed in the L2 cache
    logic   br_taken;
    word_t  br_target;
  } commit_t;

  function automatic logic is_branch(op_e op);
    return (op == OP_JMP) || (op == OP_JE) || (op == OP_JNE);
  endfunction

  // One entry of the context instruction cache (Fig. 8 / Fig. 10 Table I)
  typedef struct packed {
    logic        valid;
    logic        ready;
    word_t       pc;
    uop_t        uop;
    pred_t       pred1;
    pred_t       pred2;
    logic [15:0] access;
  } ctx_entry_t;

  // Register state for executing the critical region (Fig. 10 Table III)
  typedef enum logic [1:0] {
    RS_NONE      = 2'd0,
    RS_TRACK     = 2'd1,   // candidate, value not yet known
    RS_READY     = 2'd2,   // predicted value is shipped with the region
    RS_READY_DYN = 2'd3    // value comes from a NIC user routine argument
  } reg_state_e;

  typedef struct packed {
    reg_state_e state;
    logic [3:0] arg_id;
    word_t      value;
  } reg_ctx_t;

  // One instruction of a region sent to the NIC
  typedef struct packed {
    word_t pc;
    uop_t  uop;
  } rgn_inst_t;

  // Event pulses of the whole design, one bit per mechanism, for counting
  typedef struct packed {
    logic alloc_miss;     // L2-missing instruction allocated
    logic alloc_pend;     // marked producer allocated on re-execution
    logic alloc_br;       // branch allocated (forward rule or bypass edge)
    logic bwd_add;        // bypassing backward branch added after checkpoint match
    logic evict;          // context cache replacement
    logic root;           // region root committed: map reset to DEAD/INVALID
    logic dyn_match;      // IN value matched a NIC argument (READY-DYN)
    logic epoch;          // epoch ended, region shipped, tables flushed
    logic region_loaded;  // NIC installed a new region
    logic inst_exec;      // NIC executed a non-load region instruction
    logic inst_skip;      // NIC skipped an instruction (unknown register)
    logic load;           // NIC issued a PCIe read with steering tag
    logic step_limit;     // run stopped by the step bound
    logic rgn_drop;       // region instruction beyond NIC capacity dropped
    logic pkt_stall;      // arriving packet refused (scheduler full)
  } ev_t;

endpackage
