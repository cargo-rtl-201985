// region_executor: executes the offloaded critical region on the NIC for
// every incoming packet, so that the data the CPU core will need is fetched
// into the core's cache while the request still waits for the core.
//
// Region intake. Region instructions and their register context arrive from
// the identification hardware as a stream ending with a context beat. They
// are collected in a staging buffer (up to REGION_MAX instructions; extra
// ones are dropped and counted) and become the active offload when no packet
// is being executed. As the paper describes, the register values are then
// saved in a dedicated area of the NIC scratch-pad (CTX_BASE + 8*reg); the
// register state (READY / READY-DYN and argument number) stays local.
//
// Per packet. Following the paper: every register in READY-DYN state is set
// from the packet's user-routine result with the recorded argument number
// (numbered from 1, as in the paper's example), every READY register is read
// back from the scratch-pad, and all other registers are unknown. Then the
// region runs from its lowest PC. Each instruction:
//   LOAD   address = base + (index << scale) + disp (PC + disp when PC
//          relative); a PCIe memory read with a steering tag naming the
//          packet's core is issued and the returned data written to dst
//          (8 bytes, or 1 byte zero-extended);
//   MOV, ADD, TEST, CMP as usual (only the zero flag is kept);
//   JMP/JE/JNE to PC + disp.
// An instruction that reads an unknown register is skipped and its
// destination becomes unknown (the paper reports such failed instructions);
// a conditional branch on an unknown flag ends the run. Execution follows
// region PCs: the next instruction is the region instruction with the
// smallest PC above the current one, or, after a taken branch, the smallest
// PC at or above the target; when there is none the run ends. MAX_STEPS
// bounds a run. The micro-operation set, the PC-ordered walk, the step bound
// and the handling of unknown values are this design's choices; the paper
// only says the region runs "in a similar fashion as any other NIC offload".
//
// Interfaces: rgn_* (valid/ready stream + rgn_last with rgn_ctx), pkt_*
// (valid/ready, arguments and core id), mem_req_* (valid/ready, TLP header,
// plus the plain address for a memory model), mem_rsp_* (valid, 64-bit word
// holding the addressed byte; one outstanding read), sp_* (one scratch-pad
// port, two-cycle reads), done_* (pulse when a packet is finished, with its
// core id: the packet is handed to that core's receive ring).
// Timing: ALU and branch instructions take one cycle; a load takes one cycle
// to issue plus the memory latency.
module region_executor
  import cargo_pkg::*;
#(
  parameter int unsigned REGION_MAX = 32,
  parameter int unsigned MAX_STEPS  = 64,
  parameter int unsigned NPKT_ARGS  = 2,
  parameter int unsigned NCORES     = 4,
  parameter int unsigned SP_AW      = 18,
  parameter logic [SP_AW-1:0] CTX_BASE = SP_AW'('h3F000),
  localparam int unsigned RB = $clog2(REGION_MAX),
  localparam int unsigned CB = (NCORES > 1) ? $clog2(NCORES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // region from the identification hardware
  input  logic          rgn_valid,
  input  rgn_inst_t     rgn_inst,
  output logic          rgn_ready,
  input  logic          rgn_last,
  input  reg_ctx_t      rgn_ctx [NREGS],
  // packets from the scheduler
  input  logic          pkt_valid,
  output logic          pkt_ready,
  input  word_t         pkt_args [NPKT_ARGS],
  input  logic [CB-1:0] pkt_core,
  // PCIe memory reads
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output logic [127:0]  mem_req_hdr,
  output logic          mem_req_4dw,
  output word_t         mem_req_addr,
  input  logic          mem_rsp_valid,
  input  word_t         mem_rsp_data,
  // scratch-pad port
  output logic             sp_req_valid,
  input  logic             sp_req_ready,
  output logic             sp_req_we,
  output logic [SP_AW-1:0] sp_req_addr,
  output word_t            sp_req_wdata,
  input  logic             sp_rsp_valid,
  input  word_t            sp_rsp_rdata,
  // packet finished, handed to the core's receive ring
  output logic          done_valid,
  output logic [CB-1:0] done_core,
  output logic          done_offloaded,
  // statistics pulses
  output logic          ev_region_loaded,
  output logic          ev_inst_exec,
  output logic          ev_inst_skip,
  output logic          ev_load,
  output logic          ev_step_limit,
  output logic          ev_rgn_drop
);

  typedef enum logic [3:0] {
    S_IDLE, S_SWAP, S_WRCTX, S_INIT, S_RDREQ, S_RDWAIT,
    S_EXEC, S_MREQ, S_MWAIT, S_DONE
  } state_e;

  // staging and active region
  rgn_inst_t     stg_q [REGION_MAX];
  logic [RB:0]   stg_n_q;
  logic          stg_full_q;
  reg_ctx_t      stg_ctx_q [NREGS];
  rgn_inst_t     act_q [REGION_MAX];
  logic [RB:0]   act_n_q;
  logic          act_v_q;
  reg_ctx_t      act_ctx_q [NREGS];

  state_e        st_q;
  logic [3:0]    ri_q;              // register walk index
  word_t         rf_q [NREGS];
  logic [NREGS-1:0] kn_q;
  logic          zf_q, zfk_q;
  logic [RB-1:0] pc_i_q;            // current instruction slot
  logic [$clog2(MAX_STEPS+1)-1:0] steps_q;
  word_t         args_q [NPKT_ARGS];
  logic [CB-1:0] core_q;
  logic [7:0]    tag_q;
  word_t         laddr_q;
  logic          offl_q;

  // ---------------- next-instruction search ----------------
  function automatic logic [RB:0] find_next(word_t bound, logic incl);
    logic [RB:0] r;
    r = '0;
    for (int i = 0; i < int'(REGION_MAX); i++) begin
      if (i < int'(act_n_q) &&
          ((act_q[i].pc > bound) || (incl && act_q[i].pc == bound)) &&
          (!r[RB] || act_q[i].pc < act_q[r[RB-1:0]].pc))
        r = {1'b1, RB'(i)};
    end
    return r;   // r[RB] = found
  endfunction

  // ---------------- current instruction evaluation ----------------
  rgn_inst_t  ci;
  word_t      s1, s2, opnd2, addr, alu;
  logic       s1k, s2k, need_ok;
  logic       taken, cond_unknown;
  word_t      tgt;
  logic [RB:0] nxt, first;

  always_comb begin
    ci    = act_q[pc_i_q];
    s1    = rf_q[ci.uop.src1];
    s2    = rf_q[ci.uop.src2];
    s1k   = !ci.uop.src1_v || kn_q[ci.uop.src1];
    s2k   = !ci.uop.src2_v || kn_q[ci.uop.src2];
    opnd2 = ci.uop.src2_v ? s2 : {{32{ci.uop.disp[31]}}, ci.uop.disp};
    if (ci.uop.rip_rel)
      addr = ci.pc + {{32{ci.uop.disp[31]}}, ci.uop.disp};
    else
      addr = (ci.uop.src1_v ? s1 : '0) + (ci.uop.src2_v ? (s2 << ci.uop.scale) : '0) +
             {{32{ci.uop.disp[31]}}, ci.uop.disp};
    need_ok = (ci.uop.rip_rel ? 1'b1 : s1k) && s2k;
    alu   = (ci.uop.op == OP_MOV) ? s1 : s1 + opnd2;
    tgt   = ci.pc + {{32{ci.uop.disp[31]}}, ci.uop.disp};
    taken = 1'b0;
    cond_unknown = 1'b0;
    case (ci.uop.op)
      OP_JMP: taken = 1'b1;
      OP_JE:  begin taken = zf_q;  cond_unknown = !zfk_q; end
      OP_JNE: begin taken = !zf_q; cond_unknown = !zfk_q; end
      default: ;
    endcase
    nxt   = taken ? find_next(tgt, 1'b1) : find_next(ci.pc, 1'b0);
    first = find_next('0, 1'b1);
  end

  tlp_st_former u_tlp (
    .addr(laddr_q), .st(8'(core_q)), .tag(tag_q),
    .hdr(mem_req_hdr), .hdr_4dw(mem_req_4dw)
  );

  assign rgn_ready     = !stg_full_q;
  assign pkt_ready     = (st_q == S_IDLE) && !stg_full_q;
  assign mem_req_valid = (st_q == S_MREQ);
  assign mem_req_addr  = laddr_q;
  assign sp_req_valid  = (st_q == S_WRCTX) ||
                         (st_q == S_RDREQ && act_ctx_q[ri_q].state == RS_READY);
  assign sp_req_we     = (st_q == S_WRCTX);
  assign sp_req_addr   = CTX_BASE + SP_AW'({ri_q, 3'b000});
  assign sp_req_wdata  = act_ctx_q[ri_q].value;
  assign done_valid    = (st_q == S_DONE);
  assign done_core     = core_q;
  assign done_offloaded= offl_q;

  logic exec_now;
  assign exec_now = (st_q == S_EXEC);
  assign ev_inst_exec  = exec_now && need_ok && !cond_unknown && ci.uop.op != OP_LOAD;
  assign ev_inst_skip  = exec_now && !(need_ok && !cond_unknown);
  assign ev_load       = mem_req_valid && mem_req_ready;
  assign ev_step_limit = exec_now && (steps_q == ($bits(steps_q))'(MAX_STEPS));
  assign ev_region_loaded = (st_q == S_SWAP);
  assign ev_rgn_drop   = rgn_valid && rgn_ready && (stg_n_q == (RB+1)'(REGION_MAX));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE;
      stg_n_q <= '0; stg_full_q <= 1'b0;
      act_n_q <= '0; act_v_q <= 1'b0;
      for (int i = 0; i < int'(REGION_MAX); i++) begin stg_q[i] <= '0; act_q[i] <= '0; end
      for (int r = 0; r < int'(NREGS); r++) begin
        stg_ctx_q[r] <= '0; act_ctx_q[r] <= '0; rf_q[r] <= '0;
      end
      for (int a = 0; a < int'(NPKT_ARGS); a++) args_q[a] <= '0;
      ri_q <= '0; kn_q <= '0; zf_q <= 1'b0; zfk_q <= 1'b0;
      pc_i_q <= '0; steps_q <= '0; core_q <= '0; tag_q <= '0; laddr_q <= '0;
      offl_q <= 1'b0;
    end else begin
      // region intake into the staging buffer
      if (rgn_valid && rgn_ready && stg_n_q != (RB+1)'(REGION_MAX)) begin
        stg_q[stg_n_q[RB-1:0]] <= rgn_inst;
        stg_n_q <= stg_n_q + 1'b1;
      end
      if (rgn_last && !stg_full_q) begin
        stg_full_q <= 1'b1;
        stg_ctx_q  <= rgn_ctx;
      end

      case (st_q)
        S_IDLE: begin
          if (stg_full_q) st_q <= S_SWAP;
          else if (pkt_valid) begin
            args_q  <= pkt_args;
            core_q  <= pkt_core;
            kn_q    <= '0;
            zfk_q   <= 1'b0;
            steps_q <= '0;
            ri_q    <= '0;
            offl_q  <= act_v_q && (act_n_q != '0);
            st_q    <= (act_v_q && act_n_q != '0) ? S_INIT : S_DONE;
          end
        end
        S_SWAP: begin
          act_q      <= stg_q;
          act_n_q    <= stg_n_q;
          act_ctx_q  <= stg_ctx_q;
          act_v_q    <= 1'b1;
          stg_n_q    <= '0;
          stg_full_q <= 1'b0;
          ri_q       <= '0;
          st_q       <= S_WRCTX;
        end
        S_WRCTX: if (sp_req_ready) begin
          ri_q <= ri_q + 1'b1;
          if (ri_q == 4'(NREGS - 1)) st_q <= S_IDLE;
        end
        S_INIT: begin
          // READY-DYN registers from the packet's arguments
          for (int r = 0; r < int'(NREGS); r++) begin
            for (int a = 0; a < int'(NPKT_ARGS); a++) begin
              if (act_ctx_q[r].state == RS_READY_DYN && int'(act_ctx_q[r].arg_id) == a + 1) begin
                rf_q[r] <= args_q[a];
                kn_q[r] <= 1'b1;
              end
            end
          end
          ri_q <= '0;
          st_q <= S_RDREQ;
        end
        S_RDREQ: begin
          if (act_ctx_q[ri_q].state != RS_READY) begin
            ri_q <= ri_q + 1'b1;
            if (ri_q == 4'(NREGS - 1)) begin
              pc_i_q <= first[RB-1:0];
              st_q   <= S_EXEC;
            end
          end else if (sp_req_ready) st_q <= S_RDWAIT;
        end
        S_RDWAIT: if (sp_rsp_valid) begin
          rf_q[ri_q] <= sp_rsp_rdata;
          kn_q[ri_q] <= 1'b1;
          ri_q <= ri_q + 1'b1;
          if (ri_q == 4'(NREGS - 1)) begin
            pc_i_q <= first[RB-1:0];
            st_q   <= S_EXEC;
          end else st_q <= S_RDREQ;
        end
        S_EXEC: begin
          steps_q <= steps_q + 1'b1;
          if (steps_q == ($bits(steps_q))'(MAX_STEPS)) st_q <= S_DONE;
          else if (ci.uop.op == OP_LOAD && need_ok) begin
            laddr_q <= addr;
            st_q    <= S_MREQ;
          end else begin
            if (!need_ok || cond_unknown) begin
              if (ci.uop.dst_v) kn_q[ci.uop.dst] <= 1'b0;
            end else begin
              case (ci.uop.op)
                OP_MOV, OP_ADD: if (ci.uop.dst_v) begin
                  rf_q[ci.uop.dst] <= alu;
                  kn_q[ci.uop.dst] <= 1'b1;
                end
                OP_TEST: begin zf_q <= ((s1 & s2) == '0); zfk_q <= 1'b1; end
                OP_CMP:  begin zf_q <= (s1 == opnd2);     zfk_q <= 1'b1; end
                default: ;
              endcase
            end
            if (is_branch(ci.uop.op) && cond_unknown) st_q <= S_DONE;
            else if (nxt[RB]) pc_i_q <= nxt[RB-1:0];
            else st_q <= S_DONE;
          end
        end
        S_MREQ: if (mem_req_ready) begin
          tag_q <= tag_q + 1'b1;
          st_q  <= S_MWAIT;
        end
        S_MWAIT: if (mem_rsp_valid) begin
          if (ci.uop.dst_v) begin
            rf_q[ci.uop.dst] <= ci.uop.byte_ld ?
                                word_t'(mem_rsp_data[{laddr_q[2:0], 3'b000} +: 8]) : mem_rsp_data;
            kn_q[ci.uop.dst] <= 1'b1;
          end
          if (nxt[RB]) begin
            pc_i_q <= nxt[RB-1:0];
            st_q   <= S_EXEC;
          end else st_q <= S_DONE;
        end
        default: st_q <= S_IDLE;   // S_DONE
      endcase
    end
  end

  // a PCIe request stays up, with the same address, until it is taken
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr));

endmodule
