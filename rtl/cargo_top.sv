// cargo_top: the complete CARGO design, Context Augmented Critical Region
// Offload.
//
// Two halves, as in the paper's high-level figure:
//   * CPU side, cri_unit: watches the core's committed instructions, learns
//     the critical region (the loads that miss in L2 and every instruction
//     and branch they depend on) and the register values it needs, and once
//     per epoch of EPOCH_MISSES L2 misses sends the region and its register
//     context to the NIC.
//   * NIC side: pkt_scheduler queues arriving packets with the results of the
//     NIC user routines; region_executor runs the current region for each
//     packet, issuing its loads as PCIe reads whose steering tag names the
//     packet's core (tlp_st_former), so the blocks land in that core's cache
//     before the request is processed there; nic_scratchpad holds the
//     region's register context (port 0) and serves the NIC cores (ports
//     1..NIC_CORES-1).
// The CPU core, the caches and DRAM, the PCIe link and IOMMU, and the NIC
// cores themselves are outside: their signals are ports. The region is
// carried from the CPU side to the NIC by a direct stream here.
//
// Ports: commit stream cm_*; NIC user-routine results for the identification
// hardware arg_*; packets pkt_*; PCIe reads mem_req_* and completions
// mem_rsp_*; scratch-pad ports of the NIC cores nc_*; finished packets
// rx_* (the receive ring of core rx_core); ev, one pulse per mechanism.
module cargo_top
  import cargo_pkg::*;
#(
  parameter int unsigned ENTRIES      = 256,
  parameter int unsigned WAYS         = 16,
  parameter int unsigned EPOCH_MISSES = 4096,
  parameter int unsigned NCORES       = 4,
  parameter int unsigned NIC_CORES    = 6,
  parameter int unsigned NPKT_ARGS    = 2,
  parameter int unsigned REGION_MAX   = 32,
  parameter int unsigned SP_BYTES     = 262144,
  localparam int unsigned CB   = (NCORES > 1) ? $clog2(NCORES) : 1,
  localparam int unsigned SPAW = $clog2(SP_BYTES),
  localparam int unsigned NCP  = NIC_CORES - 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // CPU commit stream
  input  logic          cm_valid,
  input  commit_t       cm,
  // user-routine results reported to the identification hardware
  input  logic          arg_valid,
  input  logic [3:0]    arg_id,
  input  word_t         arg_val,
  // packets
  input  logic          pkt_valid,
  output logic          pkt_ready,
  input  word_t         pkt_args [NPKT_ARGS],
  output logic [4:0]    pkt_queue_len,
  // PCIe memory reads and completions
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output logic [127:0]  mem_req_hdr,
  output logic          mem_req_4dw,
  output word_t         mem_req_addr,
  input  logic          mem_rsp_valid,
  input  word_t         mem_rsp_data,
  // scratch-pad ports of the other NIC cores
  input  logic [NCP-1:0]  nc_req_valid,
  output logic [NCP-1:0]  nc_req_ready,
  input  logic [NCP-1:0]  nc_req_we,
  input  logic [SPAW-1:0] nc_req_addr  [NCP],
  input  word_t           nc_req_wdata [NCP],
  output logic [NCP-1:0]  nc_rsp_valid,
  output word_t           nc_rsp_rdata [NCP],
  // packets handed to the receive rings
  output logic          rx_valid,
  output logic [CB-1:0] rx_core,
  output logic          rx_offloaded,
  // observation
  input  reg_id_t       gen_rd_reg,
  output logic          gen_rd_valid,
  output word_t         gen_rd_first,
  output word_t         gen_rd_last,
  output ev_t           ev
);

  // ---------------- CPU side ----------------
  logic      rgn_valid, rgn_ready, rgn_last;
  rgn_inst_t rgn_inst;
  reg_ctx_t  rgn_ctx [NREGS];

  cri_unit #(.ENTRIES(ENTRIES), .WAYS(WAYS), .EPOCH_MISSES(EPOCH_MISSES)) u_cri (
    .clk, .rst_n, .cm_valid, .cm,
    .arg_valid, .arg_id, .arg_val,
    .rgn_valid, .rgn_inst, .rgn_ready, .rgn_last, .rgn_ctx,
    .gen_rd_reg, .gen_rd_valid, .gen_rd_first, .gen_rd_last,
    .ev_alloc_miss(ev.alloc_miss), .ev_alloc_pend(ev.alloc_pend),
    .ev_alloc_br(ev.alloc_br), .ev_bwd_add(ev.bwd_add), .ev_evict(ev.evict),
    .ev_root(ev.root), .ev_dyn_match(ev.dyn_match), .ev_epoch(ev.epoch)
  );

  // ---------------- NIC side ----------------
  logic          s_valid, s_ready;
  word_t         s_args [NPKT_ARGS];
  logic [CB-1:0] s_core;

  pkt_scheduler #(.NCORES(NCORES), .NPKT_ARGS(NPKT_ARGS)) u_sched (
    .clk, .rst_n,
    .in_valid(pkt_valid), .in_ready(pkt_ready), .in_args(pkt_args),
    .out_valid(s_valid), .out_ready(s_ready), .out_args(s_args), .out_core(s_core),
    .occupancy(pkt_queue_len)
  );
  assign ev.pkt_stall = pkt_valid && !pkt_ready;

  logic [NIC_CORES-1:0] sp_req_valid, sp_req_ready, sp_req_we, sp_rsp_valid;
  logic [SPAW-1:0]      sp_req_addr  [NIC_CORES];
  word_t                sp_req_wdata [NIC_CORES];
  word_t                sp_rsp_rdata [NIC_CORES];

  region_executor #(.REGION_MAX(REGION_MAX), .NPKT_ARGS(NPKT_ARGS), .NCORES(NCORES),
                    .SP_AW(SPAW), .CTX_BASE(SPAW'(SP_BYTES - 4096))) u_exec (
    .clk, .rst_n,
    .rgn_valid, .rgn_inst, .rgn_ready, .rgn_last, .rgn_ctx,
    .pkt_valid(s_valid), .pkt_ready(s_ready), .pkt_args(s_args), .pkt_core(s_core),
    .mem_req_valid, .mem_req_ready, .mem_req_hdr, .mem_req_4dw, .mem_req_addr,
    .mem_rsp_valid, .mem_rsp_data,
    .sp_req_valid(sp_req_valid[0]), .sp_req_ready(sp_req_ready[0]),
    .sp_req_we(sp_req_we[0]), .sp_req_addr(sp_req_addr[0]),
    .sp_req_wdata(sp_req_wdata[0]),
    .sp_rsp_valid(sp_rsp_valid[0]), .sp_rsp_rdata(sp_rsp_rdata[0]),
    .done_valid(rx_valid), .done_core(rx_core), .done_offloaded(rx_offloaded),
    .ev_region_loaded(ev.region_loaded), .ev_inst_exec(ev.inst_exec),
    .ev_inst_skip(ev.inst_skip), .ev_load(ev.load),
    .ev_step_limit(ev.step_limit), .ev_rgn_drop(ev.rgn_drop)
  );

  always_comb begin
    for (int p = 1; p < int'(NIC_CORES); p++) begin
      sp_req_valid[p]   = nc_req_valid[p-1];
      sp_req_we[p]      = nc_req_we[p-1];
      sp_req_addr[p]    = nc_req_addr[p-1];
      sp_req_wdata[p]   = nc_req_wdata[p-1];
      nc_req_ready[p-1] = sp_req_ready[p];
      nc_rsp_valid[p-1] = sp_rsp_valid[p];
      nc_rsp_rdata[p-1] = sp_rsp_rdata[p];
    end
  end

  nic_scratchpad #(.SIZE_BYTES(SP_BYTES), .BANKS(4), .NPORTS(NIC_CORES)) u_sp (
    .clk, .rst_n,
    .req_valid(sp_req_valid), .req_ready(sp_req_ready), .req_we(sp_req_we),
    .req_addr(sp_req_addr), .req_wdata(sp_req_wdata),
    .rsp_valid(sp_rsp_valid), .rsp_rdata(sp_rsp_rdata)
  );

endmodule
