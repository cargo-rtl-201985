// nic_scratchpad: the NIC's on-chip scratch-pad memory for packet control
// data, which also keeps the register context of received critical regions.
//
// The paper specifies 256 KB in 4 banks, reached through a crossbar, with a
// two-cycle access: one cycle to cross the crossbar and one to access the
// bank. Here the memory is 64-bit wide; the banks are word-interleaved
// (bank = word address mod 4), and each bank has a round-robin arbiter over
// the NPORTS requesters (one per NIC core; six in the paper's NIC). Word
// width, interleaving and arbitration are this design's choices.
//
// Interface per port: req_valid / req_ready (ready = granted this cycle),
// req_we, byte address req_addr (low 3 bits ignored), req_wdata. A granted
// read returns rsp_valid with rsp_rdata exactly two cycles after the grant
// cycle. Writes have no response.
// Timing: cycle t grant (crossbar), edge t->t+1 crossbar register, edge
// t+1->t+2 bank access, rsp visible during cycle t+2.
module nic_scratchpad
  import cargo_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 262144,
  parameter int unsigned BANKS      = 4,
  parameter int unsigned NPORTS     = 6,
  localparam int unsigned WORDS  = SIZE_BYTES / 8,
  localparam int unsigned BWORDS = WORDS / BANKS,
  localparam int unsigned AW     = $clog2(SIZE_BYTES),
  localparam int unsigned BB     = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned BAW    = $clog2(BWORDS),
  localparam int unsigned PB     = (NPORTS > 1) ? $clog2(NPORTS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NPORTS-1:0] req_valid,
  output logic [NPORTS-1:0] req_ready,
  input  logic [NPORTS-1:0] req_we,
  input  logic [AW-1:0]     req_addr  [NPORTS],
  input  word_t             req_wdata [NPORTS],
  output logic [NPORTS-1:0] rsp_valid,
  output word_t             rsp_rdata [NPORTS]
);

  function automatic logic [BB-1:0] bank_of(logic [AW-1:0] a);
    return a[3 +: BB];
  endfunction

  // ---------------- crossbar arbitration ----------------
  logic [PB-1:0] rr_q   [BANKS];
  logic [BANKS-1:0] g_v;
  logic [PB-1:0]    g_p [BANKS];

  always_comb begin
    req_ready = '0;
    for (int b = 0; b < int'(BANKS); b++) begin
      g_v[b] = 1'b0;
      g_p[b] = '0;
      for (int k = 0; k < int'(NPORTS); k++) begin
        int p;
        p = (int'(rr_q[b]) + k) % int'(NPORTS);
        if (!g_v[b] && req_valid[p] && bank_of(req_addr[p]) == BB'(b)) begin
          g_v[b] = 1'b1;
          g_p[b] = PB'(p);
        end
      end
      if (g_v[b]) req_ready[g_p[b]] = 1'b1;
    end
  end

  // crossbar stage registers
  logic [BANKS-1:0] x_v, x_we;
  logic [PB-1:0]    x_p    [BANKS];
  logic [BAW-1:0]   x_a    [BANKS];
  word_t            x_d    [BANKS];
  // bank stage outputs
  logic [BANKS-1:0] b_v;
  logic [PB-1:0]    b_p    [BANKS];
  word_t            b_d    [BANKS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_v  <= '0;
      x_we <= '0;
      for (int b = 0; b < int'(BANKS); b++) begin
        rr_q[b] <= '0;
        x_p[b]  <= '0;
        x_a[b]  <= '0;
        x_d[b]  <= '0;
      end
    end else begin
      for (int b = 0; b < int'(BANKS); b++) begin
        x_v[b] <= g_v[b];
        if (g_v[b]) begin
          x_we[b] <= req_we[g_p[b]];
          x_p[b]  <= g_p[b];
          x_a[b]  <= req_addr[g_p[b]][3 + BB +: BAW];
          x_d[b]  <= req_wdata[g_p[b]];
          rr_q[b] <= (g_p[b] == PB'(NPORTS - 1)) ? '0 : g_p[b] + 1'b1;
        end
      end
    end
  end

  // ---------------- banks ----------------
  for (genvar gb = 0; gb < int'(BANKS); gb++) begin : g_bank
    word_t mem [BWORDS];
    always_ff @(posedge clk) begin
      if (x_v[gb] && x_we[gb]) mem[x_a[gb]] <= x_d[gb];
      b_d[gb] <= mem[x_a[gb]];
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        b_v[gb] <= 1'b0;
        b_p[gb] <= '0;
      end else begin
        b_v[gb] <= x_v[gb] && !x_we[gb];
        b_p[gb] <= x_p[gb];
      end
    end
  end

  // ---------------- response steering ----------------
  always_comb begin
    for (int p = 0; p < int'(NPORTS); p++) begin
      rsp_valid[p] = 1'b0;
      rsp_rdata[p] = '0;
      for (int b = 0; b < int'(BANKS); b++) begin
        if (b_v[b] && b_p[b] == PB'(p)) begin
          rsp_valid[p] = 1'b1;
          rsp_rdata[p] = b_d[b];
        end
      end
    end
  end

endmodule
