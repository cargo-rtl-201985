// region_builder: the epoch controller of the identification hardware.
//
// The paper ends an epoch after 4K L2 misses (EPOCH_MISSES = 4096). This
// block counts L2 misses reported by the commit stream; when the count is
// reached it walks every entry of the context instruction cache, one entry
// per cycle, and sends each valid READY instruction to the NIC as a region
// instruction (rgn_valid / rgn_inst, held while rgn_ready is low). After the
// last entry it raises rgn_last (held until rgn_ready) together with the register
// context (rgn_ctx, the register state table at that moment), then pulses
// flush for one cycle so the cache, map, predictor and state table start the
// next epoch empty, as the paper's example begins an epoch with no valid
// entry. Sending the region over a stream with a ready signal stands in for
// the PCIe write the paper implies; the framing (instructions, then one
// context beat) is this design's choice.
//
// Timing: an epoch of E misses followed by a sweep of ENTRIES cycles (plus
// stalls), one cycle for the context beat and one for the flush.
module region_builder
  import cargo_pkg::*;
#(
  parameter int unsigned EPOCH_MISSES = 4096,
  parameter int unsigned ENTRIES      = 256,
  parameter int unsigned WAYS         = 16,
  localparam int unsigned SETS = ENTRIES / WAYS,
  localparam int unsigned SETB = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int unsigned WAYB = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            l2_miss,
  output logic [SETB-1:0] rd_set,
  output logic [WAYB-1:0] rd_way,
  input  ctx_entry_t      rd_entry,
  input  reg_ctx_t        ctx [NREGS],
  output logic            rgn_valid,
  output rgn_inst_t       rgn_inst,
  input  logic            rgn_ready,
  output logic            rgn_last,
  output reg_ctx_t        rgn_ctx [NREGS],
  output logic            flush,
  output logic            sweeping
);

  typedef enum logic [1:0] {S_COUNT, S_SWEEP, S_LAST, S_FLUSH} state_e;
  state_e st_q;
  logic [$clog2(EPOCH_MISSES+1)-1:0] cnt_q;
  logic [SETB+WAYB-1:0] idx_q;

  assign {rd_set, rd_way} = idx_q;
  assign rgn_valid = (st_q == S_SWEEP) && rd_entry.valid && rd_entry.ready;
  assign rgn_inst  = '{pc: rd_entry.pc, uop: rd_entry.uop};
  assign rgn_last  = (st_q == S_LAST);
  assign rgn_ctx   = ctx;
  assign flush     = (st_q == S_FLUSH);
  assign sweeping  = (st_q != S_COUNT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= S_COUNT;
      cnt_q <= '0;
      idx_q <= '0;
    end else begin
      if (l2_miss && st_q == S_COUNT) cnt_q <= cnt_q + 1'b1;
      case (st_q)
        S_COUNT: if (cnt_q == ($bits(cnt_q))'(EPOCH_MISSES)) begin
          st_q  <= S_SWEEP;
          idx_q <= '0;
          cnt_q <= '0;
        end
        S_SWEEP: if (!rgn_valid || rgn_ready) begin
          idx_q <= idx_q + 1'b1;
          if (idx_q == '1) st_q <= S_LAST;
        end
        S_LAST:  if (rgn_ready) st_q <= S_FLUSH;
        default: st_q <= S_COUNT;
      endcase
    end
  end

endmodule
