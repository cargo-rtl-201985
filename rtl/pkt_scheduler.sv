// pkt_scheduler: packet scheduler in front of the NIC's critical-region
// execution.
//
// The paper draws a packet scheduler between the wire and the critical-region
// execution block and states that there is one receive ring per CPU core,
// but gives no internals. This is the simplest scheduler that does that job:
// a DEPTH-entry FIFO of arriving packets, each carrying the values the NIC
// user routines computed for it (for example the key hash), handed one at a
// time to the region executor. Each packet is assigned the CPU core whose
// receive ring it will go to, round-robin over NCORES cores; the core id is
// also the steering tag for the cache fills of that packet's offload.
//
// Interface: valid/ready on both sides; in_ready is low when the FIFO is
// full. Timing: a packet accepted in cycle t is visible at the output from
// cycle t+1; one packet per cycle in and out.
module pkt_scheduler
  import cargo_pkg::*;
#(
  parameter int unsigned DEPTH     = 16,
  parameter int unsigned NCORES    = 4,
  parameter int unsigned NPKT_ARGS = 2,
  localparam int unsigned CB = (NCORES > 1) ? $clog2(NCORES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  word_t         in_args [NPKT_ARGS],
  output logic          out_valid,
  input  logic          out_ready,
  output word_t         out_args [NPKT_ARGS],
  output logic [CB-1:0] out_core,
  output logic [$clog2(DEPTH+1)-1:0] occupancy
);

  localparam int unsigned AB = $clog2(DEPTH);

  word_t         args_q [DEPTH][NPKT_ARGS];
  logic [CB-1:0] core_q [DEPTH];
  logic [AB-1:0] wp_q, rp_q;
  logic [AB:0]   cnt_q;
  logic [CB-1:0] rr_q;
  logic          push, pop;

  assign in_ready  = (cnt_q != (AB+1)'(DEPTH));
  assign out_valid = (cnt_q != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_args  = args_q[rp_q];
  assign out_core  = core_q[rp_q];
  assign occupancy = cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
      rr_q  <= '0;
      for (int i = 0; i < int'(DEPTH); i++) begin
        core_q[i] <= '0;
        for (int a = 0; a < int'(NPKT_ARGS); a++) args_q[i][a] <= '0;
      end
    end else begin
      if (push) begin
        args_q[wp_q] <= in_args;
        core_q[wp_q] <= rr_q;
        wp_q         <= (wp_q == AB'(DEPTH - 1)) ? '0 : wp_q + 1'b1;
        rr_q         <= (rr_q == CB'(NCORES - 1)) ? '0 : rr_q + 1'b1;
      end
      if (pop) rp_q <= (rp_q == AB'(DEPTH - 1)) ? '0 : rp_q + 1'b1;
      cnt_q <= cnt_q + (AB+1)'(push) - (AB+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt_q <= (AB+1)'(DEPTH));

endmodule
