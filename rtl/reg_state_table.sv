// reg_state_table: register state for executing the critical region
// (Table III of the working example) together with the table of arguments
// received from the NIC.
//
// A register becomes tracked (RS_TRACK) when the identification logic finds
// that a region instruction needs it as a chain root. NIC user routines
// (for example the hash of a request key) report their results as
// (argument number, value) pairs; the latest NARGS pairs are kept. Every IN
// value observed for a tracked register is compared with the kept arguments:
// on a match the register becomes READY-DYN and records the argument number,
// meaning the NIC recomputes it per packet. Otherwise, once the value
// predictor has a valid prediction for the register, it becomes READY and
// carries the predicted value, which follows the predictor while the epoch
// lasts. READY-DYN is sticky until flush (this design's choice). flush clears
// the table at the start of an epoch; the argument list is kept.
//
// Timing: all updates at the clock edge; ctx is the registered table.
module reg_state_table
  import cargo_pkg::*;
#(
  parameter int unsigned NARGS = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    flush,
  input  logic    track_valid,
  input  reg_id_t track_reg,
  input  logic    arg_valid,
  input  logic [3:0] arg_id,
  input  word_t   arg_val,
  input  logic    obs_in_valid,
  input  reg_id_t obs_reg,
  input  word_t   obs_val,
  input  logic [NREGS-1:0] pred_valid,
  input  word_t   pred_val [NREGS],
  output reg_ctx_t ctx [NREGS],
  output logic    ev_dyn_match
);

  reg_ctx_t   st_q [NREGS];
  logic [3:0] aid_q [NARGS];
  word_t      aval_q [NARGS];
  logic [NARGS-1:0] av_q;
  logic [$clog2(NARGS)-1:0] awp_q;

  logic       amatch;
  logic [3:0] amatch_id;
  always_comb begin
    amatch = 1'b0; amatch_id = '0;
    for (int i = 0; i < int'(NARGS); i++)
      if (av_q[i] && aval_q[i] == obs_val) begin amatch = 1'b1; amatch_id = aid_q[i]; end
  end

  assign ev_dyn_match = obs_in_valid && st_q[obs_reg].state != RS_NONE && amatch;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < int'(NREGS); r++) st_q[r] <= '0;
      for (int i = 0; i < int'(NARGS); i++) begin aid_q[i] <= '0; aval_q[i] <= '0; end
      av_q  <= '0;
      awp_q <= '0;
    end else begin
      if (arg_valid) begin
        aid_q[awp_q]  <= arg_id;
        aval_q[awp_q] <= arg_val;
        av_q[awp_q]   <= 1'b1;
        awp_q         <= awp_q + 1'b1;
      end
      if (flush) begin
        for (int r = 0; r < int'(NREGS); r++) st_q[r] <= '0;
      end else begin
        for (int r = 0; r < int'(NREGS); r++) begin
          if (st_q[r].state == RS_TRACK || st_q[r].state == RS_READY) begin
            if (pred_valid[r]) st_q[r] <= '{state: RS_READY, arg_id: '0, value: pred_val[r]};
            else               st_q[r].state <= RS_TRACK;
          end
        end
        if (track_valid && st_q[track_reg].state == RS_NONE)
          st_q[track_reg].state <= RS_TRACK;
        if (ev_dyn_match)
          st_q[obs_reg] <= '{state: RS_READY_DYN, arg_id: amatch_id, value: '0};
      end
    end
  end

  assign ctx = st_q;

endmodule
