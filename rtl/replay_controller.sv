// replay_controller: runs a QRR recovery of one L2C bank and its MCU.
//
// States (rc_state_e):
//   RC_NORMAL  requests flow. When the aggregated parity error err_agg rises the
//              controller goes to RC_DISABLE.
//   RC_DISABLE one cycle in which array writes and return valids are disabled and new
//              requests are blocked; replay_start puts every recorded entry back to
//              'return expected' and clears its replayed mark.
//   RC_RESET   uncore_rst is held for RST_CYCLES cycles, clearing all L2C and MCU
//              flip-flops (the arrays keep their contents); the error aggregator is
//              flushed at the same time.
//   RC_REPLAY  the recorded packets are resent to L2C one per cycle, in arrival order, as
//              L2C accepts them (replay_valid/replay_idx, l2c_ready). The n-th packet to
//              resend is the valid, not yet replayed entry whose order equals the number of
//              valid entries already replayed. When none is left the controller returns to
//              RC_NORMAL and new requests are accepted again. An error during replay starts
//              the recovery over.
// contain (driving write_disable and rtn_gate) is also raised by err_fast, the unregistered
// OR of all parity errors, and stays up from the first cycle of an error until the uncore
// is reset, so a corrupted flip-flop cannot write an array or send a valid packet in the
// cycles the aggregated error takes to arrive. Holding it matters when the corrupted
// group is reloaded a cycle later: a write suppressed during the error must not be
// followed by a clean-looking acknowledgement of the same request.
// The sequence (disable, reset, replay in order, resume) is the paper's; the state
// encoding, the single disable cycle and RST_CYCLES are this design's choices.
// Outputs: state-decoded outputs are combinational from the state register; replay_valid
// and replay_idx are combinational from the record-table views.
module replay_controller
  import qrr_pkg::*;
#(
  parameter int unsigned DEPTH      = 32,
  parameter int unsigned RST_CYCLES = 4,
  localparam int unsigned IW        = $clog2(DEPTH),
  localparam int unsigned CW        = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             err_fast,
  input  logic             err_agg,
  input  logic             l2c_ready,
  // record table views
  input  logic [DEPTH-1:0] ent_valid,
  input  logic [IW-1:0]    ent_order [DEPTH],
  input  logic [DEPTH-1:0] ent_replayed,
  // control
  output rc_state_e        state,
  output logic             recovering,
  output logic             contain,
  output logic             write_disable,
  output logic             rtn_gate,
  output logic             uncore_rst,
  output logic             agg_flush,
  output logic             replay_start,
  output logic             replay_valid,
  output logic [IW-1:0]    replay_idx,
  output logic             replay_mark_en,
  output logic [IW-1:0]    replay_mark_idx,
  // events
  output logic             recovery_begin,
  output logic             replay_restart
);

  localparam int unsigned RCW = (RST_CYCLES > 1) ? $clog2(RST_CYCLES) : 1;

  rc_state_e      state_d;
  logic [RCW-1:0] rst_cnt;
  logic           err_seen;
  logic [CW-1:0]  n_replayed;
  logic           have_next;

  always_comb begin
    n_replayed = '0;
    for (int e = 0; e < DEPTH; e++) n_replayed = n_replayed + CW'(ent_valid[e] && ent_replayed[e]);
  end

  always_comb begin
    have_next  = 1'b0;
    replay_idx = '0;
    for (int e = 0; e < DEPTH; e++) begin
      if (ent_valid[e] && !ent_replayed[e] && (CW'(ent_order[e]) == n_replayed)) begin
        have_next  = 1'b1;
        replay_idx = IW'(e);
      end
    end
  end

  always_comb begin
    state_d = state;
    unique case (state)
      RC_NORMAL:  if (err_agg) state_d = RC_DISABLE;
      RC_DISABLE: state_d = RC_RESET;
      RC_RESET:   if (rst_cnt == RCW'(RST_CYCLES - 1)) state_d = RC_REPLAY;
      RC_REPLAY: begin
        if (err_agg)         state_d = RC_DISABLE;
        else if (!have_next) state_d = RC_NORMAL;
      end
      default:    state_d = RC_NORMAL;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= RC_NORMAL;
      rst_cnt  <= '0;
      err_seen <= 1'b0;
    end else begin
      state    <= state_d;
      rst_cnt  <= (state == RC_RESET) ? rst_cnt + 1'b1 : '0;
      // an error, once seen, is contained until the uncore has been reset
      if (state_d == RC_RESET) err_seen <= 1'b0;
      else if (err_fast)       err_seen <= 1'b1;
    end
  end

  assign recovering      = (state != RC_NORMAL);
  assign contain         = err_fast || err_seen || (state == RC_DISABLE) || (state == RC_RESET);
  assign write_disable   = contain;
  assign rtn_gate        = contain;
  assign uncore_rst      = (state == RC_RESET);
  assign agg_flush       = (state == RC_RESET);
  assign replay_start    = (state == RC_DISABLE);
  assign replay_valid    = (state == RC_REPLAY) && have_next && !contain && !err_agg;
  assign replay_mark_en  = replay_valid && l2c_ready;
  assign replay_mark_idx = replay_idx;
  assign recovery_begin  = (state == RC_NORMAL) && err_agg;
  assign replay_restart  = (state == RC_REPLAY) && err_agg;

  // The uncore is held in reset for exactly RST_CYCLES cycles per recovery.
  a_reset_len : assert property (@(posedge clk) disable iff (rst)
    $rose(uncore_rst) |-> uncore_rst [*RST_CYCLES] ##1 !uncore_rst);

endmodule
