// qrr_bank: Quick Replay Recovery (QRR) for one L2 cache bank (L2C) and its DRAM
// controller (MCU).
//
// QRR lets an uncore component whose flip-flops are covered by logic parity recover from a
// soft error without involving the processor cores. It records every request packet that
// enters L2C until the request has completed. When a parity error is detected it keeps
// the error from escaping (array writes and return valids disabled), resets L2C and MCU
// (their SRAM and DRAM contents survive), and resends the recorded packets in their
// arrival order. Because re-executing the incomplete requests in the same order gives the
// same result, the cores see no difference other than a pause.
//
// Blocks (Fig. "QRR for L2C and MCU" of the source paper):
//   request_monitor     records accepted packets, blocks the cores when full/recovering
//   record_table        DEPTH incomplete requests with their arrival order
//   completion_monitor  deletes on return, or on miss-buffer completion for store misses;
//                       drops returns while gated and duplicate returns after replay
//   replay_controller   disable -> reset -> replay in order -> resume
//   error_aggregator    ORs the N_L2C_ERR + N_MCU_ERR parity error signals
//   request mux         here: replay packets take L2C's request input during replay
// L2C, MCU and their parity checkers are outside this module: their request, return,
// store-miss completion, parity error, reset and write-disable signals are ports.
//
// Interface timing: core_req_* and l2c_req_* use valid/ready (a transfer happens in a
// cycle with both high). Return packets and miss completions are single-cycle valid
// pulses with no back-pressure. uncore_rst is a synchronous, active-high reset for L2C
// and MCU; write_disable must block every write to the L2 tag/data arrays and to DRAM.
// A parity error reaches the replay controller two cycles after it shows (error
// aggregator), and the uncore is held in reset RST_CYCLES cycles.
// The record table's 32 entries follow the paper; the packet handshake, the number of
// parity error lines and the reset length are this design's choices.
module qrr_bank
  import qrr_pkg::*;
#(
  parameter int unsigned DEPTH      = 32,
  parameter int unsigned N_L2C_ERR  = 64,
  parameter int unsigned N_MCU_ERR  = 16,
  parameter int unsigned ERR_GROUP  = 8,
  parameter int unsigned RST_CYCLES = 4,
  localparam int unsigned CW        = $clog2(DEPTH + 1)
) (
  input  logic                 clk,
  input  logic                 rst,
  // processor-core side (through the crossbar)
  input  logic                 core_req_valid,
  input  req_pkt_t             core_req_pkt,
  output logic                 core_req_ready,
  output logic                 core_rtn_valid,
  output rtn_pkt_t             core_rtn_pkt,
  // L2C side
  output logic                 l2c_req_valid,
  output req_pkt_t             l2c_req_pkt,
  input  logic                 l2c_req_ready,
  input  logic                 l2c_rtn_valid,
  input  rtn_pkt_t             l2c_rtn_pkt,
  input  logic                 l2c_rtn_post,
  input  logic                 l2c_miss_done,
  input  logic [RID_W-1:0]     l2c_miss_rid,
  input  logic [N_L2C_ERR-1:0] l2c_parity_err,
  input  logic [N_MCU_ERR-1:0] mcu_parity_err,
  output logic                 uncore_rst,
  output logic                 write_disable,
  // status
  output rc_state_e            qrr_state,
  output logic [CW-1:0]        table_count,
  output logic                 ev_recovery,
  output logic                 ev_restart,
  output logic                 ev_replay_pkt,
  output logic                 ev_dup_drop,
  output logic                 ev_miss_delete,
  output logic                 ev_blk_full,
  output logic                 ev_blk_recovery
);

  localparam int unsigned IW = $clog2(DEPTH);

  // record table views
  logic [DEPTH-1:0] ent_valid, ent_returned, ent_replayed, ent_store;
  logic [IW-1:0]    ent_order [DEPTH];
  ent_state_e       ent_state [DEPTH];
  logic [RID_W-1:0] ent_rid   [DEPTH];

  logic          table_full;
  logic          alloc_en;
  req_pkt_t      alloc_pkt;
  logic          rtn_en, rtn_post, miss_en;
  logic [IW-1:0] rtn_idx, miss_idx;
  logic          replay_start, replay_valid, replay_mark_en;
  logic [IW-1:0] replay_idx, replay_mark_idx;
  req_pkt_t      replay_pkt;

  logic          err_fast, err_agg, agg_flush;
  logic          recovering, rtn_gate, contain;
  logic          fwd_valid;
  req_pkt_t      fwd_pkt;
  logic          mux_sel;

  error_aggregator #(
    .N_ERR (N_L2C_ERR + N_MCU_ERR),
    .GROUP (ERR_GROUP)
  ) u_err (
    .clk      (clk),
    .rst      (rst),
    .flush    (agg_flush),
    .err_in   ({mcu_parity_err, l2c_parity_err}),
    .err_fast (err_fast),
    .err_agg  (err_agg)
  );

  request_monitor u_reqmon (
    .clk            (clk),
    .rst            (rst),
    .core_req_valid (core_req_valid),
    .core_req_pkt   (core_req_pkt),
    .core_req_ready (core_req_ready),
    .l2c_ready      (l2c_req_ready),
    .table_full     (table_full),
    .recovering     (recovering),
    .err_fast       (contain),
    .fwd_valid      (fwd_valid),
    .fwd_pkt        (fwd_pkt),
    .alloc_en       (alloc_en),
    .alloc_pkt      (alloc_pkt),
    .blk_full       (ev_blk_full),
    .blk_recovery   (ev_blk_recovery)
  );

  record_table #(.DEPTH(DEPTH)) u_table (
    .clk             (clk),
    .rst             (rst),
    .alloc_en        (alloc_en),
    .alloc_pkt       (alloc_pkt),
    .alloc_idx       (),
    .full            (table_full),
    .count           (table_count),
    .rtn_en          (rtn_en),
    .rtn_idx         (rtn_idx),
    .rtn_post        (rtn_post),
    .miss_en         (miss_en),
    .miss_idx        (miss_idx),
    .replay_start    (replay_start),
    .replay_mark_en  (replay_mark_en),
    .replay_mark_idx (replay_mark_idx),
    .rd_idx          (replay_idx),
    .rd_pkt          (replay_pkt),
    .ent_valid       (ent_valid),
    .ent_order       (ent_order),
    .ent_state       (ent_state),
    .ent_returned    (ent_returned),
    .ent_replayed    (ent_replayed),
    .ent_rid         (ent_rid),
    .ent_store       (ent_store)
  );

  completion_monitor #(.DEPTH(DEPTH)) u_cmpmon (
    .clk            (clk),
    .rst            (rst),
    .gate           (rtn_gate),
    .l2c_rtn_valid  (l2c_rtn_valid),
    .l2c_rtn_pkt    (l2c_rtn_pkt),
    .l2c_rtn_post   (l2c_rtn_post),
    .miss_valid     (l2c_miss_done),
    .miss_rid       (l2c_miss_rid),
    .core_rtn_valid (core_rtn_valid),
    .core_rtn_pkt   (core_rtn_pkt),
    .ent_valid      (ent_valid),
    .ent_order      (ent_order),
    .ent_state      (ent_state),
    .ent_returned   (ent_returned),
    .ent_rid        (ent_rid),
    .ent_store      (ent_store),
    .rtn_en         (rtn_en),
    .rtn_idx        (rtn_idx),
    .rtn_post       (rtn_post),
    .miss_en        (miss_en),
    .miss_idx       (miss_idx),
    .dup_drop       (ev_dup_drop),
    .miss_delete    (ev_miss_delete)
  );

  replay_controller #(
    .DEPTH      (DEPTH),
    .RST_CYCLES (RST_CYCLES)
  ) u_replay (
    .clk             (clk),
    .rst             (rst),
    .err_fast        (err_fast),
    .err_agg         (err_agg),
    .l2c_ready       (l2c_req_ready),
    .ent_valid       (ent_valid),
    .ent_order       (ent_order),
    .ent_replayed    (ent_replayed),
    .state           (qrr_state),
    .recovering      (recovering),
    .contain         (contain),
    .write_disable   (write_disable),
    .rtn_gate        (rtn_gate),
    .uncore_rst      (uncore_rst),
    .agg_flush       (agg_flush),
    .replay_start    (replay_start),
    .replay_valid    (replay_valid),
    .replay_idx      (replay_idx),
    .replay_mark_en  (replay_mark_en),
    .replay_mark_idx (replay_mark_idx),
    .recovery_begin  (ev_recovery),
    .replay_restart  (ev_restart)
  );

  // request mux in front of L2C: replayed packets during replay, core packets otherwise
  assign mux_sel       = (qrr_state == RC_REPLAY);
  assign l2c_req_valid = mux_sel ? replay_valid : fwd_valid;
  assign l2c_req_pkt   = mux_sel ? replay_pkt   : fwd_pkt;
  assign ev_replay_pkt = replay_mark_en;

  // Core packets and replayed packets never compete for L2C.
  a_mux_excl : assert property (@(posedge clk) disable iff (rst) !(fwd_valid && replay_valid));

endmodule
