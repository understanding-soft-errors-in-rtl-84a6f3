// qrr_top: QRR for all L2 cache banks of the chip.
//
// The chip has NBANKS L2 cache banks (L2C) and NBANKS/2 DRAM controllers (MCU); MCU m
// serves banks 2m and 2m+1, and each bank has its own QRR (qrr_bank) in front of it.
// Because an MCU only receives requests through its two banks, replaying the two banks'
// requests also replays the MCU's work: a parity error in MCU m is therefore sent to the
// QRR of both banks, which both recover. The MCU may only be reset while both of its
// banks are being reset (otherwise the other bank's requests in the MCU would be lost
// without a replay), so mcu_rst is the AND of the two banks' resets; after an MCU error
// both banks enter reset in the same cycle. DRAM writes are held while the MCU shows a
// parity error or while both banks are containing an error; a bank that contains an
// L2C error on its own blocks the writes it sends towards the MCU through its own
// l2c_write_disable. Each bank's L2C-side signals (request, return, store-miss
// completion, parity errors, reset, write disable) are ports, one array element per bank.
// Bank and MCU counts and the MCU-to-bank pairing follow the OpenSPARC T2 organisation
// the paper studies; all per-bank behaviour is in qrr_bank.
// Timing is that of qrr_bank; the MCU error reaches both banks in the same cycle.
module qrr_top
  import qrr_pkg::*;
#(
  parameter int unsigned NBANKS     = 8,
  parameter int unsigned DEPTH      = 32,
  parameter int unsigned N_L2C_ERR  = 64,
  parameter int unsigned N_MCU_ERR  = 16,
  parameter int unsigned ERR_GROUP  = 8,
  parameter int unsigned RST_CYCLES = 4,
  localparam int unsigned NMCU      = NBANKS / 2,
  localparam int unsigned CW        = $clog2(DEPTH + 1)
) (
  input  logic                 clk,
  input  logic                 rst,
  // processor-core side, one element per bank
  input  logic [NBANKS-1:0]    core_req_valid,
  input  req_pkt_t             core_req_pkt   [NBANKS],
  output logic [NBANKS-1:0]    core_req_ready,
  output logic [NBANKS-1:0]    core_rtn_valid,
  output rtn_pkt_t             core_rtn_pkt   [NBANKS],
  // L2C side, one element per bank
  output logic [NBANKS-1:0]    l2c_req_valid,
  output req_pkt_t             l2c_req_pkt    [NBANKS],
  input  logic [NBANKS-1:0]    l2c_req_ready,
  input  logic [NBANKS-1:0]    l2c_rtn_valid,
  input  rtn_pkt_t             l2c_rtn_pkt    [NBANKS],
  input  logic [NBANKS-1:0]    l2c_rtn_post,
  input  logic [NBANKS-1:0]    l2c_miss_done,
  input  logic [RID_W-1:0]     l2c_miss_rid   [NBANKS],
  input  logic [N_L2C_ERR-1:0] l2c_parity_err [NBANKS],
  output logic [NBANKS-1:0]    l2c_rst,
  output logic [NBANKS-1:0]    l2c_write_disable,
  // MCU side, one element per MCU
  input  logic [N_MCU_ERR-1:0] mcu_parity_err [NMCU],
  output logic [NMCU-1:0]      mcu_rst,
  output logic [NMCU-1:0]      mcu_write_disable,
  // status, one element per bank
  output rc_state_e            qrr_state      [NBANKS],
  output logic [CW-1:0]        table_count    [NBANKS],
  output logic [NBANKS-1:0]    ev_recovery,
  output logic [NBANKS-1:0]    ev_restart,
  output logic [NBANKS-1:0]    ev_replay_pkt,
  output logic [NBANKS-1:0]    ev_dup_drop,
  output logic [NBANKS-1:0]    ev_miss_delete,
  output logic [NBANKS-1:0]    ev_blk_full,
  output logic [NBANKS-1:0]    ev_blk_recovery
);

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    qrr_bank #(
      .DEPTH      (DEPTH),
      .N_L2C_ERR  (N_L2C_ERR),
      .N_MCU_ERR  (N_MCU_ERR),
      .ERR_GROUP  (ERR_GROUP),
      .RST_CYCLES (RST_CYCLES)
    ) u_bank (
      .clk             (clk),
      .rst             (rst),
      .core_req_valid  (core_req_valid[b]),
      .core_req_pkt    (core_req_pkt[b]),
      .core_req_ready  (core_req_ready[b]),
      .core_rtn_valid  (core_rtn_valid[b]),
      .core_rtn_pkt    (core_rtn_pkt[b]),
      .l2c_req_valid   (l2c_req_valid[b]),
      .l2c_req_pkt     (l2c_req_pkt[b]),
      .l2c_req_ready   (l2c_req_ready[b]),
      .l2c_rtn_valid   (l2c_rtn_valid[b]),
      .l2c_rtn_pkt     (l2c_rtn_pkt[b]),
      .l2c_rtn_post    (l2c_rtn_post[b]),
      .l2c_miss_done   (l2c_miss_done[b]),
      .l2c_miss_rid    (l2c_miss_rid[b]),
      .l2c_parity_err  (l2c_parity_err[b]),
      .mcu_parity_err  (mcu_parity_err[b / 2]),
      .uncore_rst      (l2c_rst[b]),
      .write_disable   (l2c_write_disable[b]),
      .qrr_state       (qrr_state[b]),
      .table_count     (table_count[b]),
      .ev_recovery     (ev_recovery[b]),
      .ev_restart      (ev_restart[b]),
      .ev_replay_pkt   (ev_replay_pkt[b]),
      .ev_dup_drop     (ev_dup_drop[b]),
      .ev_miss_delete  (ev_miss_delete[b]),
      .ev_blk_full     (ev_blk_full[b]),
      .ev_blk_recovery (ev_blk_recovery[b])
    );
  end

  for (genvar m = 0; m < NMCU; m++) begin : g_mcu
    assign mcu_rst[m]           = l2c_rst[2*m] && l2c_rst[2*m + 1];
    assign mcu_write_disable[m] = (|mcu_parity_err[m])
                               || (l2c_write_disable[2*m] && l2c_write_disable[2*m + 1]);
  end

endmodule
