// qrr_bank_tb: one QRR bank, all parameters at their defaults, against the behavioural
// L2C/MCU model, with 20,000 requests from 64 threads and random soft errors
// (bank_driver does the traffic and the data checks). On top of the driver's checks it
// counts a failure for each QRR mechanism that never happened: recovery, restart during
// replay, replayed packet, duplicate return dropped, store-miss completion, blocking on a
// full table, blocking during recovery, MCU-side error.
module qrr_bank_tb;
  import qrr_pkg::*;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  logic     core_req_valid, core_req_ready, core_rtn_valid;
  req_pkt_t core_req_pkt;
  rtn_pkt_t core_rtn_pkt;
  logic     l2c_req_valid, l2c_req_ready, l2c_rtn_valid, l2c_rtn_post, l2c_miss_done;
  req_pkt_t l2c_req_pkt;
  rtn_pkt_t l2c_rtn_pkt;
  logic [RID_W-1:0] l2c_miss_rid;
  logic [63:0] l2c_parity_err;
  logic [1:0]  mcu_err;
  logic        uncore_rst, write_disable;
  rc_state_e   qrr_state;
  logic [5:0]  table_count;
  logic ev_recovery, ev_restart, ev_replay_pkt, ev_dup_drop, ev_miss_delete, ev_blk_full,
        ev_blk_recovery;
  logic finished;
  int checks, failures, n_recovery, n_restart, n_replay, n_dup, n_missdel, n_blkfull,
      n_blkrec, n_mcu_err, n_seu, issued, answered, max_rec_len;
  int extra_checks = 0, extra_failures = 0;

  qrr_bank dut (
    .clk, .rst,
    .core_req_valid, .core_req_pkt, .core_req_ready, .core_rtn_valid, .core_rtn_pkt,
    .l2c_req_valid, .l2c_req_pkt, .l2c_req_ready, .l2c_rtn_valid, .l2c_rtn_pkt,
    .l2c_rtn_post, .l2c_miss_done, .l2c_miss_rid, .l2c_parity_err,
    .mcu_parity_err ({14'd0, mcu_err}),
    .uncore_rst, .write_disable, .qrr_state, .table_count,
    .ev_recovery, .ev_restart, .ev_replay_pkt, .ev_dup_drop, .ev_miss_delete,
    .ev_blk_full, .ev_blk_recovery
  );

  bank_driver #(.NREQ(20000)) drv (.*);

  task automatic check(input logic ok, input string what);
    extra_checks++;
    if (!ok) begin
      extra_failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst <= 1'b0;
    wait (finished);
    $display("requests %0d answered %0d upsets %0d recoveries %0d restarts %0d replayed %0d",
             issued, answered, n_seu, n_recovery, n_restart, n_replay);
    $display("dup-dropped %0d miss-deletes %0d blocked-full %0d blocked-recovery %0d mcu-errors %0d longest recovery %0d cycles",
             n_dup, n_missdel, n_blkfull, n_blkrec, n_mcu_err, max_rec_len);
    check(n_recovery > 0, "no recovery happened");
    check(n_restart  > 0, "no restart during replay happened");
    check(n_replay   > 0, "no packet was replayed");
    check(n_dup      > 0, "no duplicate return was dropped");
    check(n_missdel  > 0, "no store-miss completion deleted an entry");
    check(n_blkfull  > 0, "the table never filled");
    check(n_blkrec   > 0, "no request was blocked by a recovery");
    check(n_mcu_err  > 0, "no MCU-side error was detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks + extra_checks, failures + extra_failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog, issued %0d answered %0d", issued, answered);
    $display("TB_RESULT checks=%0d failures=%0d", checks + extra_checks, failures + extra_failures + 1);
    $finish;
  end

endmodule
