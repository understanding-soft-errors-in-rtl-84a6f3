// qrr_top_tb: end-to-end test of the chip-level QRR (qrr_top) with all parameters at their
// defaults: eight banks, each with its own behavioural L2C/MCU model and its own traffic,
// data checks and soft-error injection (bank_driver), 10,000 requests per bank. MCU
// parity errors of the two models of banks 2m and 2m+1 are combined into MCU m's error
// input, so an MCU error must make both banks recover together and reset the MCU.
// A failure is counted for every mechanism that never happened in any bank: recovery,
// restart during replay, replayed packet, duplicate return dropped, store-miss completion,
// blocking on a full table, blocking during recovery, MCU-side error, and the joint
// recovery of a bank pair with MCU reset.
module qrr_top_tb;
  import qrr_pkg::*;

  localparam int unsigned NB = 8;
  localparam int unsigned NM = 4;

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  logic [NB-1:0] core_req_valid, core_req_ready, core_rtn_valid;
  req_pkt_t      core_req_pkt [NB];
  rtn_pkt_t      core_rtn_pkt [NB];
  logic [NB-1:0] l2c_req_valid, l2c_req_ready, l2c_rtn_valid, l2c_rtn_post, l2c_miss_done;
  req_pkt_t      l2c_req_pkt [NB];
  rtn_pkt_t      l2c_rtn_pkt [NB];
  logic [RID_W-1:0] l2c_miss_rid [NB];
  logic [63:0]   l2c_parity_err [NB];
  logic [15:0]   mcu_parity_err [NM];
  logic [1:0]    mcu_err [NB];
  logic [NB-1:0] l2c_rst, l2c_write_disable;
  logic [NM-1:0] mcu_rst, mcu_write_disable;
  rc_state_e     qrr_state [NB];
  logic [5:0]    table_count [NB];
  logic [NB-1:0] ev_recovery, ev_restart, ev_replay_pkt, ev_dup_drop, ev_miss_delete,
                 ev_blk_full, ev_blk_recovery;

  qrr_top dut (.*);

  for (genvar m = 0; m < NM; m++) begin : g_mcu
    assign mcu_parity_err[m] = {14'd0, mcu_err[2*m] | mcu_err[2*m + 1]};
  end

  logic [NB-1:0] finished;
  int checks [NB], failures [NB], n_recovery [NB], n_restart [NB], n_replay [NB],
      n_dup [NB], n_missdel [NB], n_blkfull [NB], n_blkrec [NB], n_mcu_err [NB],
      n_seu [NB], issued [NB], answered [NB], max_rec_len [NB];

  for (genvar b = 0; b < NB; b++) begin : g_drv
    bank_driver #(.NREQ(10000)) drv (
      .clk, .rst,
      .core_req_valid (core_req_valid[b]), .core_req_pkt (core_req_pkt[b]),
      .core_req_ready (core_req_ready[b]), .core_rtn_valid (core_rtn_valid[b]),
      .core_rtn_pkt (core_rtn_pkt[b]),
      .l2c_req_valid (l2c_req_valid[b]), .l2c_req_pkt (l2c_req_pkt[b]),
      .l2c_req_ready (l2c_req_ready[b]), .l2c_rtn_valid (l2c_rtn_valid[b]),
      .l2c_rtn_pkt (l2c_rtn_pkt[b]), .l2c_rtn_post (l2c_rtn_post[b]),
      .l2c_miss_done (l2c_miss_done[b]), .l2c_miss_rid (l2c_miss_rid[b]),
      .l2c_parity_err (l2c_parity_err[b]), .mcu_err (mcu_err[b]),
      .uncore_rst (l2c_rst[b] || mcu_rst[b / 2]),
      .write_disable (l2c_write_disable[b] || mcu_write_disable[b / 2]),
      .qrr_state (qrr_state[b]), .table_count (table_count[b]),
      .ev_recovery (ev_recovery[b]), .ev_restart (ev_restart[b]),
      .ev_replay_pkt (ev_replay_pkt[b]), .ev_dup_drop (ev_dup_drop[b]),
      .ev_miss_delete (ev_miss_delete[b]), .ev_blk_full (ev_blk_full[b]),
      .ev_blk_recovery (ev_blk_recovery[b]),
      .finished (finished[b]), .checks (checks[b]), .failures (failures[b]),
      .n_recovery (n_recovery[b]), .n_restart (n_restart[b]), .n_replay (n_replay[b]),
      .n_dup (n_dup[b]), .n_missdel (n_missdel[b]), .n_blkfull (n_blkfull[b]),
      .n_blkrec (n_blkrec[b]), .n_mcu_err (n_mcu_err[b]), .n_seu (n_seu[b]),
      .issued (issued[b]), .answered (answered[b]), .max_rec_len (max_rec_len[b])
    );
  end

  int n_pair = 0, n_mcu_rst = 0;
  always_ff @(posedge clk) begin
    if (!rst) begin
      for (int m = 0; m < int'(NM); m++) begin
        if (ev_recovery[2*m] && ev_recovery[2*m + 1]) n_pair <= n_pair + 1;
      end
      if (|mcu_rst) n_mcu_rst <= n_mcu_rst + 1;
    end
  end

  int tc = 0, tf = 0;
  task automatic check(input logic ok, input string what);
    tc++;
    if (!ok) begin
      tf++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int sum(input int v [NB]);
    int s = 0;
    foreach (v[i]) s += v[i];
    return s;
  endfunction

  initial begin
    repeat (5) @(posedge clk);
    rst <= 1'b0;
    wait (&finished);
    for (int b = 0; b < int'(NB); b++)
      $display("bank %0d: requests %0d upsets %0d recoveries %0d restarts %0d replayed %0d dup-dropped %0d longest recovery %0d",
               b, issued[b], n_seu[b], n_recovery[b], n_restart[b], n_replay[b], n_dup[b], max_rec_len[b]);
    $display("joint pair recoveries on MCU errors %0d, MCU reset cycles %0d", n_pair, n_mcu_rst);
    check(sum(n_recovery) > 0, "no recovery happened");
    check(sum(n_restart)  > 0, "no restart during replay happened");
    check(sum(n_replay)   > 0, "no packet was replayed");
    check(sum(n_dup)      > 0, "no duplicate return was dropped");
    check(sum(n_missdel)  > 0, "no store-miss completion deleted an entry");
    check(sum(n_blkfull)  > 0, "the table never filled");
    check(sum(n_blkrec)   > 0, "no request was blocked by a recovery");
    check(sum(n_mcu_err)  > 0, "no MCU-side error was detected");
    check(n_pair > 0,    "no joint recovery of a bank pair on an MCU error");
    check(n_mcu_rst > 0, "no MCU reset");
    $display("TB_RESULT checks=%0d failures=%0d", sum(checks) + tc, sum(failures) + tf);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", sum(checks) + tc, sum(failures) + tf + 1);
    $finish;
  end

endmodule
