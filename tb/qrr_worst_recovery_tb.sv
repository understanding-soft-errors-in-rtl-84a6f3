// qrr_worst_recovery_tb: the longest L2C recovery, with every replayed packet a load miss.
//
// One qrr_bank at its default sizes (32-entry record table) in front of the behavioural
// L2C/MCU model. The model's input queue is made 32 deep so that all 32 table entries can
// be in L2C at once, and its DRAM latency MISS_LAT is set to 140 cycles (a typical DRAM
// access time for a chip of this class; the model serves one load miss at a time, so no
// misses overlap). 32 threads each send one load to a different line that is not in the
// cache. As soon as the table holds all 32, one flip-flop of the request being served
// is upset. The recovery must then replay all 32 loads, and each must return once, with
// the right data, after the replay.
//
// Checks: the controller enters REPLAY exactly 1 + 2 + 1 + RST_CYCLES cycles after the
// upset (parity shows in the cycle after the flip, two cycles of aggregation, one disable
// cycle, the reset); the replay issues the 32 packets in 32 consecutive cycles, in the
// order the loads were first sent; every load returns exactly once with the expected word;
// and the whole recovery, from the upset until the last replayed request has completed,
// takes fewer than 5,000 cycles, the worst-case bound reported for the original design.
module qrr_worst_recovery_tb;
  import qrr_pkg::*;

  localparam int unsigned N        = 32;
  localparam int unsigned IQ       = 32;
  localparam int unsigned MB       = 16;   // model default miss-buffer depth
  localparam int unsigned MISS_LAT = 140;
  localparam int unsigned BOUND    = 5000;
  localparam int unsigned RST_CYCLES = 4;   // qrr_bank default

  logic clk = 1'b0;
  logic rst = 1'b1;
  always #5 clk = ~clk;

  logic         core_req_valid, core_req_ready, core_rtn_valid;
  req_pkt_t     core_req_pkt;
  rtn_pkt_t     core_rtn_pkt;
  logic         l2c_req_valid, l2c_req_ready, l2c_rtn_valid, l2c_rtn_post, l2c_miss_done;
  req_pkt_t     l2c_req_pkt;
  rtn_pkt_t     l2c_rtn_pkt;
  logic [RID_W-1:0] l2c_miss_rid;
  logic [IQ+MB+4:0] m_l2c_err;
  logic [63:0]  l2c_parity_err;
  logic [1:0]   mcu_err;
  logic [15:0]  mcu_parity_err;
  logic         uncore_rst, write_disable;
  rc_state_e    qrr_state;
  logic [5:0]   table_count;
  logic         ev_recovery, ev_restart, ev_replay_pkt, ev_dup_drop, ev_miss_delete,
                ev_blk_full, ev_blk_recovery;
  logic         seu_en;
  int unsigned  seu_grp, seu_bit;

  qrr_bank dut (
    .clk, .rst,
    .core_req_valid, .core_req_pkt, .core_req_ready, .core_rtn_valid, .core_rtn_pkt,
    .l2c_req_valid, .l2c_req_pkt, .l2c_req_ready, .l2c_rtn_valid, .l2c_rtn_pkt,
    .l2c_rtn_post, .l2c_miss_done, .l2c_miss_rid, .l2c_parity_err, .mcu_parity_err,
    .uncore_rst, .write_disable, .qrr_state, .table_count,
    .ev_recovery, .ev_restart, .ev_replay_pkt, .ev_dup_drop, .ev_miss_delete,
    .ev_blk_full, .ev_blk_recovery
  );

  l2c_mcu_model #(.IQ_DEPTH(IQ), .MB_DEPTH(MB), .MISS_LAT(MISS_LAT)) model (
    .clk, .rst, .uncore_rst, .write_disable,
    .req_valid (l2c_req_valid), .req_pkt (l2c_req_pkt), .req_ready (l2c_req_ready),
    .rtn_valid (l2c_rtn_valid), .rtn_pkt (l2c_rtn_pkt), .rtn_post (l2c_rtn_post),
    .miss_done (l2c_miss_done), .miss_rid (l2c_miss_rid),
    .l2c_err (m_l2c_err), .mcu_err (mcu_err),
    .seu_en, .seu_grp, .seu_bit
  );

  assign l2c_parity_err = 64'(m_l2c_err);
  assign mcu_parity_err = {14'd0, mcu_err};

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic logic [63:0] word_init(int unsigned w);
    return 64'(w) * 64'h9E37_79B9;
  endfunction

  // thread i loads word 4*(i+1), so each load is on its own line
  function automatic req_pkt_t load_of(int unsigned i);
    req_pkt_t p;
    p = '0;
    p.rqtype    = RQ_LOAD;
    p.cpu_id    = 3'(i / 8);
    p.thread_id = 3'(i % 8);
    p.addr      = 40'(4 * (i + 1) * 8);
    return p;
  endfunction

  // returns seen by the cores, and the order of the replayed packets
  int  n_rtn [N];
  int  rtn_total = 0, rtn_after_replay = 0;
  int  replay_seq [$];
  int  t_upset = -1, t_replay = -1, t_replay_end = -1, t_last_rtn = -1;
  logic upset_done = 1'b0;

  always @(posedge clk) begin
    if (!rst && core_rtn_valid) begin
      automatic int t = int'({core_rtn_pkt.cpu_id, core_rtn_pkt.thread_id});
      check(core_rtn_pkt.rtntype == RT_LOAD_RET, "return of a load has the wrong type");
      check(t < int'(N), "return for a thread that sent nothing");
      if (t < int'(N)) begin
        n_rtn[t]++;
        check(core_rtn_pkt.data[63:0] == word_init(4 * (t + 1)), $sformatf("thread %0d got wrong data", t));
      end
      rtn_total++;
      if (t_replay >= 0) rtn_after_replay++;
      t_last_rtn = cycle;
    end
    if (!rst && ev_replay_pkt) replay_seq.push_back(int'({l2c_req_pkt.cpu_id, l2c_req_pkt.thread_id}));
    if (!rst && qrr_state == RC_REPLAY && t_replay < 0) t_replay = cycle;
    if (!rst && t_replay >= 0 && t_replay_end < 0 && qrr_state == RC_NORMAL) t_replay_end = cycle;
  end

  // upset one bit of the request being served once all 32 loads are recorded
  always @(posedge clk) begin
    seu_en <= 1'b0;
    if (!rst && !upset_done && table_count == 6'(N)) begin
      seu_en     <= 1'b1;
      seu_grp    <= IQ + 1;     // the model's current-request register group
      seu_bit    <= 7;
      upset_done <= 1'b1;
      t_upset    <= cycle + 1;  // the flip lands at the next edge
    end
  end

  initial begin
    seu_en = 1'b0; seu_grp = 0; seu_bit = 0;
    core_req_valid = 1'b0; core_req_pkt = '0;
    foreach (n_rtn[i]) n_rtn[i] = 0;
    repeat (5) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    for (int i = 0; i < int'(N); i++) begin
      core_req_valid <= 1'b1;
      core_req_pkt   <= load_of(i);
      do @(posedge clk); while (!core_req_ready);
    end
    core_req_valid <= 1'b0;
    wait (upset_done && t_replay_end >= 0 && table_count == 0);
    repeat (10) @(posedge clk);

    $display("upset at %0d, replay from %0d to %0d, last return at %0d: recovery %0d cycles (bound %0d)",
             t_upset, t_replay, t_replay_end, t_last_rtn, t_last_rtn - t_upset, BOUND);
    check(t_upset >= 0, "no upset was injected");
    check(rtn_total == rtn_after_replay, "a load returned before the recovery");
    // states are sampled at the edge that follows the cycle they are entered in
    check(t_replay - t_upset == 1 + 2 + 1 + RST_CYCLES + 1, "replay did not start at the expected cycle");
    // N issue cycles plus the cycle that finds no packet left and returns to normal
    check(t_replay_end - t_replay == int'(N) + 1, "replay did not take one cycle per recorded packet");
    check(replay_seq.size() == int'(N), "not every recorded packet was replayed once");
    foreach (replay_seq[k]) check(replay_seq[k] == k, "packets were not replayed in arrival order");
    foreach (n_rtn[i]) check(n_rtn[i] == 1, $sformatf("thread %0d got %0d returns", i, n_rtn[i]));
    check(t_last_rtn - t_upset < int'(BOUND), "worst-case recovery took 5,000 cycles or more");
    check(qrr_state == RC_NORMAL, "controller not back in normal operation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
