// bank_driver: traffic generator, checker and soft-error injector for one QRR bank,
// with the behavioural L2C/MCU model of that bank inside.
//
// NT = 64 hardware threads send NREQ loads and stores. Each thread owns 16 words on four
// lines of its own and has at most one request outstanding, so the value every load must
// return is known from the thread's own earlier stores (ref_mem). While traffic runs,
// single bit flips are injected into random flip-flop groups of the model at random times
// (every fourth one into an MCU group), and some while the bank is replaying. Checked:
// every request gets exactly one answer and none comes unasked; every load returns the
// value last stored; after the traffic the record table is empty, the bank is back in
// RC_NORMAL and the data array equals ref_mem; no recovery lasts 5,000 cycles or more.
// The event counts of the bank are returned for the mechanism checks of the caller.
// finished rises when all of this has been checked.
module bank_driver
  import qrr_pkg::*;
#(
  parameter int unsigned NREQ   = 20000,
  parameter int unsigned NWORDS = 1024
) (
  input  logic        clk,
  input  logic        rst,
  // QRR core side
  output logic        core_req_valid,
  output req_pkt_t    core_req_pkt,
  input  logic        core_req_ready,
  input  logic        core_rtn_valid,
  input  rtn_pkt_t    core_rtn_pkt,
  // QRR L2C side, served by the model
  input  logic        l2c_req_valid,
  input  req_pkt_t    l2c_req_pkt,
  output logic        l2c_req_ready,
  output logic        l2c_rtn_valid,
  output rtn_pkt_t    l2c_rtn_pkt,
  output logic        l2c_rtn_post,
  output logic        l2c_miss_done,
  output logic [RID_W-1:0] l2c_miss_rid,
  output logic [63:0] l2c_parity_err,
  output logic [1:0]  mcu_err,
  input  logic        uncore_rst,
  input  logic        write_disable,
  // QRR status
  input  rc_state_e   qrr_state,
  input  logic [5:0]  table_count,
  input  logic        ev_recovery, ev_restart, ev_replay_pkt, ev_dup_drop, ev_miss_delete,
                      ev_blk_full, ev_blk_recovery,
  // results
  output logic        finished,
  output int          checks,
  output int          failures,
  output int          n_recovery, n_restart, n_replay, n_dup, n_missdel, n_blkfull,
                      n_blkrec, n_mcu_err, n_seu, issued, answered, max_rec_len
);

  localparam int unsigned NT = 64;

  logic [36:0] m_l2c_err;
  logic        seu_en;
  int unsigned seu_grp, seu_bit;

  l2c_mcu_model #(.NWORDS(NWORDS)) model (
    .clk, .rst, .uncore_rst, .write_disable,
    .req_valid (l2c_req_valid), .req_pkt (l2c_req_pkt), .req_ready (l2c_req_ready),
    .rtn_valid (l2c_rtn_valid), .rtn_pkt (l2c_rtn_pkt), .rtn_post (l2c_rtn_post),
    .miss_done (l2c_miss_done), .miss_rid (l2c_miss_rid),
    .l2c_err (m_l2c_err), .mcu_err (mcu_err),
    .seu_en, .seu_grp, .seu_bit
  );

  assign l2c_parity_err = {27'd0, m_l2c_err};

  initial begin
    checks = 0; failures = 0; n_recovery = 0; n_restart = 0; n_replay = 0; n_dup = 0;
    n_missdel = 0; n_blkfull = 0; n_blkrec = 0; n_mcu_err = 0; n_seu = 0;
    issued = 0; answered = 0; max_rec_len = 0; finished = 1'b0;
  end
  int cycle = 0;

  logic [63:0] ref_mem [NWORDS];
  logic [NT-1:0] outstanding;
  logic          out_store [NT];
  logic [9:0]    out_word  [NT];

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // thread t owns lines t, t+64, t+128, t+192, four words each
  function automatic logic [9:0] word_of(int t, int k);
    return 10'(((k / 4) * NT + t) * 4 + (k % 4));
  endfunction

  // ---------------- request generator ----------------
  int cur_t;
  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst) begin
      core_req_valid <= 1'b0;
      outstanding    <= '0;
    end else begin
      logic [NT-1:0] outs;
      outs = outstanding;
      // answers
      if (core_rtn_valid) begin
        int t;
        t = int'({core_rtn_pkt.cpu_id, core_rtn_pkt.thread_id});
        check(outs[t], $sformatf("unasked answer to thread %0d", t));
        if (outs[t]) begin
          check(rtn_is_store_ack(core_rtn_pkt) == out_store[t],
                $sformatf("answer kind, thread %0d", t));
          if (!out_store[t])
            check(core_rtn_pkt.data[63:0] == ref_mem[out_word[t]],
                  $sformatf("load data thread %0d word %0d: %h vs %h", t, out_word[t],
                            core_rtn_pkt.data[63:0], ref_mem[out_word[t]]));
          outs[t] = 1'b0;
          answered <= answered + 1;
        end
      end
      // offer
      if (core_req_valid && core_req_ready) begin
        outs[cur_t] = 1'b1;
        core_req_valid <= 1'b0;
        issued <= issued + 1;
      end
      if ((!core_req_valid || core_req_ready) && issued + int'(core_req_valid && core_req_ready) < NREQ) begin
        int t, k;
        t = int'($urandom_range(NT - 1));
        if (!outs[t] && !(core_req_valid && !core_req_ready)) begin
          req_pkt_t p;
          k = int'($urandom_range(15));
          p = '0;
          p.cpu_id    = 3'(t / 8);
          p.thread_id = 3'(t % 8);
          p.addr      = 40'(word_of(t, k)) << 3;
          p.rqtype    = ($urandom_range(99) < 60) ? RQ_STORE : RQ_LOAD;
          p.data      = {$urandom, $urandom};
          out_store[t] <= (p.rqtype == RQ_STORE);
          out_word[t]  <= word_of(t, k);
          if (p.rqtype == RQ_STORE) ref_mem[word_of(t, k)] <= p.data;
          core_req_pkt   <= p;
          core_req_valid <= 1'b1;
          cur_t          <= t;
        end
      end
      outstanding <= outs;
    end
  end

  // ---------------- soft-error injection ----------------
  int next_seu = 700;
  always_ff @(posedge clk) begin
    seu_en <= 1'b0;
    if (!rst && issued < NREQ - 200) begin
      if (cycle >= next_seu) begin
        seu_en   <= 1'b1;
        // every fourth periodic upset hits an MCU flip-flop group (groups 37, 38)
        seu_grp  <= (n_seu % 4 == 3) ? 37 + $urandom_range(1) : $urandom_range(38);
        seu_bit  <= $urandom;
        n_seu    <= n_seu + 1;
        next_seu <= cycle + 400 + int'($urandom_range(800));
      end else if (qrr_state == RC_REPLAY && $urandom_range(59) == 0) begin
        seu_en  <= 1'b1;                    // upset during a replay
        seu_grp <= $urandom_range(15);      // an input-queue entry
        seu_bit <= $urandom;
        n_seu   <= n_seu + 1;
      end
    end
  end

  // ---------------- event counters, recovery length ----------------
  int rec_len = 0;
  always_ff @(posedge clk) begin
    if (!rst) begin
      n_recovery <= n_recovery + int'(ev_recovery);
      n_restart  <= n_restart + int'(ev_restart);
      n_replay   <= n_replay + int'(ev_replay_pkt);
      n_dup      <= n_dup + int'(ev_dup_drop);
      n_missdel  <= n_missdel + int'(ev_miss_delete);
      n_blkfull  <= n_blkfull + int'(ev_blk_full);
      n_blkrec   <= n_blkrec + int'(ev_blk_recovery);
      n_mcu_err  <= n_mcu_err + int'(|mcu_err && qrr_state == RC_NORMAL);
      if (qrr_state != RC_NORMAL) rec_len <= rec_len + 1;
      else begin
        if (rec_len > max_rec_len) max_rec_len <= rec_len;
        rec_len <= 0;
      end
    end
  end

  initial begin
    for (int i = 0; i < NWORDS; i++) ref_mem[i] = 64'(i) * 64'h9E37_79B9;
    seu_en = 1'b0; seu_grp = 0; seu_bit = 0;
    core_req_pkt = '0;
    @(negedge rst);
    wait (issued == NREQ && outstanding == '0 && !core_req_valid);
    // let the miss buffer finish and the table drain
    repeat (2000) @(posedge clk);
    check(table_count == 0, $sformatf("record table not empty: %0d", table_count));
    check(qrr_state == RC_NORMAL, "QRR not back to normal");
    for (int i = 0; i < NWORDS; i++)
      check(model.mem[i] == ref_mem[i], $sformatf("final memory word %0d", i));
    check(max_rec_len < 5000, $sformatf("recovery took %0d cycles", max_rec_len));
    finished = 1'b1;
  end

endmodule
