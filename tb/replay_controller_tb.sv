// replay_controller_tb: runs many recoveries of the replay controller against a small
// record table kept in the testbench (an arrival-ordered list with replayed marks).
// For each recovery it checks: a raw error alone raises write_disable and rtn_gate at
// once and keeps them up; the aggregated error leads to exactly one RC_DISABLE cycle with
// replay_start, then exactly RST_CYCLES cycles of uncore_rst and agg_flush; the replayed
// packets come out one per accepted cycle in arrival order (while L2C stalls at random and
// already replayed entries complete and leave the table); the controller returns to
// RC_NORMAL right after the last one; an error during replay starts the whole sequence
// over and every entry is replayed again. The total cycle count of a recovery is checked
// against 2 + RST_CYCLES + packets + stall cycles.
module replay_controller_tb;
  import qrr_pkg::*;
  localparam int unsigned DEPTH = 32;
  localparam int unsigned IW = 5;
  localparam int unsigned RST_CYCLES = 4;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst, err_fast, err_agg, l2c_ready;
  logic [DEPTH-1:0] ent_valid, ent_replayed;
  logic [IW-1:0] ent_order [DEPTH];
  rc_state_e state;
  logic recovering, contain, write_disable, rtn_gate, uncore_rst, agg_flush, replay_start;
  logic replay_valid, replay_mark_en, recovery_begin, replay_restart;
  logic [IW-1:0] replay_idx, replay_mark_idx;

  replay_controller #(.DEPTH(DEPTH), .RST_CYCLES(RST_CYCLES)) dut (.*);

  int checks = 0, failures = 0, n_restart = 0, n_replayed = 0;
  int lst[$];  // entry indices, oldest first

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic drive_views();
    ent_valid = '0;
    for (int i = 0; i < DEPTH; i++) ent_order[i] = '0;
    foreach (lst[k]) begin
      ent_valid[lst[k]] = 1'b1;
      ent_order[lst[k]] = IW'(k);
    end
  endtask

  initial begin
    rst = 1'b1; err_fast = 1'b0; err_agg = 1'b0; l2c_ready = 1'b1;
    ent_replayed = '0;
    drive_views();
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int r = 0; r < 300; r++) begin
      int n, stalls, sent, cyc, want_restart, restarted;
      int expect_seq[$];
      // fresh random table
      lst = {};
      n = int'($urandom_range(DEPTH));
      for (int i = 0; i < DEPTH; i++) lst.push_back(i);
      lst.shuffle();
      while (lst.size() > n) void'(lst.pop_back());
      ent_replayed = '0;
      drive_views();
      #1;
      check(state == RC_NORMAL && !recovering && !write_disable && !uncore_rst, "idle");
      // raw error first, aggregated error two cycles later
      err_fast = 1'b1;
      #1;
      check(write_disable && rtn_gate && contain, "raw error disables at once");
      @(posedge clk); #1;
      err_fast = 1'b0;
      #1;
      check(write_disable && rtn_gate, "containment held after the raw error goes");
      @(posedge clk); #1;
      err_agg = 1'b1;
      #1;
      check(recovery_begin, "recovery_begin");
      want_restart = ($urandom_range(3) == 0) && n > 2;
      restarted = 0;
      cyc = 0; stalls = 0; sent = 0;
      forever begin
        @(posedge clk); #1;
        err_agg = 1'b0;
        cyc++;
        check(state == RC_DISABLE && replay_start && write_disable && recovering && !uncore_rst,
              "disable cycle");
        ent_replayed = '0;   // table reaction to replay_start
        expect_seq = lst;
        for (int c = 0; c < int'(RST_CYCLES); c++) begin
          @(posedge clk); #1;
          cyc++;
          check(state == RC_RESET && uncore_rst && agg_flush && write_disable && !replay_valid,
                $sformatf("reset cycle %0d", c));
        end
        @(posedge clk); #1;
        cyc++;
        // replay
        while (1) begin
          int nxt;
          nxt = -1;
          foreach (lst[k]) if (!ent_replayed[lst[k]]) begin nxt = lst[k]; break; end
          if (nxt < 0) break;
          check(state == RC_REPLAY && !uncore_rst && !write_disable && recovering, "replay state");
          if (want_restart && !restarted && sent == 1) begin
            err_agg = 1'b1;
            #1;
            check(replay_restart && !replay_valid, "restart flagged");
            restarted = 1;
            n_restart++;
            break;
          end
          l2c_ready = $urandom_range(3) != 0;
          #1;
          check(replay_valid && replay_idx == IW'(nxt) && replay_idx == IW'(expect_seq[sent]),
                $sformatf("replay %0d: idx %0d expected %0d", sent, replay_idx, nxt));
          check(replay_mark_en == l2c_ready && replay_mark_idx == replay_idx, "mark");
          @(posedge clk); #1;
          cyc++;
          if (l2c_ready) begin
            ent_replayed[nxt] = 1'b1;
            sent++;
            n_replayed++;
          end else stalls++;
          #1;
          // an already replayed entry may complete and leave the table
          if ($urandom_range(2) == 0) begin
            foreach (lst[k]) if (ent_replayed[lst[k]]) begin
              ent_replayed[lst[k]] = 1'b0;
              lst.delete(k);
              break;
            end
            drive_views();
            #1;
          end
        end
        if (restarted == 1) begin
          restarted = 2;
          sent = 0; stalls = 0; cyc = 0;
          continue;
        end
        break;
      end
      l2c_ready = 1'b1;
      check(state == RC_REPLAY && !replay_valid, $sformatf("last cycle of replay: state %0d valid %0d n %0d sent %0d restarted %0d", state, replay_valid, n, sent, restarted));
      @(posedge clk); #1;
      cyc++;
      check(state == RC_NORMAL && !recovering && !write_disable, "back to normal");
      check(sent == expect_seq.size(), "all entries replayed");
      // cyc counts the edges from the one entering RC_DISABLE to the one leaving RC_REPLAY,
      // so cyc - 1 cycles were spent in recovery: 1 disable + RST_CYCLES reset +
      // (sent + stalls) replay + 1 final replay cycle that finds nothing left
      check(cyc - 1 == 2 + int'(RST_CYCLES) + sent + stalls,
            $sformatf("recovery length %0d vs %0d", cyc - 1, 2 + RST_CYCLES + sent + stalls));
      repeat ($urandom_range(3)) @(posedge clk);
      #1;
    end
    check(n_restart > 10 && n_replayed > 1000, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
