// record_table_tb: random allocate / return / store-miss delete / replay traffic on the
// record table, checked every cycle against a reference kept as an arrival-ordered list.
// Checked: valid bits, count and full, each entry's order (its position in the list),
// state, returned and replayed flags, requester id and store flag, and the stored packet
// read through rd_idx. Also checks that alloc_idx is the lowest free entry.
module record_table_tb;
  import qrr_pkg::*;
  localparam int unsigned DEPTH = 32;
  localparam int unsigned IW = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst;
  logic alloc_en, rtn_en, rtn_post, miss_en, replay_start, replay_mark_en;
  req_pkt_t alloc_pkt, rd_pkt;
  logic [IW-1:0] alloc_idx, rtn_idx, miss_idx, replay_mark_idx, rd_idx;
  logic full;
  logic [5:0] count;
  logic [DEPTH-1:0] ent_valid, ent_returned, ent_replayed, ent_store;
  logic [IW-1:0] ent_order [DEPTH];
  ent_state_e ent_state [DEPTH];
  logic [RID_W-1:0] ent_rid [DEPTH];

  record_table #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int order_q[$];                 // entry indices, oldest first
  req_pkt_t   r_pkt [DEPTH];
  ent_state_e r_state [DEPTH];
  logic [DEPTH-1:0] r_valid, r_ret, r_rep;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic int lowest_free();
    for (int i = 0; i < DEPTH; i++) if (!r_valid[i]) return i;
    return -1;
  endfunction

  initial begin
    rst = 1'b1;
    {alloc_en, rtn_en, rtn_post, miss_en, replay_start, replay_mark_en} = '0;
    alloc_pkt = '0; rtn_idx = '0; miss_idx = '0; replay_mark_idx = '0; rd_idx = '0;
    r_valid = '0; r_ret = '0; r_rep = '0;
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int n = 0; n < 20000; n++) begin
      int lf, a, b;
      int wr[$], wm[$];
      // choose this cycle's operations from the reference
      {alloc_en, rtn_en, rtn_post, miss_en, replay_start, replay_mark_en} = '0;
      wr = {}; wm = {};
      foreach (order_q[k]) begin
        if (r_state[order_q[k]] == ENT_WAIT_RTN) wr.push_back(order_q[k]);
        else wm.push_back(order_q[k]);
      end
      lf = lowest_free();
      check(full == (lf < 0), "full");
      check(count == 6'(order_q.size()), "count");
      if (lf >= 0) check(alloc_idx == IW'(lf), "alloc_idx lowest free");
      // phases of mostly allocation and mostly deletion so the table fills and empties
      if (lf >= 0 && $urandom_range(99) < (((n / 500) % 2) ? 30 : 75)) begin
        alloc_en = 1'b1;
        alloc_pkt = req_pkt_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
        alloc_pkt.rqtype = $urandom_range(1) ? RQ_STORE : RQ_LOAD;
      end
      a = -1; b = -1;
      if (wr.size() > 0 && $urandom_range(99) < 50) begin
        a = wr[$urandom_range(wr.size() - 1)];
        rtn_en = 1'b1; rtn_idx = IW'(a); rtn_post = $urandom_range(2) == 0;
      end
      if (wm.size() > 0 && $urandom_range(99) < 40) begin
        b = wm[$urandom_range(wm.size() - 1)];
        miss_en = 1'b1; miss_idx = IW'(b);
      end
      if ($urandom_range(199) == 0) replay_start = 1'b1;
      else if (order_q.size() > 0 && $urandom_range(3) == 0) begin
        replay_mark_en = 1'b1;
        replay_mark_idx = IW'(order_q[$urandom_range(order_q.size() - 1)]);
      end
      rd_idx = IW'($urandom_range(DEPTH - 1));
      #1;
      if (r_valid[rd_idx]) check(rd_pkt == r_pkt[rd_idx], "rd_pkt");
      @(posedge clk);
      // reference update, same priority as the table
      if (a >= 0) begin
        if (rtn_post) begin
          r_state[a] = ENT_WAIT_MISS; r_ret[a] = 1'b1;
        end else begin
          r_valid[a] = 1'b0;
          foreach (order_q[k]) if (order_q[k] == a) begin order_q.delete(k); break; end
        end
      end
      if (b >= 0) begin
        r_valid[b] = 1'b0;
        foreach (order_q[k]) if (order_q[k] == b) begin order_q.delete(k); break; end
      end
      if (replay_start) begin
        for (int i = 0; i < DEPTH; i++) r_state[i] = ENT_WAIT_RTN;
        r_rep = '0;
      end
      if (replay_mark_en) r_rep[replay_mark_idx] = 1'b1;
      if (alloc_en) begin
        r_valid[lf] = 1'b1; r_state[lf] = ENT_WAIT_RTN; r_ret[lf] = 1'b0; r_rep[lf] = 1'b0;
        r_pkt[lf] = alloc_pkt;
        order_q.push_back(lf);
      end
      #1;
      check(ent_valid == r_valid, "valid bits");
      foreach (order_q[k]) begin
        int e;
        e = order_q[k];
        check(ent_order[e] == IW'(k), $sformatf("order of entry %0d: %0d vs %0d", e, ent_order[e], k));
        check(ent_state[e] == r_state[e], "state");
        check(ent_returned[e] == r_ret[e] && ent_replayed[e] == r_rep[e], "flags");
        check(ent_rid[e] == req_rid(r_pkt[e]) && ent_store[e] == req_is_store(r_pkt[e]), "rid/store");
      end
    end
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
