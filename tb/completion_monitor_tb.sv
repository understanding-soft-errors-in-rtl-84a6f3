// completion_monitor_tb: builds random record-table contents (a random permutation of
// orders over the valid entries, random requesters, kinds, states and returned flags) and
// random return packets and miss completions, and checks the monitor against a reference
// that walks the entries from oldest to youngest: the first waiting entry with the same
// requester and kind is the match; a store-miss return keeps it (post), others delete it;
// a miss completion deletes the oldest entry of that requester waiting for the miss
// buffer; nothing is updated or forwarded while gated; a return to an entry that has
// already returned is dropped; other return types pass through untouched.
module completion_monitor_tb;
  import qrr_pkg::*;
  localparam int unsigned DEPTH = 32;
  localparam int unsigned IW = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst, gate;
  logic l2c_rtn_valid, l2c_rtn_post, miss_valid;
  rtn_pkt_t l2c_rtn_pkt, core_rtn_pkt;
  logic [RID_W-1:0] miss_rid;
  logic core_rtn_valid;
  logic [DEPTH-1:0] ent_valid, ent_returned, ent_store;
  logic [IW-1:0] ent_order [DEPTH];
  ent_state_e ent_state [DEPTH];
  logic [RID_W-1:0] ent_rid [DEPTH];
  logic rtn_en, rtn_post, miss_en, dup_drop, miss_delete;
  logic [IW-1:0] rtn_idx, miss_idx;

  completion_monitor #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  int n_hit = 0, n_dup = 0, n_miss = 0;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    rst = 1'b1; gate = 1'b0; l2c_rtn_valid = 1'b0; l2c_rtn_post = 1'b0; miss_valid = 1'b0;
    l2c_rtn_pkt = '0; miss_rid = '0;
    ent_valid = '0; ent_returned = '0; ent_store = '0;
    for (int i = 0; i < DEPTH; i++) begin
      ent_order[i] = '0; ent_state[i] = ENT_WAIT_RTN; ent_rid[i] = '0;
    end
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    for (int n = 0; n < 20000; n++) begin
      int perm[$], by_order[DEPTH];
      int exp_r, exp_m, kind_ok;
      logic is_st;
      // random table: requesters drawn from a small set so matches are frequent
      perm = {};
      for (int i = 0; i < DEPTH; i++) begin
        ent_valid[i]    = $urandom_range(3) != 0;
        ent_rid[i]      = RID_W'($urandom_range(3));
        ent_store[i]    = $urandom_range(1);
        ent_state[i]    = ($urandom_range(3) == 0) ? ENT_WAIT_MISS : ENT_WAIT_RTN;
        ent_returned[i] = (ent_state[i] == ENT_WAIT_MISS) || ($urandom_range(4) == 0);
        ent_order[i]    = '0;
        if (ent_valid[i]) perm.push_back(i);
      end
      perm.shuffle();
      foreach (perm[k]) begin
        ent_order[perm[k]] = IW'(k);
        by_order[k] = perm[k];
      end
      gate          = $urandom_range(5) == 0;
      l2c_rtn_valid = $urandom_range(1);
      l2c_rtn_pkt   = rtn_pkt_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
      case ($urandom_range(4))
        0, 1: l2c_rtn_pkt.rtntype = RT_LOAD_RET;
        2, 3: l2c_rtn_pkt.rtntype = RT_ST_ACK;
        default: l2c_rtn_pkt.rtntype = 4'b1100;  // some other return type
      endcase
      {l2c_rtn_pkt.cpu_id, l2c_rtn_pkt.thread_id} = 6'($urandom_range(3));
      l2c_rtn_post = $urandom_range(1);
      miss_valid   = $urandom_range(1);
      miss_rid     = RID_W'($urandom_range(3));
      // reference
      is_st   = (l2c_rtn_pkt.rtntype == RT_ST_ACK);
      kind_ok = (l2c_rtn_pkt.rtntype == RT_LOAD_RET) || is_st;
      exp_r = -1; exp_m = -1;
      for (int k = 0; k < perm.size(); k++) begin
        int e;
        e = by_order[k];
        if (exp_r < 0 && ent_state[e] == ENT_WAIT_RTN && ent_store[e] == is_st
            && ent_rid[e] == {l2c_rtn_pkt.cpu_id, l2c_rtn_pkt.thread_id}) exp_r = e;
        if (exp_m < 0 && ent_state[e] == ENT_WAIT_MISS && ent_rid[e] == miss_rid) exp_m = e;
      end
      // the monitor asserts that every return and miss completion has its entry
      if (kind_ok && exp_r < 0) l2c_rtn_valid = 1'b0;
      if (exp_m < 0) miss_valid = 1'b0;
      #1;
      if (l2c_rtn_valid && !gate && kind_ok && exp_r >= 0) begin
        n_hit++;
        check(rtn_en && rtn_idx == IW'(exp_r), $sformatf("return match %0d got %0d", exp_r, rtn_idx));
        check(rtn_post == (l2c_rtn_post && is_st), "post");
        check(dup_drop == ent_returned[exp_r], "duplicate");
        check(core_rtn_valid == !ent_returned[exp_r], "forward matched");
        if (ent_returned[exp_r]) n_dup++;
      end else begin
        check(!rtn_en, "no return update");
        check(core_rtn_valid == (l2c_rtn_valid && !gate && !(kind_ok && exp_r >= 0)), "forward unmatched");
      end
      check(core_rtn_pkt == l2c_rtn_pkt, "packet passes");
      if (miss_valid && !gate && exp_m >= 0) begin
        n_miss++;
        check(miss_en && miss_idx == IW'(exp_m) && miss_delete, "miss match");
      end else check(!miss_en, "no miss update");
      @(posedge clk);
      #1;
    end
    check(n_hit > 100 && n_dup > 10 && n_miss > 100, "coverage of matches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
