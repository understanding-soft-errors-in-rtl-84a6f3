// completion_monitor: decides when a recorded request has completed and deletes it.
//
// A return packet from L2C (load return or store acknowledgement) is matched against the
// record table: among the valid entries waiting for a return, with the same requester
// (core id, thread id) and the same kind (store or not), the oldest one is taken. The
// requests of one thread are served in order, so this is the request the packet answers.
// If L2C marks the return as a store miss (l2c_rtn_post) the entry stays, now waiting for
// the miss buffer; otherwise it is deleted. A store-miss completion from the miss buffer
// (miss_valid, miss_rid) deletes the oldest entry of that requester waiting for the miss
// buffer. Return packets of other types (for example invalidations) match nothing and pass
// through.
//
// Return packets go on to the cores except when
//   gate is high (a parity error is flagged or recovery is disabling/resetting L2C): the
//        packet may be corrupt; it is dropped and the table is left as it is, so the
//        request is replayed; miss completions are ignored as well;
//   the matched entry has already returned: the packet is the answer to a replayed
//        request whose first answer the core has had; it is dropped (dup_drop pulses).
// Matching by requester and kind, the post flag from L2C and the dropping of duplicate
// returns are this design's choices; the paper gives deletion on return, the extra wait
// for store misses and the gating of valids.
// All outputs are combinational; table updates take effect at the next edge.
module completion_monitor
  import qrr_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  localparam int unsigned IW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             gate,
  // from L2C
  input  logic             l2c_rtn_valid,
  input  rtn_pkt_t         l2c_rtn_pkt,
  input  logic             l2c_rtn_post,
  input  logic             miss_valid,
  input  logic [RID_W-1:0] miss_rid,
  // to the cores
  output logic             core_rtn_valid,
  output rtn_pkt_t         core_rtn_pkt,
  // record table views
  input  logic [DEPTH-1:0] ent_valid,
  input  logic [IW-1:0]    ent_order [DEPTH],
  input  ent_state_e       ent_state [DEPTH],
  input  logic [DEPTH-1:0] ent_returned,
  input  logic [RID_W-1:0] ent_rid   [DEPTH],
  input  logic [DEPTH-1:0] ent_store,
  // record table updates
  output logic             rtn_en,
  output logic [IW-1:0]    rtn_idx,
  output logic             rtn_post,
  output logic             miss_en,
  output logic [IW-1:0]    miss_idx,
  // events
  output logic             dup_drop,
  output logic             miss_delete
);

  logic [DEPTH-1:0] rtn_cand, miss_cand;
  logic             rtn_hit, miss_hit;
  logic             rtn_kind_ok;

  assign rtn_kind_ok = (l2c_rtn_pkt.rtntype == RT_LOAD_RET) || rtn_is_store_ack(l2c_rtn_pkt);

  always_comb begin
    for (int e = 0; e < DEPTH; e++) begin
      rtn_cand[e]  = ent_valid[e] && (ent_state[e] == ENT_WAIT_RTN)
                  && (ent_rid[e] == rtn_rid(l2c_rtn_pkt))
                  && (ent_store[e] == rtn_is_store_ack(l2c_rtn_pkt));
      miss_cand[e] = ent_valid[e] && (ent_state[e] == ENT_WAIT_MISS)
                  && (ent_rid[e] == miss_rid);
    end
  end

  // oldest candidate: no other candidate has a smaller order
  always_comb begin
    rtn_hit  = 1'b0;
    rtn_idx  = '0;
    miss_hit = 1'b0;
    miss_idx = '0;
    for (int e = 0; e < DEPTH; e++) begin
      logic older_r, older_m;
      older_r = 1'b0;
      older_m = 1'b0;
      for (int f = 0; f < DEPTH; f++) begin
        if (rtn_cand[f]  && ent_order[f] < ent_order[e]) older_r = 1'b1;
        if (miss_cand[f] && ent_order[f] < ent_order[e]) older_m = 1'b1;
      end
      if (rtn_cand[e] && !older_r) begin
        rtn_hit = 1'b1;
        rtn_idx = IW'(e);
      end
      if (miss_cand[e] && !older_m) begin
        miss_hit = 1'b1;
        miss_idx = IW'(e);
      end
    end
  end

  assign rtn_en      = l2c_rtn_valid && !gate && rtn_kind_ok && rtn_hit;
  assign rtn_post    = l2c_rtn_post && rtn_is_store_ack(l2c_rtn_pkt);
  assign miss_en     = miss_valid && !gate && miss_hit;
  assign miss_delete = miss_en;

  assign dup_drop       = rtn_en && ent_returned[rtn_idx];
  assign core_rtn_valid = l2c_rtn_valid && !gate && !dup_drop;
  assign core_rtn_pkt   = l2c_rtn_pkt;

  // Every load return or store acknowledgement answers a recorded request.
  a_rtn_matches : assert property (@(posedge clk) disable iff (rst)
    l2c_rtn_valid && !gate && rtn_kind_ok |-> rtn_hit);
  a_miss_matches : assert property (@(posedge clk) disable iff (rst)
    miss_valid && !gate |-> miss_hit);

endmodule
