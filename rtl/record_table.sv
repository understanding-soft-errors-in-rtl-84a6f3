// record_table: the QRR record table of one L2C bank.
//
// Each of DEPTH entries holds one incomplete request packet (the 'Packet' column) and its
// arrival rank among the incomplete requests (the 'Order' column): order 0 is the oldest.
// A request is written into the lowest free entry with order = number of entries then in
// use; when entries are deleted, every younger entry's order drops by the number of deleted
// entries older than it, so the orders always form 0..count-1 in arrival order and the
// replay controller can find the n-th oldest entry by matching order == n.
//
// Besides valid and order, each entry keeps:
//   state    : ENT_WAIT_RTN (return packet expected) or ENT_WAIT_MISS (store miss
//              acknowledged to the core, miss buffer still busy)
//   returned : a return packet for this request has already reached the core, so a
//              return caused by replaying it must not be forwarded again
//   replayed : set by the replay controller when the entry has been resent in the
//              current replay
// and, as a copy of packet fields for fast matching, the requester id and store flag.
//
// Update ports, all acting at the clock edge, several per cycle allowed:
//   alloc_en/alloc_pkt    write a new entry at alloc_idx (caller must check full)
//   rtn_en/rtn_idx/rtn_post  a return packet matched entry rtn_idx: delete it, or, for
//                         a store miss (rtn_post), mark it returned and ENT_WAIT_MISS
//   miss_en/miss_idx      the miss buffer finished the store of entry miss_idx: delete it
//   replay_start          every valid entry goes back to ENT_WAIT_RTN, replayed cleared
//   replay_mark_en/idx    entry replay_mark_idx has been resent
// The packet of entry rd_idx is read combinationally on rd_pkt.
// The table layout (per-entry rank, lowest free slot) is this design's; the paper gives
// the two columns and the 32 entries.
module record_table
  import qrr_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  localparam int unsigned IW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic                   clk,
  input  logic                   rst,
  // allocation
  input  logic                   alloc_en,
  input  req_pkt_t               alloc_pkt,
  output logic [IW-1:0]          alloc_idx,
  output logic                   full,
  output logic [CW-1:0]          count,
  // completion
  input  logic                   rtn_en,
  input  logic [IW-1:0]          rtn_idx,
  input  logic                   rtn_post,
  input  logic                   miss_en,
  input  logic [IW-1:0]          miss_idx,
  // replay
  input  logic                   replay_start,
  input  logic                   replay_mark_en,
  input  logic [IW-1:0]          replay_mark_idx,
  input  logic [IW-1:0]          rd_idx,
  output req_pkt_t               rd_pkt,
  // entry views
  output logic [DEPTH-1:0]       ent_valid,
  output logic [IW-1:0]          ent_order    [DEPTH],
  output ent_state_e             ent_state    [DEPTH],
  output logic [DEPTH-1:0]       ent_returned,
  output logic [DEPTH-1:0]       ent_replayed,
  output logic [RID_W-1:0]       ent_rid      [DEPTH],
  output logic [DEPTH-1:0]       ent_store
);

  req_pkt_t        pkt_mem [DEPTH];
  logic [DEPTH-1:0] del_vec;
  logic [CW-1:0]    n_del;
  logic             any_free;

  // lowest free entry
  always_comb begin
    alloc_idx = '0;
    any_free  = 1'b0;
    for (int i = DEPTH - 1; i >= 0; i--) begin
      if (!ent_valid[i]) begin
        alloc_idx = IW'(i);
        any_free  = 1'b1;
      end
    end
  end

  always_comb begin
    count = '0;
    for (int i = 0; i < DEPTH; i++) count = count + CW'(ent_valid[i]);
  end

  assign full = !any_free;

  always_comb begin
    del_vec = '0;
    if (rtn_en && !rtn_post) del_vec[rtn_idx] = 1'b1;
    if (miss_en)             del_vec[miss_idx] = 1'b1;
    n_del = '0;
    for (int i = 0; i < DEPTH; i++) n_del = n_del + CW'(del_vec[i]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ent_valid    <= '0;
      ent_returned <= '0;
      ent_replayed <= '0;
      ent_store    <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        ent_order[i] <= '0;
        ent_state[i] <= ENT_WAIT_RTN;
        ent_rid[i]   <= '0;
      end
    end else begin
      for (int e = 0; e < DEPTH; e++) begin
        if (ent_valid[e]) begin
          if (del_vec[e]) begin
            ent_valid[e] <= 1'b0;
          end else begin
            // rank drops by the number of older entries deleted this cycle
            logic [IW-1:0] dec;
            dec = '0;
            for (int d = 0; d < DEPTH; d++) begin
              if (del_vec[d] && ent_valid[d] && (ent_order[d] < ent_order[e])) dec = dec + 1'b1;
            end
            ent_order[e] <= ent_order[e] - dec;
          end
        end
      end
      if (rtn_en && rtn_post) begin
        ent_state[rtn_idx]    <= ENT_WAIT_MISS;
        ent_returned[rtn_idx] <= 1'b1;
      end
      if (replay_start) begin
        for (int e = 0; e < DEPTH; e++) ent_state[e] <= ENT_WAIT_RTN;
        ent_replayed <= '0;
      end
      if (replay_mark_en) ent_replayed[replay_mark_idx] <= 1'b1;
      if (alloc_en) begin
        ent_valid[alloc_idx]    <= 1'b1;
        ent_order[alloc_idx]    <= IW'(count - n_del);
        ent_state[alloc_idx]    <= ENT_WAIT_RTN;
        ent_returned[alloc_idx] <= 1'b0;
        ent_replayed[alloc_idx] <= 1'b0;
        ent_rid[alloc_idx]      <= req_rid(alloc_pkt);
        ent_store[alloc_idx]    <= req_is_store(alloc_pkt);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (alloc_en) pkt_mem[alloc_idx] <= alloc_pkt;
  end

  assign rd_pkt = pkt_mem[rd_idx];

  // The caller never allocates into a full table and never deletes a free entry.
  a_no_alloc_full : assert property (@(posedge clk) disable iff (rst) alloc_en |-> !full);
  a_rtn_valid     : assert property (@(posedge clk) disable iff (rst) rtn_en |-> ent_valid[rtn_idx]);
  a_miss_valid    : assert property (@(posedge clk) disable iff (rst) miss_en |-> ent_valid[miss_idx]);

endmodule
