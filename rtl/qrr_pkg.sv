// qrr_pkg: types and constants shared by the Quick Replay Recovery (QRR) blocks.
//
// QRR sits between the processor-core interconnect and one L2 cache bank (L2C) with its
// DRAM controller (MCU). It sees two packet streams: request packets from the cores into
// L2C, and return packets from L2C back to the cores. The layouts below follow the
// OpenSPARC T2 processor-to-cache (130-bit) and cache-to-processor (146-bit) packet widths;
// the field order inside them is this design's own and only the fields QRR looks at are
// named. QRR needs from a request only whether it is a store and which hardware thread
// (core id, thread id) sent it; from a return packet only its type and destination thread.
package qrr_pkg;

  localparam int unsigned REQ_W = 130;  // request packet width
  localparam int unsigned RTN_W = 146;  // return packet width
  localparam int unsigned RID_W = 6;    // requester id: 8 cores x 8 threads

  // Request types (OpenSPARC-style encodings; only load and store are interpreted here).
  localparam logic [4:0] RQ_LOAD  = 5'b00000;
  localparam logic [4:0] RQ_STORE = 5'b00001;

  // Return types.
  localparam logic [3:0] RT_LOAD_RET = 4'b0000;
  localparam logic [3:0] RT_ST_ACK   = 4'b0100;

  typedef struct packed {
    logic [4:0]  rqtype;
    logic [2:0]  cpu_id;
    logic [2:0]  thread_id;
    logic [14:0] misc;
    logic [39:0] addr;
    logic [63:0] data;
  } req_pkt_t;

  typedef struct packed {
    logic [3:0]   rtntype;
    logic [2:0]   cpu_id;
    logic [2:0]   thread_id;
    logic [7:0]   misc;
    logic [127:0] data;
  } rtn_pkt_t;

  // Per-entry state of the record table.
  //   ENT_WAIT_RTN  : the request is in L2C; its return packet is still expected.
  //   ENT_WAIT_MISS : a store miss whose return packet has gone out; the miss buffer
  //                   has not yet finished the line fill and write.
  typedef enum logic {
    ENT_WAIT_RTN  = 1'b0,
    ENT_WAIT_MISS = 1'b1
  } ent_state_e;

  // Replay controller states.
  typedef enum logic [1:0] {
    RC_NORMAL  = 2'd0,  // requests flow, table records and deletes
    RC_DISABLE = 2'd1,  // error seen: writes and return valids disabled, inputs blocked
    RC_RESET   = 2'd2,  // L2C and MCU held in reset
    RC_REPLAY  = 2'd3   // recorded packets resent in arrival order
  } rc_state_e;

  function automatic logic [RID_W-1:0] req_rid(req_pkt_t p);
    return {p.cpu_id, p.thread_id};
  endfunction

  function automatic logic [RID_W-1:0] rtn_rid(rtn_pkt_t p);
    return {p.cpu_id, p.thread_id};
  endfunction

  function automatic logic req_is_store(req_pkt_t p);
    return p.rqtype == RQ_STORE;
  endfunction

  function automatic logic rtn_is_store_ack(rtn_pkt_t p);
    return p.rtntype == RT_ST_ACK;
  endfunction

endpackage
