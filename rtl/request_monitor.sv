// request_monitor: the entry point of request packets from the cores into one L2C bank.
//
// A packet is accepted when the core offers it (core_req_valid), L2C can take it
// (l2c_ready), the record table has a free entry, no recovery is under way (recovering)
// and no parity error is being flagged (err_fast). An accepted packet goes on to L2C
// (fwd_valid/fwd_pkt, through the replay mux) and, in the same cycle, is written into the
// record table (alloc_en/alloc_pkt), so every request inside L2C has an entry. While the
// table is full or during recovery incoming packets are blocked by holding core_req_ready
// low; the cores keep them until accepted. blk_full and blk_recovery report a packet
// waiting for either reason.
// The valid/ready handshake is this design's choice; the paper gives recording on entry
// and blocking while the table is full or recovery is running.
// All outputs are combinational.
module request_monitor
  import qrr_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  logic     core_req_valid,
  input  req_pkt_t core_req_pkt,
  output logic     core_req_ready,
  input  logic     l2c_ready,
  input  logic     table_full,
  input  logic     recovering,
  input  logic     err_fast,
  output logic     fwd_valid,
  output req_pkt_t fwd_pkt,
  output logic     alloc_en,
  output req_pkt_t alloc_pkt,
  output logic     blk_full,
  output logic     blk_recovery
);

  logic open_gate;

  assign open_gate      = !table_full && !recovering && !err_fast;
  assign fwd_valid      = core_req_valid && open_gate;
  assign fwd_pkt        = core_req_pkt;
  assign core_req_ready = open_gate && l2c_ready;
  assign alloc_en       = core_req_valid && core_req_ready;
  assign alloc_pkt      = core_req_pkt;
  assign blk_full       = core_req_valid && table_full && !recovering;
  assign blk_recovery   = core_req_valid && (recovering || err_fast);

  // A packet offered by a core stays offered and unchanged until it is accepted.
  a_req_stable : assert property (@(posedge clk) disable iff (rst)
    core_req_valid && !core_req_ready |=> core_req_valid && $stable(core_req_pkt));

endmodule
