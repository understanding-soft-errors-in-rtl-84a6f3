// l2c_mcu_model: behavioural stand-in for one L2 cache bank (L2C) and its DRAM controller
// (MCU), used only by testbenches to exercise the QRR controller. It is not the real
// OpenSPARC L2C/MCU; it has just the behaviour QRR depends on:
//   * an input queue of IQ_DEPTH request packets (valid/ready),
//   * in-order processing of one request at a time; a load hit or store hit is answered
//     in the next cycle, a load miss waits MISS_LAT cycles for DRAM, a store miss is
//     acknowledged at once with rtn_post = 1 and handed to a miss buffer,
//   * a miss buffer of MB_DEPTH entries that performs the line fill and the store
//     MISS_LAT cycles later, then pulses miss_done with the requester id,
//   * a request to a line with a pending miss waits until the miss buffer is done,
//   * a word-addressed data array (L2 data plus DRAM, NWORDS x 64 bit) and a present bit
//     per 4-word line (the tag array), both kept across uncore_rst and never written
//     while write_disable is high; every EVICT_PERIOD cycles one line is evicted,
//   * every flip-flop of the model sits in a logic_parity_group, and seu_en/seu_grp/
//     seu_bit flip one stored bit of one group; l2c_err/mcu_err are the per-group parity
//     errors (the load-miss counter and the miss-buffer timer stand for MCU flip-flops).
// uncore_rst (or rst) clears all flip-flops; the arrays keep their contents.
module l2c_mcu_model
  import qrr_pkg::*;
#(
  parameter int unsigned IQ_DEPTH     = 16,
  parameter int unsigned MB_DEPTH     = 16,
  parameter int unsigned MISS_LAT     = 40,
  parameter int unsigned NWORDS       = 1024,
  parameter int unsigned EVICT_PERIOD = 97
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              uncore_rst,
  input  logic              write_disable,
  input  logic              req_valid,
  input  req_pkt_t          req_pkt,
  output logic              req_ready,
  output logic              rtn_valid,
  output rtn_pkt_t          rtn_pkt,
  output logic              rtn_post,
  output logic              miss_done,
  output logic [RID_W-1:0]  miss_rid,
  output logic [IQ_DEPTH+MB_DEPTH+4:0] l2c_err,
  output logic [1:0]        mcu_err,
  input  logic              seu_en,
  input  int unsigned       seu_grp,
  input  int unsigned       seu_bit
);

  localparam int unsigned NLINES = NWORDS / 4;
  localparam int unsigned WIW    = $clog2(NWORDS);
  localparam int unsigned QW     = $clog2(IQ_DEPTH);
  localparam int unsigned MW     = $clog2(MB_DEPTH);
  localparam int unsigned TW     = 16;
  localparam int unsigned NGRP   = IQ_DEPTH + MB_DEPTH + 7;  // IQ + MB entries + 7 control groups
  // group numbers
  localparam int unsigned G_IQ   = 0;
  localparam int unsigned G_IQC  = IQ_DEPTH;
  localparam int unsigned G_CUR  = IQ_DEPTH + 1;
  localparam int unsigned G_RTN  = IQ_DEPTH + 2;
  localparam int unsigned G_MB   = IQ_DEPTH + 3;
  localparam int unsigned G_MBC  = IQ_DEPTH + MB_DEPTH + 3;
  localparam int unsigned G_MDN  = IQ_DEPTH + MB_DEPTH + 4;
  localparam int unsigned G_LMC  = IQ_DEPTH + MB_DEPTH + 5;  // MCU
  localparam int unsigned G_MBT  = IQ_DEPTH + MB_DEPTH + 6;  // MCU

  logic urst;
  assign urst = rst || uncore_rst;

  // arrays: not flip-flops of the component, preserved across uncore reset
  logic [63:0]       mem     [NWORDS];
  logic [NLINES-1:0] present;

  logic [NGRP-1:0] gerr;
  function automatic logic [147:0] flipmask(int unsigned g, int unsigned w);
    logic [147:0] m;
    m = '0;
    if (seu_en && seu_grp == g) m[seu_bit % w] = 1'b1;
    return m;
  endfunction

  // ---------------- input queue ----------------
  req_pkt_t            iq_q [IQ_DEPTH];
  logic [IQ_DEPTH-1:0] iq_we;
  logic [QW-1:0]       iq_wp, iq_rp, iq_wp_d, iq_rp_d;
  logic [QW:0]         iq_cnt, iq_cnt_d;
  logic                iq_push, iq_pop;

  for (genvar i = 0; i < IQ_DEPTH; i++) begin : g_iq
    logic [REQ_W-1:0] q;
    logic [147:0]     fm;
    assign fm = flipmask(G_IQ + i, REQ_W);
    logic_parity_group #(.W(REQ_W)) u (
      .clk(clk), .rst(urst), .en(iq_we[i]), .d(req_pkt), .seu_flip(fm[REQ_W-1:0]),
      .q(q), .err(gerr[G_IQ + i]));
    assign iq_q[i] = req_pkt_t'(q);
  end

  assign req_ready = (iq_cnt < (QW+1)'(IQ_DEPTH));
  assign iq_push   = req_valid && req_ready;
  always_comb begin
    iq_we = '0;
    if (iq_push) iq_we[iq_wp] = 1'b1;
  end

  // ---------------- processing stage ----------------
  logic     cur_v, cur_v_d;
  req_pkt_t cur, cur_d;
  logic     lm_busy, lm_busy_d;
  logic [TW-1:0] lm_cnt, lm_cnt_d;

  // ---------------- return register ----------------
  logic     rtn_v_d, rtn_post_d;
  rtn_pkt_t rtn_d;

  // ---------------- miss buffer ----------------
  req_pkt_t            mb_q [MB_DEPTH];
  logic [MB_DEPTH-1:0] mb_we;
  logic [MW-1:0]       mb_hp, mb_tp, mb_hp_d, mb_tp_d;
  logic [MW:0]         mb_cnt, mb_cnt_d;
  logic [TW-1:0]       mb_tmr, mb_tmr_d;
  logic                mdn_v, mdn_v_d;
  logic [RID_W-1:0]    mdn_rid, mdn_rid_d;
  logic                mb_push, mb_pop;

  for (genvar i = 0; i < MB_DEPTH; i++) begin : g_mb
    logic [REQ_W-1:0] q;
    logic [147:0]     fm;
    assign fm = flipmask(G_MB + i, REQ_W);
    logic_parity_group #(.W(REQ_W)) u (
      .clk(clk), .rst(urst), .en(mb_we[i]), .d(cur), .seu_flip(fm[REQ_W-1:0]),
      .q(q), .err(gerr[G_MB + i]));
    assign mb_q[i] = req_pkt_t'(q);
  end

  function automatic logic [WIW-1:0] widx(req_pkt_t p);
    return p.addr[WIW+2:3];
  endfunction
  function automatic logic [WIW-3:0] lidx(req_pkt_t p);
    return p.addr[WIW+2:5];
  endfunction

  // a pending miss on the line of the current request
  logic line_busy;
  always_comb begin
    line_busy = 1'b0;
    for (int i = 0; i < MB_DEPTH; i++) begin
      if ((MW+1)'((i - int'(mb_hp)) & (MB_DEPTH - 1)) < mb_cnt && lidx(mb_q[i]) == lidx(cur))
        line_busy = 1'b1;
    end
  end

  logic        st_hit_wr, mb_wr, lm_fill;
  logic [63:0] evict_cnt;

  always_comb begin
    cur_v_d    = cur_v;
    cur_d      = cur;
    lm_busy_d  = lm_busy;
    lm_cnt_d   = lm_cnt;
    rtn_v_d    = 1'b0;
    rtn_post_d = 1'b0;
    rtn_d      = '0;
    iq_pop     = 1'b0;
    mb_push    = 1'b0;
    st_hit_wr  = 1'b0;
    lm_fill    = 1'b0;
    if (cur_v) begin
      if (lm_busy) begin
        lm_cnt_d = lm_cnt + 1'b1;
        if (lm_cnt == TW'(MISS_LAT - 1)) begin
          lm_fill      = 1'b1;
          lm_busy_d    = 1'b0;
          cur_v_d      = 1'b0;
          rtn_v_d      = 1'b1;
          rtn_d.rtntype   = RT_LOAD_RET;
          rtn_d.cpu_id    = cur.cpu_id;
          rtn_d.thread_id = cur.thread_id;
          rtn_d.data      = {64'd0, mem[widx(cur)]};
        end
      end else if (!line_busy) begin
        if (!req_is_store(cur)) begin
          if (present[lidx(cur)]) begin
            cur_v_d         = 1'b0;
            rtn_v_d         = 1'b1;
            rtn_d.rtntype   = RT_LOAD_RET;
            rtn_d.cpu_id    = cur.cpu_id;
            rtn_d.thread_id = cur.thread_id;
            rtn_d.data      = {64'd0, mem[widx(cur)]};
          end else begin
            lm_busy_d = 1'b1;
            lm_cnt_d  = '0;
          end
        end else if (present[lidx(cur)]) begin
          st_hit_wr       = 1'b1;
          cur_v_d         = 1'b0;
          rtn_v_d         = 1'b1;
          rtn_d.rtntype   = RT_ST_ACK;
          rtn_d.cpu_id    = cur.cpu_id;
          rtn_d.thread_id = cur.thread_id;
        end else if (mb_cnt < (MW+1)'(MB_DEPTH)) begin
          mb_push         = 1'b1;
          cur_v_d         = 1'b0;
          rtn_v_d         = 1'b1;
          rtn_post_d      = 1'b1;
          rtn_d.rtntype   = RT_ST_ACK;
          rtn_d.cpu_id    = cur.cpu_id;
          rtn_d.thread_id = cur.thread_id;
        end
      end
    end
    if (!cur_v_d && iq_cnt != '0) begin
      iq_pop  = 1'b1;
      cur_v_d = 1'b1;
      cur_d   = iq_q[iq_rp];
    end
  end

  assign iq_wp_d  = iq_push ? iq_wp + 1'b1 : iq_wp;
  assign iq_rp_d  = iq_pop  ? iq_rp + 1'b1 : iq_rp;
  assign iq_cnt_d = iq_cnt + (QW+1)'(iq_push) - (QW+1)'(iq_pop);

  // miss buffer head: counts MISS_LAT cycles, then fills and stores
  always_comb begin
    mb_tmr_d  = mb_tmr;
    mb_pop    = 1'b0;
    mb_wr     = 1'b0;
    mdn_v_d   = 1'b0;
    mdn_rid_d = '0;
    if (mb_cnt != '0) begin
      mb_tmr_d = mb_tmr + 1'b1;
      if (mb_tmr == TW'(MISS_LAT - 1)) begin
        mb_pop    = 1'b1;
        mb_wr     = 1'b1;
        mb_tmr_d  = '0;
        mdn_v_d   = 1'b1;
        mdn_rid_d = req_rid(mb_q[mb_hp]);
      end
    end
  end
  always_comb begin
    mb_we = '0;
    if (mb_push) mb_we[mb_tp] = 1'b1;
  end
  assign mb_tp_d  = mb_push ? mb_tp + 1'b1 : mb_tp;
  assign mb_hp_d  = mb_pop  ? mb_hp + 1'b1 : mb_hp;
  assign mb_cnt_d = mb_cnt + (MW+1)'(mb_push) - (MW+1)'(mb_pop);

  // ---------------- control flip-flops, each group parity protected ----------------
  logic [147:0] fm_iqc, fm_cur, fm_rtn, fm_mbc, fm_mdn, fm_lmc, fm_mbt;
  assign fm_iqc = flipmask(G_IQC, 3*QW+1);
  assign fm_cur = flipmask(G_CUR, REQ_W+1);
  assign fm_rtn = flipmask(G_RTN, RTN_W+2);
  assign fm_mbc = flipmask(G_MBC, 3*MW+1);
  assign fm_mdn = flipmask(G_MDN, RID_W+1);
  assign fm_lmc = flipmask(G_LMC, TW+1);
  assign fm_mbt = flipmask(G_MBT, TW);

  logic_parity_group #(.W(3*QW+1)) u_iqc (
    .clk(clk), .rst(urst), .en(1'b1), .d({iq_wp_d, iq_rp_d, iq_cnt_d}),
    .seu_flip(fm_iqc[3*QW:0]), .q({iq_wp, iq_rp, iq_cnt}), .err(gerr[G_IQC]));
  logic_parity_group #(.W(REQ_W+1)) u_cur (
    .clk(clk), .rst(urst), .en(1'b1), .d({cur_v_d, cur_d}),
    .seu_flip(fm_cur[REQ_W:0]), .q({cur_v, cur}), .err(gerr[G_CUR]));
  logic_parity_group #(.W(RTN_W+2)) u_rtn (
    .clk(clk), .rst(urst), .en(1'b1), .d({rtn_v_d, rtn_post_d, rtn_d}),
    .seu_flip(fm_rtn[RTN_W+1:0]), .q({rtn_valid, rtn_post, rtn_pkt}), .err(gerr[G_RTN]));
  logic_parity_group #(.W(3*MW+1)) u_mbc (
    .clk(clk), .rst(urst), .en(1'b1), .d({mb_hp_d, mb_tp_d, mb_cnt_d}),
    .seu_flip(fm_mbc[3*MW:0]), .q({mb_hp, mb_tp, mb_cnt}), .err(gerr[G_MBC]));
  logic_parity_group #(.W(RID_W+1)) u_mdn (
    .clk(clk), .rst(urst), .en(1'b1), .d({mdn_v_d, mdn_rid_d}),
    .seu_flip(fm_mdn[RID_W:0]), .q({mdn_v, mdn_rid}), .err(gerr[G_MDN]));
  logic_parity_group #(.W(TW+1)) u_lmc (
    .clk(clk), .rst(urst), .en(1'b1), .d({lm_busy_d, lm_cnt_d}),
    .seu_flip(fm_lmc[TW:0]), .q({lm_busy, lm_cnt}), .err(gerr[G_LMC]));
  logic_parity_group #(.W(TW)) u_mbt (
    .clk(clk), .rst(urst), .en(1'b1), .d(mb_tmr_d),
    .seu_flip(fm_mbt[TW-1:0]), .q(mb_tmr), .err(gerr[G_MBT]));

  assign miss_done = mdn_v;
  assign miss_rid  = mdn_rid;
  assign l2c_err   = gerr[G_MDN:0];
  assign mcu_err   = gerr[G_MBT:G_LMC];

  // ---------------- arrays ----------------
  initial begin
    for (int i = 0; i < NWORDS; i++) mem[i] = 64'(i) * 64'h9E37_79B9;
    present = '0;
  end

  always_ff @(posedge clk) begin
    if (rst) evict_cnt <= '0;
    else     evict_cnt <= evict_cnt + 1'b1;
    if (!write_disable) begin
      if (st_hit_wr) mem[widx(cur)] <= cur.data;
      if (mb_wr) begin
        mem[widx(mb_q[mb_hp])]     <= mb_q[mb_hp].data;
        present[lidx(mb_q[mb_hp])] <= 1'b1;
      end
      if (lm_fill) present[lidx(cur)] <= 1'b1;
      if (evict_cnt % EVICT_PERIOD == EVICT_PERIOD - 1)
        present[(evict_cnt / EVICT_PERIOD) % NLINES] <= 1'b0;
    end
  end

endmodule
