// vl_map_pipe: the 3-stage address-mapping pipeline of the routing device.
//
// Every buffered consumer request and every buffered producer line passes
// through this pipeline once, one entry per cycle, to be matched with the
// other side of the same SQI:
//   Stage 1 picks the next entry (the head of the consBuf input list, the
//           head of the prodBuf IN list, or a line whose injection was
//           rejected), reads that SQI's linkTab row and latches it.
//   Stage 2 decides hit or miss. A consumer request hits when prodHead is
//           not NULL, a producer line when consHead is not NULL. On a hit it
//           reads the partner list's nextL (to advance the head) and, for a
//           producer line, the waiting request's consTgt. On a miss the
//           entry is appended to its own SQI list. The new row is computed.
//   Stage 3 writes the linkTab row, the one nextL field that changes and,
//           on a hit, appends the producer slot to prodBuf's OUT list with
//           its consTgt and mapped consBuf slot.
// Stages, their work and the two forwarding paths follow the paper's
// pipeline table: stage 1 takes the row being written by stage 3 (RAW) and
// the row just computed by stage 2 (the forwarded nextL), so back-to-back
// entries of one SQI need no stall. Stage 2 likewise takes a nextL field
// being written by stage 3.
//
// This design's own choices: round-robin between consumer and producer
// entries when both wait, priority for a rejected line, and the handling of
// a rejected line (hit as a producer; on a miss it is put back at the head
// of the producer list so that it stays the oldest line of its SQI).
//
// The ev_* outputs report each entry as it leaves stage 3.
module vl_map_pipe
  import vl_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  // entry sources
  input  logic      rt_vld,
  input  vl_idx_t   rt_idx,
  input  vl_sqi_t   rt_sqi,
  output logic      rt_take,
  input  vl_ptr_t   pin_head,
  input  vl_sqi_t   pin_sqi,
  output logic      pin_pop,
  input  vl_ptr_t   cin_head,
  input  vl_sqi_t   cin_sqi,
  output logic      cin_pop,
  // linkTab
  output vl_sqi_t   lt_rd_sqi,
  input  vl_ltrow_t lt_rd_row,
  output logic      lt_wr_en,
  output vl_sqi_t   lt_wr_sqi,
  output vl_ltrow_t lt_wr_row,
  // prodBuf LINK partition
  output vl_idx_t   pnl_rd_idx,
  input  vl_ptr_t   pnl_rd,
  output logic      pnl_we,
  output vl_idx_t   pnl_wr_idx,
  output vl_ptr_t   pnl_wr_val,
  // consBuf nextL and consTgt
  output vl_idx_t   cnl_rd_idx,
  input  vl_ptr_t   cnl_rd,
  output logic      cnl_we,
  output vl_idx_t   cnl_wr_idx,
  output vl_ptr_t   cnl_wr_val,
  output vl_idx_t   ctgt_rd_idx,
  input  vl_laddr_t ctgt_rd,
  input  vl_core_t  ccore_rd,
  // prodBuf OUT append
  output logic      out_app_en,
  output vl_idx_t   out_app_idx,
  output vl_idx_t   out_app_mapped,
  output vl_laddr_t out_app_tgt,
  output vl_core_t  out_app_core,
  // events
  output logic      ev_vld,
  output vl_mop_e   ev_op,
  output logic      ev_hit
);
  typedef struct packed {
    logic      vld;
    vl_mop_e   op;
    vl_idx_t   idx;
    vl_sqi_t   sqi;
    vl_ltrow_t row;
  } s1_t;

  typedef struct packed {
    logic      vld;
    vl_mop_e   op;
    vl_sqi_t   sqi;
    vl_ltrow_t row;       // new linkTab row
    logic      hit;
    vl_idx_t   prod_idx;  // producer slot going to OUT on a hit
    vl_idx_t   cons_idx;  // consBuf slot it is mapped to
    vl_laddr_t tgt;
    vl_core_t  core;
    logic      pnl_we;
    vl_idx_t   pnl_idx;
    vl_ptr_t   pnl_val;
    logic      cnl_we;
    vl_idx_t   cnl_idx;
    vl_ptr_t   cnl_val;
  } s2_t;

  s1_t  p1, s1;
  s2_t  p2, s2;
  logic prefer_cons;
  logic pick_cons;

  // ---------------- Stage 1: select an entry, read linkTab -------------
  always_comb begin
    rt_take   = 1'b0;
    pin_pop   = 1'b0;
    cin_pop   = 1'b0;
    pick_cons = 1'b0;
    s1        = '0;
    if (rt_vld) begin
      rt_take = 1'b1;
      s1.vld  = 1'b1;
      s1.op   = VL_MOP_RETRY;
      s1.idx  = rt_idx;
      s1.sqi  = rt_sqi;
    end else if (cin_head.vld && (prefer_cons || !pin_head.vld)) begin
      cin_pop   = 1'b1;
      pick_cons = 1'b1;
      s1.vld    = 1'b1;
      s1.op     = VL_MOP_CONS;
      s1.idx    = cin_head.idx;
      s1.sqi    = cin_sqi;
    end else if (pin_head.vld) begin
      pin_pop = 1'b1;
      s1.vld  = 1'b1;
      s1.op   = VL_MOP_PROD;
      s1.idx  = pin_head.idx;
      s1.sqi  = pin_sqi;
    end
    lt_rd_sqi = s1.sqi;
    // forwarding: newest first (stage 2 result, then stage 3 write)
    if (s2.vld && s2.sqi == s1.sqi)      s1.row = s2.row;
    else if (p2.vld && p2.sqi == s1.sqi) s1.row = p2.row;
    else                                 s1.row = lt_rd_row;
  end

  // ---------------- Stage 2: hit / miss decision -----------------------
  vl_ptr_t pnl, cnl;
  always_comb begin
    pnl_rd_idx  = p1.row.prod_head.idx;
    cnl_rd_idx  = p1.row.cons_head.idx;
    pnl         = (p2.vld && p2.pnl_we && p2.pnl_idx == pnl_rd_idx) ? p2.pnl_val : pnl_rd;
    cnl         = (p2.vld && p2.cnl_we && p2.cnl_idx == cnl_rd_idx) ? p2.cnl_val : cnl_rd;
    ctgt_rd_idx = (p1.op == VL_MOP_CONS) ? p1.idx : p1.row.cons_head.idx;

    s2          = '0;
    s2.vld      = p1.vld;
    s2.op       = p1.op;
    s2.sqi      = p1.sqi;
    s2.row      = p1.row;
    s2.tgt      = ctgt_rd;
    s2.core     = ccore_rd;
    if (p1.op == VL_MOP_CONS) begin
      s2.cons_idx = p1.idx;
      s2.prod_idx = p1.row.prod_head.idx;
      if (p1.row.prod_head.vld) begin
        // hit: take the oldest line of this SQI
        s2.hit               = 1'b1;
        s2.row.prod_head     = pnl;
        if (!pnl.vld) s2.row.prod_tail = VL_NULL;
      end else begin
        // miss: append the request to the SQI's consumer list
        s2.row.cons_tail = '{vld: 1'b1, idx: p1.idx};
        if (!p1.row.cons_head.vld) s2.row.cons_head = '{vld: 1'b1, idx: p1.idx};
        s2.cnl_we  = p1.row.cons_tail.vld;
        s2.cnl_idx = p1.row.cons_tail.idx;
        s2.cnl_val = '{vld: 1'b1, idx: p1.idx};
      end
    end else begin
      s2.prod_idx = p1.idx;
      s2.cons_idx = p1.row.cons_head.idx;
      if (p1.row.cons_head.vld) begin
        // hit: serve the oldest waiting request of this SQI
        s2.hit           = 1'b1;
        s2.row.cons_head = cnl;
        if (!cnl.vld) s2.row.cons_tail = VL_NULL;
      end else if (p1.op == VL_MOP_PROD) begin
        // miss: append the line to the SQI's producer list
        s2.row.prod_tail = '{vld: 1'b1, idx: p1.idx};
        if (!p1.row.prod_head.vld) s2.row.prod_head = '{vld: 1'b1, idx: p1.idx};
        s2.pnl_we  = p1.row.prod_tail.vld;
        s2.pnl_idx = p1.row.prod_tail.idx;
        s2.pnl_val = '{vld: 1'b1, idx: p1.idx};
      end else begin
        // rejected line, miss: put it back at the head of the list
        s2.row.prod_head = '{vld: 1'b1, idx: p1.idx};
        if (!p1.row.prod_tail.vld) s2.row.prod_tail = '{vld: 1'b1, idx: p1.idx};
        s2.pnl_we  = 1'b1;
        s2.pnl_idx = p1.idx;
        s2.pnl_val = p1.row.prod_head;
      end
    end
  end

  // ---------------- Stage 3: write tables and buffers ------------------
  always_comb begin
    lt_wr_en       = p2.vld;
    lt_wr_sqi      = p2.sqi;
    lt_wr_row      = p2.row;
    pnl_we         = p2.vld && p2.pnl_we;
    pnl_wr_idx     = p2.pnl_idx;
    pnl_wr_val     = p2.pnl_val;
    cnl_we         = p2.vld && p2.cnl_we;
    cnl_wr_idx     = p2.cnl_idx;
    cnl_wr_val     = p2.cnl_val;
    out_app_en     = p2.vld && p2.hit;
    out_app_idx    = p2.prod_idx;
    out_app_mapped = p2.cons_idx;
    out_app_tgt    = p2.tgt;
    out_app_core   = p2.core;
    ev_vld         = p2.vld;
    ev_op          = p2.op;
    ev_hit         = p2.hit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1          <= '0;
      p2          <= '0;
      prefer_cons <= 1'b1;
    end else begin
      p1 <= s1;
      p2 <= s2;
      if (cin_head.vld && pin_head.vld && !rt_vld) prefer_cons <= !pick_cons;
    end
  end
endmodule
