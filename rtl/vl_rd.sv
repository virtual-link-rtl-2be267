// vl_rd: the Virtual-Link Routing Device (VLRD).
//
// The VLRD sits on the coherence network like a system-cache slice. Cores
// send it two kinds of packets, addressed to device memory whose physical
// address carries the queue's SQI:
//   push  - a 64 B line from a producer (vl_push);
//   fetch - a consumer request whose payload is the physical address of the
//           consumer line to be filled (vl_fetch).
// A push is stored in prodBuf, a fetch in consBuf, and each is answered the
// next cycle with a result code that becomes the instruction's Rs (0 on
// success; non-zero when the address names no enabled SQI of this device or
// the buffer has no free slot). The address-mapping pipeline then matches
// lines and requests of the same SQI in arrival order, and matched lines
// are injected, oldest match first, into the consumers' caches.
//
// Structure (follows the paper): linkTab (vl_link_tab), consBuf
// (vl_cons_buf), prodBuf with IN/LINK/OUT partitions (vl_prod_buf), the
// 3-stage mapping pipeline (vl_map_pipe) and the PA decoder
// (vl_addr_decode). One packet is accepted per cycle; the buffers decouple
// the port from the pipeline.
//
// Injection handshake (this design's choice): inj_valid presents the OUT
// head. The consumer's cache answers in the same cycle with inj_ack
// (written) or inj_nack (the line is no longer marked pushable). On either
// answer the consBuf slot is released, since the consumer re-issues its
// fetch after a rejection. An acknowledged line frees its prodBuf slot; a
// rejected line stays in the VLRD and re-enters the pipeline through a
// one-entry retry register, which holds off inj_valid while it is full.
// The reserved control byte (bits 511:504) is not stored and is delivered
// as zero.
//
// Latency with an idle pipeline: a fetch that finds data waiting, or a push
// that finds a request waiting, is written in cycle 0, enters stage 1 in
// cycle 1 and is presented on inj_valid in cycle 4.
module vl_rd
  import vl_pkg::*;
#(
  parameter int unsigned NUM_SQI  = 64,
  parameter int unsigned PB_DEPTH = 64,
  parameter int unsigned CB_DEPTH = 64,
  parameter logic [VL_PA_W-VL_SQI_LSB-VL_SQI_W-VL_VLRD_ID_W-1:0] PA_SPACE = 'h20,
  parameter logic [VL_VLRD_ID_W-1:0] VLRD_ID = '0
) (
  input  logic     clk,
  input  logic     rst_n,
  // configuration by system software
  input  logic     cfg_we,
  input  vl_sqi_t  cfg_sqi,
  input  logic     cfg_v,
  // packets from the coherence network, one per cycle
  input  logic     req_valid,
  input  vl_req_t  req,
  output logic     resp_valid,
  output vl_resp_t resp,
  // injections to consumers
  output logic     inj_valid,
  output vl_inj_t  inj,
  input  logic     inj_ack,
  input  logic     inj_nack,
  // status and events
  output logic     pb_full,
  output logic     cb_full,
  output logic     ev_vld,
  output vl_mop_e  ev_op,
  output logic     ev_hit
);
  // ---------------- address decode and input checks --------------------
  logic    a_hit, sqi_en;
  vl_sqi_t a_sqi;
  logic [VL_VLRD_ID_W-1:0] a_id;
  logic [5:0]  a_page;
  logic [11:0] a_off;

  vl_addr_decode #(
    .SQI_W(VL_SQI_W), .ID_W(VL_VLRD_ID_W), .PA_SPACE(PA_SPACE), .VLRD_ID(VLRD_ID)
  ) u_dec (
    .pa(req.pa), .hit(a_hit), .sqi(a_sqi), .vlrd_id(a_id), .page(a_page), .offset(a_off)
  );

  logic pb_alloc, cb_alloc;
  vl_status_e st;

  always_comb begin
    pb_alloc = 1'b0;
    cb_alloc = 1'b0;
    st       = VL_OK;
    if (!(a_hit && sqi_en))               st = VL_NOSQI;
    else if (req.is_push ? pb_full : cb_full) st = VL_FULL;
    else if (req.is_push)                 pb_alloc = req_valid;
    else                                  cb_alloc = req_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid <= 1'b0;
      resp       <= '0;
    end else begin
      resp_valid <= req_valid;
      resp       <= '{core: req.core, status: st};
    end
  end

  // ---------------- tables and buffers ----------------------------------
  vl_sqi_t   lt_rd_sqi, lt_wr_sqi;
  vl_ltrow_t lt_rd_row, lt_wr_row;
  logic      lt_wr_en;

  vl_link_tab #(.NUM_SQI(NUM_SQI)) u_link_tab (
    .clk, .rst_n,
    .cfg_we, .cfg_sqi, .cfg_v,
    .rd_sqi(lt_rd_sqi), .rd_row(lt_rd_row),
    .chk_sqi(a_sqi), .chk_v(sqi_en),
    .wr_en(lt_wr_en), .wr_sqi(lt_wr_sqi), .wr_row(lt_wr_row)
  );

  vl_ptr_t   cin_head, pin_head, pout_head, cnl_rd, pnl_rd, cnl_wr_val, pnl_wr_val;
  vl_sqi_t   cin_sqi, pin_sqi, pout_sqi;
  logic      cin_pop, pin_pop, pout_pop;
  vl_idx_t   cnl_rd_idx, pnl_rd_idx, cnl_wr_idx, pnl_wr_idx, ctgt_rd_idx;
  logic      cnl_we, pnl_we;
  vl_laddr_t ctgt_rd, pout_tgt, out_app_tgt;
  vl_core_t  ccore_rd, pout_core, out_app_core;
  logic      out_app_en;
  vl_idx_t   out_app_idx, out_app_mapped, pout_mapped;
  vl_data_t  pout_data;
  logic      cb_free, pb_free;
  logic [CB_DEPTH-1:0] cb_valid;
  logic [PB_DEPTH-1:0] pb_valid;

  vl_cons_buf #(.DEPTH(CB_DEPTH)) u_cons_buf (
    .clk, .rst_n,
    .alloc_en(cb_alloc), .alloc_sqi(a_sqi), .alloc_tgt(req.payload[VL_PA_W-1:6]),
    .alloc_core(req.core), .full(cb_full),
    .cin_head, .cin_sqi, .cin_pop,
    .tgt_rd_idx(ctgt_rd_idx), .tgt_rd(ctgt_rd), .core_rd(ccore_rd),
    .nl_rd_idx(cnl_rd_idx), .nl_rd(cnl_rd),
    .nl_we(cnl_we), .nl_wr_idx(cnl_wr_idx), .nl_wr_val(cnl_wr_val),
    .free_en(cb_free), .free_idx(pout_mapped),
    .valid(cb_valid)
  );

  vl_prod_buf #(.DEPTH(PB_DEPTH)) u_prod_buf (
    .clk, .rst_n,
    .alloc_en(pb_alloc), .alloc_sqi(a_sqi), .alloc_data(req.payload[VL_DATA_W-1:0]),
    .full(pb_full),
    .pin_head, .pin_sqi, .pin_pop,
    .nl_rd_idx(pnl_rd_idx), .nl_rd(pnl_rd),
    .nl_we(pnl_we), .nl_wr_idx(pnl_wr_idx), .nl_wr_val(pnl_wr_val),
    .out_app_en, .out_app_idx, .out_app_mapped, .out_app_tgt, .out_app_core,
    .pout_head, .pout_data, .pout_sqi, .pout_mapped, .pout_tgt, .pout_core, .pout_pop,
    .free_en(pb_free), .free_idx(pout_head.idx),
    .valid(pb_valid)
  );

  // ---------------- rejected-injection retry register --------------------
  logic    rt_vld, rt_take;
  vl_idx_t rt_idx;
  vl_sqi_t rt_sqi;

  vl_map_pipe u_pipe (
    .clk, .rst_n,
    .rt_vld, .rt_idx, .rt_sqi, .rt_take,
    .pin_head, .pin_sqi, .pin_pop,
    .cin_head, .cin_sqi, .cin_pop,
    .lt_rd_sqi, .lt_rd_row, .lt_wr_en, .lt_wr_sqi, .lt_wr_row,
    .pnl_rd_idx, .pnl_rd, .pnl_we, .pnl_wr_idx, .pnl_wr_val,
    .cnl_rd_idx, .cnl_rd, .cnl_we, .cnl_wr_idx, .cnl_wr_val,
    .ctgt_rd_idx, .ctgt_rd, .ccore_rd,
    .out_app_en, .out_app_idx, .out_app_mapped, .out_app_tgt, .out_app_core,
    .ev_vld, .ev_op, .ev_hit
  );

  // ---------------- injection port --------------------------------------
  always_comb begin
    inj_valid = pout_head.vld && !rt_vld;
    inj.core  = pout_core;
    inj.tgt   = pout_tgt;
    inj.line  = {8'h00, pout_data};
    pout_pop  = inj_valid && (inj_ack || inj_nack);
    cb_free   = pout_pop;
    pb_free   = inj_valid && inj_ack;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rt_vld <= 1'b0;
      rt_idx <= '0;
      rt_sqi <= '0;
    end else begin
      if (rt_take) rt_vld <= 1'b0;
      if (inj_valid && inj_nack && !inj_ack) begin
        rt_vld <= 1'b1;
        rt_idx <= pout_head.idx;
        rt_sqi <= pout_sqi;
      end
    end
  end

  // handshake rule: a cache answers an offered line with ack or nack, not both
  // (an answer while inj_valid is low is ignored)
  a_inj_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                                 inj_valid |-> !(inj_ack && inj_nack));
endmodule
