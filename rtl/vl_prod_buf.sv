// vl_prod_buf: the Producer Buffer (prodBuf) of the routing device.
//
// Each slot holds one pushed cache line and is split, as in the paper, into
// three partitions that are separate memories with their own ports:
//   IN   - valid, SQI, line data (bits 503:0) and nextIn, the arrival-order
//          list of pushes waiting for the address-mapping pipeline
//          (head PIHR, tail PITR);
//   LINK - nextL, the per-SQI list of lines waiting for a consumer (head and
//          tail in linkTab: prodHead/prodTail);
//   OUT  - mapped (the consBuf slot the line was matched with), consTgt and
//          the target core, and nextOut, the list of lines ready to be sent
//          (head POHR, tail POTR).
// PIFR points at a free slot and moves like CIFR in consBuf.
//
// Interface and timing:
//   alloc_*  : store a new line in slot PIFR and append it to the IN list;
//              only allowed when !full.
//   pin_*    : head of the IN list and its SQI; pin_pop removes it.
//   nl_*     : LINK read (combinational) and write for the pipeline.
//   out_app_*: pipeline stage 3 appends a mapped slot to the OUT list.
//   pout_*   : head of the OUT list with its data and target; pout_pop
//              removes it. pout_pop and out_app may happen in one cycle.
//   free_*   : release a slot after its line has been delivered.
// All updates take effect at the next clock edge. The core id in OUT is
// this design's addition, carried over from consBuf.
module vl_prod_buf
  import vl_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  // allocation (IN)
  input  logic      alloc_en,
  input  vl_sqi_t   alloc_sqi,
  input  vl_data_t  alloc_data,
  output logic      full,
  // IN list head
  output vl_ptr_t   pin_head,
  output vl_sqi_t   pin_sqi,
  input  logic      pin_pop,
  // LINK
  input  vl_idx_t   nl_rd_idx,
  output vl_ptr_t   nl_rd,
  input  logic      nl_we,
  input  vl_idx_t   nl_wr_idx,
  input  vl_ptr_t   nl_wr_val,
  // OUT append
  input  logic      out_app_en,
  input  vl_idx_t   out_app_idx,
  input  vl_idx_t   out_app_mapped,
  input  vl_laddr_t out_app_tgt,
  input  vl_core_t  out_app_core,
  // OUT list head
  output vl_ptr_t   pout_head,
  output vl_data_t  pout_data,
  output vl_sqi_t   pout_sqi,
  output vl_idx_t   pout_mapped,
  output vl_laddr_t pout_tgt,
  output vl_core_t  pout_core,
  input  logic      pout_pop,
  // release
  input  logic      free_en,
  input  vl_idx_t   free_idx,
  output logic [DEPTH-1:0] valid
);
  // IN partition
  vl_sqi_t   sqi      [DEPTH];
  vl_data_t  data     [DEPTH];
  vl_ptr_t   next_in  [DEPTH];
  // LINK partition
  vl_ptr_t   next_l   [DEPTH];
  // OUT partition
  vl_idx_t   mapped   [DEPTH];
  vl_laddr_t tgt      [DEPTH];
  vl_core_t  core     [DEPTH];
  vl_ptr_t   next_out [DEPTH];

  vl_ptr_t pifr, pihr, pitr, pohr, potr;

  initial assert (DEPTH <= 2**VL_IDX_W) else $fatal(1, "DEPTH too large");

  logic [2**VL_IDX_W-1:0] busy_next;
  logic                   take;
  vl_ptr_t                app_ptr;

  assign full        = !pifr.vld;
  assign take        = alloc_en && pifr.vld;
  assign pin_head    = pihr;
  assign pin_sqi     = sqi[pihr.idx];
  assign nl_rd       = next_l[nl_rd_idx];
  assign pout_head   = pohr;
  assign pout_data   = data[pohr.idx];
  assign pout_sqi    = sqi[pohr.idx];
  assign pout_mapped = mapped[pohr.idx];
  assign pout_tgt    = tgt[pohr.idx];
  assign pout_core   = core[pohr.idx];
  assign app_ptr     = '{vld: 1'b1, idx: out_app_idx};

  always_comb begin
    busy_next = '1;
    for (int i = 0; i < DEPTH; i++) busy_next[i] = valid[i];
    if (take) busy_next[pifr.idx] = 1'b1;
    if (free_en) busy_next[free_idx] = 1'b0;
  end

  // Line data: a plain memory without reset; a slot is read only after it
  // has been written.
  always_ff @(posedge clk) begin
    if (take) data[pifr.idx] <= alloc_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      pifr  <= '{vld: 1'b1, idx: '0};
      pihr  <= VL_NULL;
      pitr  <= VL_NULL;
      pohr  <= VL_NULL;
      potr  <= VL_NULL;
      for (int i = 0; i < DEPTH; i++) begin
        sqi[i]      <= '0;
        next_in[i]  <= VL_NULL;
        next_l[i]   <= VL_NULL;
        mapped[i]   <= '0;
        tgt[i]      <= '0;
        core[i]     <= '0;
        next_out[i] <= VL_NULL;
      end
    end else begin
      if (free_en) valid[free_idx] <= 1'b0;
      if (take) begin
        valid[pifr.idx]   <= 1'b1;
        sqi[pifr.idx]     <= alloc_sqi;
        next_in[pifr.idx] <= VL_NULL;
        next_l[pifr.idx]  <= VL_NULL;
      end
      pifr <= vl_find_free(busy_next,
                           take ? int'(pifr.idx) + 1 : (pifr.vld ? int'(pifr.idx) : 0));
      // IN list (PIHR .. PITR through nextIn)
      if (pin_pop && pihr.vld) begin
        if (pihr == pitr) begin
          pihr <= take ? '{vld: 1'b1, idx: pifr.idx} : VL_NULL;
          pitr <= take ? '{vld: 1'b1, idx: pifr.idx} : VL_NULL;
        end else begin
          pihr <= next_in[pihr.idx];
          if (take) begin
            next_in[pitr.idx] <= '{vld: 1'b1, idx: pifr.idx};
            pitr <= '{vld: 1'b1, idx: pifr.idx};
          end
        end
      end else if (take) begin
        if (pitr.vld) next_in[pitr.idx] <= '{vld: 1'b1, idx: pifr.idx};
        else          pihr <= '{vld: 1'b1, idx: pifr.idx};
        pitr <= '{vld: 1'b1, idx: pifr.idx};
      end
      // LINK
      if (nl_we) next_l[nl_wr_idx] <= nl_wr_val;
      // OUT
      if (out_app_en) begin
        mapped[out_app_idx]   <= out_app_mapped;
        tgt[out_app_idx]      <= out_app_tgt;
        core[out_app_idx]     <= out_app_core;
        next_out[out_app_idx] <= VL_NULL;
      end
      if (pout_pop && pohr.vld) begin
        if (pohr == potr) begin
          pohr <= out_app_en ? app_ptr : VL_NULL;
          potr <= out_app_en ? app_ptr : VL_NULL;
        end else begin
          pohr <= next_out[pohr.idx];
          if (out_app_en) begin
            next_out[potr.idx] <= app_ptr;
            potr <= app_ptr;
          end
        end
      end else if (out_app_en) begin
        if (potr.vld) next_out[potr.idx] <= app_ptr;
        else          pohr <= app_ptr;
        potr <= app_ptr;
      end
    end
  end
endmodule
