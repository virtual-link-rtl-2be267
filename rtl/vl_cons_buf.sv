// vl_cons_buf: the Consumer Buffer (consBuf) of the routing device.
//
// Each slot holds one registered consumer request: a valid bit, the SQI it
// asks data from, the target line address (consTgt, PA[51:6]) and the core
// the line is to be injected into, plus two link fields:
//   nextIn - the arrival-order list of requests waiting for the
//            address-mapping pipeline, with head CIHR and tail CITR;
//   nextL  - the per-SQI list of requests waiting for data; its head and
//            tail live in linkTab (consHead/consTail).
// CIFR (Consumer Input Free Register) points at a free slot. After a slot is
// taken it moves on to the next free slot below it, starting over from the
// first free slot after passing the bottom. All of this follows the paper;
// storing the core id next to consTgt is this design's addition (the paper
// says the fetch registers "the target PA and core-id").
//
// Interface and timing:
//   alloc_*  : write a new request into slot CIFR and append it to the
//              input list; only allowed when !full. Effective next edge.
//   cin_*    : head of the input list (CIHR) and its SQI; cin_pop removes it.
//   tgt_rd_* / nl_rd_* : combinational reads for the mapping pipeline.
//   nl_we    : write one nextL field (pipeline stage 3).
//   free_*   : release a slot once the line mapped to it has been sent.
// A newly allocated slot's nextL is cleared, so appending to a per-SQI list
// needs only the write of the old tail's nextL.
module vl_cons_buf
  import vl_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  // allocation
  input  logic      alloc_en,
  input  vl_sqi_t   alloc_sqi,
  input  vl_laddr_t alloc_tgt,
  input  vl_core_t  alloc_core,
  output logic      full,
  // input list head
  output vl_ptr_t   cin_head,
  output vl_sqi_t   cin_sqi,
  input  logic      cin_pop,
  // reads
  input  vl_idx_t   tgt_rd_idx,
  output vl_laddr_t tgt_rd,
  output vl_core_t  core_rd,
  input  vl_idx_t   nl_rd_idx,
  output vl_ptr_t   nl_rd,
  // nextL write
  input  logic      nl_we,
  input  vl_idx_t   nl_wr_idx,
  input  vl_ptr_t   nl_wr_val,
  // release
  input  logic      free_en,
  input  vl_idx_t   free_idx,
  output logic [DEPTH-1:0] valid
);
  vl_sqi_t   sqi     [DEPTH];
  vl_laddr_t tgt     [DEPTH];
  vl_core_t  core    [DEPTH];
  vl_ptr_t   next_in [DEPTH];
  vl_ptr_t   next_l  [DEPTH];
  vl_ptr_t   cifr, cihr, citr;

  initial assert (DEPTH <= 2**VL_IDX_W) else $fatal(1, "DEPTH too large");

  logic [2**VL_IDX_W-1:0] busy_next;
  logic                   take;

  assign full     = !cifr.vld;
  assign take     = alloc_en && cifr.vld;
  assign cin_head = cihr;
  assign cin_sqi  = sqi[cihr.idx];
  assign tgt_rd   = tgt[tgt_rd_idx];
  assign core_rd  = core[tgt_rd_idx];
  assign nl_rd    = next_l[nl_rd_idx];

  always_comb begin
    busy_next = '1;
    for (int i = 0; i < DEPTH; i++) busy_next[i] = valid[i];
    if (take) busy_next[cifr.idx] = 1'b1;
    if (free_en) busy_next[free_idx] = 1'b0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      cifr  <= '{vld: 1'b1, idx: '0};
      cihr  <= VL_NULL;
      citr  <= VL_NULL;
      for (int i = 0; i < DEPTH; i++) begin
        next_in[i] <= VL_NULL;
        next_l[i]  <= VL_NULL;
        sqi[i]     <= '0;
        tgt[i]     <= '0;
        core[i]    <= '0;
      end
    end else begin
      // slot valid bits
      if (free_en) valid[free_idx] <= 1'b0;
      if (take) begin
        valid[cifr.idx]   <= 1'b1;
        sqi[cifr.idx]     <= alloc_sqi;
        tgt[cifr.idx]     <= alloc_tgt;
        core[cifr.idx]    <= alloc_core;
        next_in[cifr.idx] <= VL_NULL;
        next_l[cifr.idx]  <= VL_NULL;
      end
      // CIFR moves on to the next free slot
      cifr <= vl_find_free(busy_next,
                           take ? int'(cifr.idx) + 1 : (cifr.vld ? int'(cifr.idx) : 0));
      // input list (CIHR .. CITR through nextIn)
      if (cin_pop && cihr.vld) begin
        if (cihr == citr) begin
          cihr <= take ? '{vld: 1'b1, idx: cifr.idx} : VL_NULL;
          citr <= take ? '{vld: 1'b1, idx: cifr.idx} : VL_NULL;
        end else begin
          cihr <= next_in[cihr.idx];
          if (take) begin
            next_in[citr.idx] <= '{vld: 1'b1, idx: cifr.idx};
            citr <= '{vld: 1'b1, idx: cifr.idx};
          end
        end
      end else if (take) begin
        if (citr.vld) next_in[citr.idx] <= '{vld: 1'b1, idx: cifr.idx};
        else          cihr <= '{vld: 1'b1, idx: cifr.idx};
        citr <= '{vld: 1'b1, idx: cifr.idx};
      end
      // per-SQI list link written by the pipeline
      if (nl_we) next_l[nl_wr_idx] <= nl_wr_val;
    end
  end
endmodule
