// vl_pkg: types and constants shared by the Virtual-Link routing device
// (VLRD) and the per-core ISA units.
//
// Virtual-Link moves whole 64-byte cache lines from producer cores to
// consumer cores through a routing device on the coherence network. Queues
// are named by a shared queue identifier (SQI) carried in the device-memory
// physical address. Everything here is sized for the main configuration:
// 52-bit physical addresses (lines are addressed by PA[51:6]), 64 SQIs,
// 64-entry producer and consumer buffers and 16 cores.
//
// Buffer indices and SQIs are fixed at 6 bits here, so the depth
// parameters of the VLRD modules may be lowered below 64 but not raised
// above it without widening VL_IDX_W / VL_SQI_W.
//
// Line format (follows the paper): the top two bytes of a line are the
// control region, bits 511:504 reserved, 503:502 element size, 501:496 a
// head pointer; bits 495:0 are the 62-byte payload. The VLRD stores only
// bits 503:0 of a pushed line, as in the paper's buffer figure, and
// delivers the reserved byte as zero.
package vl_pkg;

  localparam int unsigned VL_PA_W      = 52;   // physical address bits
  localparam int unsigned VL_LINE_W    = 512;  // one 64 B cache line
  localparam int unsigned VL_DATA_W    = 504;  // stored part of a line
  localparam int unsigned VL_LADDR_W   = VL_PA_W - 6; // line address PA[51:6]
  localparam int unsigned VL_IDX_W     = 6;    // buffer index (64 entries)
  localparam int unsigned VL_SQI_W     = 6;    // SQI (64 linkTab rows)
  localparam int unsigned VL_SQI_LSB   = 18;   // SQI field starts at PA bit 18
  localparam int unsigned VL_VLRD_ID_W = 4;    // PA[J:N+1], 4 bits as in J=26,N=22
  localparam int unsigned VL_CORE_W    = 4;    // 16 cores

  typedef logic [VL_PA_W-1:0]    vl_pa_t;
  typedef logic [VL_LADDR_W-1:0] vl_laddr_t;
  typedef logic [VL_LINE_W-1:0]  vl_line_t;
  typedef logic [VL_DATA_W-1:0]  vl_data_t;
  typedef logic [VL_IDX_W-1:0]   vl_idx_t;
  typedef logic [VL_SQI_W-1:0]   vl_sqi_t;
  typedef logic [VL_CORE_W-1:0]  vl_core_t;

  // A linked-list pointer: vld=0 is NULL.
  typedef struct packed {
    logic    vld;
    vl_idx_t idx;
  } vl_ptr_t;

  localparam vl_ptr_t VL_NULL = '0;

  // One linkTab row.
  typedef struct packed {
    logic    v;
    vl_ptr_t prod_head;
    vl_ptr_t prod_tail;
    vl_ptr_t cons_head;
    vl_ptr_t cons_tail;
  } vl_ltrow_t;

  // Result code returned to Rs of vl_push / vl_fetch (0 = success).
  typedef enum logic [1:0] {
    VL_OK    = 2'd0,  // accepted
    VL_FULL  = 2'd1,  // no free buffer slot in the VLRD
    VL_NOSQI = 2'd2,  // address does not name an enabled SQI of this VLRD
    VL_NOSEL = 2'd3   // no line selected by a preceding vl_select
  } vl_status_e;

  // Packet from a core to the VLRD. For a push, payload is the line.
  // For a fetch, payload[51:0] is the physical address of the consumer's
  // target line (the paper: the target address is the packet payload).
  typedef struct packed {
    logic     is_push;
    vl_core_t core;
    vl_pa_t   pa;       // device-memory address, carries the SQI
    vl_line_t payload;
  } vl_req_t;

  typedef struct packed {
    vl_core_t   core;
    vl_status_e status;
  } vl_resp_t;

  // Data injection from the VLRD to a consumer's private cache.
  typedef struct packed {
    vl_core_t  core;
    vl_laddr_t tgt;
    vl_line_t  line;
  } vl_inj_t;

  // Control region of a transported line.
  typedef struct packed {
    logic [7:0] rsvd;
    logic [1:0] sz;    // 0 byte, 1 half word, 2 word, 3 double word
    logic [5:0] ptr;   // line-relative offset / head pointer
  } vl_ctrl_t;

  typedef enum logic [1:0] {
    VL_OP_SELECT = 2'd0,
    VL_OP_PUSH   = 2'd1,
    VL_OP_FETCH  = 2'd2
  } vl_op_e;

  // Kind of entry in the address-mapping pipeline.
  typedef enum logic [1:0] {
    VL_MOP_CONS  = 2'd0,  // consumer request from consBuf (CIHR)
    VL_MOP_PROD  = 2'd1,  // producer line from prodBuf IN (PIHR)
    VL_MOP_RETRY = 2'd2   // producer line whose injection was rejected
  } vl_mop_e;

  // Free-slot search used by the free registers (CIFR, PIFR): the lowest
  // free slot at or after `start`, else the lowest free slot overall
  // (the paper: the free register moves to the next free slot and starts
  // over from the first free slot after reaching the bottom). busy has one
  // bit per slot; slots beyond a buffer's depth must be marked busy.
  function automatic vl_ptr_t vl_find_free(logic [2**VL_IDX_W-1:0] busy,
                                           int unsigned start);
    vl_ptr_t lo, hi;
    lo = VL_NULL;
    hi = VL_NULL;
    for (int i = 2**VL_IDX_W - 1; i >= 0; i--) begin
      if (!busy[i]) begin
        lo = '{vld: 1'b1, idx: vl_idx_t'(i)};
        if (i >= int'(start)) hi = '{vld: 1'b1, idx: vl_idx_t'(i)};
      end
    end
    return hi.vld ? hi : lo;
  endfunction

  function automatic vl_ctrl_t vl_line_ctrl(vl_line_t line);
    return vl_ctrl_t'(line[511:496]);
  endfunction

endpackage
