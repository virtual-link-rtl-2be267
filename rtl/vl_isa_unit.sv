// vl_isa_unit: per-core support for the three Virtual-Link instructions.
//
//   vl_select Rt    : latches the physical address of the user-space line
//                     named by Rt (already translated by the core's MMU) in
//                     a selection register that only vl_push/vl_fetch read.
//   vl_push Rs, Rt  : sends the selected line to the VLRD device address Rt
//                     as a push packet. Rs gets 0 on success, non-zero when
//                     nothing was selected or the VLRD refused the line. On
//                     success the core's line is zeroed (l1_zero_*).
//   vl_fetch Rs, Rt : marks the selected line "pushable" in the private cache
//                     (l1_pushable_*) and registers it with the VLRD device
//                     address Rt as a fetch packet whose payload is the line's
//                     physical address. Rs as for vl_push.
// vl_push and vl_fetch end the selection; so does a context swap
// (ctx_swap). A counter of pushes in flight is exported as no_swap: while it
// is non-zero the core must not take an interrupt or context swap, as in the
// paper's in-flight system register. These behaviours follow the paper.
//
// This design's own choices: one vl_push/vl_fetch is outstanding at a time
// (op_ready low until its result is back); the line data of a push is
// supplied with the instruction by the core's L1 (op_line), read at sel_laddr;
// the result code of a refused instruction is kept in Rs so software can tell
// why it failed. Rs is returned one cycle after a failure without a
// selection, else one cycle after the VLRD's response.
module vl_isa_unit
  import vl_pkg::*;
#(
  parameter vl_core_t CORE_ID = '0
) (
  input  logic      clk,
  input  logic      rst_n,
  // instruction issue
  input  logic      op_valid,
  input  vl_op_e    op,
  input  vl_pa_t    op_pa,
  input  vl_line_t  op_line,
  output logic      op_ready,
  input  logic      ctx_swap,
  output logic      no_swap,
  // selection register, read by the L1 to supply the line of a push
  output logic      sel_valid,
  output vl_laddr_t sel_laddr,
  // Rs write-back
  output logic      rs_valid,
  output vl_status_e rs,
  // coherence-network side
  output logic      net_req_valid,
  output vl_req_t   net_req,
  input  logic      net_req_ready,
  input  logic      net_resp_valid,
  input  vl_status_e net_resp,
  // private-cache side
  output logic      l1_pushable_valid,
  output vl_laddr_t l1_pushable_laddr,
  output logic      l1_zero_valid,
  output vl_laddr_t l1_zero_laddr
);
  typedef enum logic [1:0] {S_IDLE, S_SEND, S_WAIT} state_e;

  state_e     state;
  logic       pend_push;
  vl_laddr_t  pend_laddr;
  logic [3:0] push_inflight;

  assign op_ready = (state == S_IDLE);
  assign no_swap  = (push_inflight != '0);
  assign net_req_valid = (state == S_SEND);

  logic issue;
  assign issue = op_valid && op_ready && (op == VL_OP_PUSH || op == VL_OP_FETCH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state             <= S_IDLE;
      sel_valid         <= 1'b0;
      sel_laddr         <= '0;
      pend_push         <= 1'b0;
      pend_laddr        <= '0;
      push_inflight     <= '0;
      rs_valid          <= 1'b0;
      rs                <= VL_OK;
      net_req           <= '0;
      l1_pushable_valid <= 1'b0;
      l1_pushable_laddr <= '0;
      l1_zero_valid     <= 1'b0;
      l1_zero_laddr     <= '0;
    end else begin
      rs_valid          <= 1'b0;
      l1_pushable_valid <= 1'b0;
      l1_zero_valid     <= 1'b0;
      case (state)
        S_IDLE: begin
          if (op_valid && op == VL_OP_SELECT) begin
            sel_valid <= 1'b1;
            sel_laddr <= op_pa[VL_PA_W-1:6];
          end else if (issue) begin
            sel_valid <= 1'b0;
            if (!sel_valid) begin
              rs_valid <= 1'b1;
              rs       <= VL_NOSEL;
            end else begin
              pend_push  <= (op == VL_OP_PUSH);
              pend_laddr <= sel_laddr;
              net_req.is_push <= (op == VL_OP_PUSH);
              net_req.core    <= CORE_ID;
              net_req.pa      <= op_pa;
              net_req.payload <= (op == VL_OP_PUSH) ? op_line
                                 : VL_LINE_W'({sel_laddr, 6'b0});
              if (op == VL_OP_PUSH) push_inflight <= push_inflight + 1'b1;
              else begin
                l1_pushable_valid <= 1'b1;
                l1_pushable_laddr <= sel_laddr;
              end
              state <= S_SEND;
            end
          end
        end
        S_SEND: if (net_req_ready) state <= S_WAIT;
        S_WAIT: if (net_resp_valid) begin
          rs_valid <= 1'b1;
          rs       <= net_resp;
          if (pend_push) begin
            push_inflight <= push_inflight - 1'b1;
            if (net_resp == VL_OK) begin
              l1_zero_valid <= 1'b1;
              l1_zero_laddr <= pend_laddr;
            end
          end
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
      if (ctx_swap) sel_valid <= 1'b0;
    end
  end

  a_no_swap: assert property (@(posedge clk) disable iff (!rst_n)
                              !(ctx_swap && no_swap));
endmodule
