// vl_top: a Virtual-Link system of N_CORES cores sharing one routing device.
//
// Each core has a vl_isa_unit (selection register, vl_push/vl_fetch packet
// generation, Rs results). Their packets are merged round-robin into the
// VLRD's single port (vl_req_arb), and the VLRD's one-cycle responses are
// returned to the core named in them. Lines matched by the VLRD leave on the
// injection port toward the consumer's private cache; the caches, which hold
// the "pushable" tag bit and decide whether an injection is accepted, and
// the coherence network itself are outside this design, so the injection
// handshake, the pushable/zero-line requests and the line read for a push
// are ports of this module.
//
// Defaults are the evaluated configuration: 16 cores, 64 linkTab rows and
// 64 entries in each of prodBuf and consBuf. The network's transfer latency
// (about 14 cycles to reach the VLRD in the paper's system) is not modelled:
// a granted packet reaches the VLRD in the same cycle.
module vl_top
  import vl_pkg::*;
#(
  parameter int unsigned N_CORES  = 16,
  parameter int unsigned NUM_SQI  = 64,
  parameter int unsigned PB_DEPTH = 64,
  parameter int unsigned CB_DEPTH = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  // SQI set-up by system software
  input  logic       cfg_we,
  input  vl_sqi_t    cfg_sqi,
  input  logic       cfg_v,
  // per-core instruction interface
  input  logic       op_valid          [N_CORES],
  input  vl_op_e     op                [N_CORES],
  input  vl_pa_t     op_pa             [N_CORES],
  input  vl_line_t   op_line           [N_CORES],
  output logic       op_ready          [N_CORES],
  input  logic       ctx_swap          [N_CORES],
  output logic       no_swap           [N_CORES],
  output logic       sel_valid         [N_CORES],
  output vl_laddr_t  sel_laddr         [N_CORES],
  output logic       rs_valid          [N_CORES],
  output vl_status_e rs                [N_CORES],
  // per-core private-cache requests
  output logic       l1_pushable_valid [N_CORES],
  output vl_laddr_t  l1_pushable_laddr [N_CORES],
  output logic       l1_zero_valid     [N_CORES],
  output vl_laddr_t  l1_zero_laddr     [N_CORES],
  // injections into consumers' private caches
  output logic       inj_valid,
  output vl_inj_t    inj,
  input  logic       inj_ack,
  input  logic       inj_nack,
  // status and pipeline events
  output logic       pb_full,
  output logic       cb_full,
  output logic       ev_vld,
  output vl_mop_e    ev_op,
  output logic       ev_hit
);
  logic     nreq_valid [N_CORES];
  vl_req_t  nreq       [N_CORES];
  logic     nreq_ready [N_CORES];
  logic     req_valid, resp_valid;
  vl_req_t  req;
  vl_resp_t resp;

  for (genvar i = 0; i < N_CORES; i++) begin : g_core
    vl_isa_unit #(.CORE_ID(vl_core_t'(i))) u_isa (
      .clk, .rst_n,
      .op_valid(op_valid[i]), .op(op[i]), .op_pa(op_pa[i]), .op_line(op_line[i]),
      .op_ready(op_ready[i]), .ctx_swap(ctx_swap[i]), .no_swap(no_swap[i]),
      .sel_valid(sel_valid[i]), .sel_laddr(sel_laddr[i]),
      .rs_valid(rs_valid[i]), .rs(rs[i]),
      .net_req_valid(nreq_valid[i]), .net_req(nreq[i]), .net_req_ready(nreq_ready[i]),
      .net_resp_valid(resp_valid && resp.core == vl_core_t'(i)), .net_resp(resp.status),
      .l1_pushable_valid(l1_pushable_valid[i]), .l1_pushable_laddr(l1_pushable_laddr[i]),
      .l1_zero_valid(l1_zero_valid[i]), .l1_zero_laddr(l1_zero_laddr[i])
    );
  end

  vl_req_arb #(.N(N_CORES)) u_arb (
    .clk, .rst_n,
    .in_valid(nreq_valid), .in_req(nreq), .in_ready(nreq_ready),
    .out_valid(req_valid), .out_req(req)
  );

  vl_rd #(.NUM_SQI(NUM_SQI), .PB_DEPTH(PB_DEPTH), .CB_DEPTH(CB_DEPTH)) u_vlrd (
    .clk, .rst_n,
    .cfg_we, .cfg_sqi, .cfg_v,
    .req_valid, .req, .resp_valid, .resp,
    .inj_valid, .inj, .inj_ack, .inj_nack,
    .pb_full, .cb_full, .ev_vld, .ev_op, .ev_hit
  );
endmodule
