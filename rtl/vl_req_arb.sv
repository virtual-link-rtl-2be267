// vl_req_arb: round-robin merge of the cores' Virtual-Link packets into the
// routing device's single network port.
//
// The paper attaches the VLRD to the coherence network through one port that
// accepts one packet per clock cycle; the network itself is not part of the
// design. This module is the minimal stand-in for the network's delivery to
// that port: each cycle it grants one requesting core, starting the search
// after the core granted last, and forwards its packet with no added
// latency. in_ready[i] is high in the cycle core i's packet is taken.
module vl_req_arb
  import vl_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid [N],
  input  vl_req_t in_req   [N],
  output logic    in_ready [N],
  output logic    out_valid,
  output vl_req_t out_req
);
  localparam int unsigned W = (N > 1) ? $clog2(N) : 1;

  logic [W-1:0] last, grant;
  logic         any;

  always_comb begin
    any   = 1'b0;
    grant = '0;
    for (int k = N; k >= 1; k--) begin
      int unsigned i;
      i = (int'(last) + k) % N;
      if (in_valid[i]) begin
        any   = 1'b1;
        grant = W'(i);
      end
    end
    for (int i = 0; i < N; i++) in_ready[i] = any && (grant == W'(i));
    out_valid = any;
    out_req   = in_req[grant];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   last <= W'(N - 1);
    else if (any) last <= grant;
  end
endmodule
