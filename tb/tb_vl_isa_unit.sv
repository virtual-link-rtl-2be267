// tb_vl_isa_unit: random sequences of vl_select, vl_push, vl_fetch and
// context swaps against one ISA unit, with this testbench acting as the
// network (random request-accept delay, random response delay and code).
// Checked: the selection register (set by vl_select, cleared by push,
// fetch and ctx_swap), the packet fields (push carries the line, fetch
// carries the selected line's physical address), NOSEL without a
// selection and no packet sent, the pushable mark on fetch, the zeroing
// strobe only for a successful push, the in-flight counter (no_swap) while
// a push is outstanding, Rs one cycle after the response, and op_ready
// held low while an instruction is outstanding.
module tb_vl_isa_unit;
  import vl_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam vl_core_t CORE = 4'd9;

  logic       op_valid = 0, op_ready, ctx_swap = 0, no_swap, sel_valid;
  vl_op_e     op = VL_OP_SELECT;
  vl_pa_t     op_pa = '0;
  vl_line_t   op_line = '0;
  vl_laddr_t  sel_laddr, l1_pushable_laddr, l1_zero_laddr;
  logic       rs_valid, net_req_valid, net_req_ready = 0, net_resp_valid = 0;
  logic       l1_pushable_valid, l1_zero_valid;
  vl_status_e rs, net_resp = VL_OK;
  vl_req_t    net_req;

  vl_isa_unit #(.CORE_ID(CORE)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // no strobe outside the expected windows
  int n_rs = 0, n_req = 0, n_pushable = 0, n_zero = 0;
  always @(posedge clk) if (rst_n) begin
    if (rs_valid) n_rs++;
    if (net_req_valid && net_req_ready) n_req++;
    if (l1_pushable_valid) n_pushable++;
    if (l1_zero_valid) n_zero++;
  end

  bit        m_sel = 0;
  vl_laddr_t m_laddr = '0;
  int e_rs = 0, e_req = 0, e_pushable = 0, e_zero = 0;
  int n_nosel = 0, n_push_ok = 0, n_fetch = 0, n_swap_clear = 0, n_inflight = 0;

  task automatic issue(vl_op_e o, vl_pa_t pa, vl_line_t line);
    @(negedge clk);
    check(op_ready, "op_ready when idle");
    op_valid = 1; op = o; op_pa = pa; op_line = line;
    @(posedge clk); #1 op_valid = 0;
  endtask

  task automatic push_or_fetch(bit is_push);
    vl_pa_t     dev;
    vl_line_t   line;
    vl_status_e st;
    dev  = {24'h20, 4'd0, 6'($urandom), 12'($urandom), 6'd0};
    line = {16{$urandom}};
    issue(is_push ? VL_OP_PUSH : VL_OP_FETCH, dev, line);
    check(!sel_valid, "selection ended by push/fetch");
    if (!m_sel) begin
      check(rs_valid && rs == VL_NOSEL && !net_req_valid, "NOSEL without selection, no packet");
      e_rs++; n_nosel++;
      return;
    end
    m_sel = 0;
    check(net_req_valid && net_req.is_push == is_push && net_req.core == CORE && net_req.pa == dev, "packet header");
    if (is_push) begin
      check(net_req.payload == line, "push payload is the line");
      check(no_swap, "no_swap while a push is in flight");
      n_inflight++;
    end else begin
      check(net_req.payload == VL_LINE_W'({m_laddr, 6'b0}), "fetch payload is the target PA");
      check(l1_pushable_valid && l1_pushable_laddr == m_laddr, "fetch marks the line pushable");
      e_pushable++; n_fetch++;
    end
    // network accepts after a random delay
    repeat ($urandom % 4) begin
      @(negedge clk); check(net_req_valid && !op_ready, "request held until accepted");
    end
    @(negedge clk); net_req_ready = 1;
    @(posedge clk); #1 net_req_ready = 0; e_req++;
    repeat ($urandom % 4) begin
      @(negedge clk); check(!net_req_valid && !op_ready && !rs_valid, "waiting for response");
      if (is_push) check(no_swap, "no_swap until the push response");
    end
    st = vl_status_e'($urandom % 3);
    @(negedge clk); net_resp_valid = 1; net_resp = st;
    @(posedge clk); #1 net_resp_valid = 0;
    check(rs_valid && rs == st, "Rs one cycle after the response");
    e_rs++;
    check(!no_swap && op_ready, "idle again after the response");
    if (is_push && st == VL_OK) begin
      check(l1_zero_valid && l1_zero_laddr == m_laddr, "successful push zeroes the line");
      e_zero++; n_push_ok++;
    end else check(!l1_zero_valid, "no zeroing unless the push succeeded");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int r;
      r = $urandom % 10;
      if (r < 4) begin
        vl_pa_t pa;
        pa = {$urandom, $urandom};
        issue(VL_OP_SELECT, pa, '0);
        m_sel = 1; m_laddr = pa[51:6];
        check(sel_valid && sel_laddr == m_laddr, "vl_select latches the line address");
      end else if (r < 6) push_or_fetch(1);
      else if (r < 8) push_or_fetch(0);
      else if (r < 9) begin
        @(negedge clk); ctx_swap = 1;
        @(posedge clk); #1 ctx_swap = 0;
        if (m_sel) n_swap_clear++;
        m_sel = 0;
        check(!sel_valid, "context swap ends the selection");
      end else repeat ($urandom % 3) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    check(n_rs == e_rs && n_req == e_req && n_pushable == e_pushable && n_zero == e_zero, "strobe counts");
    check(n_nosel > 50 && n_push_ok > 50 && n_fetch > 50 && n_swap_clear > 20 && n_inflight > 50, "all cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
