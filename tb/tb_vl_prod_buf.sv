// tb_vl_prod_buf: random test of prodBuf (8 slots) against a reference
// model kept here: free-slot choice by PIFR, the IN list order, the OUT list
// order with its mapped/consTgt/core fields, line data, nextL writes and
// slot release. Allocation, IN pop, OUT append, OUT pop and release happen
// in random combinations, including all in one cycle.
module tb_vl_prod_buf;
  import vl_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      alloc_en = 0, full, pin_pop = 0, nl_we = 0, out_app_en = 0, pout_pop = 0, free_en = 0;
  vl_sqi_t   alloc_sqi = '0, pin_sqi, pout_sqi;
  vl_data_t  alloc_data = '0, pout_data;
  vl_ptr_t   pin_head, nl_rd, nl_wr_val = '0, pout_head;
  vl_idx_t   nl_rd_idx = '0, nl_wr_idx = '0, out_app_idx = '0, out_app_mapped = '0, pout_mapped, free_idx = '0;
  vl_laddr_t out_app_tgt = '0, pout_tgt;
  vl_core_t  out_app_core = '0, pout_core;
  logic [7:0] valid;

  vl_prod_buf #(.DEPTH(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model
  bit        m_valid [8];
  int        m_fr;             // free register, -1 = none
  int        in_q[$], mid_q[$], out_q[$], done_q[$];
  vl_data_t  m_data [8];
  vl_sqi_t   m_sqi  [8];
  vl_idx_t   m_map  [8];
  vl_laddr_t m_tgt  [8];
  vl_ptr_t   m_nl   [8];

  function automatic int next_free(int start);
    for (int i = start; i < 8; i++) if (!m_valid[i]) return i;
    for (int i = 0; i < 8; i++) if (!m_valid[i]) return i;
    return -1;
  endfunction

  int n_out = 0, n_both = 0;
  initial begin
    for (int i = 0; i < 8; i++) begin m_valid[i] = 0; m_nl[i] = '0; end
    m_fr = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      bit a, pp, oa, op, fr, nw;
      int oa_i, fr_i, nw_i;
      @(negedge clk);
      // compare outputs with the model
      check(full == (m_fr < 0), "full flag");
      check(pin_head.vld == (in_q.size() > 0), "IN list empty flag");
      if (in_q.size() > 0) check(pin_head.idx == in_q[0] && pin_sqi == m_sqi[in_q[0]], "IN head in arrival order");
      check(pout_head.vld == (out_q.size() > 0), "OUT list empty flag");
      if (out_q.size() > 0)
        check(pout_head.idx == out_q[0] && pout_data == m_data[out_q[0]] && pout_sqi == m_sqi[out_q[0]]
              && pout_mapped == m_map[out_q[0]] && pout_tgt == m_tgt[out_q[0]], "OUT head and fields");
      for (int i = 0; i < 8; i++) check(valid[i] == m_valid[i], "slot valid bits");
      nl_rd_idx = vl_idx_t'($urandom % 8);
      #1;
      check(nl_rd == m_nl[nl_rd_idx], "nextL read");
      // random operations
      a  = ($urandom % 3) != 0 && m_fr >= 0;
      pp = ($urandom % 2) && in_q.size() > 0;
      oa = ($urandom % 2) && mid_q.size() > 0;
      op = ($urandom % 2) && out_q.size() > 0;
      fr = ($urandom % 2) && done_q.size() > 0;
      nw = ($urandom % 3) == 0;
      oa_i = oa ? mid_q[0] : 0;
      fr_i = fr ? done_q[0] : 0;
      nw_i = $urandom % 8;
      if (a && pp && oa && op) n_both++;
      alloc_en = a; alloc_sqi = vl_sqi_t'($urandom); alloc_data = {$urandom, $urandom, $urandom, $urandom};
      pin_pop = pp;
      out_app_en = oa; out_app_idx = vl_idx_t'(oa_i); out_app_mapped = vl_idx_t'($urandom);
      out_app_tgt = vl_laddr_t'({$urandom, $urandom}); out_app_core = vl_core_t'($urandom);
      pout_pop = op;
      free_en = fr; free_idx = vl_idx_t'(fr_i);
      nl_we = nw; nl_wr_idx = vl_idx_t'(nw_i); nl_wr_val = '{vld: 1'($urandom), idx: vl_idx_t'($urandom)};
      @(posedge clk);
      // model update
      if (pp) mid_q.push_back(in_q.pop_front());
      if (op) done_q.push_back(out_q.pop_front());
      if (oa) begin
        void'(mid_q.pop_front());
        out_q.push_back(oa_i);
        m_map[oa_i] = out_app_mapped; m_tgt[oa_i] = out_app_tgt;
        n_out++;
      end
      if (fr) begin void'(done_q.pop_front()); m_valid[fr_i] = 0; end
      if (a) begin
        int s;
        s = m_fr;
        m_valid[s] = 1; m_data[s] = alloc_data; m_sqi[s] = alloc_sqi; m_nl[s] = '0;
        in_q.push_back(s);
        m_fr = next_free(s + 1);
      end else m_fr = next_free(m_fr < 0 ? 0 : m_fr);
      if (nw) m_nl[nw_i] = nl_wr_val;  // a LINK write wins over the clear on allocation
      #1;
      alloc_en = 0; pin_pop = 0; out_app_en = 0; pout_pop = 0; free_en = 0; nl_we = 0;
    end
    check(n_out > 500 && n_both > 20, "enough traffic and overlapping operations");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
