// tb_vl_link_tab: checks reset, enabling and disabling SQIs, pointer writes
// that keep the valid bit, and that a configuration write wins over a
// pointer write to the same row. A reference copy of the table is kept here.
module tb_vl_link_tab;
  import vl_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      cfg_we = 0, cfg_v = 0, wr_en = 0, chk_v;
  vl_sqi_t   cfg_sqi = '0, rd_sqi = '0, chk_sqi = '0, wr_sqi = '0;
  vl_ltrow_t rd_row, wr_row = '0;

  vl_link_tab #(.NUM_SQI(64)) dut (.*);

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

  vl_ltrow_t model [64];

  function automatic vl_ptr_t rp();
    return '{vld: 1'($urandom), idx: vl_idx_t'($urandom)};
  endfunction

  initial begin
    for (int i = 0; i < 64; i++) model[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      rd_sqi = vl_sqi_t'(i); chk_sqi = vl_sqi_t'(i);
      #1;
      check(rd_row == '0 && !chk_v, "row cleared by reset");
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      cfg_we  = ($urandom % 5) == 0;
      cfg_sqi = vl_sqi_t'($urandom);
      cfg_v   = 1'($urandom);
      wr_en   = ($urandom % 2) == 0;
      wr_sqi  = (n % 7 == 0) ? cfg_sqi : vl_sqi_t'($urandom);
      wr_row  = '{v: 1'($urandom), prod_head: rp(), prod_tail: rp(), cons_head: rp(), cons_tail: rp()};
      rd_sqi  = vl_sqi_t'($urandom);
      chk_sqi = vl_sqi_t'($urandom);
      #1;
      check(rd_row == model[rd_sqi], "row read matches reference");
      check(chk_v == model[chk_sqi].v, "valid bit read matches reference");
      @(posedge clk);
      if (wr_en) begin
        model[wr_sqi].prod_head = wr_row.prod_head;
        model[wr_sqi].prod_tail = wr_row.prod_tail;
        model[wr_sqi].cons_head = wr_row.cons_head;
        model[wr_sqi].cons_tail = wr_row.cons_tail;
      end
      if (cfg_we) model[cfg_sqi] = '{v: cfg_v, default: '0};
    end
    @(negedge clk);
    cfg_we = 0; wr_en = 0;
    for (int i = 0; i < 64; i++) begin
      rd_sqi = vl_sqi_t'(i);
      #1;
      check(rd_row == model[i], "final table matches reference");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
