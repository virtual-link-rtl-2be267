// tb_vl_cons_buf: directed test of consBuf with 8 slots: slot order chosen
// by CIFR (moving forward, wrapping to the first free slot), full flag,
// arrival-order input list (CIHR/CITR/nextIn) including a pop and an append
// in one cycle, consTgt/core reads, nextL reset on allocation and writes.
module tb_vl_cons_buf;
  import vl_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic      alloc_en = 0, full, cin_pop = 0, nl_we = 0, free_en = 0;
  vl_sqi_t   alloc_sqi = '0, cin_sqi;
  vl_laddr_t alloc_tgt = '0, tgt_rd;
  vl_core_t  alloc_core = '0, core_rd;
  vl_ptr_t   cin_head, nl_rd, nl_wr_val = '0;
  vl_idx_t   tgt_rd_idx = '0, nl_rd_idx = '0, nl_wr_idx = '0, free_idx = '0;
  logic [7:0] valid;

  vl_cons_buf #(.DEPTH(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one cycle: inputs set at the falling edge, applied at the rising edge
  task automatic step(bit a, int sqi, bit pop, bit fr = 0, int fidx = 0);
    @(negedge clk);
    alloc_en = a; alloc_sqi = vl_sqi_t'(sqi); alloc_tgt = vl_laddr_t'(1000 + sqi);
    alloc_core = vl_core_t'(sqi); cin_pop = pop; free_en = fr; free_idx = vl_idx_t'(fidx);
    @(posedge clk);
    #1;
    alloc_en = 0; cin_pop = 0; free_en = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(!full && !cin_head.vld && valid == 0, "empty after reset");
    // fill: slots taken in order 0..7
    for (int i = 0; i < 8; i++) begin
      check(dut.cifr.vld && dut.cifr.idx == vl_idx_t'(i), $sformatf("CIFR at slot %0d", i));
      step(1, 10 + i, 0);
    end
    check(full && valid == 8'hFF, "full after 8 requests");
    // input list holds them in arrival order; consTgt and core readable
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      check(cin_head.vld && cin_head.idx == vl_idx_t'(i) && cin_sqi == vl_sqi_t'(10 + i),
            $sformatf("input list entry %0d in order", i));
      tgt_rd_idx = vl_idx_t'(i); nl_rd_idx = vl_idx_t'(i);
      #1;
      check(tgt_rd == vl_laddr_t'(1010 + i) && core_rd == vl_core_t'(10 + i), "consTgt and core stored");
      check(!nl_rd.vld, "nextL cleared on allocation");
      step(0, 0, 1);
    end
    check(!cin_head.vld && full, "input list empty, slots still held");
    // free 3 and 5: CIFR finds 3 first, then 5 (moving forward)
    step(0, 0, 0, 1, 3);
    step(0, 0, 0, 1, 5);
    check(!full && dut.cifr.idx == 3, "CIFR restarts at first free slot");
    step(1, 30, 0);
    check(dut.cifr.idx == 5, "CIFR moves on to next free slot");
    // free 1 while CIFR is at 5: 5 is used before wrapping to 1
    step(0, 0, 0, 1, 1);
    check(dut.cifr.idx == 5, "CIFR does not jump back");
    step(1, 31, 0);
    check(dut.cifr.idx == 1, "CIFR wraps to first free slot after the bottom");
    // list: 3 then 5; pop head and append new entry (slot 1) in one cycle
    check(cin_head.idx == 3 && dut.citr.idx == 5, "list 3 -> 5");
    step(1, 32, 1);
    check(cin_head.idx == 5 && dut.citr.idx == 1, "pop and append in one cycle");
    step(0, 0, 1);
    check(full, "full again");
    step(1, 33, 1);  // last entry popped; the arrival is refused (full)
    check(!cin_head.vld && !dut.citr.vld && full, "refused allocation does not enter the list");
    // pop of the only entry while another arrives
    step(0, 0, 0, 1, 6);
    step(1, 34, 0);
    step(0, 0, 0, 1, 2);
    step(1, 35, 1);
    check(cin_head.vld && cin_head.idx == 2 && dut.citr.idx == 2, "single entry replaced by new arrival");
    // nextL write / read
    @(negedge clk);
    nl_we = 1; nl_wr_idx = 6; nl_wr_val = '{vld: 1'b1, idx: 3'd2};
    @(posedge clk); #1; nl_we = 0;
    nl_rd_idx = 6;
    #1;
    check(nl_rd.vld && nl_rd.idx == 2, "nextL written");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
