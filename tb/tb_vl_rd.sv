// tb_vl_rd: self-checking test of the Virtual-Link routing device.
//
// 1. Random traffic: pushes and fetches on 8 enabled SQIs from random
//    cores, one packet per cycle at most, with random stalls on the
//    injection port. A scoreboard keeps, per SQI, the accepted lines and the
//    accepted requests in arrival order; every injection must carry the
//    oldest outstanding line of its SQI to the oldest outstanding request.
//    Each packet's response must arrive the next cycle. Afterwards no SQI may
//    hold both an unserved line and an unserved request.
// 2. Latency: with the device idle, a fetch that finds a line waiting is
//    presented on the injection port 4 cycles after it is accepted.
// 3. Full: 64 pushes to an SQI without consumers fill prodBuf; the 65th is
//    refused with VL_FULL. Likewise consBuf with fetches.
// 4. Bad address: a packet to a disabled SQI or to another VLRD id gets
//    VL_NOSQI.
// 5. Rejection: a rejected line is offered again before newer lines of the
//    same SQI.
module tb_vl_rd;
  import vl_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic     cfg_we = 0, cfg_v = 0;
  vl_sqi_t  cfg_sqi = '0;
  logic     req_valid = 0;
  vl_req_t  req = '0;
  logic     resp_valid;
  vl_resp_t resp;
  logic     inj_valid;
  vl_inj_t  inj;
  logic     inj_ack = 0, inj_nack = 0;
  logic     pb_full, cb_full, ev_vld, ev_hit;
  vl_mop_e  ev_op;

  vl_rd dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %0t: %s", $time, what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam vl_pa_t BASE = vl_pa_t'(52'h20) << 28;
  function automatic vl_pa_t qaddr(int sqi, int vlrd = 0);
    return BASE | (vl_pa_t'(vlrd) << 24) | (vl_pa_t'(sqi) << 18) | vl_pa_t'(($urandom % 64) << 6);
  endfunction

  // scoreboard: lines and targets are tagged with their SQI in the low bits
  vl_data_t  exp_data [8][$];
  vl_laddr_t exp_tgt  [8][$];
  vl_core_t  exp_core [8][$];
  int delivered = 0;
  bit ack_random = 1;
  bit scoreboard_on = 1;

  // pending packet, to learn its response a cycle later
  bit        pend;
  vl_req_t   pend_req;

  task automatic send(bit is_push, int sqi, vl_data_t d, vl_laddr_t t, vl_core_t c, int vlrd = 0);
    // driven at a falling edge, held for exactly one rising edge
    @(negedge clk);
    req_valid   = 1'b1;
    req.is_push = is_push;
    req.core    = c;
    req.pa      = qaddr(sqi, vlrd);
    req.payload = is_push ? VL_LINE_W'(d) : VL_LINE_W'({t, 6'b0});
    @(posedge clk);
    #2;
    req_valid = 1'b0;
  endtask

  // response checker and scoreboard update
  always @(posedge clk) begin
    if (rst_n) begin
      if (pend) begin
        check(resp_valid && resp.core == pend_req.core, "response one cycle after packet");
        if (scoreboard_on && resp.status == VL_OK) begin
          int s;
          s = int'(pend_req.pa[23:18]);
          if (pend_req.is_push) exp_data[s].push_back(pend_req.payload[VL_DATA_W-1:0]);
          else begin
            exp_tgt[s].push_back(pend_req.payload[VL_PA_W-1:6]);
            exp_core[s].push_back(pend_req.core);
          end
        end
      end
      pend     <= req_valid;
      pend_req <= req;
    end else pend <= 0;
  end

  // injection port: random stalls, scoreboard check
  always @(negedge clk) begin
    if (ack_random) inj_ack <= ($urandom % 4) != 0;
  end
  always @(posedge clk) begin
    if (rst_n && scoreboard_on && inj_valid && inj_ack) begin
      int s;
      s = int'(inj.tgt[2:0]);
      delivered++;
      if (exp_tgt[s].size() == 0 || exp_data[s].size() == 0) check(0, "injection with nothing expected");
      else begin
        vl_laddr_t t;
        vl_data_t  d;
        vl_core_t  c;
        t = exp_tgt[s].pop_front();
        d = exp_data[s].pop_front();
        c = exp_core[s].pop_front();
        check(inj.tgt == t, "injection goes to oldest request of its SQI");
        check(inj.core == c, "injection goes to the requesting core");
        check(inj.line == {8'h00, d}, "injection carries oldest line of its SQI");
      end
    end
  end

  int n_full_p = 0, n_full_c = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  bit inout_seen [64] = '{default: 0};
  always @(posedge clk) begin
    if (dut.out_app_en) begin
      check(dut.u_prod_buf.valid[dut.out_app_idx] && !inout_seen[dut.out_app_idx],
            "a mapped line is a live slot not already waiting in OUT");
      inout_seen[dut.out_app_idx] = 1;
    end
    if (dut.pout_pop) inout_seen[dut.pout_head.idx] = 0;
  end
  initial begin
    int seq = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // enable SQIs 0..7 and 20
    for (int s = 0; s < 8; s++) begin
      cfg_we <= 1; cfg_sqi <= vl_sqi_t'(s); cfg_v <= 1;
      @(posedge clk);
    end
    cfg_sqi <= 20; @(posedge clk);
    cfg_we <= 0;

    // ---- 1. random traffic
    for (int n = 0; n < 4000; n++) begin
      if (($urandom % 10) < 7) begin
        int s;
        vl_data_t d;
        s = $urandom % 8;
        seq++;
        d = {$urandom, $urandom, $urandom};
        d[15:0] = 16'(seq);
        d[18:16] = 3'(s);
        // bias each SQI toward balance: with both buffers shared, a full
        // prodBuf of unrequested lines next to a full consBuf of requests
        // for other SQIs cannot drain by itself
        send(($urandom % 10) < ((exp_data[s].size() <= exp_tgt[s].size()) ? 7 : 3), s, d, {VL_LADDR_W'(seq), 3'(s)}, vl_core_t'($urandom), 0);
      end else @(posedge clk);
    end
    // drain: fetch or push until every SQI is balanced
    for (int s = 0; s < 8; s++) begin
      repeat (4) @(posedge clk);
      while (exp_data[s].size() > exp_tgt[s].size()) begin
        seq++;
        send(0, s, '0, {VL_LADDR_W'(seq), 3'(s)}, '0);
        repeat (2) @(posedge clk);
      end
      while (exp_tgt[s].size() > exp_data[s].size()) begin
        vl_data_t d;
        seq++;
        d = '0; d[15:0] = 16'(seq); d[18:16] = 3'(s);
        send(1, s, d, '0, '0);
        repeat (2) @(posedge clk);
      end
    end
    repeat (200) @(posedge clk);
    for (int s = 0; s < 8; s++)
      check(exp_data[s].size() == 0 && exp_tgt[s].size() == 0, $sformatf("SQI %0d drained ", s));
    check(delivered > 300, $sformatf("random traffic delivered %0d lines", delivered));
    check(!dut.u_prod_buf.valid && !dut.u_cons_buf.valid, "all buffer slots free after drain");

    // ---- 2. latency of a fetch that finds data waiting
    ack_random = 0;
    inj_ack <= 0;
    begin
      vl_data_t d;
      int t0, t1;
      d = '0; d[18:16] = 3'd5; d[15:0] = 16'hbeef;
      send(1, 5, d, '0, '0);
      repeat (10) @(posedge clk);
      check(!inj_valid, "no injection without a request");
      send(0, 5, '0, {VL_LADDR_W'(77), 3'd5}, 4'd9);
      // the packet was on the port in the cycle ending at the edge that
      // made cyc = t0; the line must be offered 4 cycles after that cycle
      t0 = cyc;
      while (!inj_valid) @(negedge clk);
      t1 = cyc;
      check(t1 - t0 + 1 == 4, $sformatf("fetch-to-injection latency %0d cycles (expect 4)", t1 - t0 + 1));
      inj_ack <= 1; @(posedge clk); #1; inj_ack <= 0;
      // the other direction: request waits, push arrives
      send(0, 6, '0, {VL_LADDR_W'(78), 3'd6}, 4'd3);
      repeat (10) @(posedge clk);
      d[18:16] = 3'd6;
      send(1, 6, d, '0, '0);
      t0 = cyc;
      while (!inj_valid) @(negedge clk);
      t1 = cyc;
      check(t1 - t0 + 1 == 4, $sformatf("push-to-injection latency %0d cycles (expect 4)", t1 - t0 + 1));
      inj_ack <= 1; @(posedge clk); #1; inj_ack <= 0;
      repeat (3) @(posedge clk);
    end

    // ---- 3. full buffers (SQI 20 has no consumers)
    scoreboard_on = 0;
    for (int n = 0; n < 65; n++) begin
      send(1, 20, vl_data_t'(n), '0, '0);
      @(negedge clk);
      if (n < 64) check(resp.status == VL_OK, "push accepted while prodBuf has room");
      else        check(resp.status == VL_FULL && pb_full, "65th push refused: prodBuf full");
    end
    // drain SQI 20 with 64 fetches; 65th fetch waits, then 64 more fill consBuf
    for (int n = 0; n < 64; n++) begin
      send(0, 20, '0, VL_LADDR_W'(n), '0);
      @(negedge clk);
      check(resp.status == VL_OK, "fetch accepted");
    end
    inj_ack <= 1;
    repeat (80) @(posedge clk);
    check(!pb_full && !dut.u_prod_buf.valid, "prodBuf empty after draining");
    for (int n = 0; n < 65; n++) begin
      send(0, 20, '0, VL_LADDR_W'(n), '0);
      @(negedge clk);
      if (n < 64) check(resp.status == VL_OK, "fetch accepted while consBuf has room");
      else        check(resp.status == VL_FULL && cb_full, "65th fetch refused: consBuf full");
    end
    for (int n = 0; n < 64; n++) send(1, 20, vl_data_t'(n), '0, '0);
    repeat (80) @(posedge clk);
    check(!dut.u_cons_buf.valid && !dut.u_prod_buf.valid, "both buffers empty again");
    inj_ack <= 0;

    // ---- 4. bad addresses
    send(1, 9, '0, '0, '0);
    @(negedge clk);
    check(resp.status == VL_NOSQI, "push to disabled SQI refused");
    send(0, 3, '0, '0, '0, 2);
    @(negedge clk);
    check(resp.status == VL_NOSQI, "fetch to another VLRD refused");

    // ---- 5. rejection keeps order
    send(1, 4, vl_data_t'(100), '0, '0);
    send(1, 4, vl_data_t'(101), '0, '0);
    send(0, 4, '0, VL_LADDR_W'(1), 4'd1);
    while (!inj_valid) @(posedge clk);
    @(negedge clk);
    check(inj.line[VL_DATA_W-1:0] == 100, "first line offered first");
    inj_nack <= 1; @(posedge clk); #1; inj_nack <= 0;
    @(negedge clk);
    check(!inj_valid, "port held while the rejected line re-enters the pipeline");
    repeat (6) @(posedge clk);
    check(!inj_valid, "rejected line waits for a new request");
    send(0, 4, '0, VL_LADDR_W'(2), 4'd2);
    while (!inj_valid) @(posedge clk);
    @(negedge clk);
    check(inj.line[VL_DATA_W-1:0] == 100 && inj.tgt == 2, "rejected line delivered before newer line");
    inj_ack <= 1; @(posedge clk); #1; inj_ack <= 0;
    send(0, 4, '0, VL_LADDR_W'(3), 4'd3);
    while (!inj_valid) @(posedge clk);
    @(negedge clk);
    check(inj.line[VL_DATA_W-1:0] == 101 && inj.tgt == 3, "newer line follows");
    inj_ack <= 1; @(posedge clk); #1; inj_ack <= 0;
    repeat (5) @(posedge clk);
    check(!dut.u_cons_buf.valid && !dut.u_prod_buf.valid, "buffers empty at end");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
