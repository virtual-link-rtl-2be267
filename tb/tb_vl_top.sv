// tb_vl_top: end-to-end test of the full-size system (16 cores, 64 linkTab
// rows, 64-entry prodBuf and consBuf; vl_top at its default parameters).
//
// Cores 0-7 run producer threads and cores 8-15 consumer threads; this
// testbench models the software (vl_select then vl_push/vl_fetch, retry
// on FULL) and each consumer's private cache: a fetched target line is
// marked pushable, an injection is acked only into a pushable line, and a
// pushable line may be "evicted" (the cache refuses it with a nack and the
// consumer re-fetches it later). SQIs 0-7 carry the traffic; SQI 8 is an
// incast queue (all producers, one consumer); SQI 63 is left disabled.
//
// Phases: (1) consumers only, until consBuf is full and FULL is returned;
// (2) producers only, first matching the waiting requests, then until
// prodBuf is full; (3) consumers only, draining the buffered lines;
// (4) mixed traffic with producers and consumers biased toward balance per
// SQI (shared buffers can otherwise fill with lines and requests of
// different SQIs, which the device cannot resolve by itself); (5) drain.
// Then NOSEL, NOSQI and context-swap cases.
//
// Checked: every accepted line is delivered exactly once, with its data,
// into a pushable target line of a consumer that fetched on the same SQI;
// no line is delivered that was not pushed; Rs codes; the issue-to-Rs
// latency of an instruction alone at the device (measured first with a push
// to the disabled SQI, 2 cycles) is a lower bound for every later one;
// every buffer slot is released at the end (64 lines and 64 requests of two
// fresh SQIs are accepted, the 65th of each gets FULL). Only the top-level
// ports are used. Each mechanism (push/fetch OK, producer and consumer hit
// and miss, FULL for both buffers, NOSEL, NOSQI, nack and retry, port
// contention between cores -- an instruction slower than the uncontended
// round trip -- incast) is counted and a failure is counted for any that
// never happened.
module tb_vl_top;
  import vl_pkg::*;

  localparam int NC = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic       cfg_we = 0, cfg_v = 0;
  vl_sqi_t    cfg_sqi = '0;
  logic       op_valid [NC];
  vl_op_e     op       [NC];
  vl_pa_t     op_pa    [NC];
  vl_line_t   op_line  [NC];
  logic       op_ready [NC], ctx_swap [NC], no_swap [NC], sel_valid [NC], rs_valid [NC];
  vl_laddr_t  sel_laddr [NC], l1_pushable_laddr [NC], l1_zero_laddr [NC];
  vl_status_e rs [NC];
  logic       l1_pushable_valid [NC], l1_zero_valid [NC];
  logic       inj_valid, inj_ack = 0, inj_nack = 0, pb_full, cb_full, ev_vld, ev_hit;
  vl_inj_t    inj;
  vl_mop_e    ev_op;

  vl_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (cycle %0d)", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- shared software / cache state ----------------------
  localparam int NSQ = 9;            // SQIs 0..7 and the incast SQI 8
  localparam int INCAST = 8;
  int pushed_ok [NSQ];               // lines accepted per SQI
  int fetched_ok[NSQ];               // requests accepted per SQI
  int delivered [NSQ];
  int fly_p [NSQ], fly_f [NSQ];      // instructions in flight per SQI
  vl_line_t  line_of [bit [63:0]];   // expected line per unique id
  int        sqi_of  [bit [63:0]];
  int        pushable [NC][vl_laddr_t];  // pushable target -> SQI
  vl_laddr_t refetch  [NC][$];           // evicted targets to fetch again
  int        refetch_sqi [NC][$];
  int        outstanding [NC];

  int c_push_ok = 0, c_fetch_ok = 0, c_pfull = 0, c_cfull = 0, c_nosel = 0, c_nosqi = 0;
  int c_nack = 0, c_ack = 0, c_prod_hit = 0, c_prod_miss = 0, c_cons_hit = 0, c_cons_miss = 0;
  int c_retry = 0, c_contend = 0, c_incast = 0, c_swap = 0;

  function automatic vl_pa_t dev_pa(int s);
    return {24'h20, 4'd0, 6'(s), 12'($urandom), 6'd0};
  endfunction

  // ---------------- per-core instruction driver -----------------------
  int lat0 = 0;      // uncontended issue-to-Rs cycles, measured at start
  int last_lat [NC]; // issue-to-Rs cycles of each core's last instruction
  task automatic exec(int c, vl_op_e o, vl_pa_t pa, vl_line_t line, output vl_status_e st);
    int t0;
    @(negedge clk);
    while (!op_ready[c]) @(negedge clk);
    op_valid[c] = 1; op[c] = o; op_pa[c] = pa; op_line[c] = line;
    @(posedge clk); #1 op_valid[c] = 0;
    st = VL_OK;
    if (o == VL_OP_SELECT) return;
    t0 = cyc;
    while (!rs_valid[c]) @(posedge clk) #1;
    st = rs[c];
    last_lat[c] = cyc - t0;
    // an instruction that reached the device takes lat0 cycles when it meets
    // no other core at the port, longer when it waited for its turn
    if (st != VL_NOSEL && lat0 > 0) begin
      check(cyc - t0 >= lat0, "instruction no faster than the uncontended round trip");
      if (cyc - t0 > lat0) c_contend++;
    end
  endtask

  // phase control
  bit prod_on = 0, cons_on = 0, prod_fill = 0, balance = 0, drain = 0, stop = 0;
  int seq [NC];

  function automatic int pick_prod_sqi(int c);
    int best, bd, d;
    if (c == 0 && ($urandom % 4) == 0) return INCAST;
    best = $urandom % 8; bd = -1000000;
    if (!balance && prod_fill) return best;
    for (int k = 0; k < 8; k++) begin
      int s;
      s = (k + c) % 8;
      d = fetched_ok[s] - pushed_ok[s];
      if (d > bd) begin bd = d; best = s; end
    end
    return best;
  endfunction

  function automatic int pick_cons_sqi(int c);
    int best, bd, d;
    if (c == 15) return INCAST;
    best = $urandom % 8; bd = -1000000;
    if (!balance && !prod_on && pushed_ok[0] == 0) return best;  // phase 1: anything
    for (int k = 0; k < 8; k++) begin
      int s;
      s = (k + c) % 8;
      d = pushed_ok[s] - fetched_ok[s];
      if (d > bd) begin bd = d; best = s; end
    end
    return best;
  endfunction

  task automatic producer(int c);
    vl_status_e st;
    forever begin
      @(negedge clk);
      if (stop) return;
      if (!prod_on) continue;
      begin
        int s;
        vl_line_t l;
        bit [63:0] id;
        s = pick_prod_sqi(c);
        if (drain) begin
          s = -1;
          for (int q = 0; q < NSQ; q++) if (fetched_ok[q] > pushed_ok[q] + fly_p[q]) s = q;
          if (s < 0) continue;
        end
        if (balance && s != INCAST && pushed_ok[s] - fetched_ok[s] > 6) continue;
        if (!balance && !prod_fill && s != INCAST && pushed_ok[s] >= fetched_ok[s]) continue;
        id = {8'(c), 8'(s), 16'hA5A5, 32'(seq[c])};
        l = {{14{$urandom}}, id};
        l[511:504] = 8'h00;
        fly_p[s]++;
        exec(c, VL_OP_SELECT, {20'h1, 8'(c), 24'($urandom)}, '0, st);
        exec(c, VL_OP_PUSH, dev_pa(s), l, st);
        fly_p[s]--;
        if (st == VL_OK) begin
          seq[c]++;
          pushed_ok[s]++; c_push_ok++;
          if (s == INCAST) c_incast++;
          line_of[id] = l; sqi_of[id] = s;
          check(!no_swap[c], "in-flight counter back to zero");
        end else begin
          check(st == VL_FULL, "push refused only with FULL");
          c_pfull++;
          repeat ($urandom % 20) @(negedge clk);
        end
      end
    end
  endtask

  task automatic consumer(int c);
    vl_status_e st;
    forever begin
      @(negedge clk);
      if (stop) return;
      if (!cons_on || outstanding[c] >= 12) continue;
      begin
        int s;
        vl_laddr_t t;
        if (refetch[c].size() > 0) begin
          t = refetch[c][0]; s = refetch_sqi[c][0];
        end else begin
          s = pick_cons_sqi(c);
          if (drain) begin
            s = -1;
            for (int q = 0; q < NSQ; q++) if (pushed_ok[q] > fetched_ok[q] + fly_f[q]) s = q;
            if (s < 0) continue;
          end
          if (balance && s != INCAST && fetched_ok[s] - pushed_ok[s] > 6) continue;
          if (!balance && prod_on == 0 && pushed_ok[0] != 0 && pushed_ok[s] <= fetched_ok[s] && s != INCAST) continue;
          t = {14'h3, 8'(c), 24'(seq[c])};
        end
        fly_f[s]++;
        exec(c, VL_OP_SELECT, {t, 6'h0}, '0, st);
        exec(c, VL_OP_FETCH, dev_pa(s), '0, st);
        fly_f[s]--;
        if (st == VL_OK) begin
          if (refetch[c].size() > 0 && refetch[c][0] == t) begin
            void'(refetch[c].pop_front()); void'(refetch_sqi[c].pop_front());
          end else seq[c]++;
          pushable[c][t] = s;
          outstanding[c]++;
          fetched_ok[s]++; c_fetch_ok++;
        end else begin
          check(st == VL_FULL, "fetch refused only with FULL");
          c_cfull++;
          repeat ($urandom % 20) @(negedge clk);
        end
      end
    end
  endtask

  // ---------------- private caches: injection answers ------------------
  bit evict_on = 0;
  always @(negedge clk) begin
    inj_ack = 0; inj_nack = 0;
    if (rst_n && inj_valid && ($urandom % 4) != 0) begin
      int c;
      bit [63:0] id;
      c  = int'(inj.core);
      id = inj.line[63:0];
      if (pushable[c].exists(inj.tgt) && !(evict_on && ($urandom % 8) == 0)) begin
        inj_ack = 1;
      end else begin
        inj_nack = 1;
        if (pushable[c].exists(inj.tgt)) begin
          // the line was evicted: no longer pushable, software fetches again
          refetch[c].push_back(inj.tgt);
          refetch_sqi[c].push_back(pushable[c][inj.tgt]);
          fetched_ok[pushable[c][inj.tgt]]--;
          pushable[c].delete(inj.tgt);
          outstanding[c]--;
        end
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (inj_valid && inj_ack) begin
      int c;
      bit [63:0] id;
      c  = int'(inj.core);
      id = inj.line[63:0];
      c_ack++;
      check(line_of.exists(id), "delivered line was pushed and not yet delivered");
      if (line_of.exists(id)) begin
        check(inj.line == line_of[id], "delivered data");
        check(pushable[c].exists(inj.tgt) && pushable[c][inj.tgt] == sqi_of[id],
              "delivered into a pushable target fetched on the same SQI");
        delivered[sqi_of[id]]++;
        line_of.delete(id);
        pushable[c].delete(inj.tgt);
        outstanding[c]--;
      end
    end
    if (inj_valid && inj_nack) c_nack++;
    if (ev_vld) begin
      if (ev_op == VL_MOP_PROD &&  ev_hit) c_prod_hit++;
      if (ev_op == VL_MOP_PROD && !ev_hit) c_prod_miss++;
      if (ev_op == VL_MOP_CONS &&  ev_hit) c_cons_hit++;
      if (ev_op == VL_MOP_CONS && !ev_hit) c_cons_miss++;
      if (ev_op == VL_MOP_RETRY) c_retry++;
    end
  end


  task automatic wait_until(ref bit cond, input int max_cyc, input string what);
    int n;
    n = 0;
    while (!cond && n < max_cyc) begin @(negedge clk); n++; end
    check(cond, what);
  endtask

  int pfull0, cfull0;
  initial begin
    vl_status_e st;
    for (int i = 0; i < NC; i++) begin
      op_valid[i] = 0; op[i] = VL_OP_SELECT; op_pa[i] = '0; op_line[i] = '0; ctx_swap[i] = 0;
      seq[i] = 0; outstanding[i] = 0;
    end
    for (int s = 0; s < NSQ; s++) begin fly_p[s] = 0; fly_f[s] = 0; pushed_ok[s] = 0; fetched_ok[s] = 0; delivered[s] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < NSQ; s++) begin
      @(negedge clk); cfg_we = 1; cfg_sqi = vl_sqi_t'(s); cfg_v = 1;
    end
    @(negedge clk); cfg_we = 0;

    // uncontended round trip: one packet to a disabled SQI, nothing else
    // running (issue edge, network send, device response, Rs write-back)
    begin
      exec(2, VL_OP_SELECT, 52'h1_0000_0000, '0, st);
      exec(2, VL_OP_PUSH, dev_pa(63), '0, st);
      lat0 = last_lat[2];
      check(st == VL_NOSQI && lat0 == 2, $sformatf("uncontended push round trip %0d cycles, expected 2", lat0));
    end
    for (int i = 0; i < 8; i++)  fork automatic int k = i; producer(k); join_none
    for (int i = 8; i < NC; i++) fork automatic int k = i; consumer(k); join_none

    // (1) consumers only: consBuf fills
    cons_on = 1;
    while (c_cfull < 10) @(negedge clk);
    check(cb_full, "consBuf full in phase 1");
    cons_on = 0;
    repeat (50) @(negedge clk);
    // (2) producers: match the waiting requests, then fill prodBuf
    prod_on = 1;
    while (c_push_ok < c_fetch_ok) @(negedge clk);
    prod_fill = 1;
    while (c_pfull < 10) @(negedge clk);
    check(pb_full, "prodBuf full in phase 2");
    prod_on = 0; prod_fill = 0;
    repeat (50) @(negedge clk);
    // (3) consumers drain the buffered lines
    cons_on = 1;
    begin
      int n;
      n = 0;
      while (n < 20000) begin
        int tot_p, tot_d;
        tot_p = 0; tot_d = 0;
        for (int s = 0; s < NSQ; s++) begin tot_p += pushed_ok[s]; tot_d += delivered[s]; end
        if (tot_p == tot_d) break;
        @(negedge clk); n++;
      end
    end
    cons_on = 0;
    // (4) mixed, balanced, with evictions
    balance = 1; evict_on = 1; prod_on = 1; cons_on = 1;
    begin
      int a0;
      a0 = c_ack;
      while (c_ack < a0 + 10000) @(negedge clk);
    end
    // (5) drain: producers cover the waiting requests and consumers the
    // buffered lines, no more evictions
    drain = 1; evict_on = 0; cons_on = 1; prod_on = 1;
    begin
      int n;
      n = 0;
      while (n < 40000) begin
        bit done;
        done = 1;
        for (int i = 8; i < NC; i++) if (outstanding[i] != 0 || refetch[i].size() != 0) done = 0;
        if (done && line_of.size() == 0) break;
        @(negedge clk); n++;
      end
    end
    stop = 1; prod_on = 0; cons_on = 0;
    repeat (100) @(negedge clk);
    check(line_of.size() == 0, $sformatf("all accepted lines delivered (%0d left)", line_of.size()));
    for (int i = 8; i < NC; i++) check(outstanding[i] == 0, "no consumer request left waiting");
    check(!pb_full && !cb_full, "buffers not full after the drain");

    // every slot was released: 64 lines and 64 requests of two new SQIs
    // (without partners) are accepted, the 65th of each is refused
    @(negedge clk); cfg_we = 1; cfg_sqi = 40; cfg_v = 1;
    @(negedge clk); cfg_sqi = 41;
    @(negedge clk); cfg_we = 0;
    for (int k = 0; k < 65; k++) begin
      exec(0, VL_OP_SELECT, 52'h1_0000_0000, '0, st);
      exec(0, VL_OP_PUSH, dev_pa(40), {8'h00, 504'(k)}, st);
      check(st == (k < 64 ? VL_OK : VL_FULL), $sformatf("prodBuf slot %0d free after the run", k));
      exec(8, VL_OP_SELECT, {14'h7, 32'(k), 6'h0}, '0, st);
      exec(8, VL_OP_FETCH, dev_pa(41), '0, st);
      check(st == (k < 64 ? VL_OK : VL_FULL), $sformatf("consBuf slot %0d free after the run", k));
    end

    // NOSEL, NOSQI (disabled SQI and another device's id), ctx_swap
    exec(3, VL_OP_PUSH, dev_pa(1), '0, st);
    check(st == VL_NOSEL, "push without selection -> NOSEL"); if (st == VL_NOSEL) c_nosel++;
    exec(9, VL_OP_FETCH, dev_pa(1), '0, st);
    check(st == VL_NOSEL, "fetch without selection -> NOSEL"); if (st == VL_NOSEL) c_nosel++;
    exec(3, VL_OP_SELECT, 52'h1_0000_0000, '0, st);
    exec(3, VL_OP_PUSH, dev_pa(63), '0, st);
    check(st == VL_NOSQI, "disabled SQI -> NOSQI"); if (st == VL_NOSQI) c_nosqi++;
    exec(3, VL_OP_SELECT, 52'h1_0000_0000, '0, st);
    exec(3, VL_OP_PUSH, {24'h20, 4'd5, 6'd1, 18'd0}, '0, st);
    check(st == VL_NOSQI, "other VLRD id -> NOSQI"); if (st == VL_NOSQI) c_nosqi++;
    exec(4, VL_OP_SELECT, 52'h1_0000_0040, '0, st);
    @(negedge clk); ctx_swap[4] = 1;
    @(posedge clk); #1 ctx_swap[4] = 0;
    check(!sel_valid[4], "context swap clears the selection");
    exec(4, VL_OP_PUSH, dev_pa(1), '0, st);
    check(st == VL_NOSEL, "push after context swap -> NOSEL"); if (st == VL_NOSEL) c_swap++;

    $display("counts: push_ok=%0d fetch_ok=%0d prod_hit=%0d prod_miss=%0d cons_hit=%0d cons_miss=%0d",
             c_push_ok, c_fetch_ok, c_prod_hit, c_prod_miss, c_cons_hit, c_cons_miss);
    $display("counts: pb_FULL=%0d cb_FULL=%0d NOSEL=%0d NOSQI=%0d nack=%0d retry=%0d ack=%0d contention=%0d incast=%0d cycles=%0d",
             c_pfull, c_cfull, c_nosel, c_nosqi, c_nack, c_retry, c_ack, c_contend, c_incast, cyc);
    check(c_push_ok > 0,  "mechanism: push accepted");
    check(c_fetch_ok > 0, "mechanism: fetch accepted");
    check(c_prod_hit > 0, "mechanism: producer hit");
    check(c_prod_miss > 0, "mechanism: producer miss");
    check(c_cons_hit > 0, "mechanism: consumer hit");
    check(c_cons_miss > 0, "mechanism: consumer miss");
    check(c_pfull > 0,    "mechanism: prodBuf FULL");
    check(c_cfull > 0,    "mechanism: consBuf FULL");
    check(c_nosel > 0,    "mechanism: NOSEL");
    check(c_nosqi > 0,    "mechanism: NOSQI");
    check(c_nack > 0,     "mechanism: injection nack");
    check(c_retry > 0,    "mechanism: retry through the pipeline");
    check(c_contend > 0,  "mechanism: round-robin contention at the device port");
    check(c_incast > 0,   "mechanism: incast queue");
    check(c_swap > 0,     "mechanism: context swap");
    check(c_ack == c_push_ok, "every accepted line delivered once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
