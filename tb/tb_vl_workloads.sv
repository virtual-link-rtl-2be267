// tb_vl_workloads: the queue topologies of the evaluated benchmarks run on
// the full-size system (vl_top at its default parameters: 16 cores, 64
// SQIs, 64-entry buffers). Each workload is a set of channels, one SQI per
// channel, given as producer cores and consumer cores:
//   ping-pong  (1:1) x 2   core 0 <-> core 1
//   halo       (1:1) x 48  both directions between neighbours of a 4x4
//                          core grid (24 pairs); sweep has the same channel
//                          count and pattern size, so it shares this run
//   incast     (15:1) x 1  cores 1-15 -> core 0
//   FIR        (1:1) x 31  32 stages, stage s on core s mod 16, channel s
//                          carries stage s -> s+1 (two stages per core)
//   bitonic    (1:15) x 1 + (15:1) x 1   core 0 scatters, cores 1-15 gather
//   pipeline   (1:4) + (4:4) + (4:1) + (1:1)  cores 0 | 1-4 | 5-8 | 9 | 10
// Message counts are this testbench's choice. Every producer role pushes
// its quota and every consumer role fetches its quota; a role keeps at most
// one line (producer) or one request (consumer) in the device, the way a
// thread waits for its own message before sending the next, so buffers
// never fill.
// Checked per workload: every pushed line delivered exactly once, with its
// data, into a target line fetched on the same SQI; on 1:1 channels the
// k-th line pushed lands in the consumer's k-th fetched line (FIFO order);
// the workload finishes within its cycle budget. Cycles per workload are
// printed.
module tb_vl_workloads;
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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (cycle %0d)", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- roles of the current workload ----------------------
  typedef struct {
    int  core;
    int  sqi;
    bit  prod;
    int  quota;
    int  done;      // lines pushed / requests accepted
    int  got;       // lines delivered (consumer) or delivered from it (producer)
    bit  one2one;   // the channel has one producer and one consumer
  } role_t;
  role_t roles[$];

  // per consumer target line: SQI, role, fetch number
  int        tgt_sqi  [vl_laddr_t];
  int        tgt_role [vl_laddr_t];
  int        tgt_k    [vl_laddr_t];
  vl_line_t  line_of  [bit [63:0]];
  int        prod_of  [bit [63:0]];   // producer role of a line
  int        k_of     [bit [63:0]];
  bit        running = 0;
  int        tgt_seq  [NC];

  function automatic vl_pa_t dev_pa(int s);
    return {24'h20, 4'd0, 6'(s), 12'($urandom), 6'd0};
  endfunction

  task automatic exec(int c, vl_op_e o, vl_pa_t pa, vl_line_t line, output vl_status_e st);
    @(negedge clk);
    while (!op_ready[c]) @(negedge clk);
    op_valid[c] = 1; op[c] = o; op_pa[c] = pa; op_line[c] = line;
    @(posedge clk); #1 op_valid[c] = 0;
    st = VL_OK;
    if (o == VL_OP_SELECT) return;
    while (!rs_valid[c]) @(posedge clk) #1;
    st = rs[c];
  endtask

  // one thread per core, serving its roles in turn
  task automatic core_thread(int c);
    vl_status_e st;
    forever begin
      bit idle;
      @(negedge clk);
      if (!running) continue;
      idle = 1;
      for (int r = 0; r < roles.size(); r++) begin
        if (roles[r].core != c || roles[r].done >= roles[r].quota) continue;
        if (roles[r].done != roles[r].got) continue;   // one in the device at a time
        idle = 0;
        if (roles[r].prod) begin
          bit [63:0] id;
          vl_line_t  l;
          id = {8'(r), 8'(roles[r].sqi), 16'h5A5A, 32'(roles[r].done)};
          l  = {8'h00, {13{$urandom}}, 24'($urandom), id};
          exec(c, VL_OP_SELECT, {20'h1, 8'(c), 24'($urandom)}, '0, st);
          line_of[id] = l; prod_of[id] = r; k_of[id] = roles[r].done;
          exec(c, VL_OP_PUSH, dev_pa(roles[r].sqi), l, st);
          if (st == VL_OK) roles[r].done++;
          else begin
            check(st == VL_FULL, "push refused only with FULL");
            line_of.delete(id);
          end
        end else begin
          vl_laddr_t t;
          t = {14'h3, 8'(c), 24'(tgt_seq[c])};
          tgt_seq[c]++;
          exec(c, VL_OP_SELECT, {t, 6'h0}, '0, st);
          tgt_sqi[t] = roles[r].sqi; tgt_role[t] = r; tgt_k[t] = roles[r].done;
          exec(c, VL_OP_FETCH, dev_pa(roles[r].sqi), '0, st);
          if (st == VL_OK) roles[r].done++;
          else begin
            check(st == VL_FULL, "fetch refused only with FULL");
            tgt_sqi.delete(t);
          end
        end
      end
    end
  endtask

  // consumers' caches: every fetched line is pushable, answers after a
  // random delay
  always @(negedge clk) begin
    inj_ack = 0; inj_nack = 0;
    if (rst_n && inj_valid && ($urandom % 3) != 0) begin
      if (tgt_sqi.exists(inj.tgt)) inj_ack = 1;
      else inj_nack = 1;
    end
  end

  int delivered = 0;
  always @(posedge clk) if (rst_n && inj_valid) begin
    if (inj_nack) check(0, "injection into a line that was never fetched");
    if (inj_ack) begin
      bit [63:0] id;
      id = inj.line[63:0];
      check(line_of.exists(id), "delivered line was pushed and not yet delivered");
      if (line_of.exists(id)) begin
        int cr, pr;
        cr = tgt_role[inj.tgt];
        pr = prod_of[id];
        check(inj.line == line_of[id], "delivered data");
        check(tgt_sqi[inj.tgt] == roles[pr].sqi && int'(inj.core) == roles[cr].core,
              "delivered into a line fetched on the same SQI by its consumer");
        if (roles[cr].one2one)
          check(tgt_k[inj.tgt] == k_of[id], "1:1 channel delivers in FIFO order");
        roles[cr].got++;
        roles[pr].got++;
        line_of.delete(id);
        tgt_sqi.delete(inj.tgt);
        delivered++;
      end
    end
  end

  // ---------------- workload construction -------------------------------
  task automatic channel(int sqi, int prods[$], int conss[$], int msgs_per_pair);
    int total;
    total = prods.size() * conss.size() * msgs_per_pair;
    foreach (prods[i])
      roles.push_back('{prods[i], sqi, 1'b1, total / prods.size(), 0, 0, prods.size() == 1 && conss.size() == 1});
    foreach (conss[i])
      roles.push_back('{conss[i], sqi, 1'b0, total / conss.size(), 0, 0, prods.size() == 1 && conss.size() == 1});
  endtask

  task automatic run(string name, int budget);
    int t0, n, expect_msgs, d0;
    bit done;
    expect_msgs = 0;
    foreach (roles[r]) if (roles[r].prod) expect_msgs += roles[r].quota;
    // enable exactly the SQIs in use
    for (int s = 0; s < 64; s++) begin
      bit used;
      used = 0;
      foreach (roles[r]) if (roles[r].sqi == s) used = 1;
      @(negedge clk); cfg_we = 1; cfg_sqi = vl_sqi_t'(s); cfg_v = used;
    end
    @(negedge clk); cfg_we = 0;
    t0 = cyc; d0 = delivered;
    running = 1;
    n = 0;
    done = 0;
    while (!done && n < budget) begin
      @(negedge clk); n++;
      done = 1;
      foreach (roles[r]) if (roles[r].got != roles[r].quota) done = 0;
    end
    running = 0;
    repeat (20) @(negedge clk);
    check(done, $sformatf("%s: finished within %0d cycles", name, budget));
    check(delivered - d0 == expect_msgs, $sformatf("%s: %0d of %0d lines delivered", name, delivered - d0, expect_msgs));
    check(line_of.size() == 0 && tgt_sqi.size() == 0, $sformatf("%s: nothing left in flight", name));
    check(!pb_full && !cb_full && !inj_valid, $sformatf("%s: device idle", name));
    $display("workload %-10s roles=%0d lines=%0d cycles=%0d", name, roles.size(), expect_msgs, cyc - t0);
    roles.delete();
    line_of.delete(); tgt_sqi.delete(); tgt_role.delete(); tgt_k.delete(); prod_of.delete(); k_of.delete();
  endtask

  initial begin
    for (int i = 0; i < NC; i++) begin
      op_valid[i] = 0; op[i] = VL_OP_SELECT; op_pa[i] = '0; op_line[i] = '0; ctx_swap[i] = 0;
      tgt_seq[i] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NC; i++) fork automatic int k = i; core_thread(k); join_none

    // ping-pong (1:1) x 2
    channel(0, '{0}, '{1}, 50);
    channel(1, '{1}, '{0}, 50);
    run("ping-pong", 20000);

    // halo (1:1) x 48: neighbours on a 4x4 grid, both directions
    begin
      int s;
      s = 0;
      for (int y = 0; y < 4; y++)
        for (int x = 0; x < 4; x++) begin
          int c;
          c = y * 4 + x;
          if (x < 3) begin channel(s, '{c}, '{c + 1}, 8); s++; channel(s, '{c + 1}, '{c}, 8); s++; end
          if (y < 3) begin channel(s, '{c}, '{c + 4}, 8); s++; channel(s, '{c + 4}, '{c}, 8); s++; end
        end
      check(s == 48, "halo has 48 channels");
    end
    run("halo", 100000);

    // incast (15:1) x 1
    channel(5, '{1, 2, 3, 4, 5, 6, 7, 8, 9, 10, 11, 12, 13, 14, 15}, '{0}, 10);
    run("incast", 100000);

    // FIR: 32 stages, 31 channels
    for (int s = 0; s < 31; s++) channel(s, '{s % 16}, '{(s + 1) % 16}, 8);
    run("FIR", 100000);

    // bitonic: (1:15) x 1 + (15:1) x 1
    channel(10, '{0}, '{1, 2, 3, 4, 5, 6, 7, 8, 9, 10, 11, 12, 13, 14, 15}, 4);
    channel(11, '{1, 2, 3, 4, 5, 6, 7, 8, 9, 10, 11, 12, 13, 14, 15}, '{0}, 4);
    run("bitonic", 100000);

    // pipeline: (1:4) + (4:4) + (4:1) + (1:1)
    channel(20, '{0}, '{1, 2, 3, 4}, 10);
    channel(21, '{1, 2, 3, 4}, '{5, 6, 7, 8}, 3);
    channel(22, '{5, 6, 7, 8}, '{9}, 10);
    channel(23, '{9}, '{10}, 40);
    run("pipeline", 100000);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
