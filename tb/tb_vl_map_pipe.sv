// tb_vl_map_pipe: the address-mapping pipeline wired to a real linkTab,
// consBuf and prodBuf, replaying the worked example of the paper's pipeline
// table and buffer figure, then a second directed phase.
//
// Phase 1 (the paper's example, indices here are 0-based where the paper
// counts from 1): a blue consumer request (SQI 1, consBuf 0), an orange
// consumer request (SQI 0, consBuf 1), then producer lines blue (prodBuf 0),
// green (SQI 2, prodBuf 1), blue (prodBuf 2), green (prodBuf 3), one
// arriving per cycle. Expected: cons miss, cons miss, blue hit (mapped to
// consBuf 0, the stage-1 read needs the stage-3 RAW forward), green miss,
// blue miss (needs consHead forwarded from the hit in stage 2), green miss
// (appends behind prodBuf 1, needs prodTail forwarded). Every entry leaves
// stage 3 exactly two cycles after stage 1, one per cycle. The final linkTab
// rows and nextL links are checked against the figure: green prodHead is
// the second prodBuf entry and prodTail the fourth. (The figure still shows
// blue consTail = 1 after the hit; here a list that becomes empty has both
// pointers NULL.)
// Phase 2: green, green, blue consumer requests back to back; each must hit
// the oldest waiting line of its SQI (1, 3, then 2) in order, emptying
// every producer list.
module tb_vl_map_pipe;
  import vl_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- DUT and the real tables around it
  logic      cfg_we = 0, cfg_v = 0, chk_v;
  vl_sqi_t   cfg_sqi = '0;
  logic      rt_take, pin_pop, cin_pop;
  vl_ptr_t   pin_head, cin_head;
  vl_sqi_t   pin_sqi, cin_sqi, lt_rd_sqi, lt_wr_sqi;
  vl_ltrow_t lt_rd_row, lt_wr_row;
  logic      lt_wr_en, pnl_we, cnl_we, out_app_en, ev_vld, ev_hit;
  vl_idx_t   pnl_rd_idx, pnl_wr_idx, cnl_rd_idx, cnl_wr_idx, ctgt_rd_idx, out_app_idx, out_app_mapped;
  vl_ptr_t   pnl_rd, pnl_wr_val, cnl_rd, cnl_wr_val;
  vl_laddr_t ctgt_rd, out_app_tgt;
  vl_core_t  ccore_rd, out_app_core;
  vl_mop_e   ev_op;

  logic      cb_alloc = 0, pb_alloc = 0, cb_full, pb_full;
  vl_sqi_t   a_sqi = '0;
  vl_laddr_t a_tgt = '0;
  vl_core_t  a_core = '0;
  vl_data_t  a_data = '0;
  vl_ptr_t   pout_head;
  vl_data_t  pout_data;
  vl_sqi_t   pout_sqi;
  vl_idx_t   pout_mapped;
  vl_laddr_t pout_tgt;
  vl_core_t  pout_core;
  logic [63:0] cb_valid, pb_valid;

  vl_map_pipe dut (
    .clk, .rst_n,
    .rt_vld(1'b0), .rt_idx('0), .rt_sqi('0), .rt_take,
    .pin_head, .pin_sqi, .pin_pop,
    .cin_head, .cin_sqi, .cin_pop,
    .lt_rd_sqi, .lt_rd_row, .lt_wr_en, .lt_wr_sqi, .lt_wr_row,
    .pnl_rd_idx, .pnl_rd, .pnl_we, .pnl_wr_idx, .pnl_wr_val,
    .cnl_rd_idx, .cnl_rd, .cnl_we, .cnl_wr_idx, .cnl_wr_val,
    .ctgt_rd_idx, .ctgt_rd, .ccore_rd,
    .out_app_en, .out_app_idx, .out_app_mapped, .out_app_tgt, .out_app_core,
    .ev_vld, .ev_op, .ev_hit
  );

  vl_link_tab u_lt (
    .clk, .rst_n, .cfg_we, .cfg_sqi, .cfg_v,
    .rd_sqi(lt_rd_sqi), .rd_row(lt_rd_row),
    .chk_sqi(a_sqi), .chk_v,
    .wr_en(lt_wr_en), .wr_sqi(lt_wr_sqi), .wr_row(lt_wr_row)
  );

  vl_cons_buf u_cb (
    .clk, .rst_n,
    .alloc_en(cb_alloc), .alloc_sqi(a_sqi), .alloc_tgt(a_tgt), .alloc_core(a_core), .full(cb_full),
    .cin_head, .cin_sqi, .cin_pop,
    .tgt_rd_idx(ctgt_rd_idx), .tgt_rd(ctgt_rd), .core_rd(ccore_rd),
    .nl_rd_idx(cnl_rd_idx), .nl_rd(cnl_rd),
    .nl_we(cnl_we), .nl_wr_idx(cnl_wr_idx), .nl_wr_val(cnl_wr_val),
    .free_en(1'b0), .free_idx('0), .valid(cb_valid)
  );

  vl_prod_buf u_pb (
    .clk, .rst_n,
    .alloc_en(pb_alloc), .alloc_sqi(a_sqi), .alloc_data(a_data), .full(pb_full),
    .pin_head, .pin_sqi, .pin_pop,
    .nl_rd_idx(pnl_rd_idx), .nl_rd(pnl_rd),
    .nl_we(pnl_we), .nl_wr_idx(pnl_wr_idx), .nl_wr_val(pnl_wr_val),
    .out_app_en, .out_app_idx, .out_app_mapped, .out_app_tgt, .out_app_core,
    .pout_head, .pout_data, .pout_sqi, .pout_mapped, .pout_tgt, .pout_core,
    .pout_pop(1'b0), .free_en(1'b0), .free_idx('0), .valid(pb_valid)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- event log, sampled at each rising edge
  typedef struct { int cyc; vl_mop_e op; bit hit; } ev_t;
  ev_t evs[$];
  typedef struct { int cyc; int idx; int mapped; vl_laddr_t tgt; } app_t;
  app_t apps[$];
  always @(posedge clk) if (rst_n) begin
    if (ev_vld) evs.push_back('{cyc, ev_op, ev_hit});
    if (out_app_en) apps.push_back('{cyc, int'(out_app_idx), int'(out_app_mapped), out_app_tgt});
  end
  int s1_cyc[$];
  always @(posedge clk) if (rst_n && (cin_pop || pin_pop)) s1_cyc.push_back(cyc);

  localparam vl_sqi_t ORANGE = 0, BLUE = 1, GREEN = 2;

  task automatic cons(vl_sqi_t s, vl_laddr_t t);
    @(negedge clk);
    cb_alloc = 1; a_sqi = s; a_tgt = t; a_core = vl_core_t'(s);
    @(posedge clk); #1 cb_alloc = 0;
  endtask
  task automatic prod(vl_sqi_t s, vl_data_t d);
    @(negedge clk);
    pb_alloc = 1; a_sqi = s; a_data = d;
    @(posedge clk); #1 pb_alloc = 0;
  endtask

  function automatic vl_ptr_t P(int i);
    return '{vld: 1'b1, idx: vl_idx_t'(i)};
  endfunction

  task automatic expect_evs(ev_t exp[$], string ph);
    check(evs.size() == exp.size(), $sformatf("%s: %0d entries left stage 3, expected %0d", ph, evs.size(), exp.size()));
    for (int i = 0; i < exp.size() && i < evs.size(); i++) begin
      check(evs[i].op == exp[i].op && evs[i].hit == exp[i].hit,
            $sformatf("%s: entry %0d op %0d hit %0d, expected op %0d hit %0d", ph, i, evs[i].op, evs[i].hit, exp[i].op, exp[i].hit));
      if (i > 0) check(evs[i].cyc == evs[i-1].cyc + 1, $sformatf("%s: entry %0d one cycle after previous", ph, i));
      check(evs[i].cyc == s1_cyc[i] + 2, $sformatf("%s: entry %0d leaves stage 3 two cycles after stage 1", ph, i));
    end
  endtask

  initial begin
    ev_t exp[$];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 3; s++) begin
      @(negedge clk); cfg_we = 1; cfg_sqi = vl_sqi_t'(s); cfg_v = 1;
    end
    @(negedge clk); cfg_we = 0;

    // ---- phase 1: the paper's example, one arrival per cycle
    cons(BLUE,   46'h1000);
    cons(ORANGE, 46'h2000);
    prod(BLUE,  504'hb0);
    prod(GREEN, 504'hc0);
    prod(BLUE,  504'hb1);
    prod(GREEN, 504'hc1);
    repeat (5) @(negedge clk);
    exp = '{'{0, VL_MOP_CONS, 0}, '{0, VL_MOP_CONS, 0}, '{0, VL_MOP_PROD, 1},
            '{0, VL_MOP_PROD, 0}, '{0, VL_MOP_PROD, 0}, '{0, VL_MOP_PROD, 0}};
    expect_evs(exp, "phase 1");
    check(s1_cyc.size() == 6 && s1_cyc[5] == s1_cyc[0] + 5, "phase 1: one entry enters stage 1 per cycle");
    check(apps.size() == 1 && apps[0].idx == 0 && apps[0].mapped == 0 && apps[0].tgt == 46'h1000,
          "phase 1: blue line prodBuf 0 mapped to consBuf 0 with the blue target");
    check(pout_head == P(0) && pout_mapped == 0 && pout_tgt == 46'h1000 && pout_data == 504'hb0, "phase 1: POHR points to the mapped line");
    check(u_lt.rows[GREEN] == '{1'b1, P(1), P(3), VL_NULL, VL_NULL}, "phase 1: green prodHead/prodTail = 2nd/4th prodBuf entries");
    check(u_lt.rows[BLUE]  == '{1'b1, P(2), P(2), VL_NULL, VL_NULL}, "phase 1: blue row holds the second blue line only");
    check(u_lt.rows[ORANGE] == '{1'b1, VL_NULL, VL_NULL, P(1), P(1)}, "phase 1: orange consHead/consTail = consBuf 1");
    check(u_pb.next_l[1] == P(3), "phase 1: green nextL links prodBuf 1 -> 3");
    check(u_pb.next_l[3] == VL_NULL && u_pb.next_l[2] == VL_NULL, "phase 1: list tails have NULL nextL");

    // ---- phase 2: consumer hits back to back on one SQI, then another
    evs.delete(); s1_cyc.delete(); apps.delete();
    cons(GREEN, 46'h3000);
    cons(GREEN, 46'h3001);
    cons(BLUE,  46'h1001);
    repeat (5) @(negedge clk);
    exp = '{'{0, VL_MOP_CONS, 1}, '{0, VL_MOP_CONS, 1}, '{0, VL_MOP_CONS, 1}};
    expect_evs(exp, "phase 2");
    check(apps.size() == 3, "phase 2: three lines mapped");
    if (apps.size() == 3) begin
      check(apps[0].idx == 1 && apps[0].mapped == 2 && apps[0].tgt == 46'h3000, "phase 2: oldest green line to first green request");
      check(apps[1].idx == 3 && apps[1].mapped == 3 && apps[1].tgt == 46'h3001, "phase 2: next green line via forwarded nextL");
      check(apps[2].idx == 2 && apps[2].mapped == 4 && apps[2].tgt == 46'h1001, "phase 2: blue line to blue request");
    end
    for (int s = 0; s < 3; s++)
      check(u_lt.rows[s].prod_head == VL_NULL && u_lt.rows[s].prod_tail == VL_NULL, "phase 2: producer lists empty");
    check(u_lt.rows[GREEN].cons_head == VL_NULL && u_lt.rows[BLUE].cons_head == VL_NULL, "phase 2: no waiting green/blue requests");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
