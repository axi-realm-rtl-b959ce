// tb_realm_unit: self-checking test of a complete REALM unit in front of the
// behavioural subordinate. Checks the one-cycle request delay, the write
// fragment limit of the write buffer, the reconfiguration FSM
// (RUN -> DRAIN -> APPLY -> RUN with a read in flight, new fragment length in
// force afterwards), isolation on budget depletion and release at the next
// period, and user-commanded isolation.
//
// The one-cycle delay and isolation on depletion and on reconfiguration are
// the behaviour the unit is meant to have; the FSM state numbers and which
// writes count as intrusive are this design's own. Ends with a TB_RESULT line;
// a watchdog ends a hung run.
module tb_realm_unit;
  import realm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t     req, mreq;
  axi_rsp_t     rsp, mrsp;
  unit_ctrl_t   ctrl;
  region_cfg_t  cfg [2];
  region_stat_t st  [2];
  lat_stat_t    lat;
  logic         upd, reload, isolated, depleted, throttled;
  logic [1:0]   fsm;
  int           seen_drain = 0, seen_apply = 0;

  `include "tb_axi_drv.svh"

  realm_unit #(.NumRegions(2), .NumPending(8), .BufferDepth(16)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .slv_req_i(req), .slv_rsp_o(rsp), .mst_req_o(mreq), .mst_rsp_i(mrsp),
    .ctrl_i(ctrl), .region_cfg_i(cfg), .cfg_update_i(upd), .reload_i(reload),
    .region_stat_o(st), .lat_stat_o(lat), .isolated_o(isolated),
    .depleted_o(depleted), .throttled_o(throttled), .fsm_state_o(fsm)
  );

  tb_axi_mem #(.RLat(20)) mem (.clk(clk), .rst_n(rst_n), .req_i(mreq), .rsp_o(mrsp));

  always @(posedge clk) begin
    if (fsm == 2'd1) seen_drain++;
    if (fsm == 2'd2) seen_apply++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1'b1;
    @(negedge clk); s = 1'b0;
  endtask

  initial begin
    longint t;
    int unsigned n0;
    req = '0; req.b_ready = 1'b1; req.r_ready = 1'b1;
    ctrl = '{isolate: 1'b0, throttle_en: 1'b0, regulate_en: 1'b0, frag_len: 9'd256};
    upd = 1'b0; reload = 1'b0;
    cfg[0] = '{start_addr: 64'h0, end_addr: 64'h1_0000, w_budget: 32'd100000, w_period: 32'd0,
               r_budget: 32'd100000, r_period: 32'd0};
    cfg[1] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    pulse(upd);                       // load region boundaries
    wait_cycles(5);
    check(fsm == 2'd0 && seen_apply == 1, "initial configuration applied");

    // one-cycle delay on the read request path
    send_ar(mk_ar(4'd1, 64'h100, 8'd15));
    t = mem.cyc;
    wait_cycles(2);
    check(mem.ar_log.size() == 1 && mem.ar_cyc[0] == t + 1, "AR leaves one cycle after it entered");
    check(mem.ar_log[0].len == 8'd15, "frag length 256: read not split");
    wait_r(16);

    // write of 32 beats: fragments limited to the 16-beat buffer
    fork send_aw(mk_aw(4'd2, 64'h200, 8'd31)); send_w(32, 64'h77); join
    wait_b(1);
    check(mem.aw_log.size() == 2 && mem.aw_log[0].len == 8'd15 && mem.aw_log[1].addr == 64'h280,
          "write split to the buffer depth");
    check(b_log.size() == 1, "one B for the write");
    check(mem.rd(64'h2F8) == 64'h77 + 31, "write data");

    // reconfiguration with a read in flight
    r_log.delete();
    send_ar(mk_ar(4'd1, 64'h1000, 8'd7));
    ctrl.frag_len = 9'd4;
    pulse(upd);
    check(fsm == 2'd1, "FSM drains on an intrusive update");
    check(!isolated, "not isolated while the read is outstanding");
    wait_r(8);
    wait_cycles(3);
    check(fsm == 2'd0 && !isolated, "FSM back in RUN after applying");
    n0 = mem.ar_log.size();
    r_log.delete();
    send_ar(mk_ar(4'd1, 64'h2000, 8'd15));
    wait_r(16);
    check(mem.ar_log.size() - n0 == 4, "new fragment length in force");
    check(r_log[15].last && !r_log[14].last, "single last beat");

    // depletion: 64 B read budget, period of 300 cycles
    cfg[0].r_budget = 32'd64;
    cfg[0].r_period = 32'd300;
    ctrl.regulate_en = 1'b1;
    pulse(reload);
    r_log.delete();
    send_ar(mk_ar(4'd1, 64'h3000, 8'd7));       // 64 B: budget used up
    wait_r(8);
    @(negedge clk);
    check(depleted && isolated, "isolated on budget depletion");
    n0 = mem.ar_log.size();
    fork
      send_ar(mk_ar(4'd1, 64'h3100, 8'd0));
      begin
        wait_cycles(50);
        check(mem.ar_log.size() == n0, "request held while the budget is depleted");
      end
    join
    wait_cycles(2);
    check(mem.ar_log.size() == n0 + 1 && !depleted, "request released at the next period");
    wait_r(9);
    ctrl.regulate_en = 1'b0;
    cfg[0].r_period = 32'd0;

    // user-commanded isolation
    @(negedge clk); ctrl.isolate = 1'b1;
    wait_cycles(2);
    check(isolated, "user-commanded isolation");
    @(negedge clk); ctrl.isolate = 1'b0;
    wait_cycles(1);
    check(!isolated, "released");
    check(seen_drain > 0 && seen_apply == 2, "FSM passed DRAIN and APPLY");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
