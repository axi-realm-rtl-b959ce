// tb_realm_mr_unit: self-checking test of the monitoring and regulation unit.
// Two regions ([0, 64 KiB) and [64 KiB, 128 KiB)) in front of the behavioural
// subordinate. Checks the region decoding and the byte accounting of budgets
// and statistics, saturation and the depleted flag with regulation on and
// off, periodic replenishment and the elapsed-time counter, the latency
// sum/count against cycle counts measured in the testbench, and the throttling
// of outstanding reads when little budget is left.
//
// Expected byte counts are (len + 1) << size per transfer, worked out in the
// testbench. The throttle thresholds (1/2, 1/4, 1/8 of the budget) and the
// period counting are this design's own rule, and the expected limits come
// from that rule. Ends with a TB_RESULT line; a watchdog ends a hung run.
module tb_realm_mr_unit;
  import realm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t     req, mreq;
  axi_rsp_t     rsp, mrsp;
  region_cfg_t  cfg [2];
  region_stat_t st  [2];
  lat_stat_t    lat;
  logic         regulate, throttle, reload, depleted, throttled;

  `include "tb_axi_drv.svh"

  realm_mr_unit #(.NumRegions(2), .NumPending(8)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .slv_req_i(req), .slv_rsp_o(rsp), .mst_req_o(mreq), .mst_rsp_i(mrsp),
    .region_cfg_i(cfg), .regulate_en_i(regulate), .throttle_en_i(throttle),
    .reload_i(reload), .region_stat_o(st), .lat_stat_o(lat),
    .depleted_o(depleted), .throttled_o(throttled)
  );

  tb_axi_mem #(.RLat(5)) mem (.clk(clk), .rst_n(rst_n), .req_i(mreq), .rsp_o(mrsp));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_reload();
    @(negedge clk); reload = 1'b1;
    @(negedge clk); reload = 1'b0;
  endtask

  task automatic do_read(input addr_t a, input logic [7:0] len);
    int unsigned n = r_log.size() + int'(len) + 1;
    send_ar(mk_ar(4'd1, a, len));
    wait_r(n);
  endtask

  initial begin
    longint exp_sum;
    req = '0; req.b_ready = 1'b1; req.r_ready = 1'b1;
    regulate = 1'b0; throttle = 1'b0; reload = 1'b0;
    cfg[0] = '{start_addr: 64'h0,     end_addr: 64'h1_0000, w_budget: 32'd1000, w_period: 32'd0,
               r_budget: 32'd1000, r_period: 32'd0};
    cfg[1] = '{start_addr: 64'h1_0000, end_addr: 64'h2_0000, w_budget: 32'd500, w_period: 32'd0,
               r_budget: 32'd128, r_period: 32'd0};
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    do_reload();
    @(negedge clk);
    check(st[0].r_budget_left == 1000 && st[1].w_budget_left == 500, "budgets loaded on reload");

    // byte accounting per region
    do_read(64'h100, 8'd7);                       // 64 B in region 0
    check(st[0].r_budget_left == 1000 - 64 && st[0].r_bytes == 64, "region 0 read accounted");
    check(st[1].r_budget_left == 128 && st[1].r_bytes == 0, "region 1 untouched");
    fork send_aw(mk_aw(4'd2, 64'h1_0040, 8'd3)); send_w(4, 64'h0); join
    wait_b(1);
    check(st[1].w_budget_left == 500 - 32 && st[1].w_bytes == 32, "region 1 write accounted");
    check(st[0].w_budget_left == 1000, "region 0 write budget untouched");
    do_read(64'h3_0000, 8'd3);                    // outside both regions
    check(st[0].r_bytes == 64 && st[1].r_bytes == 0, "unmapped address not accounted");

    // latency: sum of (last R - AR) measured here
    exp_sum = (r_cyc[7] - ar_cyc[0]) + (r_cyc[11] - ar_cyc[1]);
    check(lat.r_lat_cnt == 2 && longint'(lat.r_lat_sum) == exp_sum, "read latency sum and count");
    check(lat.w_lat_cnt == 1 && longint'(lat.w_lat_sum) == b_cyc[0] - aw_cyc[0], "write latency");

    // depletion: region 1 read budget of 128 B
    do_read(64'h1_0000, 8'd7);
    check(st[1].r_budget_left == 64 && !depleted, "budget half spent");
    do_read(64'h1_0000, 8'd15);                   // 128 B more, saturates
    check(st[1].r_budget_left == 0, "budget saturates at zero");
    check(st[1].r_bytes == 192, "bytes keep counting beyond the budget");
    check(!depleted, "no depletion flag without regulation");
    regulate = 1'b1;
    #1 check(depleted, "depleted with regulation enabled");
    @(negedge clk);
    req.ar = mk_ar(4'd1, 64'h0, 8'd0); req.ar_valid = 1'b1;
    #1 check(!mreq.ar_valid && !rsp.ar_ready, "requests held while depleted");
    @(negedge clk); req.ar_valid = 1'b0;

    // periodic replenishment
    cfg[1].r_period = 32'd40;
    do_reload();
    check(!depleted, "replenished by reload");
    wait_cycles(9);
    check(st[1].r_time == 9, "elapsed time counted");
    do_read(64'h1_0000, 8'd15);                   // 128 B: depleted again
    @(negedge clk);
    check(depleted, "depleted after spending the budget");
    while (st[1].r_time != 0) @(negedge clk);
    check(!depleted && st[1].r_budget_left == 128 && st[1].r_bytes == 0, "replenished at period end");
    cfg[1].r_period = 32'd0;
    regulate = 1'b0;

    // throttling: 32 of 512 B left -> one outstanding read
    cfg[0].r_budget = 32'd512;
    do_reload();
    do_read(64'h0, 8'd59);                        // 480 B
    check(st[0].r_budget_left == 32, "32 B left");
    throttle = 1'b1;
    r_log.delete(); ar_cyc.delete(); r_cyc.delete();
    fork
      send_ar(mk_ar(4'd1, 64'h200, 8'd0));
      begin wait_cycles(1); send_ar(mk_ar(4'd1, 64'h208, 8'd0)); end
      begin wait_cycles(2); #1 check(throttled, "throttle active with one read outstanding"); end
    join
    wait_r(2);
    check(ar_cyc[1] >= r_cyc[0], "second read waits for the first with little budget left");
    // with a full budget the same pair overlaps
    do_reload();
    r_log.delete(); ar_cyc.delete(); r_cyc.delete();
    fork
      send_ar(mk_ar(4'd1, 64'h200, 8'd0));
      begin wait_cycles(1); send_ar(mk_ar(4'd1, 64'h208, 8'd0)); end
    join
    wait_r(2);
    check(ar_cyc[1] < r_cyc[0], "reads overlap with a full budget");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
