// tb_realm_sys: end-to-end test of realm_sys at its default parameters (three
// managers, 64-bit AXI, 8 pending, 16-beat write buffer, 2 regions).
//
// Manager 0 plays a core issuing single-beat reads and measures their
// latency; manager 1 plays an accelerator DMA that streams 256-beat reads and
// writes (double buffering); manager 2 plays the system DMA. Behind the units
// a behavioural crossbar and memory arbitrates round-robin per transaction.
// The test goes through:
//   0. bus guard: refusal while unclaimed, claim by the core;
//   1. configuration of all units over the register bus;
//   2. single-source baseline: core alone;
//   3. uncontrolled contention: DMA bursts unsplit (fragment length 256);
//   4. fragment length 1 for the DMA: core latency back near the baseline;
//   5. budget regulation of the DMA (320 B per 1000 cycles, throttling on):
//      isolation on depletion, per-period bytes bounded by the budget;
//   6. write buffer holding a write whose data comes late, user-commanded
//      isolation, latency statistics read back, handover of the guard.
// Each mechanism is counted; one that never happens counts as a failure.
module tb_realm_sys;
  import realm_pkg::*;

  localparam int NM = 3;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t mreq [NM];
  axi_rsp_t mrsp [NM];
  axi_req_t xreq [NM];
  axi_rsp_t xrsp [NM];
  reg_req_t creq;
  reg_rsp_t crsp;
  logic     iso [NM], dep [NM];
  logic     claimed;
  id_t      owner;

  `include "tb_reg_drv.svh"

  realm_sys dut (
    .clk_i(clk), .rst_ni(rst_n),
    .mgr_req_i(mreq), .mgr_rsp_o(mrsp), .xbar_req_o(xreq), .xbar_rsp_i(xrsp),
    .cfg_req_i(creq), .cfg_rsp_o(crsp), .isolated_o(iso), .depleted_o(dep),
    .cfg_claimed_o(claimed), .cfg_owner_o(owner)
  );

  tb_rr_mem #(.NumPorts(NM), .RLat(4)) xbar (.clk(clk), .rst_n(rst_n), .req_i(xreq), .rsp_o(xrsp));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ------------------------------------------------------------ monitors
  longint now = 0;
  logic   aw_hs_q [NM], w_hs_q [NM], ar_hs_q [NM];
  longint core_ar_t [$];
  longint core_lat  [$];
  int unsigned n_b [NM], n_xb [NM], n_xar [NM], n_ar [NM];
  // mechanism counters
  int n_split = 0, n_coalesce = 0, n_wbuf_hold = 0, n_deplete = 0, n_replenish = 0;
  int n_throttle = 0, n_drain = 0, n_user_iso = 0, n_guard_err = 0, n_handover = 0;
  logic dep1_q = 1'b0;
  cnt_t max_period_bytes = '0;

  always @(posedge clk) begin
    now++;
    for (int m = 0; m < NM; m++) begin
      aw_hs_q[m] <= mreq[m].aw_valid && mrsp[m].aw_ready;
      w_hs_q[m]  <= mreq[m].w_valid  && mrsp[m].w_ready;
      ar_hs_q[m] <= mreq[m].ar_valid && mrsp[m].ar_ready;
      if (mreq[m].ar_valid && mrsp[m].ar_ready) n_ar[m]++;
      if (xreq[m].ar_valid && xrsp[m].ar_ready) n_xar[m]++;
      if (mrsp[m].b_valid && mreq[m].b_ready) n_b[m]++;
      if (xrsp[m].b_valid && xreq[m].b_ready) n_xb[m]++;
      if (dut.fsm_state[m] == 2'd1) n_drain++;
      if (dut.throttled[m]) n_throttle++;
    end
    if (mreq[0].ar_valid && mrsp[0].ar_ready) core_ar_t.push_back(now);
    if (mrsp[0].r_valid && mreq[0].r_ready && mrsp[0].r.last) core_lat.push_back(now - core_ar_t.pop_front());
    if (dut.gen_unit[1].i_unit.gen_splitter.i_splitter.ar_done_q != '0) n_split++;
    if (dut.gen_unit[2].i_unit.gen_wbuf.i_wbuf.aw_valid && !dut.gen_unit[2].i_unit.gen_wbuf.i_wbuf.aw_fwd)
      n_wbuf_hold++;
    if (dep[1] && !dep1_q) n_deplete++;
    if (!dep[1] && dep1_q) n_replenish++;
    dep1_q <= dep[1];
    if (dut.region_stat[1][0].r_bytes > max_period_bytes) max_period_bytes = dut.region_stat[1][0].r_bytes;
    if (dut.region_stat[1][0].w_bytes > max_period_bytes) max_period_bytes = dut.region_stat[1][0].w_bytes;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ drivers
  function automatic ar_chan_t mk_ar(id_t id, addr_t addr, logic [7:0] len);
    ar_chan_t ar = '0;
    ar.id = id; ar.addr = addr; ar.len = len; ar.size = 3'd3; ar.burst = BURST_INCR; ar.cache = 4'b0010;
    return ar;
  endfunction
  function automatic aw_chan_t mk_aw(id_t id, addr_t addr, logic [7:0] len);
    aw_chan_t aw = '0;
    aw.id = id; aw.addr = addr; aw.len = len; aw.size = 3'd3; aw.burst = BURST_INCR; aw.cache = 4'b0010;
    return aw;
  endfunction

  task automatic send_ar(input int m, input ar_chan_t ar);
    @(negedge clk);
    mreq[m].ar = ar; mreq[m].ar_valid = 1'b1;
    do @(negedge clk); while (!ar_hs_q[m]);
    mreq[m].ar_valid = 1'b0;
  endtask
  task automatic send_aw(input int m, input aw_chan_t aw);
    @(negedge clk);
    mreq[m].aw = aw; mreq[m].aw_valid = 1'b1;
    do @(negedge clk); while (!aw_hs_q[m]);
    mreq[m].aw_valid = 1'b0;
  endtask
  task automatic send_w(input int m, input int n, input data_t seed, input int gap = 0);
    @(negedge clk);
    for (int i = 0; i < n; i++) begin
      if (gap > 0 && i > 0) begin mreq[m].w_valid = 1'b0; repeat (gap) @(negedge clk); end
      mreq[m].w.data = seed + data_t'(i); mreq[m].w.strb = '1; mreq[m].w.last = (i == n - 1);
      mreq[m].w_valid = 1'b1;
      do @(negedge clk); while (!w_hs_q[m]);
    end
    mreq[m].w_valid = 1'b0;
  endtask

  // core: n single-beat reads, each waiting for its data
  task automatic core_reads(input int n, output longint max_lat, output real avg_lat);
    int unsigned base = core_lat.size();
    longint sum = 0;
    for (int i = 0; i < n; i++) begin
      send_ar(0, mk_ar(4'd0, 64'h8000 + 64'(i % 64) * 8, 8'd0));
      while (core_lat.size() <= base + i) @(negedge clk);
      repeat (3) @(negedge clk);
    end
    max_lat = 0;
    for (int i = base; i < core_lat.size(); i++) begin
      sum += core_lat[i];
      if (core_lat[i] > max_lat) max_lat = core_lat[i];
    end
    avg_lat = real'(sum) / real'(n);
  endtask

  // DMA of manager 1: 256-beat reads and writes while dma_run is set
  bit dma_run = 1'b0;
  int dma_rd_out = 0;
  always @(posedge clk) begin
    if (mreq[1].ar_valid && mrsp[1].ar_ready) dma_rd_out++;
    if (mrsp[1].r_valid && mreq[1].r_ready && mrsp[1].r.last) dma_rd_out--;
  end
  initial begin
    forever begin
      wait (dma_run);
      while (dma_run) begin
        if (dma_rd_out < 2) send_ar(1, mk_ar(4'd1, 64'h10_0000, 8'd255));
        else @(negedge clk);
      end
    end
  end
  initial begin
    forever begin
      wait (dma_run);
      while (dma_run) begin
        fork
          send_aw(1, mk_aw(4'd1, 64'h20_0000, 8'd255));
          send_w(1, 256, 64'hD000);
        join
      end
    end
  end
  task automatic dma_stop();
    dma_run = 1'b0;
    while (dma_rd_out != 0 || n_b[1] != n_ar_aw1()) @(negedge clk);
    repeat (10) @(negedge clk);
  endtask

  int unsigned n_aw1 = 0;
  always @(posedge clk) if (mreq[1].aw_valid && mrsp[1].aw_ready) n_aw1++;
  function automatic int unsigned n_ar_aw1(); return n_aw1; endfunction

  // register helpers
  function automatic logic [15:0] ua(int u, int off);  return 16'(32'h400 * (u + 1) + off); endfunction
  function automatic logic [15:0] ra(int u, int r, int off); return ua(u, 32'h40 * (r + 1) + off); endfunction
  task automatic wr(input logic [15:0] a, input logic [31:0] d, input id_t id = 4'd0);
    logic [31:0] rd; logic err;
    reg_access(1'b1, a, d, id, rd, err);
    check(!err, $sformatf("register write 0x%04h", a));
  endtask
  task automatic rdreg(input logic [15:0] a, output logic [31:0] d, input id_t id = 4'd0);
    logic err;
    reg_access(1'b0, a, 0, id, d, err);
    check(!err, $sformatf("register read 0x%04h", a));
  endtask

  // ------------------------------------------------------------ sequence
  initial begin
    logic [31:0] rd, lat_sum0, lat_cnt0;
    logic        err;
    longint      max0, maxA, maxB, maxC, t0;
    real         avg0, avgA, avgB, avgC;
    longint      sum_all;
    creq = '0;
    for (int m = 0; m < NM; m++) begin
      mreq[m] = '0; mreq[m].b_ready = 1'b1; mreq[m].r_ready = 1'b1;
      n_b[m] = 0; n_xb[m] = 0; n_ar[m] = 0; n_xar[m] = 0;
    end
    repeat (5) @(negedge clk);
    rst_n = 1'b1;

    // 0. bus guard
    reg_access(1'b1, ua(0, 8), 1, 4'd1, rd, err);
    if (err) n_guard_err++;
    check(err, "configuration refused while unclaimed");
    wr(16'h0000, 0, 4'd0);
    check(claimed && owner == 4'd0, "core claimed the configuration space");

    // 1. configuration: one region over the whole low 4 GiB, large budgets
    for (int u = 0; u < NM; u++) begin
      wr(ra(u, 0, 32'h00), 32'h0);
      wr(ra(u, 0, 32'h08), 32'h0);
      wr(ra(u, 0, 32'h0C), 32'h1);
      wr(ra(u, 0, 32'h10), 32'hFFFF_FFFF);
      wr(ra(u, 0, 32'h18), 32'hFFFF_FFFF);
      wr(ua(u, 8), 32'd256);
    end
    repeat (20) @(negedge clk);
    for (int u = 0; u < NM; u++) begin
      rdreg(ua(u, 4), rd);
      check(rd[5:4] == 2'd0 && !rd[0], "unit running after configuration");
    end

    // 2. single source
    core_reads(16, max0, avg0);
    $display("single source: core read latency max %0d avg %0.1f", max0, avg0);

    // 3. uncontrolled contention
    dma_run = 1'b1;
    repeat (300) @(negedge clk);
    core_reads(16, maxA, avgA);
    dma_stop();
    $display("fragment 256: core read latency max %0d avg %0.1f", maxA, avgA);
    check(maxA >= 256, "unsplit DMA bursts delay the core by a full burst");

    // 4. fragment length 1 for the DMA
    wr(ua(1, 8), 32'd1);
    repeat (10) @(negedge clk);
    dma_run = 1'b1;
    repeat (300) @(negedge clk);
    core_reads(16, maxB, avgB);
    $display("fragment 1:   core read latency max %0d avg %0.1f", maxB, avgB);
    check(maxB <= max0 + 4 + 2, "fragmentation bounds the core latency near single source");
    check(avgB < avgA / 10.0, "fragmentation restores fairness");
    check(n_xar[1] > n_ar[1], "DMA reads reach the crossbar as fragments");

    // 5. budget regulation of the DMA: 320 B per direction per 1000 cycles,
    //    throttling on
    wr(ra(1, 0, 32'h10), 32'd320);
    wr(ra(1, 0, 32'h14), 32'd1000);
    wr(ra(1, 0, 32'h18), 32'd320);
    wr(ra(1, 0, 32'h1C), 32'd1000);
    wr(ua(1, 0), 32'b110);
    max_period_bytes = '0;
    repeat (3000) @(negedge clk);
    core_reads(16, maxC, avgC);
    $display("budget 320 B: core read latency max %0d avg %0.1f, DMA bytes per period max %0d",
             maxC, avgC, max_period_bytes);
    check(max_period_bytes <= 320 + 8, "DMA bytes per period bounded by its budget");
    check(max_period_bytes >= 320, "DMA uses its budget");
    check(avgC <= avgB, "less DMA budget, less core latency");
    dma_stop();
    wr(ua(1, 0), 32'b000);
    check(n_b[1] > 0 && n_xb[1] > n_b[1], "write responses of fragments coalesced");
    n_coalesce = n_xb[1] - n_b[1];

    // 6a. write buffer: system DMA sends its data late and slowly
    fork
      send_aw(2, mk_aw(4'd2, 64'h30_0000, 8'd7));
      begin repeat (20) @(negedge clk); send_w(2, 8, 64'h5000, 2); end
    join
    while (n_b[2] < 1) @(negedge clk);
    check(xbar.rd(64'h30_0038) == 64'h5007, "system DMA write data");

    // 6b. user-commanded isolation of the system DMA
    wr(ua(2, 0), 32'b001);
    repeat (3) @(negedge clk);
    rdreg(ua(2, 4), rd);
    check(rd[0] && iso[2], "system DMA isolated on command");
    if (rd[0]) n_user_iso++;
    t0 = n_xar[2];
    fork
      send_ar(2, mk_ar(4'd2, 64'h30_0000, 8'd7));
      begin
        repeat (30) @(negedge clk);
        check(n_xar[2] == t0, "isolated manager's read held back");
        wr(ua(2, 0), 32'b000);
      end
    join
    repeat (40) @(negedge clk);
    check(n_xar[2] == t0 + 1, "read issued after release");

    // 6c. latency statistics of the core, against the testbench's own count
    rdreg(ua(0, 32'h18), lat_sum0);
    rdreg(ua(0, 32'h1C), lat_cnt0);
    sum_all = 0;
    foreach (core_lat[i]) sum_all += core_lat[i];
    check(lat_cnt0 == 64 && longint'(lat_sum0) == sum_all, "core read latency statistics");
    $display("core reads %0d, average latency %0.2f cycles", lat_cnt0, real'(lat_sum0) / real'(lat_cnt0));
    rdreg(ra(0, 0, 32'h2C), rd);
    check(rd == 64 * 8, "core read bytes in the current period");

    // 6d. handover of the guard to the system DMA's ID
    wr(16'h0000, 32'd2, 4'd0);
    reg_access(1'b0, ua(0, 4), 0, 4'd0, rd, err);
    check(err, "previous owner refused after handover");
    reg_access(1'b0, ua(0, 4), 0, 4'd2, rd, err);
    check(!err && owner == 4'd2, "new owner accepted");
    if (!err && owner == 4'd2) n_handover++;

    // mechanisms
    $display("mechanisms: split %0d coalesce %0d wbuf_hold %0d deplete %0d replenish %0d throttle %0d drain %0d user_iso %0d guard_err %0d handover %0d",
             n_split, n_coalesce, n_wbuf_hold, n_deplete, n_replenish, n_throttle, n_drain,
             n_user_iso, n_guard_err, n_handover);
    check(n_split > 0,     "burst splitting happened");
    check(n_coalesce > 0,  "B coalescing happened");
    check(n_wbuf_hold > 0, "write buffer held an AW");
    check(n_deplete > 0,   "budget depletion happened");
    check(n_replenish > 0, "budget replenishment happened");
    check(n_throttle > 0,  "throttling happened");
    check(n_drain > 0,     "reconfiguration drain happened");
    check(n_user_iso > 0,  "user isolation happened");
    check(n_guard_err > 0, "guard refusal happened");
    check(n_handover > 0,  "guard handover happened");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
