// tb_realm_workloads: the two contention experiments of the design's
// evaluation, replayed on realm_sys at its default parameters (three managers,
// 64-bit AXI, 8 pending, 16-beat write buffer, 2 regions).
//
// Manager 0 plays a real-time core issuing single-beat reads, one at a time,
// and the testbench records each read's latency (AR handshake to R). Manager 1
// plays an accelerator DMA double-buffering 256-beat bursts (reads and writes
// at the same time). Behind the units a behavioural crossbar with
// transaction-granular round-robin arbitration and a memory with 4 cycles of
// read latency stands in for the interconnect and the last-level cache.
//
// Sweep 1, fragmentation length: the DMA's fragment length goes 256, 128, ...,
// 1 with budgets that never run out. Expected: the core's worst-case latency
// falls from about a full burst (256 beats) to a few cycles above the
// single-source case, and never rises as the fragments get shorter.
//
// Sweep 2, budget distribution: fragment length 1, period 1000 cycles, the
// core keeps an 8 KiB budget and the DMA's budget goes 8 KiB / k for
// k = 1..5 (8 KiB down to 1.6 KiB). Expected: the DMA never moves more than
// its budget plus one fragment in a period, and the core's average latency
// does not grow as the DMA budget shrinks.
//
// The sweep points and the 1000-cycle period follow the evaluation; the
// memory model's latency and the core's access pattern (one read every few
// cycles) are this testbench's own. The printed tables are the result.
module tb_realm_workloads;
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
    repeat (600000) @(posedge clk);
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
  // DMA read beats delivered, for the bandwidth column
  int unsigned dma_rbeats = 0;
  always @(posedge clk) if (mrsp[1].r_valid && mreq[1].r_ready) dma_rbeats++;

  initial begin
    logic [31:0] rd;
    logic        err;
    longint      max0, mx, prev_max;
    real         avg0, av, avg_k1, avg_prev;
    longint      b0, t0;
    int          fl;
    creq = '0;
    for (int m = 0; m < NM; m++) begin
      mreq[m] = '0; mreq[m].b_ready = 1'b1; mreq[m].r_ready = 1'b1;
      n_b[m] = 0; n_xb[m] = 0; n_ar[m] = 0; n_xar[m] = 0;
    end
    repeat (5) @(negedge clk);
    rst_n = 1'b1;

    wr(16'h0000, 0, 4'd0);
    for (int u = 0; u < NM; u++) begin
      wr(ra(u, 0, 32'h00), 32'h0);
      wr(ra(u, 0, 32'h08), 32'h0);
      wr(ra(u, 0, 32'h0C), 32'h1);
      wr(ra(u, 0, 32'h10), 32'hFFFF_FFFF);
      wr(ra(u, 0, 32'h18), 32'hFFFF_FFFF);
      wr(ua(u, 8), 32'd256);
    end
    repeat (20) @(negedge clk);

    core_reads(32, max0, avg0);
    $display("single source: core read latency max %0d avg %0.1f", max0, avg0);

    // Sweep 1: fragmentation length
    $display("frag_len | core max | core avg | DMA read beats/1000 cycles");
    prev_max = 1 << 30;
    fl = 256;
    while (fl >= 1) begin
      wr(ua(1, 8), 32'(fl));
      repeat (10) @(negedge clk);
      dma_run = 1'b1;
      repeat (600) @(negedge clk);
      b0 = dma_rbeats; t0 = now;
      core_reads(32, mx, av);
      $display("%8d | %8d | %8.1f | %0d", fl, mx, av, (dma_rbeats - b0) * 1000 / (now - t0));
      dma_stop();
      check(mx <= prev_max + 2, $sformatf("core latency does not grow at frag_len %0d", fl));
      check(dma_rbeats - b0 > 0, $sformatf("DMA kept running at frag_len %0d", fl));
      if (fl == 256) check(mx >= 256, "unsplit bursts delay the core by a full burst");
      if (fl == 1)   check(mx <= max0 + 6, "single-beat fragments bring the core near single source");
      prev_max = mx;
      fl = fl / 2;
    end

    // Sweep 2: budget distribution, fragment length 1, period 1000
    $display("DMA budget | bytes | core max | core avg | DMA peak bytes/period");
    wr(ua(1, 8), 32'd1);
    for (int u = 0; u < 2; u++) begin
      wr(ra(u, 0, 32'h10), 32'd8192);
      wr(ra(u, 0, 32'h14), 32'd1000);
      wr(ra(u, 0, 32'h18), 32'd8192);
      wr(ra(u, 0, 32'h1C), 32'd1000);
      wr(ua(u, 0), 32'b100);
    end
    avg_prev = 1.0e9;
    for (int k = 1; k <= 5; k++) begin
      wr(ra(1, 0, 32'h10), 32'(8192 / k));
      wr(ra(1, 0, 32'h18), 32'(8192 / k));
      repeat (10) @(negedge clk);
      dma_run = 1'b1;
      repeat (1000) @(negedge clk);
      max_period_bytes = '0;
      core_reads(64, mx, av);
      repeat (2000) @(negedge clk);
      $display("       1/%0d | %5d | %8d | %8.1f | %0d", k, 8192 / k, mx, av, max_period_bytes);
      dma_stop();
      check(max_period_bytes <= cnt_t'(8192 / k + 8), $sformatf("DMA within budget at 1/%0d", k));
      check(av <= avg_prev + 0.5, $sformatf("core latency does not grow at 1/%0d", k));
      if (k == 1) avg_k1 = av;
      avg_prev = av;
    end
    check(avg_prev <= avg_k1, "smallest DMA budget gives the core the least latency");
    rdreg(ua(0, 4), rd);
    check(!rd[1], "the core's own budget never ran out");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
