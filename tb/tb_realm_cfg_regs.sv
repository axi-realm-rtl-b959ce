// tb_realm_cfg_regs: self-checking test of the configuration register file
// (three units, two regions each). Checks reset values, control fields, the
// clamping of the fragmentation length, the update and reload pulses, 64-bit
// region boundaries, read-out of status, budget and latency statistics, and
// error responses for read-only and unmapped registers.
//
// The register offsets checked here are this design's own map, documented in
// realm_cfg_regs. Accesses are single-cycle; each is applied on a falling edge
// and its response sampled before the next rising edge. Ends with a TB_RESULT
// line; a watchdog ends a hung run.
module tb_realm_cfg_regs;
  import realm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  reg_req_t     creq;
  reg_rsp_t     crsp;
  unit_ctrl_t   ctrl [3];
  region_cfg_t  rcfg [3][2];
  logic         upd [3], rld [3];
  region_stat_t rst_s [3][2];
  lat_stat_t    lat [3];
  logic         iso [3], dep [3], thr [3];
  logic [1:0]   fsm [3];
  int           n_upd [3], n_rld [3];

  `include "tb_reg_drv.svh"

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  realm_cfg_regs #(.NumUnits(3), .NumRegions(2)) dut (
    .clk_i(clk), .rst_ni(rst_n), .reg_req_i(creq), .reg_rsp_o(crsp),
    .ctrl_o(ctrl), .region_cfg_o(rcfg), .cfg_update_o(upd), .reload_o(rld),
    .region_stat_i(rst_s), .lat_stat_i(lat), .isolated_i(iso), .depleted_i(dep),
    .throttled_i(thr), .fsm_state_i(fsm)
  );

  always @(posedge clk) for (int u = 0; u < 3; u++) begin
    if (upd[u]) n_upd[u]++;
    if (rld[u]) n_rld[u]++;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] ua(int u, int off);  return 16'(32'h400 * (u + 1) + off); endfunction
  function automatic logic [15:0] ra(int u, int r, int off); return ua(u, 32'h40 * (r + 1) + off); endfunction

  initial begin
    logic [31:0] rd;
    logic        err;
    creq = '0;
    for (int u = 0; u < 3; u++) begin
      n_upd[u] = 0; n_rld[u] = 0;
      iso[u] = 1'(u == 1); dep[u] = 1'(u == 2); thr[u] = 1'b0; fsm[u] = 2'(u);
      lat[u] = '{w_lat_sum: 32'(100 + u), w_lat_cnt: 32'(10 + u), r_lat_sum: 32'(200 + u), r_lat_cnt: 32'(20 + u)};
      for (int r = 0; r < 2; r++)
        rst_s[u][r] = '{w_budget_left: 32'(1000 * u + 10 * r + 1), r_budget_left: 32'(1000 * u + 10 * r + 2),
                        w_bytes: 32'(1000 * u + 10 * r + 3), r_bytes: 32'(1000 * u + 10 * r + 4),
                        w_time: 32'(1000 * u + 10 * r + 5), r_time: 32'(1000 * u + 10 * r + 6)};
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    reg_access(1'b0, ua(0, 8), 0, 0, rd, err);
    check(!err && rd == 256 && ctrl[0].frag_len == 256, "FRAG_LEN resets to 256");
    reg_access(1'b0, ua(2, 0), 0, 0, rd, err);
    check(!err && rd == 0, "CTRL resets to 0");

    reg_access(1'b1, ua(1, 0), 32'b101, 0, rd, err);
    check(!err && ctrl[1].isolate && !ctrl[1].throttle_en && ctrl[1].regulate_en, "CTRL fields");
    check(!ctrl[0].isolate && !ctrl[2].regulate_en, "other units' CTRL untouched");

    reg_access(1'b1, ua(2, 8), 32'd4, 0, rd, err);
    @(negedge clk);
    check(ctrl[2].frag_len == 4 && n_upd[2] == 1 && n_upd[0] == 0 && n_rld[2] == 0, "FRAG_LEN write pulses update");
    reg_access(1'b1, ua(2, 8), 32'd0, 0, rd, err);
    check(ctrl[2].frag_len == 1, "FRAG_LEN 0 clamps to 1");
    reg_access(1'b1, ua(2, 8), 32'd1000, 0, rd, err);
    check(ctrl[2].frag_len == 256, "FRAG_LEN above 256 clamps to 256");

    reg_access(1'b1, ra(0, 1, 32'h00), 32'h8000_0000, 0, rd, err);
    reg_access(1'b1, ra(0, 1, 32'h04), 32'h0000_0012, 0, rd, err);
    reg_access(1'b1, ra(0, 1, 32'h08), 32'h9000_0000, 0, rd, err);
    reg_access(1'b1, ra(0, 1, 32'h0C), 32'h0000_0012, 0, rd, err);
    @(negedge clk);
    check(rcfg[0][1].start_addr == 64'h12_8000_0000 && rcfg[0][1].end_addr == 64'h12_9000_0000,
          "64-bit region boundaries");
    check(n_upd[0] == 4, "boundary writes pulse update");
    reg_access(1'b1, ra(0, 1, 32'h10), 32'd4096, 0, rd, err);
    reg_access(1'b1, ra(0, 1, 32'h1C), 32'd1000, 0, rd, err);
    @(negedge clk);
    check(rcfg[0][1].w_budget == 4096 && rcfg[0][1].r_period == 1000, "budget and period");
    check(n_rld[0] == 2 && n_upd[0] == 4, "budget/period writes pulse reload only");
    reg_access(1'b0, ra(0, 1, 32'h10), 0, 0, rd, err);
    check(!err && rd == 4096, "budget reads back");

    reg_access(1'b0, ua(1, 4), 0, 0, rd, err);
    check(!err && rd == 32'h11, "STATUS of unit 1 (isolated, FSM 1)");
    reg_access(1'b0, ua(2, 4), 0, 0, rd, err);
    check(!err && rd == 32'h22, "STATUS of unit 2 (depleted, FSM 2)");
    reg_access(1'b0, ra(2, 1, 32'h28), 0, 0, rd, err);
    check(!err && rd == 2013, "W_BYTES of unit 2 region 1");
    reg_access(1'b0, ra(1, 0, 32'h34), 0, 0, rd, err);
    check(!err && rd == 1006, "R_TIME of unit 1 region 0");
    reg_access(1'b0, ra(0, 0, 32'h20), 0, 0, rd, err);
    check(!err && rd == 1, "W_BUDGET_LEFT of unit 0 region 0");
    reg_access(1'b0, ua(2, 32'h18), 0, 0, rd, err);
    check(!err && rd == 202, "R_LAT_SUM of unit 2");
    reg_access(1'b0, ua(1, 32'h14), 0, 0, rd, err);
    check(!err && rd == 11, "W_LAT_CNT of unit 1");

    reg_access(1'b1, ua(0, 4), 1, 0, rd, err);
    check(err, "write to STATUS refused");
    reg_access(1'b1, ra(0, 0, 32'h20), 1, 0, rd, err);
    check(err, "write to budget-left refused");
    reg_access(1'b0, 16'h0200, 0, 0, rd, err);
    check(err, "below the unit windows: error");
    reg_access(1'b0, ua(3, 0), 0, 0, rd, err);
    check(err, "fourth unit does not exist: error");
    reg_access(1'b0, ra(0, 2, 0), 0, 0, rd, err);
    check(err, "third region does not exist: error");
    reg_access(1'b0, ua(0, 2), 0, 0, rd, err);
    check(err, "misaligned address: error");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
