// realm_mr_unit: monitoring and regulation (M&R) unit of a REALM unit.
//
// Sits in the request path behind the burst splitter and sees every fragment.
// Region decoders compare the address of each AW and AR handshake with the
// NumRegions runtime-configured regions [start_addr, end_addr); a region with
// end_addr <= start_addr is disabled. For each region and direction (write,
// read) the tracking counters hold
//   * the budget left in the current period: set to the configured budget
//     when a period starts, reduced by the bytes of each hitting transfer,
//     (len + 1) << size, saturating at zero;
//   * the bytes transferred since the period started;
//   * the cycles elapsed in the period. A period of P cycles restarts the
//     counters every P cycles; P = 0 never replenishes. reload_i restarts all
//     periods at once (used after reconfiguration).
// depleted_o is high while regulation is enabled and any enabled region has
// no budget left in either direction. The unit then holds back every further
// AW and AR fragment, and the REALM unit isolates the manager at its ingress,
// until the next replenishment. A fragment is let through while any budget is
// left, so a period may overrun its budget by at most one fragment.
//
// Throttling unit (optional, throttle_en_i): limits the outstanding fragments
// per direction to NumPending >> k, at least one, where k = 1, 2, 3 once the
// smallest remaining budget of the direction drops below one half, one
// quarter, one eighth of its configured budget. Backpressure thus grows before
// the budget runs out.
//
// Latency: each AW/AR handshake pushes its time stamp into a NumPending-deep
// FIFO per direction; a B response or last R beat pops it and adds the elapsed
// cycles to the latency sum and one to the transaction count. The average
// latency is sum / count. The FIFO order assumes in-order responses.
//
// The paper gives the per-region budget, period and address range, the
// isolation on depletion, the throttling of outstanding transactions by the
// remaining budget, and the bandwidth and average-latency statistics. The
// saturating counters, the halving throttle rule and the time stamp FIFO are
// this design's choices. No added latency: the request path is combinational.
module realm_mr_unit
  import realm_pkg::*;
#(
  parameter int unsigned NumRegions = 2,
  parameter int unsigned NumPending = 8
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  axi_req_t     slv_req_i,
  output axi_rsp_t     slv_rsp_o,
  output axi_req_t     mst_req_o,
  input  axi_rsp_t     mst_rsp_i,
  input  region_cfg_t  region_cfg_i [NumRegions],
  input  logic         regulate_en_i,
  input  logic         throttle_en_i,
  input  logic         reload_i,
  output region_stat_t region_stat_o [NumRegions],
  output lat_stat_t    lat_stat_o,
  output logic         depleted_o,
  output logic         throttled_o
);

  localparam int unsigned PW = $clog2(NumPending) + 1;

  cnt_t now_q;
  region_stat_t st_q [NumRegions];
  lat_stat_t    lat_q;

  logic [NumRegions-1:0] w_hit, r_hit, en, w_exp, r_exp;
  logic w_ts_ready, r_ts_ready, w_ts_valid, r_ts_valid;
  cnt_t w_ts, r_ts;
  logic [PW-1:0] w_out, r_out, w_limit, r_limit;
  logic w_throttle, r_throttle;

  // Region decoders.
  always_comb begin
    for (int i = 0; i < NumRegions; i++) begin
      en[i]    = region_cfg_i[i].end_addr > region_cfg_i[i].start_addr;
      w_hit[i] = en[i] && (slv_req_i.aw.addr >= region_cfg_i[i].start_addr)
                       && (slv_req_i.aw.addr <  region_cfg_i[i].end_addr);
      r_hit[i] = en[i] && (slv_req_i.ar.addr >= region_cfg_i[i].start_addr)
                       && (slv_req_i.ar.addr <  region_cfg_i[i].end_addr);
      w_exp[i] = (region_cfg_i[i].w_period != '0) &&
                 (st_q[i].w_time >= region_cfg_i[i].w_period - 1);
      r_exp[i] = (region_cfg_i[i].r_period != '0) &&
                 (st_q[i].r_time >= region_cfg_i[i].r_period - 1);
    end
  end

  // Throttle limits: NumPending halved for every halving of the budget left.
  function automatic logic [PW-1:0] limit_of(cnt_t left, cnt_t budget);
    logic [CntWidth+3:0] l;
    l = (CntWidth+4)'(left);
    if ((l << 3) < (CntWidth+4)'(budget)) return ((NumPending >> 3) == 0) ? PW'(1) : PW'(NumPending >> 3);
    if ((l << 2) < (CntWidth+4)'(budget)) return ((NumPending >> 2) == 0) ? PW'(1) : PW'(NumPending >> 2);
    if ((l << 1) < (CntWidth+4)'(budget)) return ((NumPending >> 1) == 0) ? PW'(1) : PW'(NumPending >> 1);
    return PW'(NumPending);
  endfunction

  always_comb begin
    w_limit = PW'(NumPending);
    r_limit = PW'(NumPending);
    depleted_o = 1'b0;
    for (int i = 0; i < NumRegions; i++) begin
      if (en[i]) begin
        if (limit_of(st_q[i].w_budget_left, region_cfg_i[i].w_budget) < w_limit)
          w_limit = limit_of(st_q[i].w_budget_left, region_cfg_i[i].w_budget);
        if (limit_of(st_q[i].r_budget_left, region_cfg_i[i].r_budget) < r_limit)
          r_limit = limit_of(st_q[i].r_budget_left, region_cfg_i[i].r_budget);
        if ((st_q[i].w_budget_left == '0) || (st_q[i].r_budget_left == '0))
          depleted_o = regulate_en_i;
      end
    end
    w_throttle = throttle_en_i && (w_out >= w_limit);
    r_throttle = throttle_en_i && (r_out >= r_limit);
  end
  assign throttled_o = w_throttle || r_throttle;

  always_comb begin
    mst_req_o          = slv_req_i;
    slv_rsp_o          = mst_rsp_i;
    mst_req_o.aw_valid = slv_req_i.aw_valid && w_ts_ready && !w_throttle && !depleted_o;
    slv_rsp_o.aw_ready = mst_rsp_i.aw_ready && w_ts_ready && !w_throttle && !depleted_o;
    mst_req_o.ar_valid = slv_req_i.ar_valid && r_ts_ready && !r_throttle && !depleted_o;
    slv_rsp_o.ar_ready = mst_rsp_i.ar_ready && r_ts_ready && !r_throttle && !depleted_o;
  end

  wire  aw_hs = mst_req_o.aw_valid && mst_rsp_i.aw_ready;
  wire  ar_hs = mst_req_o.ar_valid && mst_rsp_i.ar_ready;
  wire  b_hs  = mst_rsp_i.b_valid && slv_req_i.b_ready;
  wire  rl_hs = mst_rsp_i.r_valid && slv_req_i.r_ready && mst_rsp_i.r.last;
  cnt_t w_bytes, r_bytes;
  assign w_bytes = burst_bytes(slv_req_i.aw.len, slv_req_i.aw.size);
  assign r_bytes = burst_bytes(slv_req_i.ar.len, slv_req_i.ar.size);

  function automatic cnt_t sat_sub(cnt_t a, cnt_t b);
    return (a > b) ? a - b : '0;
  endfunction

  // Tracking counters.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      now_q <= '0;
      lat_q <= '0;
      for (int i = 0; i < NumRegions; i++) st_q[i] <= '0;
    end else begin
      now_q <= now_q + 1'b1;
      for (int i = 0; i < NumRegions; i++) begin
        // write direction
        if (reload_i || w_exp[i]) begin
          st_q[i].w_time        <= '0;
          st_q[i].w_bytes       <= '0;
          st_q[i].w_budget_left <= region_cfg_i[i].w_budget;
        end else begin
          st_q[i].w_time <= st_q[i].w_time + 1'b1;
          if (aw_hs && w_hit[i]) begin
            st_q[i].w_bytes       <= st_q[i].w_bytes + w_bytes;
            st_q[i].w_budget_left <= sat_sub(st_q[i].w_budget_left, w_bytes);
          end
        end
        // read direction
        if (reload_i || r_exp[i]) begin
          st_q[i].r_time        <= '0;
          st_q[i].r_bytes       <= '0;
          st_q[i].r_budget_left <= region_cfg_i[i].r_budget;
        end else begin
          st_q[i].r_time <= st_q[i].r_time + 1'b1;
          if (ar_hs && r_hit[i]) begin
            st_q[i].r_bytes       <= st_q[i].r_bytes + r_bytes;
            st_q[i].r_budget_left <= sat_sub(st_q[i].r_budget_left, r_bytes);
          end
        end
      end
      if (b_hs) begin
        lat_q.w_lat_sum <= lat_q.w_lat_sum + (now_q - w_ts);
        lat_q.w_lat_cnt <= lat_q.w_lat_cnt + 1'b1;
      end
      if (rl_hs) begin
        lat_q.r_lat_sum <= lat_q.r_lat_sum + (now_q - r_ts);
        lat_q.r_lat_cnt <= lat_q.r_lat_cnt + 1'b1;
      end
    end
  end

  assign region_stat_o = st_q;
  assign lat_stat_o    = lat_q;

  realm_fifo #(.Depth(NumPending), .T(cnt_t)) i_w_ts (
    .clk_i, .rst_ni,
    .in_valid_i (aw_hs), .in_ready_o(w_ts_ready), .in_data_i(now_q),
    .out_valid_o(w_ts_valid), .out_ready_i(b_hs), .out_data_o(w_ts), .count_o(w_out)
  );

  realm_fifo #(.Depth(NumPending), .T(cnt_t)) i_r_ts (
    .clk_i, .rst_ni,
    .in_valid_i (ar_hs), .in_ready_o(r_ts_ready), .in_data_i(now_q),
    .out_valid_o(r_ts_valid), .out_ready_i(rl_hs), .out_data_o(r_ts), .count_o(r_out)
  );

  // Every response belongs to a request seen before.
  a_b_known: assert property (@(posedge clk_i) disable iff (!rst_ni) b_hs  |-> w_ts_valid);
  a_r_known: assert property (@(posedge clk_i) disable iff (!rst_ni) rl_hs |-> r_ts_valid);

endmodule
