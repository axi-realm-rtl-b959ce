// realm_isolate: ingress isolation block of a REALM unit.
//
// Sits between a manager and the rest of the unit. While isolate_i is high no
// new AW or AR request is let through (its ready is held low towards the
// manager and its valid low downstream), but transactions already accepted run
// to completion: their W beats, B responses and R beats still pass. Two
// counters track the outstanding writes (AW accepted, B not yet returned) and
// reads (AR accepted, last R not yet returned); isolated_o rises once isolation
// is requested and both counters are zero. A third counter holds the number of
// accepted AWs whose W burst is not complete, and W beats pass only while it
// is positive or while an AW is being presented downstream, so that an
// isolated manager cannot push write data ahead of an address. The counters also cap the outstanding transactions per direction at
// NumPending. A request already presented downstream and not yet accepted is
// kept up until it is accepted, so isolation never withdraws a valid request
// (for a burst being split, that is until its last fragment has left).
//
// The paper gives the behaviour (cut-off, awareness of outstanding
// transactions, completion of outstanding ones on user-commanded isolation);
// the counters, the W gating and the cap are this design's choices. Purely
// combinational through-paths: no added latency.
module realm_isolate
  import realm_pkg::*;
#(
  parameter int unsigned NumPending = 8
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t slv_req_i,
  output axi_rsp_t slv_rsp_o,
  output axi_req_t mst_req_o,
  input  axi_rsp_t mst_rsp_i,
  input  logic     isolate_i,
  output logic     isolated_o
);

  localparam int unsigned CW = $clog2(NumPending + 1);

  logic [CW-1:0] w_out_q, r_out_q;
  logic signed [CW:0] w_open_q;   // AWs accepted minus W bursts done; -1 if data led
  logic w_pass;
  logic aw_block, ar_block;
  logic aw_lock_q, ar_lock_q;

  // A request already presented downstream but not yet accepted is never
  // withdrawn (AXI valid stability); blocking starts with the next request.
  assign aw_block = (isolate_i || (w_out_q == CW'(NumPending))) && !aw_lock_q;
  assign ar_block = (isolate_i || (r_out_q == CW'(NumPending))) && !ar_lock_q;

  // W beats pass for accepted AWs and for the AW being presented downstream
  // (a split burst is only accepted after its data has begun to flow).
  assign w_pass = (w_open_q > 0) || mst_req_o.aw_valid;

  always_comb begin
    mst_req_o          = slv_req_i;
    mst_req_o.aw_valid = slv_req_i.aw_valid && !aw_block;
    mst_req_o.ar_valid = slv_req_i.ar_valid && !ar_block;
    mst_req_o.w_valid  = slv_req_i.w_valid  && w_pass;
    slv_rsp_o          = mst_rsp_i;
    slv_rsp_o.aw_ready = mst_rsp_i.aw_ready && !aw_block;
    slv_rsp_o.ar_ready = mst_rsp_i.ar_ready && !ar_block;
    slv_rsp_o.w_ready  = mst_rsp_i.w_ready  && w_pass;
  end

  wire aw_hs = mst_req_o.aw_valid && mst_rsp_i.aw_ready;
  wire ar_hs = mst_req_o.ar_valid && mst_rsp_i.ar_ready;
  wire wl_hs = mst_req_o.w_valid  && mst_rsp_i.w_ready && slv_req_i.w.last;
  wire b_hs  = mst_rsp_i.b_valid  && slv_req_i.b_ready;
  wire rl_hs = mst_rsp_i.r_valid  && slv_req_i.r_ready && mst_rsp_i.r.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      w_out_q   <= '0;
      r_out_q   <= '0;
      w_open_q  <= '0;
      aw_lock_q <= 1'b0;
      ar_lock_q <= 1'b0;
    end else begin
      aw_lock_q <= mst_req_o.aw_valid && !mst_rsp_i.aw_ready;
      ar_lock_q <= mst_req_o.ar_valid && !mst_rsp_i.ar_ready;
      w_out_q  <= w_out_q  + CW'(aw_hs) - CW'(b_hs);
      r_out_q  <= r_out_q  + CW'(ar_hs) - CW'(rl_hs);
      w_open_q <= w_open_q + (CW+1)'(aw_hs) - (CW+1)'(wl_hs);
    end
  end

  assign isolated_o = isolate_i && (w_out_q == '0) && (r_out_q == '0) && !aw_lock_q && !ar_lock_q
                    && (w_open_q == 0);

  // AXI rule: a valid request must stay asserted until it is accepted.
  property p_stable_valid(v, r);
    @(posedge clk_i) disable iff (!rst_ni) v && !r |=> v;
  endproperty
  a_aw_stable: assert property (p_stable_valid(slv_req_i.aw_valid, slv_rsp_o.aw_ready));
  a_ar_stable: assert property (p_stable_valid(slv_req_i.ar_valid, slv_rsp_o.ar_ready));

endmodule
