// realm_burst_splitter: granular burst splitter of a REALM unit.
//
// Cuts every AXI4 burst that may be cut into fragments of at most frag_len_i
// beats (1..256, a value of 0 counts as 1). Atomic and exclusive transactions,
// WRAP bursts and non-modifiable transactions (AxCACHE[1] = 0) of sixteen beats
// or fewer pass whole. Write fragments are further limited to MaxWFrag beats so
// that one fragment always fits into the write buffer behind the splitter.
//
// The upstream AW/AR is held while its fragments are emitted one per
// downstream handshake: fragment k of an INCR burst starts at the original
// address plus the bytes of the fragments before it, FIXED bursts keep their
// address. Only the handshake of the last fragment acknowledges the upstream
// request, so the path adds no latency. Each emitted fragment pushes an entry
// into a meta buffer (NumPending deep per FIFO):
//   * W lengths: the W path re-creates w.last at every fragment boundary;
//   * B meta: one bit "last fragment"; B responses of the other fragments are
//     absorbed and their worst response code is merged into the single B
//     returned upstream;
//   * R meta: one bit "last fragment"; R beats pass, r.last is forwarded only
//     for the last fragment of the original burst.
// The meta buffers assume responses come back in request order, which the
// paper also assumes for read data. AXI atomics that return R data are passed
// whole but are not tracked on the R path.
//
// From the paper: fragmentation with runtime-configurable granularity from one
// to 256 beats, the AXI4 splitting rules, B coalescing, r.last gating and the
// stored burst meta information. The FIFO organisation is this design's own.
module realm_burst_splitter
  import realm_pkg::*;
#(
  parameter int unsigned NumPending = 8,
  parameter int unsigned MaxWFrag   = 256
) (
  input  logic       clk_i,
  input  logic       rst_ni,
  input  logic [8:0] frag_len_i,
  input  axi_req_t   slv_req_i,
  output axi_rsp_t   slv_rsp_o,
  output axi_req_t   mst_req_o,
  input  axi_rsp_t   mst_rsp_i
);

  typedef logic [7:0] wlen_t;

  logic [8:0] frag;
  assign frag = (frag_len_i == '0) ? 9'd1 : frag_len_i;

  function automatic logic can_split(logic [1:0] burst, logic lock, logic [3:0] cache,
                                     logic [7:0] len, logic [5:0] atop);
    if (burst == BURST_WRAP)            return 1'b0;
    if (lock || (atop != '0))           return 1'b0;
    if (!cache[1] && (len < 8'd16))     return 1'b0;
    return 1'b1;
  endfunction

  function automatic logic [8:0] min9(logic [8:0] a, logic [8:0] b);
    return (a < b) ? a : b;
  endfunction

  // ---------------------------------------------------------------- AW path
  logic [8:0] aw_done_q, aw_rem, aw_eff, aw_this;
  logic       aw_last_frag;
  logic       wlen_in_ready, bmeta_in_ready;
  logic       aw_push;

  assign aw_rem  = 9'(slv_req_i.aw.len) + 9'd1 - aw_done_q;
  assign aw_eff  = can_split(slv_req_i.aw.burst, slv_req_i.aw.lock, slv_req_i.aw.cache,
                             slv_req_i.aw.len, slv_req_i.aw.atop)
                 ? min9(frag, 9'(MaxWFrag)) : 9'd256;
  assign aw_this = min9(aw_rem, aw_eff);
  assign aw_last_frag = (aw_this == aw_rem);

  // ---------------------------------------------------------------- AR path
  logic [8:0] ar_done_q, ar_rem, ar_eff, ar_this;
  logic       ar_last_frag;
  logic       rmeta_in_ready;
  logic       ar_push;

  assign ar_rem  = 9'(slv_req_i.ar.len) + 9'd1 - ar_done_q;
  assign ar_eff  = can_split(slv_req_i.ar.burst, slv_req_i.ar.lock, slv_req_i.ar.cache,
                             slv_req_i.ar.len, 6'd0) ? frag : 9'd256;
  assign ar_this = min9(ar_rem, ar_eff);
  assign ar_last_frag = (ar_this == ar_rem);

  // ---------------------------------------------------------------- W/B/R path
  logic  wlen_valid, bmeta_valid, rmeta_valid;
  wlen_t wlen_head;
  logic  bmeta_last, rmeta_last;
  logic  wlen_pop, bmeta_pop, rmeta_pop;
  logic [7:0] w_beat_q;
  logic [1:0] b_acc_q;

  always_comb begin
    mst_req_o = slv_req_i;
    slv_rsp_o = mst_rsp_i;

    // AW
    mst_req_o.aw.len  = 8'(aw_this - 9'd1);
    mst_req_o.aw.addr = (slv_req_i.aw.burst == BURST_FIXED) ? slv_req_i.aw.addr
                      : slv_req_i.aw.addr + (addr_t'(aw_done_q) << slv_req_i.aw.size);
    mst_req_o.aw_valid = slv_req_i.aw_valid && wlen_in_ready && bmeta_in_ready;
    slv_rsp_o.aw_ready = mst_rsp_i.aw_ready && wlen_in_ready && bmeta_in_ready && aw_last_frag;

    // AR
    mst_req_o.ar.len  = 8'(ar_this - 9'd1);
    mst_req_o.ar.addr = (slv_req_i.ar.burst == BURST_FIXED) ? slv_req_i.ar.addr
                      : slv_req_i.ar.addr + (addr_t'(ar_done_q) << slv_req_i.ar.size);
    mst_req_o.ar_valid = slv_req_i.ar_valid && rmeta_in_ready;
    slv_rsp_o.ar_ready = mst_rsp_i.ar_ready && rmeta_in_ready && ar_last_frag;

    // W: regenerate last at fragment boundaries
    mst_req_o.w.last  = (w_beat_q == wlen_head);
    mst_req_o.w_valid = slv_req_i.w_valid && wlen_valid;
    slv_rsp_o.w_ready = mst_rsp_i.w_ready && wlen_valid;

    // B: coalesce
    slv_rsp_o.b.resp  = (mst_rsp_i.b.resp > b_acc_q) ? mst_rsp_i.b.resp : b_acc_q;
    slv_rsp_o.b_valid = mst_rsp_i.b_valid && bmeta_valid && bmeta_last;
    mst_req_o.b_ready = bmeta_valid && (bmeta_last ? slv_req_i.b_ready : 1'b1);

    // R: gate last
    slv_rsp_o.r.last  = mst_rsp_i.r.last && rmeta_last;
    slv_rsp_o.r_valid = mst_rsp_i.r_valid && rmeta_valid;
    mst_req_o.r_ready = slv_req_i.r_ready && rmeta_valid;
  end

  assign aw_push   = mst_req_o.aw_valid && mst_rsp_i.aw_ready;
  assign ar_push   = mst_req_o.ar_valid && mst_rsp_i.ar_ready;
  assign wlen_pop  = mst_req_o.w_valid && mst_rsp_i.w_ready && mst_req_o.w.last;
  assign bmeta_pop = mst_rsp_i.b_valid && mst_req_o.b_ready;
  assign rmeta_pop = mst_rsp_i.r_valid && mst_req_o.r_ready && mst_rsp_i.r.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      aw_done_q <= '0;
      ar_done_q <= '0;
      w_beat_q  <= '0;
      b_acc_q   <= RESP_OKAY;
    end else begin
      if (aw_push) aw_done_q <= aw_last_frag ? 9'd0 : aw_done_q + aw_this;
      if (ar_push) ar_done_q <= ar_last_frag ? 9'd0 : ar_done_q + ar_this;
      if (mst_req_o.w_valid && mst_rsp_i.w_ready)
        w_beat_q <= mst_req_o.w.last ? 8'd0 : w_beat_q + 8'd1;
      if (bmeta_pop) b_acc_q <= bmeta_last ? RESP_OKAY : slv_rsp_o.b.resp;
    end
  end

  realm_fifo #(.Depth(NumPending), .T(wlen_t)) i_wlen (
    .clk_i, .rst_ni,
    .in_valid_i (aw_push), .in_ready_o (wlen_in_ready), .in_data_i (8'(aw_this - 9'd1)),
    .out_valid_o(wlen_valid), .out_ready_i(wlen_pop), .out_data_o(wlen_head), .count_o()
  );

  realm_fifo #(.Depth(NumPending), .T(logic)) i_bmeta (
    .clk_i, .rst_ni,
    .in_valid_i (aw_push), .in_ready_o (bmeta_in_ready), .in_data_i (aw_last_frag),
    .out_valid_o(bmeta_valid), .out_ready_i(bmeta_pop), .out_data_o(bmeta_last), .count_o()
  );

  realm_fifo #(.Depth(NumPending), .T(logic)) i_rmeta (
    .clk_i, .rst_ni,
    .in_valid_i (ar_push), .in_ready_o (rmeta_in_ready), .in_data_i (ar_last_frag),
    .out_valid_o(rmeta_valid), .out_ready_i(rmeta_pop), .out_data_o(rmeta_last), .count_o()
  );

  // An upstream request must keep its payload while its fragments are emitted.
  a_aw_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (aw_done_q != '0) |-> slv_req_i.aw_valid);
  a_ar_hold: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (ar_done_q != '0) |-> slv_req_i.ar_valid);

endmodule
