// realm_write_buffer: write transaction buffer of a REALM unit.
//
// Protects the interconnect against a manager that issues a write address and
// then withholds its data, which would keep the W channel of the downstream
// crossbar reserved. AWs enter a NumAw-deep FIFO and W beats a BufferDepth-deep
// FIFO. A counter holds how many complete W bursts (up to and including their
// last beat) the W FIFO contains, a second one how many of them already had
// their AW forwarded. An AW leaves the buffer only when its burst is complete
// in the W FIFO, and W beats leave only after the AW of their burst. A burst
// therefore streams out at full rate once it is forwarded, and cannot stall
// the downstream W channel.
//
// The AR, R and B channels pass through untouched. Every burst reaching the
// buffer must be at most BufferDepth beats long, or it never completes; the
// REALM unit guarantees this by limiting the splitter's write fragments.
//
// Timing: an AW is forwarded at the earliest one cycle after the last W beat
// of its burst entered the buffer. Paper: two AWs and one fragmented write
// burst, AW and W forwarded once the burst is fully contained, reads passed
// through; depth 16 in the evaluated configuration. The counter scheme is
// this design's own.
module realm_write_buffer
  import realm_pkg::*;
#(
  parameter int unsigned BufferDepth = 16,
  parameter int unsigned NumAw       = 2
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t slv_req_i,
  output axi_rsp_t slv_rsp_o,
  output axi_req_t mst_req_o,
  input  axi_rsp_t mst_rsp_i
);

  localparam int unsigned CW = $clog2(BufferDepth + 1);

  logic     aw_valid, aw_ready, w_valid, w_ready;
  aw_chan_t aw_head;
  w_chan_t  w_head;
  logic [CW-1:0] complete_q, sent_q;

  wire aw_fwd = (complete_q > sent_q);
  wire w_fwd  = (sent_q != '0);

  always_comb begin
    mst_req_o          = slv_req_i;
    mst_req_o.aw       = aw_head;
    mst_req_o.aw_valid = aw_valid && aw_fwd;
    mst_req_o.w        = w_head;
    mst_req_o.w_valid  = w_valid && w_fwd;
    slv_rsp_o          = mst_rsp_i;
    slv_rsp_o.aw_ready = aw_ready;
    slv_rsp_o.w_ready  = w_ready;
  end

  wire w_in_last  = slv_req_i.w_valid && w_ready && slv_req_i.w.last;
  wire aw_out     = mst_req_o.aw_valid && mst_rsp_i.aw_ready;
  wire w_out_last = mst_req_o.w_valid && mst_rsp_i.w_ready && w_head.last;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      complete_q <= '0;
      sent_q     <= '0;
    end else begin
      complete_q <= complete_q + CW'(w_in_last) - CW'(w_out_last);
      sent_q     <= sent_q     + CW'(aw_out)    - CW'(w_out_last);
    end
  end

  realm_fifo #(.Depth(NumAw), .T(aw_chan_t)) i_aw_fifo (
    .clk_i, .rst_ni,
    .in_valid_i (slv_req_i.aw_valid), .in_ready_o(aw_ready), .in_data_i(slv_req_i.aw),
    .out_valid_o(aw_valid), .out_ready_i(mst_rsp_i.aw_ready && aw_fwd), .out_data_o(aw_head),
    .count_o    ()
  );

  realm_fifo #(.Depth(BufferDepth), .T(w_chan_t)) i_w_fifo (
    .clk_i, .rst_ni,
    .in_valid_i (slv_req_i.w_valid), .in_ready_o(w_ready), .in_data_i(slv_req_i.w),
    .out_valid_o(w_valid), .out_ready_i(mst_rsp_i.w_ready && w_fwd), .out_data_o(w_head),
    .count_o    ()
  );

  // Once forwarded, a W burst is never starved by the buffer.
  a_no_w_bubble: assert property (@(posedge clk_i) disable iff (!rst_ni)
    w_fwd |-> w_valid);

endmodule
