// tb_axi_mem: behavioural AXI4 subordinate for the testbenches (not for
// synthesis).
//
// Accepts AW, W and AR requests, stores written data in a sparse memory and
// answers in request order: a B after the last W beat of each burst, R beats
// one per cycle starting RLat cycles after the AR. Unwritten words read as a
// fixed function of their address (init_word). With Stall set, AW, W and AR
// ready and the R stream are withheld on pseudo-random cycles. Every accepted
// request and beat is logged with its arrival cycle so that a testbench can
// check what reached the subordinate and when. All outputs change only on the
// rising clock edge.
//
// Its in-order responses match the assumption the REALM units make about
// subordinates; latency, stall pattern and the init_word formula are arbitrary
// choices of this model.
module tb_axi_mem
  import realm_pkg::*;
#(
  parameter int unsigned RLat  = 2,
  parameter bit          Stall = 1'b0,
  parameter int unsigned Seed  = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t req_i,
  output axi_rsp_t rsp_o
);

  function automatic data_t init_word(addr_t a);
    return {a[31:0] ^ 32'h5A5A_0000, a[31:0]};
  endfunction

  data_t        mem [addr_t];
  aw_chan_t     awq [$];
  ar_chan_t     arq [$];
  b_chan_t      bq  [$];

  // logs
  aw_chan_t     aw_log [$];
  ar_chan_t     ar_log [$];
  w_chan_t      w_log  [$];
  longint       aw_cyc [$];
  longint       ar_cyc [$];
  longint       w_cyc  [$];
  longint       cyc;

  int unsigned  w_beat, r_beat, r_wait;
  int unsigned  rng;

  function automatic data_t rd(addr_t a);
    addr_t k = {a[63:3], 3'b000};
    return mem.exists(k) ? mem[k] : init_word(k);
  endfunction

  function automatic addr_t beat_addr(addr_t a, logic [2:0] size, logic [1:0] burst, int unsigned n);
    addr_t base = (a >> size) << size;
    return (burst == BURST_FIXED) ? a : ((n == 0) ? a : base + (addr_t'(n) << size));
  endfunction

  initial begin
    rng = Seed * 32'h9E37_79B9 + 1;
    rsp_o = '0;
  end

  function automatic logic coin();
    rng = rng * 32'd1103515245 + 32'd12345;
    return !Stall || (rng[20:18] != 3'b000);
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      awq.delete(); arq.delete(); bq.delete();
      w_beat = 0; r_beat = 0; r_wait = RLat; cyc = 0;
      rsp_o <= '0;
    end else begin
      cyc++;
      // handshakes on the values present before this edge
      if (req_i.aw_valid && rsp_o.aw_ready) begin
        awq.push_back(req_i.aw); aw_log.push_back(req_i.aw); aw_cyc.push_back(cyc);
      end
      if (req_i.ar_valid && rsp_o.ar_ready) begin
        arq.push_back(req_i.ar); ar_log.push_back(req_i.ar); ar_cyc.push_back(cyc);
      end
      if (req_i.w_valid && rsp_o.w_ready) begin
        addr_t a;
        data_t d;
        a = beat_addr(awq[0].addr, awq[0].size, awq[0].burst, w_beat);
        d = rd(a);
        for (int i = 0; i < StrbWidth; i++) if (req_i.w.strb[i]) d[8*i +: 8] = req_i.w.data[8*i +: 8];
        mem[{a[63:3], 3'b000}] = d;
        w_log.push_back(req_i.w); w_cyc.push_back(cyc);
        w_beat++;
        if (req_i.w.last) begin
          bq.push_back('{id: awq[0].id, resp: RESP_OKAY, user: '0});
          void'(awq.pop_front());
          w_beat = 0;
        end
      end
      if (rsp_o.b_valid && req_i.b_ready) void'(bq.pop_front());
      if (rsp_o.r_valid && req_i.r_ready) begin
        r_beat++;
        if (rsp_o.r.last) begin void'(arq.pop_front()); r_beat = 0; r_wait = RLat; end
      end
      if (arq.size() > 0 && r_wait > 0) r_wait--;

      // next outputs
      rsp_o.aw_ready <= coin();
      rsp_o.ar_ready <= coin();
      rsp_o.w_ready  <= (awq.size() > 0) && coin();
      rsp_o.b_valid  <= (bq.size() > 0);
      rsp_o.b        <= (bq.size() > 0) ? bq[0] : '0;
      if (arq.size() > 0 && r_wait == 0 && coin()) begin
        rsp_o.r_valid <= 1'b1;
        rsp_o.r.id    <= arq[0].id;
        rsp_o.r.data  <= rd(beat_addr(arq[0].addr, arq[0].size, arq[0].burst, r_beat));
        rsp_o.r.resp  <= RESP_OKAY;
        rsp_o.r.last  <= (r_beat == int'(arq[0].len));
        rsp_o.r.user  <= '0;
      end else begin
        rsp_o.r_valid <= 1'b0;
      end
    end
  end

endmodule
