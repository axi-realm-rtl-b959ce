// tb_rr_mem: behavioural model of a crossbar with NumPorts manager ports in
// front of one memory (not for synthesis). Like the burst-based crossbars the
// REALM units are meant for, it arbitrates round-robin at transaction
// granularity: the read engine serves one read burst at a time, RLat cycles
// after it was chosen and then one beat per cycle; the write engine takes one
// AW at a time and accepts that port's W beats until the last, then queues a B
// for the port. So a long burst of one manager delays every other manager by
// its full length. Each port queues up to 8 ARs and 8 AWs. Data is stored in a
// sparse memory; unwritten words read as a function of their address.
//
// The transaction-granular round-robin is the arbitration the units are
// designed to correct; queue depths, the single memory and RLat are this
// model's own choices.
module tb_rr_mem
  import realm_pkg::*;
#(
  parameter int unsigned NumPorts = 3,
  parameter int unsigned RLat     = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  axi_req_t req_i [NumPorts],
  output axi_rsp_t rsp_o [NumPorts]
);

  function automatic data_t init_word(addr_t a);
    return {a[31:0] ^ 32'h5A5A_0000, a[31:0]};
  endfunction

  data_t    mem [addr_t];
  ar_chan_t arq [NumPorts][$];
  aw_chan_t awq [NumPorts][$];
  b_chan_t  bq  [NumPorts][$];

  int  r_port, r_beat, r_wait, w_port, w_beat, r_rr, w_rr;
  longint cyc;
  int unsigned n_r_beats [NumPorts];
  int unsigned n_w_beats [NumPorts];

  function automatic data_t rd(addr_t a);
    addr_t k;
    k = {a[63:3], 3'b000};
    return mem.exists(k) ? mem[k] : init_word(k);
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int p = 0; p < NumPorts; p++) begin
        arq[p].delete(); awq[p].delete(); bq[p].delete();
        rsp_o[p] <= '0; n_r_beats[p] = 0; n_w_beats[p] = 0;
      end
      r_port = -1; w_port = -1; r_rr = 0; w_rr = 0; r_beat = 0; w_beat = 0; r_wait = 0; cyc = 0;
    end else begin
      cyc++;
      for (int p = 0; p < NumPorts; p++) begin
        if (req_i[p].ar_valid && rsp_o[p].ar_ready) arq[p].push_back(req_i[p].ar);
        if (req_i[p].aw_valid && rsp_o[p].aw_ready) awq[p].push_back(req_i[p].aw);
        if (rsp_o[p].b_valid && req_i[p].b_ready) void'(bq[p].pop_front());
      end
      // write engine
      if (w_port >= 0 && req_i[w_port].w_valid && rsp_o[w_port].w_ready) begin
        addr_t a;
        data_t d;
        a = awq[w_port][0].addr + addr_t'(w_beat * 8);
        d = rd(a);
        for (int i = 0; i < StrbWidth; i++)
          if (req_i[w_port].w.strb[i]) d[8*i +: 8] = req_i[w_port].w.data[8*i +: 8];
        mem[{a[63:3], 3'b000}] = d;
        n_w_beats[w_port]++;
        w_beat++;
        if (req_i[w_port].w.last) begin
          bq[w_port].push_back('{id: awq[w_port][0].id, resp: RESP_OKAY, user: '0});
          void'(awq[w_port].pop_front());
          w_port = -1; w_beat = 0;
        end
      end
      if (w_port < 0) begin
        for (int k = 0; k < NumPorts; k++) begin
          int p;
          p = (w_rr + k) % NumPorts;
          if (w_port < 0 && awq[p].size() > 0) begin w_port = p; w_rr = (p + 1) % NumPorts; end
        end
      end
      // read engine
      if (r_port >= 0 && rsp_o[r_port].r_valid && req_i[r_port].r_ready) begin
        n_r_beats[r_port]++;
        if (rsp_o[r_port].r.last) begin
          void'(arq[r_port].pop_front()); r_port = -1; r_beat = 0;
        end else r_beat++;
      end
      if (r_port < 0) begin
        for (int k = 0; k < NumPorts; k++) begin
          int p;
          p = (r_rr + k) % NumPorts;
          if (r_port < 0 && arq[p].size() > 0) begin
            r_port = p; r_rr = (p + 1) % NumPorts; r_wait = RLat;
          end
        end
      end else if (r_wait > 0) r_wait--;

      for (int p = 0; p < NumPorts; p++) begin
        rsp_o[p].ar_ready <= (arq[p].size() < 8);
        rsp_o[p].aw_ready <= (awq[p].size() < 8);
        rsp_o[p].w_ready  <= (w_port == p);
        rsp_o[p].b_valid  <= (bq[p].size() > 0);
        rsp_o[p].b        <= (bq[p].size() > 0) ? bq[p][0] : '0;
        if (r_port == p && r_wait == 0) begin
          rsp_o[p].r_valid <= 1'b1;
          rsp_o[p].r.id    <= arq[p][0].id;
          rsp_o[p].r.data  <= rd(arq[p][0].addr + addr_t'(r_beat * 8));
          rsp_o[p].r.resp  <= RESP_OKAY;
          rsp_o[p].r.last  <= (r_beat == int'(arq[p][0].len));
          rsp_o[p].r.user  <= '0;
        end else begin
          rsp_o[p].r_valid <= 1'b0;
        end
      end
    end
  end

endmodule
