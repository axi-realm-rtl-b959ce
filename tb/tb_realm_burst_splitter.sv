// tb_realm_burst_splitter: self-checking test of the granular burst splitter.
// The splitter (write fragments limited to 16 beats) drives the behavioural
// subordinate with random backpressure. Checks the fragments that reach the
// subordinate (count, length, address), the regenerated W last, the
// coalesced B, the gated R last and the data, for INCR and FIXED bursts,
// non-modifiable, atomic and exclusive transactions and several granularities.
//
// Expected values are computed in the testbench from each random burst. The
// non-splittable classes and the B coalescing follow the AXI4 rules the design
// is built on; the random mix and the 16-beat write limit are this testbench's
// own. Ends with a TB_RESULT line; a watchdog ends a hung run.
module tb_realm_burst_splitter;
  import realm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t   req, mreq;
  axi_rsp_t   rsp, mrsp;
  logic [8:0] frag;

  `include "tb_axi_drv.svh"

  realm_burst_splitter #(.NumPending(8), .MaxWFrag(16)) dut (
    .clk_i(clk), .rst_ni(rst_n), .frag_len_i(frag),
    .slv_req_i(req), .slv_rsp_o(rsp), .mst_req_o(mreq), .mst_rsp_i(mrsp)
  );

  tb_axi_mem #(.RLat(1), .Stall(1'b1), .Seed(7)) mem (.clk(clk), .rst_n(rst_n), .req_i(mreq), .rsp_o(mrsp));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Read len+1 beats at addr in fragments of f beats; expect nfr fragments.
  task automatic read_test(input addr_t addr, input logic [7:0] len, input int unsigned f,
                           input int unsigned nfr, input logic [1:0] burst, input logic [3:0] cache,
                           input logic lock, input string name);
    int unsigned ar0 = mem.ar_log.size();
    int unsigned ok = 1, nlast = 0;
    frag = 9'(f);
    r_log.delete();
    send_ar(mk_ar(4'd1, addr, len, burst, cache, lock));
    wait_r(int'(len) + 1);
    wait_cycles(3);
    check(mem.ar_log.size() - ar0 == nfr, $sformatf("%s: %0d read fragments", name, nfr));
    for (int unsigned k = ar0; k < mem.ar_log.size(); k++) begin
      int unsigned beats_before = 0;
      for (int unsigned j = ar0; j < k; j++) beats_before += int'(mem.ar_log[j].len) + 1;
      if (mem.ar_log[k].addr != ((burst == BURST_FIXED) ? addr : addr + addr_t'(beats_before * 8))) ok = 0;
    end
    check(ok == 1, {name, ": fragment addresses"});
    check(r_log.size() == int'(len) + 1, {name, ": beat count"});
    ok = 1;
    for (int unsigned i = 0; i < r_log.size(); i++) begin
      addr_t a = (burst == BURST_FIXED) ? addr : addr + addr_t'(i * 8);
      if (r_log[i].data != mem.init_word(a)) ok = 0;
      if (r_log[i].last) nlast++;
    end
    check(ok == 1, {name, ": read data"});
    check(nlast == 1 && r_log[r_log.size()-1].last, {name, ": single r.last at the end"});
  endtask

  task automatic write_test(input addr_t addr, input logic [7:0] len, input int unsigned f,
                            input int unsigned nfr, input logic [5:0] atop, input string name);
    int unsigned aw0 = mem.aw_log.size(), w0 = mem.w_log.size(), b0 = b_log.size();
    int unsigned ok = 1, exp_len, rem;
    frag = 9'(f);
    fork
      send_aw(mk_aw(4'd2, addr, len, BURST_INCR, 4'b0010, 1'b0, atop));
      send_w(int'(len) + 1, 64'hABC0_0000 + addr);
    join
    wait_b(b0 + 1);
    wait_cycles(5);
    check(mem.aw_log.size() - aw0 == nfr, $sformatf("%s: %0d write fragments", name, nfr));
    check(b_log.size() == b0 + 1, {name, ": one coalesced B"});
    rem = int'(len) + 1;
    for (int unsigned k = aw0; k < mem.aw_log.size(); k++) begin
      exp_len = (rem < nfr_len(f, atop)) ? rem : nfr_len(f, atop);
      if (int'(mem.aw_log[k].len) + 1 != exp_len) ok = 0;
      rem -= exp_len;
    end
    check(ok == 1, {name, ": fragment lengths"});
    ok = 1;
    for (int unsigned i = 0; i <= int'(len); i++)
      if (mem.rd(addr + addr_t'(i * 8)) != 64'hABC0_0000 + addr + data_t'(i)) ok = 0;
    check(ok == 1, {name, ": written data"});
    // W last at each fragment boundary
    ok = 1;
    begin
      int unsigned beat = 0, k = aw0;
      for (int unsigned i = w0; i < mem.w_log.size(); i++) begin
        if (mem.w_log[i].last != (beat == int'(mem.aw_log[k].len))) ok = 0;
        if (beat == int'(mem.aw_log[k].len)) begin beat = 0; k++; end else beat++;
      end
    end
    check(ok == 1, {name, ": w.last at fragment ends"});
  endtask

  function automatic int unsigned nfr_len(int unsigned f, logic [5:0] atop);
    if (atop != 0) return 256;
    return (f > 16) ? 16 : f;
  endfunction

  initial begin
    req = '0; req.b_ready = 1'b1; req.r_ready = 1'b1; frag = 9'd256;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    read_test(64'h1000, 8'd15, 4,   4,  BURST_INCR,  4'b0010, 1'b0, "INCR 16 by 4");
    read_test(64'h2000, 8'd9,  4,   3,  BURST_INCR,  4'b0010, 1'b0, "INCR 10 by 4");
    read_test(64'h3000, 8'd255, 1,  256, BURST_INCR, 4'b0010, 1'b0, "INCR 256 by 1");
    read_test(64'h4000, 8'd255, 256, 1, BURST_INCR,  4'b0010, 1'b0, "INCR 256 unsplit");
    read_test(64'h5000, 8'd7,  2,   1,  BURST_INCR,  4'b0000, 1'b0, "non-modifiable 8");
    read_test(64'h6000, 8'd31, 8,   4,  BURST_INCR,  4'b0000, 1'b0, "non-modifiable 32");
    read_test(64'h7000, 8'd3,  1,   4,  BURST_FIXED, 4'b0010, 1'b0, "FIXED 4 by 1");
    read_test(64'h7100, 8'd3,  1,   1,  BURST_INCR,  4'b0010, 1'b1, "exclusive 4");
    read_test(64'h7200, 8'd7,  1,   1,  BURST_WRAP,  4'b0010, 1'b0, "WRAP 8");

    write_test(64'h8000, 8'd9,  4,   3, 6'd0, "write 10 by 4");
    write_test(64'h9000, 8'd63, 256, 4, 6'd0, "write 64 limited to 16");
    write_test(64'hA000, 8'd0,  1,   1, 6'd0, "write single");
    write_test(64'hB000, 8'd3,  1,   1, 6'h10, "atomic store 4");
    write_test(64'hC000, 8'd15, 1,  16, 6'd0, "write 16 by 1");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
