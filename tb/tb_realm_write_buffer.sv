// tb_realm_write_buffer: self-checking test of the write transaction buffer.
// A manager that sends its write data late and with gaps must not hold the
// downstream W channel: the AW may reach the subordinate only after the last W
// beat entered the buffer, and the burst then arrives on consecutive cycles.
// Also checks that two AWs are buffered and a third is refused, that data and
// responses arrive intact, and that reads pass through in the same cycle.
//
// Holding a burst until its data is complete is the buffer's purpose; the two-
// AW capacity comes from the intended configuration, the gap pattern of the
// slow manager is this testbench's own. Ends with a TB_RESULT line; a watchdog
// ends a hung run.
module tb_realm_write_buffer;
  import realm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t req, mreq;
  axi_rsp_t rsp, mrsp;

  `include "tb_axi_drv.svh"

  realm_write_buffer #(.BufferDepth(16), .NumAw(2)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .slv_req_i(req), .slv_rsp_o(rsp), .mst_req_o(mreq), .mst_rsp_i(mrsp)
  );

  tb_axi_mem #(.RLat(1)) mem (.clk(clk), .rst_n(rst_n), .req_i(mreq), .rsp_o(mrsp));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Slow W burst: one beat every `gap` cycles.
  task automatic slow_w(input int unsigned n, input data_t seed, input int unsigned gap);
    for (int unsigned i = 0; i < n; i++) begin
      if (i != 0) wait_cycles(gap);
      @(negedge clk);
      req.w.data = seed + data_t'(i); req.w.strb = '1; req.w.last = (i == n - 1);
      req.w_valid = 1'b1;
      do @(negedge clk); while (!w_hs_q);
      req.w_valid = 1'b0;
    end
  endtask

  initial begin
    longint t_last;
    int unsigned ok;
    req = '0; req.b_ready = 1'b1; req.r_ready = 1'b1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // AW first, data much later and with gaps
    send_aw(mk_aw(4'd1, 64'h1000, 8'd15));
    wait_cycles(20);
    check(mem.aw_log.size() == 0, "AW held while its data is missing");
    slow_w(16, 64'h100, 3);
    t_last = mem.cyc;
    wait_b(1);
    check(mem.aw_log.size() == 1 && mem.aw_cyc[0] > t_last, "AW forwarded after the last W beat was buffered");
    check(mem.aw_cyc[0] == t_last + 1, "AW forwarded one cycle after the burst completed");
    ok = 1;
    for (int i = 1; i < 16; i++) if (mem.w_cyc[i] != mem.w_cyc[i-1] + 1) ok = 0;
    check(ok == 1 && mem.w_log.size() == 16, "buffered burst leaves on consecutive cycles");
    check(mem.w_cyc[0] >= mem.aw_cyc[0], "W not forwarded ahead of its AW");
    ok = 1;
    for (int i = 0; i < 16; i++) if (mem.rd(64'h1000 + 64'(i * 8)) != 64'h100 + 64'(i)) ok = 0;
    check(ok == 1, "written data");
    check(b_log.size() == 1 && b_log[0].id == 4'd1, "B returned");

    // two AWs buffered, third refused
    send_aw(mk_aw(4'd2, 64'h2000, 8'd3));
    send_aw(mk_aw(4'd3, 64'h3000, 8'd3));
    @(negedge clk);
    req.aw = mk_aw(4'd4, 64'h4000, 8'd3); req.aw_valid = 1'b1;
    wait_cycles(5);
    check(!rsp.aw_ready, "third AW refused while two wait for data");
    check(mem.aw_log.size() == 1, "no buffered AW forwarded without data");
    fork
      begin do @(negedge clk); while (!aw_hs_q); req.aw_valid = 1'b0; end
      begin send_w(4, 64'h200); send_w(4, 64'h300); send_w(4, 64'h400); end
    join
    wait_b(4);
    check(b_log.size() == 4, "all writes answered");
    check(mem.aw_log.size() == 4 && mem.aw_log[1].id == 4'd2 && mem.aw_log[3].id == 4'd4,
          "AWs forwarded in order");
    check(mem.rd(64'h4018) == 64'h403, "data of the third write");

    // reads pass through in the same cycle
    @(negedge clk);
    req.ar = mk_ar(4'd5, 64'h5000, 8'd1); req.ar_valid = 1'b1;
    #1;
    check(mreq.ar_valid && mreq.ar.addr == 64'h5000, "AR passes combinationally");
    do @(negedge clk); while (!ar_hs_q);
    req.ar_valid = 1'b0;
    wait_r(2);
    check(r_log.size() == 2 && r_log[1].last && r_log[1].data == mem.init_word(64'h5008), "read data");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
