// tb_realm_isolate: self-checking test of the isolation block.
// A manager driver talks to realm_isolate, which is followed by the
// behavioural subordinate (30-cycle read latency). Checks: plain read and
// write pass; under isolation a new AR is held back while the outstanding read
// completes, isolated_o rises only after the last R beat and falls on release;
// write data without an accepted AW is not accepted; at most NumPending reads
// are outstanding.
//
// Blocking new requests while outstanding ones finish is the behaviour the
// isolation block exists for; the outstanding cap of NumPending and the rule
// that W needs an accepted AW are this design's own and are checked here too.
// Ends with a TB_RESULT line; a watchdog ends a hung run.
module tb_realm_isolate;
  import realm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t req, mreq;
  axi_rsp_t rsp, mrsp;
  logic     isolate, isolated;

  `include "tb_axi_drv.svh"

  realm_isolate #(.NumPending(8)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .slv_req_i(req), .slv_rsp_o(rsp), .mst_req_o(mreq), .mst_rsp_i(mrsp),
    .isolate_i(isolate), .isolated_o(isolated)
  );

  tb_axi_mem #(.RLat(30)) mem (.clk(clk), .rst_n(rst_n), .req_i(mreq), .rsp_o(mrsp));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned n;
    req = '0; req.b_ready = 1'b1; req.r_ready = 1'b1; isolate = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // plain traffic
    send_ar(mk_ar(4'd1, 64'h1000, 8'd3));
    wait_r(4);
    check(r_log.size() == 4 && r_log[3].last, "read of 4 beats returned");
    check(r_log[0].data == mem.init_word(64'h1000), "read data");
    fork
      send_aw(mk_aw(4'd2, 64'h2000, 8'd1));
      send_w(2, 64'h100);
    join
    wait_b(1);
    check(b_log.size() == 1 && b_log[0].id == 4'd2, "write response");
    check(!isolated, "not isolated without request");

    // isolation with a read in flight
    r_log.delete();
    send_ar(mk_ar(4'd3, 64'h3000, 8'd15));
    @(negedge clk); isolate = 1'b1;
    @(negedge clk);
    check(!isolated, "isolated_o waits for the outstanding read");
    fork
      send_ar(mk_ar(4'd4, 64'h4000, 8'd0));
      begin
        wait_r(16);
        @(negedge clk);
        check(mem.ar_log.size() == 2, "new AR held back during isolation");
        check(isolated, "isolated_o after the outstanding read completed");
        check(r_log.size() == 16 && r_log[15].last, "outstanding read completed under isolation");
        wait_cycles(20);
        check(mem.ar_log.size() == 2, "AR still held back while isolated");
        isolate = 1'b0;
        @(negedge clk);
        check(!isolated, "isolated_o falls on release");
      end
    join
    wait_r(17);
    check(mem.ar_log.size() == 3 && mem.ar_log[2].id == 4'd4, "held AR issued after release");

    // W without AW is not accepted
    @(negedge clk);
    req.w = '0; req.w.last = 1'b1; req.w_valid = 1'b1;
    n = 0;
    repeat (10) begin @(negedge clk); if (w_hs_q) n++; end
    check(n == 0, "W without AW is held");
    send_aw(mk_aw(4'd5, 64'h5000, 8'd0));
    wait_cycles(2);
    req.w_valid = 1'b0;
    wait_b(2);
    check(b_log.size() == 2, "W accepted once its AW was");

    // outstanding cap
    r_log.delete();
    fork
      for (int i = 0; i < 9; i++) send_ar(mk_ar(4'd6, 64'h6000 + 64'(i) * 8, 8'd0));
      begin
        wait_cycles(25);
        check(mem.ar_log.size() == 3 + 8, "at most NumPending reads outstanding");
        check(r_log.size() == 0, "no read returned yet (30-cycle latency)");
      end
    join
    wait_r(9, 20000);
    check(r_log.size() == 9 && mem.ar_log.size() == 12, "ninth read issued after the first returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
