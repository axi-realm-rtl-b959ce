// tb_realm_bus_guard: self-checking test of the configuration bus guard.
// Behind the guard a responder echoes the address as read data and counts the
// accesses it receives. Checks error responses and blocking while unclaimed,
// claiming, owner-only access, refusal of foreign guard writes and handover.
//
// Claim-before-use, owner-only access and handover follow the guard's intended
// behaviour; the guard register format (owner ID in the low bits) and the
// error on a foreign guard write are this design's choices, and the testbench
// checks them as such. Ends with a TB_RESULT line; a watchdog ends a hung run.
module tb_realm_bus_guard;
  import realm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  reg_req_t creq, fwd_req;
  reg_rsp_t crsp, fwd_rsp;
  logic     claimed;
  id_t      owner;
  int       n_fwd = 0;

  `include "tb_reg_drv.svh"

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  realm_bus_guard dut (
    .clk_i(clk), .rst_ni(rst_n),
    .slv_req_i(creq), .slv_rsp_o(crsp), .mst_req_o(fwd_req), .mst_rsp_i(fwd_rsp),
    .claimed_o(claimed), .owner_o(owner)
  );

  assign fwd_rsp = '{rdata: 32'(fwd_req.addr) ^ 32'hC0DE_0000, error: 1'b0};
  always @(posedge clk) if (fwd_req.valid) n_fwd++;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    logic        err;
    creq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    reg_access(1'b0, 16'h0400, 0, 4'd3, rd, err);
    check(err && n_fwd == 0, "unclaimed: read refused, not forwarded");
    reg_access(1'b1, 16'h0404, 1, 4'd3, rd, err);
    check(err && n_fwd == 0, "unclaimed: write refused, not forwarded");
    reg_access(1'b0, 16'h0000, 0, 4'd7, rd, err);
    check(!err && rd == 32'h0, "guard register reads unclaimed");

    reg_access(1'b1, 16'h0000, 0, 4'd3, rd, err);
    check(!err && claimed && owner == 4'd3, "claimed by manager 3");
    reg_access(1'b0, 16'h0000, 0, 4'd9, rd, err);
    check(!err && rd == {1'b1, 27'b0, 4'd3}, "guard register shows owner");

    reg_access(1'b0, 16'h0410, 0, 4'd3, rd, err);
    check(!err && rd == (32'h0410 ^ 32'hC0DE_0000) && n_fwd == 1, "owner access forwarded");
    reg_access(1'b1, 16'h0410, 5, 4'd5, rd, err);
    check(err && n_fwd == 1, "foreign access refused");
    reg_access(1'b1, 16'h0000, 5, 4'd5, rd, err);
    check(err && owner == 4'd3, "foreign guard write refused");

    reg_access(1'b1, 16'h0000, 32'd5, 4'd3, rd, err);
    check(!err && owner == 4'd5 && claimed, "handover to manager 5");
    reg_access(1'b0, 16'h0420, 0, 4'd3, rd, err);
    check(err && n_fwd == 1, "previous owner refused after handover");
    reg_access(1'b0, 16'h0420, 0, 4'd5, rd, err);
    check(!err && n_fwd == 2 && rd == (32'h0420 ^ 32'hC0DE_0000), "new owner forwarded");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
