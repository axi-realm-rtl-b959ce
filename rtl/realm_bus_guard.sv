// realm_bus_guard: protects the REALM configuration space against unwanted
// managers.
//
// The guard register sits at address GuardAddr of the configuration bus. After
// reset the space is unclaimed: every access other than to the guard register
// gets an error response and does not reach the register file. A write to the
// guard register in the unclaimed state claims the space for the writer, whose
// transaction ID becomes the owner. From then on only the owner's accesses are
// forwarded; other managers get errors. The owner hands the space over by
// writing the guard register with the new owner's ID in the low IdWidth bits.
// A write to the guard register by anyone else is refused with an error.
// Reading the guard register is always allowed and returns
// {claimed, 27'b0, owner}.
//
// Combinational: a forwarded access reaches the register file in the same
// cycle. The paper gives the claim, the error responses while unclaimed, the
// handover and the distinction by transaction ID; the register layout and the
// refusal of foreign guard writes are this design's choices.
module realm_bus_guard
  import realm_pkg::*;
#(
  parameter logic [RegAddrWidth-1:0] GuardAddr = '0
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  reg_req_t slv_req_i,
  output reg_rsp_t slv_rsp_o,
  output reg_req_t mst_req_o,
  input  reg_rsp_t mst_rsp_i,
  output logic     claimed_o,
  output id_t      owner_o
);

  logic claimed_q;
  id_t  owner_q;

  wire guard_acc = slv_req_i.valid && (slv_req_i.addr == GuardAddr);
  wire is_owner  = claimed_q && (slv_req_i.id == owner_q);
  wire guard_wr  = guard_acc && slv_req_i.write && (!claimed_q || is_owner);

  always_comb begin
    mst_req_o       = slv_req_i;
    mst_req_o.valid = slv_req_i.valid && !guard_acc && is_owner;
    slv_rsp_o       = '0;
    if (guard_acc) begin
      slv_rsp_o.rdata = slv_req_i.write ? '0
                      : RegDataWidth'({claimed_q, {(RegDataWidth-1-IdWidth){1'b0}}, owner_q});
      slv_rsp_o.error = slv_req_i.write && !guard_wr;
    end else if (slv_req_i.valid) begin
      slv_rsp_o       = is_owner ? mst_rsp_i : '{rdata: '0, error: 1'b1};
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      claimed_q <= 1'b0;
      owner_q   <= '0;
    end else if (guard_wr) begin
      claimed_q <= 1'b1;
      owner_q   <= claimed_q ? slv_req_i.wdata[IdWidth-1:0] : slv_req_i.id;
    end
  end

  assign claimed_o = claimed_q;
  assign owner_o   = owner_q;

  a_no_fwd_unclaimed: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !claimed_q |-> !mst_req_o.valid);

endmodule
