// realm_sys: REALM traffic regulation and monitoring for the managers of one
// AXI4 crossbar.
//
// One REALM unit is placed on each of the NumMgr manager ports, between the
// manager (mgr_*) and the crossbar's subordinate port (xbar_*); the crossbar
// itself and everything behind it are outside this module. All units share one
// configuration register file, reached through a single register bus port
// (cfg_*) that can be mapped into the system's address space. A bus guard in
// front of the register file grants the configuration space to the manager
// that claims it first and lets it hand the space over.
//
// Default sizes follow the evaluated integration: three managers (core, system
// DMA, accelerator DMA), 64-bit address and data, eight pending transactions,
// a write buffer of sixteen beats and two regions per unit. Status outputs
// (isolated_o, depleted_o) expose each unit's state, for example for
// interrupts; the guard state is also brought out.
module realm_sys
  import realm_pkg::*;
#(
  parameter int unsigned NumMgr            = 3,
  parameter int unsigned NumRegions        = 2,
  parameter int unsigned NumPending        = 8,
  parameter int unsigned BufferDepth       = 16,
  parameter bit          EnableSplitter    = 1'b1,
  parameter bit          EnableWriteBuffer = 1'b1
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t mgr_req_i  [NumMgr],
  output axi_rsp_t mgr_rsp_o  [NumMgr],
  output axi_req_t xbar_req_o [NumMgr],
  input  axi_rsp_t xbar_rsp_i [NumMgr],
  input  reg_req_t cfg_req_i,
  output reg_rsp_t cfg_rsp_o,
  output logic     isolated_o [NumMgr],
  output logic     depleted_o [NumMgr],
  output logic     cfg_claimed_o,
  output id_t      cfg_owner_o
);

  reg_req_t     regs_req;
  reg_rsp_t     regs_rsp;
  unit_ctrl_t   ctrl       [NumMgr];
  region_cfg_t  region_cfg [NumMgr][NumRegions];
  logic         cfg_update [NumMgr];
  logic         reload     [NumMgr];
  region_stat_t region_stat [NumMgr][NumRegions];
  lat_stat_t    lat_stat   [NumMgr];
  logic         throttled  [NumMgr];
  logic [1:0]   fsm_state  [NumMgr];

  realm_bus_guard i_guard (
    .clk_i, .rst_ni,
    .slv_req_i(cfg_req_i), .slv_rsp_o(cfg_rsp_o),
    .mst_req_o(regs_req),  .mst_rsp_i(regs_rsp),
    .claimed_o(cfg_claimed_o), .owner_o(cfg_owner_o)
  );

  realm_cfg_regs #(.NumUnits(NumMgr), .NumRegions(NumRegions)) i_regs (
    .clk_i, .rst_ni,
    .reg_req_i    (regs_req),  .reg_rsp_o(regs_rsp),
    .ctrl_o       (ctrl),      .region_cfg_o(region_cfg),
    .cfg_update_o (cfg_update), .reload_o(reload),
    .region_stat_i(region_stat), .lat_stat_i(lat_stat),
    .isolated_i   (isolated_o), .depleted_i(depleted_o),
    .throttled_i  (throttled),  .fsm_state_i(fsm_state)
  );

  for (genvar m = 0; m < NumMgr; m++) begin : gen_unit
    realm_unit #(
      .NumRegions       (NumRegions),
      .NumPending       (NumPending),
      .BufferDepth      (BufferDepth),
      .EnableSplitter   (EnableSplitter),
      .EnableWriteBuffer(EnableWriteBuffer)
    ) i_unit (
      .clk_i, .rst_ni,
      .slv_req_i    (mgr_req_i[m]),  .slv_rsp_o(mgr_rsp_o[m]),
      .mst_req_o    (xbar_req_o[m]), .mst_rsp_i(xbar_rsp_i[m]),
      .ctrl_i       (ctrl[m]),
      .region_cfg_i (region_cfg[m]),
      .cfg_update_i (cfg_update[m]),
      .reload_i     (reload[m]),
      .region_stat_o(region_stat[m]),
      .lat_stat_o   (lat_stat[m]),
      .isolated_o   (isolated_o[m]),
      .depleted_o   (depleted_o[m]),
      .throttled_o  (throttled[m]),
      .fsm_state_o  (fsm_state[m])
    );
  end

endmodule
