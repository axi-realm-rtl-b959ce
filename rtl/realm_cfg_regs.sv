// realm_cfg_regs: configuration and status register file shared by all REALM
// units of a system.
//
// 32-bit registers on the single-cycle register bus (reg_req_t/reg_rsp_t),
// byte addresses. Unit u occupies the window starting at UnitBase * (u + 1);
// address 0 is left to the bus guard in front of this file.
//   unit + 0x00  CTRL       rw  [0] isolate  [1] throttle enable  [2] regulation enable
//   unit + 0x04  STATUS     ro  [0] isolated [1] budget depleted [2] throttling [5:4] FSM state
//   unit + 0x08  FRAG_LEN   rw  fragmentation length in beats, 1..256 (reset 256)
//   unit + 0x10  W_LAT_SUM  ro  unit + 0x14 W_LAT_CNT ro
//   unit + 0x18  R_LAT_SUM  ro  unit + 0x1C R_LAT_CNT ro
//   region r at unit + 0x40 * (r + 1):
//     +0x00/0x04 START lo/hi rw    +0x08/0x0C END lo/hi rw
//     +0x10 W_BUDGET rw  +0x14 W_PERIOD rw  +0x18 R_BUDGET rw  +0x1C R_PERIOD rw
//     +0x20 W_BUDGET_LEFT ro  +0x24 R_BUDGET_LEFT ro  +0x28 W_BYTES ro
//     +0x2C R_BYTES ro  +0x30 W_TIME ro  +0x34 R_TIME ro
// Writing FRAG_LEN or a region boundary pulses cfg_update_o of the unit (an
// intrusive change, applied by the unit under isolation); writing a budget or
// a period pulses reload_o (the unit restarts its periods). A write to a
// read-only register or any access to an unmapped address returns an error.
//
// The paper names the register groups (burst configuration, control & status,
// budget & period, region boundary) and the statistics read out through them;
// the address map, bit positions and reset values are this design's choices.
module realm_cfg_regs
  import realm_pkg::*;
#(
  parameter int unsigned NumUnits   = 3,
  parameter int unsigned NumRegions = 2,
  parameter int unsigned UnitBase   = 32'h400
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  reg_req_t     reg_req_i,
  output reg_rsp_t     reg_rsp_o,
  output unit_ctrl_t   ctrl_o       [NumUnits],
  output region_cfg_t  region_cfg_o [NumUnits][NumRegions],
  output logic         cfg_update_o [NumUnits],
  output logic         reload_o     [NumUnits],
  input  region_stat_t region_stat_i [NumUnits][NumRegions],
  input  lat_stat_t    lat_stat_i   [NumUnits],
  input  logic         isolated_i   [NumUnits],
  input  logic         depleted_i   [NumUnits],
  input  logic         throttled_i  [NumUnits],
  input  logic [1:0]   fsm_state_i  [NumUnits]
);

  typedef logic [RegDataWidth-1:0] word_t;

  unit_ctrl_t  ctrl_q [NumUnits];
  region_cfg_t cfg_q  [NumUnits][NumRegions];

  // Address decode.
  logic        hit, ro, upd, rld;
  int unsigned unit_idx, reg_off, reg_idx, reg_sub;
  word_t       rdata;

  always_comb begin
    hit      = 1'b0;
    ro       = 1'b0;
    upd      = 1'b0;
    rld      = 1'b0;
    rdata    = '0;
    unit_idx = (32'(reg_req_i.addr) / UnitBase) - 1;
    reg_off  = 32'(reg_req_i.addr) % UnitBase;
    reg_idx  = reg_off / 32'h40;        // 0: unit registers, r + 1: region r
    reg_sub  = reg_off % 32'h40;
    if ((32'(reg_req_i.addr) >= UnitBase) && (unit_idx < NumUnits) && (reg_sub[1:0] == 2'b00)) begin
      if (reg_idx == 0) begin
        unique case (reg_sub)
          32'h00: begin hit = 1'b1; rdata = word_t'({ctrl_q[unit_idx].regulate_en,
                                                     ctrl_q[unit_idx].throttle_en,
                                                     ctrl_q[unit_idx].isolate}); end
          32'h04: begin hit = 1'b1; ro = 1'b1;
                        rdata = word_t'({fsm_state_i[unit_idx], 1'b0, throttled_i[unit_idx],
                                         depleted_i[unit_idx], isolated_i[unit_idx]}); end
          32'h08: begin hit = 1'b1; upd = 1'b1; rdata = word_t'(ctrl_q[unit_idx].frag_len); end
          32'h10: begin hit = 1'b1; ro = 1'b1; rdata = lat_stat_i[unit_idx].w_lat_sum; end
          32'h14: begin hit = 1'b1; ro = 1'b1; rdata = lat_stat_i[unit_idx].w_lat_cnt; end
          32'h18: begin hit = 1'b1; ro = 1'b1; rdata = lat_stat_i[unit_idx].r_lat_sum; end
          32'h1C: begin hit = 1'b1; ro = 1'b1; rdata = lat_stat_i[unit_idx].r_lat_cnt; end
          default: ;
        endcase
      end else if (reg_idx <= NumRegions) begin
        unique case (reg_sub)
          32'h00: begin hit = 1'b1; upd = 1'b1; rdata = cfg_q[unit_idx][reg_idx-1].start_addr[31:0]; end
          32'h04: begin hit = 1'b1; upd = 1'b1; rdata = cfg_q[unit_idx][reg_idx-1].start_addr[63:32]; end
          32'h08: begin hit = 1'b1; upd = 1'b1; rdata = cfg_q[unit_idx][reg_idx-1].end_addr[31:0]; end
          32'h0C: begin hit = 1'b1; upd = 1'b1; rdata = cfg_q[unit_idx][reg_idx-1].end_addr[63:32]; end
          32'h10: begin hit = 1'b1; rld = 1'b1; rdata = cfg_q[unit_idx][reg_idx-1].w_budget; end
          32'h14: begin hit = 1'b1; rld = 1'b1; rdata = cfg_q[unit_idx][reg_idx-1].w_period; end
          32'h18: begin hit = 1'b1; rld = 1'b1; rdata = cfg_q[unit_idx][reg_idx-1].r_budget; end
          32'h1C: begin hit = 1'b1; rld = 1'b1; rdata = cfg_q[unit_idx][reg_idx-1].r_period; end
          32'h20: begin hit = 1'b1; ro = 1'b1; rdata = region_stat_i[unit_idx][reg_idx-1].w_budget_left; end
          32'h24: begin hit = 1'b1; ro = 1'b1; rdata = region_stat_i[unit_idx][reg_idx-1].r_budget_left; end
          32'h28: begin hit = 1'b1; ro = 1'b1; rdata = region_stat_i[unit_idx][reg_idx-1].w_bytes; end
          32'h2C: begin hit = 1'b1; ro = 1'b1; rdata = region_stat_i[unit_idx][reg_idx-1].r_bytes; end
          32'h30: begin hit = 1'b1; ro = 1'b1; rdata = region_stat_i[unit_idx][reg_idx-1].w_time; end
          32'h34: begin hit = 1'b1; ro = 1'b1; rdata = region_stat_i[unit_idx][reg_idx-1].r_time; end
          default: ;
        endcase
      end
    end
  end

  wire do_write = reg_req_i.valid && reg_req_i.write && hit && !ro;

  assign reg_rsp_o.rdata = (reg_req_i.valid && hit && !reg_req_i.write) ? rdata : '0;
  assign reg_rsp_o.error = reg_req_i.valid && (!hit || (reg_req_i.write && ro));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int u = 0; u < NumUnits; u++) begin
        ctrl_q[u]          <= '0;
        ctrl_q[u].frag_len <= 9'd256;
        for (int r = 0; r < NumRegions; r++) cfg_q[u][r] <= '0;
        cfg_update_o[u]    <= 1'b0;
        reload_o[u]        <= 1'b0;
      end
    end else begin
      for (int u = 0; u < NumUnits; u++) begin
        cfg_update_o[u] <= do_write && upd && (unit_idx == u);
        reload_o[u]     <= do_write && rld && (unit_idx == u);
      end
      if (do_write) begin
        if (reg_idx == 0) begin
          if (reg_sub == 32'h00) begin
            ctrl_q[unit_idx].isolate     <= reg_req_i.wdata[0];
            ctrl_q[unit_idx].throttle_en <= reg_req_i.wdata[1];
            ctrl_q[unit_idx].regulate_en <= reg_req_i.wdata[2];
          end
          if (reg_sub == 32'h08) begin
            // 0 and values above 256 are clamped to the legal range
            ctrl_q[unit_idx].frag_len <= (reg_req_i.wdata == '0) ? 9'd1 :
                                         (reg_req_i.wdata > 32'd256) ? 9'd256 : reg_req_i.wdata[8:0];
          end
        end else begin
          unique case (reg_sub)
            32'h00: cfg_q[unit_idx][reg_idx-1].start_addr[31:0]  <= reg_req_i.wdata;
            32'h04: cfg_q[unit_idx][reg_idx-1].start_addr[63:32] <= reg_req_i.wdata;
            32'h08: cfg_q[unit_idx][reg_idx-1].end_addr[31:0]    <= reg_req_i.wdata;
            32'h0C: cfg_q[unit_idx][reg_idx-1].end_addr[63:32]   <= reg_req_i.wdata;
            32'h10: cfg_q[unit_idx][reg_idx-1].w_budget          <= reg_req_i.wdata;
            32'h14: cfg_q[unit_idx][reg_idx-1].w_period          <= reg_req_i.wdata;
            32'h18: cfg_q[unit_idx][reg_idx-1].r_budget          <= reg_req_i.wdata;
            32'h1C: cfg_q[unit_idx][reg_idx-1].r_period          <= reg_req_i.wdata;
            default: ;
          endcase
        end
      end
    end
  end

  assign ctrl_o       = ctrl_q;
  assign region_cfg_o = cfg_q;

endmodule
