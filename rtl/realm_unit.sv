// realm_unit: one REALM unit, placed between a manager and the interconnect.
//
// Datapath, manager side to interconnect side:
//   isolation block -> granular burst splitter -> M&R unit -> write buffer
//   -> one-cycle request cut on AR (and on AW when there is no write buffer).
// The splitter and the write buffer can be left out at design time
// (EnableSplitter, EnableWriteBuffer). With a write buffer the splitter's write
// fragments are limited to BufferDepth beats, so every fragment fits in the
// buffer; reads may be fragmented anywhere from 1 to 256 beats.
//
// A small FSM orchestrates the sub-blocks. The isolation block is asked to
// isolate when the user commands it (ctrl_i.isolate), when the M&R unit reports
// a depleted budget, or while the FSM applies a reconfiguration of intrusive
// parameters: a cfg_update_i pulse (new fragment length or region boundaries
// written) moves the FSM from RUN to DRAIN, where it waits until no
// transaction is outstanding; in APPLY it copies the new fragment length and
// region boundaries into the active copies and restarts all periods, then
// returns to RUN. Budgets and periods are used directly; reload_i restarts the
// periods so that a newly written budget applies at once.
//
// Latency: reads and writes leave one cycle after they enter (reads through
// the AR cut, writes through the write buffer once their burst is complete).
// From the paper: the four sub-blocks, the FSM, the isolation triggers, the
// one-cycle delay. The state encoding, the choice of intrusive parameters and
// the placement of the M&R unit behind the splitter are this design's own.
module realm_unit
  import realm_pkg::*;
#(
  parameter int unsigned NumRegions        = 2,
  parameter int unsigned NumPending        = 8,
  parameter int unsigned BufferDepth       = 16,
  parameter bit          EnableSplitter    = 1'b1,
  parameter bit          EnableWriteBuffer = 1'b1
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  axi_req_t     slv_req_i,
  output axi_rsp_t     slv_rsp_o,
  output axi_req_t     mst_req_o,
  input  axi_rsp_t     mst_rsp_i,
  input  unit_ctrl_t   ctrl_i,
  input  region_cfg_t  region_cfg_i [NumRegions],
  input  logic         cfg_update_i,
  input  logic         reload_i,
  output region_stat_t region_stat_o [NumRegions],
  output lat_stat_t    lat_stat_o,
  output logic         isolated_o,
  output logic         depleted_o,
  output logic         throttled_o,
  output logic [1:0]   fsm_state_o
);

  typedef enum logic [1:0] {RUN = 2'd0, DRAIN = 2'd1, APPLY = 2'd2} state_e;
  state_e state_q, state_d;
  logic   pending_q;

  logic [8:0]  frag_q;
  addr_t       start_q [NumRegions];
  addr_t       end_q   [NumRegions];
  region_cfg_t act_cfg [NumRegions];

  logic isolate, isolated, depleted;

  axi_req_t iso_req, spl_req, mr_req, wb_req;
  axi_rsp_t iso_rsp, spl_rsp, mr_rsp, wb_rsp;

  // -------------------------------------------------------------- FSM
  always_comb begin
    state_d = state_q;
    unique case (state_q)
      RUN:     if (pending_q || cfg_update_i) state_d = DRAIN;
      DRAIN:   if (isolated) state_d = APPLY;
      APPLY:   state_d = RUN;
      default: state_d = RUN;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= RUN;
      pending_q <= 1'b0;
      frag_q    <= 9'd256;
      for (int i = 0; i < NumRegions; i++) begin
        start_q[i] <= '0;
        end_q[i]   <= '0;
      end
    end else begin
      state_q <= state_d;
      if (cfg_update_i)         pending_q <= 1'b1;
      else if (state_q == APPLY) pending_q <= 1'b0;
      if (state_q == APPLY) begin
        frag_q <= ctrl_i.frag_len;
        for (int i = 0; i < NumRegions; i++) begin
          start_q[i] <= region_cfg_i[i].start_addr;
          end_q[i]   <= region_cfg_i[i].end_addr;
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NumRegions; i++) begin
      act_cfg[i]            = region_cfg_i[i];
      act_cfg[i].start_addr = start_q[i];
      act_cfg[i].end_addr   = end_q[i];
    end
  end

  assign isolate     = ctrl_i.isolate || depleted || (state_q == DRAIN) || (state_q == APPLY);
  assign isolated_o  = isolated;
  assign depleted_o  = depleted;
  assign fsm_state_o = state_q;

  // -------------------------------------------------------------- datapath
  realm_isolate #(.NumPending(NumPending)) i_isolate (
    .clk_i, .rst_ni,
    .slv_req_i (slv_req_i), .slv_rsp_o (slv_rsp_o),
    .mst_req_o (iso_req),   .mst_rsp_i (iso_rsp),
    .isolate_i (isolate),   .isolated_o(isolated)
  );

  if (EnableSplitter) begin : gen_splitter
    realm_burst_splitter #(
      .NumPending(NumPending),
      .MaxWFrag  (EnableWriteBuffer ? BufferDepth : 256)
    ) i_splitter (
      .clk_i, .rst_ni,
      .frag_len_i(frag_q),
      .slv_req_i (iso_req), .slv_rsp_o(iso_rsp),
      .mst_req_o (spl_req), .mst_rsp_i(spl_rsp)
    );
  end else begin : gen_no_splitter
    assign spl_req = iso_req;
    assign iso_rsp = spl_rsp;
  end

  realm_mr_unit #(.NumRegions(NumRegions), .NumPending(NumPending)) i_mr (
    .clk_i, .rst_ni,
    .slv_req_i    (spl_req), .slv_rsp_o(spl_rsp),
    .mst_req_o    (mr_req),  .mst_rsp_i(mr_rsp),
    .region_cfg_i (act_cfg),
    .regulate_en_i(ctrl_i.regulate_en),
    .throttle_en_i(ctrl_i.throttle_en),
    .reload_i     (reload_i || (state_q == APPLY)),
    .region_stat_o(region_stat_o),
    .lat_stat_o   (lat_stat_o),
    .depleted_o   (depleted),
    .throttled_o  (throttled_o)
  );

  if (EnableWriteBuffer) begin : gen_wbuf
    realm_write_buffer #(.BufferDepth(BufferDepth), .NumAw(2)) i_wbuf (
      .clk_i, .rst_ni,
      .slv_req_i(mr_req), .slv_rsp_o(mr_rsp),
      .mst_req_o(wb_req), .mst_rsp_i(wb_rsp)
    );
  end else begin : gen_no_wbuf
    assign wb_req = mr_req;
    assign mr_rsp = wb_rsp;
  end

  // -------------------------------------------------------------- egress cut
  logic     ar_ready, ar_out_valid, aw_ready, aw_out_valid;
  ar_chan_t ar_out;
  aw_chan_t aw_out;

  always_comb begin
    mst_req_o          = wb_req;
    mst_req_o.ar       = ar_out;
    mst_req_o.ar_valid = ar_out_valid;
    mst_req_o.aw       = aw_out;
    mst_req_o.aw_valid = aw_out_valid;
    wb_rsp             = mst_rsp_i;
    wb_rsp.ar_ready    = ar_ready;
    wb_rsp.aw_ready    = aw_ready;
  end

  realm_fifo #(.Depth(2), .T(ar_chan_t)) i_ar_cut (
    .clk_i, .rst_ni,
    .in_valid_i (wb_req.ar_valid), .in_ready_o (ar_ready), .in_data_i(wb_req.ar),
    .out_valid_o(ar_out_valid),    .out_ready_i(mst_rsp_i.ar_ready),
    .out_data_o (ar_out),          .count_o    ()
  );

  if (EnableWriteBuffer) begin : gen_no_aw_cut
    assign aw_out       = wb_req.aw;
    assign aw_out_valid = wb_req.aw_valid;
    assign aw_ready     = mst_rsp_i.aw_ready;
  end else begin : gen_aw_cut
    realm_fifo #(.Depth(2), .T(aw_chan_t)) i_aw_cut (
      .clk_i, .rst_ni,
      .in_valid_i (wb_req.aw_valid), .in_ready_o (aw_ready), .in_data_i(wb_req.aw),
      .out_valid_o(aw_out_valid),    .out_ready_i(mst_rsp_i.aw_ready),
      .out_data_o (aw_out),          .count_o    ()
    );
  end

endmodule
