// realm_pkg: shared types and constants of the AXI traffic regulation and
// monitoring extension.
//
// The AXI4 channels are carried as packed structs, one per channel, with the
// request side (AW, W, AR and the B/R ready bits) bundled into axi_req_t and the
// response side (B, R and the AW/W/AR ready bits) into axi_rsp_t. Address and
// data are 64 bit wide, the configuration evaluated in the paper; the ID and
// user widths are this design's choice. The configuration bus is a simple
// single-cycle register bus (reg_req_t / reg_rsp_t) that carries the ID of the
// requesting manager so that the bus guard can tell managers apart.
package realm_pkg;

  localparam int unsigned AddrWidth = 64;
  localparam int unsigned DataWidth = 64;
  localparam int unsigned StrbWidth = DataWidth / 8;
  localparam int unsigned IdWidth   = 4;
  localparam int unsigned UserWidth = 1;

  // Width of budget, period and statistic counters.
  localparam int unsigned CntWidth  = 32;

  // Configuration bus.
  localparam int unsigned RegAddrWidth = 16;
  localparam int unsigned RegDataWidth = 32;

  typedef logic [AddrWidth-1:0] addr_t;
  typedef logic [DataWidth-1:0] data_t;
  typedef logic [StrbWidth-1:0] strb_t;
  typedef logic [IdWidth-1:0]   id_t;
  typedef logic [UserWidth-1:0] user_t;
  typedef logic [CntWidth-1:0]  cnt_t;

  // AXI4 burst types and response codes.
  typedef enum logic [1:0] {
    BURST_FIXED = 2'b00,
    BURST_INCR  = 2'b01,
    BURST_WRAP  = 2'b10
  } burst_e;

  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_EXOKAY = 2'b01;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
  localparam logic [1:0] RESP_DECERR = 2'b11;

  typedef struct packed {
    id_t        id;
    addr_t      addr;
    logic [7:0] len;
    logic [2:0] size;
    logic [1:0] burst;
    logic       lock;
    logic [3:0] cache;
    logic [2:0] prot;
    logic [3:0] qos;
    logic [3:0] region;
    logic [5:0] atop;
    user_t      user;
  } aw_chan_t;

  typedef struct packed {
    data_t data;
    strb_t strb;
    logic  last;
    user_t user;
  } w_chan_t;

  typedef struct packed {
    id_t        id;
    logic [1:0] resp;
    user_t      user;
  } b_chan_t;

  typedef struct packed {
    id_t        id;
    addr_t      addr;
    logic [7:0] len;
    logic [2:0] size;
    logic [1:0] burst;
    logic       lock;
    logic [3:0] cache;
    logic [2:0] prot;
    logic [3:0] qos;
    logic [3:0] region;
    user_t      user;
  } ar_chan_t;

  typedef struct packed {
    id_t        id;
    data_t      data;
    logic [1:0] resp;
    logic       last;
    user_t      user;
  } r_chan_t;

  typedef struct packed {
    aw_chan_t aw;
    logic     aw_valid;
    w_chan_t  w;
    logic     w_valid;
    logic     b_ready;
    ar_chan_t ar;
    logic     ar_valid;
    logic     r_ready;
  } axi_req_t;

  typedef struct packed {
    logic     aw_ready;
    logic     ar_ready;
    logic     w_ready;
    logic     b_valid;
    b_chan_t  b;
    logic     r_valid;
    r_chan_t  r;
  } axi_rsp_t;

  // Configuration register bus: one access per cycle, answered in the same cycle.
  typedef struct packed {
    logic                    valid;
    logic                    write;
    logic [RegAddrWidth-1:0] addr;
    logic [RegDataWidth-1:0] wdata;
    id_t                     id;
  } reg_req_t;

  typedef struct packed {
    logic [RegDataWidth-1:0] rdata;
    logic                    error;
  } reg_rsp_t;

  // Runtime configuration of one region, as seen by the M&R unit.
  typedef struct packed {
    addr_t start_addr;   // first address of the region
    addr_t end_addr;     // first address past the region
    cnt_t  w_budget;     // write bytes granted per write period
    cnt_t  w_period;     // write period in cycles (0: never replenished)
    cnt_t  r_budget;
    cnt_t  r_period;
  } region_cfg_t;

  // Per-region statistics of the M&R unit.
  typedef struct packed {
    cnt_t w_budget_left;
    cnt_t r_budget_left;
    cnt_t w_bytes;       // write bytes since the start of the current period
    cnt_t r_bytes;
    cnt_t w_time;        // cycles elapsed in the current write period
    cnt_t r_time;
  } region_stat_t;

  // Per-unit latency statistics: the sum of latencies and the number of
  // completed transactions, per direction. Average = sum / count.
  typedef struct packed {
    cnt_t w_lat_sum;
    cnt_t w_lat_cnt;
    cnt_t r_lat_sum;
    cnt_t r_lat_cnt;
  } lat_stat_t;

  // Per-unit control from the register file.
  typedef struct packed {
    logic       isolate;      // user-commanded isolation
    logic       throttle_en;  // enable the throttling unit
    logic       regulate_en;  // enforce budgets (statistics run regardless)
    logic [8:0] frag_len;     // fragmentation granularity in beats, 1..256
  } unit_ctrl_t;

  // Number of bytes moved by a burst: (len + 1) << size.
  function automatic cnt_t burst_bytes(logic [7:0] len, logic [2:0] size);
    return cnt_t'((32'(len) + 32'd1) << size);
  endfunction

endpackage
