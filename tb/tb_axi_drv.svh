// tb_axi_drv.svh: AXI4 manager-side driver tasks and response logs shared by
// the testbenches. Include inside a module that declares `clk`, `req`
// (axi_req_t, driven here) and `rsp` (axi_rsp_t), plus `checks`/`failures`.
// Requests are changed on the falling clock edge; handshakes are detected on
// the rising edge, so driver and design never race.
//
// Driving on the falling edge is a testbench convention, not a property of the
// design.

logic aw_hs_q, w_hs_q, ar_hs_q;
b_chan_t b_log [$];
r_chan_t r_log [$];
longint  b_cyc [$];
longint  r_cyc [$];
longint  aw_cyc [$];
longint  ar_cyc [$];
longint  now;

initial now = 0;
always @(posedge clk) begin
  now++;
  aw_hs_q <= req.aw_valid && rsp.aw_ready;
  w_hs_q  <= req.w_valid  && rsp.w_ready;
  ar_hs_q <= req.ar_valid && rsp.ar_ready;
  if (req.aw_valid && rsp.aw_ready) aw_cyc.push_back(now);
  if (req.ar_valid && rsp.ar_ready) ar_cyc.push_back(now);
  if (rsp.b_valid && req.b_ready) begin b_log.push_back(rsp.b); b_cyc.push_back(now); end
  if (rsp.r_valid && req.r_ready) begin r_log.push_back(rsp.r); r_cyc.push_back(now); end
end

task automatic check(input bit cond, input string msg);
  checks++;
  if (!cond) begin
    failures++;
    $display("FAIL @%0t: %s", $time, msg);
  end
endtask

function automatic aw_chan_t mk_aw(id_t id, addr_t addr, logic [7:0] len,
                                   logic [1:0] burst = BURST_INCR, logic [3:0] cache = 4'b0010,
                                   logic lock = 1'b0, logic [5:0] atop = 6'd0);
  aw_chan_t aw = '0;
  aw.id = id; aw.addr = addr; aw.len = len; aw.size = 3'd3; aw.burst = burst;
  aw.cache = cache; aw.lock = lock; aw.atop = atop;
  return aw;
endfunction

function automatic ar_chan_t mk_ar(id_t id, addr_t addr, logic [7:0] len,
                                   logic [1:0] burst = BURST_INCR, logic [3:0] cache = 4'b0010,
                                   logic lock = 1'b0);
  ar_chan_t ar = '0;
  ar.id = id; ar.addr = addr; ar.len = len; ar.size = 3'd3; ar.burst = burst;
  ar.cache = cache; ar.lock = lock;
  return ar;
endfunction

task automatic send_aw(input aw_chan_t aw);
  @(negedge clk);
  req.aw = aw; req.aw_valid = 1'b1;
  do @(negedge clk); while (!aw_hs_q);
  req.aw_valid = 1'b0;
endtask

task automatic send_ar(input ar_chan_t ar);
  @(negedge clk);
  req.ar = ar; req.ar_valid = 1'b1;
  do @(negedge clk); while (!ar_hs_q);
  req.ar_valid = 1'b0;
endtask

// W burst of n beats carrying data seed + beat index.
task automatic send_w(input int unsigned n, input data_t seed);
  @(negedge clk);
  for (int unsigned i = 0; i < n; i++) begin
    req.w.data = seed + data_t'(i); req.w.strb = '1; req.w.last = (i == n - 1);
    req.w.user = '0; req.w_valid = 1'b1;
    do @(negedge clk); while (!w_hs_q);
  end
  req.w_valid = 1'b0;
endtask

task automatic wait_cycles(input int unsigned n);
  repeat (n) @(negedge clk);
endtask

// Wait until the logs hold the expected number of B responses / R beats.
task automatic wait_b(input int unsigned n, input int unsigned max_cyc = 2000);
  int unsigned c = 0;
  while (b_log.size() < n && c < max_cyc) begin @(negedge clk); c++; end
endtask

task automatic wait_r(input int unsigned n, input int unsigned max_cyc = 4000);
  int unsigned c = 0;
  while (r_log.size() < n && c < max_cyc) begin @(negedge clk); c++; end
endtask
