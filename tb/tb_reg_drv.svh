// tb_reg_drv.svh: register bus access task shared by the testbenches. Include
// inside a module that declares `clk`, `creq` (reg_req_t, driven here) and
// `crsp` (reg_rsp_t). The request is applied on the falling edge, the
// single-cycle response sampled just before the next rising edge.
//
// The single-cycle register bus is this design's own choice of configuration
// protocol.
task automatic reg_access(input bit wr, input logic [RegAddrWidth-1:0] a,
                          input logic [RegDataWidth-1:0] wd, input id_t id,
                          output logic [RegDataWidth-1:0] rd, output logic err);
  @(negedge clk);
  creq.valid = 1'b1; creq.write = wr; creq.addr = a; creq.wdata = wd; creq.id = id;
  #1;
  rd  = crsp.rdata;
  err = crsp.error;
  @(negedge clk);
  creq.valid = 1'b0;
endtask
