// realm_fifo: synchronous first-in first-out buffer with a valid/ready
// handshake on both sides.
//
// Entries are held in a register array indexed by read and write pointers. The
// output is registered: an element pushed in one cycle can be popped from the
// next cycle on, so the FIFO adds one cycle of latency and, with at least two
// entries, sustains one transfer per cycle. in_ready is low when the FIFO is
// full; out_valid is high whenever it holds an element. `count` gives the
// current fill level. Reset empties the FIFO. The element type is a parameter.
//
// A generic helper of this design, used for the meta buffers, the write
// buffer, the latency timestamps and the one-cycle request cut.
module realm_fifo #(
  parameter int unsigned Depth = 2,
  parameter type         T     = logic [7:0],
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            in_valid_i,
  output logic            in_ready_o,
  input  T                in_data_i,
  output logic            out_valid_o,
  input  logic            out_ready_i,
  output T                out_data_o,
  output logic [PtrW:0]   count_o
);

  T            mem_q [Depth];
  logic [PtrW-1:0] rd_ptr_q, wr_ptr_q;
  logic [PtrW:0]   cnt_q;

  wire push = in_valid_i  && in_ready_o;
  wire pop  = out_valid_o && out_ready_i;

  assign in_ready_o  = (cnt_q != (PtrW+1)'(Depth));
  assign out_valid_o = (cnt_q != '0);
  assign out_data_o  = mem_q[rd_ptr_q];
  assign count_o     = cnt_q;

  function automatic logic [PtrW-1:0] incr(logic [PtrW-1:0] p);
    return (p == PtrW'(Depth - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr_q <= '0;
      wr_ptr_q <= '0;
      cnt_q    <= '0;
    end else begin
      if (push) wr_ptr_q <= incr(wr_ptr_q);
      if (pop)  rd_ptr_q <= incr(rd_ptr_q);
      if (push && !pop)      cnt_q <= cnt_q + 1'b1;
      else if (pop && !push) cnt_q <= cnt_q - 1'b1;
    end
  end

  // Storage has no reset: an entry is only read after it was written.
  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_ptr_q] <= in_data_i;
  end

endmodule
