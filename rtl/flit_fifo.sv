// flit_fifo -- input buffer of a Floret router port.
//
// A synchronous FIFO of DEPTH flits with a valid/ready interface on both
// sides. in_ready is "not full" and comes straight from a register, so the
// upstream router never sees a combinational path through this buffer. A flit
// written at one clock edge is visible at the output from the next cycle on,
// which gives the NoI its one cycle per hop. Pushing and popping in the same
// cycle is allowed, so a stream passes at one flit per cycle.
// The paper does not describe router buffers; the depth is this design's
// choice.
module flit_fifo
  import floret_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  flit_t     in_data,
  output logic in_ready,
  output logic out_valid,
  output flit_t     out_data,
  input  logic out_ready
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t                mem [DEPTH];
  logic [AW-1:0]   wr_ptr, rd_ptr;
  logic [AW:0]     count;
  logic            push, pop;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

endmodule
