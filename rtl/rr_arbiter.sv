// rr_arbiter -- round-robin arbiter for one router output.
//
// N requesters; gnt is one-hot among the set bits of req, starting the search
// just above the requester that last won. The priority pointer moves only
// when `advance` is high (the granted flit was actually taken), so a request
// that waits keeps its place. Combinational from req to gnt; the pointer is a
// register. Round-robin is this design's choice: the paper does not describe
// arbitration.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt
);
  localparam int unsigned W = (N > 1) ? $clog2(N) : 1;

  logic [W-1:0] last;   // index of the last winner

  always_comb begin
    int unsigned idx;
    gnt = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      idx = (int'(last) + k) % N;
      if (req[idx] && gnt == '0) gnt[idx] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= W'(N - 1);
    end else if (advance && gnt != '0) begin
      for (int unsigned i = 0; i < N; i++)
        if (gnt[i]) last <= W'(i);
    end
  end

endmodule
