// floret_router -- one router of the Floret network-on-interposer.
//
// Each chiplet has one router. Its role is set by ROLE:
//   ROLE_MID  - a chiplet inside a space-filling curve (SFC). Two NoI ports:
//               the link in from the previous chiplet and the link out to the
//               next one, as in the paper, where every Floret router other
//               than the heads and tails has two ports.
//   ROLE_HEAD - first chiplet of a curve: link out into the curve plus the two
//               bidirectional inter-SFC links of the top-level ring.
//   ROLE_TAIL - last chiplet of a curve: link in from the curve plus the two
//               ring links.
// All roles also have the local port to their own chiplet. Ports are indexed
// P_LOCAL, P_SFC, P_CW, P_CCW (floret_pkg); the slots a role does not use are
// inert (in_ready and out_valid held low) and their buffers are not built.
//
// Micro-architecture (this design's own; the paper gives only the port counts
// and the routing along the curves): every used input has a FIFO_DEPTH-flit
// buffer (flit_fifo); the flit at its head picks an output with
// floret_pkg::route_port; every used output has a round-robin arbiter
// (rr_arbiter) over the inputs that want it. A flit moves on valid && ready.
// Once an output shows a flit, the grant is held until the flit is taken, so
// out_flit stays stable while out_valid is high and out_ready low.
//
// Timing: a flit accepted at clock edge t is offered at the chosen output in
// the next cycle, so with the next router's buffer it costs one cycle per hop.
// Throughput is one flit per cycle per output.
module floret_router
  import floret_pkg::*;
#(
  parameter role_e       ROLE       = ROLE_MID,
  parameter int unsigned SFC_IDX    = 0,   // which curve this router is on
  parameter int unsigned POS        = 1,   // position on the curve, 0 = head
  parameter int unsigned N_SFC      = 4,   // number of curves (lambda)
  parameter int unsigned SFC_LEN    = 25,  // chiplets per curve
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic  [NPORTS-1:0]       in_valid,
  input  flit_t [NPORTS-1:0]       in_flit,
  output logic  [NPORTS-1:0]       in_ready,
  output logic  [NPORTS-1:0]       out_valid,
  output flit_t [NPORTS-1:0]       out_flit,
  input  logic  [NPORTS-1:0]       out_ready
);

  logic  [NPORTS-1:0] head_valid;
  flit_t [NPORTS-1:0] head_flit;
  logic  [NPORTS-1:0] head_pop;
  logic  [NPORTS-1:0] req   [NPORTS];   // req[output][input]
  logic  [NPORTS-1:0] arb   [NPORTS];   // arbiter grant per output
  logic  [NPORTS-1:0] sel   [NPORTS];   // grant in force per output
  logic  [NPORTS-1:0] held  [NPORTS];
  logic  [NPORTS-1:0] hold;
  logic  [1:0]        dir   [NPORTS];   // output chosen by each input

  // Input buffers and route computation.
  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    if (port_in_used(ROLE, i)) begin : g_used
      flit_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
        .clk, .rst_n,
        .in_valid (in_valid[i]),
        .in_data  (in_flit[i]),
        .in_ready (in_ready[i]),
        .out_valid(head_valid[i]),
        .out_data (head_flit[i]),
        .out_ready(head_pop[i])
      );
    end else begin : g_unused
      assign in_ready[i]   = 1'b0;
      assign head_valid[i] = 1'b0;
      assign head_flit[i]  = '0;
    end
    assign dir[i] = 2'(route_port(SFC_IDX, POS, N_SFC, SFC_LEN, head_flit[i].dest));
  end

  // Output arbitration and the crossbar.
  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    if (port_out_used(ROLE, o)) begin : g_used
      always_comb begin
        for (int unsigned i = 0; i < NPORTS; i++)
          req[o][i] = head_valid[i] && (dir[i] == 2'(o));
      end

      rr_arbiter #(.N(NPORTS)) u_arb (
        .clk, .rst_n,
        .req    (req[o]),
        .advance(out_valid[o] && out_ready[o]),
        .gnt    (arb[o])
      );

      assign sel[o]       = hold[o] ? held[o] : arb[o];
      assign out_valid[o] = (sel[o] != '0);

      always_comb begin
        out_flit[o] = '0;
        for (int unsigned i = 0; i < NPORTS; i++)
          if (sel[o][i]) out_flit[o] = head_flit[i];
      end

      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          hold[o] <= 1'b0;
          held[o] <= '0;
        end else begin
          hold[o] <= out_valid[o] && !out_ready[o];
          held[o] <= sel[o];
        end
      end
    end else begin : g_unused
      assign req[o]       = '0;
      assign arb[o]       = '0;
      assign sel[o]       = '0;
      assign held[o]      = '0;
      assign hold[o]      = 1'b0;
      assign out_valid[o] = 1'b0;
      assign out_flit[o]  = '0;
    end
  end

  // An input's head flit leaves when the output that granted it is ready.
  always_comb begin
    for (int unsigned i = 0; i < NPORTS; i++) begin
      head_pop[i] = 1'b0;
      for (int unsigned o = 0; o < NPORTS; o++)
        if (sel[o][i] && out_ready[o]) head_pop[i] = 1'b1;
    end
  end

  // Rules of the valid/ready handshake and of the topology.
  initial begin
    assert (SFC_LEN >= 2) else $fatal(1, "SFC_LEN must be at least 2");
    assert (N_SFC * SFC_LEN <= (1 << ID_W)) else $fatal(1, "too many chiplets for ID_W");
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_chk
    a_stable: assert property (@(posedge clk) disable iff (!rst_n)
      out_valid[o] && !out_ready[o] |=> out_valid[o] && $stable(out_flit[o]))
      else $error("output %0d changed a flit that was not yet taken", o);
  end
  for (genvar i = 0; i < NPORTS; i++) begin : g_chk_route
    a_route: assert property (@(posedge clk) disable iff (!rst_n)
      head_valid[i] |-> port_out_used(ROLE, int'(dir[i])))
      else $error("input %0d routed to an output this router lacks", i);
  end

endmodule
