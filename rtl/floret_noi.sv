// floret_noi -- the Floret network-on-interposer, top of the design.
//
// N_SFC space-filling curves (floret_sfc) of SFC_LEN chiplets each, N_SFC *
// SFC_LEN chiplets in all; chiplet c is position c % SFC_LEN on curve
// c / SFC_LEN. The heads and tails form the top-level network: a ring of
// 2*N_SFC nodes H0,T0,H1,T1,...,H(N-1),T(N-1) joined by bidirectional
// single-hop links, as drawn in the paper's Fig. 1 (there H1-T1-H2-...-T6-H1).
// A flit that must leave its curve runs down to the tail, crosses the ring
// the shorter way to the destination curve's head and runs down that curve.
//
// Default size: 100 chiplets, the size the paper evaluates. The paper does
// not print lambda for 100 chiplets; 4 curves of 25 follow from its Fig. 2:
// this topology has N_SFC*(SFC_LEN-1) curve links plus 2*N_SFC ring links,
// i.e. 100 + lambda links, and Fig. 2(b) prints 104 links for Floret. With 4
// curves every tail also reaches every other head within three ring hops, as
// the text requires. Fig. 1 (36 chiplets) is N_SFC=6, SFC_LEN=6.
//
// The PIM chiplets are not part of this RTL: each chiplet's port pair is a
// top-level port (chip_in_* into the NoI, chip_out_* out of it), valid/ready,
// one floret_pkg::flit_t per transfer. One cycle per hop.
module floret_noi
  import floret_pkg::*;
#(
  parameter int unsigned N_SFC      = 4,
  parameter int unsigned SFC_LEN    = 25,
  parameter int unsigned FIFO_DEPTH = 2,
  localparam int unsigned N_CHIP    = N_SFC * SFC_LEN
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic  [N_CHIP-1:0]   chip_in_valid,
  input  flit_t [N_CHIP-1:0]   chip_in_flit,
  output logic  [N_CHIP-1:0]   chip_in_ready,
  output logic  [N_CHIP-1:0]   chip_out_valid,
  output flit_t [N_CHIP-1:0]   chip_out_flit,
  input  logic  [N_CHIP-1:0]   chip_out_ready
);
  localparam int unsigned N_RING = 2 * N_SFC;

  // Ring node k: k even = head of curve k/2, k odd = tail of curve k/2.
  // Per node and direction (0 = CW, 1 = CCW): what the node sends ...
  logic  [N_RING-1:0][1:0] rout_valid, rout_ready;
  flit_t [N_RING-1:0][1:0] rout_flit;
  // ... and what it receives.
  logic  [N_RING-1:0][1:0] rin_valid, rin_ready;
  flit_t [N_RING-1:0][1:0] rin_flit;

  // Ring links: node k's CW output feeds node k+1's CW input; node k's CCW
  // output feeds node k-1's CCW input.
  for (genvar k = 0; k < N_RING; k++) begin : g_ring
    localparam int unsigned NXT = (k + 1) % N_RING;
    localparam int unsigned PRV = (k + N_RING - 1) % N_RING;
    assign rin_valid[NXT][0] = rout_valid[k][0];
    assign rin_flit[NXT][0]  = rout_flit[k][0];
    assign rout_ready[k][0]  = rin_ready[NXT][0];
    assign rin_valid[PRV][1] = rout_valid[k][1];
    assign rin_flit[PRV][1]  = rout_flit[k][1];
    assign rout_ready[k][1]  = rin_ready[PRV][1];
  end

  for (genvar s = 0; s < N_SFC; s++) begin : g_sfc
    floret_sfc #(
      .SFC_IDX(s), .N_SFC(N_SFC), .SFC_LEN(SFC_LEN), .FIFO_DEPTH(FIFO_DEPTH)
    ) u_sfc (
      .clk, .rst_n,
      .loc_in_valid (chip_in_valid [s*SFC_LEN +: SFC_LEN]),
      .loc_in_flit  (chip_in_flit  [s*SFC_LEN +: SFC_LEN]),
      .loc_in_ready (chip_in_ready [s*SFC_LEN +: SFC_LEN]),
      .loc_out_valid(chip_out_valid[s*SFC_LEN +: SFC_LEN]),
      .loc_out_flit (chip_out_flit [s*SFC_LEN +: SFC_LEN]),
      .loc_out_ready(chip_out_ready[s*SFC_LEN +: SFC_LEN]),
      .ring_in_valid (rin_valid [2*s +: 2]),
      .ring_in_flit  (rin_flit  [2*s +: 2]),
      .ring_in_ready (rin_ready [2*s +: 2]),
      .ring_out_valid(rout_valid[2*s +: 2]),
      .ring_out_flit (rout_flit [2*s +: 2]),
      .ring_out_ready(rout_ready[2*s +: 2])
    );
  end

endmodule
