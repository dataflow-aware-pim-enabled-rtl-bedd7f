// floret_sfc -- one space-filling-curve segment ("petal") of the Floret NoI.
//
// SFC_LEN routers in a chain: a head router (position 0), SFC_LEN-2 mid
// routers and a tail router (position SFC_LEN-1). Each router's P_SFC output
// feeds the next router's P_SFC input, so inside the curve data moves one way,
// head to tail, over single-hop links; this is the curve of the paper's
// Fig. 1, where consecutive neural layers sit on consecutive chiplets.
// The head and the tail are the curve's two ends on the top-level ring. Their
// ring links leave this module on the ring_* ports, indexed [end][direction]
// with end 0 = head, 1 = tail and direction 0 = CW (to the next higher ring
// node), 1 = CCW (to the next lower ring node). For ring_in, direction 0 is
// the flit travelling CW, i.e. arriving from the next lower ring node.
// Every chiplet's own port is on loc_* (index = position on the curve).
//
// Timing: one cycle per hop; a flit injected at position a for position b > a
// on the same curve is offered at loc_out[b] b-a+1 cycles after it was
// accepted, when nothing blocks it.
module floret_sfc
  import floret_pkg::*;
#(
  parameter int unsigned SFC_IDX    = 0,
  parameter int unsigned N_SFC      = 4,
  parameter int unsigned SFC_LEN    = 25,
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // chiplet ports
  input  logic  [SFC_LEN-1:0]           loc_in_valid,
  input  flit_t [SFC_LEN-1:0]           loc_in_flit,
  output logic  [SFC_LEN-1:0]           loc_in_ready,
  output logic  [SFC_LEN-1:0]           loc_out_valid,
  output flit_t [SFC_LEN-1:0]           loc_out_flit,
  input  logic  [SFC_LEN-1:0]           loc_out_ready,
  // top-level ring ports of the head (index 0) and tail (index 1)
  input  logic  [1:0][1:0]              ring_in_valid,
  input  flit_t [1:0][1:0]              ring_in_flit,
  output logic  [1:0][1:0]              ring_in_ready,
  output logic  [1:0][1:0]              ring_out_valid,
  output flit_t [1:0][1:0]              ring_out_flit,
  input  logic  [1:0][1:0]              ring_out_ready
);

  // Curve links: chain_* [p] is the link from router p to router p+1.
  logic  [SFC_LEN-1:0] chain_valid, chain_ready;
  flit_t [SFC_LEN-1:0] chain_flit;

  for (genvar p = 0; p < SFC_LEN; p++) begin : g_r
    localparam role_e ROLE = (p == 0) ? ROLE_HEAD :
                             (p == SFC_LEN - 1) ? ROLE_TAIL : ROLE_MID;
    localparam int unsigned E = (p == 0) ? 0 : 1;   // ring end index

    logic  [NPORTS-1:0] iv, ir, ov, orr;
    flit_t [NPORTS-1:0] ifl, ofl;

    assign iv[P_LOCAL]  = loc_in_valid[p];
    assign ifl[P_LOCAL] = loc_in_flit[p];
    assign loc_in_ready[p]  = ir[P_LOCAL];
    assign loc_out_valid[p] = ov[P_LOCAL];
    assign loc_out_flit[p]  = ofl[P_LOCAL];
    assign orr[P_LOCAL] = loc_out_ready[p];

    // curve input from the previous router
    if (p > 0) begin : g_sin
      assign iv[P_SFC]  = chain_valid[p-1];
      assign ifl[P_SFC] = chain_flit[p-1];
      assign chain_ready[p-1] = ir[P_SFC];
    end else begin : g_nosin
      assign iv[P_SFC]  = 1'b0;
      assign ifl[P_SFC] = '0;
    end
    // curve output to the next router
    if (p < SFC_LEN - 1) begin : g_sout
      assign chain_valid[p] = ov[P_SFC];
      assign chain_flit[p]  = ofl[P_SFC];
      assign orr[P_SFC]     = chain_ready[p];
    end else begin : g_nosout
      assign orr[P_SFC]     = 1'b0;
      assign chain_valid[p] = 1'b0;
      assign chain_flit[p]  = '0;
      assign chain_ready[p] = 1'b0;
    end
    // ring links at the two ends
    if (ROLE != ROLE_MID) begin : g_ring
      assign iv[P_CW]   = ring_in_valid[E][0];
      assign ifl[P_CW]  = ring_in_flit[E][0];
      assign iv[P_CCW]  = ring_in_valid[E][1];
      assign ifl[P_CCW] = ring_in_flit[E][1];
      assign ring_in_ready[E][0]  = ir[P_CW];
      assign ring_in_ready[E][1]  = ir[P_CCW];
      assign ring_out_valid[E][0] = ov[P_CW];
      assign ring_out_flit[E][0]  = ofl[P_CW];
      assign ring_out_valid[E][1] = ov[P_CCW];
      assign ring_out_flit[E][1]  = ofl[P_CCW];
      assign orr[P_CW]  = ring_out_ready[E][0];
      assign orr[P_CCW] = ring_out_ready[E][1];
    end else begin : g_noring
      assign iv[P_CW]   = 1'b0;
      assign ifl[P_CW]  = '0;
      assign iv[P_CCW]  = 1'b0;
      assign ifl[P_CCW] = '0;
      assign orr[P_CW]  = 1'b0;
      assign orr[P_CCW] = 1'b0;
    end

    floret_router #(
      .ROLE(ROLE), .SFC_IDX(SFC_IDX), .POS(p),
      .N_SFC(N_SFC), .SFC_LEN(SFC_LEN), .FIFO_DEPTH(FIFO_DEPTH)
    ) u_router (
      .clk, .rst_n,
      .in_valid(iv), .in_flit(ifl), .in_ready(ir),
      .out_valid(ov), .out_flit(ofl), .out_ready(orr)
    );
  end

endmodule
