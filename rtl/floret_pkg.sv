// floret_pkg -- types, constants and the routing rule shared by the Floret
// network-on-interposer (NoI).
//
// The NoI joins chiplets that sit along several space-filling curves (SFCs).
// Chiplet c belongs to curve c / SFC_LEN at position c % SFC_LEN; position 0
// is the curve's head and position SFC_LEN-1 its tail. Inside a curve data
// moves one way, head to tail. The heads and tails of all curves form a ring,
// the top-level network, in the order H0,T0,H1,T1,...: ring node 2s is the
// head of curve s and node 2s+1 its tail. The ring links are bidirectional.
//
// The topology follows the paper's Fig. 1. The flit format, the one-flit
// packets and the shortest-way ring routing are choices of this design.
package floret_pkg;

  // Flit fields. The paper gives no flit format; these widths are this
  // design's choice (ID_W covers up to 256 chiplets).
  localparam int unsigned ID_W   = 8;
  localparam int unsigned TASK_W = 4;
  localparam int unsigned DATA_W = 32;

  // One flit is one packet: destination chiplet, source chiplet, the DNN task
  // the data belongs to and one word of activation data.
  typedef struct packed {
    logic [ID_W-1:0]   dest;
    logic [ID_W-1:0]   src;
    logic [TASK_W-1:0] task_id;
    logic [DATA_W-1:0] data;
  } flit_t;

  // Router port indices. Every router has the same four-slot port list; a
  // router uses only the slots its role needs (see port_in_used and
  // port_out_used).
  //   P_LOCAL : the chiplet attached to the router (inject / eject)
  //   P_SFC   : as an input, the link from the previous chiplet on the curve;
  //             as an output, the link to the next chiplet on the curve
  //   P_CW    : ring link towards the next higher ring node (as an input,
  //             from the next lower node)
  //   P_CCW   : ring link towards the next lower ring node (as an input,
  //             from the next higher node)
  localparam int unsigned NPORTS  = 4;
  localparam int unsigned P_LOCAL = 0;
  localparam int unsigned P_SFC   = 1;
  localparam int unsigned P_CW    = 2;
  localparam int unsigned P_CCW   = 3;

  typedef enum logic [1:0] {
    ROLE_MID  = 2'd0,   // two NoI ports: SFC in, SFC out
    ROLE_HEAD = 2'd1,   // SFC out plus two ring links
    ROLE_TAIL = 2'd2    // SFC in plus two ring links
  } role_e;

  function automatic logic port_in_used(role_e role, int unsigned p);
    case (p)
      P_LOCAL: return 1'b1;
      P_SFC:   return role != ROLE_HEAD;
      default: return role != ROLE_MID;
    endcase
  endfunction

  function automatic logic port_out_used(role_e role, int unsigned p);
    case (p)
      P_LOCAL: return 1'b1;
      P_SFC:   return role != ROLE_TAIL;
      default: return role != ROLE_MID;
    endcase
  endfunction

  // Output port that a flit for chiplet `dest` takes at the router of curve
  // `sfc`, position `pos`.
  //  - Its own chiplet: eject.
  //  - Mid router: always onwards along the curve (the destination is further
  //    down this curve, or the flit must reach the tail to leave it).
  //  - Head: into its own curve when the destination lies on it, otherwise
  //    round the ring towards the destination curve's head.
  //  - Tail: round the ring towards the destination curve's head (for a
  //    destination earlier on its own curve that is its own head, one hop).
  // Ring direction: the shorter way round; on a tie, the CW way.
  function automatic int unsigned route_port(int unsigned sfc, int unsigned pos,
                                             int unsigned n_sfc, int unsigned sfc_len,
                                             logic [ID_W-1:0] dest);
    int unsigned d_sfc, d_pos, me_ring, tgt_ring, n_ring, cw_dist;
    d_sfc = int'(dest) / sfc_len;
    d_pos = int'(dest) % sfc_len;
    if (d_sfc == sfc && d_pos == pos) return P_LOCAL;
    if (pos != 0 && pos != sfc_len - 1) return P_SFC;
    if (pos == 0 && d_sfc == sfc) return P_SFC;
    n_ring   = 2 * n_sfc;
    me_ring  = (pos == 0) ? 2 * sfc : 2 * sfc + 1;
    tgt_ring = 2 * d_sfc;
    cw_dist  = (tgt_ring + n_ring - me_ring) % n_ring;
    return (cw_dist <= n_sfc) ? P_CW : P_CCW;
  endfunction

endpackage
