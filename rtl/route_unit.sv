// route_unit: dimension-order route computation for one packet header.
//
// The destination coordinate is compared with the node's own coordinate one
// dimension at a time, lowest dimension first; the first dimension that
// differs decides the egress link (plus or minus direction). When all
// coordinates match, the packet leaves on the intra-node port numbered by
// its task_id. Dimension-order routing and the four intra-node ports follow
// the paper.
//
// Virtual channels (two per link, as in the paper) are chosen by a dateline
// rule, which is this design's choice: when the torus bit is set each
// dimension is a ring of dim_max+1 nodes, the shorter way round is taken
// (ties go plus), a packet taking the wrap-around link moves to VC1, and a
// packet entering a new dimension starts again on VC0. With the torus bit
// clear the network is a plain mesh and links carry only VC0. A packet
// delivered locally keeps the VC it arrived on.
//
// Port numbering: 0..N_INTRA-1 intra-node ports, then N_INTRA+2d is the
// plus link and N_INTRA+2d+1 the minus link of dimension d.
// Purely combinational.
module route_unit
  import apeiron_pkg::*;
#(
  parameter int N_INTRA = 4,
  parameter int NP      = N_INTRA + 2 * NDIM
) (
  input  dest_t                    dest,
  input  node_t                    local_node,
  input  node_t                    dim_max,     // last coordinate of each dimension
  input  logic                     torus,
  input  logic [$clog2(NP)-1:0]    in_port,
  input  logic                     in_vc,
  output logic [$clog2(NP)-1:0]    out_port,
  output logic                     out_vc
);
  localparam int PW = $clog2(NP);

  always_comb begin
    logic done, plus, wrap;
    logic [COORD_W:0] ring, fwd;   // ring size and forward distance
    done     = 1'b0;
    plus     = 1'b0;
    wrap     = 1'b0;
    ring     = '0;
    fwd      = '0;
    out_port = PW'(dest.task_id);
    out_vc   = in_vc;
    for (int d = 0; d < NDIM; d++) begin
      if (!done && dest.node[d] != local_node[d]) begin
        done = 1'b1;
        ring = {1'b0, dim_max[d]} + 1'b1;
        if (torus) begin
          // distance going plus, modulo the ring size
          if (dest.node[d] > local_node[d]) fwd = {1'b0, dest.node[d]} - {1'b0, local_node[d]};
          else                              fwd = ring - {1'b0, local_node[d]} + {1'b0, dest.node[d]};
          plus = ({fwd, 1'b0} <= {1'b0, ring});
          wrap = plus ? (local_node[d] == dim_max[d]) : (local_node[d] == '0);
        end else begin
          plus = dest.node[d] > local_node[d];
          wrap = 1'b0;
        end
        out_port = PW'(N_INTRA + 2 * d + (plus ? 0 : 1));
        if (wrap)
          out_vc = 1'b1;
        else if (int'(in_port) >= N_INTRA && (int'(in_port) - N_INTRA) / 2 == d)
          out_vc = in_vc;                // continuing in the same dimension
        else
          out_vc = 1'b0;                 // new dimension or injected locally
      end
    end
  end
endmodule
