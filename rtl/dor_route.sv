// dor_route: dimension-ordered static routing on a 3D torus.
//
// Given the node's own coordinates and a packet's destination, it picks the
// router output: X is corrected first, then Y, then Z; a packet already at its
// destination goes to local port 0 (extraction towards the RX path). Within a
// dimension the packet takes the shorter way round the ring, the plus
// direction on a tie.
//
// Purely combinational; it is evaluated on the header flit of each packet.
// Dimension-ordered static routing on a torus with X+/X-/Y+/Y-/Z+/Z- links is
// the source design's; the X-Y-Z order, the shortest-way rule and the choice
// of local port 0 for delivery are this design's.
module dor_route
  import apenet_pkg::*;
#(
  parameter int unsigned DIM_X = 4,   // 4 x 2 torus of the eight-node test cluster
  parameter int unsigned DIM_Y = 2,
  parameter int unsigned DIM_Z = 1
) (
  input  coord_t my_coord,
  input  coord_t dst,
  output port_e  out_port
);
  // Plus-direction hop count from `a` to `b` on a ring of `n` nodes.
  function automatic int unsigned fwd_dist(int unsigned a, int unsigned b, int unsigned n);
    return (b >= a) ? (b - a) : (b + n - a);
  endfunction

  always_comb begin
    int unsigned d;
    d = 0;
    out_port = P_LOC0;
    if (dst.x != my_coord.x) begin
      d = fwd_dist(int'(my_coord.x), int'(dst.x), DIM_X);
      out_port = (2*d <= DIM_X) ? P_XP : P_XM;
    end else if (dst.y != my_coord.y) begin
      d = fwd_dist(int'(my_coord.y), int'(dst.y), DIM_Y);
      out_port = (2*d <= DIM_Y) ? P_YP : P_YM;
    end else if (dst.z != my_coord.z) begin
      d = fwd_dist(int'(my_coord.z), int'(dst.z), DIM_Z);
      out_port = (2*d <= DIM_Z) ? P_ZP : P_ZM;
    end
  end
endmodule
