// dnp_router: the DNP router, an 8-port packet switch for a 3D torus node.
//
// Ports 0..5 attach the torus links X+, X-, Y+, Y-, Z+, Z-; ports 6 and 7 are
// the local injection/extraction ports of the network interface. Each input
// computes the output of a packet from its header flit (dor_route); each
// output has a round-robin arbiter (rr_arbiter) that picks one requesting
// input and keeps it until the packet's last flit has passed (wormhole
// switching), so packets are never interleaved on an output. The switch itself
// is the multiplexer that follows the grants.
//
// Interface: per port a flit stream with valid/ready in each direction. The
// path from an input to its output is combinational: a flit crosses the
// router in the cycle it is offered if the output is free or already owned by
// its packet and the output is ready. Packets for this node leave on port 6.
//
// From the source design: dimension-ordered static routing, 6 torus + 2 local
// ports, an arbiter. Its text gives 8 ports while its block diagram prints
// "7x7 Ports Switch"; this design follows the text. Wormhole switching,
// round-robin arbitration and the absence of input buffering here (buffers
// sit in the links and the network interface) are this design's choices.
module dnp_router
  import apenet_pkg::*;
#(
  parameter int unsigned DIM_X = 4,
  parameter int unsigned DIM_Y = 2,
  parameter int unsigned DIM_Z = 1
) (
  input  logic   clk,
  input  logic   rst_n,
  input  coord_t my_coord,
  input  flit_t  in_flit  [NPORTS],
  input  logic   in_valid [NPORTS],
  output logic   in_ready [NPORTS],
  output flit_t  out_flit [NPORTS],
  output logic   out_valid[NPORTS],
  input  logic   out_ready[NPORTS]
);
  port_e          head_route [NPORTS];   // route of a header flit
  port_e          route_q    [NPORTS];   // route of the packet in progress
  logic           mid_q      [NPORTS];   // input is inside a packet
  port_e          route_cur  [NPORTS];
  logic [NPORTS-1:0] req_o   [NPORTS];   // per output: requesting inputs
  logic [NPORTS-1:0] gnt_o   [NPORTS];   // per output: granted input
  logic           busy_q     [NPORTS];   // per output: packet in progress
  logic           xfer_o     [NPORTS];
  logic           hold_o     [NPORTS];

  for (genvar i = 0; i < NPORTS; i++) begin : g_in
    pkt_hdr_t hdr;
    assign hdr = pkt_hdr_t'(in_flit[i].data);
    dor_route #(.DIM_X(DIM_X), .DIM_Y(DIM_Y), .DIM_Z(DIM_Z)) u_route (
      .my_coord(my_coord), .dst(hdr.dst), .out_port(head_route[i]));
    assign route_cur[i] = mid_q[i] ? route_q[i] : head_route[i];
  end

  always_comb begin
    for (int o = 0; o < NPORTS; o++)
      for (int i = 0; i < NPORTS; i++)
        req_o[o][i] = in_valid[i] && (int'(route_cur[i]) == o);
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    logic [$clog2(NPORTS)-1:0] sel;
    always_comb begin
      sel = '0;
      for (int i = 0; i < NPORTS; i++)
        if (gnt_o[o][i]) sel = i[$clog2(NPORTS)-1:0];
    end
    assign out_valid[o] = |(gnt_o[o] & req_o[o]);
    assign out_flit[o]  = in_flit[sel];
    assign xfer_o[o]    = out_valid[o] && out_ready[o];
    // keep the grant while the packet is not finished
    assign hold_o[o]    = xfer_o[o] ? !out_flit[o].last : busy_q[o];

    rr_arbiter #(.N(NPORTS)) u_arb (
      .clk(clk), .rst_n(rst_n), .req(req_o[o]), .hold(hold_o[o]), .gnt(gnt_o[o]));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) busy_q[o] <= 1'b0;
      else        busy_q[o] <= hold_o[o];
    end
  end

  always_comb begin
    for (int i = 0; i < NPORTS; i++) begin
      in_ready[i] = 1'b0;
      for (int o = 0; o < NPORTS; o++)
        if (gnt_o[o][i] && req_o[o][i] && out_ready[o]) in_ready[i] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NPORTS; i++) begin
        mid_q[i]   <= 1'b0;
        route_q[i] <= P_LOC0;
      end
    end else begin
      for (int i = 0; i < NPORTS; i++) begin
        if (in_valid[i] && in_ready[i]) begin
          mid_q[i]   <= !in_flit[i].last;
          route_q[i] <= route_cur[i];
        end
      end
    end
  end
endmodule
