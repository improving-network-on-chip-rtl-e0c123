// Single-Shortest-Path (SSP) routing table of one node.
//
// For every destination node the table holds the output port of one
// shortest path through the generalized Kautz network of P nodes and degree
// D: ports 0..D-1 are the network links of this node (link k goes to node
// (-(D*NODE + k + 1)) mod P), port D is the local PE. The contents are
// computed at elaboration by a breadth-first search from NODE (links tried
// in index order), so the table is a ROM, one entry per destination, read
// combinationally. Because every node stores a shortest path, each hop
// reduces the remaining distance by one and packets reach their destination
// in at most the network diameter hops. Storing one shortest path per node
// pair follows the paper; the search order and the ROM form are this
// design's choices.
module routing_table
  import turbo_noc_pkg::*;
#(
  parameter int unsigned P    = 64,
  parameter int unsigned D    = 4,
  parameter int unsigned NODE = 0
) (
  input  logic [DEST_W-1:0] dest,
  output logic [PORT_W-1:0] port_o
);

  localparam logic [P_MAX*PORT_W-1:0] ROW = kautz_route_row(P, D, NODE);

  logic [PORT_W-1:0] rom [P];

  for (genvar n = 0; n < P; n++) begin : g_rom
    assign rom[n] = ROW[PORT_W*n +: PORT_W];
  end

  // Destinations outside 0..P-1 are delivered locally.
  assign port_o = (int'(dest) < P) ? rom[dest[$clog2(P > 1 ? P : 2)-1:0]] : PORT_W'(D);

endmodule
