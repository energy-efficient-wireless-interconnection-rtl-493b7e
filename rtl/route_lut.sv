// Forwarding table of one switch.
//
// A read-only table, indexed by destination node, that gives the output port
// towards that node and, when the port is the wireless one, the number of the
// WI that is the next hop.  Its contents are the shortest-path next hops of
// the whole multichip graph, worked out at elaboration by the functions in
// mcw_pkg (unit link weights; ties broken E, W, N, S, then wireless), so only
// the table, not the path computation, ends up in hardware.  The lookup is
// combinational; the switch registers the result in its route-compute stage.
// Table-based routing over precomputed shortest paths, looked up only for
// head flits, follows the paper; the tie-breaking order is this design's
// choice.
module route_lut
  import mcw_pkg::*;
#(
  parameter int SELF = 0            // node number of the owning switch
) (
  input  logic [NODE_W-1:0] dest,
  output route_t            route
);
  route_t table_q [NUM_NODES];

  for (genvar d = 0; d < NUM_NODES; d++) begin : g_tab
    localparam route_t ENTRY = route_entry(SELF, d);
    assign table_q[d] = ENTRY;
  end

  always_comb begin
    route = table_q[0];
    if (int'(dest) < NUM_NODES) route = table_q[dest];
  end
endmodule
