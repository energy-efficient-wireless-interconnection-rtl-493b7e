// Self-checking testbench of the forwarding tables (route_lut), one per node
// of the 4C4M system.  For every source/destination pair it follows the tables
// hop by hop and checks that: each hop uses a real link (a mesh neighbour on
// the same chip, or the wireless port between two WI tiles, whose WI number
// names the next tile); the destination is reached; the local port is chosen
// only at the destination; every path is a shortest path (lengths from an
// independent breadth-first search written here) and crosses the air at most
// once; traffic inside a chip stays on the mesh; the output port agrees with
// dimension-ordered (X first) routing inside a chip.
module tb_route_lut;
  import mcw_pkg::*;
  localparam int N = NUM_NODES;

  int checks = 0, failures = 0;
  logic [NODE_W-1:0] dst [N];
  route_t            rt  [N];

  for (genvar n = 0; n < N; n++) begin : g_lut
    route_lut #(.SELF(n)) u_lut (.dest(dst[n]), .route(rt[n]));
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // independent topology model
  function automatic int wi_tile(int w);
    return (w < 4) ? w * 16 + 1 * 4 + 1 : 64 + (w - 4);
  endfunction
  function automatic int tile_wi(int n);
    for (int w = 0; w < 8; w++) if (wi_tile(w) == n) return w;
    return -1;
  endfunction
  function automatic int step(int n, int port);   // neighbour through a mesh port
    int x, y;
    if (n >= 64) return -1;
    x = n % 4; y = (n % 16) / 4;
    if (port == 1 && y > 0) return n - 4;
    if (port == 3 && y < 3) return n + 4;
    if (port == 2 && x < 3) return n + 1;
    if (port == 4 && x > 0) return n - 1;
    return -1;
  endfunction

  int hopd [N][N];   // hopd[s][d], breadth-first search from every source
  initial begin
    int q [$];
    int u, v;
    for (int s = 0; s < N; s++) begin
      for (int i = 0; i < N; i++) hopd[s][i] = -1;
      hopd[s][s] = 0; q.push_back(s);
      while (q.size() > 0) begin
        u = q.pop_front();
        for (int p = 1; p <= 4; p++) begin
          v = step(u, p);
          if (v >= 0 && hopd[s][v] < 0) begin hopd[s][v] = hopd[s][u] + 1; q.push_back(v); end
        end
        if (tile_wi(u) >= 0)
          for (int w = 0; w < 8; w++) begin
            v = wi_tile(w);
            if (hopd[s][v] < 0) begin hopd[s][v] = hopd[s][u] + 1; q.push_back(v); end
          end
      end
    end
  end

  initial begin
    int cur, hops, nxt;
    int wire_hops;
    #1;
    for (int s = 0; s < N; s++)
      for (int d = 0; d < N; d++) begin
        cur = s; hops = 0; wire_hops = 0;
        for (int n = 0; n < N; n++) dst[n] = NODE_W'(d);
        #1;
        while (cur != d && hops <= N) begin
          nxt = -1;
          if (int'(rt[cur].port) == P_WI) begin
            check(tile_wi(cur) >= 0, $sformatf("wireless port at non-WI node %0d", cur));
            nxt = wi_tile(int'(rt[cur].wi));
            check(nxt != cur, "wireless hop to itself");
            wire_hops++;
          end else begin
            check(int'(rt[cur].port) != P_LOCAL,
                  $sformatf("local port before destination %0d->%0d at %0d", s, d, cur));
            nxt = step(cur, int'(rt[cur].port));
            check(nxt >= 0, $sformatf("port leads off the mesh at %0d", cur));
          end
          if (nxt < 0) break;
          cur = nxt; hops++;
        end
        check(cur == d, $sformatf("route %0d->%0d does not arrive", s, d));
        if (s == d) check(int'(rt[s].port) == P_LOCAL, "local port at destination");
        check(hops == hopd[s][d], $sformatf("path %0d->%0d not shortest (%0d vs %0d)", s, d, hops, hopd[s][d]));
        check(wire_hops <= 1, "more than one wireless hop");
        // intra-chip traffic of chips 1..3 never needs the air
        if (s < 64 && d < 64 && s / 16 == d / 16 && s % 4 != d % 4)
          check(int'(rt[s].port) == ((d % 4 > s % 4) ? P_E : P_W), "X first inside a chip");
        if (s < 64 && d < 64 && s / 16 == d / 16)
          check(wire_hops == 0, "intra-chip route uses the wireless channel");
        // a core of chip 1 reaches memory stack 1 in a single wireless hop
        if (s == 16 && d == 65) check(wire_hops == 1, "chip 1 -> stack 1 is one wireless hop");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
