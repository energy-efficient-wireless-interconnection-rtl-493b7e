// Self-checking testbench of noc_switch, instantiated as the WI tile of chip 0
// (node 5, all six ports in use).  Upstream drivers on every input port send
// packets over several VCs under credit flow control; downstream sinks on
// every output port return credits after random delays.  Checked:
//  * every packet leaves on the port given by independent XY / wireless
//    routing worked out here, with all flits in order and unchanged;
//  * wormhole switching: the flits of one packet stay on one output VC and no
//    other packet's flits appear on that VC before its tail;
//  * an uncontended head flit appears on the output link 4 cycles after it
//    was on the input link (3 pipeline stages + link), a body flit 2 cycles;
//  * every packet is delivered.
module tb_noc_switch;
  import mcw_pkg::*;
  localparam int SELF = 5;
  localparam int NP = NPORTS;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  link_t   in_link [NP], out_link [NP];
  credit_t in_credit [NP], out_credit [NP];

  noc_switch #(.SELF(SELF)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t %s", $time, what); end
  endtask

  // independent expected output port for node 5 (chip 0, x=1, y=1)
  function automatic int exp_port(int d);
    int dx, dy;
    if (d == SELF) return P_LOCAL;
    if (d >= 16) return P_WI;
    dx = (d % 4) - 1; dy = (d / 4) - 1;
    if (dx > 0) return P_E;
    if (dx < 0) return P_W;
    if (dy < 0) return P_N;
    return P_S;
  endfunction

  int cyc = 0;
  always @(posedge clk) cyc++;

  int sent_pkts = 0, recv_pkts = 0;
  int up_cred [NP][NUM_VC];

  always @(posedge clk) if (rst_n)
    for (int p = 0; p < NP; p++)
      if (in_credit[p].valid) up_cred[p][in_credit[p].vc]++;

  // downstream sinks
  int cur_pkt [NP][NUM_VC];   // -1 = idle
  int cur_idx [NP][NUM_VC];
  int pend    [NP][$];        // credits waiting to be returned (VC numbers)
  int exp_dest [int];         // packet number -> destination
  int t_head0 = -1, t_body0 = -1;
  int lat_head = -1, lat_body = -1;

  always @(negedge clk) if (rst_n) begin
    for (int o = 0; o < NP; o++) begin
      out_credit[o] = '0;
      if (pend[o].size() > 0 && $urandom_range(0, 3) != 0) begin
        out_credit[o].valid = 1'b1;
        out_credit[o].vc    = VC_W'(pend[o].pop_front());
      end
      if (out_link[o].valid) begin
        automatic int    v = int'(out_link[o].vc);
        automatic flit_t f = out_link[o].flit;
        pend[o].push_back(v);
        if (f.ftype == FT_HEAD) begin
          automatic int pk = int'(f.data[15:0]);
          check(cur_pkt[o][v] < 0, "head on a busy output VC");
          check(exp_dest.exists(pk), "unknown packet");
          if (exp_dest.exists(pk))
            check(exp_port(exp_dest[pk]) == o,
                  $sformatf("packet %0d to node %0d left on port %0d", pk, exp_dest[pk], o));
          cur_pkt[o][v] = pk; cur_idx[o][v] = 1;
          if (pk == 0) lat_head = cyc - t_head0;
        end else begin
          check(cur_pkt[o][v] >= 0, "body without head");
          check(int'(f.data[31:16]) == cur_pkt[o][v] && int'(f.data[15:0]) == cur_idx[o][v],
                $sformatf("flit order on port %0d vc %0d", o, v));
          if (cur_pkt[o][v] == 0 && cur_idx[o][v] == 1) lat_body = cyc - t_body0;
          cur_idx[o][v]++;
          if (f.ftype == FT_TAIL) begin
            cur_pkt[o][v] = -1;
            recv_pkts++;
          end
        end
      end
    end
  end

  // send one packet on input port p, VC v, to node d with n flits
  task automatic send_pkt(int p, int v, int d, int n, int gap = 0);
    automatic int pk = sent_pkts++;
    exp_dest[pk] = d;
    for (int i = 0; i < n; i++) begin
      while (up_cred[p][v] == 0) @(negedge clk);
      in_link[p].valid = 1'b1;
      in_link[p].vc    = VC_W'(v);
      if (i == 0) begin
        in_link[p].flit.ftype = FT_HEAD;
        in_link[p].flit.data  = {NODE_W'(d), NODE_W'(p), 2'b00, 16'(pk)};
        if (pk == 0) t_head0 = cyc;
      end else begin
        in_link[p].flit.ftype = (i == n - 1) ? FT_TAIL : FT_BODY;
        in_link[p].flit.data  = {16'(pk), 16'(i)};
        if (pk == 0 && i == 1) t_body0 = cyc;
      end
      up_cred[p][v]--;
      @(negedge clk);
      in_link[p] = '0;
      if (i == 0) repeat (gap) @(negedge clk);
    end
  endtask

  task automatic port_traffic(int p, int npk);
    for (int k = 0; k < npk; k++) begin
      automatic int d;
      do d = $urandom_range(0, NUM_NODES - 1);
      while (exp_port(d) == p && d != SELF);
      send_pkt(p, $urandom_range(0, NUM_VC - 1), d, $urandom_range(2, 20));
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NP; p++) begin
      in_link[p] = '0; out_credit[p] = '0;
      for (int v = 0; v < NUM_VC; v++) begin
        up_cred[p][v] = BUF_DEPTH; cur_pkt[p][v] = -1; cur_idx[p][v] = 0;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // 1. uncontended packet: pipeline latency
    send_pkt(P_W, 0, 6, 4, 10); // from node 4, to node 6: leaves east;
                                // body sent 10 cycles after the head
    repeat (10) @(negedge clk);
    check(lat_head == 4, $sformatf("head latency %0d, expected 4", lat_head));
    check(lat_body == 2, $sformatf("body latency %0d, expected 2", lat_body));
    // 2. random traffic from all ports at once
    fork
      port_traffic(0, 40);
      port_traffic(1, 40);
      port_traffic(2, 40);
      port_traffic(3, 40);
      port_traffic(4, 40);
      port_traffic(5, 40);
    join
    repeat (2000) @(negedge clk);
    check(recv_pkts == sent_pkts, $sformatf("delivered %0d of %0d packets", recv_pkts, sent_pkts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
