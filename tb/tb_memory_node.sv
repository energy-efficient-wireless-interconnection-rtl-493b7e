// Self-checking testbench of one memory stack's logic die (memory_node,
// stack 0 = WI 4): its switch, WI and transceiver, together with the seven
// other WIs of the system (bare WIs and transceivers, whose switch side is
// played by the testbench) on the shared wireless channel.
// Traffic: the four chips' WIs and the other stacks' WIs send requests to
// the stack; the stack's DRAM side answers each chip's WI tile with packets,
// including one full 64-flit packet.  Checked: every packet arrives at the
// right side, complete and in order, in both directions, and the stack's WI
// sleeps, sends control headers, reserves receive VCs and sends partial
// packets.
module tb_memory_node;
  import mcw_pkg::*;
  localparam int MEM    = 0;
  localparam int DUT_WI = NUM_CHIPS + MEM;
  localparam int NLOC   = 1;
  localparam int NE     = NLOC + NUM_WI;     // DRAM side, then WI switch sides

  function automatic int ep_node(int e);
    return (e < NLOC) ? NUM_CORES + MEM : wi_node(e - NLOC);
  endfunction

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t %s", $time, what); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------- the seven other WIs of the system ----------------
  air_t    air_out [NUM_WI];
  air_t    air;
  link_t   p_in [NUM_WI], p_out [NUM_WI];
  credit_t p_in_credit [NUM_WI], p_out_credit [NUM_WI];
  always_comb begin
    air = '0;
    for (int w = 0; w < NUM_WI; w++) air = air | air_out[w];
  end
  for (genvar w = 0; w < NUM_WI; w++) begin : g_peer
    if (w != DUT_WI) begin : g_on
      logic  tx_valid, rx_valid, rx_sleep, evc, evp, evr;
      flit_t tx_word, rx_word;
      logic [WI_W-1:0] turn_unused;
      wireless_interface #(.WI_ID(w), .SELF(wi_node(w))) u_wi (
        .clk, .rst_n,
        .sw_in(p_in[w]), .sw_in_credit(p_in_credit[w]),
        .sw_out(p_out[w]), .sw_out_credit(p_out_credit[w]),
        .tx_valid, .tx_word, .rx_valid, .rx_word, .rx_sleep,
        .turn(turn_unused), .ev_ctrl(evc), .ev_partial(evp), .ev_reserve(evr)
      );
      ook_transceiver u_trx (
        .clk, .rst_n, .tx_valid, .tx_word,
        .air_out(air_out[w]), .air_in(air), .sleep(rx_sleep),
        .rx_valid, .rx_word
      );
    end else begin : g_off
      assign p_out[w] = '0;
      assign p_in_credit[w] = '0;
    end
  end

  // ---------------- endpoints: the DUT's local ports, then the peers ----------------
  link_t   ep_in [NE], ep_out [NE];
  credit_t ep_in_credit [NE], ep_out_credit [NE];

  int    up_cred [NE][NUM_VC];
  flit_t txf [NE][NUM_VC][$];
  int    rr [NE];
  int    exp_dst [int], exp_len [int], exp_src [int];
  int    pkt_no = 0;

  always @(posedge clk) if (rst_n)
    for (int e = 0; e < NE; e++)
      if (ep_in_credit[e].valid) up_cred[e][ep_in_credit[e].vc]++;

  always @(negedge clk) if (rst_n)
    for (int e = 0; e < NE; e++) begin
      ep_in[e] = '0;
      for (int k = 0; k < NUM_VC; k++) begin
        automatic int v = (rr[e] + k) % NUM_VC;
        if (!ep_in[e].valid && txf[e][v].size() > 0 && up_cred[e][v] > 0) begin
          ep_in[e].valid = 1'b1;
          ep_in[e].vc    = VC_W'(v);
          ep_in[e].flit  = txf[e][v].pop_front();
          up_cred[e][v]--;
          rr[e] = (v + 1) % NUM_VC;
        end
      end
    end

  // s, d: endpoint numbers
  task automatic send_pkt(int s, int v, int d, int n);
    automatic int pk = pkt_no++;
    exp_dst[pk] = d; exp_len[pk] = n; exp_src[pk] = s;
    for (int i = 0; i < n; i++) begin
      automatic flit_t f;
      f.ftype = (i == 0) ? FT_HEAD : (i == n - 1) ? FT_TAIL : FT_BODY;
      f.data  = (i == 0) ? {NODE_W'(ep_node(d)), NODE_W'(ep_node(s)), 2'b00, 16'(pk)}
                         : {16'(pk), 16'(i)};
      txf[s][v].push_back(f);
    end
  endtask

  int cur_pkt [NE][NUM_VC];
  int cur_idx [NE][NUM_VC];
  int pend [NE][$];
  int done_pkts = 0, n_local = 0, n_air_in = 0, n_air_out = 0;

  always @(negedge clk) if (rst_n)
    for (int e = 0; e < NE; e++) begin
      ep_out_credit[e] = '0;
      if (pend[e].size() > 0 && $urandom_range(0, 2) != 0) begin
        ep_out_credit[e].valid = 1'b1;
        ep_out_credit[e].vc    = VC_W'(pend[e].pop_front());
      end
      if (ep_out[e].valid) begin
        automatic int    v = int'(ep_out[e].vc);
        automatic flit_t f = ep_out[e].flit;
        pend[e].push_back(v);
        if (f.ftype == FT_HEAD) begin
          automatic int pk = int'(f.data[15:0]);
          check(cur_pkt[e][v] < 0, "head on a busy VC");
          check(exp_dst.exists(pk) && exp_dst[pk] == e,
                $sformatf("packet %0d delivered to endpoint %0d", pk, e));
          cur_pkt[e][v] = pk; cur_idx[e][v] = 1;
        end else begin
          check(cur_pkt[e][v] >= 0, "flit without head");
          check(int'(f.data[31:16]) == cur_pkt[e][v] && int'(f.data[15:0]) == cur_idx[e][v],
                $sformatf("flit order at endpoint %0d vc %0d", e, v));
          cur_idx[e][v]++;
          if (f.ftype == FT_TAIL && cur_pkt[e][v] >= 0) begin
            automatic int pk = cur_pkt[e][v];
            check(cur_idx[e][v] == exp_len[pk], "packet length");
            if (exp_src[pk] < NLOC && e < NLOC) n_local++;
            else if (e < NLOC) n_air_in++;
            else n_air_out++;
            cur_pkt[e][v] = -1;
            done_pkts++;
          end
        end
      end
    end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired (%0d of %0d packets delivered)", done_pkts, pkt_no);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic wi_sleep, wi_ev_ctrl, wi_ev_partial, wi_ev_reserve;
  logic [WI_W-1:0] wi_turn;
  link_t   mem_in, mem_out;
  credit_t mem_in_credit, mem_out_credit;

  memory_node #(.MEM(MEM)) dut (
    .clk, .rst_n, .mem_in, .mem_in_credit, .mem_out, .mem_out_credit,
    .air_out(air_out[DUT_WI]), .air_in(air),
    .wi_sleep, .wi_turn, .wi_ev_ctrl, .wi_ev_partial, .wi_ev_reserve
  );

  always_comb
    for (int e = 0; e < NE; e++)
      if (e < NLOC) begin
        mem_in = ep_in[e]; mem_out_credit = ep_out_credit[e];
        ep_out[e] = mem_out; ep_in_credit[e] = mem_in_credit;
      end else begin
        p_in[e - NLOC] = ep_in[e]; p_out_credit[e - NLOC] = ep_out_credit[e];
        ep_out[e] = p_out[e - NLOC]; ep_in_credit[e] = p_in_credit[e - NLOC];
      end

  int n_sleep = 0, n_ctrl = 0, n_res = 0, n_part = 0;
  always @(posedge clk) if (rst_n) begin
    n_sleep += wi_sleep; n_ctrl += wi_ev_ctrl; n_res += wi_ev_reserve; n_part += wi_ev_partial;
  end

  initial begin
    for (int e = 0; e < NE; e++) begin
      ep_in[e] = '0; ep_out_credit[e] = '0; rr[e] = 0;
      for (int v = 0; v < NUM_VC; v++) begin
        up_cred[e][v] = BUF_DEPTH; cur_pkt[e][v] = -1; cur_idx[e][v] = 0;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    send_pkt(0, 0, NLOC + 0, PKT_FLITS);
    for (int w = 0; w < NUM_WI; w++)
      if (w != DUT_WI)
        for (int k = 0; k < 3; k++)
          send_pkt(NLOC + w, $urandom_range(0, NUM_VC - 1), 0, $urandom_range(2, 24));
    for (int k = 0; k < 12; k++)
      send_pkt(0, $urandom_range(0, NUM_VC - 1), NLOC + $urandom_range(0, NUM_CHIPS - 1),
               $urandom_range(2, 24));
    wait (done_pkts == pkt_no);
    repeat (100) @(negedge clk);
    check(done_pkts == pkt_no, "all packets delivered");
    check(n_air_out > 0, "packets from the stack over the air");
    check(n_air_in > 0,  "packets to the stack over the air");
    check(n_sleep > 0 && n_ctrl > 0 && n_res > 0 && n_part > 0,
          "WI slept, sent headers, reserved VCs and sent partial packets");
    $display("packets=%0d out=%0d in=%0d cycles=%0d", done_pkts, n_air_out, n_air_in, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
