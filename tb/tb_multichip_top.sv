// End-to-end, full-size testbench of the 4C4M system (four 4x4 chips, four
// memory stacks, eight WIs on one wireless channel), with the top at its
// default parameters.  Every one of the 64 cores and 4 stack logic dies
// injects packets over random VCs under credit flow control: 20% of a core's
// packets go to a memory stack, the rest to random cores (same chip or other
// chips); stacks answer to random cores.  Core 0 also sends one full 64-flit
// packet to stack 0.  Sinks return credits after random delays.
// Checked: every packet reaches the right node, complete, unchanged and in
// order, and wormhole order holds on every ejection VC.  Each mechanism of
// the design is counted and is a failure if it never happened: on-chip mesh
// delivery, wireless delivery between chips, chip-to-memory and
// memory-to-chip traffic, control-packet headers, partial packets, receive-VC
// reservation, receiver sleep, and credit stalls at the injection ports.
module tb_multichip_top;
  import mcw_pkg::*;
  localparam int NE = NUM_NODES;       // endpoints: cores, then stacks
  localparam int PKTS_PER_NODE = 4;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  link_t   core_in [NUM_CORES], core_out [NUM_CORES];
  credit_t core_in_credit [NUM_CORES], core_out_credit [NUM_CORES];
  link_t   mem_in [NUM_MEM], mem_out [NUM_MEM];
  credit_t mem_in_credit [NUM_MEM], mem_out_credit [NUM_MEM];
  logic [NUM_WI-1:0] wi_sleep, wi_ev_ctrl, wi_ev_partial, wi_ev_reserve;
  logic [WI_W-1:0]   channel_owner;

  multichip_top dut (.*);

  // endpoint views
  link_t   ep_in [NE], ep_out [NE];
  credit_t ep_in_credit [NE], ep_out_credit [NE];
  always_comb
    for (int e = 0; e < NE; e++)
      if (e < NUM_CORES) begin
        core_in[e] = ep_in[e]; core_out_credit[e] = ep_out_credit[e];
        ep_out[e] = core_out[e]; ep_in_credit[e] = core_in_credit[e];
      end else begin
        mem_in[e - NUM_CORES] = ep_in[e]; mem_out_credit[e - NUM_CORES] = ep_out_credit[e];
        ep_out[e] = mem_out[e - NUM_CORES]; ep_in_credit[e] = mem_in_credit[e - NUM_CORES];
      end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t %s", $time, what); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------- injection ----------------
  int    up_cred [NE][NUM_VC];
  flit_t txf [NE][NUM_VC][$];
  int    rr [NE];
  int    exp_dst [int], exp_len [int], exp_src [int];
  int    pkt_no = 0;
  int    n_stall = 0;

  always @(posedge clk) if (rst_n)
    for (int e = 0; e < NE; e++)
      if (ep_in_credit[e].valid) up_cred[e][ep_in_credit[e].vc]++;

  always @(negedge clk) if (rst_n)
    for (int e = 0; e < NE; e++) begin
      ep_in[e] = '0;
      for (int k = 0; k < NUM_VC; k++) begin
        automatic int v = (rr[e] + k) % NUM_VC;
        if (txf[e][v].size() > 0 && up_cred[e][v] == 0) n_stall++;
        if (!ep_in[e].valid && txf[e][v].size() > 0 && up_cred[e][v] > 0) begin
          ep_in[e].valid = 1'b1;
          ep_in[e].vc    = VC_W'(v);
          ep_in[e].flit  = txf[e][v].pop_front();
          up_cred[e][v]--;
          rr[e] = (v + 1) % NUM_VC;
        end
      end
    end

  task automatic send_pkt(int s, int v, int d, int n);
    automatic int pk = pkt_no++;
    exp_dst[pk] = d; exp_len[pk] = n; exp_src[pk] = s;
    for (int i = 0; i < n; i++) begin
      automatic flit_t f;
      f.ftype = (i == 0) ? FT_HEAD : (i == n - 1) ? FT_TAIL : FT_BODY;
      f.data  = (i == 0) ? {NODE_W'(d), NODE_W'(s), 2'b00, 16'(pk)} : {16'(pk), 16'(i)};
      txf[s][v].push_back(f);
    end
  endtask

  // ---------------- ejection ----------------
  int cur_pkt [NE][NUM_VC];
  int cur_idx [NE][NUM_VC];
  int pend [NE][$];
  int done_pkts = 0, n_mesh = 0, n_air = 0, n_to_mem = 0, n_from_mem = 0;

  always @(negedge clk) if (rst_n)
    for (int e = 0; e < NE; e++) begin
      ep_out_credit[e] = '0;
      if (pend[e].size() > 0 && $urandom_range(0, 3) != 0) begin
        ep_out_credit[e].valid = 1'b1;
        ep_out_credit[e].vc    = VC_W'(pend[e].pop_front());
      end
      if (ep_out[e].valid) begin
        automatic int    v = int'(ep_out[e].vc);
        automatic flit_t f = ep_out[e].flit;
        pend[e].push_back(v);
        if (f.ftype == FT_HEAD) begin
          automatic int pk = int'(f.data[15:0]);
          check(cur_pkt[e][v] < 0, "head on a busy ejection VC");
          check(exp_dst.exists(pk) && exp_dst[pk] == e,
                $sformatf("packet %0d delivered to node %0d", pk, e));
          check(int'(f.data[31:25]) == e, "head flit destination field");
          cur_pkt[e][v] = pk; cur_idx[e][v] = 1;
        end else begin
          check(cur_pkt[e][v] >= 0, "flit without head");
          check(int'(f.data[31:16]) == cur_pkt[e][v] && int'(f.data[15:0]) == cur_idx[e][v],
                $sformatf("flit order at node %0d vc %0d", e, v));
          cur_idx[e][v]++;
          if (f.ftype == FT_TAIL && cur_pkt[e][v] >= 0) begin
            automatic int pk = cur_pkt[e][v];
            automatic int s  = exp_src[pk];
            check(cur_idx[e][v] == exp_len[pk], "packet length");
            if (s < NUM_CORES && e < NUM_CORES && s / CORES_PER_CHIP == e / CORES_PER_CHIP) n_mesh++;
            else n_air++;
            if (e >= NUM_CORES) n_to_mem++;
            if (s >= NUM_CORES) n_from_mem++;
            cur_pkt[e][v] = -1;
            done_pkts++;
          end
        end
      end
    end

  // ---------------- wireless-layer events ----------------
  int n_ctrl = 0, n_partial = 0, n_reserve = 0, n_sleep = 0;
  always @(posedge clk) if (rst_n) begin
    n_ctrl    += $countones(wi_ev_ctrl);
    n_partial += $countones(wi_ev_partial);
    n_reserve += $countones(wi_ev_reserve);
    n_sleep   += $countones(wi_sleep);
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired (%0d of %0d packets delivered)", done_pkts, pkt_no);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
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
    send_pkt(0, 0, NUM_CORES, PKT_FLITS);
    for (int e = 0; e < NE; e++)
      for (int k = 0; k < PKTS_PER_NODE; k++) begin
        automatic int d;
        if (e < NUM_CORES && $urandom_range(0, 99) < 20)
          d = NUM_CORES + $urandom_range(0, NUM_MEM - 1);
        else
          do d = $urandom_range(0, NUM_CORES - 1); while (d == e);
        send_pkt(e, $urandom_range(0, NUM_VC - 1), d, $urandom_range(2, 16));
      end
    wait (done_pkts == pkt_no);
    repeat (200) @(negedge clk);
    check(done_pkts == pkt_no, "all packets delivered");
    check(n_mesh > 0,     "packets delivered over a chip's mesh only");
    check(n_air > 0,      "packets delivered over the wireless channel");
    check(n_to_mem > 0,   "packets delivered to memory stacks");
    check(n_from_mem > 0, "packets delivered from memory stacks");
    check(n_ctrl > 0,     "control-packet headers sent");
    check(n_partial > 0,  "partial packets sent");
    check(n_reserve > 0,  "receive VCs reserved by packet ID");
    check(n_sleep > 0,    "receivers slept");
    check(n_stall > 0,    "injection stalled on credits");
    $display("packets=%0d mesh=%0d air=%0d to_mem=%0d from_mem=%0d ctrl=%0d partial=%0d reserve=%0d sleep=%0d stall=%0d cycles=%0d",
             done_pkts, n_mesh, n_air, n_to_mem, n_from_mem, n_ctrl, n_partial, n_reserve, n_sleep, n_stall, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
