// Self-checking testbench of the wireless interface and its control-packet
// MAC: all eight WIs of the 4C4M system, each with a transceiver model, on one
// shared medium; the testbench plays the switch behind every WI.
// Traffic: WI 0 (chip 0) sends a 64-flit packet to memory stack 0 and a
// 20-flit packet to chip 1 (both longer than a 16-flit buffer, so they must
// cross in partial packets), then a second packet to stack 0 on the same VC;
// WI 4 (stack 0) answers chip 0 with a 64-flit packet at the same time.
// Checked independently of the design:
//  * every packet arrives at the right WI's switch side, complete, unchanged
//    and in order, and nothing arrives anywhere else;
//  * at most one WI radiates at any time (contention-free MAC);
//  * control headers appear in the WI order 0,1,...,7,0,... ;
//  * data words of one turn are exactly one slot (5 cycles) apart, the
//    16 Gb/s rate at 2.5 GHz;
//  * an idle round (eight empty headers) lasts 8 slots = 40 cycles;
//  * partial packets, receive-VC reservations and receiver sleep happen, and
//    an uninvolved WI sleeps through the data it is not addressed by.
module tb_wireless_interface;
  import mcw_pkg::*;
  localparam int NW = NUM_WI;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  link_t   sw_in [NW], sw_out [NW];
  credit_t sw_in_credit [NW], sw_out_credit [NW];
  logic    tx_valid [NW], rx_valid [NW], rx_sleep [NW];
  flit_t   tx_word [NW], rx_word [NW];
  air_t    air_out [NW];
  air_t    air;
  logic [WI_W-1:0] turn [NW];
  logic    ev_ctrl [NW], ev_partial [NW], ev_reserve [NW];

  always_comb begin
    air = '0;
    for (int w = 0; w < NW; w++) air = air | air_out[w];
  end

  for (genvar w = 0; w < NW; w++) begin : g_wi
    wireless_interface #(.WI_ID(w), .SELF(wi_node(w))) u_wi (
      .clk, .rst_n,
      .sw_in(sw_in[w]), .sw_in_credit(sw_in_credit[w]),
      .sw_out(sw_out[w]), .sw_out_credit(sw_out_credit[w]),
      .tx_valid(tx_valid[w]), .tx_word(tx_word[w]),
      .rx_valid(rx_valid[w]), .rx_word(rx_word[w]), .rx_sleep(rx_sleep[w]),
      .turn(turn[w]), .ev_ctrl(ev_ctrl[w]), .ev_partial(ev_partial[w]),
      .ev_reserve(ev_reserve[w])
    );
    ook_transceiver u_trx (
      .clk, .rst_n,
      .tx_valid(tx_valid[w]), .tx_word(tx_word[w]),
      .air_out(air_out[w]), .air_in(air),
      .sleep(rx_sleep[w]),
      .rx_valid(rx_valid[w]), .rx_word(rx_word[w])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %0t %s", $time, what); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  // ---------------- switch-side senders ----------------
  int up_cred [NW][NUM_VC];
  always @(posedge clk) if (rst_n)
    for (int w = 0; w < NW; w++)
      if (sw_in_credit[w].valid) up_cred[w][sw_in_credit[w].vc]++;

  int exp_wi [int];          // packet -> receiving WI
  int exp_len [int];
  int pkt_no = 0;

  // per-WI, per-VC flit queues; one driver per WI picks a VC with credit
  flit_t txf [NW][NUM_VC][$];
  int    rr [NW];
  always @(negedge clk) if (rst_n)
    for (int w = 0; w < NW; w++) begin
      sw_in[w] = '0;
      for (int k = 0; k < NUM_VC; k++) begin
        automatic int v = (rr[w] + k) % NUM_VC;
        if (!sw_in[w].valid && txf[w][v].size() > 0 && up_cred[w][v] > 0) begin
          sw_in[w].valid = 1'b1;
          sw_in[w].vc    = VC_W'(v);
          sw_in[w].flit  = txf[w][v].pop_front();
          up_cred[w][v]--;
          rr[w] = (v + 1) % NUM_VC;
        end
      end
    end

  task automatic send_pkt(int w, int v, int dnode, int dwi, int n);
    automatic int pk = pkt_no++;
    exp_wi[pk] = dwi; exp_len[pk] = n;
    for (int i = 0; i < n; i++) begin
      automatic flit_t f;
      f.ftype = (i == 0) ? FT_HEAD : (i == n - 1) ? FT_TAIL : FT_BODY;
      f.data  = (i == 0) ? {NODE_W'(dnode), NODE_W'(wi_node(w)), 2'b00, 16'(pk)}
                         : {16'(pk), 16'(i)};
      txf[w][v].push_back(f);
    end
  endtask

  // ---------------- switch-side receivers ----------------
  int cur_pkt [NW][NUM_VC];
  int cur_idx [NW][NUM_VC];
  int done_pkts = 0;
  always @(negedge clk) if (rst_n)
    for (int w = 0; w < NW; w++) begin
      sw_out_credit[w] = '0;
      if (sw_out[w].valid) begin
        automatic int v = int'(sw_out[w].vc);
        automatic flit_t f = sw_out[w].flit;
        sw_out_credit[w].valid = 1'b1;      // the switch buffer drains at once
        sw_out_credit[w].vc    = VC_W'(v);
        if (f.ftype == FT_HEAD) begin
          automatic int pk = int'(f.data[15:0]);
          check(cur_pkt[w][v] < 0, "head into a busy VC");
          check(exp_wi.exists(pk) && exp_wi[pk] == w,
                $sformatf("packet %0d arrived at WI %0d", pk, w));
          cur_pkt[w][v] = pk; cur_idx[w][v] = 1;
        end else begin
          check(cur_pkt[w][v] >= 0, "flit without head");
          check(int'(f.data[31:16]) == cur_pkt[w][v] && int'(f.data[15:0]) == cur_idx[w][v],
                $sformatf("flit order at WI %0d vc %0d", w, v));
          cur_idx[w][v]++;
          if (f.ftype == FT_TAIL) begin
            check(cur_idx[w][v] == exp_len[cur_pkt[w][v]], "packet length");
            cur_pkt[w][v] = -1;
            done_pkts++;
          end
        end
      end
    end

  // ---------------- channel observation ----------------
  int n_partial = 0, n_reserve = 0, n_sleep2 = 0, n_hdr = 0;
  int next_hdr = 0;
  int last_data_t = -100, min_gap = 1000, max_gap_in_turn = 0;
  int prev_kind = 0;            // 0 header/tuple, 1 data
  int t_hdr0 [$];
  always @(negedge clk) if (rst_n) begin
    automatic int on = 0;
    for (int w = 0; w < NW; w++) begin
      if (air_out[w].valid) on++;
      if (ev_partial[w]) n_partial++;
      if (ev_reserve[w]) n_reserve++;
    end
    if (rx_sleep[2] && air.valid && air.word.ftype != FT_CTRL) n_sleep2++;
    check(on <= 1, "two transmitters at once");
    if (air.valid) begin
      if (air.word.ftype == FT_CTRL && air.word.data[31:28] == 4'hC) begin
        check(int'(air.word.data[27:25]) == next_hdr,
              $sformatf("header of WI %0d, expected %0d", air.word.data[27:25], next_hdr));
        next_hdr = (int'(air.word.data[27:25]) + 1) % NW;
        n_hdr++;
        if (air.word.data[27:25] == 0) t_hdr0.push_back(cyc);
        prev_kind = 0;
      end else if (air.word.ftype != FT_CTRL) begin
        if (prev_kind == 1) begin
          if (cyc - last_data_t < min_gap) min_gap = cyc - last_data_t;
          if (cyc - last_data_t > max_gap_in_turn) max_gap_in_turn = cyc - last_data_t;
        end
        last_data_t = cyc;
        prev_kind = 1;
      end else prev_kind = 0;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired (%0d packets done)", done_pkts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < NW; w++) begin
      sw_in[w] = '0; sw_out_credit[w] = '0;
      for (int v = 0; v < NUM_VC; v++) begin
        up_cred[w][v] = BUF_DEPTH; cur_pkt[w][v] = -1; rr[w] = 0; cur_idx[w][v] = 0;
      end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // idle rounds first
    repeat (200) @(negedge clk);
    check(t_hdr0.size() >= 2 && t_hdr0[1] - t_hdr0[0] == NW * FLIT_CYCLES,
          "idle round of eight empty headers lasts 40 cycles");
    send_pkt(0, 0, wi_node(4), 4, PKT_FLITS);
    send_pkt(0, 0, wi_node(4), 4, 10);
    send_pkt(0, 1, wi_node(1), 1, 20);
    send_pkt(4, 3, wi_node(0), 0, PKT_FLITS);
    wait (done_pkts == 4);
    repeat (100) @(negedge clk);
    check(done_pkts == 4, "all packets delivered");
    check(min_gap == FLIT_CYCLES, $sformatf("data words %0d cycles apart, expected %0d", min_gap, FLIT_CYCLES));
    check(max_gap_in_turn == FLIT_CYCLES, "no gaps inside a turn's data");
    check(n_partial > 0, "partial packets were sent");
    check(n_reserve > 0, "receive VCs were reserved");
    check(n_sleep2 > 0, "WI 2 slept through data not addressed to it");
    for (int w = 0; w < NW; w++)
      check(turn[w] == turn[0], "all WIs agree on the channel owner");
    $display("headers=%0d partial=%0d reserve=%0d sleep2=%0d", n_hdr, n_partial, n_reserve, n_sleep2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
