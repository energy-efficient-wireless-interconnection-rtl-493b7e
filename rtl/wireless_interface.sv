// Wireless interface (WI) with the control-packet medium access controller.
//
// The WI is the extra port of one switch (a chip's WI tile or a memory stack's
// base-die switch).  On the switch side it looks like a normal link pair: flits
// routed to the wireless port land in NUM_VC transmit VC buffers (16 flits
// each), flits received over the air are held in NUM_VC receive VC buffers and
// forwarded to the switch with credit flow control.  On the air side it drives
// one OOK transceiver.
//
// Medium access (after the paper).  All WIs share one 60 GHz channel and take
// turns in the fixed order of their WI numbers; there is no circulating token.
// The channel is divided into slots of FLIT_CYCLES clocks, one 32-bit word per
// slot.  At the start of its turn a WI broadcasts a control packet: a header
// word followed by one word per 3-tuple (DestWI, PktID, NumFlits), at most one
// tuple per transmit VC.  It then sends the announced flits, tuple by tuple.
// NumFlits may be less than a whole packet (partial packet transmission): a
// tuple carries the flits of one packet that are buffered when the turn
// starts.  Every WI decodes every control packet, so each one knows how many
// slots the turn lasts and the next WI in order starts its own control packet
// right after the last announced flit.  A WI with nothing to send still sends
// a header with zero tuples, which passes the turn.  The receiver is put to
// sleep (rx_sleep) for every slot whose data is not addressed to it.
// At the destination the PktID selects the receive VC already holding that
// packet; a PktID that is not present reserves the lowest free receive VC.
// The reservation ends when the packet's tail flit has been passed to the
// switch, which keeps wormhole order across partial transfers.
//
// Design choices where the paper is silent:
//  * PktID = {source WI, source transmit VC}.
//  * Word formats (ftype FT_CTRL):
//      header: [31:28]=0xC, [27:25] source WI, [24:21] number of tuples,
//              [20:17] idle receive VCs, [16:9] "drained" bit per source WI
//      tuple : [31:28]=0xD, [27:25] DestWI, [24:19] PktID, [18:14] NumFlits
//  * Receive-buffer flow control over the air.  The header also advertises the
//    sender's number of idle receive VCs and, per source WI, whether all its
//    receive VCs holding flits from that source are empty.  A WI sends a tuple
//    to destination d only if d's last header said its VCs for us were
//    drained and we have not sent to d since; a tuple that starts a new packet
//    also needs an idle VC that no tuple heard since d's header can have
//    taken.  Each tuple moves at most 16 flits, so it always fits.
//  * Each WI keeps the channel schedule itself from the control packets; all
//    WIs leave reset together and share the slot clock.
// Timing: a word sent at the first cycle of a slot is delivered by the
// transceiver in the slot's last cycle; the schedule advances at slot starts.
module wireless_interface
  import mcw_pkg::*;
#(
  parameter int WI_ID = 0,           // position in the transmit order
  parameter int SELF  = wi_node(0)   // node number of the host switch
) (
  input  logic        clk,
  input  logic        rst_n,
  // switch side
  input  link_t       sw_in,          // from the switch's wireless output port
  output credit_t     sw_in_credit,   // credits back to the switch
  output link_t       sw_out,         // into the switch's wireless input port
  input  credit_t     sw_out_credit,  // credits from the switch
  // transceiver side
  output logic        tx_valid,
  output flit_t       tx_word,
  input  logic        rx_valid,
  input  flit_t       rx_word,
  output logic        rx_sleep,
  // observation
  output logic [WI_W-1:0] turn,       // WI that owns the channel
  output logic        ev_ctrl,        // this WI sent a control header
  output logic        ev_partial,     // this WI announced a partial packet
  output logic        ev_reserve      // a receive VC was reserved
);
  localparam int NV = NUM_VC;
  localparam int D  = BUF_DEPTH;
  localparam int AW = $clog2(D);
  localparam int TW = $clog2(NV + 1);           // tuple count width
  localparam logic [3:0] HDR_TAG = 4'hC;
  localparam logic [3:0] TUP_TAG = 4'hD;

  typedef enum logic [1:0] {PH_HDR, PH_TUP, PH_DATA} phase_e;

  // ---------------- slot timer ----------------
  logic [$clog2(FLIT_CYCLES)-1:0] slot_cnt;
  logic tick;
  assign tick = (slot_cnt == '0);

  // ---------------- transmit VC buffers ----------------
  typedef struct packed {
    logic [WI_W-1:0] dest;
    flit_t           flit;
  } txe_t;

  txe_t             txq    [NV][D];
  logic [AW-1:0]    tx_rd  [NV];
  logic [AW-1:0]    tx_wr  [NV];
  logic [CNT_W-1:0] tx_cnt [NV];
  logic [WI_W-1:0]  cur_dest [NV];
  route_t           in_route;

  route_lut #(.SELF(SELF)) u_lut (
    .dest (head_dest(sw_in.flit)),
    .route(in_route)
  );

  // flits of the front packet present in each transmit VC
  logic [CNT_W-1:0] n_front  [NV];
  logic [NV-1:0]    front_new;    // front flit is a head flit
  logic [NV-1:0]    front_tail;   // the front packet's tail is buffered
  always_comb begin
    for (int v = 0; v < NV; v++) begin
      logic seen;
      seen = 1'b0;
      n_front[v] = '0;
      for (int i = 0; i < D; i++)
        if (i < int'(tx_cnt[v]) && !seen) begin
          n_front[v] = n_front[v] + 1'b1;
          if (txq[v][AW'((int'(tx_rd[v]) + i) % D)].flit.ftype == FT_TAIL) seen = 1'b1;
        end
      front_tail[v] = seen;
      front_new[v]  = (tx_cnt[v] != 0) && txq[v][tx_rd[v]].flit.ftype == FT_HEAD;
    end
  end

  // ---------------- receive VC buffers ----------------
  logic [NV-1:0]      rx_push, rx_pop, rx_empty;
  flit_t              rx_dout [NV];
  logic [NV-1:0]      rx_res;                 // reserved for a packet
  logic [PKTID_W-1:0] rx_pkt  [NV];
  logic [CNT_W-1:0]   out_cred [NV];          // credits towards the switch
  logic [VC_W-1:0]    rx_rr;

  for (genvar v = 0; v < NV; v++) begin : g_rx
    logic             full_unused;
    logic [CNT_W-1:0] cnt_unused;
    vc_fifo #(.DEPTH(D)) u_rxbuf (
      .clk, .rst_n,
      .push (rx_push[v]),
      .din  (rx_word),
      .pop  (rx_pop[v]),
      .dout (rx_dout[v]),
      .empty(rx_empty[v]),
      .full (full_unused),
      .count(cnt_unused)
    );
  end

  // header status: idle receive VCs and per-source drained flags
  logic [TW-1:0]     idle_cnt;
  logic [NUM_WI-1:0] drained;
  always_comb begin
    idle_cnt = '0;
    drained  = '1;
    for (int v = 0; v < NV; v++) begin
      if (!rx_res[v] && rx_empty[v]) idle_cnt = idle_cnt + 1'b1;
      if (!rx_empty[v]) drained[rx_pkt[v][PKTID_W-1 -: WI_W]] = 1'b0;
    end
  end

  // ---------------- channel schedule (same in every WI) ----------------
  logic              started;
  phase_e            phase;
  logic [WI_W-1:0]   owner;
  logic [TW-1:0]     ntup, tidx, seg;
  logic [CNT_W-1:0]  seg_rem;
  logic [WI_W-1:0]   tup_dest [NV];
  logic [PKTID_W-1:0] tup_pkt [NV];
  logic [CNT_W-1:0]  tup_n    [NV];
  logic [VC_W-1:0]   tup_rxvc [NV];
  logic [VC_W-1:0]   plan_vc  [NV];          // own tuples: source VC
  flit_t             heard;                  // word of the current slot

  // knowledge about the other WIs' receive buffers
  logic [TW-1:0]     adv_idle [NUM_WI];
  logic [TW-1:0]     claims   [NUM_WI];
  logic [NUM_WI-1:0] can_send;

  assign turn = owner;
  assign rx_sleep = !started || owner == WI_ID[WI_W-1:0] ||
                    (phase == PH_DATA && tup_dest[seg] != WI_ID[WI_W-1:0]);

  // receive: data slot addressed to this WI
  always_comb begin
    rx_push = '0;
    if (rx_valid && started && phase == PH_DATA && owner != WI_ID[WI_W-1:0] &&
        tup_dest[seg] == WI_ID[WI_W-1:0])
      rx_push[tup_rxvc[seg]] = 1'b1;
  end

  // forward received flits to the switch
  logic            fw_ok;
  logic [VC_W-1:0] fw_vc;
  always_comb begin
    fw_ok = 1'b0; fw_vc = '0;
    for (int k = 0; k < NV; k++) begin
      automatic int v = (int'(rx_rr) + k) % NV;
      if (!fw_ok && !rx_empty[v] && out_cred[v] != 0) begin
        fw_ok = 1'b1; fw_vc = VC_W'(v);
      end
    end
    rx_pop = '0;
    if (fw_ok) rx_pop[fw_vc] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_cnt <= '0;
      started  <= 1'b0;
      phase    <= PH_HDR;
      owner    <= '0;
      ntup     <= '0; tidx <= '0; seg <= '0; seg_rem <= '0;
      heard    <= '0;
      can_send <= '1;
      rx_res   <= '0;
      rx_rr    <= '0;
      tx_valid <= 1'b0; tx_word <= '0;
      sw_out <= '0; sw_in_credit <= '0;
      ev_ctrl <= 1'b0; ev_partial <= 1'b0; ev_reserve <= 1'b0;
      for (int v = 0; v < NV; v++) begin
        tx_rd[v] <= '0; tx_wr[v] <= '0; tx_cnt[v] <= '0; cur_dest[v] <= '0;
        rx_pkt[v] <= '0; out_cred[v] <= CNT_W'(D);
        tup_dest[v] <= '0; tup_pkt[v] <= '0; tup_n[v] <= '0; tup_rxvc[v] <= '0;
        plan_vc[v] <= '0;
      end
      for (int w = 0; w < NUM_WI; w++) begin
        adv_idle[w] <= TW'(NV);
        claims[w]   <= '0;
      end
    end else begin
      automatic phase_e           ph_n    = phase;
      automatic logic [WI_W-1:0]  own_n   = owner;
      automatic logic [TW-1:0]    ntup_n  = ntup;
      automatic logic [TW-1:0]    tidx_n  = tidx;
      automatic logic [TW-1:0]    seg_n   = seg;
      automatic logic [CNT_W-1:0] rem_n   = seg_rem;
      automatic logic [NV-1:0]    tx_pop  = '0;
      automatic logic [NV-1:0]    res_n   = rx_res;

      tx_valid <= 1'b0;
      ev_ctrl <= 1'b0; ev_partial <= 1'b0; ev_reserve <= 1'b0;
      slot_cnt <= (int'(slot_cnt) == FLIT_CYCLES - 1) ? '0 : slot_cnt + 1'b1;

      // words heard from the air (control slots only; data slots are counted)
      if (rx_valid && owner != WI_ID[WI_W-1:0]) heard <= rx_word;

      // forward to switch; a tail releases the receive VC
      sw_out <= '0;
      if (fw_ok) begin
        sw_out.valid <= 1'b1;
        sw_out.vc    <= fw_vc;
        sw_out.flit  <= rx_dout[fw_vc];
        rx_rr        <= VC_W'((int'(fw_vc) + 1) % NV);
        if (rx_dout[fw_vc].ftype == FT_TAIL) res_n[fw_vc] = 1'b0;
      end
      for (int v = 0; v < NV; v++)
        out_cred[v] <= out_cred[v]
                       + ((sw_out_credit.valid && sw_out_credit.vc == VC_W'(v)) ? 1'b1 : 1'b0)
                       - ((fw_ok && fw_vc == VC_W'(v)) ? 1'b1 : 1'b0);

      if (tick) begin
        // ---- close the slot that just ended ----
        if (started) begin
          case (phase)
            PH_HDR: begin
              ntup_n = heard.data[24:21];
              if (owner != WI_ID[WI_W-1:0]) begin
                adv_idle[owner] <= heard.data[20:17];
                claims[owner]   <= '0;
                can_send[owner] <= heard.data[9 + WI_ID];
              end
              if (ntup_n == 0) begin
                own_n = WI_W'((int'(owner) + 1) % NUM_WI);
              end else begin
                ph_n = PH_TUP; tidx_n = '0;
              end
            end
            PH_TUP: begin
              automatic logic [WI_W-1:0]    d  = heard.data[27:25];
              automatic logic [PKTID_W-1:0] pk = heard.data[24:19];
              automatic logic [CNT_W-1:0]   n  = heard.data[18:14];
              tup_dest[tidx] <= d;
              tup_pkt[tidx]  <= pk;
              tup_n[tidx]    <= n;
              if (claims[d] != '1) claims[d] <= claims[d] + 1'b1;
              if (d == WI_ID[WI_W-1:0]) begin
                // PktID lookup, otherwise reserve the lowest free VC
                automatic logic hit = 1'b0;
                automatic logic [VC_W-1:0] vc = '0;
                for (int v = 0; v < NV; v++)
                  if (!hit && rx_res[v] && rx_pkt[v] == pk) begin hit = 1'b1; vc = VC_W'(v); end
                if (!hit) begin
                  for (int v = 0; v < NV; v++)
                    if (!hit && !rx_res[v] && rx_empty[v]) begin hit = 1'b1; vc = VC_W'(v); end
                  a_vc_free: assert (hit);
                  res_n[vc] = 1'b1;
                  rx_pkt[vc] <= pk;
                  ev_reserve <= 1'b1;
                end
                tup_rxvc[tidx] <= vc;
              end
              if (tidx == ntup - 1'b1) begin
                ph_n = PH_DATA; seg_n = '0;
                rem_n = (ntup == 1) ? n : tup_n[0];
              end else begin
                tidx_n = tidx + 1'b1;
              end
            end
            default: begin   // PH_DATA
              if (seg_rem == 1) begin
                if (seg == ntup - 1'b1) begin
                  ph_n = PH_HDR;
                  own_n = WI_W'((int'(owner) + 1) % NUM_WI);
                end else begin
                  seg_n = seg + 1'b1;
                  rem_n = tup_n[seg + 1'b1];
                end
              end else begin
                rem_n = seg_rem - 1'b1;
              end
            end
          endcase
        end
        started <= 1'b1;

        // ---- open the next slot: transmit if this WI owns it ----
        if (own_n == WI_ID[WI_W-1:0]) begin
          automatic flit_t w = '0;
          w.ftype = FT_CTRL;
          case (ph_n)
            PH_HDR: begin
              // plan the tuples of this turn
              automatic logic [TW-1:0] k = '0;
              automatic logic [TW-1:0] used [NUM_WI];
              for (int i = 0; i < NUM_WI; i++) used[i] = '0;
              for (int v = 0; v < NV; v++) begin
                automatic logic [WI_W-1:0] d = txq[v][tx_rd[v]].dest;
                if (tx_cnt[v] != 0 && can_send[d] &&
                    (!front_new[v] || adv_idle[d] > claims[d] + used[d])) begin
                  plan_vc[k] <= VC_W'(v);
                  used[d] = used[d] + 1'b1;
                  k = k + 1'b1;
                end
              end
              for (int i = 0; i < NUM_WI; i++)
                if (used[i] != 0) can_send[i] <= 1'b0;
              w.data[31:28] = HDR_TAG;
              w.data[27:25] = WI_ID[WI_W-1:0];
              w.data[24:21] = k;
              w.data[20:17] = idle_cnt;
              w.data[16:9]  = drained;
              ev_ctrl <= 1'b1;
            end
            PH_TUP: begin
              automatic logic [VC_W-1:0] v = plan_vc[tidx_n];
              w.data[31:28] = TUP_TAG;
              w.data[27:25] = txq[v][tx_rd[v]].dest;
              w.data[24:19] = {WI_ID[WI_W-1:0], v};
              w.data[18:14] = n_front[v];
              if (!front_tail[v]) ev_partial <= 1'b1;
            end
            default: begin
              automatic logic [VC_W-1:0] v = plan_vc[seg_n];
              w = txq[v][tx_rd[v]].flit;
              tx_pop[v] = 1'b1;
            end
          endcase
          tx_valid <= 1'b1;
          tx_word  <= w;
          heard    <= w;
        end

        phase <= ph_n; owner <= own_n; ntup <= ntup_n; tidx <= tidx_n;
        seg <= seg_n; seg_rem <= rem_n;
      end

      rx_res <= res_n;

      // transmit buffers: push from the switch, pop onto the air
      sw_in_credit <= '0;
      for (int v = 0; v < NV; v++) begin
        automatic logic push = sw_in.valid && sw_in.vc == VC_W'(v);
        if (push) begin
          automatic logic [WI_W-1:0] d =
            (sw_in.flit.ftype == FT_HEAD) ? in_route.wi : cur_dest[v];
          if (sw_in.flit.ftype == FT_HEAD) cur_dest[v] <= in_route.wi;
          txq[v][tx_wr[v]] <= '{dest: d, flit: sw_in.flit};
          tx_wr[v] <= AW'((int'(tx_wr[v]) + 1) % D);
        end
        if (tx_pop[v]) begin
          tx_rd[v] <= AW'((int'(tx_rd[v]) + 1) % D);
          sw_in_credit.valid <= 1'b1;
          sw_in_credit.vc    <= VC_W'(v);
        end
        tx_cnt[v] <= tx_cnt[v] + (push ? 1'b1 : 1'b0) - (tx_pop[v] ? 1'b1 : 1'b0);
      end
    end
  end

  // ---------------- protocol checks ----------------
  a_tx_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    sw_in.valid |-> tx_cnt[sw_in.vc] != CNT_W'(D));
  a_header_owner: assert property (@(posedge clk) disable iff (!rst_n)
    (started && tick && phase == PH_HDR) |->
      (heard.ftype == FT_CTRL && heard.data[31:28] == HDR_TAG && heard.data[27:25] == owner));
endmodule
