// Wormhole virtual-channel NoC switch with table-based routing.
//
// Every port is bidirectional.  Each input port has NUM_VC virtual channels of
// BUF_DEPTH flits (8 x 16 in the paper's configuration); links use credit flow
// control, one credit per free downstream buffer slot.  A packet moves through
// three pipeline stages:
//   1. RC  - when a head flit reaches the front of an idle input VC, its
//            destination is looked up in the switch's forwarding table
//            (route_lut) and the output port is registered;
//   2. VA  - each output port grants one waiting input VC per cycle a free
//            output VC (round robin over requesters, lowest free VC);
//   3. SA/ST - a separable round-robin allocator picks at most one flit per
//            input port and per output port among active VCs that hold a flit
//            and a credit; the winner is popped and registered on the output
//            link, and a credit is registered back to the upstream sender.
// Body and tail flits follow the reserved path (wormhole switching) and only
// use stage 3; the tail releases the output VC.  A head flit therefore leaves
// four cycles after it arrived (three stages plus the output register), a body
// flit two cycles after.
//
// From the paper: wormhole switching, a three-stage pipeline, routing from a
// forwarding table only for head flits, 8 VCs of 16 flits per port.  The
// allocator structure, round-robin policies and credit protocol are this
// design's own choices, as the paper does not describe the switch internals.
// Ports that are not connected must be tied to zero; the forwarding table never
// selects them.
module noc_switch
  import mcw_pkg::*;
#(
  parameter int SELF = 0,           // node number (forwarding-table contents)
  parameter int NP   = NPORTS
) (
  input  logic    clk,
  input  logic    rst_n,
  input  link_t   in_link    [NP],   // flits arriving from upstream
  output credit_t in_credit  [NP],   // credits returned upstream
  output link_t   out_link   [NP],   // flits leaving to downstream
  input  credit_t out_credit [NP]    // credits returned by downstream
);
  localparam int NV = NUM_VC;
  localparam int NI = NP * NV;       // number of input VCs

  typedef enum logic [1:0] {VC_IDLE, VC_WAIT, VC_ACTIVE} vcst_e;

  // ---------------- input VC buffers ----------------
  flit_t              fdout  [NP][NV];
  logic [NP-1:0][NV-1:0] fempty;
  logic [NP-1:0][NV-1:0] fpop;
  route_t             lut    [NP][NV];

  for (genvar p = 0; p < NP; p++) begin : g_in
    for (genvar v = 0; v < NV; v++) begin : g_vc
      logic [CNT_W-1:0] cnt_unused;
      logic             full_unused;
      vc_fifo #(.DEPTH(BUF_DEPTH)) u_buf (
        .clk, .rst_n,
        .push (in_link[p].valid && in_link[p].vc == VC_W'(v)),
        .din  (in_link[p].flit),
        .pop  (fpop[p][v]),
        .dout (fdout[p][v]),
        .empty(fempty[p][v]),
        .full (full_unused),
        .count(cnt_unused)
      );
      route_lut #(.SELF(SELF)) u_lut (
        .dest (head_dest(fdout[p][v])),
        .route(lut[p][v])
      );
    end
  end

  // ---------------- per input VC state ----------------
  vcst_e              st    [NP][NV];
  logic [PORT_W-1:0]  rport [NP][NV];
  logic [VC_W-1:0]    ovc   [NP][NV];

  // ---------------- per output VC state ----------------
  logic [NP-1:0][NV-1:0] ovc_busy;
  logic [CNT_W-1:0]      credits [NP][NV];

  // round-robin pointers
  logic [$clog2(NI)-1:0] va_ptr     [NP];
  logic [VC_W-1:0]       sa_in_ptr  [NP];
  logic [PORT_W-1:0]     sa_out_ptr [NP];

  // ---------------- VC allocation ----------------
  logic [NP-1:0]          va_gnt;
  logic [$clog2(NI)-1:0]  va_win [NP];
  logic [VC_W-1:0]        va_ovc [NP];

  always_comb begin
    for (int o = 0; o < NP; o++) begin
      logic found_req, found_vc;
      int   idx;
      found_req = 1'b0; found_vc = 1'b0;
      va_win[o] = '0; va_ovc[o] = '0;
      for (int k = 0; k < NI; k++) begin
        idx = (int'(va_ptr[o]) + k) % NI;
        if (!found_req && st[idx / NV][idx % NV] == VC_WAIT &&
            int'(rport[idx / NV][idx % NV]) == o) begin
          found_req = 1'b1;
          va_win[o] = ($clog2(NI))'(idx);
        end
      end
      for (int v = 0; v < NV; v++)
        if (!found_vc && !ovc_busy[o][v]) begin
          found_vc = 1'b1;
          va_ovc[o] = VC_W'(v);
        end
      va_gnt[o] = found_req && found_vc;
    end
  end

  // ---------------- switch allocation ----------------
  logic [NP-1:0]     in_req;
  logic [VC_W-1:0]   in_vc   [NP];
  logic [PORT_W-1:0] in_port [NP];
  logic [NP-1:0]     sa_gnt_out;            // per output: a flit is sent
  logic [PORT_W-1:0] sa_src  [NP];          // per output: winning input port
  logic [NP-1:0]     sa_gnt_in;             // per input: its request won

  always_comb begin
    for (int p = 0; p < NP; p++) begin
      int v;
      in_req[p] = 1'b0; in_vc[p] = '0; in_port[p] = '0;
      for (int k = 0; k < NV; k++) begin
        v = (int'(sa_in_ptr[p]) + k) % NV;
        if (!in_req[p] && st[p][v] == VC_ACTIVE && !fempty[p][v] &&
            credits[rport[p][v]][ovc[p][v]] != 0) begin
          in_req[p]  = 1'b1;
          in_vc[p]   = VC_W'(v);
          in_port[p] = rport[p][v];
        end
      end
    end
    sa_gnt_in = '0;
    for (int o = 0; o < NP; o++) begin
      int p;
      sa_gnt_out[o] = 1'b0; sa_src[o] = '0;
      for (int k = 0; k < NP; k++) begin
        p = (int'(sa_out_ptr[o]) + k) % NP;
        if (!sa_gnt_out[o] && in_req[p] && int'(in_port[p]) == o) begin
          sa_gnt_out[o] = 1'b1;
          sa_src[o]     = PORT_W'(p);
          sa_gnt_in[p]  = 1'b1;
        end
      end
    end
    fpop = '0;
    for (int p = 0; p < NP; p++)
      if (sa_gnt_in[p]) fpop[p][in_vc[p]] = 1'b1;
  end

  // ---------------- state update ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NP; p++) begin
        for (int v = 0; v < NV; v++) begin
          st[p][v]      <= VC_IDLE;
          rport[p][v]   <= '0;
          ovc[p][v]     <= '0;
          credits[p][v] <= CNT_W'(BUF_DEPTH);
        end
        va_ptr[p]     <= '0;
        sa_in_ptr[p]  <= '0;
        sa_out_ptr[p] <= '0;
        out_link[p]   <= '0;
        in_credit[p]  <= '0;
      end
      ovc_busy <= '0;
    end else begin
      // RC: route head flits at the front of idle VCs
      for (int p = 0; p < NP; p++)
        for (int v = 0; v < NV; v++)
          if (st[p][v] == VC_IDLE && !fempty[p][v] && fdout[p][v].ftype == FT_HEAD) begin
            st[p][v]    <= VC_WAIT;
            rport[p][v] <= lut[p][v].port;
          end
      // VA
      for (int o = 0; o < NP; o++)
        if (va_gnt[o]) begin
          st [va_win[o] / NV][va_win[o] % NV] <= VC_ACTIVE;
          ovc[va_win[o] / NV][va_win[o] % NV] <= va_ovc[o];
          ovc_busy[o][va_ovc[o]]              <= 1'b1;
          va_ptr[o] <= ($clog2(NI))'((int'(va_win[o]) + 1) % NI);
        end
      // SA / ST and credits
      for (int o = 0; o < NP; o++) begin
        out_link[o] <= '0;
        for (int v = 0; v < NV; v++) begin
          logic inc, dec;
          inc = out_credit[o].valid && out_credit[o].vc == VC_W'(v);
          dec = sa_gnt_out[o] && ovc[sa_src[o]][in_vc[sa_src[o]]] == VC_W'(v);
          credits[o][v] <= credits[o][v] + (inc ? 1'b1 : 1'b0) - (dec ? 1'b1 : 1'b0);
        end
        if (sa_gnt_out[o]) begin
          automatic int    p = int'(sa_src[o]);
          automatic int    v = int'(in_vc[p]);
          automatic flit_t f = fdout[p][v];
          out_link[o].valid <= 1'b1;
          out_link[o].vc    <= ovc[p][v];
          out_link[o].flit  <= f;
          sa_out_ptr[o]     <= PORT_W'((p + 1) % NP);
          if (f.ftype == FT_TAIL) begin
            st[p][v] <= VC_IDLE;
            ovc_busy[o][ovc[p][v]] <= 1'b0;
          end
        end
      end
      for (int p = 0; p < NP; p++) begin
        in_credit[p].valid <= sa_gnt_in[p];
        in_credit[p].vc    <= in_vc[p];
        if (sa_gnt_in[p]) sa_in_ptr[p] <= VC_W'((int'(in_vc[p]) + 1) % NV);
      end
    end
  end

  // an idle VC must start with a head flit (wormhole packet framing)
  for (genvar p = 0; p < NP; p++) begin : g_chk
    for (genvar v = 0; v < NV; v++) begin : g_vchk
      a_head_first: assert property (@(posedge clk) disable iff (!rst_n)
        (st[p][v] == VC_IDLE && !fempty[p][v]) |-> fdout[p][v].ftype == FT_HEAD);
    end
  end
endmodule
