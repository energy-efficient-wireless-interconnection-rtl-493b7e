// One multicore processing chip: a MESH_X x MESH_Y mesh NoC of switches (one
// per core tile) with a single wireless interface and its transceiver at tile
// (WI_X, WI_Y).
//
// Each switch has a local port to its core (brought out as core_* ports, the
// cores themselves are outside this RTL), four mesh ports to its neighbours
// (single-cycle links, credit flow control) and, at the WI tile only, the
// wireless port to the wireless_interface.  Forwarding tables hold shortest
// paths over the whole system; inside a chip they are X-first mesh routes,
// and traffic to other chips or stacks is steered to the WI tile.
//
// From the paper: 4x4 mesh per 16-core chip, one WI per 16 cores placed at a
// central switch of the cluster.  Which of the four central switches carries
// the WI is this design's choice (WI_X, WI_Y in mcw_pkg); unused mesh ports at
// the chip edge are tied off.
module mesh_chip
  import mcw_pkg::*;
#(
  parameter int CHIP = 0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  link_t   core_in         [CORES_PER_CHIP],  // injection from cores
  output credit_t core_in_credit  [CORES_PER_CHIP],
  output link_t   core_out        [CORES_PER_CHIP],  // ejection to cores
  input  credit_t core_out_credit [CORES_PER_CHIP],
  output air_t    air_out,                           // to the shared medium
  input  air_t    air_in,
  output logic    wi_sleep,
  output logic [WI_W-1:0] wi_turn,
  output logic    wi_ev_ctrl,
  output logic    wi_ev_partial,
  output logic    wi_ev_reserve
);
  localparam int NT   = CORES_PER_CHIP;
  localparam int BASE = CHIP * CORES_PER_CHIP;
  localparam int WT   = WI_Y * MESH_X + WI_X;        // WI tile index

  function automatic int opp(int p);
    case (p)
      P_N: return P_S;
      P_S: return P_N;
      P_E: return P_W;
      default: return P_E;
    endcase
  endfunction

  link_t   s_in   [NT][NPORTS];
  credit_t s_icr  [NT][NPORTS];
  link_t   s_out  [NT][NPORTS];
  credit_t s_ocr  [NT][NPORTS];

  link_t   wi_sw_out;
  credit_t wi_sw_in_credit;

  for (genvar t = 0; t < NT; t++) begin : g_tile
    noc_switch #(.SELF(BASE + t), .NP(NPORTS)) u_sw (
      .clk, .rst_n,
      .in_link   (s_in[t]),
      .in_credit (s_icr[t]),
      .out_link  (s_out[t]),
      .out_credit(s_ocr[t])
    );
    // local port
    assign s_in[t][P_LOCAL]  = core_in[t];
    assign core_in_credit[t] = s_icr[t][P_LOCAL];
    assign core_out[t]       = s_out[t][P_LOCAL];
    assign s_ocr[t][P_LOCAL] = core_out_credit[t];
    // mesh ports
    for (genvar p = P_N; p <= P_W; p++) begin : g_port
      localparam int NB = mesh_nb(BASE + t, p);
      if (NB >= 0) begin : g_link
        assign s_in[t][p]  = s_out[NB - BASE][opp(p)];
        assign s_ocr[t][p] = s_icr[NB - BASE][opp(p)];
      end else begin : g_edge
        assign s_in[t][p]  = '0;
        assign s_ocr[t][p] = '0;
      end
    end
    // wireless port
    if (t == WT) begin : g_wi
      assign s_in[t][P_WI]  = wi_sw_out;
      assign s_ocr[t][P_WI] = wi_sw_in_credit;
    end else begin : g_nowi
      assign s_in[t][P_WI]  = '0;
      assign s_ocr[t][P_WI] = '0;
    end
  end

  logic  tx_valid, rx_valid;
  flit_t tx_word, rx_word;

  wireless_interface #(.WI_ID(CHIP), .SELF(BASE + WT)) u_wi (
    .clk, .rst_n,
    .sw_in        (s_out[WT][P_WI]),
    .sw_in_credit (wi_sw_in_credit),
    .sw_out       (wi_sw_out),
    .sw_out_credit(s_icr[WT][P_WI]),
    .tx_valid, .tx_word, .rx_valid, .rx_word,
    .rx_sleep     (wi_sleep),
    .turn         (wi_turn),
    .ev_ctrl      (wi_ev_ctrl),
    .ev_partial   (wi_ev_partial),
    .ev_reserve   (wi_ev_reserve)
  );

  ook_transceiver u_trx (
    .clk, .rst_n,
    .tx_valid, .tx_word,
    .air_out, .air_in,
    .sleep   (wi_sleep),
    .rx_valid, .rx_word
  );
endmodule
