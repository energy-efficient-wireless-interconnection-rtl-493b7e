// Base logic die of one in-package DRAM stack, seen from the network.
//
// The base die carries one switch and one wireless interface with its
// transceiver; the stack reaches every processing chip and every other stack
// only over the wireless channel.  The switch's local port is brought out as
// mem_* ports: it is where the base die's DRAM controller (not part of this
// RTL) takes requests and returns data.  Node number NUM_CORES+MEM, WI number
// NUM_CHIPS+MEM.
//
// From the paper: one WI on the logic die under every memory stack, the stack
// is an interface between the DRAM layers and the chips.  The single local
// port (rather than one per DRAM channel) and the six-port switch with unused
// mesh ports tied off are this design's choices.
module memory_node
  import mcw_pkg::*;
#(
  parameter int MEM  = 0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  link_t   mem_in,           // responses/requests from the DRAM side
  output credit_t mem_in_credit,
  output link_t   mem_out,          // packets to the DRAM side
  input  credit_t mem_out_credit,
  output air_t    air_out,
  input  air_t    air_in,
  output logic    wi_sleep,
  output logic [WI_W-1:0] wi_turn,
  output logic    wi_ev_ctrl,
  output logic    wi_ev_partial,
  output logic    wi_ev_reserve
);
  localparam int NODE = NUM_CORES + MEM;

  link_t   s_in  [NPORTS];
  credit_t s_icr [NPORTS];
  link_t   s_out [NPORTS];
  credit_t s_ocr [NPORTS];
  link_t   wi_sw_out;
  credit_t wi_sw_in_credit;

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      s_in[p]  = '0;
      s_ocr[p] = '0;
    end
    s_in[P_LOCAL]  = mem_in;
    s_ocr[P_LOCAL] = mem_out_credit;
    s_in[P_WI]     = wi_sw_out;
    s_ocr[P_WI]    = wi_sw_in_credit;
  end

  assign mem_in_credit = s_icr[P_LOCAL];
  assign mem_out       = s_out[P_LOCAL];

  noc_switch #(.SELF(NODE), .NP(NPORTS)) u_sw (
    .clk, .rst_n,
    .in_link(s_in), .in_credit(s_icr), .out_link(s_out), .out_credit(s_ocr)
  );

  logic  tx_valid, rx_valid;
  flit_t tx_word, rx_word;

  wireless_interface #(.WI_ID(NUM_CHIPS + MEM), .SELF(NODE)) u_wi (
    .clk, .rst_n,
    .sw_in        (s_out[P_WI]),
    .sw_in_credit (wi_sw_in_credit),
    .sw_out       (wi_sw_out),
    .sw_out_credit(s_icr[P_WI]),
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
