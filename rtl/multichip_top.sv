// Wireless multichip system, 4C4M configuration: four 16-core processing
// chips (4x4 mesh each, one WI per chip) and four in-package DRAM stacks (one
// WI on each base logic die), all eight WIs sharing one 60 GHz channel.
//
// There are no wired chip-to-chip or chip-to-memory links: every packet that
// leaves a chip crosses the air in one hop between two WIs.  The shared medium
// is modelled as the OR of the eight transceivers' radiated words; the MAC
// guarantees that at most one WI transmits at a time, which an assertion
// checks.  The cores and the DRAM controllers are outside this RTL: each core
// tile's local switch port (core_*) and each stack's local port (mem_*) is a
// top-level port with credit flow control.  Node numbers: core n = chip*16 +
// row*4 + column, stack m = 64 + m.  All logic runs on one clock (2.5 GHz in
// the paper) and one reset.
module multichip_top
  import mcw_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  link_t   core_in         [NUM_CORES],
  output credit_t core_in_credit  [NUM_CORES],
  output link_t   core_out        [NUM_CORES],
  input  credit_t core_out_credit [NUM_CORES],
  input  link_t   mem_in          [NUM_MEM],
  output credit_t mem_in_credit   [NUM_MEM],
  output link_t   mem_out         [NUM_MEM],
  input  credit_t mem_out_credit  [NUM_MEM],
  // observation of the wireless layer, indexed by WI number
  output logic [NUM_WI-1:0] wi_sleep,
  output logic [NUM_WI-1:0] wi_ev_ctrl,
  output logic [NUM_WI-1:0] wi_ev_partial,
  output logic [NUM_WI-1:0] wi_ev_reserve,
  output logic [WI_W-1:0]   channel_owner
);
  air_t air_out [NUM_WI];
  air_t air_ch;
  logic [WI_W-1:0] turn [NUM_WI];

  for (genvar c = 0; c < NUM_CHIPS; c++) begin : g_chip
    mesh_chip #(.CHIP(c)) u_chip (
      .clk, .rst_n,
      .core_in        (core_in        [c*CORES_PER_CHIP +: CORES_PER_CHIP]),
      .core_in_credit (core_in_credit [c*CORES_PER_CHIP +: CORES_PER_CHIP]),
      .core_out       (core_out       [c*CORES_PER_CHIP +: CORES_PER_CHIP]),
      .core_out_credit(core_out_credit[c*CORES_PER_CHIP +: CORES_PER_CHIP]),
      .air_out        (air_out[c]),
      .air_in         (air_ch),
      .wi_sleep       (wi_sleep[c]),
      .wi_turn        (turn[c]),
      .wi_ev_ctrl     (wi_ev_ctrl[c]),
      .wi_ev_partial  (wi_ev_partial[c]),
      .wi_ev_reserve  (wi_ev_reserve[c])
    );
  end

  for (genvar m = 0; m < NUM_MEM; m++) begin : g_mem
    memory_node #(.MEM(m)) u_mem (
      .clk, .rst_n,
      .mem_in        (mem_in[m]),
      .mem_in_credit (mem_in_credit[m]),
      .mem_out       (mem_out[m]),
      .mem_out_credit(mem_out_credit[m]),
      .air_out       (air_out[NUM_CHIPS + m]),
      .air_in        (air_ch),
      .wi_sleep      (wi_sleep[NUM_CHIPS + m]),
      .wi_turn       (turn[NUM_CHIPS + m]),
      .wi_ev_ctrl    (wi_ev_ctrl[NUM_CHIPS + m]),
      .wi_ev_partial (wi_ev_partial[NUM_CHIPS + m]),
      .wi_ev_reserve (wi_ev_reserve[NUM_CHIPS + m])
    );
  end

  // shared medium: OR of all radiated words
  logic [NUM_WI-1:0] on_air;
  always_comb begin
    air_ch = '0;
    for (int w = 0; w < NUM_WI; w++) begin
      on_air[w] = air_out[w].valid;
      air_ch    = air_ch | air_out[w];
    end
  end

  assign channel_owner = turn[0];

  // contention-free channel: never two transmitters, and all WIs agree on
  // whose turn it is
  a_one_transmitter: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(on_air));
  for (genvar w = 1; w < NUM_WI; w++) begin : g_agree
    a_same_turn: assert property (@(posedge clk) disable iff (!rst_n) turn[w] == turn[0]);
  end
endmodule
