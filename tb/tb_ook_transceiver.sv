// Self-checking testbench of the transceiver model: two transceivers share a
// medium.  A word sent by one appears on the medium TX_LAT cycles later and at
// the other's receiver FLIT_CYCLES-2 cycles after it was sent, unchanged; a
// sleeping receiver delivers nothing; words sent one slot (FLIT_CYCLES
// cycles) apart all arrive.
module tb_ook_transceiver;
  import mcw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic  tx_valid [2], rx_valid [2], sleep [2];
  flit_t tx_word [2], rx_word [2];
  air_t  air_out [2];
  air_t  air;
  assign air = air_out[0] | air_out[1];

  for (genvar i = 0; i < 2; i++) begin : g_trx
    ook_transceiver u_trx (
      .clk, .rst_n,
      .tx_valid(tx_valid[i]), .tx_word(tx_word[i]),
      .air_out(air_out[i]), .air_in(air),
      .sleep(sleep[i]),
      .rx_valid(rx_valid[i]), .rx_word(rx_word[i])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t %s", $time, what); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc++;

  int t_tx = -1, t_air = -1, t_rx = -1, n_rx = 0;
  flit_t last_rx;
  always @(negedge clk) if (rst_n) begin
    if (air.valid && t_air < 0) t_air = cyc;
    if (rx_valid[1]) begin
      if (t_rx < 0) t_rx = cyc;
      last_rx = rx_word[1];
      n_rx++;
    end
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2; i++) begin tx_valid[i] = 0; tx_word[i] = '0; sleep[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (6) @(negedge clk);
    // single word
    tx_valid[0] = 1; tx_word[0] = '{ftype: FT_HEAD, data: 32'hCAFE_0001}; t_tx = cyc;
    @(negedge clk);
    tx_valid[0] = 0;
    repeat (8) @(negedge clk);
    check(t_air - t_tx == FLIT_CYCLES - 3, $sformatf("air latency %0d", t_air - t_tx));
    check(t_rx - t_tx == FLIT_CYCLES - 2, $sformatf("rx latency %0d", t_rx - t_tx));
    check(last_rx == '{ftype: FT_HEAD, data: 32'hCAFE_0001}, "word unchanged");
    check(n_rx == 1, "one word received");
    // sleeping receiver
    sleep[1] = 1;
    tx_valid[0] = 1; tx_word[0] = '{ftype: FT_BODY, data: 32'h1234_5678};
    @(negedge clk);
    tx_valid[0] = 0;
    repeat (8) @(negedge clk);
    check(n_rx == 1, "sleeping receiver delivers nothing");
    sleep[1] = 0;
    // back-to-back words, one per slot
    for (int k = 0; k < 10; k++) begin
      tx_valid[0] = 1; tx_word[0] = '{ftype: FT_BODY, data: 32'(k)};
      @(negedge clk);
      tx_valid[0] = 0;
      repeat (FLIT_CYCLES - 1) @(negedge clk);
      check(last_rx.data == 32'(k) || k == 0, "stream word");
    end
    repeat (8) @(negedge clk);
    check(n_rx == 11, $sformatf("stream received %0d words", n_rx - 1));
    check(last_rx.data == 32'd9, "last stream word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
