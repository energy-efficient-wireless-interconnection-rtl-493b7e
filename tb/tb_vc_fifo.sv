// Self-checking testbench of vc_fifo: random pushes and pops (never into a
// full or out of an empty buffer, as credit flow control guarantees), compared
// with a queue model; also checks the empty/full/count flags and that a flit
// pushed into an empty buffer is visible at the output one cycle later.
module tb_vc_fifo;
  import mcw_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic push, pop, empty, full;
  flit_t din, dout;
  logic [CNT_W-1:0] count;
  int checks = 0, failures = 0;
  flit_t model [$];

  vc_fifo #(.DEPTH(BUF_DEPTH)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(empty && !full && count == 0, "reset state");
    // fill completely
    for (int i = 0; i < BUF_DEPTH; i++) begin
      push = 1; din = '{ftype: FT_BODY, data: 32'hA000 + i};
      model.push_back(din);
      @(negedge clk);
    end
    push = 0;
    check(full && count == CNT_W'(BUF_DEPTH), "full after 16 pushes");
    // drain completely
    for (int i = 0; i < BUF_DEPTH; i++) begin
      check(dout == model[0], "drain order");
      pop = 1; void'(model.pop_front());
      @(negedge clk);
    end
    pop = 0;
    check(empty, "empty after drain");
    // random traffic
    for (int n = 0; n < 5000; n++) begin
      push = ($urandom_range(0, 99) < 55) && (model.size() < BUF_DEPTH);
      pop  = ($urandom_range(0, 99) < 50) && (model.size() > 0);
      din  = '{ftype: ftype_e'($urandom_range(0, 2)), data: $urandom};
      if (pop) begin
        check(dout == model[0], "random order");
        void'(model.pop_front());
      end
      if (push) model.push_back(din);
      @(negedge clk);
      check(int'(count) == model.size(), "count");
      check(empty == (model.size() == 0), "empty flag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
