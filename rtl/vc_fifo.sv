// Virtual-channel flit buffer.
//
// One VC of a switch or wireless-interface port: a circular buffer of DEPTH
// flits (16 in the paper's configuration) with a registered write and a
// first-word-fall-through read: `dout` always shows the oldest flit while
// `empty` is low, and `pop` removes it at the next clock edge.  Push and pop in
// the same cycle are allowed.  `count` is the current occupancy.  The
// upstream sender is expected to use credit flow control so that it never
// pushes into a full buffer; the assertions check that rule.
module vc_fifo
  import mcw_pkg::*;
#(
  parameter int DEPTH = BUF_DEPTH
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  flit_t                      din,
  input  logic                       pop,
  output flit_t                      dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t           mem [DEPTH];
  logic [AW-1:0]   rd_ptr, wr_ptr;

  assign empty = (count == 0);
  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign dout  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
