// vc_buffer: flit buffer of one virtual channel (the "vcc" boxes of the switch).
//
// A first-in first-out store of DEPTH flits. `push` writes `din` at the tail,
// `pop` removes the flit shown on `dout`; both may happen in the same cycle.
// `dout` is the oldest flit and is valid whenever `empty` is low (no read
// latency). Credit-based flow control upstream guarantees that no flit is
// pushed into a full buffer; an assertion checks it. The depth of 3 flits is
// the number of slots drawn in the paper's switch figure, whose label calls the
// buffer "a few bits"; the storage organisation is this design's own.
module vc_buffer
  import enbb_pkg::*;
#(
  parameter int unsigned DEPTH = 3
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push,
  input  flit_t din,
  input  logic  pop,
  output flit_t dout,
  output logic  empty,
  output logic  full
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  flit_t          mem [DEPTH];
  logic [PW-1:0]  rd_ptr, wr_ptr;
  logic [PW:0]    count;

  assign empty = (count == 0);
  assign full  = (count == (PW+1)'(DEPTH));
  assign dout  = mem[rd_ptr];

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));

endmodule
