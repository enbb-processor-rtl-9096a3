// pc_allocator: physical-channel allocator of one output port.
//
// Round-robin arbiter over N requesters (every input virtual channel of the
// switch and every operator of the port). It grants at most one request per
// cycle, combinationally, starting the search just after the last winner, so
// that flits of different packets are interleaved flit by flit on the output
// channel. The paper names a "pc allocator" and "flit by flit allocation";
// round robin is this design's choice.
module pc_allocator #(
  parameter int unsigned N = 17
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  output logic                 gnt_valid,
  output logic [$clog2(N)-1:0] gnt_idx
);
  localparam int unsigned IW = $clog2(N);

  logic [IW-1:0] last;

  always_comb begin
    gnt_valid = 1'b0;
    gnt_idx   = '0;
    for (int k = N; k >= 1; k--) begin
      int unsigned c;
      c = (int'(last) + k) % N;
      if (req[c]) begin
        gnt_valid = 1'b1;
        gnt_idx   = IW'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         last <= IW'(N - 1);
    else if (gnt_valid) last <= gnt_idx;
  end

  assert property (@(posedge clk) disable iff (!rst_n) gnt_valid |-> req[gnt_idx]);
endmodule
