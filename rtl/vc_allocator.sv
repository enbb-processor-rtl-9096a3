// vc_allocator: virtual-channel state and credits of one output port.
//
// For each of the V virtual channels of the downstream input port it keeps a
// busy bit (a packet holds the channel from its head flit to its tail flit)
// and a credit counter that starts at the downstream buffer depth, falls by one
// for each flit sent and rises by one for each returned credit. It offers the
// lowest-numbered free channel (`free_avail`, `free_vc`) to a head flit. A
// channel counts as free only when its last packet's tail has been sent and
// all its credits are back, i.e. the downstream buffer is empty: a packet
// never queues behind another one in the same buffer. This matters here
// because operand packets may legitimately wait in the network for their
// partner operand, and a packet stuck behind such a waiting operand could
// never move. The switch allocator grants at most one flit per port per cycle,
// so channel and port allocation never conflict. The paper names a "vc/ac
// allocator" and credit-based flow control; this organisation is the design's.
module vc_allocator
  import enbb_pkg::*;
#(
  parameter int unsigned V     = 3,
  parameter int unsigned DEPTH = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [V-1:0]      credit_in,
  input  logic              send,
  input  logic [VCID_W-1:0] send_vc,
  input  logic              send_head,
  input  logic              send_tail,
  output logic              free_avail,
  output logic [VCID_W-1:0] free_vc,
  output logic [V-1:0]      has_credit
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic [V-1:0]  busy;
  logic [CW-1:0] credits [V];
  logic [V-1:0]  sent_on;

  always_comb
    for (int v = 0; v < V; v++) sent_on[v] = send && send_vc == VCID_W'(v);

  always_comb begin
    free_avail = 1'b0;
    free_vc    = '0;
    for (int v = V - 1; v >= 0; v--) begin
      has_credit[v] = credits[v] != '0;
      if (!busy[v] && credits[v] == CW'(DEPTH)) begin
        free_avail = 1'b1;
        free_vc    = VCID_W'(v);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
      for (int v = 0; v < V; v++) credits[v] <= CW'(DEPTH);
    end else begin
      for (int v = 0; v < V; v++) begin
        credits[v] <= credits[v] + CW'(credit_in[v]) - CW'(sent_on[v]);
        if (sent_on[v] && send_head && !send_tail) busy[v] <= 1'b1;
        else if (sent_on[v] && send_tail)          busy[v] <= 1'b0;
      end
    end
  end

  for (genvar v = 0; v < V; v++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     (send && send_vc == VCID_W'(v)) |-> credits[v] != '0);
  end
endmodule
