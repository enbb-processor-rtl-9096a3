// input_port: physical channel controller ("pcc") with its virtual channels.
//
// A flit arriving on the physical input channel carries the number of the
// virtual channel it travels on; the controller writes it into that channel's
// flit buffer. Each of the V buffers shows its oldest flit to the switch, which
// pops it when the flit is used. For every pop one credit is returned upstream
// on `credit_out[v]` one cycle later, so the sender can count free slots per
// virtual channel (credit-based flow control, as the paper proposes). The
// paper's figure shows three virtual channels per physical channel; buffer
// organisation, credit timing and the VC number in the flit are this design's.
module input_port
  import enbb_pkg::*;
#(
  parameter int unsigned V     = 3,
  parameter int unsigned DEPTH = 3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  flit_t        in_flit,
  input  logic [V-1:0] pop,
  output flit_t        front  [V],
  output logic [V-1:0] nonempty,
  output logic [V-1:0] credit_out
);

  logic [V-1:0] full;

  for (genvar v = 0; v < V; v++) begin : g_vc
    logic e;
    vc_buffer #(.DEPTH(DEPTH)) u_buf (
      .clk, .rst_n,
      .push  (in_valid && in_flit.vc == VCID_W'(v)),
      .din   (in_flit),
      .pop   (pop[v]),
      .dout  (front[v]),
      .empty (e),
      .full  (full[v])
    );
    assign nonempty[v] = !e;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) credit_out <= '0;
    else        credit_out <= pop;
  end

  assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> in_flit.vc < VCID_W'(V));

endmodule
