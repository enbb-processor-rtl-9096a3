// arith_channel: one output port of a switch ("ac", its operators and the
// output multiplexer of the paper's switch figure).
//
// The crossbar line of the port delivers at most one flit per cycle. A flit
// marked for an operator goes to slot A or B of operator `xb_op` (it is an
// operand digit); any other flit bypasses the operators. The output channel is
// shared flit by flit between bypass flits and the result flits of the K
// operators; the port allocator outside picks one of them per cycle, so the
// multiplexer here needs no arbitration of its own. The port's downstream
// virtual-channel state and credits live in the vc_allocator instance: a head
// flit takes the free channel it offers, a body flit keeps its packet's
// channel. The outgoing flit is registered (one cycle on the link).
// Configuration requests take the lowest-numbered free operator (the "ac"
// part of the paper's "vc/ac allocator"); `cfg_ready` is low when none is free.
// Two operators per port and this steering are from the paper's figure; the
// single registered link of one flit per cycle is this design's choice at the
// wide end of the figure's "1 bit to 1 flit" channel width.
module arith_channel
  import enbb_pkg::*;
#(
  parameter int unsigned V     = 3,
  parameter int unsigned DEPTH = 3,
  parameter int unsigned K     = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [V-1:0]      credit_in,
  // flit from the crossbar
  input  logic              xb_valid,
  input  flit_t             xb_flit,
  input  logic              xb_to_op,
  input  logic [$clog2(K)-1:0] xb_op,
  input  logic              xb_is_b,
  // grant of the link to an operator's result flit
  input  logic              op_grant,
  input  logic [$clog2(K)-1:0] op_grant_idx,
  // configuration and binding
  input  logic              cfg_we,
  input  opcfg_t            cfg_in,
  output logic              cfg_ready,
  input  logic [K-1:0]      bind_a,
  input  logic [K-1:0]      bind_b,
  // operator status
  output opcfg_t            op_cfg     [K],
  output logic [K-1:0]      op_free,
  output logic [K-1:0]      op_a_bound,
  output logic [K-1:0]      op_b_bound,
  output logic [K-1:0]      op_a_ready,
  output logic [K-1:0]      op_b_ready,
  output logic [K-1:0]      op_out_req,
  // downstream channel state
  output logic              free_avail,
  output logic [VCID_W-1:0] free_vc,
  output logic [V-1:0]      has_credit,
  // physical output channel
  output logic              link_valid,
  output flit_t             link_flit
);
  localparam int unsigned KW = $clog2(K);

  logic [K-1:0] op_out_valid, op_grant_k, op_in_valid, op_cfg_we;
  flit_t        op_out_flit [K];

  logic  send;
  flit_t send_flit;

  // operator chosen for a configuration: lowest free one
  always_comb begin
    op_cfg_we = '0;
    cfg_ready = |op_free;
    for (int k = K - 1; k >= 0; k--)
      if (op_free[k]) begin
        op_cfg_we     = '0;
        op_cfg_we[k]  = cfg_we;
      end
  end

  for (genvar k = 0; k < K; k++) begin : g_op
    assign op_grant_k[k]  = op_grant && op_grant_idx == KW'(k);
    assign op_in_valid[k] = xb_valid && xb_to_op && xb_op == KW'(k);
    online_operator u_op (
      .clk, .rst_n,
      .cfg_we      (op_cfg_we[k]),
      .cfg_in      (cfg_in),
      .is_free     (op_free[k]),
      .cfg         (op_cfg[k]),
      .bind_a      (bind_a[k]),
      .bind_b      (bind_b[k]),
      .a_bound     (op_a_bound[k]),
      .b_bound     (op_b_bound[k]),
      .in_valid    (op_in_valid[k]),
      .in_is_b     (xb_is_b),
      .in_flit     (xb_flit),
      .a_ready     (op_a_ready[k]),
      .b_ready     (op_b_ready[k]),
      .out_valid   (op_out_valid[k]),
      .out_flit    (op_out_flit[k]),
      .out_grant   (op_grant_k[k]),
      .out_grant_vc(free_vc)
    );
    assign op_out_req[k] = op_out_valid[k] &&
                           (op_out_flit[k].head ? free_avail : has_credit[op_out_flit[k].vc]);
  end

  // output multiplexer: bypass flit or the granted operator's result flit
  always_comb begin
    send      = 1'b0;
    send_flit = '0;
    if (xb_valid && !xb_to_op) begin
      send      = 1'b1;
      send_flit = xb_flit;
      if (xb_flit.head) send_flit.vc = free_vc;
    end else if (op_grant) begin
      send      = 1'b1;
      send_flit = op_out_flit[op_grant_idx];
    end
  end

  vc_allocator #(.V(V), .DEPTH(DEPTH)) u_vca (
    .clk, .rst_n,
    .credit_in,
    .send,
    .send_vc   (send_flit.vc),
    .send_head (send_flit.head),
    .send_tail (send_flit.tail),
    .free_avail,
    .free_vc,
    .has_credit
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      link_valid <= 1'b0;
      link_flit  <= '0;
    end else begin
      link_valid <= send;
      link_flit  <= send_flit;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(xb_valid && !xb_to_op && op_grant));
  assert property (@(posedge clk) disable iff (!rst_n) (cfg_we |-> cfg_ready));

endmodule
