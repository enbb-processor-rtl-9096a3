// enbb_router: one switch of the numerical brain (the paper's switch figure).
//
// Five ports (north, east, south, west, local). Each input port is a physical
// channel controller with V virtual-channel flit buffers; each output port is
// an arithmetic channel with K on-line operators in front of its output
// channel. A crossbar gives every input virtual channel its own line to every
// output port, and one round-robin port allocator per output port grants one
// flit per cycle (flit-by-flit interleaving on the output channel).
//
// Per input virtual channel a small state machine handles each packet:
//  * IDLE: a head flit is examined by the routing logic. A packet for another
//    switch, or a DATA packet for this one, becomes a BYPASS packet routed to
//    an output port (X-Y routing; local port for this switch). A CONFIG packet
//    for this switch is absorbed (CFG). An OPERAND packet for this switch waits
//    in its buffer until a configured operator of this switch expects its tag;
//    then its head is absorbed and the channel is bound to that operator slot
//    (OPERAND). At most one binding and one configuration happen per cycle.
//  * BYPASS: flits cross to the output port when the allocator grants them; a
//    head needs a free downstream virtual channel, a body flit a credit.
//  * OPERAND: digit flits cross the crossbar into the operator slot whenever
//    the slot's holding register is empty.
//  * CFG: the two configuration flits are absorbed; the second holds the
//    result head, whose route selects the output port (and thus the arithmetic
//    channel) whose free operator is configured.
// Head-flit routing costs one cycle in the switch, the output channel one more.
//
// From the paper: virtual-channel input buffers, crossbar, on-line operators at
// the output ports, routing logic, vc/ac and pc allocators, control packets
// that configure the switch, operands stored in virtual channels. This
// design's own: packet formats, X-Y routing, the bind-by-tag rule, and that an
// operand waits in its virtual channel until an operator claims it. The
// paper's "shadow flit buffers" are not part of this switch.
module enbb_router
  import enbb_pkg::*;
#(
  parameter int unsigned V     = 3,
  parameter int unsigned DEPTH = 3,
  parameter int unsigned K     = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] my_x,
  input  logic [COORD_W-1:0] my_y,
  input  logic [NPORTS-1:0]  in_valid,
  input  flit_t              in_flit    [NPORTS],
  output logic [V-1:0]       credit_out [NPORTS],
  output logic [NPORTS-1:0]  out_valid,
  output flit_t              out_flit   [NPORTS],
  input  logic [V-1:0]       credit_in  [NPORTS]
);
  localparam int unsigned P    = NPORTS;
  localparam int unsigned NIN  = P * V;
  localparam int unsigned NREQ = NIN + K;
  localparam int unsigned KW   = $clog2(K);
  localparam int unsigned IW   = $clog2(NIN);
  localparam int unsigned RW   = $clog2(NREQ);

  typedef enum logic [1:0] {S_IDLE, S_BYPASS, S_OPERAND, S_CFG} vcst_e;

  // input side
  flit_t        front [NIN];
  logic [NIN-1:0] nonempty, pop;
  vcst_e        st    [NIN];
  logic [2:0]   rport [NIN];
  logic [VCID_W-1:0] routvc [NIN];
  logic [KW-1:0] rop  [NIN];
  logic [NIN-1:0] risb;
  cfg1_t        cfg1  [NIN];
  logic [2:0]   rt_port [NIN];
  logic [NIN-1:0] rt_here;
  ptype_e       front_pt [NIN];

  // output side
  opcfg_t       op_cfg  [P][K];
  logic [K-1:0] op_free [P], op_a_bound [P], op_b_bound [P];
  logic [K-1:0] op_a_ready [P], op_b_ready [P], op_out_req [P];
  logic [K-1:0] bind_a [P], bind_b [P];
  logic [P-1:0] free_avail, cfg_ready, cfg_we;
  logic [VCID_W-1:0] free_vc [P];
  logic [V-1:0] has_credit [P];
  opcfg_t       cfg_in;

  logic [NREQ-1:0] req [P];
  logic [P-1:0]    gv;
  logic [RW-1:0]   gi [P];
  logic [IW-1:0]   xsel [P];
  logic [P-1:0]    xsel_v;
  flit_t           xin  [NIN];
  flit_t           xout [P];
  logic [P-1:0]    xout_v;
  logic [P-1:0]    op_gnt;
  logic [KW-1:0]   op_gnt_idx [P];
  logic [P-1:0]    x_to_op, x_is_b;
  logic [KW-1:0]   x_op [P];

  // bind and configuration choices
  logic [NIN-1:0] match;
  logic [2:0]     m_port [NIN];
  logic [KW-1:0]  m_op   [NIN];
  logic [NIN-1:0] m_isb;
  logic           bind_v, cfgsel_v;
  logic [IW-1:0]  bind_i, cfgsel_i;

  for (genvar p = 0; p < P; p++) begin : g_in
    logic [V-1:0] pop_p, ne_p;
    flit_t        fr_p [V];
    for (genvar v = 0; v < V; v++) begin : g_v
      assign pop_p[v]       = pop[p*V+v];
      assign nonempty[p*V+v] = ne_p[v];
      assign front[p*V+v]   = fr_p[v];
    end
    input_port #(.V(V), .DEPTH(DEPTH)) u_in (
      .clk, .rst_n,
      .in_valid   (in_valid[p]),
      .in_flit    (in_flit[p]),
      .pop        (pop_p),
      .front      (fr_p),
      .nonempty   (ne_p),
      .credit_out (credit_out[p])
    );
  end

  for (genvar i = 0; i < NIN; i++) begin : g_rt
    assign front_pt[i] = ptype_e'(front[i].data[DATA_W-1 -: 2]);
    route_unit u_rt (
      .my_x, .my_y,
      .hd   (head_t'(front[i].data)),
      .port (rt_port[i]),
      .here (rt_here[i])
    );
  end

  // operand tag matching against the operators of every port
  always_comb begin
    for (int i = 0; i < NIN; i++) begin
      logic [TAG_W-1:0] tg;
      tg = front[i].data[TAG_W-1:0];
      match[i] = 1'b0; m_port[i] = '0; m_op[i] = '0; m_isb[i] = 1'b0;
      if (st[i] == S_IDLE && nonempty[i] && front[i].head && rt_here[i] &&
          front_pt[i] == PT_OPERAND) begin
        for (int p = P - 1; p >= 0; p--)
          for (int k = K - 1; k >= 0; k--) begin
            if (!op_free[p][k] && !op_b_bound[p][k] && op_cfg[p][k].tag_b == tg) begin
              match[i] = 1'b1; m_port[i] = 3'(p); m_op[i] = KW'(k); m_isb[i] = 1'b1;
            end
            if (!op_free[p][k] && !op_a_bound[p][k] && op_cfg[p][k].tag_a == tg) begin
              match[i] = 1'b1; m_port[i] = 3'(p); m_op[i] = KW'(k); m_isb[i] = 1'b0;
            end
          end
      end
    end
    bind_v = 1'b0; bind_i = '0; cfgsel_v = 1'b0; cfgsel_i = '0;
    for (int i = NIN - 1; i >= 0; i--) begin
      if (match[i]) begin bind_v = 1'b1; bind_i = IW'(i); end
      if (st[i] == S_CFG && nonempty[i] && front[i].tail && cfg_ready[rt_port[i]]) begin
        cfgsel_v = 1'b1; cfgsel_i = IW'(i);
      end
    end
    for (int p = 0; p < P; p++) begin
      bind_a[p] = '0; bind_b[p] = '0;
      cfg_we[p] = cfgsel_v && rt_port[cfgsel_i] == 3'(p);
    end
    if (bind_v) begin
      if (m_isb[bind_i]) bind_b[m_port[bind_i]][m_op[bind_i]] = 1'b1;
      else               bind_a[m_port[bind_i]][m_op[bind_i]] = 1'b1;
    end
    cfg_in.op    = cfg1[cfgsel_i].op;
    cfg_in.tag_a = cfg1[cfgsel_i].tag_a;
    cfg_in.tag_b = cfg1[cfgsel_i].tag_b;
    cfg_in.res   = head_t'(front[cfgsel_i].data);
  end

  // port allocation requests
  always_comb begin
    for (int p = 0; p < P; p++) begin
      req[p] = '0;
      for (int i = 0; i < NIN; i++) begin
        if (nonempty[i] && rport[i] == 3'(p)) begin
          if (st[i] == S_BYPASS)
            req[p][i] = front[i].head ? free_avail[p] : has_credit[p][routvc[i]];
          else if (st[i] == S_OPERAND)
            req[p][i] = risb[i] ? op_b_ready[p][rop[i]] : op_a_ready[p][rop[i]];
        end
      end
      for (int k = 0; k < K; k++) req[p][NIN+k] = op_out_req[p][k];
    end
  end

  for (genvar p = 0; p < P; p++) begin : g_pa
    pc_allocator #(.N(NREQ)) u_pa (
      .clk, .rst_n,
      .req       (req[p]),
      .gnt_valid (gv[p]),
      .gnt_idx   (gi[p])
    );
  end

  always_comb begin
    pop = '0;
    for (int p = 0; p < P; p++) begin
      xsel_v[p]     = gv[p] && gi[p] < RW'(NIN);
      xsel[p]       = IW'(gi[p]);
      op_gnt[p]     = gv[p] && gi[p] >= RW'(NIN);
      op_gnt_idx[p] = KW'(gi[p] - RW'(NIN));
      x_to_op[p]    = st[xsel[p]] == S_OPERAND;
      x_is_b[p]     = risb[xsel[p]];
      x_op[p]       = rop[xsel[p]];
      if (xsel_v[p]) pop[xsel[p]] = 1'b1;
    end
    for (int i = 0; i < NIN; i++) begin
      xin[i]    = front[i];
      xin[i].vc = routvc[i];
      if (st[i] == S_IDLE && nonempty[i] && front[i].head && rt_here[i] &&
          front_pt[i] == PT_CONFIG)
        pop[i] = 1'b1;
      if (st[i] == S_CFG && nonempty[i] && !front[i].tail) pop[i] = 1'b1;
    end
    if (bind_v)   pop[bind_i]   = 1'b1;
    if (cfgsel_v) pop[cfgsel_i] = 1'b1;
  end

  crossbar #(.NIN(NIN), .NOUT(P)) u_xbar (
    .in_flit   (xin),
    .sel       (xsel),
    .sel_valid (xsel_v),
    .out_flit  (xout),
    .out_valid (xout_v)
  );

  for (genvar p = 0; p < P; p++) begin : g_out
    arith_channel #(.V(V), .DEPTH(DEPTH), .K(K)) u_ac (
      .clk, .rst_n,
      .credit_in    (credit_in[p]),
      .xb_valid     (xout_v[p]),
      .xb_flit      (xout[p]),
      .xb_to_op     (x_to_op[p]),
      .xb_op        (x_op[p]),
      .xb_is_b      (x_is_b[p]),
      .op_grant     (op_gnt[p]),
      .op_grant_idx (op_gnt_idx[p]),
      .cfg_we       (cfg_we[p]),
      .cfg_in       (cfg_in),
      .cfg_ready    (cfg_ready[p]),
      .bind_a       (bind_a[p]),
      .bind_b       (bind_b[p]),
      .op_cfg       (op_cfg[p]),
      .op_free      (op_free[p]),
      .op_a_bound   (op_a_bound[p]),
      .op_b_bound   (op_b_bound[p]),
      .op_a_ready   (op_a_ready[p]),
      .op_b_ready   (op_b_ready[p]),
      .op_out_req   (op_out_req[p]),
      .free_avail   (free_avail[p]),
      .free_vc      (free_vc[p]),
      .has_credit   (has_credit[p]),
      .link_valid   (out_valid[p]),
      .link_flit    (out_flit[p])
    );
  end

  // per input virtual channel packet state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NIN; i++) begin
        st[i] <= S_IDLE; rport[i] <= '0; routvc[i] <= '0; rop[i] <= '0;
        cfg1[i] <= '0;
      end
      risb <= '0;
    end else begin
      for (int i = 0; i < NIN; i++) begin
        unique case (st[i])
          S_IDLE: if (nonempty[i] && front[i].head) begin
            if (rt_here[i] && front_pt[i] == PT_CONFIG) st[i] <= S_CFG;
            else if (rt_here[i] && front_pt[i] == PT_OPERAND) begin
              if (bind_v && bind_i == IW'(i)) begin
                st[i] <= S_OPERAND; rport[i] <= m_port[i];
                rop[i] <= m_op[i];  risb[i]  <= m_isb[i];
              end
            end else begin
              st[i] <= S_BYPASS; rport[i] <= rt_port[i];
            end
          end
          S_CFG: if (nonempty[i]) begin
            if (!front[i].tail) cfg1[i] <= cfg1_t'(front[i].data);
            else if (cfgsel_v && cfgsel_i == IW'(i)) st[i] <= S_IDLE;
          end
          S_BYPASS, S_OPERAND: if (pop[i]) begin
            if (st[i] == S_BYPASS && front[i].head) routvc[i] <= free_vc[rport[i]];
            if (front[i].tail) st[i] <= S_IDLE;
          end
          default: st[i] <= S_IDLE;
        endcase
      end
    end
  end

  for (genvar i = 0; i < NIN; i++) begin : g_chk
    // a packet always starts with a head flit
    assert property (@(posedge clk) disable iff (!rst_n)
                     (st[i] == S_IDLE && nonempty[i]) |-> front[i].head);
  end

endmodule
