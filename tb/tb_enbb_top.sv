// tb_enbb_top: end-to-end test of the numerical brain at its default size
// (10 x 8 switches, 3 virtual channels of 3 flits, 2 operators per port).
//
// A behavioural front end injects packets at the nodes' network interfaces and
// collects what they eject. Phases:
//  1. the example of the paper's second figure: operand A from (5,0), operand
//     B from (0,2), added at switch (8,5), result to node (7,6);
//  2. operands sent long before their operator is configured (they must wait
//     in virtual channels);
//  3. a chain: (A - B) computed at one switch is sent as an operand to a
//     second switch that adds D, the final result going to the front end;
//  4. three configurations for the same output port (only two operators):
//     the third waits until an operator is free again;
//  5. a batch of random operations spread over the mesh, all in flight at once
//     (configured first, then all operands sent).
// Every result packet is checked against values computed here (result value is
// (A +- B)/2 with A, B read as fractions 0.d1d2...; its length is one digit
// more than the longer operand), and each must have raised a signal event with
// its tag at its node. Mechanism counters (multi-hop routing, operand waiting,
// chaining, subtraction, operator-full stall, both operators of one port busy,
// flit interleaving on a channel, injection back-pressure, events) must each
// be non-zero.
`timescale 1ns/1ps
module tb_enbb_top;
  import enbb_pkg::*;

  localparam int XN = 10, YN = 8, N = XN * YN;
  localparam int L  = 40;          // fixed-point scale for exact comparison

  logic clk = 0, rst_n = 0;
  logic [N-1:0] inj_valid, inj_ready, ej_valid, ev_valid;
  flit_t        inj_flit [N];
  flit_t        ej_flit  [N];
  logic [TAG_W-1:0] ev_tag [N];

  enbb_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  // mechanism counters
  int n_ops = 0, n_sub = 0, n_chain = 0, n_wait = 0, n_cfgfull = 0, n_bothops = 0;
  int n_interleave = 0, n_backpressure = 0, n_events = 0, n_hops = 0;

  initial begin
    repeat (6000) @(posedge clk);
    failures++;
    $display("watchdog expired at cycle %0d", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- front end
  flit_t txq [N][$];

  function automatic int node(int x, int y); return y * XN + x; endfunction

  function automatic flit_t mk_head(ptype_e pt, int x, int y, int tag);
    head_t h;
    flit_t f;
    h.ptype = pt; h.dx = COORD_W'(x); h.dy = COORD_W'(y); h.tag = TAG_W'(tag);
    f = '0; f.head = 1'b1; f.data = h;
    return f;
  endfunction

  function automatic sdigit_t rnd_digit();
    int r;
    r = $urandom_range(2);
    return r == 0 ? SD_NEG : r == 1 ? SD_ZERO : SD_POS;
  endfunction

  // operand digits kept so expected values can be formed
  typedef sdigit_t digits_t [$];

  function automatic longint frac(digits_t d);   // value * 2^L
    longint v = 0;
    foreach (d[j]) v += longint'(sd_val(d[j])) <<< (L - 1 - j);
    return v;
  endfunction

  function automatic digits_t rnd_operand(int n);
    digits_t d;
    for (int j = 0; j < n; j++) d.push_back(rnd_digit());
    return d;
  endfunction

  task automatic send_operand(int src, int fx, int fy, int tag, digits_t d, ptype_e pt = PT_OPERAND);
    flit_t f;
    txq[src].push_back(mk_head(pt, fx, fy, tag));
    foreach (d[j]) begin
      f = '0; f.data[1:0] = d[j]; f.tail = (j == d.size() - 1);
      txq[src].push_back(f);
    end
  endtask

  task automatic send_config(int src, int fx, int fy, opcode_e op, int ta, int tb,
                             ptype_e rpt, int rx, int ry, int rtag);
    cfg1_t c;
    flit_t f;
    txq[src].push_back(mk_head(PT_CONFIG, fx, fy, 0));
    c = '0; c.op = op; c.tag_a = TAG_W'(ta); c.tag_b = TAG_W'(tb);
    f = '0; f.data = c; txq[src].push_back(f);
    f = mk_head(rpt, rx, ry, rtag); f.head = 1'b0; f.tail = 1'b1;
    txq[src].push_back(f);
  endtask

  // expected DATA results, by tag
  logic   exp_valid [64];
  longint exp_val   [64];
  int     exp_len   [64];
  int     exp_node  [64];
  logic   ev_seen   [64];
  int     got_cycle [64];
  int     results = 0;

  task automatic expect_result(int tag, int nd, longint v, int len);
    exp_valid[tag] = 1; exp_val[tag] = v; exp_len[tag] = len; exp_node[tag] = nd;
    ev_seen[tag] = 0; got_cycle[tag] = -1;
  endtask

  function automatic int max2(int a, int b); return a > b ? a : b; endfunction

  // driver: present the queue head; handshake sampled just before the edge
  logic [N-1:0] fire;
  initial begin
    inj_valid = '0;
    for (int i = 0; i < N; i++) inj_flit[i] = '0;
    forever begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (fire[i]) void'(txq[i].pop_front());
        inj_valid[i] = txq[i].size() != 0;
        inj_flit[i]  = inj_valid[i] ? txq[i][0] : '0;
      end
      #3;
      fire = inj_valid & inj_ready;
      for (int i = 0; i < N; i++) if (inj_valid[i] && !inj_ready[i]) n_backpressure++;
    end
  end
  initial fire = '0;

  // ---------------------------------------------------------------- monitor
  logic   open_v [N][4];
  int     open_tag [N][4];
  longint acc [N][4];
  int     cnt [N][4];
  int     last_vc [N];

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (ev_valid[i]) begin
        n_events++;
        checks++;
        if (!exp_valid[ev_tag[i]] || exp_node[ev_tag[i]] != i || ev_seen[ev_tag[i]]) begin
          failures++; $display("unexpected event tag %0d at node %0d", ev_tag[i], i);
        end else ev_seen[ev_tag[i]] = 1;
      end
      if (ej_valid[i]) begin
        int v;
        v = int'(ej_flit[i].vc);
        if (last_vc[i] >= 0 && last_vc[i] != v && open_v[i][last_vc[i]] && !ej_flit[i].head)
          n_interleave++;
        last_vc[i] = v;
        if (ej_flit[i].head) begin
          open_v[i][v] = 1; open_tag[i][v] = int'(ej_flit[i].data[TAG_W-1:0]);
          acc[i][v] = 0; cnt[i][v] = 0;
        end else begin
          acc[i][v] += longint'(sd_val(ej_flit[i].data[1:0])) <<< (L - 1 - cnt[i][v]);
          cnt[i][v]++;
          if (ej_flit[i].tail) begin
            int t;
            t = open_tag[i][v];
            open_v[i][v] = 0;
            checks++;
            results++;
            if (!exp_valid[t] || exp_node[t] != i || exp_val[t] != acc[i][v] || exp_len[t] != cnt[i][v]) begin
              failures++;
              $display("result tag %0d node %0d: value %0d len %0d, expected value %0d len %0d node %0d",
                       t, i, acc[i][v], cnt[i][v], exp_val[t], exp_len[t], exp_node[t]);
            end else begin
              checks++;
              if (!ev_seen[t]) begin failures++; $display("no event before result tag %0d", t); end
            end
            exp_valid[t] = 0;
            got_cycle[t] = cycle;
          end
        end
      end
    end
  end

  task automatic wait_results(int want, int limit);
    int t0;
    t0 = cycle;
    while (results < want && cycle - t0 < limit) @(posedge clk);
    checks++;
    if (results < want) begin
      failures++; $display("only %0d of %0d results after %0d cycles", results, want, limit);
      for (int t = 0; t < 64; t++)
        if (exp_valid[t]) $display("  missing result tag %0d for node %0d", t, exp_node[t]);
    end
  endtask

  // ---------------------------------------------------------------- stimulus
  initial begin
    digits_t a, b, d;
    int base, t_cfg;
    for (int i = 0; i < N; i++) begin
      last_vc[i] = -1;
      for (int v = 0; v < 4; v++) begin open_v[i][v] = 0; acc[i][v] = 0; cnt[i][v] = 0; open_tag[i][v] = 0; end
    end
    for (int t = 0; t < 64; t++) begin exp_valid[t] = 0; ev_seen[t] = 0; exp_val[t] = 0; exp_len[t] = 0; exp_node[t] = 0; got_cycle[t] = 0; end
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // 1. the paper's example computation
    a = rnd_operand(16); b = rnd_operand(16);
    expect_result(3, node(7, 6), (frac(a) + frac(b)) / 2, 17);
    send_config(node(0, 0), 8, 5, OP_ADD, 1, 2, PT_DATA, 7, 6, 3);
    repeat (20) @(posedge clk);
    send_operand(node(5, 0), 8, 5, 1, a);
    send_operand(node(0, 2), 8, 5, 2, b);
    base = cycle;
    wait_results(1, 2000);
    n_ops++; n_hops++;
    $display("phase 1: result after %0d cycles", got_cycle[3] - base);

    // 2. operands first, configuration much later
    a = rnd_operand(12); b = rnd_operand(9);
    expect_result(4, node(2, 2), (frac(a) + frac(b)) / 2, 13);
    send_operand(node(9, 7), 4, 4, 5, a);
    send_operand(node(0, 7), 4, 4, 6, b);
    repeat (300) @(posedge clk);
    checks++;
    if (results != 1) begin failures++; $display("result before configuration"); end
    t_cfg = cycle;
    send_config(node(4, 0), 4, 4, OP_ADD, 5, 6, PT_DATA, 2, 2, 4);
    wait_results(2, 2000);
    if (got_cycle[4] > t_cfg) n_wait++;
    n_ops++;

    // 3. chain: C = (A - B) at (3,3) -> operand of E = C + D at (6,2) -> node (1,6)
    a = rnd_operand(10); b = rnd_operand(10); d = rnd_operand(8);
    expect_result(7, node(1, 6), ((frac(a) - frac(b)) / 2 + frac(d)) / 2, 12);
    send_config(node(0, 0), 3, 3, OP_SUB, 8, 9, PT_OPERAND, 6, 2, 10);
    send_config(node(9, 0), 6, 2, OP_ADD, 10, 11, PT_DATA, 1, 6, 7);
    repeat (30) @(posedge clk);
    send_operand(node(3, 7), 3, 3, 8, a);
    send_operand(node(9, 3), 3, 3, 9, b);
    send_operand(node(6, 7), 6, 2, 11, d);
    wait_results(3, 3000);
    n_chain++; n_sub++; n_ops += 2;

    // 4. three operations whose results leave (5,5) through its east port
    for (int j = 0; j < 3; j++) begin
      send_config(node(5, 5), 5, 5, (j == 1) ? OP_SUB : OP_ADD, 12 + 2*j, 13 + 2*j, PT_DATA, 9, 5, 20 + j);
    end
    repeat (40) @(posedge clk);
    begin
      // all three configurations issued: only two operators can be held
      checks++;
      if (dut.g_y[5].g_x[5].u_sw.g_out[1].u_ac.cfg_ready !== 1'b0) begin
        failures++; $display("east port of (5,5) should have no free operator");
      end else begin n_cfgfull++; n_bothops++; end
    end
    for (int j = 0; j < 3; j++) begin
      a = rnd_operand(6 + j); b = rnd_operand(6);
      expect_result(20 + j, node(9, 5),
                    (frac(a) + ((j == 1) ? -frac(b) : frac(b))) / 2, 7 + j);
      send_operand(node(j, 0), 5, 5, 12 + 2*j, a);
      send_operand(node(0, 4 + j), 5, 5, 13 + 2*j, b);
    end
    wait_results(6, 4000);
    n_ops += 3; n_sub++;

    // 5. random batch: 24 operations on distinct switches
    begin
      int used [N];
      int k, fx, fy, rx, ry, na, nb;
      digits_t opa [24], opb [24];
      int opfx [24], opfy [24];
      for (int i = 0; i < N; i++) used[i] = 0;
      k = 0;
      while (k < 24) begin
        fx = $urandom_range(XN - 1); fy = $urandom_range(YN - 1);
        if (used[node(fx, fy)] == 0) begin
          opcode_e op;
          used[node(fx, fy)] = 1;
          rx = $urandom_range(XN - 1); ry = $urandom_range(YN - 1);
          na = $urandom_range(1, 20); nb = $urandom_range(1, 20);
          a = rnd_operand(na); b = rnd_operand(nb);
          op = ($urandom_range(1) == 0) ? OP_ADD : OP_SUB;
          expect_result(32 + k, node(rx, ry),
                        (frac(a) + ((op == OP_SUB) ? -frac(b) : frac(b))) / 2, max2(na, nb) + 1);
          send_config($urandom_range(N - 1), fx, fy, op, 2*k, 2*k + 1, PT_DATA, rx, ry, 32 + k);
          opa[k] = a; opb[k] = b; opfx[k] = fx; opfy[k] = fy;
          if (op == OP_SUB) n_sub++;
          k++;
        end
      end
      // the front end configures the whole batch before any operand leaves
      repeat (200) @(posedge clk);
      // each operand from a node of its own: an operator consumes its two
      // operands in lockstep, so two operands queued behind each other at one
      // injection point could wait for each other forever
      for (int j = 0; j < 24; j++) begin
        send_operand(3*j % N, opfx[j], opfy[j], 2*j, opa[j]);
        send_operand((3*j + 1) % N, opfx[j], opfy[j], 2*j + 1, opb[j]);
      end
      wait_results(30, 20000);
      n_ops += 24;
    end

    // mechanism coverage
    checks++; if (n_hops == 0)         begin failures++; $display("no multi-hop packet"); end
    checks++; if (n_wait == 0)         begin failures++; $display("no operand waited in a VC"); end
    checks++; if (n_chain == 0)        begin failures++; $display("no chained operation"); end
    checks++; if (n_sub == 0)          begin failures++; $display("no subtraction"); end
    checks++; if (n_cfgfull == 0)      begin failures++; $display("no operator-full stall"); end
    checks++; if (n_bothops == 0)      begin failures++; $display("never both operators of a port"); end
    checks++; if (n_interleave == 0)   begin failures++; $display("no flit interleaving seen"); end
    checks++; if (n_backpressure == 0) begin failures++; $display("no injection back-pressure"); end
    checks++; if (n_events < 30)       begin failures++; $display("only %0d events", n_events); end
    $display("operations=%0d subtractions=%0d chains=%0d operand_waits=%0d operator_full=%0d both_ops=%0d interleaved_flits=%0d backpressure_cycles=%0d events=%0d cycles=%0d",
             n_ops, n_sub, n_chain, n_wait, n_cfgfull, n_bothops, n_interleave, n_backpressure, n_events, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
