// tb_enbb_router: one switch at (1,1) with behavioural neighbours on all five
// ports. Neighbours send packets respecting the switch's credits and take
// every output flit at once, returning its credit one cycle later. Checked:
// X-Y routing of bypass packets to each output port with the payload intact,
// the downstream channel on every flit of a packet being the one its head got,
// credits returned for every flit taken in, and a full on-line operation in
// the switch: a configuration from the local port, operand A from the north
// and operand B from the east, result (A - B)/2 leaving through the south port.
`timescale 1ns/1ps
module tb_enbb_router;
  import enbb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [4:0] in_valid, out_valid;
  flit_t in_flit [5], out_flit [5];
  logic [2:0] credit_out [5], credit_in [5];
  int checks = 0, failures = 0;

  enbb_router dut (.clk, .rst_n, .my_x(4'd1), .my_y(4'd1), .in_valid, .in_flit,
                   .credit_out, .out_valid, .out_flit, .credit_in);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // senders: one queue per input port, packets sent on vc = port % 3
  flit_t txq [5][$];
  int    cred [5][3];
  int    sent_flits = 0, credits_back = 0;

  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < 5; p++)
      for (int v = 0; v < 3; v++) if (credit_out[p][v]) begin cred[p][v]++; credits_back++; end
  end

  initial begin
    for (int p = 0; p < 5; p++) begin in_valid[p] = 0; in_flit[p] = '0; for (int v = 0; v < 3; v++) cred[p][v] = 3; end
    forever begin
      @(negedge clk);
      for (int p = 0; p < 5; p++) begin
        int v;
        v = p % 3;
        in_valid[p] = 0;
        if (txq[p].size() != 0 && cred[p][v] > 0) begin
          in_valid[p] = 1; in_flit[p] = txq[p].pop_front(); in_flit[p].vc = VCID_W'(v);
          cred[p][v]--; sent_flits++;
        end
      end
    end
  end

  // receivers: credit back one cycle later, record flits
  flit_t rxq [5][$];
  logic [VCID_W-1:0] pkt_vc [5];
  always @(posedge clk) begin
    for (int p = 0; p < 5; p++) begin
      credit_in[p] <= '0;
      if (rst_n && out_valid[p]) begin
        credit_in[p][out_flit[p].vc] <= 1'b1;
        rxq[p].push_back(out_flit[p]);
      end
    end
  end

  function automatic flit_t hflit(ptype_e pt, int x, int y, int tag);
    flit_t f;
    head_t h;
    h.ptype = pt; h.dx = 4'(x); h.dy = 4'(y); h.tag = 6'(tag);
    f = '0; f.head = 1; f.data = h;
    return f;
  endfunction

  task automatic packet(int port, ptype_e pt, int x, int y, int tag, int n, output flit_t pk [$]);
    flit_t f;
    pk.delete();
    pk.push_back(hflit(pt, x, y, tag));
    for (int j = 0; j < n; j++) begin
      f = '0; f.data = 16'($urandom); f.tail = j == n - 1;
      pk.push_back(f);
    end
    foreach (pk[j]) txq[port].push_back(pk[j]);
  endtask

  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  initial begin
    flit_t pk [5][$];
    flit_t tmp [$];
    int outp [5];
    for (int p = 0; p < 5; p++) credit_in[p] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // bypass: one packet per input, to a different output each
    packet(P_WEST,  PT_DATA, 3, 1, 1, 5, tmp); pk[0] = tmp; outp[0] = P_EAST;
    packet(P_EAST,  PT_DATA, 1, 0, 2, 4, tmp); pk[1] = tmp; outp[1] = P_NORTH;
    packet(P_NORTH, PT_DATA, 1, 1, 3, 6, tmp); pk[2] = tmp; outp[2] = P_LOCAL;
    packet(P_LOCAL, PT_DATA, 0, 5, 4, 3, tmp); pk[3] = tmp; outp[3] = P_WEST;
    packet(P_SOUTH, PT_OPERAND, 1, 0, 5, 7, tmp); pk[4] = tmp; outp[4] = P_NORTH;
    repeat (60) @(negedge clk);
    for (int k = 0; k < 5; k++) begin
      // find this packet's flits on its output (by head tag, then its vc)
      int o, start;
      logic [VCID_W-1:0] vc;
      int got;
      o = outp[k]; start = -1; got = 0;
      foreach (rxq[o][j]) if (start < 0 && rxq[o][j].head && rxq[o][j].data == pk[k][0].data) start = j;
      chk(start >= 0, $sformatf("packet %0d head on port %0d", k, o));
      if (start >= 0) begin
        vc = rxq[o][start].vc;
        for (int j = start; j < rxq[o].size() && got < pk[k].size(); j++)
          if (rxq[o][j].vc == vc && (j == start || !rxq[o][j].head)) begin
            chk(rxq[o][j].data == pk[k][got].data && rxq[o][j].tail == pk[k][got].tail &&
                rxq[o][j].head == pk[k][got].head, $sformatf("packet %0d flit %0d", k, got));
            got++;
          end
        chk(got == pk[k].size(), $sformatf("packet %0d complete", k));
      end
    end
    for (int p = 0; p < 5; p++) rxq[p].delete();
    // on-line operation in the switch: (A - B)/2 to (1,3) through the south port
    begin
      flit_t f;
      cfg1_t c;
      int va, vb, vr, nr;
      txq[P_LOCAL].push_back(hflit(PT_CONFIG, 1, 1, 0));
      c = '0; c.op = OP_SUB; c.tag_a = 11; c.tag_b = 12;
      f = '0; f.data = c; txq[P_LOCAL].push_back(f);
      f = hflit(PT_DATA, 1, 3, 33); f.head = 0; f.tail = 1; txq[P_LOCAL].push_back(f);
      // A = 0.1(-1)1 = 5/8 - ... digits +1 -1 +1 ; B = 0.0 1 1
      va = 0; vb = 0;
      txq[P_NORTH].push_back(hflit(PT_OPERAND, 1, 1, 11));
      txq[P_EAST].push_back(hflit(PT_OPERAND, 1, 1, 12));
      for (int j = 0; j < 3; j++) begin
        sdigit_t da, db;
        da = (j == 1) ? SD_NEG : SD_POS;
        db = (j == 0) ? SD_ZERO : SD_POS;
        va = va * 2 + sd_val(da); vb = vb * 2 + sd_val(db);
        f = '0; f.data[1:0] = da; f.tail = j == 2; txq[P_NORTH].push_back(f);
        f = '0; f.data[1:0] = db; f.tail = j == 2; txq[P_EAST].push_back(f);
      end
      repeat (80) @(negedge clk);
      chk(rxq[P_SOUTH].size() == 5 && rxq[P_SOUTH][0].head &&
          rxq[P_SOUTH][0].data == 16'(hflit(PT_DATA, 1, 3, 33).data), "result head on south port");
      vr = 0; nr = 0;
      for (int j = 1; j < rxq[P_SOUTH].size(); j++) begin vr = vr * 2 + sd_val(rxq[P_SOUTH][j].data[1:0]); nr++; end
      // 4 result digits with weights 2^-1..2^-4: value*16 = (va - vb) * 2^(4-3) / 2
      chk(nr == 4 && vr == (va - vb), $sformatf("result %0d digits value %0d, expected %0d", nr, vr, va - vb));
      chk(rxq[P_SOUTH].size() != 0 && rxq[P_SOUTH][rxq[P_SOUTH].size()-1].tail, "result tail");
    end
    chk(credits_back == sent_flits, $sformatf("credits %0d for %0d flits", credits_back, sent_flits));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
