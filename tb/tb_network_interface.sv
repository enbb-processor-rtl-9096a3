// tb_network_interface: injection and ejection sides of one interface. Two
// packets are injected back to back; the switch side is modelled as a buffer
// of 3 flits per channel that drains slowly, so the interface must stop at
// zero credits and give the second packet a different channel while the first
// one's buffer is not empty. Ejected flits must appear one cycle later with a
// credit returned, and a signal event with the packet's tag must be raised
// exactly once, on the first digit of each ejected packet.
`timescale 1ns/1ps
module tb_network_interface;
  import enbb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic inj_valid = 0, inj_ready, ej_valid, ev_valid, sw_in_valid, sw_out_valid = 0;
  flit_t inj_flit, ej_flit, sw_in_flit, sw_out_flit;
  logic [TAG_W-1:0] ev_tag;
  logic [2:0] sw_credit_out = '0, sw_credit_in;
  int checks = 0, failures = 0;
  network_interface dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // switch-side model: per-channel buffers, drained one flit every 4 cycles
  flit_t swbuf [3][$];
  flit_t seen [$];
  int stall_cycles = 0, cyc = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    sw_credit_out <= '0;
    if (sw_in_valid) begin
      chk(swbuf[sw_in_flit.vc].size() < 3, "no overflow of the switch buffer");
      swbuf[sw_in_flit.vc].push_back(sw_in_flit);
      seen.push_back(sw_in_flit);
    end
    if (cyc % 4 == 0)
      for (int v = 0; v < 3; v++) if (swbuf[v].size() != 0) begin
        void'(swbuf[v].pop_front()); sw_credit_out[v] <= 1'b1;
      end
  end

  int events = 0;
  logic [TAG_W-1:0] last_ev;
  always @(posedge clk) if (rst_n && ev_valid) begin events++; last_ev = ev_tag; end

  initial begin
    flit_t pk [$];
    head_t h;
    flit_t f;
    inj_flit = '0; sw_out_flit = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // two packets of 1 head + 6 digits
    for (int k = 0; k < 2; k++) begin
      h = '0; h.ptype = PT_DATA; h.dx = 4'(k); h.tag = 6'(20 + k);
      f = '0; f.head = 1; f.data = h; pk.push_back(f);
      for (int j = 0; j < 6; j++) begin f = '0; f.data = 16'(j + 1); f.tail = j == 5; pk.push_back(f); end
    end
    while (pk.size() != 0) begin
      inj_valid = 1; inj_flit = pk[0];
      #1;
      if (inj_ready) void'(pk.pop_front()); else stall_cycles++;
      @(negedge clk);
    end
    inj_valid = 0;
    repeat (60) @(negedge clk);
    chk(seen.size() == 14, "all flits reached the switch");
    chk(stall_cycles > 0, "injection stalled on credits");
    if (seen.size() == 14) begin
      chk(seen[0].head && seen[7].head && seen[0].vc != seen[7].vc, "second packet on another channel");
      for (int j = 1; j < 7; j++) chk(seen[j].vc == seen[0].vc && seen[j].data == 16'(j), "body flits keep channel");
    end
    // ejection: a packet of head + 3 digits on vc 2
    for (int j = 0; j < 4; j++) begin
      sw_out_valid = 1; sw_out_flit = '0; sw_out_flit.vc = 2; sw_out_flit.head = j == 0;
      sw_out_flit.tail = j == 3;
      sw_out_flit.data = (j == 0) ? 16'h4027 : 16'h0001;
      @(negedge clk);
      chk(ej_valid && ej_flit == sw_out_flit && sw_credit_in == 3'b100, "ejected flit and credit");
      chk(ev_valid == (j == 1) && (j != 1 || ev_tag == 6'h27), "event on first digit");
    end
    sw_out_valid = 0;
    @(negedge clk);
    chk(events == 1 && !ej_valid && sw_credit_in == 0, "one event, idle afterwards");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
