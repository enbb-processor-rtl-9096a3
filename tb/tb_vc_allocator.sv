// tb_vc_allocator: a model of busy bits and credit counters is run next to
// the block under random sends and credit returns; the offered free channel
// must be the lowest one that is idle with all credits back, and has_credit
// must follow the model.
`timescale 1ns/1ps
module tb_vc_allocator;
  import enbb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [2:0] credit_in;
  logic send, send_head, send_tail, free_avail;
  logic [VCID_W-1:0] send_vc, free_vc;
  logic [2:0] has_credit;
  int cred [3], outst [3];
  logic busy [3];
  int checks = 0, failures = 0, n_free = 0;
  vc_allocator #(.V(3), .DEPTH(3)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (6000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    credit_in = '0; send = 0; send_vc = '0; send_head = 0; send_tail = 0;
    for (int v = 0; v < 3; v++) begin cred[v] = 3; busy[v] = 0; outst[v] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      int ef;
      @(negedge clk);
      ef = -1;
      for (int v = 2; v >= 0; v--) if (!busy[v] && cred[v] == 3) ef = v;
      checks++;
      if (free_avail != (ef >= 0) || (ef >= 0 && int'(free_vc) != ef)) begin
        failures++; $display("t=%0d free mismatch exp %0d got %0d/%0d", t, ef, free_avail, free_vc);
      end
      for (int v = 0; v < 3; v++) begin
        checks++;
        if (has_credit[v] != (cred[v] > 0)) failures++;
      end
      // credit returns for flits that are downstream
      for (int v = 0; v < 3; v++) credit_in[v] = outst[v] > 0 && $urandom_range(2) == 0;
      // a send: head on the free channel, or body/tail on a busy one with credit
      send = 0; send_head = 0; send_tail = 0;
      if ($urandom_range(1)) begin
        int v;
        v = $urandom_range(2);
        if (busy[v] && cred[v] > 0) begin
          send = 1; send_vc = VCID_W'(v); send_tail = $urandom_range(3) == 0;
        end else if (ef >= 0) begin
          send = 1; send_vc = VCID_W'(ef); send_head = 1; n_free++;
        end
      end
      @(posedge clk); #1;
      for (int v = 0; v < 3; v++) if (credit_in[v]) begin cred[v]++; outst[v]--; end
      if (send) begin
        cred[send_vc]--; outst[send_vc]++;
        if (send_head) busy[send_vc] = 1;
        if (send_tail) busy[send_vc] = 0;
      end
    end
    checks++;
    if (n_free < 20) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
