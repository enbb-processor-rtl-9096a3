// tb_pc_allocator: random request vectors; the grant must be the first
// requester after the previous winner (round robin), and none without request.
`timescale 1ns/1ps
module tb_pc_allocator;
  logic clk = 0, rst_n = 0;
  logic [16:0] req;
  logic gnt_valid;
  logic [4:0] gnt_idx;
  int checks = 0, failures = 0, last = 16;
  pc_allocator #(.N(17)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int expv;
      @(negedge clk);
      req = (t % 4 == 0) ? 17'h1ffff : 17'($urandom) & 17'($urandom);
      #1;
      expv = -1;
      for (int k = 1; k <= 17; k++) if (expv < 0 && req[(last + k) % 17]) expv = (last + k) % 17;
      checks++;
      if ((expv < 0 && gnt_valid) || (expv >= 0 && (!gnt_valid || int'(gnt_idx) != expv))) begin
        failures++; $display("t=%0d req=%h exp %0d got %0d/%0d", t, req, expv, gnt_valid, gnt_idx);
      end
      if (expv >= 0) last = expv;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
