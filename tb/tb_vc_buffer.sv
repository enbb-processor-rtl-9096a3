// tb_vc_buffer: random pushes and pops against a queue model; checks the
// oldest flit, empty and full flags after every cycle.
`timescale 1ns/1ps
module tb_vc_buffer;
  import enbb_pkg::*;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, empty, full;
  flit_t din, dout;
  flit_t model [$];
  int checks = 0, failures = 0;
  vc_buffer #(.DEPTH(3)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == 3) ||
          (model.size() != 0 && dout != model[0])) begin
        failures++; $display("cycle %0d mismatch size=%0d", c, model.size());
      end
      pop  = model.size() != 0 && $urandom_range(1);
      push = (model.size() < 3 || pop) && $urandom_range(1);
      din  = flit_t'($urandom);
      @(posedge clk); #1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
