// tb_input_port: flits on random virtual channels are written in and popped
// at random; each channel's oldest flit must match a per-channel queue model,
// and each pop must return a credit on that channel exactly one cycle later.
`timescale 1ns/1ps
module tb_input_port;
  import enbb_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  flit_t in_flit;
  logic [2:0] pop, nonempty, credit_out, pop_d;
  flit_t front [3];
  flit_t model [3][$];
  int checks = 0, failures = 0;
  input_port #(.V(3), .DEPTH(3)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    in_flit = '0; pop = '0; pop_d = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int v;
      @(negedge clk);
      for (int c = 0; c < 3; c++) begin
        checks++;
        if (nonempty[c] != (model[c].size() != 0) || (model[c].size() != 0 && front[c] != model[c][0]) ||
            credit_out[c] != pop_d[c]) begin
          failures++; $display("t=%0d vc%0d mismatch", t, c);
        end
        pop[c] = model[c].size() != 0 && $urandom_range(1);
      end
      v = $urandom_range(2);
      in_valid = model[v].size() < 3 && $urandom_range(1);
      in_flit = flit_t'($urandom);
      in_flit.vc = VCID_W'(v);
      @(posedge clk); #1;
      pop_d = pop;
      for (int c = 0; c < 3; c++) if (pop[c]) void'(model[c].pop_front());
      if (in_valid) model[v].push_back(in_flit);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
