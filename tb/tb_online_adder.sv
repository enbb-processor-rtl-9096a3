// tb_online_adder: self-checking test of the on-line signed-digit adder.
// Random operands of random length are fed MSD first, one digit pair per cycle,
// followed by two zero pairs. The testbench checks that no sum digit appears at
// the first step (on-line delay 2), that exactly n+1 digits come out, and that
// their value equals the integer sum of the operands computed here directly.
`timescale 1ns/1ps
module tb_online_adder;
  import enbb_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, step = 0;
  sdigit_t x, y, z;
  logic z_valid;
  int checks = 0, failures = 0;

  online_adder dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sdigit_t rnd_digit();
    int r;
    r = $urandom_range(2);
    return r == 0 ? SD_NEG : r == 1 ? SD_ZERO : SD_POS;
  endfunction

  initial begin
    x = SD_ZERO; y = SD_ZERO;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 300; trial++) begin
      int n, nout;
      longint xs, ys, zs;
      n = (trial < 6) ? trial + 1 : $urandom_range(1, 24);
      xs = 0; ys = 0; zs = 0; nout = 0;
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int k = 1; k <= n + 2; k++) begin
        x = (k <= n) ? rnd_digit() : SD_ZERO;
        y = (k <= n) ? rnd_digit() : SD_ZERO;
        // trial 7 drives the extreme pattern of all +1 then all -1
        if (trial == 7 && k <= n) begin x = SD_POS; y = SD_POS; end
        if (trial == 8 && k <= n) begin x = SD_NEG; y = SD_NEG; end
        if (k <= n) begin
          xs = xs * 2 + sd_val(x);
          ys = ys * 2 + sd_val(y);
        end
        step = 1;
        #1;
        if (k == 1) begin
          checks++;
          if (z_valid) begin failures++; $display("z_valid at first step"); end
        end else if (z_valid) begin
          checks++;
          if (z == 2'b10) begin failures++; $display("bad digit code"); end
          zs = zs * 2 + sd_val(z);
          nout++;
        end
        @(negedge clk);
        step = 0;
      end
      checks++;
      if (nout != n + 1 || zs != xs + ys) begin
        failures++;
        $display("trial %0d n=%0d: got %0d digits value %0d, expected %0d digits value %0d",
                 trial, n, nout, zs, n + 1, xs + ys);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
