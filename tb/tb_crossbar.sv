// tb_crossbar: random selections; every output must carry the selected input.
`timescale 1ns/1ps
module tb_crossbar;
  import enbb_pkg::*;
  flit_t in_flit [15];
  logic [3:0] sel [5];
  logic [4:0] sel_valid, out_valid;
  flit_t out_flit [5];
  int checks = 0, failures = 0;
  crossbar #(.NIN(15), .NOUT(5)) dut (.*);
  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < 15; i++) in_flit[i] = flit_t'($urandom);
      for (int j = 0; j < 5; j++) sel[j] = 4'($urandom_range(14));
      sel_valid = 5'($urandom);
      #1;
      for (int j = 0; j < 5; j++) begin
        checks++;
        if (out_valid[j] != sel_valid[j] || out_flit[j] != in_flit[sel[j]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
