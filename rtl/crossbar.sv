// crossbar: the switch's central crossbar.
//
// Every input virtual channel has its own line into the crossbar (as drawn in
// the paper's switch figure) and every output port takes at most one of them
// per cycle. Output j forwards input `sel[j]` when `sel_valid[j]` is set.
// Purely combinational; the selection comes from the port allocators.
module crossbar
  import enbb_pkg::*;
#(
  parameter int unsigned NIN  = 15,
  parameter int unsigned NOUT = 5
) (
  input  flit_t                  in_flit   [NIN],
  input  logic [$clog2(NIN)-1:0] sel       [NOUT],
  input  logic [NOUT-1:0]        sel_valid,
  output flit_t                  out_flit  [NOUT],
  output logic [NOUT-1:0]        out_valid
);
  always_comb begin
    for (int j = 0; j < NOUT; j++) begin
      out_flit[j]  = in_flit[sel[j]];
      out_valid[j] = sel_valid[j];
    end
  end
endmodule
