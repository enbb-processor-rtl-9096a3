// enbb_top: the numerical brain, a 2D mesh of arithmetic switches.
//
// XN x YN switches (enbb_router) are connected to their four neighbours by
// physical channels of one flit per cycle in each direction, each with a
// per-virtual-channel credit return beside it. Switch (x, y) is node
// n = y*XN + x; east is x+1, south is y+1. Channels at the mesh edge are left
// unconnected (no flit arrives, no credit ever returns, so nothing is sent
// there; X-Y routing never tries for a destination inside the mesh). Every
// switch has a network interface on its local port, and the interfaces' front-
// end sides are the ports of this module, one set per node: this is where the
// event-driven simulator front end (conventional cores, not part of this RTL)
// injects configuration and operand packets and receives results and
// signal events.
//
// The paper envisions a 3D mesh (or another topology) and draws a 10 x 8 2D
// mesh in its example computation; this module builds that 2D mesh. Link width,
// edge handling and node numbering are this design's choices.
module enbb_top
  import enbb_pkg::*;
#(
  parameter int unsigned XN    = 10,
  parameter int unsigned YN    = 8,
  parameter int unsigned V     = 3,
  parameter int unsigned DEPTH = 3,
  parameter int unsigned K     = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [XN*YN-1:0]   inj_valid,
  input  flit_t              inj_flit  [XN*YN],
  output logic [XN*YN-1:0]   inj_ready,
  output logic [XN*YN-1:0]   ej_valid,
  output flit_t              ej_flit   [XN*YN],
  output logic [XN*YN-1:0]   ev_valid,
  output logic [TAG_W-1:0]   ev_tag    [XN*YN]
);
  localparam int unsigned N = XN * YN;

  // per node, per port
  logic [NPORTS-1:0] in_valid  [N];
  flit_t             in_flit   [N][NPORTS];
  logic [V-1:0]      credit_out[N][NPORTS];
  logic [NPORTS-1:0] out_valid [N];
  flit_t             out_flit  [N][NPORTS];
  logic [V-1:0]      credit_in [N][NPORTS];

  for (genvar y = 0; y < YN; y++) begin : g_y
    for (genvar x = 0; x < XN; x++) begin : g_x
      localparam int unsigned n = y * XN + x;

      // north input comes from the south output of (x, y-1), etc.
      if (y > 0) begin : g_n
        assign in_valid[n][P_NORTH]  = out_valid[n-XN][P_SOUTH];
        assign in_flit[n][P_NORTH]   = out_flit[n-XN][P_SOUTH];
        assign credit_in[n][P_NORTH] = credit_out[n-XN][P_SOUTH];
      end else begin : g_nn
        assign in_valid[n][P_NORTH]  = 1'b0;
        assign in_flit[n][P_NORTH]   = '0;
        assign credit_in[n][P_NORTH] = '0;
      end
      if (y < YN - 1) begin : g_s
        assign in_valid[n][P_SOUTH]  = out_valid[n+XN][P_NORTH];
        assign in_flit[n][P_SOUTH]   = out_flit[n+XN][P_NORTH];
        assign credit_in[n][P_SOUTH] = credit_out[n+XN][P_NORTH];
      end else begin : g_ns
        assign in_valid[n][P_SOUTH]  = 1'b0;
        assign in_flit[n][P_SOUTH]   = '0;
        assign credit_in[n][P_SOUTH] = '0;
      end
      if (x > 0) begin : g_w
        assign in_valid[n][P_WEST]  = out_valid[n-1][P_EAST];
        assign in_flit[n][P_WEST]   = out_flit[n-1][P_EAST];
        assign credit_in[n][P_WEST] = credit_out[n-1][P_EAST];
      end else begin : g_nw
        assign in_valid[n][P_WEST]  = 1'b0;
        assign in_flit[n][P_WEST]   = '0;
        assign credit_in[n][P_WEST] = '0;
      end
      if (x < XN - 1) begin : g_e
        assign in_valid[n][P_EAST]  = out_valid[n+1][P_WEST];
        assign in_flit[n][P_EAST]   = out_flit[n+1][P_WEST];
        assign credit_in[n][P_EAST] = credit_out[n+1][P_WEST];
      end else begin : g_ne
        assign in_valid[n][P_EAST]  = 1'b0;
        assign in_flit[n][P_EAST]   = '0;
        assign credit_in[n][P_EAST] = '0;
      end

      enbb_router #(.V(V), .DEPTH(DEPTH), .K(K)) u_sw (
        .clk, .rst_n,
        .my_x       (COORD_W'(x)),
        .my_y       (COORD_W'(y)),
        .in_valid   (in_valid[n]),
        .in_flit    (in_flit[n]),
        .credit_out (credit_out[n]),
        .out_valid  (out_valid[n]),
        .out_flit   (out_flit[n]),
        .credit_in  (credit_in[n])
      );

      network_interface #(.V(V), .DEPTH(DEPTH)) u_ni (
        .clk, .rst_n,
        .inj_valid     (inj_valid[n]),
        .inj_flit      (inj_flit[n]),
        .inj_ready     (inj_ready[n]),
        .ej_valid      (ej_valid[n]),
        .ej_flit       (ej_flit[n]),
        .ev_valid      (ev_valid[n]),
        .ev_tag        (ev_tag[n]),
        .sw_in_valid   (in_valid[n][P_LOCAL]),
        .sw_in_flit    (in_flit[n][P_LOCAL]),
        .sw_credit_out (credit_out[n][P_LOCAL]),
        .sw_out_valid  (out_valid[n][P_LOCAL]),
        .sw_out_flit   (out_flit[n][P_LOCAL]),
        .sw_credit_in  (credit_in[n][P_LOCAL])
      );
    end
  end

endmodule
