// network_interface: link between the front end and the local port of a switch.
//
// Injection: the front end offers whole packets flit by flit (`inj_valid`,
// `inj_flit`, `inj_ready`); the virtual channel field it supplies is ignored.
// A head flit is accepted when a virtual channel of the switch's local input
// port is free and has a credit, and the packet keeps that channel until its
// tail; the channel state and credits are kept by a vc_allocator instance.
// Accepted flits reach the switch one cycle later.
// Ejection: flits leaving the switch's local output port are passed to the
// front end one cycle later (`ej_valid`, `ej_flit`; the front end is assumed
// always able to take them) and each one returns a credit at once. When the
// first digit of a packet arrives, the interface raises `ev_valid` with the
// packet's tag for one cycle: the "event on a signal" message that tells the
// event-driven front end a new signal value has started to come out.
//
// From the paper: the front end injects work and receives events on signals,
// sent when the first digit of an output signal is produced. This design's
// own: the flit-level handshake and the always-ready ejection side.
module network_interface
  import enbb_pkg::*;
#(
  parameter int unsigned V     = 3,
  parameter int unsigned DEPTH = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  // front end
  input  logic              inj_valid,
  input  flit_t             inj_flit,
  output logic              inj_ready,
  output logic              ej_valid,
  output flit_t             ej_flit,
  output logic              ev_valid,
  output logic [TAG_W-1:0]  ev_tag,
  // switch local port
  output logic              sw_in_valid,
  output flit_t             sw_in_flit,
  input  logic [V-1:0]      sw_credit_out,
  input  logic              sw_out_valid,
  input  flit_t             sw_out_flit,
  output logic [V-1:0]      sw_credit_in
);

  logic              free_avail;
  logic [VCID_W-1:0] free_vc, cur_vc;
  logic [V-1:0]      has_credit;
  logic              accept;
  flit_t             sent;

  logic [V-1:0]      first_pending;
  logic [TAG_W-1:0]  vc_tag [V];

  always_comb begin
    inj_ready = inj_flit.head ? free_avail : has_credit[cur_vc];
    accept    = inj_valid && inj_ready;
    sent      = inj_flit;
    sent.vc   = inj_flit.head ? free_vc : cur_vc;
  end

  vc_allocator #(.V(V), .DEPTH(DEPTH)) u_vca (
    .clk, .rst_n,
    .credit_in  (sw_credit_out),
    .send       (accept),
    .send_vc    (sent.vc),
    .send_head  (inj_flit.head),
    .send_tail  (inj_flit.tail),
    .free_avail,
    .free_vc,
    .has_credit
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_vc        <= '0;
      sw_in_valid   <= 1'b0;
      sw_in_flit    <= '0;
      ej_valid      <= 1'b0;
      ej_flit       <= '0;
      sw_credit_in  <= '0;
      ev_valid      <= 1'b0;
      ev_tag        <= '0;
      first_pending <= '0;
      for (int v = 0; v < V; v++) vc_tag[v] <= '0;
    end else begin
      sw_in_valid <= accept;
      sw_in_flit  <= sent;
      if (accept && inj_flit.head) cur_vc <= free_vc;

      ej_valid     <= sw_out_valid;
      ej_flit      <= sw_out_flit;
      sw_credit_in <= '0;
      ev_valid     <= 1'b0;
      if (sw_out_valid) begin
        sw_credit_in[sw_out_flit.vc] <= 1'b1;
        if (sw_out_flit.head) begin
          first_pending[sw_out_flit.vc] <= 1'b1;
          vc_tag[sw_out_flit.vc]        <= sw_out_flit.data[TAG_W-1:0];
        end else if (first_pending[sw_out_flit.vc]) begin
          first_pending[sw_out_flit.vc] <= 1'b0;
          ev_valid <= 1'b1;
          ev_tag   <= vc_tag[sw_out_flit.vc];
        end
      end
    end
  end

endmodule
