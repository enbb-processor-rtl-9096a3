// online_operator: one on-line arithmetic virtual output channel.
//
// A configuration (operation, tags of operands A and B, head of the result
// packet) turns a free operator into a configured one. The switch then binds
// one arriving operand packet to slot A and one to slot B, by tag, and feeds
// their digit flits in, MSD first, through one-digit holding registers
// (`a_ready`/`b_ready` say when a slot can take a digit). Whenever both slots
// hold a digit (or their operand has ended, which reads as zero digits), one
// step of the on-line adder is taken. The first step emits the result head
// flit; every later step emits one result digit, so the result starts leaving
// two digit-pairs after the operands start arriving. After both tails, two
// flush steps finish the result, which has one digit more than the longer
// operand; its last flit carries the tail bit. When the tail has been sent the
// operator is free again. Result flits wait in a two-entry queue (`out_*`)
// until the port allocator grants them; the channel number granted with the
// head is kept for the body flits.
//
// The paper places configurable on-line floating-point/integer operators in
// the output ports and configures them with control packets. This operator
// does fixed-point addition and subtraction only: the paper leaves the
// floating-point on-line algorithms open, and the one-shot use, slot
// handshake and zero padding of a shorter operand are this design's choices.
module online_operator
  import enbb_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // configuration
  input  logic              cfg_we,
  input  opcfg_t            cfg_in,
  output logic              is_free,
  output opcfg_t            cfg,
  // operand binding (head flit of an operand packet matched a tag)
  input  logic              bind_a,
  input  logic              bind_b,
  output logic              a_bound,
  output logic              b_bound,
  // operand digits
  input  logic              in_valid,
  input  logic              in_is_b,
  input  flit_t             in_flit,
  output logic              a_ready,
  output logic              b_ready,
  // result flits
  output logic              out_valid,
  output flit_t             out_flit,   // vc field holds the kept channel
  input  logic              out_grant,
  input  logic [VCID_W-1:0] out_grant_vc
);

  logic      configured;
  logic      xa_v, xb_v, xa_last, xb_last, a_done, b_done;
  sdigit_t   xa_d, xb_d;
  logic [1:0] flush;
  logic      started;
  logic [VCID_W-1:0] vc_kept;

  // result queue, two entries
  flit_t q [2];
  logic [1:0] q_cnt;

  logic    step, in_tail_phase;
  sdigit_t da, db;
  logic    z_valid;
  sdigit_t z;
  logic    push;
  flit_t   push_flit;
  logic    finish;

  assign is_free = !configured;
  assign a_ready = configured && a_bound && !xa_v && !a_done;
  assign b_ready = configured && b_bound && !xb_v && !b_done;

  always_comb begin
    in_tail_phase = a_done && b_done;
    step = configured && (q_cnt < 2'd2) &&
           (in_tail_phase ? (flush != 2'd0)
                          : ((xa_v || a_done) && (xb_v || b_done)));
    da = xa_v ? xa_d : SD_ZERO;
    db = xb_v ? ((cfg.op == OP_SUB) ? sd_neg(xb_d) : xb_d) : SD_ZERO;
    push      = step && (!started || z_valid);
    push_flit = '0;
    if (!started) begin
      push_flit.head = 1'b1;
      push_flit.data = cfg.res;
    end else begin
      push_flit.data[1:0] = z;
      push_flit.tail      = in_tail_phase && flush == 2'd1;
    end
    out_valid = q_cnt != 2'd0;
    out_flit  = q[0];
    out_flit.vc = q[0].head ? out_grant_vc : vc_kept;
    finish    = out_grant && q[0].tail;
  end

  online_adder u_add (
    .clk, .rst_n,
    .clear   (finish || cfg_we),
    .step    (step),
    .x       (da),
    .y       (db),
    .z_valid (z_valid),
    .z       (z)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      configured <= 1'b0;
      cfg        <= '0;
      a_bound <= 1'b0; b_bound <= 1'b0;
      xa_v <= 1'b0; xb_v <= 1'b0; xa_last <= 1'b0; xb_last <= 1'b0;
      xa_d <= SD_ZERO; xb_d <= SD_ZERO;
      a_done <= 1'b0; b_done <= 1'b0;
      flush <= '0; started <= 1'b0; vc_kept <= '0;
      q_cnt <= '0;
      q[0] <= '0; q[1] <= '0;
    end else if (finish) begin
      configured <= 1'b0;
      a_bound <= 1'b0; b_bound <= 1'b0;
      xa_v <= 1'b0; xb_v <= 1'b0; a_done <= 1'b0; b_done <= 1'b0;
      flush <= '0; started <= 1'b0;
      q_cnt <= '0;
    end else begin
      if (cfg_we && !configured) begin
        configured <= 1'b1;
        cfg        <= cfg_in;
      end
      if (bind_a) a_bound <= 1'b1;
      if (bind_b) b_bound <= 1'b1;
      // operand digits into the holding registers
      if (in_valid && !in_is_b) begin
        xa_v <= 1'b1; xa_d <= in_flit.data[1:0]; xa_last <= in_flit.tail;
      end
      if (in_valid && in_is_b) begin
        xb_v <= 1'b1; xb_d <= in_flit.data[1:0]; xb_last <= in_flit.tail;
      end
      if (step) begin
        started <= 1'b1;
        if (in_tail_phase) flush <= flush - 2'd1;
        else begin
          if (xa_v) begin xa_v <= 1'b0; if (xa_last) a_done <= 1'b1; end
          if (xb_v) begin xb_v <= 1'b0; if (xb_last) b_done <= 1'b1; end
          if ((a_done || (xa_v && xa_last)) && (b_done || (xb_v && xb_last)))
            flush <= 2'd2;
        end
      end
      // result queue
      if (out_grant && q[0].head) vc_kept <= out_grant_vc;
      unique case ({push, out_grant})
        2'b10: begin q[q_cnt[0]] <= push_flit; q_cnt <= q_cnt + 2'd1; end
        2'b01: begin q[0] <= q[1]; q_cnt <= q_cnt - 2'd1; end
        2'b11: begin
          if (q_cnt == 2'd1) q[0] <= push_flit;
          else begin q[0] <= q[1]; q[1] <= push_flit; end
        end
        default: ;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) out_grant |-> out_valid);
  assert property (@(posedge clk) disable iff (!rst_n) (in_valid && !in_is_b) |-> a_ready);
  assert property (@(posedge clk) disable iff (!rst_n) (in_valid && in_is_b) |-> b_ready);

endmodule
