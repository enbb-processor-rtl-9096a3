// tb_arith_channel: one output port alone. It checks that a configuration
// lands in the lowest free operator (and that cfg_ready drops when both are
// taken), that bypass flits reach the link one cycle later with the offered
// free channel on a head and their own channel on body flits, that operand
// digits steered to operator 0 produce a correct result packet on the link
// when its flits are granted, and that credits are consumed per flit.
`timescale 1ns/1ps
module tb_arith_channel;
  import enbb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [2:0] credit_in = '0;
  logic xb_valid = 0, xb_to_op = 0, xb_is_b = 0, op_grant = 0, cfg_we = 0, cfg_ready;
  flit_t xb_flit, link_flit;
  logic [0:0] xb_op = '0, op_grant_idx = '0;
  opcfg_t cfg_in;
  logic [1:0] bind_a = '0, bind_b = '0;
  opcfg_t op_cfg [2];
  logic [1:0] op_free, op_a_bound, op_b_bound, op_a_ready, op_b_ready, op_out_req;
  logic free_avail, link_valid;
  logic [VCID_W-1:0] free_vc;
  logic [2:0] has_credit;
  int checks = 0, failures = 0;
  arith_channel #(.V(3), .DEPTH(3), .K(2)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic chk(logic c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  initial begin
    int vr, nr;
    xb_flit = '0; cfg_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(op_free == 2'b11 && cfg_ready && free_avail && free_vc == 0, "reset state");
    // configure operator 0: A=3, B=4, ADD, result head 0x1234
    cfg_in.op = OP_ADD; cfg_in.tag_a = 3; cfg_in.tag_b = 4; cfg_in.res = head_t'(16'h5234);
    cfg_we = 1; @(negedge clk); cfg_we = 0;
    chk(op_free == 2'b10 && op_cfg[0] == cfg_in, "config went to operator 0");
    cfg_in.tag_a = 7; cfg_we = 1; @(negedge clk); cfg_we = 0;
    chk(op_free == 2'b00 && !cfg_ready && op_cfg[1].tag_a == 7, "operator 1 taken, none free");
    // bypass packet: head + 2 bodies
    xb_valid = 1; xb_to_op = 0; xb_flit = '0; xb_flit.head = 1; xb_flit.vc = 2; xb_flit.data = 16'hbeef;
    @(negedge clk);
    chk(link_valid && link_flit.head && link_flit.vc == 0 && link_flit.data == 16'hbeef, "bypass head on free vc 0");
    chk(!has_credit[0] == 0 && free_vc == 1, "vc 0 busy after head");
    xb_flit = '0; xb_flit.vc = 0; xb_flit.data = 16'h0001; @(negedge clk);
    chk(link_valid && !link_flit.head && link_flit.vc == 0 && link_flit.data == 16'h0001, "bypass body");
    xb_flit.tail = 1; @(negedge clk);
    xb_valid = 0;
    chk(link_valid && link_flit.tail, "bypass tail");
    chk(!has_credit[0], "three credits used on vc 0");
    @(negedge clk);
    chk(!link_valid, "link idle");
    // operands to operator 0: A = +1 0, B = +1 +1 -> (0.5 + 0.75)/2 = 0.625 = 0.101
    bind_a = 2'b01; bind_b = 2'b01; @(negedge clk); bind_a = 0; bind_b = 0;
    chk(op_a_bound[0] && op_b_bound[0] && op_a_ready[0] && op_b_ready[0], "bound and ready");
    xb_to_op = 1; xb_op = 0;
    for (int j = 0; j < 2; j++) begin
      xb_valid = 1; xb_is_b = 0; xb_flit = '0; xb_flit.data[1:0] = (j == 0) ? SD_POS : SD_ZERO; xb_flit.tail = j == 1;
      @(negedge clk);
      xb_is_b = 1; xb_flit.data[1:0] = SD_POS;
      @(negedge clk);
      xb_valid = 0;
      while (!(op_a_ready[0] || j == 1)) @(negedge clk);
    end
    xb_valid = 0; xb_to_op = 0;
    // drain the result; vc 0 has no credits, so the head goes on vc 1
    vr = 0; nr = 0;
    credit_in = 3'b001;  // return one credit on vc 0 (not enough to free it)
    for (int c = 0; c < 30; c++) begin
      op_grant = op_out_req[0]; op_grant_idx = 0;
      @(negedge clk);
      credit_in = 0;
      op_grant = 0;

      if (link_valid) begin
        credit_in[1] = link_flit.vc == 1;   // downstream takes the flit at once
        if (link_flit.head) chk(link_flit.vc == 1 && link_flit.data == 16'h5234, "result head on vc 1");
        else begin
          chk(link_flit.vc == 1, "result body keeps vc 1");
          vr = vr * 2 + sd_val(link_flit.data[1:0]); nr++;
          if (link_flit.tail) break;
        end
      end
    end
    // 3 digits, value 0.101 -> integer 5 (0.625 * 8)
    chk(nr == 3 && vr == 5, $sformatf("result len %0d value %0d", nr, vr));
    @(negedge clk);
    chk(op_free[0] && cfg_ready, "operator 0 free after result");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
