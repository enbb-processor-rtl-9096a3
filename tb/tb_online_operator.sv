// tb_online_operator: configures the operator, binds both slots, feeds the
// operand digits with random gaps and drains the result with random grants.
// Checks: the head flit is the configured result head; the result has one digit
// more than the longer operand and its value is (A +- B)/2 (operands read as
// fractions 0.d1d2...); the tail bit is on the last digit only; the channel
// granted with the head is kept for the body; the operator is free afterwards;
// the head is emitted with the first digit pair and the first result digit
// after the second pair (on-line delay of two digit pairs).
`timescale 1ns/1ps
module tb_online_operator;
  import enbb_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0, is_free, bind_a = 0, bind_b = 0, a_bound, b_bound;
  opcfg_t cfg_in, cfg;
  logic in_valid = 0, in_is_b = 0, a_ready, b_ready, out_valid, out_grant = 0;
  flit_t in_flit, out_flit;
  logic [VCID_W-1:0] out_grant_vc;
  int checks = 0, failures = 0;
  online_operator dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int L = 40;
  sdigit_t da [$], db [$];
  longint va, vb, vr;
  int nr, ia, ib;
  logic got_head, got_tail;

  function automatic sdigit_t rnd_digit();
    int r;
    r = $urandom_range(2);
    return r == 0 ? SD_NEG : r == 1 ? SD_ZERO : SD_POS;
  endfunction

  initial begin
    in_flit = '0; cfg_in = '0; out_grant_vc = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 200; trial++) begin
      int na, nb;
      @(negedge clk);
      na = $urandom_range(1, 24); nb = $urandom_range(1, 24);
      da.delete(); db.delete(); va = 0; vb = 0;
      for (int j = 0; j < na; j++) begin da.push_back(rnd_digit()); va += longint'(sd_val(da[j])) <<< (L-1-j); end
      for (int j = 0; j < nb; j++) begin db.push_back(rnd_digit()); vb += longint'(sd_val(db[j])) <<< (L-1-j); end
      checks++; if (!is_free) failures++;
      cfg_in = '0; cfg_in.op = opcode_e'($urandom_range(1)); cfg_in.tag_a = 6'd5; cfg_in.tag_b = 6'd9;
      cfg_in.res.ptype = PT_DATA; cfg_in.res.dx = 4'($urandom); cfg_in.res.dy = 4'($urandom); cfg_in.res.tag = 6'($urandom);
      cfg_we = 1; @(negedge clk); cfg_we = 0;
      checks++; if (is_free || cfg != cfg_in) failures++;
      bind_a = 1; bind_b = 1; @(negedge clk); bind_a = 0; bind_b = 0;
      ia = 0; ib = 0; vr = 0; nr = 0; got_head = 0; got_tail = 0;
      fork
        begin : feed
          while (ia < na || ib < nb) begin
            @(negedge clk);
            in_valid = 0;
            if ($urandom_range(1)) begin
              in_is_b = $urandom_range(1);
              if (!in_is_b && ia < na && a_ready) begin
                in_valid = 1; in_flit = '0; in_flit.data[1:0] = da[ia]; in_flit.tail = ia == na - 1; ia++;
              end else if (in_is_b && ib < nb && b_ready) begin
                in_valid = 1; in_flit = '0; in_flit.data[1:0] = db[ib]; in_flit.tail = ib == nb - 1; ib++;
              end
            end
          end
          @(negedge clk); in_valid = 0;
        end
        begin : drain
          logic [VCID_W-1:0] hv;
          hv = '0;
          while (!got_tail) begin
            @(negedge clk);
            out_grant = out_valid && $urandom_range(3) != 0;
            out_grant_vc = VCID_W'($urandom_range(2));
            #1;
            if (out_grant) begin
              if (!got_head) begin
                checks++;
                if (!out_flit.head || out_flit.data != cfg_in.res || out_flit.vc != out_grant_vc) begin
                  failures++; $display("bad head flit");
                end
                hv = out_grant_vc; got_head = 1;
              end else begin
                checks++;
                if (out_flit.head || out_flit.vc != hv) begin failures++; $display("bad body flit"); end
                vr += longint'(sd_val(out_flit.data[1:0])) <<< (L-1-nr);
                nr++;
                got_tail = out_flit.tail;
              end
            end
            @(posedge clk); #1; out_grant = 0;
          end
        end
      join
      @(negedge clk);
      checks++;
      if (nr != ((na > nb ? na : nb) + 1) ||
          vr != (va + ((cfg_in.op == OP_SUB) ? -vb : vb)) / 2) begin
        failures++; $display("trial %0d: len %0d value %0d expected len %0d value %0d",
                             trial, nr, vr, (na > nb ? na : nb) + 1, (va + ((cfg_in.op == OP_SUB) ? -vb : vb)) / 2);
      end
      checks++; if (!is_free) begin failures++; $display("not free after tail"); end
    end
    // latency: with both operands ready every cycle, the head appears after the
    // first pair and the first digit after the second pair
    begin
      int t0, th, td;
      cfg_in.op = OP_ADD;
      @(negedge clk); cfg_we = 1; bind_a = 1; bind_b = 1; @(negedge clk); cfg_we = 0; bind_a = 0; bind_b = 0;
      t0 = 0; th = -1; td = -1; ia = 0; ib = 0;
      for (int c = 0; c < 16; c++) begin
        in_valid = 0;
        if (a_ready && ia < 4) begin
          in_is_b = 0; in_valid = 1; in_flit = '0; in_flit.data[1:0] = SD_POS; in_flit.tail = ia == 3; ia++;
        end else if (b_ready && ib < 4) begin
          in_is_b = 1; in_valid = 1; in_flit = '0; in_flit.data[1:0] = SD_POS; in_flit.tail = ib == 3; ib++;
        end
        out_grant = out_valid; #1;
        if (out_grant && out_flit.head && th < 0) th = c;
        else if (out_grant && !out_flit.head && td < 0) td = c;
        @(negedge clk);
      end
      in_valid = 0; out_grant = 0;
      // A in at cycle 0, B at 1, first step at 2, head leaves at 3; the second
      // pair arrives at 3 and 4, its step at 5 yields z0, which leaves at 6
      checks++;
      if (th != 3 || td != 6) begin failures++; $display("latency head %0d digit %0d", th, td); end
      repeat (10) begin out_grant = out_valid; @(negedge clk); end
      out_grant = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
