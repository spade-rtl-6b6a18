// tb_quire_adder: checks stage 3 of the MAC. Random quire lanes and scale
// factors are applied for each opr (product only, product + V3, product +
// quire register) and each mode. The expected lane is worked out with
// signed arithmetic on the isolated lane: the operand with the larger scale
// factor (a zero operand counts as smaller) is kept, the other is shifted
// right arithmetically by the difference and added; the result takes the
// larger scale factor; the overflow flag is checked against the exact sum.
module tb_quire_adder;
  import spade_pkg::*;

  logic [1:0]   mode, opr;
  logic [127:0] q_p, q_c, q_acc, q_r;
  sf_t          sf_p [4], sf_c [4], sf_acc [4], sf_r [4];
  logic [3:0]   ovf;
  int checks = 0, failures = 0;

  quire_adder dut (.mode(mode), .opr(opr), .q_p(q_p), .sf_p(sf_p), .q_c(q_c), .sf_c(sf_c),
                   .q_acc(q_acc), .sf_acc(sf_acc), .q_r(q_r), .sf_r(sf_r), .flag_ovf(ovf));

  function automatic logic signed [255:0] lane_s(input logic [127:0] q, input int l, input int lw);
    logic [127:0] x;
    x = q >> (l * lw);
    x = x << (128 - lw);
    return 256'($signed(x) >>> (128 - lw));
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int nl, lw;
      mode = 2'(t % 3);
      opr  = 2'((t / 3) % 3);
      nl = (mode == MODE_P8) ? 4 : (mode == MODE_P16) ? 2 : 1;
      lw = 128 / nl;
      // values with head-room, so overflow is rare but possible
      q_p   = {$urandom, $urandom, $urandom, $urandom} >> ($urandom % 4);
      q_c   = {$urandom, $urandom, $urandom, $urandom};
      q_acc = {$urandom, $urandom, $urandom, $urandom};
      if (t % 11 == 0) q_acc = '0;
      for (int l = 0; l < 4; l++) begin
        sf_p[l]   = sf_t'(int'($urandom % 41) - 20);
        sf_c[l]   = sf_t'(int'($urandom % 41) - 20);
        sf_acc[l] = sf_t'(int'($urandom % 41) - 20);
      end
      #1;
      for (int l = 0; l < nl; l++) begin
        logic signed [255:0] a, b, big, sml, sum, got;
        int sa, sb, sbig, d;
        bit ovf_w;
        a = lane_s(q_p, l, lw);
        sa = int'(sf_p[l]);
        case (opr)
          OPR_FMA: begin b = lane_s(q_c, l, lw);   sb = int'(sf_c[l]);   end
          OPR_MAC: begin b = lane_s(q_acc, l, lw); sb = int'(sf_acc[l]); end
          default: begin b = 0;                    sb = sa;              end
        endcase
        if (b == 0 || (a != 0 && sa >= sb)) begin big = a; sml = b; sbig = sa; d = sa - sb; end
        else begin big = b; sml = a; sbig = sb; d = sb - sa; end
        if (b == 0) d = 0;
        if (d < 0) d = 0;
        sum = big + (sml >>> d);
        ovf_w = (sum >= (256'sd1 <<< (lw - 1))) || (sum < -(256'sd1 <<< (lw - 1)));
        got = lane_s(q_r, l, lw);
        checks++;
        if (ovf[l] != ovf_w || (!ovf_w && (got != sum || int'(sf_r[l]) != sbig))) begin
          failures++;
          $display("mode %0d opr %0d lane %0d: got %h/%0d ovf %b, want %h/%0d ovf %b",
                   mode, opr, l, got, sf_r[l], ovf[l], sum, sbig, ovf_w);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
