// tb_posit_decoder: checks SIMD posit unpacking. For random words in all
// three modes (and the extreme codes maxpos, minpos, +-1, zero, NaR), the
// value rebuilt from the decoder's sign, scale factor and mantissa must equal
// the exact value given by the reference bit-string decoder of
// posit_ref_pkg; zero and NaR flags are checked too.
module tb_posit_decoder;
  import spade_pkg::*;
  import posit_ref_pkg::*;

  logic [1:0]  mode;
  logic [31:0] v;
  logic [3:0]  sign, zero, nar;
  sf_t         sf [4];
  logic [27:0] mant;
  int checks = 0, failures = 0;

  posit_decoder dut (.mode(mode), .v(v), .sign(sign), .sf(sf), .mant(mant), .zero(zero), .nar(nar));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] specials [6] = '{32'h7FFF_FFFF, 32'h0000_0001, 32'h4000_0000, 32'hC000_0000,
                                  32'h0, 32'h8000_0000};
    for (int t = 0; t < 3000; t++) begin
      int n, nl, mw;
      mode = 2'(t % 3);
      n  = (mode == MODE_P8) ? 8 : (mode == MODE_P16) ? 16 : 32;
      nl = 32 / n;
      mw = 28 / nl;
      v = $urandom;
      if (t < 36) begin
        // special codes, scaled to the lane width
        logic [31:0] s;
        s = specials[(t / 3) % 6];
        for (int l = 0; l < nl; l++) v = lane_set(v, n, l, s >> (32 - n));
      end
      #1;
      for (int l = 0; l < nl; l++) begin
        logic [31:0] p;
        kq_t got, want;
        p = lane_get(v, n, l);
        want = posit_kq(p, n);
        got = to_kq(sign[l], longint'((mant >> (l * mw)) & ((28'd1 << mw) - 1)),
                    int'(sf[l]) - (mw - 1));
        checks++;
        if (zero[l] != (p == 0) || nar[l] != is_nar(p, n)) begin
          failures++;
          $display("flags mode %0d p %h: zero %b nar %b", mode, p, zero[l], nar[l]);
        end else if (p != 0 && !is_nar(p, n) && got != want) begin
          failures++;
          $display("mode %0d lane %0d p %h: sign %b sf %0d mant %h", mode, l, p, sign[l], sf[l], mant);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
