// tb_posit_encoder: checks rounding and packing. Random normalized
// magnitudes (many with long runs of trailing zeros, to hit exact ties),
// random signs and scale factors across and beyond each format's range are
// encoded; the expected posit is the exact value rounded by posit_ref_pkg
// (nearest, ties to even, saturating at maxpos/minpos). Zero and NaR lanes
// are checked too.
module tb_posit_encoder;
  import spade_pkg::*;
  import posit_ref_pkg::*;

  logic [1:0]   mode;
  logic [3:0]   sign, zero, nar;
  sf_t          sf [4];
  logic [127:0] mag;
  logic [31:0]  v;
  int checks = 0, failures = 0;

  posit_encoder dut (.mode(mode), .sign(sign), .sf(sf), .mag(mag), .zero(zero), .nar(nar), .v(v));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 6000; t++) begin
      int nl, lw, n, ms;
      mode = 2'(t % 3);
      nl = (mode == MODE_P8) ? 4 : (mode == MODE_P16) ? 2 : 1;
      n  = 32 / nl;
      lw = 128 / nl;
      ms = (n == 8) ? 6 : (n == 16) ? 28 : 120;
      mag = {$urandom, $urandom, $urandom, $urandom};
      sign = 4'($urandom);
      zero = 4'b0000;
      nar  = 4'b0000;
      if (t % 50 == 1) zero = 4'b0001;
      if (t % 50 == 2) nar  = 4'b0010;
      for (int l = 0; l < 4; l++) begin
        int r;
        mag[32*l + 31] = (l == nl - 1) || (nl == 4) || (nl == 2 && l == 1) ? 1'b1 : mag[32*l + 31];
        r = $urandom % 4;
        if (r == 0) mag[32*l +: 32] = mag[32*l +: 32] & ~32'hFFFF;         // ties more likely
        sf[l] = sf_t'(int'($urandom % (2 * ms + 11)) - ms - 5);
      end
      // exact ties: keep only the top n+1 bits of some lanes
      for (int l = 0; l < nl; l++) begin
        if ($urandom % 3 == 0)
          for (int i = 0; i < lw - n - 1; i++) mag[l * lw + i] = 1'b0;
        mag[l * lw + lw - 1] = 1'b1;      // leading one at the lane MSB
      end
      if (mode == MODE_P32 && t % 2 == 0) mag[95:0] = {$urandom, 64'd0};
      #1;
      for (int l = 0; l < nl; l++) begin
        logic [127:0] lane;
        kq_t val;
        logic [31:0] want, got;
        lane = (lw == 128) ? mag : ((mag >> (l * lw)) & ((128'd1 << lw) - 1));
        val = kq_t'(lane) <<< (FB + int'(sf[l]) - (lw - 1));
        if (sign[l]) val = -val;
        want = nar[l] ? (32'd1 << (n - 1)) : zero[l] ? 32'd0 : encode(val, n);
        got = lane_get(v, n, l);
        checks++;
        if (got != want) begin
          failures++;
          if (failures < 20)
            $display("mode %0d lane %0d sf %0d sign %b: got %h want %h", mode, l, sf[l], sign[l], got, want);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
