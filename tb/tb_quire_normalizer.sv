// tb_quire_normalizer: checks stage 4 of the MAC. For random quire lanes of
// every width and sign (including zero), the sign must be the lane's sign,
// the magnitude shifted so its leading one is the lane MSB, and the scale
// factor saq + QL/2 - 1 - (leading zeros of the magnitude).
module tb_quire_normalizer;
  import spade_pkg::*;

  logic [1:0]   mode;
  logic [127:0] q, mag;
  sf_t          sfq [4], sf [4];
  logic [3:0]   sign, zero;
  int checks = 0, failures = 0;

  quire_normalizer dut (.mode(mode), .q(q), .sfq(sfq), .sign(sign), .sf(sf), .mag(mag), .zero(zero));

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
      nl = (mode == MODE_P8) ? 4 : (mode == MODE_P16) ? 2 : 1;
      lw = 128 / nl;
      q = {$urandom, $urandom, $urandom, $urandom};
      for (int s = 0; s < 4; s++) begin
        if ($urandom % 3 == 0) q[32*s +: 32] = q[32*s +: 32] >> ($urandom % 32);
        if ($urandom % 9 == 0) q[32*s +: 32] = 0;
      end
      for (int l = 0; l < 4; l++) sfq[l] = sf_t'(int'($urandom % 241) - 120);
      #1;
      for (int l = 0; l < nl; l++) begin
        logic [127:0] lane, a, m, mask, gm;
        bit s;
        int p;
        mask = (lw == 128) ? '1 : ((128'd1 << lw) - 1);
        lane = (q >> (l * lw)) & mask;
        s = lane[lw - 1];
        a = s ? ((0 - lane) & mask) : lane;
        p = -1;
        for (int i = 0; i < lw; i++) if (a[i]) p = i;
        m = (p >= 0) ? ((a << (lw - 1 - p)) & mask) : 0;
        gm = (mag >> (l * lw)) & mask;
        checks++;
        if (zero[l] != (p < 0) || sign[l] != s || gm != m ||
            (p >= 0 && int'(sf[l]) != int'(sfq[l]) + p - lw / 2)) begin
          failures++;
          $display("mode %0d lane %0d: q %h sign %b sf %0d zero %b", mode, l, lane, sign[l], sf[l], zero[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
