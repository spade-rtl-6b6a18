// posit_encoder: stage 5 of the MAC, rounding and packing (Fig. 1: POSIT
// block of Output Encoding).
//
// Inputs per lane are the sign s_r, the scale factor sa_r and the
// normalized magnitude a_r (hidden one at the quire lane MSB). For a lane of
// an n-bit posit the encoder works on a 2n-bit lane of a 64-bit vector:
//   * the scale factor is clamped to [-maxscale, maxscale] (results beyond
//     it become maxpos or minpos: posits never round to zero or NaR);
//   * regime k = sa >> es, exponent e = sa mod 2^es;
//   * the lane is loaded with {10 or 01, e, fraction} and shifted right by
//     k (k >= 0, ones enter) or -k-1 (k < 0, zeros enter) in the SIMD
//     shifter, which produces the k+1 ones or -k zeros of the regime;
//   * the top n-1 bits are the posit body; the next bit is the guard bit
//     and all lower bits (with those of a_r that did not fit) are the
//     sticky bit; the body is rounded to nearest, ties to even;
//   * negative lanes are two's-complemented by the SIMD complementor.
// Zero lanes give 0 and NaR lanes give 10...0. The paper gives rounding to
// nearest even with guard, round and sticky bits; the regime shifter trick
// is this design's. Combinational.
module posit_encoder
  import spade_pkg::*;
(
  input  logic [1:0]         mode,
  input  logic [3:0]         sign,
  input  sf_t                sf   [4],
  input  logic [QUIRE_W-1:0] mag,
  input  logic [3:0]         zero,
  input  logic [3:0]         nar,
  output logic [WORD_W-1:0]  v
);

  localparam int unsigned EW = 64;   // encoder vector, 2n bits per lane

  logic [EW-1:0]     tmp, sh;
  logic [6:0]        shamt  [4];
  logic [3:0]        fill, sticky0, sat_hi, sat_lo;
  logic [WORD_W-1:0] body_v, packed_v;

  // Regime/exponent/fraction assembly.
  always_comb begin
    int unsigned nl, ql, el, es, fw;
    int          ms, sfc, k, e;
    logic [1:0]  rs;
    nl  = lanes_of(mode);
    ql  = QUIRE_W / nl;
    el  = EW / nl;
    es  = es_of(mode);
    ms  = maxscale_of(mode);
    fw  = el - 2 - es;          // fraction bits kept
    sfc = 0;
    k   = 0;
    e   = 0;
    rs  = 2'b00;
    tmp = '0;
    fill = '0;
    sticky0 = '0;
    sat_hi = '0;
    sat_lo = '0;
    for (int unsigned l = 0; l < 4; l++) shamt[l] = '0;
    for (int unsigned l = 0; l < 4; l++) begin
      if (l < nl) begin
        sfc = int'(sf[l]);
        sat_hi[l] = sfc > ms;
        sat_lo[l] = sfc < -ms;
        if (sat_hi[l]) sfc = ms;
        if (sat_lo[l]) sfc = -ms;
        k = sfc >>> es;
        e = sfc - (k << es);
        rs = (k >= 0) ? 2'b10 : 2'b01;
        fill[l]  = (k >= 0);
        shamt[l] = (k >= 0) ? 7'(k) : 7'(-k - 1);
        tmp[l*el + el - 1] = rs[1];
        tmp[l*el + el - 2] = rs[0];
        for (int unsigned i = 0; i < 2; i++) begin
          if (i < es) tmp[l*el + el - 3 - i] = e[es - 1 - i];
        end
        for (int unsigned i = 0; i < EW; i++) begin
          if (i < fw) tmp[l*el + i] = mag[l*ql + ql - 1 - fw + i];
        end
        for (int unsigned i = 0; i < QUIRE_W; i++) begin
          if (i + fw + 1 < ql) sticky0[l] = sticky0[l] | mag[l*ql + i];
        end
      end
    end
  end

  simd_shifter #(.SEG(EW/4), .RIGHT(1'b1)) u_regime (
    .mode(mode), .shamt(shamt), .fill(fill), .din(tmp), .dout(sh)
  );

  // Guard/sticky extraction, round to nearest even, saturation.
  always_comb begin
    int unsigned  nl, n, el;
    logic [31:0]  body, ones;
    logic         guard, sticky, rnd;
    nl = lanes_of(mode);
    n  = WORD_W / nl;
    el = EW / nl;
    body = '0;
    ones = '0;
    guard = 1'b0;
    sticky = 1'b0;
    rnd = 1'b0;
    body_v = '0;
    for (int unsigned l = 0; l < 4; l++) begin
      if (l < nl) begin
        body   = '0;
        for (int unsigned i = 0; i < WORD_W - 1; i++) begin
          if (i < n - 1) body[i] = sh[l*el + el - n + 1 + i];
        end
        guard  = sh[l*el + el - n];
        sticky = sticky0[l];
        for (int unsigned i = 0; i < EW; i++) begin
          if (i + n < el) sticky = sticky | sh[l*el + i];
        end
        ones = (32'd1 << (n - 1)) - 32'd1;
        rnd  = guard & (body[0] | sticky);
        if (rnd && body != ones) body = body + 32'd1;
        if (sat_hi[l]) body = ones;
        if (sat_lo[l]) body = 32'd1;
        for (int unsigned i = 0; i < WORD_W - 1; i++) begin
          if (i < n - 1) body_v[l*n + i] = body[i];
        end
      end
    end
  end

  simd_complementor #(.SEG(8)) u_sign (
    .mode(mode), .neg(sign), .din(body_v), .dout(packed_v)
  );

  always_comb begin
    int unsigned nl, n;
    nl = lanes_of(mode);
    n  = WORD_W / nl;
    v  = packed_v;
    for (int unsigned l = 0; l < 4; l++) begin
      if (l < nl) begin
        for (int unsigned i = 0; i < WORD_W; i++) begin
          if (i < n) begin
            if (nar[l])       v[l*n + i] = (i == n - 1);
            else if (zero[l]) v[l*n + i] = 1'b0;
          end
        end
      end
    end
  end

endmodule
