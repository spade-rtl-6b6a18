// posit_decoder: SIMD posit unpacking, stage 1 of the MAC (POSIT blocks of
// Fig. 1).
//
// One 32-bit word is read as four Posit(8,0), two Posit(16,1) or one
// Posit(32,2) values. For each lane:
//   1. negative lanes are two's-complemented (simd_complementor, neg = MSB);
//   2. the regime run is made a run of zeros by XORing the lane with its
//      first regime bit, the sign position is cleared, and the SIMD LOD
//      counts cnt = 1 + run length m;
//   3. the SIMD shifter moves the lane left by m, which puts the regime
//      terminator at lane bit n-2, so exponent and fraction start at n-3;
//   4. regime k = r0 ? m-1 : -m and scale factor sf = k*2^es + exponent;
//   5. the mantissa 1.f is packed into the 28-bit mantissa vector: 7 bits per
//      Posit-8 lane (1.6), 14 bits per Posit-16 lane (1.13) and 28 bits for
//      Posit-32 (1.27). The lowest fraction bit of the shifted field is
//      always zero for a posit with a terminator, so nothing is lost.
// Zero and NaR (10...0) lanes are flagged; their mantissa is 0 and their
// scale factor is the format's smallest, so they do not disturb alignment.
// The paper gives the steps (complement, LOD, shift, scale factor); the
// packing of the mantissa vector follows the multiplier's chunking.
// Combinational.
module posit_decoder
  import spade_pkg::*;
(
  input  logic [1:0]        mode,
  input  logic [WORD_W-1:0] v,
  output logic [3:0]        sign,
  output sf_t               sf    [4],
  output logic [MANT_W-1:0] mant,
  output logic [3:0]        zero,
  output logic [3:0]        nar
);

  logic [WORD_W-1:0] x, y, xs;
  logic [3:0]        r0;
  logic [5:0]        cnt   [4];
  logic [5:0]        shamt [4];
  logic [3:0]        lod_valid;

  // Lane sign bits, zero and NaR detection.
  always_comb begin
    int unsigned lw;
    lw = WORD_W / lanes_of(mode);
    sign = '0;
    zero = '0;
    nar  = '0;
    for (int unsigned l = 0; l < 4; l++) begin
      if (l < lanes_of(mode)) begin
        sign[l] = v[l*lw + lw - 1];
        zero[l] = (({1'b0, v} >> (l*lw)) & ((33'd1 << lw) - 1)) == 0;
        nar[l]  = (({1'b0, v} >> (l*lw)) & ((33'd1 << lw) - 1)) == (33'd1 << (lw - 1));
      end
    end
  end

  simd_complementor #(.SEG(8)) u_comp (
    .mode(mode), .neg(sign), .din(v), .dout(x)
  );

  // Regime run to zeros, sign position cleared.
  always_comb begin
    int unsigned lw, l;
    lw = WORD_W / lanes_of(mode);
    r0 = '0;
    for (int unsigned q = 0; q < 4; q++) begin
      if (q < lanes_of(mode)) r0[q] = x[q*lw + lw - 2];
    end
    for (int unsigned j = 0; j < WORD_W; j++) begin
      l    = j / lw;
      y[j] = ((j % lw) == lw - 1) ? 1'b0 : (x[j] ^ r0[l]);
    end
  end

  simd_lod #(.SEG(8)) u_lod (
    .mode(mode), .din(y), .cnt(cnt), .valid(lod_valid)
  );

  always_comb begin
    for (int unsigned l = 0; l < 4; l++) begin
      shamt[l] = (cnt[l] == 0) ? 6'd0 : cnt[l] - 6'd1;   // run length m
    end
  end

  simd_shifter #(.SEG(8), .RIGHT(1'b0)) u_shift (
    .mode(mode), .shamt(shamt), .fill(4'b0000), .din(x), .dout(xs)
  );

  // Field extraction and scale factor.
  always_comb begin
    int k, e, m;
    mant = '0;
    for (int unsigned l = 0; l < 4; l++) sf[l] = sf_t'(-maxscale_of(mode));
    case (mode)
      MODE_P8: begin
        for (int unsigned l = 0; l < 4; l++) begin
          m = int'(shamt[l]);
          k = r0[l] ? m - 1 : -m;
          if (!zero[l] && !nar[l]) begin
            sf[l] = sf_t'(k);
            mant[7*l +: 7] = {1'b1, xs[8*l +: 6]};
          end
        end
      end
      MODE_P16: begin
        for (int unsigned l = 0; l < 2; l++) begin
          m = int'(shamt[l]);
          k = r0[l] ? m - 1 : -m;
          e = int'(xs[16*l + 13]);
          if (!zero[l] && !nar[l]) begin
            sf[l] = sf_t'(2*k + e);
            mant[14*l +: 14] = {1'b1, xs[16*l +: 13]};
          end
        end
      end
      default: begin
        m = int'(shamt[0]);
        k = r0[0] ? m - 1 : -m;
        e = int'(xs[29:28]);
        if (!zero[0] && !nar[0]) begin
          sf[0] = sf_t'(4*k + e);
          mant  = {1'b1, xs[27:1]};
        end
      end
    endcase
  end

endmodule
