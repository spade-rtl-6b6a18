// sf_saturate: scale-factor saturation in front of the quire (the two
// "SF Saturate" blocks of Fig. 1).
//
// The figure gives only the name and the wiring: a scale factor goes in,
// a saturated scale factor (saq) and a shift amount (shamt) for the
// following Vector Shifter come out. This design clamps each lane's scale
// factor to the range of its posit format, [-maxscale, +maxscale] with
// maxscale = (n-2)*2^es = 6, 28, 120. When the scale is below the range the
// clipped amount is returned as a right-shift amount, so the mantissa keeps
// its value relative to the clamped scale (gradual underflow). A scale above
// the range is clamped with no shift: the final result saturates to maxpos
// in any case, as posits do not overflow. Combinational.
module sf_saturate
  import spade_pkg::*;
(
  input  logic [1:0] mode,
  input  sf_t        sf_in  [4],
  output sf_t        sf_out [4],
  output logic [7:0] shamt  [4]
);

  always_comb begin
    int lim, d;
    lim = maxscale_of(mode);
    d   = 0;
    for (int unsigned l = 0; l < 4; l++) begin
      sf_out[l] = sf_in[l];
      shamt[l]  = '0;
      if (int'(sf_in[l]) > lim) begin
        sf_out[l] = sf_t'(lim);
      end else if (int'(sf_in[l]) < -lim) begin
        d         = -lim - int'(sf_in[l]);
        sf_out[l] = sf_t'(-lim);
        shamt[l]  = (d > 255) ? 8'd255 : 8'(d);
      end
    end
  end

endmodule
