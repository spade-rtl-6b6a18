// quire_normalizer: stage 4 of the MAC, reconstruction and normalization
// (Fig. 1: Vector 2'S Comp. driven by the quire MSB, Vector LZC, Normalize,
// Vector Adder).
//
// Per quire lane: the sign s_r is the lane MSB; the lane is turned into its
// magnitude by the SIMD complementor; the SIMD LOD counts its leading zeros;
// the SIMD shifter moves the leading one to the lane MSB (a_r, the hidden
// bit followed by the fraction); and the adder recomputes the scale factor
// sa_r = saq + QL/2 - 1 - lzc, QL/2 being the binary point of the lane.
// zero[l] marks an all-zero lane. Combinational.
module quire_normalizer
  import spade_pkg::*;
(
  input  logic [1:0]         mode,
  input  logic [QUIRE_W-1:0] q,
  input  sf_t                sfq  [4],
  output logic [3:0]         sign,
  output sf_t                sf   [4],
  output logic [QUIRE_W-1:0] mag,
  output logic [3:0]         zero
);

  localparam int unsigned SEG = QUIRE_W / 4;

  logic [QUIRE_W-1:0] absq;
  logic [7:0]         lzc [4];
  logic [3:0]         valid;

  always_comb begin
    int unsigned lw;
    lw   = QUIRE_W / lanes_of(mode);
    sign = '0;
    for (int unsigned l = 0; l < 4; l++) begin
      if (l < lanes_of(mode)) sign[l] = q[l*lw + lw - 1];
    end
  end

  simd_complementor #(.SEG(SEG)) u_abs (
    .mode(mode), .neg(sign), .din(q), .dout(absq)
  );

  simd_lod #(.SEG(SEG)) u_lzc (
    .mode(mode), .din(absq), .cnt(lzc), .valid(valid)
  );

  simd_shifter #(.SEG(SEG), .RIGHT(1'b0)) u_norm (
    .mode(mode), .shamt(lzc), .fill(4'b0000), .din(absq), .dout(mag)
  );

  always_comb begin
    int half;
    half = int'(QUIRE_W / lanes_of(mode)) / 2;
    for (int unsigned l = 0; l < 4; l++) begin
      sf[l]   = sf_t'(int'(sfq[l]) + half - 1 - int'(lzc[l]));
      zero[l] = (l < lanes_of(mode)) ? !valid[l] : 1'b1;
    end
  end

endmodule
