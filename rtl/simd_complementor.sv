// simd_complementor: mode-aware two's complementer (Fig. 2(a) structure).
//
// The vector is cut into four SEG-bit segments. Each segment is XORed with
// the negate flag of the lane it belongs to and an adder adds a carry-in.
// The carry-in of a segment is the lane's negate flag when the segment is
// the lowest one of its lane, and the carry-out of the segment below
// otherwise. So Posit-8 mode has no carry between segments, Posit-16 mode
// carries inside each pair and Posit-32 mode carries across the full width,
// as the paper describes.
//
// neg[l] is indexed by lane number (see spade_pkg). Passing the lane MSBs
// gives the absolute-value operation of Fig. 2(a), whose muxes select the
// sign bit A7/A15/A31; other sign sources (a product sign) are this
// design's generalisation. Purely combinational.
module simd_complementor
  import spade_pkg::*;
#(
  parameter int unsigned SEG = 8
) (
  input  logic [1:0]       mode,
  input  logic [3:0]       neg,
  input  logic [4*SEG-1:0] din,
  output logic [4*SEG-1:0] dout
);

  always_comb begin
    logic carry;
    logic n;
    logic [SEG:0] sum;
    carry = 1'b0;
    dout  = '0;
    for (int unsigned s = 0; s < 4; s++) begin
      n   = neg[lane_of_seg(mode, s)];
      sum = {1'b0, din[s*SEG +: SEG] ^ {SEG{n}}}
          + {{SEG{1'b0}}, (seg_is_lane_lsb(mode, s) ? n : carry)};
      dout[s*SEG +: SEG] = sum[SEG-1:0];
      carry = sum[SEG];
    end
  end

endmodule
