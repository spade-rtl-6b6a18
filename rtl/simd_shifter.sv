// simd_shifter: SIMD logarithmic barrel shifter (Fig. 2(c) structure).
//
// A vector of four SEG-bit segments is shifted lane by lane: in Posit-8 mode
// each segment is its own lane, in Posit-16 mode pairs of segments fuse,
// in Posit-32 mode all four fuse. The shifter has log2(4*SEG)+1 stages; stage
// b moves bits by 2^b. A bit may cross a segment boundary (the Sin/Sout links
// of Fig. 2(c)) only when both segments belong to the same lane; otherwise
// the fill value enters, which is what the X0/X1-controlled muxes do.
//
// RIGHT=0: logical left shift, zeros enter from the right.
// RIGHT=1: right shift, fill[l] enters from the left (lane MSB gives an
//          arithmetic shift, as used for quire alignment).
// shamt[l] and fill[l] are indexed by lane. A shift of the lane width or
// more empties the lane. The right-shift variant and the per-lane fill
// input are this design's generalisation of the left shifter in the figure.
// Combinational.
module simd_shifter
  import spade_pkg::*;
#(
  parameter int unsigned SEG   = 8,
  parameter bit          RIGHT = 1'b0,
  localparam int unsigned SW = $clog2(4*SEG) + 1
) (
  input  logic [1:0]       mode,
  input  logic [SW-1:0]    shamt [4],
  input  logic [3:0]       fill,
  input  logic [4*SEG-1:0] din,
  output logic [4*SEG-1:0] dout
);

  localparam int unsigned W = 4*SEG;

  always_comb begin
    logic [W-1:0] cur, nxt;
    int unsigned  lane, lo, hi, lw, a;
    cur = din;
    for (int unsigned b = 0; b < SW; b++) begin
      a = 1 << b;
      for (int unsigned j = 0; j < W; j++) begin
        lane = lane_of_seg(mode, j / SEG);
        lw   = W / lanes_of(mode);
        lo   = lane * lw;
        hi   = lo + lw - 1;
        if (!shamt[lane][b]) begin
          nxt[j] = cur[j];
        end else if (!RIGHT) begin
          nxt[j] = (j >= lo + a) ? cur[j - a] : 1'b0;
        end else begin
          nxt[j] = (j + a <= hi) ? cur[j + a] : fill[lane];
        end
      end
      cur = nxt;
    end
    dout = cur;
  end

endmodule
