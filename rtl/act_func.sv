// act_func: activation function unit between the array and the output
// feature map (AF of Fig. 3).
//
// Applies ReLU lane by lane to a SIMD posit word: a lane whose sign bit is
// set becomes zero, except NaR (10...0), which passes unchanged. Because a
// posit's sign bit orders it like a two's-complement integer, no decoding
// is needed. With en = 0 the word passes unchanged. The lane split follows
// mode (4 x 8, 2 x 16, 1 x 32 bits). clipped[l] reports that lane l was set
// to zero. The paper names the AF block only; ReLU is this design's choice.
// Combinational.
module act_func
  import spade_pkg::*;
(
  input  logic              en,
  input  logic [1:0]        mode,
  input  logic [WORD_W-1:0] din,
  output logic [WORD_W-1:0] dout,
  output logic [3:0]        clipped
);

  always_comb begin
    int unsigned nl, n;
    logic [31:0] lane_mask;
    logic [31:0] lane;
    nl = lanes_of(mode);
    n  = WORD_W / nl;
    lane_mask = (n == 32) ? 32'hFFFF_FFFF : ((32'd1 << n) - 32'd1);
    dout    = din;
    clipped = '0;
    for (int unsigned l = 0; l < 4; l++) begin
      lane = (din >> (l*n)) & lane_mask;
      if (en && l < nl && lane[n-1] && lane != (32'd1 << (n-1))) begin
        dout       = dout & ~(lane_mask << (l*n));
        clipped[l] = 1'b1;
      end
    end
  end

endmodule
