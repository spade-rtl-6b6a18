// booth_mul7: 7 x 7 bit unsigned multiplier using radix-4 modified Booth
// recoding; one of the sixteen PD_ij sub-multipliers of simd_multiplier.
//
// The multiplier b is zero-extended to 10 bits and recoded into five digits
// d_i in {-2,-1,0,1,2} from the bit triplets (b[2i+1], b[2i], b[2i-1]).
// Each digit selects 0, +-a or +-2a; the five signed partial products are
// summed with weights 4^i. The paper names modified Booth multipliers as
// the sub-multiplier type; the 7-bit width follows from Fig. 2(d)-(f),
// where a 28-bit mantissa is cut into four chunks and products PD_ij
// occupy 14-bit slots. Combinational.
module booth_mul7 (
  input  logic [6:0]  a,
  input  logic [6:0]  b,
  output logic [13:0] p
);

  always_comb begin
    logic [9:0]         bx;
    logic [2:0]         trip;
    logic signed [17:0] pp;
    logic signed [17:0] acc;
    bx  = {2'b00, b, 1'b0};   // b[-1] = 0 at bit 0
    acc = '0;
    for (int i = 0; i < 5; i++) begin
      trip = bx[2*i +: 3];
      case (trip)
        3'b001, 3'b010: pp =  $signed({11'd0, a});
        3'b011:         pp =  $signed({10'd0, a, 1'b0});
        3'b100:         pp = -$signed({10'd0, a, 1'b0});
        3'b101, 3'b110: pp = -$signed({11'd0, a});
        default:        pp = '0;
      endcase
      acc = acc + (pp <<< (2*i));
    end
    p = acc[13:0];
  end

endmodule
