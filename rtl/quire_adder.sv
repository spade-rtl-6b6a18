// quire_adder: stage 3 of the MAC, quire accumulation (Fig. 1: Operand
// Selection, Vector SF Compare, Operand Align/Swap, Vector Quire Adder).
//
// Every quire lane holds a signed fixed-point value Q with a scale factor
// saq; its value is Q * 2^(saq - QL/2), QL being the lane width (32, 64 or
// 128 bits for Posit-8, -16, -32). Per lane:
//   * Operand Selection picks the addend by opr: none (OPR_MUL, the bypass),
//     the third operand V3 (OPR_FMA) or the quire register (OPR_MAC);
//   * Vector SF Compare decides which operand has the larger scale factor
//     (a zero operand always counts as the smaller one);
//   * Align/Swap routes the larger one to Q1 and arithmetically right-shifts
//     the other, Q0, by the scale difference;
//   * the Vector Quire Adder adds Q1 + Q0 with carries that stop at lane
//     boundaries; the result takes Q1's scale factor.
// flag_ovf[l] reports a signed overflow of lane l (the "flags" of Fig. 1).
// The alignment by scale difference with arithmetic right shifts follows the
// paper; lane widths, the zero rule and the truncating shift are this
// design's choices. Combinational.
module quire_adder
  import spade_pkg::*;
(
  input  logic [1:0]         mode,
  input  logic [1:0]         opr,
  input  logic [QUIRE_W-1:0] q_p,     // product
  input  sf_t                sf_p [4],
  input  logic [QUIRE_W-1:0] q_c,     // third operand V3
  input  sf_t                sf_c [4],
  input  logic [QUIRE_W-1:0] q_acc,   // quire register
  input  sf_t                sf_acc [4],
  output logic [QUIRE_W-1:0] q_r,
  output sf_t                sf_r [4],
  output logic [3:0]         flag_ovf
);

  localparam int unsigned SEG = QUIRE_W / 4;

  logic [QUIRE_W-1:0] q_s, q1, q0, q0_al;
  sf_t                sf_s [4];
  logic [3:0]         zero_p, zero_s, swap, fill0;
  logic [7:0]         shamt [4];

  // Operand Selection.
  always_comb begin
    case (opr)
      OPR_FMA: begin q_s = q_c;   sf_s = sf_c;   end
      OPR_MAC: begin q_s = q_acc; sf_s = sf_acc; end
      default: begin q_s = '0;    sf_s = sf_p;   end
    endcase
  end

  // Vector SF Compare: lane zero tests and scale comparison.
  always_comb begin
    logic [3:0] segz_p, segz_s;
    int         d;
    for (int unsigned s = 0; s < 4; s++) begin
      segz_p[s] = q_p[s*SEG +: SEG] == '0;
      segz_s[s] = q_s[s*SEG +: SEG] == '0;
    end
    case (mode)
      MODE_P8:  begin zero_p = segz_p; zero_s = segz_s; end
      MODE_P16: begin
        zero_p = {2'b11, &segz_p[3:2], &segz_p[1:0]};
        zero_s = {2'b11, &segz_s[3:2], &segz_s[1:0]};
      end
      default:  begin zero_p = {3'b111, &segz_p}; zero_s = {3'b111, &segz_s}; end
    endcase
    for (int unsigned l = 0; l < 4; l++) begin
      // swap = 1: the selected operand is the larger one (goes to Q1).
      if (zero_s[l])      swap[l] = 1'b0;
      else if (zero_p[l]) swap[l] = 1'b1;
      else                swap[l] = sf_s[l] > sf_p[l];
      d = swap[l] ? int'(sf_s[l]) - int'(sf_p[l]) : int'(sf_p[l]) - int'(sf_s[l]);
      if (d < 0)        shamt[l] = 8'd0;
      else if (d > 255) shamt[l] = 8'd255;
      else              shamt[l] = 8'(d);
      sf_r[l] = swap[l] ? sf_s[l] : sf_p[l];
    end
  end

  // Operand Align/Swap.
  always_comb begin
    int unsigned l, lw;
    lw = QUIRE_W / lanes_of(mode);
    for (int unsigned s = 0; s < 4; s++) begin
      l = lane_of_seg(mode, s);
      q1[s*SEG +: SEG] = swap[l] ? q_s[s*SEG +: SEG] : q_p[s*SEG +: SEG];
      q0[s*SEG +: SEG] = swap[l] ? q_p[s*SEG +: SEG] : q_s[s*SEG +: SEG];
    end
    fill0 = '0;
    for (int unsigned k = 0; k < 4; k++) begin
      if (k < lanes_of(mode)) fill0[k] = q0[k*lw + lw - 1];
    end
  end

  simd_shifter #(.SEG(SEG), .RIGHT(1'b1)) u_align (
    .mode(mode), .shamt(shamt), .fill(fill0), .din(q0), .dout(q0_al)
  );

  // Vector Quire Adder with lane-local carries.
  always_comb begin
    logic         carry;
    logic [SEG:0] sum;
    int unsigned  l;
    logic         a_msb, b_msb;
    carry    = 1'b0;
    flag_ovf = '0;
    q_r      = '0;
    for (int unsigned s = 0; s < 4; s++) begin
      l   = lane_of_seg(mode, s);
      sum = {1'b0, q1[s*SEG +: SEG]} + {1'b0, q0_al[s*SEG +: SEG]}
          + {{SEG{1'b0}}, (seg_is_lane_lsb(mode, s) ? 1'b0 : carry)};
      q_r[s*SEG +: SEG] = sum[SEG-1:0];
      carry = sum[SEG];
      if (s == 3 || seg_is_lane_lsb(mode, s + 1)) begin
        a_msb = q1[s*SEG + SEG - 1];
        b_msb = q0_al[s*SEG + SEG - 1];
        flag_ovf[l] = (a_msb == b_msb) && (sum[SEG-1] != a_msb);
      end
    end
  end

endmodule
