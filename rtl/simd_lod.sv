// simd_lod: SIMD leading-one detector (Fig. 2(b) structure).
//
// Four segment detectors (LOD_1..LOD_4) each give a valid flag VM0 (segment
// holds a one) and a count CM0 (zeros above its leading one). Pairs are
// merged into 2*SEG-bit results: CM1 = VM0_hi ? CM0_hi : SEG + CM0_lo and
// VM1 = VM0_hi | VM0_lo; the two pair results merge the same way into CM2.
// The mode picks which level each lane reads: four CM0s (Posit-8), two CM1s
// (Posit-16) or one CM2 (Posit-32).
//
// cnt[l] is the number of leading zeros of lane l, equal to the lane width
// when the lane is all zero; valid[l] is 0 in that case. Combinational.
module simd_lod
  import spade_pkg::*;
#(
  parameter int unsigned SEG = 8,
  localparam int unsigned CW = $clog2(4*SEG) + 1
) (
  input  logic [1:0]       mode,
  input  logic [4*SEG-1:0] din,
  output logic [CW-1:0]    cnt   [4],
  output logic [3:0]       valid
);

  logic [CW-1:0] cm0 [4];
  logic [3:0]    vm0;
  logic [CW-1:0] cm1 [2];
  logic [1:0]    vm1;
  logic [CW-1:0] cm2;
  logic          vm2;

  // Segment-level leading-one detectors.
  always_comb begin
    for (int unsigned s = 0; s < 4; s++) begin
      cm0[s] = CW'(SEG);
      vm0[s] = 1'b0;
      for (int i = 0; i < int'(SEG); i++) begin
        if (din[s*SEG + i]) begin
          cm0[s] = CW'(SEG - 1 - i);
          vm0[s] = 1'b1;
        end
      end
    end
  end

  // Pair and full-width merge.
  always_comb begin
    for (int unsigned p = 0; p < 2; p++) begin
      cm1[p] = vm0[2*p+1] ? cm0[2*p+1] : CW'(SEG) + cm0[2*p];
      vm1[p] = vm0[2*p+1] | vm0[2*p];
    end
    cm2 = vm1[1] ? cm1[1] : CW'(2*SEG) + cm1[0];
    vm2 = vm1[1] | vm1[0];
  end

  always_comb begin
    for (int unsigned l = 0; l < 4; l++) begin
      cnt[l] = '0;
    end
    valid = '0;
    case (mode)
      MODE_P8: begin
        for (int unsigned l = 0; l < 4; l++) cnt[l] = cm0[l];
        valid = vm0;
      end
      MODE_P16: begin
        cnt[0] = cm1[0];
        cnt[1] = cm1[1];
        valid  = {2'b00, vm1};
      end
      default: begin
        cnt[0] = cm2;
        valid  = {3'b000, vm2};
      end
    endcase
  end

endmodule
