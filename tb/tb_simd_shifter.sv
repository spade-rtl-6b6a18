// tb_simd_shifter: checks the SIMD barrel shifter in both directions (left
// logical and right with a per-lane fill bit), all modes and random shift
// amounts including shifts of a whole lane or more. The expected lanes are
// computed with ordinary shift operators on isolated lanes.
module tb_simd_shifter;
  import spade_pkg::*;

  logic [1:0]  mode;
  logic [5:0]  sh [4];
  logic [3:0]  fill;
  logic [31:0] din, dl, dr;
  int checks = 0, failures = 0;

  simd_shifter #(.SEG(8), .RIGHT(1'b0)) dut_l (.mode(mode), .shamt(sh), .fill(fill), .din(din), .dout(dl));
  simd_shifter #(.SEG(8), .RIGHT(1'b1)) dut_r (.mode(mode), .shamt(sh), .fill(fill), .din(din), .dout(dr));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int nl, lw;
      logic [63:0] lane, mask, el, er;
      mode = 2'(t % 3);
      nl = (mode == MODE_P8) ? 4 : (mode == MODE_P16) ? 2 : 1;
      lw = 32 / nl;
      for (int l = 0; l < 4; l++) sh[l] = 6'($urandom % (lw + 2));
      fill = 4'($urandom);
      din = $urandom;
      #1;
      mask = (64'd1 << lw) - 1;
      for (int l = 0; l < nl; l++) begin
        lane = (64'(din) >> (l * lw)) & mask;
        el = (lane << sh[l]) & mask;
        // right shift with fill: shift the lane with fill bits above it
        er = 64'(((({128{fill[l]}} << lw) | 128'(lane)) >> sh[l])) & mask;
        checks += 2;
        if (((64'(dl) >> (l * lw)) & mask) != el) begin
          failures++;
          $display("left mode %0d lane %0d sh %0d: din %h got %h", mode, l, sh[l], din, dl);
        end
        if (((64'(dr) >> (l * lw)) & mask) != er) begin
          failures++;
          $display("right mode %0d lane %0d sh %0d: din %h got %h", mode, l, sh[l], din, dr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
