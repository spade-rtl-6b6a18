// tb_simd_complementor: checks the mode-aware two's complementer against a
// lane-by-lane negation computed with plain integer arithmetic, for random
// words, random negate flags and all three modes, at segment widths 8 (posit
// words) and 32 (quire).
module tb_simd_complementor;
  import spade_pkg::*;

  logic [1:0]   mode;
  logic [3:0]   neg;
  logic [31:0]  din8, dout8;
  logic [127:0] din32, dout32;
  int checks = 0, failures = 0;

  simd_complementor #(.SEG(8))  dut8  (.mode(mode), .neg(neg), .din(din8),  .dout(dout8));
  simd_complementor #(.SEG(32)) dut32 (.mode(mode), .neg(neg), .din(din32), .dout(dout32));

  function automatic logic [127:0] ref_comp(input logic [127:0] d, input int w,
                                            input logic [1:0] m, input logic [3:0] ng);
    int nl, lw;
    logic [127:0] r, lane, mask;
    nl = (m == MODE_P8) ? 4 : (m == MODE_P16) ? 2 : 1;
    lw = w / nl;
    mask = (lw == 128) ? '1 : ((128'd1 << lw) - 1);
    r = 0;
    for (int l = 0; l < nl; l++) begin
      lane = (d >> (l * lw)) & mask;
      if (ng[l]) lane = (0 - lane) & mask;
      r |= lane << (l * lw);
    end
    return r;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      mode  = 2'(t % 3);
      neg   = 4'($urandom);
      din8  = $urandom;
      din32 = {$urandom, $urandom, $urandom, $urandom};
      if (t % 7 == 0) din8[7:0] = 8'h00;      // carry ripple cases
      if (t % 5 == 0) din32[31:0] = 32'h0;
      #1;
      checks += 2;
      if (dout8 !== ref_comp(128'(din8), 32, mode, neg)) begin
        failures++;
        $display("SEG8 mode %0d neg %b din %h: got %h", mode, neg, din8, dout8);
      end
      if (dout32 !== ref_comp(din32, 128, mode, neg)) begin
        failures++;
        $display("SEG32 mode %0d neg %b: got %h", mode, neg, dout32);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
