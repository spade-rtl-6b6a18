// tb_simd_lod: checks the SIMD leading-one detector. Words are built with a
// random number of leading zeros per segment, so every count is exercised;
// the expected count and valid flag come from a bit-by-bit scan of each lane.
module tb_simd_lod;
  import spade_pkg::*;

  logic [1:0]   mode;
  logic [31:0]  din8;
  logic [127:0] din32;
  logic [5:0]   cnt8 [4];
  logic [7:0]   cnt32 [4];
  logic [3:0]   v8, v32;
  int checks = 0, failures = 0;

  simd_lod #(.SEG(8))  dut8  (.mode(mode), .din(din8),  .cnt(cnt8),  .valid(v8));
  simd_lod #(.SEG(32)) dut32 (.mode(mode), .din(din32), .cnt(cnt32), .valid(v32));

  function automatic int ref_lzc(input logic [127:0] d, input int lo, input int lw);
    for (int i = lw - 1; i >= 0; i--) if (d[lo + i]) return lw - 1 - i;
    return lw;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int nl, c;
      mode = 2'(t % 3);
      din8 = $urandom >> ($urandom % 33);
      din32 = {$urandom, $urandom, $urandom, $urandom} >> ($urandom % 129);
      for (int s = 0; s < 4; s++) if ($urandom % 4 == 0) din8[8*s +: 8] = 8'($urandom) >> ($urandom % 9);
      #1;
      nl = (mode == MODE_P8) ? 4 : (mode == MODE_P16) ? 2 : 1;
      for (int l = 0; l < nl; l++) begin
        c = ref_lzc(128'(din8), l * (32 / nl), 32 / nl);
        checks++;
        if (int'(cnt8[l]) != c || v8[l] != (c != 32 / nl)) begin
          failures++;
          $display("SEG8 mode %0d lane %0d din %h: cnt %0d want %0d", mode, l, din8, cnt8[l], c);
        end
        c = ref_lzc(din32, l * (128 / nl), 128 / nl);
        checks++;
        if (int'(cnt32[l]) != c || v32[l] != (c != 128 / nl)) begin
          failures++;
          $display("SEG32 mode %0d lane %0d: cnt %0d want %0d", mode, l, cnt32[l], c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
