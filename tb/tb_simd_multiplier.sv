// tb_simd_multiplier: checks the precision-scalable multiplier: four 7x7,
// two 14x14 or one 28x28 unsigned products at the bit positions of
// Fig. 2(d)-(f), against products computed with the * operator. Includes
// all-ones operands, the Booth recoding's worst case.
module tb_simd_multiplier;
  import spade_pkg::*;

  logic [1:0]  mode;
  logic [27:0] a, b;
  logic [55:0] p;
  int checks = 0, failures = 0;

  simd_multiplier dut (.mode(mode), .a(a), .b(b), .p(p));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [55:0] want;
      mode = 2'(t % 3);
      a = 28'($urandom);
      b = 28'($urandom);
      if (t < 30) begin a = '1; b = '1; end
      #1;
      case (mode)
        MODE_P8: begin
          want = 0;
          for (int l = 0; l < 4; l++) want |= 56'(a[7*l +: 7] * b[7*l +: 7]) << (14 * l);
        end
        MODE_P16: want = 56'(a[13:0] * b[13:0]) | (56'(a[27:14] * b[27:14]) << 28);
        default:  want = 56'(a) * 56'(b);
      endcase
      checks++;
      if (p !== want) begin
        failures++;
        $display("mode %0d a %h b %h: got %h want %h", mode, a, b, p, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
