// tb_act_func: checks the ReLU unit on random words in every mode: with the
// unit enabled a negative lane must become zero (and be reported), NaR and
// non-negative lanes must pass; disabled, the word must pass unchanged.
module tb_act_func;
  import spade_pkg::*;

  logic        en;
  logic [1:0]  mode;
  logic [31:0] din, dout;
  logic [3:0]  clipped;
  int checks = 0, failures = 0;

  act_func dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int nl, n;
      logic [31:0] want;
      logic [3:0] wclip;
      en = 1'($urandom);
      mode = 2'(t % 3);
      nl = (mode == MODE_P8) ? 4 : (mode == MODE_P16) ? 2 : 1;
      n = 32 / nl;
      din = $urandom;
      if (t % 10 == 0) din = (mode == MODE_P8) ? 32'h80_80_80_80 : (mode == MODE_P16) ? 32'h8000_8000 : 32'h8000_0000;
      #1;
      want = din;
      wclip = 0;
      for (int l = 0; l < nl; l++) begin
        logic [31:0] lane;
        lane = (n == 32) ? din : ((din >> (l * n)) & ((32'd1 << n) - 1));
        if (en && lane[n - 1] && lane != (32'd1 << (n - 1))) begin
          want = (n == 32) ? 0 : (want & ~(((32'd1 << n) - 1) << (l * n)));
          wclip[l] = 1;
        end
      end
      checks++;
      if (dout != want || clipped != wclip) begin
        failures++;
        $display("en %b mode %0d din %h: got %h want %h", en, mode, din, dout, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
