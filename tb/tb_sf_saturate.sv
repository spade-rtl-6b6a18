// tb_sf_saturate: checks scale-factor saturation for every scale factor in
// [-300, 300] and every mode: the output must be the input clamped to
// [-maxscale, maxscale] (6, 28, 120), and the shift amount must be the
// amount clipped off at the bottom (zero otherwise).
module tb_sf_saturate;
  import spade_pkg::*;

  logic [1:0] mode;
  sf_t        sf_in [4], sf_out [4];
  logic [7:0] shamt [4];
  int checks = 0, failures = 0;

  sf_saturate dut (.mode(mode), .sf_in(sf_in), .sf_out(sf_out), .shamt(shamt));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lim [3] = '{6, 28, 120};
    for (int m = 0; m < 3; m++) begin
      for (int s = -300; s <= 300; s++) begin
        int want, wsh;
        mode = 2'(m);
        for (int l = 0; l < 4; l++) sf_in[l] = sf_t'(s + l);
        #1;
        for (int l = 0; l < 4; l++) begin
          want = (s + l > lim[m]) ? lim[m] : (s + l < -lim[m]) ? -lim[m] : s + l;
          wsh  = (s + l < -lim[m]) ? -lim[m] - (s + l) : 0;
          if (wsh > 255) wsh = 255;
          checks++;
          if (int'(sf_out[l]) != want || int'(shamt[l]) != wsh) begin
            failures++;
            $display("mode %0d sf %0d: got %0d/%0d", m, s + l, sf_out[l], shamt[l]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
