// tb_spade_pe: checks one processing element. Dot products of random
// lengths are streamed in every mode; the PE must forward weights, features
// and the control word unchanged one cycle later, clear done when a new dot
// product starts, and raise done with the correctly rounded result (exact,
// or one code off as the quire truncates on alignment) at the sixth clock
// edge after the edge that captured the last operands.
module tb_spade_pe;
  import spade_pkg::*;
  import posit_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        in_valid = 0, in_first = 0, in_last = 0;
  logic [1:0]  in_mode = 0;
  logic [31:0] wt_in = 0, if_in = 0;
  logic        out_valid, out_first, out_last, done;
  logic [1:0]  out_mode;
  logic [31:0] wt_out, if_out, result;
  logic [3:0]  flags_nar;
  int checks = 0, failures = 0, exact = 0, near = 0;

  spade_pe dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] rand_word(input int n, input int lim);
    logic [31:0] w, p;
    w = 0;
    for (int l = 0; l < 32 / n; l++) begin
      do p = lane_get($urandom, n, 0);
      while (p == 0 || is_nar(p, n) || scale_of(p, n) > lim || scale_of(p, n) < -lim);
      w = lane_set(w, n, l, p);
    end
    return w;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 60; d++) begin
      int n, K, lim;
      logic [1:0] m;
      kq_t acc [4];
      logic [31:0] want;
      m = 2'(d % 3);
      n = (m == MODE_P8) ? 8 : (m == MODE_P16) ? 16 : 32;
      lim = (n == 8) ? 2 : (n == 16) ? 10 : 40;
      K = 1 + $urandom % 10;
      for (int l = 0; l < 4; l++) acc[l] = '0;
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        in_valid = 1; in_first = (k == 0); in_last = (k == K - 1); in_mode = m;
        wt_in = rand_word(n, lim); if_in = rand_word(n, lim);
        for (int l = 0; l < 32 / n; l++)
          acc[l] = acc[l] + mul_kq(lane_get(wt_in, n, l), lane_get(if_in, n, l), n);
        @(posedge clk);
        #1;
        checks++;
        if (wt_out != wt_in || if_out != if_in || out_valid != 1'b1 || out_first != (k == 0) ||
            out_last != (k == K - 1) || out_mode != m) begin
          failures++;
          $display("forwarding mismatch");
        end
        if (k == 0) begin
          checks++;
          if (done) begin failures++; $display("done not cleared by first"); end
        end
      end
      @(negedge clk);
      in_valid = 0; in_first = 0; in_last = 0;
      want = 0;
      for (int l = 0; l < 32 / n; l++) want = lane_set(want, n, l, encode(acc[l], n));
      // last operands were captured at the edge before this negedge; the
      // MAC result leaves its pipeline 5 edges later and the PE result
      // register takes it at the 6th.
      repeat (5) @(posedge clk);
      #1;
      checks++;
      if (done) begin failures++; $display("done too early"); end
      @(posedge clk);
      #1;
      checks++;
      if (!done) begin failures++; $display("done missing at the sixth edge"); end
      for (int l = 0; l < 32 / n; l++) begin
        checks++;
        if (lane_get(result, n, l) == lane_get(want, n, l)) exact++;
        else if (ulp_dist(lane_get(result, n, l), lane_get(want, n, l), n) <= 1) near++;
        else begin
          failures++;
          $display("mode %0d K %0d lane %0d: got %h want %h", m, K, l, result, want);
        end
      end
    end
    checks++;
    if (exact < 10 * near) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
