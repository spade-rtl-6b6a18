// tb_systolic_array: checks the 4 x 4 PE grid on its own. The testbench
// skews the streams itself (row i and column j delayed by i and j cycles)
// and checks that PE(i,j) ends with the rounded dot product of weight
// stream i and feature stream j, that all_done rises only when every PE is
// done, and that any_nar reports a NaR fed into one row.
module tb_systolic_array;
  import spade_pkg::*;
  import posit_ref_pkg::*;

  localparam int N = 4;
  localparam int K = 6;

  logic        clk = 0, rst_n = 0;
  logic        ctrl_valid [N], ctrl_first [N], ctrl_last [N];
  logic [1:0]  ctrl_mode [N];
  logic [31:0] wt_in [N], if_in [N];
  logic [31:0] result [N][N];
  logic        done [N][N];
  logic        all_done;
  logic [3:0]  any_nar;
  int checks = 0, failures = 0, exact = 0, near = 0;

  systolic_array #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] W [N][K], X [N][K];

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
    for (int i = 0; i < N; i++) begin
      ctrl_valid[i] = 0; ctrl_first[i] = 0; ctrl_last[i] = 0; ctrl_mode[i] = 0;
      wt_in[i] = 0; if_in[i] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      logic [1:0] m;
      int n, lim, t_done;
      bit saw_partial;
      m = 2'(r);
      n = (m == MODE_P8) ? 8 : (m == MODE_P16) ? 16 : 32;
      lim = (n == 8) ? 2 : (n == 16) ? 10 : 40;
      for (int i = 0; i < N; i++)
        for (int k = 0; k < K; k++) begin W[i][k] = rand_word(n, lim); X[i][k] = rand_word(n, lim); end
      if (r == 2) W[2][3] = 32'h8000_0000;   // NaR in row 2
      saw_partial = 0;
      for (int t = 0; t < K + 2 * N + 12; t++) begin
        @(negedge clk);
        for (int i = 0; i < N; i++) begin
          int k;
          k = t - i;
          ctrl_valid[i] = (k >= 0 && k < K);
          ctrl_first[i] = (k == 0);
          ctrl_last[i]  = (k == K - 1);
          ctrl_mode[i]  = m;
          wt_in[i] = (k >= 0 && k < K) ? W[i][k] : 0;
          if_in[i] = (k >= 0 && k < K) ? X[i][k] : 0;
        end
        if (t > 2 && !all_done && done[0][0]) saw_partial = 1;
        begin
          bit a;
          a = 1;
          for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) a &= done[i][j];
          checks++;
          if (all_done != a) begin failures++; $display("all_done %b, AND of done %b", all_done, a); end
        end
      end
      checks++;
      if (!all_done || !saw_partial) begin
        failures++;
        $display("all_done %b, partial state seen %b", all_done, saw_partial);
      end
      checks++;
      if ((r == 2) != (any_nar[0] == 1'b1)) begin failures++; $display("any_nar %b", any_nar); end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++)
          for (int l = 0; l < 32 / n; l++) begin
            kq_t acc;
            bit isn;
            logic [31:0] w, g;
            acc = '0;
            isn = 0;
            for (int k = 0; k < K; k++) begin
              acc = acc + mul_kq(lane_get(W[i][k], n, l), lane_get(X[j][k], n, l), n);
              isn |= is_nar(lane_get(W[i][k], n, l), n);
            end
            w = isn ? (32'd1 << (n - 1)) : encode(acc, n);
            g = lane_get(result[i][j], n, l);
            checks++;
            if (g == w) exact++;
            else if (!isn && ulp_dist(g, w, n) <= 1) near++;
            else begin
              failures++;
              $display("mode %0d PE(%0d,%0d) lane %0d: got %h want %h", m, i, j, l, g, w);
            end
          end
    end
    checks++;
    if (exact < 10 * near) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
