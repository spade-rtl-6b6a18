// tb_spade_mac: self-checking testbench of the five-stage SIMD posit MAC.
//
// Stimulus is generated with $urandom for all three modes. Expected results
// come from posit_ref_pkg, which accumulates exactly in a 1024-bit
// fixed-point quire and rounds to nearest even.
//   * OPR_MUL results must match the reference exactly.
//   * OPR_FMA and OPR_MAC results (the running quire after every step of a
//     dot product) must match the exactly-rounded reference or lie one code
//     away from it: the engine aligns by truncating right shifts, so a sum
//     can land on the other side of a rounding boundary. Exact matches are
//     counted and must be the large majority.
//   * Zero, NaR, maxpos/minpos saturation cases are checked exactly.
//   * Every result must leave the pipeline exactly 6 clock edges after the
//     edge that captured its operands (five stages plus the input register),
//     with one operation per cycle and no stall.
module tb_spade_mac;
  import spade_pkg::*;
  import posit_ref_pkg::*;

  logic        clk = 0;
  logic        rst_n = 0;
  logic        in_valid = 0, in_last = 0;
  logic [1:0]  mode = MODE_P8, opr = OPR_MUL;
  logic [31:0] v1 = 0, v2 = 0, v3 = 0;
  logic        out_valid, out_last;
  logic [1:0]  out_mode;
  logic [31:0] vr;
  logic [3:0]  out_nar, out_ovf;

  spade_mac dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, exact = 0, near = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  typedef struct {
    logic [31:0] exp;
    int          n;
    bit          tol;      // allow one code of difference
    longint      issue;
  } exp_t;
  exp_t q[$];

  // Running exact quire per lane, for MAC sequences.
  kq_t acc [4];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker.
  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      exp_t e;
      if (q.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        e = q.pop_front();
        checks++;
        if (cycle - e.issue != 6) begin
          failures++;
          $display("latency %0d, expected 6", cycle - e.issue);
        end
        for (int l = 0; l < 32 / e.n; l++) begin
          logic [31:0] got, want;
          int d;
          got  = lane_get(vr, e.n, l);
          want = lane_get(e.exp, e.n, l);
          d    = ulp_dist(got, want, e.n);
          checks++;
          if (got == want) exact++;
          else if (e.tol && d <= 1 && !is_nar(want, e.n) && !is_nar(got, e.n)) near++;
          else begin
            failures++;
            if (failures < 20)
              $display("mismatch n=%0d lane %0d: got %h want %h", e.n, l, got, want);
          end
        end
      end
    end
  end

  function automatic int n_of(input logic [1:0] m);
    return (m == MODE_P8) ? 8 : (m == MODE_P16) ? 16 : 32;
  endfunction

  // Random posit word whose lanes have |scale| <= lim (NaR and zero excluded).
  function automatic logic [31:0] rand_word(input int n, input int lim);
    logic [31:0] w, p;
    w = 0;
    for (int l = 0; l < 32 / n; l++) begin
      do begin
        p = lane_get($urandom, n, 0);
      end while (p == 0 || is_nar(p, n) || scale_of(p, n) > lim || scale_of(p, n) < -lim);
      w = lane_set(w, n, l, p);
    end
    return w;
  endfunction

  task automatic issue(input logic [1:0] m, input logic [1:0] o, input logic [31:0] a,
                       input logic [31:0] b, input logic [31:0] c);
    exp_t e;
    int n;
    logic [31:0] ew;
    n = n_of(m);
    ew = 0;
    for (int l = 0; l < 32 / n; l++) begin
      logic [31:0] pa, pb, pc;
      bit anynar;
      kq_t prod;
      pa = lane_get(a, n, l);
      pb = lane_get(b, n, l);
      pc = lane_get(c, n, l);
      prod = mul_kq(pa, pb, n);
      case (o)
        OPR_MUL: acc[l] = prod;
        OPR_FMA: acc[l] = prod + posit_kq(pc, n);
        default: acc[l] = acc[l] + prod;
      endcase
      anynar = is_nar(pa, n) || is_nar(pb, n) || (o == OPR_FMA && is_nar(pc, n));
      ew = lane_set(ew, n, l, anynar ? (32'd1 << (n - 1)) : encode(acc[l], n));
    end
    e.exp = ew;
    e.n = n;
    e.tol = (o != OPR_MUL);
    mode = m; opr = o; v1 = a; v2 = b; v3 = c; in_valid = 1;
    @(posedge clk);
    e.issue = cycle;
    q.push_back(e);
    #1 in_valid = 0;
  endtask

  initial begin
    logic [1:0] m;
    int n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1;
    // Back-to-back: issue drives at the edge; keep in_valid high by issuing each cycle.
    for (int mi = 0; mi < 3; mi++) begin
      m = logic'(mi[1:0]);
      n = n_of(m);
      // 1. Multiplications over the full range (P32 limited so that the
      //    product stays inside the quire window).
      for (int t = 0; t < 300; t++) issue(m, OPR_MUL, rand_word(n, n == 32 ? 60 : 99),
                                          rand_word(n, n == 32 ? 60 : 99), 0);
      // 2. Fused multiply-add.
      for (int t = 0; t < 200; t++) issue(m, OPR_FMA, rand_word(n, n == 8 ? 3 : n == 16 ? 13 : 55),
                                          rand_word(n, n == 8 ? 3 : n == 16 ? 13 : 55),
                                          rand_word(n, n == 8 ? 5 : n == 16 ? 26 : 110));
      // 3. Dot products of length 16.
      for (int d = 0; d < 20; d++) begin
        for (int t = 0; t < 16; t++)
          issue(m, (t == 0) ? OPR_MUL : OPR_MAC, rand_word(n, n == 8 ? 2 : n == 16 ? 12 : 50),
                rand_word(n, n == 8 ? 2 : n == 16 ? 12 : 50), 0);
      end
    end
    // 4. Special values in Posit-8 mode: zero, NaR, saturation.
    issue(MODE_P8, OPR_MUL, 32'h00_7F_40_80, 32'h40_7F_40_40, 0);  // 0, maxpos^2, 1*1, NaR
    issue(MODE_P8, OPR_MUL, 32'h01_81_01_C0, 32'h01_01_40_40, 0);  // minpos^2, -maxpos*minpos, minpos, -1
    issue(MODE_P16, OPR_MUL, 32'h7FFF_8000, 32'h7FFF_4000, 0);     // maxpos^2, NaR
    issue(MODE_P32, OPR_MUL, 32'h4000_0000, 32'hC000_0000, 0);      // 1 * -1
    issue(MODE_P8, OPR_FMA, 32'h40_40_40_40, 32'h40_40_40_40, 32'hC0_C0_C0_C0); // 1*1-1 = 0
    repeat (10) @(posedge clk);
    #2;
    if (q.size() != 0) begin
      failures++;
      $display("%0d results missing", q.size());
    end
    checks++;
    if (exact < 10 * near) begin
      failures++;
      $display("too many one-code differences: exact=%0d near=%0d", exact, near);
    end
    $display("exact=%0d within-one-code=%0d", exact, near);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
