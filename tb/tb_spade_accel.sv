// tb_spade_accel: end-to-end testbench of the SIMD posit systolic
// accelerator at its default size (4 x 4 PEs, 64-row banks).
//
// Acting as the host, it fills the WT and IF banks over the word bus,
// programs KLEN, the bank base rows and CTRL, starts a run, waits for irq
// and reads the OF bank back. Each OF word is compared lane by lane with
// sum_k W[i][k] * X[j][k] computed exactly by posit_ref_pkg, rounded to the
// nearest posit and passed through ReLU when the AF is enabled; a result may
// differ by one code (the engine's quire aligns by truncation), and such
// cases must stay rare.
// Runs cover all three precision modes (mode switches between runs), AF on
// and off, K = 1 (only the bypassing first multiply) and long dot products
// (accumulation), non-zero base rows, and a NaR operand (status NaR flags).
// Each mechanism is counted and a mechanism that never occurred is a
// failure. The CYCLES register is checked against the run length bound.
module tb_spade_accel;
  import spade_pkg::*;
  import posit_ref_pkg::*;

  localparam int N = 4;
  localparam int DEPTH = 64;

  logic        clk = 0, rst_n = 0;
  logic        bus_req = 0, bus_we = 0;
  logic [15:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0;
  logic [31:0] bus_rdata;
  logic        bus_rvalid, irq, busy;

  spade_accel dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, exact = 0, near = 0;
  int n_mode[3] = '{0, 0, 0};
  int n_mode_switch = 0, n_relu_clip = 0, n_neg_pass = 0, n_k1 = 0, n_acc = 0;
  int n_base = 0, n_nar = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] W [N][DEPTH];
  logic [31:0] X [N][DEPTH];

  task automatic bus_write(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk);
    bus_req = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk);
    bus_req = 0; bus_we = 0;
  endtask

  task automatic bus_read(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk);
    bus_req = 1; bus_we = 0; bus_addr = a;
    @(negedge clk);
    bus_req = 0;
    if (!bus_rvalid) begin
      failures++;
      $display("read without rvalid");
    end
    d = bus_rdata;
  endtask

  function automatic int n_of(input logic [1:0] m);
    return (m == MODE_P8) ? 8 : (m == MODE_P16) ? 16 : 32;
  endfunction

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

  logic [1:0] last_mode = 2'b11;

  task automatic run(input logic [1:0] m, input int K, input bit af, input int ifb,
                     input int wtb, input int ofb, input bit with_nar);
    int n, lim, cyc_lim;
    logic [31:0] d, want, got, st, cyc;
    kq_t acc;
    bit lane_nar;
    n = n_of(m);
    lim = (n == 8) ? 2 : (n == 16) ? 10 : 40;
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < N; i++) begin
        W[i][k] = rand_word(n, lim);
        X[i][k] = rand_word(n, lim);
      end
    end
    if (with_nar) W[1][0] = lane_set(W[1][0], n, 0, 32'd1 << (n - 1));
    for (int k = 0; k < K; k++) begin
      for (int i = 0; i < N; i++) begin
        bus_write(16'h8000 | 16'((wtb + k) * N + i), W[i][k]);
        bus_write(16'h4000 | 16'((ifb + k) * N + i), X[i][k]);
      end
    end
    bus_write(16'd2, 32'(K));
    bus_write(16'd3, 32'(ifb));
    bus_write(16'd4, 32'(wtb));
    bus_write(16'd5, 32'(ofb));
    bus_write(16'd0, {28'd0, af, m, 1'b1});
    if (m != last_mode && last_mode != 2'b11) n_mode_switch++;
    last_mode = m;
    n_mode[m]++;
    if (K == 1) n_k1++; else n_acc++;
    if (ifb != 0 || wtb != 0 || ofb != 0) n_base++;
    fork
      begin
        @(posedge irq);
      end
      begin
        repeat (5000) @(posedge clk);
        failures++;
        $display("run did not finish");
      end
    join_any
    disable fork;
    bus_read(16'd1, st);
    checks++;
    if (st[1:0] != 2'b10) begin
      failures++;
      $display("status %h, expected done and not busy", st);
    end
    checks++;
    if (with_nar != (st[4] == 1'b1)) begin
      failures++;
      $display("status NaR flag %b, expected %b", st[4], with_nar);
    end
    if (with_nar && st[4]) n_nar++;
    bus_read(16'd6, cyc);
    cyc_lim = K + 3 * N + 12;
    checks++;
    if (cyc < 32'(K + N) || cyc > 32'(cyc_lim)) begin
      failures++;
      $display("run took %0d cycles, outside [%0d, %0d]", cyc, K + N, cyc_lim);
    end
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        bus_read(16'hC000 | 16'((ofb + i) * N + j), got);
        for (int l = 0; l < 32 / n; l++) begin
          logic [31:0] g, w;
          acc = '0;
          lane_nar = 0;
          for (int k = 0; k < K; k++) begin
            acc = acc + mul_kq(lane_get(W[i][k], n, l), lane_get(X[j][k], n, l), n);
            lane_nar |= is_nar(lane_get(W[i][k], n, l), n) | is_nar(lane_get(X[j][k], n, l), n);
          end
          w = lane_nar ? (32'd1 << (n - 1)) : encode(acc, n);
          if (!lane_nar && w[n-1]) begin
            if (af) begin w = 0; n_relu_clip++; end
            else n_neg_pass++;
          end
          g = lane_get(got, n, l);
          checks++;
          if (g == w) exact++;
          else if (!lane_nar && !af && ulp_dist(g, w, n) <= 1) near++;
          else if (!lane_nar && af && (g == 0 || w == 0) && ulp_dist(g, w, n) <= 1) near++;
          else if (!lane_nar && af && g != 0 && w != 0 && ulp_dist(g, w, n) <= 1) near++;
          else begin
            failures++;
            if (failures < 20)
              $display("mode %0d OF[%0d][%0d] lane %0d: got %h want %h", m, i, j, l, g, w);
          end
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run(MODE_P8,  8,  1'b0, 0, 0, 0, 1'b0);
    run(MODE_P16, 8,  1'b1, 0, 0, 0, 1'b0);
    run(MODE_P32, 8,  1'b0, 0, 0, 0, 1'b0);
    run(MODE_P8,  1,  1'b1, 3, 10, 5, 1'b0);
    run(MODE_P32, 12, 1'b1, 20, 2, 40, 1'b0);
    run(MODE_P16, 16, 1'b0, 30, 40, 1, 1'b1);
    run(MODE_P8,  32, 1'b1, 0, 32, 60, 1'b0);
    // every mechanism must have happened
    checks++;
    if (n_mode[0] == 0 || n_mode[1] == 0 || n_mode[2] == 0 || n_mode_switch == 0 ||
        n_relu_clip == 0 || n_neg_pass == 0 || n_k1 == 0 || n_acc == 0 || n_base == 0 ||
        n_nar == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    checks++;
    if (exact < 10 * near) begin
      failures++;
      $display("too many one-code differences");
    end
    $display("modes P8=%0d P16=%0d P32=%0d switches=%0d relu_clip=%0d neg_pass=%0d k1=%0d acc=%0d base=%0d nar=%0d exact=%0d near=%0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode_switch, n_relu_clip, n_neg_pass, n_k1,
             n_acc, n_base, n_nar, exact, near);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
