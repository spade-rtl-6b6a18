// tb_skew_register: checks that entry i of the skew register comes out
// exactly i cycles after it went in, with its control word, for a stream of
// random words.
module tb_skew_register;
  import spade_pkg::*;

  localparam int N = 4;
  logic        clk = 0, rst_n = 0;
  logic [31:0] din [N], dout [N];
  logic [4:0]  cin;
  logic [4:0]  cout [N];
  int checks = 0, failures = 0;

  skew_register #(.N(N), .CW(5)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] hist_d [256][N];
  logic [4:0]  hist_c [256];

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) din[i] = 0;
    cin = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) din[i] = $urandom;
      cin = 5'($urandom);
      for (int i = 0; i < N; i++) hist_d[t][i] = din[i];
      hist_c[t] = cin;
      #1;
      for (int i = 0; i < N; i++) begin
        if (t >= i) begin
          checks++;
          if (dout[i] != hist_d[t - i][i] || cout[i] != hist_c[t - i]) begin
            failures++;
            $display("t %0d entry %0d: got %h want %h", t, i, dout[i], hist_d[t - i][i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
