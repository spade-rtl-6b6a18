// tb_mem_bank: checks a memory bank against a shadow array: random host
// word writes and array row writes, then host word reads and array row
// reads with their one-cycle latency.
module tb_mem_bank;
  import spade_pkg::*;

  localparam int N = 4, DEPTH = 64;
  logic        clk = 0;
  logic        h_we = 0, h_re = 0, a_re = 0, a_we = 0;
  logic [5:0]  h_row = 0, a_raddr = 0, a_waddr = 0;
  logic [1:0]  h_col = 0;
  logic [31:0] h_wdata = 0, h_rdata;
  logic [31:0] a_rdata [N], a_wdata [N];
  logic [31:0] shadow [DEPTH][N];
  int checks = 0, failures = 0;

  mem_bank #(.N(N), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) a_wdata[i] = 0;
    // fill everything through the host port
    for (int r = 0; r < DEPTH; r++)
      for (int c = 0; c < N; c++) begin
        @(negedge clk);
        h_we = 1; h_row = 6'(r); h_col = 2'(c); h_wdata = $urandom;
        shadow[r][c] = h_wdata;
      end
    @(negedge clk);
    h_we = 0;
    // some row writes from the array side
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      a_we = 1; a_waddr = 6'($urandom);
      for (int i = 0; i < N; i++) begin a_wdata[i] = $urandom; shadow[a_waddr][i] = a_wdata[i]; end
    end
    @(negedge clk);
    a_we = 0;
    for (int t = 0; t < 300; t++) begin
      logic [5:0] r, ar;
      logic [1:0] c;
      @(negedge clk);
      r = 6'($urandom); c = 2'($urandom); ar = 6'($urandom);
      h_re = 1; h_row = r; h_col = c; a_re = 1; a_raddr = ar;
      @(negedge clk);
      h_re = 0; a_re = 0;
      checks++;
      if (h_rdata != shadow[r][c]) begin failures++; $display("host read %0d,%0d", r, c); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (a_rdata[i] != shadow[ar][i]) begin failures++; $display("row read %0d", ar); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
