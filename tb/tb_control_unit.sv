// tb_control_unit: checks the register file and the FSM of the control
// unit. Registers written by the host must read back; a start must give
// exactly K read cycles with k = 0..K-1, a feed control word one cycle
// behind with first/last on the right steps, a wait for all_done (the
// testbench holds all_done low for a while), exactly N write cycles with
// rows 0..N-1, one irq pulse, the done/busy status bits, the NaR flags and
// a CYCLES value equal to the number of busy cycles observed.
module tb_control_unit;
  import spade_pkg::*;

  localparam int N = 4;
  logic        clk = 0, rst_n = 0;
  logic        reg_we = 0;
  logic [3:0]  reg_idx = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic [1:0]  mode;
  logic        af_en, rd_en, feed_valid, feed_first, feed_last, wr_en, busy, irq;
  logic [5:0]  if_base, wt_base, of_base;
  logic [15:0] k, wr_row;
  logic        all_done = 0;
  logic [3:0]  any_nar = 4'b0101;
  int checks = 0, failures = 0;

  control_unit #(.N(N), .DEPTH(64)) dut (.*);
  always #5 clk = ~clk;

  task automatic wr(input int idx, input logic [31:0] d);
    @(negedge clk);
    reg_we = 1; reg_idx = 4'(idx); reg_wdata = d;
    @(negedge clk);
    reg_we = 0;
  endtask

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("%s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      int K, nrd, nfeed, nwr, nirq, nbusy, hold;
      K = 3 + run * 5;
      hold = 20 + run * 7;
      wr(2, K); wr(3, 5); wr(4, 9); wr(5, 11);
      @(negedge clk); reg_idx = 2; #1; chk(reg_rdata == 32'(K), "KLEN readback");
      reg_idx = 3; #1; chk(reg_rdata == 5 && if_base == 5, "IF_BASE");
      reg_idx = 4; #1; chk(reg_rdata == 9 && wt_base == 9, "WT_BASE");
      reg_idx = 5; #1; chk(reg_rdata == 11 && of_base == 11, "OF_BASE");
      all_done = 0;
      wr(0, {28'd0, 1'b1, 2'(run), 1'b1});
      chk(mode == 2'(run) && af_en == 1'b1 && busy, "mode/af/busy after start");
      nrd = 0; nfeed = 0; nwr = 0; nirq = 0; nbusy = 0;
      for (int t = 0; t < 400 && (busy || nirq == 0); t++) begin
        if (t > 0) @(negedge clk);
        if (busy) nbusy++;
        if (t == K + hold) all_done = 1;
        if (rd_en) begin
          chk(int'(k) == nrd, "read step order");
          nrd++;
        end
        if (feed_valid) begin
          chk(feed_first == (nfeed == 0) && feed_last == (nfeed == K - 1), "feed first/last");
          nfeed++;
        end
        if (wr_en) begin
          chk(all_done && int'(wr_row) == nwr, "write only after all_done, rows in order");
          nwr++;
        end
        if (irq) nirq++;
      end
      chk(nrd == K && nfeed == K && nwr == N && nirq == 1, "counts of read/feed/write/irq");
      @(negedge clk); reg_idx = 1; #1;
      chk(reg_rdata[1:0] == 2'b10 && reg_rdata[7:4] == any_nar, "status done, NaR flags");
      reg_idx = 6; #1;
      chk(reg_rdata == 32'(nbusy), "CYCLES register");
      chk(int'(reg_rdata) >= K + hold, "waited for all_done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
