// mem_bank: one on-chip memory bank (IF_banks, wt_banks or OF_banks of
// Fig. 3).
//
// DEPTH rows of N 32-bit SIMD posit words. Two ports:
//   host port: one word per access, addressed by row and column; a write
//              takes effect at the clock edge, a read returns data one cycle
//              later on h_rdata;
//   array port: a whole row per access; a read returns the row one cycle
//              after a_re, a write stores a full row.
// If both ports write the same row in a cycle, the array port wins for the
// whole row. The paper names the banks only; size, ports and timing are this
// design's choices. Written as a plain array, synthesis maps it to a RAM.
module mem_bank
  import spade_pkg::*;
#(
  parameter int unsigned N     = 4,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW = $clog2(DEPTH),
  localparam int unsigned CWI = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  // host port
  input  logic              h_we,
  input  logic              h_re,
  input  logic [AW-1:0]     h_row,
  input  logic [CWI-1:0]    h_col,
  input  logic [WORD_W-1:0] h_wdata,
  output logic [WORD_W-1:0] h_rdata,
  // array port
  input  logic              a_re,
  input  logic [AW-1:0]     a_raddr,
  output logic [WORD_W-1:0] a_rdata [N],
  input  logic              a_we,
  input  logic [AW-1:0]     a_waddr,
  input  logic [WORD_W-1:0] a_wdata [N]
);

  logic [WORD_W-1:0] mem [DEPTH][N];

  always_ff @(posedge clk) begin
    if (h_we) mem[h_row][h_col] <= h_wdata;
    if (a_we) mem[a_waddr] <= a_wdata;
    if (h_re) h_rdata <= mem[h_row][h_col];
    if (a_re) a_rdata <= mem[a_raddr];
  end

endmodule
