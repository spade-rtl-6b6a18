// systolic_array: N x N grid of spade_pe (Fig. 3).
//
// Row i receives its weight stream and control word at the left edge
// (wt_in[i], ctrl_*[i]); column j receives its input-feature stream at the
// top edge (if_in[j]). Weights and control move right, features move down,
// one PE per cycle. PE(i,j) computes the dot product of weight stream i and
// feature stream j; the skew that lines the streams up is added outside, by
// skew_register. result[i][j] and done[i][j] expose every PE's output
// register (the red result wires of the figure). all_done is the AND of
// all done flags. N is not given in the paper (the figure shows n x n);
// 4 is this design's default.
module systolic_array
  import spade_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ctrl_valid [N],
  input  logic              ctrl_first [N],
  input  logic              ctrl_last  [N],
  input  logic [1:0]        ctrl_mode  [N],
  input  logic [WORD_W-1:0] wt_in      [N],
  input  logic [WORD_W-1:0] if_in      [N],
  output logic [WORD_W-1:0] result     [N][N],
  output logic              done       [N][N],
  output logic              all_done,
  output logic [3:0]        any_nar
);

  // Horizontal links: index j is the input of PE(i,j); j = N is unused output.
  logic              h_valid [N][N+1];
  logic              h_first [N][N+1];
  logic              h_last  [N][N+1];
  logic [1:0]        h_mode  [N][N+1];
  logic [WORD_W-1:0] h_wt    [N][N+1];
  logic [WORD_W-1:0] v_if    [N+1][N];
  logic [3:0]        nar     [N][N];

  for (genvar i = 0; i < N; i++) begin : g_row
    assign h_valid[i][0] = ctrl_valid[i];
    assign h_first[i][0] = ctrl_first[i];
    assign h_last[i][0]  = ctrl_last[i];
    assign h_mode[i][0]  = ctrl_mode[i];
    assign h_wt[i][0]    = wt_in[i];
    for (genvar j = 0; j < N; j++) begin : g_col
      if (i == 0) begin : g_top
        assign v_if[0][j] = if_in[j];
      end
      spade_pe u_pe (
        .clk(clk), .rst_n(rst_n),
        .in_valid(h_valid[i][j]), .in_first(h_first[i][j]), .in_last(h_last[i][j]),
        .in_mode(h_mode[i][j]), .wt_in(h_wt[i][j]), .if_in(v_if[i][j]),
        .out_valid(h_valid[i][j+1]), .out_first(h_first[i][j+1]), .out_last(h_last[i][j+1]),
        .out_mode(h_mode[i][j+1]), .wt_out(h_wt[i][j+1]), .if_out(v_if[i+1][j]),
        .result(result[i][j]), .done(done[i][j]), .flags_nar(nar[i][j])
      );
    end
  end

  always_comb begin
    all_done = 1'b1;
    any_nar  = '0;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        all_done = all_done & done[i][j];
        any_nar  = any_nar | nar[i][j];
      end
    end
  end

endmodule
