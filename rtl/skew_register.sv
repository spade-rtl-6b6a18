// skew_register: the if_mem / wt_mem registers at the array edges (Fig. 3).
//
// Takes one word per array row (or column) per cycle, plus a control word,
// and delays entry i by i cycles with a triangular register file, so the
// streams reach the PEs in the diagonal wavefront a systolic array needs.
// Entry 0 passes straight through (zero delay). All registers reset to zero.
// The figure gives the two registers by name; the skewing is this design's
// reading of their role.
module skew_register
  import spade_pkg::*;
#(
  parameter int unsigned N  = 4,
  parameter int unsigned CW = 5        // control bits carried with each word
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [WORD_W-1:0] din   [N],
  input  logic [CW-1:0]     cin,
  output logic [WORD_W-1:0] dout  [N],
  output logic [CW-1:0]     cout  [N]
);

  typedef struct packed {
    logic [CW-1:0]     c;
    logic [WORD_W-1:0] d;
  } ent_t;

  // stage[i][s]: entry i after s+1 registers.
  ent_t stage [N][N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int s = 0; s < N; s++) stage[i][s] <= '0;
    end else begin
      for (int i = 1; i < N; i++) begin
        stage[i][0] <= '{c: cin, d: din[i]};
        for (int s = 1; s < i; s++) stage[i][s] <= stage[i][s-1];
      end
    end
  end

  always_comb begin
    dout[0] = din[0];
    cout[0] = cin;
    for (int i = 1; i < N; i++) begin
      dout[i] = stage[i][i-1].d;
      cout[i] = stage[i][i-1].c;
    end
  end

endmodule
