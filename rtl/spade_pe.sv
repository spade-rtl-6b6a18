// spade_pe: processing element of the systolic array (Fig. 3 inset).
//
// Each PE holds one spade_mac. Weights (WT) arrive from the left and input
// features (IF) from the top; both are forwarded one register later to the
// right and downward neighbour, so operands meet along the wavefront of an
// output-stationary array. A control word (valid, first, last, mode) travels
// with the weights. The MAC runs OPR_MUL on the first element of a dot
// product (restarting its quire, the "acc reg" of the figure) and OPR_MAC
// on the rest. When the last element leaves the MAC pipeline, the rounded
// posit is kept in the result register and done is raised (the "ovalid" of
// the figure) until the next first element arrives.
// Latency: done and result are updated at the sixth clock edge after the
// edge that captured the last operands (five MAC stages plus the PE's
// result register).
// The figure gives the multiply, add, acc reg, IF/WT forwarding and ovalid;
// forwarding registers and the control word are this design's choices.
module spade_pe
  import spade_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // from the left neighbour
  input  logic              in_valid,
  input  logic              in_first,
  input  logic              in_last,
  input  logic [1:0]        in_mode,
  input  logic [WORD_W-1:0] wt_in,
  // from the upper neighbour
  input  logic [WORD_W-1:0] if_in,
  // to the right neighbour
  output logic              out_valid,
  output logic              out_first,
  output logic              out_last,
  output logic [1:0]        out_mode,
  output logic [WORD_W-1:0] wt_out,
  // to the lower neighbour
  output logic [WORD_W-1:0] if_out,
  // result
  output logic [WORD_W-1:0] result,
  output logic              done,
  output logic [3:0]        flags_nar
);

  logic              m_valid, m_last;
  logic [1:0]        m_mode;
  logic [WORD_W-1:0] m_vr;
  logic [3:0]        m_nar, m_ovf;

  spade_mac u_mac (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_last(in_last), .mode(in_mode),
    .opr(in_first ? OPR_MUL : OPR_MAC),
    .v1(if_in), .v2(wt_in), .v3('0),
    .out_valid(m_valid), .out_last(m_last), .out_mode(m_mode),
    .vr(m_vr), .out_nar(m_nar), .out_ovf(m_ovf)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      out_mode  <= MODE_P8;
      wt_out    <= '0;
      if_out    <= '0;
      result    <= '0;
      done      <= 1'b0;
      flags_nar <= '0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_first;
      out_last  <= in_last;
      out_mode  <= in_mode;
      wt_out    <= wt_in;
      if_out    <= if_in;
      if (in_valid && in_first) done <= 1'b0;
      if (m_valid && m_last) begin
        result    <= m_vr;
        flags_nar <= m_nar;
        done      <= 1'b1;
      end
    end
  end

endmodule
