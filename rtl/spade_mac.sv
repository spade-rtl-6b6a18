// spade_mac: the SPADE SIMD posit multiply-accumulate engine (Fig. 1).
//
// One 32-bit SIMD word per operand carries 4 x Posit(8,0), 2 x Posit(16,1)
// or 1 x Posit(32,2) lanes, chosen by mode. Each cycle the engine accepts
// V1, V2, V3 and computes per lane, depending on opr:
//   OPR_MUL  quire <- V1*V2            (accumulation bypassed)
//   OPR_FMA  quire <- V1*V2 + V3
//   OPR_MAC  quire <- quire + V1*V2
// and returns the quire rounded to a posit of the lane's format.
//
// Pipeline (six register banks, the bars of Fig. 1):
//   bar1  input registers
//   S1    input decoding: three posit_decoders                    -> bar2
//   S2    multiplication and quire scaling: sign XOR, scale-factor adder,
//         simd_multiplier, complementors, SF saturate, alignment
//         shifters for the product and for V3                      -> bar3
//   S3    quire accumulation: quire_adder; bar4 is the quire register
//         and feeds back into S3, so back-to-back MACs need no stall -> bar4
//   S4    quire_normalizer (sign, LZC, normalize, scale adder)    -> bar5
//   S5    posit_encoder (round to nearest even, pack)              -> bar6
// Latency: a word presented with in_valid at clock edge t appears on vr with
// out_valid after edge t+5 (six register stages counting the inputs).
// Throughput: one SIMD word per cycle, i.e. 4, 2 or 1 MACs per cycle.
// in_last is carried along unchanged to out_last (a marker for the caller).
// NaR in any operand used makes the lane NaR; a NaR in the quire stays until
// an OPR_MUL or OPR_FMA restarts the lane. out_ovf flags a quire lane
// overflow. The stage split, the three-operand form and the operand
// selection follow Fig. 1; quire width, opr codes and the NaR rule are this
// design's choices. A change of mode while accumulating is not supported:
// start a new accumulation with OPR_MUL after a mode change.
module spade_mac
  import spade_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_last,
  input  logic [1:0]        mode,
  input  logic [1:0]        opr,
  input  logic [WORD_W-1:0] v1,
  input  logic [WORD_W-1:0] v2,
  input  logic [WORD_W-1:0] v3,
  output logic              out_valid,
  output logic              out_last,
  output logic [1:0]        out_mode,
  output logic [WORD_W-1:0] vr,
  output logic [3:0]        out_nar,
  output logic [3:0]        out_ovf
);

  typedef struct packed {
    logic       valid;
    logic       last;
    logic [1:0] mode;
    logic [1:0] opr;
  } ctrl_t;

  // ---------------- bar1: input registers ----------------
  ctrl_t             c1;
  logic [WORD_W-1:0] r_v1, r_v2, r_v3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c1   <= '0;
      r_v1 <= '0;
      r_v2 <= '0;
      r_v3 <= '0;
    end else begin
      c1   <= '{valid: in_valid, last: in_last, mode: mode, opr: opr};
      r_v1 <= v1;
      r_v2 <= v2;
      r_v3 <= v3;
    end
  end

  // ---------------- S1: input decoding ----------------
  logic [3:0]        d_s  [3];
  sf_t               d_sf [3][4];
  logic [MANT_W-1:0] d_m  [3];
  logic [3:0]        d_z  [3];
  logic [3:0]        d_n  [3];

  posit_decoder u_dec1 (.mode(c1.mode), .v(r_v1), .sign(d_s[0]), .sf(d_sf[0]),
                        .mant(d_m[0]), .zero(d_z[0]), .nar(d_n[0]));
  posit_decoder u_dec2 (.mode(c1.mode), .v(r_v2), .sign(d_s[1]), .sf(d_sf[1]),
                        .mant(d_m[1]), .zero(d_z[1]), .nar(d_n[1]));
  posit_decoder u_dec3 (.mode(c1.mode), .v(r_v3), .sign(d_s[2]), .sf(d_sf[2]),
                        .mant(d_m[2]), .zero(d_z[2]), .nar(d_n[2]));

  // ---------------- bar2 ----------------
  ctrl_t             c2;
  logic [3:0]        s1_q, s2_q, s3_q, nar2;
  sf_t               sa1 [4], sa2 [4], sa3 [4];
  logic [MANT_W-1:0] a1, a2, a3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c2 <= '0;
      s1_q <= '0; s2_q <= '0; s3_q <= '0; nar2 <= '0;
      a1 <= '0; a2 <= '0; a3 <= '0;
      for (int l = 0; l < 4; l++) begin
        sa1[l] <= '0; sa2[l] <= '0; sa3[l] <= '0;
      end
    end else begin
      c2   <= c1;
      s1_q <= d_s[0];
      s2_q <= d_s[1];
      s3_q <= d_s[2];
      nar2 <= d_n[0] | d_n[1] | ((c1.opr == OPR_FMA) ? d_n[2] : 4'b0000);
      a1   <= d_m[0];
      a2   <= d_m[1];
      a3   <= d_m[2];
      sa1  <= d_sf[0];
      sa2  <= d_sf[1];
      sa3  <= d_sf[2];
    end
  end

  // ---------------- S2: multiplication and quire scaling ----------------
  logic [3:0]         sp;
  sf_t                sap [4], saq_p [4], saq_3 [4];
  logic [7:0]         shamt_p [4], shamt_3 [4];
  logic [PROD_W-1:0]  ap;
  logic [QUIRE_W-1:0] qp_pl, q3_pl, qp_c, q3_c, quire_p, quire_3;
  logic [3:0]         fill_p, fill_3;

  assign sp = s1_q ^ s2_q;                      // XOR of Fig. 1

  always_comb begin                             // Vector Adder: sa1 + sa2
    for (int l = 0; l < 4; l++) sap[l] = sa1[l] + sa2[l];
  end

  simd_multiplier u_mul (.mode(c2.mode), .a(a1), .b(a2), .p(ap));

  // Place mantissas on the quire lanes, binary point at lane bit QL/2.
  always_comb begin
    qp_pl = '0;
    q3_pl = '0;
    case (c2.mode)
      MODE_P8: for (int l = 0; l < 4; l++) begin
        qp_pl[32*l +: 32] = 32'(ap[14*l +: 14]) << 4;    // 2.12 -> .16
        q3_pl[32*l +: 32] = 32'(a3[7*l +: 7]) << 10;     // 1.6  -> .16
      end
      MODE_P16: for (int l = 0; l < 2; l++) begin
        qp_pl[64*l +: 64] = 64'(ap[28*l +: 28]) << 6;    // 2.26 -> .32
        q3_pl[64*l +: 64] = 64'(a3[14*l +: 14]) << 19;   // 1.13 -> .32
      end
      default: begin
        qp_pl = 128'(ap) << 10;                           // 2.54 -> .64
        q3_pl = 128'(a3) << 37;                           // 1.27 -> .64
      end
    endcase
  end

  simd_complementor #(.SEG(32)) u_comp_p (.mode(c2.mode), .neg(sp),   .din(qp_pl), .dout(qp_c));
  simd_complementor #(.SEG(32)) u_comp_3 (.mode(c2.mode), .neg(s3_q), .din(q3_pl), .dout(q3_c));

  sf_saturate u_sat_p (.mode(c2.mode), .sf_in(sap), .sf_out(saq_p), .shamt(shamt_p));
  sf_saturate u_sat_3 (.mode(c2.mode), .sf_in(sa3), .sf_out(saq_3), .shamt(shamt_3));

  always_comb begin
    int unsigned lw;
    lw = QUIRE_W / lanes_of(c2.mode);
    fill_p = '0;
    fill_3 = '0;
    for (int unsigned l = 0; l < 4; l++) begin
      if (l < lanes_of(c2.mode)) begin
        fill_p[l] = qp_c[l*lw + lw - 1];
        fill_3[l] = q3_c[l*lw + lw - 1];
      end
    end
  end

  simd_shifter #(.SEG(32), .RIGHT(1'b1)) u_shift_p (
    .mode(c2.mode), .shamt(shamt_p), .fill(fill_p), .din(qp_c), .dout(quire_p));
  simd_shifter #(.SEG(32), .RIGHT(1'b1)) u_shift_3 (
    .mode(c2.mode), .shamt(shamt_3), .fill(fill_3), .din(q3_c), .dout(quire_3));

  // ---------------- bar3 ----------------
  ctrl_t              c3;
  logic [QUIRE_W-1:0] r_qp, r_q3;
  sf_t                r_sfp [4], r_sf3 [4];
  logic [3:0]         nar3;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c3 <= '0; r_qp <= '0; r_q3 <= '0; nar3 <= '0;
      for (int l = 0; l < 4; l++) begin r_sfp[l] <= '0; r_sf3[l] <= '0; end
    end else begin
      c3    <= c2;
      r_qp  <= quire_p;
      r_q3  <= quire_3;
      r_sfp <= saq_p;
      r_sf3 <= saq_3;
      nar3  <= nar2;
    end
  end

  // ---------------- S3: quire accumulation ----------------
  logic [QUIRE_W-1:0] quire_r, q_sum;
  sf_t                saq_r [4], sf_sum [4];
  logic [3:0]         nar_q, ovf_sum, ovf_q;
  ctrl_t              c4;

  quire_adder u_qadd (
    .mode(c3.mode), .opr(c3.opr),
    .q_p(r_qp), .sf_p(r_sfp), .q_c(r_q3), .sf_c(r_sf3),
    .q_acc(quire_r), .sf_acc(saq_r),
    .q_r(q_sum), .sf_r(sf_sum), .flag_ovf(ovf_sum)
  );

  // bar4: the quire register, updated only by valid operations.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c4 <= '0; quire_r <= '0; nar_q <= '0; ovf_q <= '0;
      for (int l = 0; l < 4; l++) saq_r[l] <= '0;
    end else begin
      c4 <= c3;
      if (c3.valid) begin
        quire_r <= q_sum;
        saq_r   <= sf_sum;
        nar_q   <= nar3 | ((c3.opr == OPR_MAC) ? nar_q : 4'b0000);
        ovf_q   <= ovf_sum | ((c3.opr == OPR_MAC) ? ovf_q : 4'b0000);
      end
    end
  end

  // ---------------- S4: reconstruction and normalization ----------------
  logic [3:0]         n_sign, n_zero;
  sf_t                n_sf [4];
  logic [QUIRE_W-1:0] n_mag;

  quire_normalizer u_norm (
    .mode(c4.mode), .q(quire_r), .sfq(saq_r),
    .sign(n_sign), .sf(n_sf), .mag(n_mag), .zero(n_zero)
  );

  ctrl_t              c5;
  logic [3:0]         r5_sign, r5_zero, r5_nar, r5_ovf;
  sf_t                r5_sf [4];
  logic [QUIRE_W-1:0] r5_mag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c5 <= '0; r5_sign <= '0; r5_zero <= '0; r5_nar <= '0; r5_ovf <= '0;
      r5_mag <= '0;
      for (int l = 0; l < 4; l++) r5_sf[l] <= '0;
    end else begin
      c5      <= c4;
      r5_sign <= n_sign;
      r5_zero <= n_zero;
      r5_nar  <= nar_q;
      r5_ovf  <= ovf_q;
      r5_sf   <= n_sf;
      r5_mag  <= n_mag;
    end
  end

  // ---------------- S5: rounding and packing ----------------
  logic [WORD_W-1:0] enc;

  posit_encoder u_enc (
    .mode(c5.mode), .sign(r5_sign), .sf(r5_sf), .mag(r5_mag),
    .zero(r5_zero), .nar(r5_nar), .v(enc)
  );

  // bar6: output register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_mode  <= MODE_P8;
      vr        <= '0;
      out_nar   <= '0;
      out_ovf   <= '0;
    end else begin
      out_valid <= c5.valid;
      out_last  <= c5.last;
      out_mode  <= c5.mode;
      vr        <= enc;
      out_nar   <= r5_nar;
      out_ovf   <= r5_ovf;
    end
  end

endmodule
