// spade_pkg: types and constants shared by the SIMD posit MAC engine and the
// systolic accelerator built around it.
//
// The datapath works on one 32-bit SIMD word that holds four Posit(8,0),
// two Posit(16,1) or one Posit(32,2) value, selected by the 2-bit MODE
// (the 2-bit width follows the paper; the code points are this design's
// choice). Per-lane side information (signs, scale factors, shift amounts,
// counts) is carried in 4-entry arrays indexed by lane number: Posit-8 mode
// uses entries 0..3, Posit-16 mode entries 0..1 and Posit-32 mode entry 0.
//
// The quire is 128 bits wide and splits into 4 x 32, 2 x 64 or 1 x 128 bit
// lanes (4n bits per n-bit posit lane); its binary point sits in the middle
// of each lane. Quire width and binary point are this design's choice.
package spade_pkg;

  typedef enum logic [1:0] {
    MODE_P8  = 2'b00,   // 4 x Posit(8,0)
    MODE_P16 = 2'b01,   // 2 x Posit(16,1)
    MODE_P32 = 2'b10    // 1 x Posit(32,2)
  } mode_e;

  // Operation selected by the opr control (encoding is this design's choice).
  typedef enum logic [1:0] {
    OPR_MUL = 2'b00,    // quire <- V1*V2           (accumulation bypassed)
    OPR_FMA = 2'b01,    // quire <- V1*V2 + V3
    OPR_MAC = 2'b10     // quire <- quire + V1*V2
  } opr_e;

  localparam int unsigned LANES  = 4;    // Posit-8 lanes in one SIMD word
  localparam int unsigned WORD_W = 32;   // SIMD posit word
  localparam int unsigned MANT_W = 28;   // SIMD mantissa vector (4 x 7 bits)
  localparam int unsigned PROD_W = 56;   // SIMD product vector
  localparam int unsigned QUIRE_W = 128; // SIMD quire vector
  localparam int unsigned SF_W   = 10;   // signed scale factor per lane

  typedef logic signed [SF_W-1:0] sf_t;

  // Number of active lanes in a mode.
  function automatic int unsigned lanes_of(input logic [1:0] mode);
    case (mode)
      MODE_P8:  return 4;
      MODE_P16: return 2;
      default:  return 1;
    endcase
  endfunction

  // Lane number that 1/4-segment s of a SIMD vector belongs to.
  function automatic int unsigned lane_of_seg(input logic [1:0] mode, input int unsigned s);
    case (mode)
      MODE_P8:  return s;
      MODE_P16: return s / 2;
      default:  return 0;
    endcase
  endfunction

  // Is segment s the lowest segment of its lane?
  function automatic logic seg_is_lane_lsb(input logic [1:0] mode, input int unsigned s);
    case (mode)
      MODE_P8:  return 1'b1;
      MODE_P16: return (s % 2) == 0;
      default:  return s == 0;
    endcase
  endfunction

  // Exponent size es of the posit format of a mode: 0, 1, 2.
  function automatic int unsigned es_of(input logic [1:0] mode);
    case (mode)
      MODE_P8:  return 0;
      MODE_P16: return 1;
      default:  return 2;
    endcase
  endfunction

  // Largest scale factor of Posit(n,es): (n-2) * 2^es (6, 28, 120).
  function automatic int maxscale_of(input logic [1:0] mode);
    case (mode)
      MODE_P8:  return 6;
      MODE_P16: return 28;
      default:  return 120;
    endcase
  endfunction

endpackage
