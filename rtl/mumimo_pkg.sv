// Shared types, number formats and constellation tables of the 2x2 MU-MIMO
// receiver with joint interferer-constellation classification and ML detection.
//
// Number formats (this design's choice; the algorithm fixes none of them):
//   * received samples y and channel coefficients h: signed 16 bit, 12 fraction
//     bits (Q3.12);
//   * constellation points: signed Q3.12 levels, odd integers times the unit
//     energy scale of the constellation (1/sqrt(2), 1/sqrt(10), 1/sqrt(42));
//   * inverse noise variance 1/sigma^2: unsigned 16 bit, 8 fraction bits;
//   * distance metric d(x): unsigned 24 bit, 8 fraction bits, saturating.
//
// Symbol indexing: a symbol index k of a constellation with Q bits per symbol
// carries bit b_j of the symbol in k[j]. The bit-to-level map is the one of
// LTE (3GPP TS 36.211): even bits b0,b2,b4 select the in-phase level, odd bits
// b1,b3,b5 the quadrature level, b0/b1 are the signs. A bit value 0 stands for
// b_j = +1 and 1 for b_j = -1.
package mumimo_pkg;

  // Constellation of a user. MOD_NONE is the "co-scheduled user absent" case.
  typedef enum logic [1:0] {
    MOD_NONE  = 2'd0,
    MOD_QAM4  = 2'd1,
    MOD_QAM16 = 2'd2,
    MOD_QAM64 = 2'd3
  } mod_e;

  localparam int unsigned NUM_HYP   = 4;   // |set of interferer hypotheses|
  localparam int unsigned MAX_BITS  = 6;   // bits per symbol of 64-QAM
  localparam int unsigned MAX_POINTS = 64; // points of 64-QAM

  localparam int unsigned SAMPLE_W  = 16;
  localparam int unsigned SAMPLE_F  = 12;
  localparam int unsigned INVNV_W   = 16;
  localparam int unsigned INVNV_F   = 8;
  localparam int unsigned DIST_W    = 24;
  localparam int unsigned DIST_F    = 8;
  localparam int unsigned LLR_W     = DIST_W + 1;

  typedef logic [DIST_W-1:0]        dist_t;
  typedef logic signed [LLR_W-1:0]  llr_t;
  typedef logic [MAX_BITS-1:0]      sym_idx_t;
  typedef logic signed [SAMPLE_W-1:0] sample_t;

  typedef struct packed {
    sample_t re;
    sample_t im;
  } cplx_t;

  // Everything the detector needs for one resource element (tone).
  typedef struct packed {
    cplx_t [1:0]          y;     // received vector, y[r] at receive antenna r
    cplx_t [1:0]          h1;    // desired user's effective channel column
    cplx_t [1:0]          h2;    // co-scheduled user's effective channel column
    logic [INVNV_W-1:0]   inv_nv; // 1/sigma^2 (R = sigma^2 I)
  } tone_t;

  // One entry of a distance buffer.
  typedef struct packed {
    dist_t    dmin;
    sym_idx_t x2;
  } dist_entry_t;

  typedef enum logic {
    MODE_CLASSIFY = 1'b0,  // all four hypotheses, M_I estimated over N tones
    MODE_DETECT   = 1'b1   // normal ML detection with the estimated M_I
  } rx_mode_e;

  function automatic int unsigned mod_bits(mod_e m);
    case (m)
      MOD_QAM4:  return 2;
      MOD_QAM16: return 4;
      MOD_QAM64: return 6;
      default:   return 0;
    endcase
  endfunction

  function automatic int unsigned mod_points(mod_e m);
    return 1 << mod_bits(m);
  endfunction

  // Levels per dimension (2, 4 or 8); 1 for MOD_NONE.
  function automatic int unsigned mod_pam(mod_e m);
    return 1 << (mod_bits(m) / 2);
  endfunction

  // Unit-energy scale in Q.12: round(4096/sqrt(2)), round(4096/sqrt(10)),
  // round(4096/sqrt(42)).
  function automatic int mod_scale(mod_e m);
    case (m)
      MOD_QAM4:  return 2896;
      MOD_QAM16: return 1295;
      MOD_QAM64: return 632;
      default:   return 0;
    endcase
  endfunction

  // Odd integer level (+-1, +-3, ...) of one dimension from its three bits
  // (sign bit s, then the magnitude bits m1, m2), LTE mapping.
  function automatic int pam_odd(mod_e m, logic s, logic m1, logic m2);
    int mag;
    case (m)
      MOD_QAM4:  mag = 1;
      MOD_QAM16: mag = m1 ? 3 : 1;
      MOD_QAM64: mag = m1 ? (m2 ? 7 : 5) : (m2 ? 1 : 3);
      default:   mag = 0;
    endcase
    return s ? -mag : mag;
  endfunction

  // Inverse of pam_odd: bits {s, m1, m2} of an odd level.
  function automatic logic [2:0] pam_bits(mod_e m, int odd);
    int mag;
    logic s, m1, m2;
    s   = (odd < 0);
    mag = s ? -odd : odd;
    m1  = 1'b0;
    m2  = 1'b0;
    case (m)
      MOD_QAM16: m1 = (mag == 3);
      MOD_QAM64: begin
        m1 = (mag >= 5);
        m2 = (mag == 1) || (mag == 7);
      end
      default: ;
    endcase
    return {s, m1, m2};
  endfunction

  // Constellation point of symbol index k in Q3.12 (zero for MOD_NONE).
  function automatic cplx_t mod_point(mod_e m, sym_idx_t k);
    cplx_t p;
    int    sc;
    sc   = mod_scale(m);
    p.re = sample_t'(sc * pam_odd(m, k[0], k[2], k[4]));
    p.im = sample_t'(sc * pam_odd(m, k[1], k[3], k[5]));
    return p;
  endfunction

  // Symbol index from the odd in-phase and quadrature levels.
  function automatic sym_idx_t mod_index(mod_e m, int odd_re, int odd_im);
    logic [2:0] bi, bq;
    sym_idx_t   k;
    bi = pam_bits(m, odd_re);
    bq = pam_bits(m, odd_im);
    k  = {bq[0], bi[0], bq[1], bi[1], bq[2], bi[2]};
    return (m == MOD_NONE) ? '0 : k;
  endfunction

endpackage
