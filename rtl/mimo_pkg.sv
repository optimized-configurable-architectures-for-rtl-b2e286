// mimo_pkg: widths, types and arithmetic helpers shared by the soft-input
// soft-output MIMO detector.
//
// Number formats. The detector constants A..H arrive as 17-bit two's
// complement words (the 17-bit datapath of the synthesized core, read as a
// 9.8 fixed-point number; only the raw integer matters here). Prior LLRs are
// 8-bit words with the same LSB as the constants. Distances inside the core
// are kept in IW = 28 bits so that the largest multiples (225*A, 450*E, sums
// over three sliced layers) never wrap; this widening is a choice of this
// design, the paper only quotes the 17-bit datapath. Output LLRs are
// saturated back to 17 bits.
//
// Constellations. Every QAM symbol is split into two PAM dimensions. A
// dimension with k bits has P = 2**k levels p_i = 2*i - (P-1), i = 0..P-1,
// i.e. the odd integers of LTE, ascending with the index. The bits of a
// level follow the LTE Gray map: the real part carries bits b0,b2,b4,b6 and
// the imaginary part b1,b3,b5,b7 (the split shown in the paper's 64-QAM
// example); within a dimension the first bit is the sign and each further
// bit folds the magnitude around P/2, P/4, ... as in TS 36.211. A bit value
// 0 is the antipodal value +1. BPSK is taken as a one-bit real dimension and
// a single-level (p = 0) imaginary dimension, which is this design's choice.
package mimo_pkg;

  localparam int DW      = 17;   // constant / output LLR width (paper: 17-bit datapath)
  localparam int LW      = 8;    // prior LLR width (paper: 8-bit input LLRs)
  localparam int IW      = 28;   // internal distance width (design choice)
  localparam int KMAX    = 4;    // bits per PAM dimension at 256-QAM
  localparam int PMAX    = 16;   // 16-PAM
  localparam int NCAND   = 256;  // enumerated candidates, 256-QAM
  localparam int NLMAX   = 4;    // up to 4 layers
  localparam int QBITS   = 8;    // bits per symbol at 256-QAM
  localparam int NHYP    = 4;    // interferer hypotheses (4..256-QAM)
  localparam int CORE_LAT = 6;   // pipeline stages of the 2x2 core (paper: 6)

  typedef logic signed [DW-1:0]  coef_t;
  typedef logic signed [LW-1:0]  llr_t;
  typedef logic signed [IW-1:0]  dist_t;
  typedef logic signed [DW-1:0]  llro_t;
  typedef logic [3:0]            pidx_t;     // PAM level index 0..15
  typedef logic [7:0]            sym_t;      // {real index, imaginary index}

  localparam dist_t DIST_MAX = {1'b0, {(IW-1){1'b1}}};
  localparam dist_t DIST_MIN = {1'b1, {(IW-1){1'b0}}};

  // Modulation of one layer.
  typedef enum logic [2:0] {
    MOD_BPSK  = 3'd0,
    MOD_QPSK  = 3'd1,
    MOD_QAM16 = 3'd2,
    MOD_QAM64 = 3'd3,
    MOD_QAM256 = 3'd4
  } mod_t;

  // Constants of one detection pass (eqs. (16)-(21) of the 2-layer core,
  // with B,E,F,G,H taken from the sliced layer n in the N-layer case).
  typedef struct packed {
    coef_t a, b, c, d, e, f, g, h;
  } coefs_t;

  // Side-band tag that travels through the core pipeline with each pass.
  typedef struct packed {
    logic       first;    // first pass of a WLD: add f1(x1)
    logic       last;     // last pass of a WLD: list complete
    logic       bank;     // ping-pong bank of the list buffer
    logic [1:0] list;     // WLD index m (or interferer hypothesis)
    logic [1:0] layer;    // sliced layer n of this pass
    logic       vec_last; // last pass of the whole vector (or tone)
    logic       mu;       // pass belongs to MU-MIMO classification
    logic [2:0] nl;       // number of layers of the vector
    mod_t [NLMAX-1:0] mods; // modulations of the vector's layers
  } tag_t;

  // Bits per dimension, real and imaginary.
  function automatic int unsigned kbits_re(mod_t m);
    case (m)
      MOD_BPSK:  return 1;
      MOD_QPSK:  return 1;
      MOD_QAM16: return 2;
      MOD_QAM64: return 3;
      default:   return 4;
    endcase
  endfunction

  function automatic int unsigned kbits_im(mod_t m);
    case (m)
      MOD_BPSK:  return 0;
      MOD_QPSK:  return 1;
      MOD_QAM16: return 2;
      MOD_QAM64: return 3;
      default:   return 4;
    endcase
  endfunction

  // PAM level of index i in a P = 2**k level dimension.
  function automatic int level(int unsigned k, int unsigned i);
    return 2 * int'(i) - ((1 << k) - 1);
  endfunction

  // Antipodal Gray bits s_j (+1 for bit 0, -1 for bit 1) of level index i,
  // returned as bit values: result[j] = 1 when bit j is 1.
  function automatic logic [KMAX-1:0] gray_bits(int unsigned k, int unsigned i);
    logic [KMAX-1:0] r;
    int lv, v, t;
    r  = '0;
    lv = level(k, i);
    if (k > 0) begin
      r[0] = (lv < 0);
      v = (lv < 0) ? -lv : lv;
      t = (1 << k) / 2;
      for (int j = 1; j < KMAX; j++) begin
        if (j < int'(k)) begin
          r[j] = (t - v) < 0;
          v    = (t - v < 0) ? v - t : t - v;
          t    = t / 2;
        end
      end
    end
    return r;
  endfunction

  // b(p)^T lambda over one dimension: sum_j s_j * lambda_j.
  function automatic dist_t bias_dot(int unsigned k, int unsigned i,
                                     llr_t l0, llr_t l1, llr_t l2, llr_t l3);
    logic [KMAX-1:0] bits;
    dist_t s;
    llr_t  lam [KMAX];
    lam[0] = l0; lam[1] = l1; lam[2] = l2; lam[3] = l3;
    bits = gray_bits(k, i);
    s = '0;
    for (int j = 0; j < KMAX; j++)
      if (j < int'(k))
        s = bits[j] ? s - dist_t'(lam[j]) : s + dist_t'(lam[j]);
    return s;
  endfunction

  // Floor division by a small positive constant (the paper's division by
  // 3, 5, ..., 15 after removing powers of two).
  function automatic dist_t floor_div(dist_t x, int m);
    int xi;
    xi = int'(x);
    if (xi >= 0) return dist_t'(xi / m);
    else         return dist_t'(-((-xi + m - 1) / m));
  endfunction

  // Saturating add of distances; DIST_MAX marks "no candidate".
  function automatic dist_t sat_add(dist_t x, dist_t y);
    logic signed [IW:0] s;
    if (x == DIST_MAX || y == DIST_MAX) return DIST_MAX;
    s = $signed({x[IW-1], x}) + $signed({y[IW-1], y});
    if (s > $signed({1'b0, DIST_MAX})) return DIST_MAX;
    if (s < $signed({1'b1, DIST_MIN})) return DIST_MIN;
    return s[IW-1:0];
  endfunction

  // Output LLR min0 - min1 of two minima. An empty side (DIST_MAX) makes the
  // bit certain and gives the saturated value; two empty sides give 0.
  function automatic llro_t llr_sub(dist_t min0, dist_t min1);
    localparam logic signed [IW:0] LMAX = (IW+1)'((1 <<< (DW-1)) - 1);
    localparam logic signed [IW:0] LMIN = -(IW+1)'(1 <<< (DW-1));
    logic signed [IW:0] d;
    if (min0 == DIST_MAX && min1 == DIST_MAX) return '0;
    d = $signed({min0[IW-1], min0}) - $signed({min1[IW-1], min1});
    if (min0 == DIST_MAX || d > LMAX) return llro_t'(LMAX);
    if (min1 == DIST_MAX || d < LMIN) return llro_t'(LMIN);
    return llro_t'(d);
  endfunction

  // u * m for an odd magnitude m in 1..15, built from shifts and adds as the
  // paper's multiplier-free product terms.
  function automatic dist_t mul_odd(dist_t u, logic [3:0] m);
    case (m)
      4'd1:  return u;
      4'd3:  return (u <<< 1) + u;
      4'd5:  return (u <<< 2) + u;
      4'd7:  return (u <<< 3) - u;
      4'd9:  return (u <<< 3) + u;
      4'd11: return (u <<< 3) + (u <<< 1) + u;
      4'd13: return (u <<< 4) - (u <<< 1) - u;
      4'd15: return (u <<< 4) - u;
      default: return '0;
    endcase
  endfunction

endpackage
