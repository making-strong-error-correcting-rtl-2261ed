// reach_pkg: types, constants and finite-field arithmetic shared by the
// two-level Reed-Solomon HBM ECC controller.
//
// Code geometry (follows the paper): a 32 B data chunk carries an inner
// RS(36,32) code over GF(2^8) (4 parity bytes, corrects up to 2 bytes). An
// outer code over GF(2^16) spans W = 2048 B = 64 data chunks and holds
// P = 128 B = 4 parity chunks (r = 64 symbols, chunk erasure capacity
// C = r/16 = 4). Each 32 B chunk is 16 GF(2^16) symbols.
//
// Design choices not given by the paper:
//  * Field polynomials: GF(2^8) x^8+x^4+x^3+x^2+1 (0x11D), GF(2^16)
//    x^16+x^12+x^3+x+1 (0x1100B), primitive element alpha = x.
//  * Both codes use evaluation points a_j = alpha^j and check equations
//    S_l = sum_j y_j a_j^l = 0, l = 0..r-1 (generator roots alpha^0..alpha^(r-1)).
//  * Systematic layout: parity symbols sit at code positions 0..3, data at
//    positions 4..n-1. Parity = sum over data positions p of d_p * (x^p mod g(x)).
//  * The outer code is realised as 16 interleaved RS(68,64) codes: symbol s
//    (bits 16s+15:16s) of every chunk belongs to interleave s. A lost chunk
//    is then one erasure in each interleave, which gives exactly the paper's
//    chunk capacity C = floor(r/16) = 4 with r = 64 parity symbols in total.
//  * Chunk c of a span (0..63 data, 64..67 parity) sits at outer code
//    position c+4 (data) or c-64 (parity).
package reach_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned CHUNK_BITS   = 256;        // 32 B payload
  localparam int unsigned IPAR_BITS    = 32;         // 4 B inner parity
  localparam int unsigned UNIT_BITS    = CHUNK_BITS + IPAR_BITS; // 36 B on the wire
  localparam int unsigned N_DATA_CH    = 64;         // W/32, W = 2048 B
  localparam int unsigned N_PAR_CH     = 4;          // P/32, P = 128 B
  localparam int unsigned N_CW_CH      = N_DATA_CH + N_PAR_CH; // 68 chunks per outer codeword
  localparam int unsigned SYM_PER_CH   = 16;         // GF(2^16) symbols per chunk
  localparam int unsigned OUTER_R      = 4;          // parity symbols per interleave
  localparam int unsigned ERASE_CAP    = OUTER_R;    // C = floor(64/16): one erasure per interleave per parity symbol
  localparam int unsigned INNER_N      = 36;
  localparam int unsigned INNER_K      = 32;

  typedef logic [CHUNK_BITS-1:0] chunk_t;
  typedef logic [IPAR_BITS-1:0]  ipar_t;
  typedef logic [UNIT_BITS-1:0]  unit_t;     // {ipar, chunk}
  typedef logic [6:0]            cidx_t;     // chunk index within a span, 0..67

  // outcome of the inner RS check of one chunk
  typedef enum logic [1:0] {
    IN_CLEAN     = 2'd0,
    IN_CORRECTED = 2'd1,
    IN_ERASURE   = 2'd2,
    IN_BYPASS    = 2'd3     // unprotected bit-plane, no inner code
  } inner_stat_e;

  // host-visible completion status
  typedef enum logic [1:0] {
    ST_OK          = 2'd0,  // fast path, nothing to fix
    ST_CORRECTED   = 2'd1,  // fast path, inner code corrected bytes
    ST_REPAIRED    = 2'd2,  // outer erasure-only repair was used
    ST_UNCORR      = 2'd3   // more than C chunk erasures
  } rsp_stat_e;

  typedef enum logic [1:0] {
    OP_READ  = 2'd0,
    OP_WRITE = 2'd1
  } op_e;

  // event counters of the controller (saturate at 2^32-1 never reached in practice)
  typedef struct packed {
    logic [31:0] requests;     // host requests completed
    logic [31:0] fast_path;    // completed without the outer code
    logic [31:0] inner_fixed;  // requests where the inner code corrected bytes
    logic [31:0] escalations;  // full-codeword reads for outer repair
    logic [31:0] repaired;     // requests completed after outer repair
    logic [31:0] uncorrectable;// more than C chunk erasures
    logic [31:0] diff_writes;  // writes committed with differential parity
    logic [31:0] full_writes;  // whole-span writes (parity computed from scratch)
    logic [31:0] bypassed;     // unprotected-plane requests (no ECC)
    logic [31:0] stall_cycles; // cycles the reliability path is stalled for outer repair
  } reach_stats_t;

  // ------------------------------------------------------------- GF(2^8)
  localparam logic [8:0] GF8_POLY = 9'h11D;

  function automatic logic [7:0] gf8_mul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= aa;
      aa = aa[7] ? ((aa << 1) ^ GF8_POLY[7:0]) : (aa << 1);
    end
    return p;
  endfunction

  typedef logic [7:0] gf8_tab_t [256];

  // alpha^i for i = 0..254 (entry 255 repeats alpha^0)
  function automatic gf8_tab_t gf8_exp_table();
    gf8_tab_t t;
    logic [7:0] x;
    x = 8'd1;
    for (int i = 0; i < 256; i++) begin
      t[i] = x;
      x = gf8_mul(x, 8'd2);
    end
    return t;
  endfunction

  // multiplicative inverse, inv[0] = 0
  function automatic gf8_tab_t gf8_inv_table();
    gf8_tab_t e, t;
    e = gf8_exp_table();
    t[0] = 8'd0;
    for (int i = 0; i < 255; i++) t[e[i]] = e[(255 - i) % 255];
    return t;
  endfunction

  localparam gf8_tab_t GF8_EXP = gf8_exp_table();
  localparam gf8_tab_t GF8_INV = gf8_inv_table();

  // Inner generator remainders: G8[p*4+k] = coefficient k of x^p mod g8(x),
  // g8(x) = (x+1)(x+a)(x+a^2)(x+a^3). Index p = 0..35.
  typedef logic [7:0] g8_tab_t [INNER_N*4];   // entry p*4+k

  function automatic g8_tab_t inner_gen_table();
    g8_tab_t t;
    logic [7:0] g [5];
    logic [7:0] r [4];
    logic [7:0] top;
    // g(x) = prod (x + a^l)
    g = '{8'd1, 8'd0, 8'd0, 8'd0, 8'd0};
    for (int l = 0; l < 4; l++) begin
      for (int d = 4; d > 0; d--) g[d] = g[d-1] ^ gf8_mul(g[d], GF8_EXP[l]);
      g[0] = gf8_mul(g[0], GF8_EXP[l]);
    end
    r = '{8'd1, 8'd0, 8'd0, 8'd0};         // x^0
    for (int p = 0; p < INNER_N; p++) begin
      for (int k = 0; k < 4; k++) t[p*4+k] = r[k];
      // r <- r * x mod g
      top = r[3];
      for (int k = 3; k > 0; k--) r[k] = r[k-1] ^ gf8_mul(top, g[k]);
      r[0] = gf8_mul(top, g[0]);
    end
    return t;
  endfunction

  localparam g8_tab_t INNER_G = inner_gen_table();

  // ------------------------------------------------------------ GF(2^16)
  localparam logic [16:0] GF16_POLY = 17'h1100B;

  function automatic logic [15:0] gf16_mul(input logic [15:0] a, input logic [15:0] b);
    logic [15:0] p, aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < 16; i++) begin
      if (b[i]) p ^= aa;
      aa = aa[15] ? ((aa << 1) ^ GF16_POLY[15:0]) : (aa << 1);
    end
    return p;
  endfunction

  function automatic logic [15:0] gf16_sq(input logic [15:0] a);
    return gf16_mul(a, a);
  endfunction

  typedef logic [15:0] a16_tab_t [N_CW_CH];
  // alpha^p for outer code positions p = 0..67
  function automatic a16_tab_t outer_pos_table();
    a16_tab_t t;
    logic [15:0] x;
    x = 16'd1;
    for (int p = 0; p < N_CW_CH; p++) begin
      t[p] = x;
      x = gf16_mul(x, 16'd2);
    end
    return t;
  endfunction

  localparam a16_tab_t OUTER_X = outer_pos_table();

  // Outer generator remainders G_out: G16[p*4+k] = coeff k of x^p mod g16(x),
  // g16(x) = (x+1)(x+a)(x+a^2)(x+a^3) over GF(2^16). p = 0..67.
  typedef logic [15:0] g16_tab_t [N_CW_CH*4]; // entry p*4+k

  function automatic g16_tab_t outer_gen_table();
    g16_tab_t t;
    logic [15:0] g [5];
    logic [15:0] r [4];
    logic [15:0] top;
    logic [15:0] al;
    g  = '{16'd1, 16'd0, 16'd0, 16'd0, 16'd0};
    al = 16'd1;
    for (int l = 0; l < 4; l++) begin
      for (int d = 4; d > 0; d--) g[d] = g[d-1] ^ gf16_mul(g[d], al);
      g[0] = gf16_mul(g[0], al);
      al = gf16_mul(al, 16'd2);
    end
    r = '{16'd1, 16'd0, 16'd0, 16'd0};
    for (int p = 0; p < N_CW_CH; p++) begin
      for (int k = 0; k < 4; k++) t[p*4+k] = r[k];
      top = r[3];
      for (int k = 3; k > 0; k--) r[k] = r[k-1] ^ gf16_mul(top, g[k]);
      r[0] = gf16_mul(top, g[0]);
    end
    return t;
  endfunction

  localparam g16_tab_t OUTER_G = outer_gen_table();

  // outer code position of span chunk c (0..63 data, 64..67 parity)
  function automatic logic [6:0] chunk_pos(input logic [6:0] c);
    return (c < 7'(N_DATA_CH)) ? 7'(c + 7'd4) : 7'(c - 7'(N_DATA_CH));
  endfunction

  // span chunk at outer code position p
  function automatic logic [6:0] pos_chunk(input logic [6:0] p);
    return (p < 7'd4) ? 7'(p + 7'(N_DATA_CH)) : 7'(p - 7'd4);
  endfunction

endpackage
