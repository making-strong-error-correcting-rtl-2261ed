// inner_rs_dec: one inner RS(36,32) decoder lane over GF(2^8).
//
// A lane checks one 36 B unit (32 B data + 4 B parity) per cycle and decides,
// as the paper describes, between three outcomes: clean (no error),
// corrected (1 or 2 byte errors fixed locally) or erasure (3 or more bad
// bytes detected; the chunk is handed to the outer erasure-only repair).
// Chunks of unprotected bit-planes (in_bypass = 1) skip the check and leave
// with status IN_BYPASS.
//
// How it works (the decoding method is this design's choice; the paper only
// gives the code and the outcomes): four syndromes S0..S3 are formed, then
//   * S = 0                       -> clean;
//   * det = S0*S2 + S1^2 = 0      -> single error X = S1/S0, value S0, valid
//                                    only if S2 = S1*X, S3 = S2*X and X is one
//                                    of the 36 code positions;
//   * det != 0                    -> two errors, locator x^2 + s1*x + s2 with
//                                    s1 = (S0*S3+S1*S2)/det, s2 = (S1*S3+S2^2)/det;
//                                    its roots are searched among the 36
//                                    positions in parallel (no serial Chien
//                                    sweep), e1 = (S1+S0*X2)/(X1+X2), e2 = S0+e1;
//   * anything else               -> erasure.
// Inverses come from a 256-entry table built at elaboration.
//
// Timing: fully pipelined, one unit per cycle. The arithmetic uses 4
// register stages; a delay line pads the lane to STAGES cycles in total,
// the paper's 12-stage inner path. out_* appear exactly STAGES cycles after
// in_valid. `in_tag` travels with the unit.
module inner_rs_dec
  import reach_pkg::*;
#(
  parameter int unsigned STAGES = 12,
  parameter int unsigned TAG_W  = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_bypass,
  input  unit_t             in_unit,     // {parity[31:0], data[255:0]}
  input  logic [TAG_W-1:0]  in_tag,
  output logic              out_valid,
  output chunk_t            out_data,
  output inner_stat_e       out_stat,
  output logic [1:0]        out_nerr,    // bytes corrected (0..2)
  output logic [TAG_W-1:0]  out_tag
);

  localparam int unsigned LOGIC_STAGES = 4;

  // symbol at code position j
  function automatic logic [7:0] sym(input unit_t u, input int j);
    return (j < 4) ? u[CHUNK_BITS + 8*j +: 8] : u[8*(j-4) +: 8];
  endfunction

  // ------------------------------------------------ stage 1: syndromes
  logic              v1, b1;
  chunk_t            u1;
  logic [TAG_W-1:0]  t1;
  logic [7:0]        s1q [4];
  logic [7:0]        syn [4];

  always_comb begin
    for (int l = 0; l < 4; l++) begin
      syn[l] = '0;
      for (int j = 0; j < INNER_N; j++)
        syn[l] ^= gf8_mul(sym(in_unit, j), GF8_EXP[(l*j) % 255]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; b1 <= 1'b0; u1 <= '0; t1 <= '0;
      for (int l = 0; l < 4; l++) s1q[l] <= '0;
    end else begin
      v1 <= in_valid; b1 <= in_bypass; u1 <= in_unit[CHUNK_BITS-1:0]; t1 <= in_tag;
      for (int l = 0; l < 4; l++) s1q[l] <= syn[l];
    end
  end

  // ------------------------------------------------ stage 2: key equation
  logic              v2, b2;
  chunk_t            u2;
  logic [TAG_W-1:0]  t2;
  logic [7:0]        s2q [4];
  logic              zero2, det0_2, single_ok2;
  logic [5:0]        spos2;
  logic [7:0]        sig1_2, sig2_2;

  logic [7:0] det_c, xs_c, sig1_c, sig2_c;
  logic       single_ok_c, found_c;
  logic [5:0] spos_c;

  always_comb begin
    det_c  = gf8_mul(s1q[0], s1q[2]) ^ gf8_mul(s1q[1], s1q[1]);
    xs_c   = gf8_mul(s1q[1], GF8_INV[s1q[0]]);
    sig1_c = gf8_mul(gf8_mul(s1q[0], s1q[3]) ^ gf8_mul(s1q[1], s1q[2]), GF8_INV[det_c]);
    sig2_c = gf8_mul(gf8_mul(s1q[1], s1q[3]) ^ gf8_mul(s1q[2], s1q[2]), GF8_INV[det_c]);
    found_c = 1'b0;
    spos_c  = '0;
    for (int j = 0; j < INNER_N; j++) begin
      if (!found_c && xs_c == GF8_EXP[j]) begin
        found_c = 1'b1;
        spos_c  = 6'(j);
      end
    end
    single_ok_c = (s1q[0] != 8'd0) && found_c &&
                  (s1q[2] == gf8_mul(s1q[1], xs_c)) &&
                  (s1q[3] == gf8_mul(s1q[2], xs_c));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; b2 <= 1'b0; u2 <= '0; t2 <= '0;
      zero2 <= 1'b0; det0_2 <= 1'b0; single_ok2 <= 1'b0; spos2 <= '0;
      sig1_2 <= '0; sig2_2 <= '0;
      for (int l = 0; l < 4; l++) s2q[l] <= '0;
    end else begin
      v2 <= v1; b2 <= b1; u2 <= u1; t2 <= t1;
      zero2      <= (s1q[0] | s1q[1] | s1q[2] | s1q[3]) == 8'd0;
      det0_2     <= (det_c == 8'd0);
      single_ok2 <= single_ok_c;
      spos2      <= spos_c;
      sig1_2     <= sig1_c;
      sig2_2     <= sig2_c;
      for (int l = 0; l < 4; l++) s2q[l] <= s1q[l];
    end
  end

  // ------------------------------------------------ stage 3: roots, values
  logic              v3;
  chunk_t            u3;
  logic [TAG_W-1:0]  t3;
  inner_stat_e       st3;
  logic [1:0]        ne3;
  logic [5:0]        p1_3, p2_3;
  logic [7:0]        e1_3, e2_3;

  logic [INNER_N-1:0] roots_c;
  logic [5:0]         r1_c, r2_c;
  logic [1:0]         nroot_c;
  logic [7:0]         x1_c, x2_c, ev1_c, ev2_c;

  always_comb begin
    for (int j = 0; j < INNER_N; j++)
      roots_c[j] = (gf8_mul(GF8_EXP[j], GF8_EXP[j]) ^ gf8_mul(sig1_2, GF8_EXP[j]) ^ sig2_2) == 8'd0;
    nroot_c = '0;
    r1_c = '0;
    r2_c = '0;
    for (int j = 0; j < INNER_N; j++) begin
      if (roots_c[j]) begin
        if (nroot_c == 2'd0) r1_c = 6'(j);
        else if (nroot_c == 2'd1) r2_c = 6'(j);
        if (nroot_c != 2'd3) nroot_c = nroot_c + 2'd1;
      end
    end
    x1_c  = GF8_EXP[8'(r1_c)];
    x2_c  = GF8_EXP[8'(r2_c)];
    ev1_c = gf8_mul(s2q[1] ^ gf8_mul(s2q[0], x2_c), GF8_INV[x1_c ^ x2_c]);
    ev2_c = s2q[0] ^ ev1_c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v3 <= 1'b0; u3 <= '0; t3 <= '0; st3 <= IN_CLEAN; ne3 <= '0;
      p1_3 <= '0; p2_3 <= '0; e1_3 <= '0; e2_3 <= '0;
    end else begin
      v3 <= v2; u3 <= u2; t3 <= t2;
      p1_3 <= '0; p2_3 <= '0; e1_3 <= '0; e2_3 <= '0; ne3 <= '0;
      if (b2) begin
        st3 <= IN_BYPASS;
      end else if (zero2) begin
        st3 <= IN_CLEAN;
      end else if (det0_2) begin
        if (single_ok2) begin
          st3 <= IN_CORRECTED; ne3 <= 2'd1; p1_3 <= spos2; e1_3 <= s2q[0];
        end else begin
          st3 <= IN_ERASURE;
        end
      end else if (nroot_c == 2'd2) begin
        st3 <= IN_CORRECTED; ne3 <= 2'd2;
        p1_3 <= r1_c; p2_3 <= r2_c; e1_3 <= ev1_c; e2_3 <= ev2_c;
      end else begin
        st3 <= IN_ERASURE;
      end
    end
  end

  // ------------------------------------------------ stage 4: apply
  logic              v4;
  chunk_t            d4;
  inner_stat_e       st4;
  logic [1:0]        ne4;
  logic [TAG_W-1:0]  t4;
  chunk_t            fix_c;

  always_comb begin
    fix_c = '0;
    for (int i = 0; i < INNER_K; i++) begin
      if (ne3 != 2'd0 && p1_3 == 6'(i + 4)) fix_c[8*i +: 8] ^= e1_3;
      if (ne3 == 2'd2 && p2_3 == 6'(i + 4)) fix_c[8*i +: 8] ^= e2_3;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v4 <= 1'b0; d4 <= '0; st4 <= IN_CLEAN; ne4 <= '0; t4 <= '0;
    end else begin
      v4  <= v3;
      d4  <= u3 ^ fix_c;
      st4 <= st3;
      ne4 <= ne3;
      t4  <= t3;
    end
  end

  // ------------------------------------------------ delay to STAGES
  localparam int unsigned PAD = (STAGES > LOGIC_STAGES) ? STAGES - LOGIC_STAGES : 0;
  localparam int unsigned PW  = 1 + CHUNK_BITS + 2 + 2 + TAG_W;

  logic [PW-1:0] last;
  assign last = {v4, d4, st4, ne4, t4};

  generate
    if (PAD == 0) begin : g_nopad
      assign {out_valid, out_data, out_stat, out_nerr, out_tag} = last;
    end else begin : g_pad
      logic [PW-1:0] dly [PAD];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < int'(PAD); i++) dly[i] <= '0;
        end else begin
          dly[0] <= last;
          for (int i = 1; i < int'(PAD); i++) dly[i] <= dly[i-1];
        end
      end
      logic [1:0] st_bits;
      assign {out_valid, out_data, st_bits, out_nerr, out_tag} = dly[PAD-1];
      assign out_stat = inner_stat_e'(st_bits);
    end
  endgenerate

  // the arithmetic needs its four stages
  initial assert (STAGES >= LOGIC_STAGES) else $error("inner_rs_dec: STAGES must be >= 4");

endmodule
