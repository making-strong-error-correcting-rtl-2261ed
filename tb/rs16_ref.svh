// rs16_ref.svh: reference outer-code arithmetic for the testbenches, written
// independently of the RTL: a shift-and-add GF(2^16) multiplier
// (x^16+x^12+x^3+x+1) and an LFSR-division encoder for one interleave,
// parity = x^4*d(x) mod g(x), g(x) = (x+1)(x+a)(x+a^2)(x+a^3), where data
// symbol i (chunk i, i = 0..63) is the coefficient of x^(i+4) and parity
// symbol k (chunk 64+k) the coefficient of x^k.
function automatic logic [15:0] r16_mul(input logic [15:0] a, input logic [15:0] b);
  logic [31:0] p;
  p = '0;
  for (int i = 0; i < 16; i++) if (b[i]) p ^= 32'(a) << i;
  for (int i = 31; i >= 16; i--) if (p[i]) p ^= 32'h1100B << (i - 16);
  return p[15:0];
endfunction

// encode the 64 data chunks of one span: returns the 4 parity chunks
function automatic void r16_encode(input logic [255:0] d [64], output logic [255:0] par [4]);
  logic [15:0] g [5];
  logic [15:0] r [4];
  logic [15:0] al, fb;
  g = '{16'd1, 16'd0, 16'd0, 16'd0, 16'd0};
  al = 16'd1;
  for (int l = 0; l < 4; l++) begin
    for (int k = 4; k > 0; k--) g[k] = g[k-1] ^ r16_mul(g[k], al);
    g[0] = r16_mul(g[0], al);
    al = r16_mul(al, 16'd2);
  end
  for (int s = 0; s < 16; s++) begin
    r = '{16'd0, 16'd0, 16'd0, 16'd0};
    for (int i = 63; i >= 0; i--) begin
      fb = d[i][16*s +: 16] ^ r[3];
      r[3] = r[2] ^ r16_mul(fb, g[3]);
      r[2] = r[1] ^ r16_mul(fb, g[2]);
      r[1] = r[0] ^ r16_mul(fb, g[1]);
      r[0] = r16_mul(fb, g[0]);
    end
    for (int k = 0; k < 4; k++) par[k][16*s +: 16] = r[k];
  end
endfunction
