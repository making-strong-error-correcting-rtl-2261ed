// rs8_ref.svh: reference RS(36,32) arithmetic for the testbenches, written
// independently of the RTL tables: a shift-and-add GF(2^8) multiplier
// (x^8+x^4+x^3+x^2+1) and a classic LFSR division encoder computing
// parity = x^4*d(x) mod g(x), g(x) = (x+1)(x+a)(x+a^2)(x+a^3).
function automatic logic [7:0] r8_mul(input logic [7:0] a, input logic [7:0] b);
  logic [15:0] p;
  p = '0;
  for (int i = 0; i < 8; i++) if (b[i]) p ^= 16'(a) << i;
  for (int i = 15; i >= 8; i--) if (p[i]) p ^= 16'h11D << (i - 8);
  return p[7:0];
endfunction

function automatic logic [31:0] r8_encode(input logic [255:0] d);
  logic [7:0] g [5];
  logic [7:0] r [4];
  logic [7:0] al, fb;
  g = '{8'd1, 8'd0, 8'd0, 8'd0, 8'd0};
  al = 8'd1;
  for (int l = 0; l < 4; l++) begin
    for (int k = 4; k > 0; k--) g[k] = g[k-1] ^ r8_mul(g[k], al);
    g[0] = r8_mul(g[0], al);
    al = r8_mul(al, 8'd2);
  end
  r = '{8'd0, 8'd0, 8'd0, 8'd0};
  for (int i = 31; i >= 0; i--) begin
    fb = d[8*i +: 8] ^ r[3];
    r[3] = r[2] ^ r8_mul(fb, g[3]);
    r[2] = r[1] ^ r8_mul(fb, g[2]);
    r[1] = r[0] ^ r8_mul(fb, g[1]);
    r[0] = r8_mul(fb, g[0]);
  end
  return {r[3], r[2], r[1], r[0]};
endfunction

function automatic logic [255:0] rand256();
  logic [255:0] v;
  for (int i = 0; i < 8; i++) v[32*i +: 32] = $urandom;
  return v;
endfunction
