// inner_rs_enc: systematic RS(36,32) encoder over GF(2^8) for one 32 B chunk.
//
// Each chunk written to HBM is extended by 4 parity bytes so that the inner
// decoder can accept, correct (up to 2 bytes) or reject it on its own. The
// code length, data length and field size follow the paper; the field
// polynomial (0x11D), the evaluation points alpha^j and the byte layout are
// this design's choice (see reach_pkg).
//
// Layout: data byte i (bits 8i+7:8i of `data`) is code position 4+i, parity
// byte k (bits 8k+7:8k of `parity`) is code position k. The parity is the
// linear map parity_k = sum_i data_i * G8[(4+i)*4+k], where G8[p] holds the
// coefficients of x^p mod g(x), g(x) = (x+1)(x+a)(x+a^2)(x+a^3).
//
// Timing: purely combinational; the inner lane array registers the result.
module inner_rs_enc
  import reach_pkg::*;
(
  input  chunk_t data,     // 32 B payload
  output ipar_t  parity    // 4 B inner parity
);

  always_comb begin
    parity = '0;
    for (int i = 0; i < INNER_K; i++) begin
      for (int k = 0; k < 4; k++) begin
        parity[8*k +: 8] ^= gf8_mul(data[8*i +: 8], INNER_G[(4+i)*4+k]);
      end
    end
  end

endmodule
