// diff_parity_engine: outer-parity update by linearity (differential parity).
//
// The outer parity is a linear map P = G_out * D over GF(2^16). For a small
// write the engine therefore never rereads the span: starting from the old
// parity it adds RS(D_new) + RS(D_old) = RS(delta) of each touched chunk,
// as the paper's differential-parity equation prescribes. Fed with every
// data chunk from a cleared state, the same datapath computes the full
// parity of a span (sequential writes).
//
// Per update, for each of the 16 interleaves s and parity symbol k:
//   par[k][s] ^= delta_s * G_out[pos(chunk)][k]
// with G_out the generator remainders of reach_pkg (the field tables shared
// with the outer erasure pipes). 64 GF(2^16) multipliers, one chunk per cycle.
//
// Interface: `clear` zeroes the parity; `load_valid` writes parity chunks
// (index k = span chunk 64+k) with the values read from HBM (or
// repaired) into the parity chunks selected by `load_mask`; `upd_valid` applies the delta of data chunk `upd_chunk`
// (0..63). Priority: clear, load, update. `parity` shows the register state
// (updates are visible the cycle after they are applied).
module diff_parity_engine
  import reach_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   load_valid,
  input  logic [N_PAR_CH-1:0] load_mask,
  input  chunk_t load_data [N_PAR_CH],
  input  logic   upd_valid,
  input  logic [5:0] upd_chunk,
  input  chunk_t upd_delta,
  output chunk_t parity [N_PAR_CH]
);

  chunk_t par_q [N_PAR_CH];
  chunk_t contrib [N_PAR_CH];

  always_comb begin
    for (int k = 0; k < int'(N_PAR_CH); k++) begin
      for (int s = 0; s < int'(SYM_PER_CH); s++)
        contrib[k][16*s +: 16] = gf16_mul(upd_delta[16*s +: 16],
                                          OUTER_G[(int'(upd_chunk) + 4) * 4 + k]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(N_PAR_CH); k++) par_q[k] <= '0;
    end else if (clear) begin
      for (int k = 0; k < int'(N_PAR_CH); k++) par_q[k] <= '0;
    end else if (load_valid) begin
      for (int k = 0; k < int'(N_PAR_CH); k++) if (load_mask[k]) par_q[k] <= load_data[k];
    end else if (upd_valid) begin
      for (int k = 0; k < int'(N_PAR_CH); k++) par_q[k] <= par_q[k] ^ contrib[k];
    end
  end

  assign parity = par_q;

endmodule
