// data_return: data-return / write-commit stage.
//
// Holds the image of the 64 data chunks of the span being served. Chunks
// arrive from the inner lanes (accepted or locally corrected; rejected
// chunks are not written) and from the outer repair cluster (repaired
// chunks). For writes it also holds the new payload and the touched-chunk
// mask, and produces the "write deltas" (old xor new) that the differential
// parity engine consumes, as in the paper's block diagram; `apply` then
// merges the payload into the image, which is what is returned to the host
// and committed to HBM.
//
// Interface: lane writes take a full lane beat with a per-lane enable;
// repair writes one chunk (indices >= 64 are parity and ignored here);
// `pay_valid` loads the payload and its mask; `dl_idx` selects the chunk
// whose delta is shown on `dl_delta` (combinational); with `dl_full` the
// delta is taken against zero (full-span parity computation from the
// merged data). Everything is registered; no handshake, one cycle per op.
module data_return
  import reach_pkg::*;
#(
  parameter int unsigned LANES = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lw_valid,
  input  logic [LANES-1:0]  lw_en,
  input  chunk_t            lw_data [LANES],
  input  logic              rp_valid,
  input  cidx_t             rp_chunk,
  input  chunk_t            rp_data,
  input  logic              pay_valid,
  input  logic [LANES-1:0]  pay_mask,
  input  chunk_t            pay_data [LANES],
  input  logic [5:0]        dl_idx,
  input  logic              dl_full,
  output chunk_t            dl_delta,
  output logic              dl_touched,
  input  logic              apply,
  output chunk_t            image [LANES]
);

  chunk_t           img_q [LANES];
  chunk_t           new_q [LANES];
  logic [LANES-1:0] msk_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < int'(LANES); l++) begin img_q[l] <= '0; new_q[l] <= '0; end
      msk_q <= '0;
    end else begin
      if (lw_valid)
        for (int l = 0; l < int'(LANES); l++) if (lw_en[l]) img_q[l] <= lw_data[l];
      if (rp_valid && rp_chunk < cidx_t'(LANES)) img_q[rp_chunk[5:0]] <= rp_data;
      if (pay_valid) begin
        msk_q <= pay_mask;
        for (int l = 0; l < int'(LANES); l++) new_q[l] <= pay_data[l];
      end
      if (apply)
        for (int l = 0; l < int'(LANES); l++) if (msk_q[l]) img_q[l] <= new_q[l];
    end
  end

  chunk_t merged_c;
  assign merged_c   = msk_q[dl_idx] ? new_q[dl_idx] : img_q[dl_idx];
  assign dl_touched = msk_q[dl_idx];
  assign dl_delta   = dl_full ? merged_c
                    : (msk_q[dl_idx] ? (img_q[dl_idx] ^ new_q[dl_idx]) : '0);
  assign image      = img_q;

endmodule
