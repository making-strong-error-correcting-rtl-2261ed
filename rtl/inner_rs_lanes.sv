// inner_rs_lanes: the array of inner RS(36,32) lanes (64 in the paper).
//
// Each lane decodes one 36 B unit per cycle (inner_rs_dec, 12-stage
// pipeline) and each lane has an encoder for the write direction
// (inner_rs_enc, combinational). For a beat, the array also reports a
// summary the controller decides on: whether any masked lane was rejected
// (erasure), how many were, and whether any was corrected. Lanes whose
// mask bit is low are idle. `in_bypass` marks a beat of unprotected
// bit-planes (no inner code).
//
// Timing: out_* follow in_* by STAGES cycles (12 by default).
//
// The lane count and the one-chunk-per-cycle rate follow the paper; the
// beat summary signals are this design's interface to the controller.
module inner_rs_lanes
  import reach_pkg::*;
#(
  parameter int unsigned LANES  = 64,
  parameter int unsigned STAGES = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  // decode
  input  logic              in_valid,
  input  logic              in_bypass,
  input  logic [LANES-1:0]  in_mask,
  input  chunk_t            in_data [LANES],
  input  ipar_t             in_ipar [LANES],
  output logic              out_valid,
  output logic [LANES-1:0]  out_mask,
  output chunk_t            out_data [LANES],
  output inner_stat_e       out_stat [LANES],
  output logic [LANES-1:0]  out_erased,
  output logic              out_any_erasure,
  output logic              out_any_corrected,
  output logic [$clog2(LANES+1)-1:0] out_n_erased,
  output logic [$clog2(2*LANES+1)-1:0] out_bytes_fixed, // bytes corrected in the beat
  // encode
  input  chunk_t            enc_data [LANES],
  output ipar_t             enc_ipar [LANES]
);

  logic [LANES-1:0] lv;
  logic [1:0]       nerr [LANES];
  logic [0:0]       tag_unused [LANES];   // lanes carry no tag here

  for (genvar l = 0; l < int'(LANES); l++) begin : g_lane
    inner_rs_dec #(.STAGES(STAGES), .TAG_W(1)) u_dec (
      .clk, .rst_n,
      .in_valid  (in_valid && in_mask[l]),
      .in_bypass (in_bypass),
      .in_unit   ({in_ipar[l], in_data[l]}),
      .in_tag    (1'b0),
      .out_valid (lv[l]),
      .out_data  (out_data[l]),
      .out_stat  (out_stat[l]),
      .out_nerr  (nerr[l]),
      .out_tag   (tag_unused[l])
    );
    inner_rs_enc u_enc (.data(enc_data[l]), .parity(enc_ipar[l]));
  end

  // the beat is valid when its lanes are; keep a delayed copy of in_valid so
  // that an all-idle mask still produces a beat
  logic [STAGES-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[STAGES-2:0], in_valid};
  end
  assign out_valid = vpipe[STAGES-1];
  assign out_mask  = lv;

  always_comb begin
    out_any_erasure   = 1'b0;
    out_any_corrected = 1'b0;
    out_n_erased      = '0;
    out_bytes_fixed   = '0;
    for (int l = 0; l < int'(LANES); l++) begin
      out_erased[l] = lv[l] && (out_stat[l] == IN_ERASURE);
      if (out_erased[l]) begin
        out_any_erasure = 1'b1;
        out_n_erased    = out_n_erased + 1'b1;
      end
      if (lv[l] && out_stat[l] == IN_CORRECTED) begin
        out_any_corrected = 1'b1;
        out_bytes_fixed   = out_bytes_fixed + ($bits(out_bytes_fixed))'(nerr[l]);
      end
    end
  end

endmodule
