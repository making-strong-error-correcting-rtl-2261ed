// reach_top: two-level Reed-Solomon ECC controller for HBM.
//
// The memory is allowed a high raw bit error rate (up to ~1e-3). Every 32 B
// chunk carries a short inner RS(36,32) code that is checked in one of 64
// parallel lanes: most chunks are accepted or corrected right there (fast
// path). A chunk the inner code cannot fix becomes a known erasure of a
// long outer RS code over GF(2^16) that spans 2 KB (64 chunks) with 128 B of
// parity; the outer code is then run in erasure-only mode by one of 26
// repair pipes, so no error-locator logic is needed (reliability path).
// Small writes update the outer parity differentially. Unprotected
// bit-planes (importance-adaptive policy) bypass both codes; the bit-plane
// transposer that produces them is available on its own port.
//
// Blocks: channel_if (PHY side, strips/inserts inner metadata),
// inner_rs_lanes, outer_cw_buffer (codeword pool), outer_rs_cluster
// (erasure pipes), diff_parity_engine, data_return (return / commit image),
// reach_ctrl (sequencing), bitplane_xpose (layout).
//
// Interfaces: host request (op, span, 64-bit chunk mask, bypass, write
// payload of 64 chunks) with valid/ready; one-cycle response pulse with a
// status and the span's 64 chunks (only those in rsp_mask are meaningful).
// HBM side: NCH channels, each taking a command (span, data/parity beat,
// 4-unit mask) and returning 4 x 36 B units. One request is served at a
// time; the paper's scheduler/QoS layer is not modelled.
//
// Timing: each read beat costs one command cycle, the channel delay, the
// STAGES-cycle inner lanes and one cycle of realignment. A fast-path read
// is one beat; an escalated read adds the full data beat, the parity beat
// and one erasure-pipe job (25 cycles for 4 erasures). A write spends one
// cycle per span chunk (64) in the parity engine before it commits, data
// beat first and parity beat second.
//
// Follows the paper: code geometry, 64 lanes, 16 channels, 12-stage inner
// path, 26 erasure-only pipes, differential parity, data-before-parity
// commit, plain 32 B chunks for unprotected planes. This design's choices:
// the host interface, the lane-to-channel mapping, the single request in
// flight, and the bit-plane unit on a side port.
//
// Some sub-block outputs are left unconnected here on purpose and show up
// as unused signals in lint: the per-lane inner status, erased-lane and
// bytes-fixed counts (the controller only needs the beat summaries), the
// per-pipe busy flags, and the slot tags of repaired chunks and finished
// jobs (with one job in flight they always equal the controller's slot).
module reach_top
  import reach_pkg::*;
#(
  parameter int unsigned LANES  = 64,   // inner RS lanes (paper: 64)
  parameter int unsigned NCH    = 16,   // HBM channels (paper: 16)
  parameter int unsigned ADDR_W = 26,   // span address bits (assumed)
  parameter int unsigned STAGES = 12,   // inner lane pipeline (paper: 12)
  parameter int unsigned NPIPES = 26,   // outer erasure pipes (paper: 26)
  parameter int unsigned NSLOTS = 128,  // outer codeword buffers (64 lanes x 2)
  localparam int unsigned SW    = $clog2(NSLOTS),
  localparam int unsigned LPC   = LANES / NCH
) (
  input  logic               clk,
  input  logic               rst_n,
  // host (GPU / SoC) side
  input  logic               req_valid,
  output logic               req_ready,
  input  op_e                req_op,
  input  logic [ADDR_W-1:0]  req_span,
  input  logic [LANES-1:0]   req_mask,
  input  logic               req_bypass,
  input  chunk_t             req_wdata [LANES],
  output logic               rsp_valid,
  output rsp_stat_e          rsp_status,
  output logic [LANES-1:0]   rsp_mask,
  output chunk_t             rsp_data [LANES],
  // bit-plane layout unit
  input  logic               bp_in_valid,
  input  logic               bp_dir,
  input  logic [16*CHUNK_BITS-1:0] bp_in_block,
  input  logic [15:0]        bp_crit_mask,
  output logic               bp_out_valid,
  output logic [16*CHUNK_BITS-1:0] bp_out_block,
  output logic [15:0]        bp_prot,
  output logic [4:0]         bp_n_prot,
  // HBM PHY side
  output logic [NCH-1:0]     phy_cmd_valid,
  output logic [NCH-1:0]     phy_cmd_write,
  output logic [ADDR_W-1:0]  phy_cmd_span [NCH],
  output logic [NCH-1:0]     phy_cmd_par,
  output logic [LPC-1:0]     phy_cmd_mask [NCH],
  output unit_t              phy_wdata    [NCH][LPC],
  input  logic [NCH-1:0]     phy_rd_valid,
  input  unit_t              phy_rd_data  [NCH][LPC],
  // statistics
  output reach_stats_t       stats
);

  // ---------------------------------------------------------------- nets
  logic               cmd_valid, cmd_ready, cmd_write, cmd_par, wr_bypass;
  logic [ADDR_W-1:0]  cmd_span;
  logic [LANES-1:0]   cmd_mask;
  chunk_t             wr_data [LANES];
  ipar_t              wr_ipar [LANES];
  logic               ch_rsp_valid;
  logic [LANES-1:0]   ch_rsp_mask;
  chunk_t             ch_rsp_data [LANES];
  ipar_t              ch_rsp_ipar [LANES];

  logic               ln_bypass, ln_out_valid, ln_any_erasure, ln_any_corrected;
  logic [LANES-1:0]   ln_out_mask, ln_erased;
  chunk_t             ln_out_data [LANES];
  inner_stat_e        ln_out_stat [LANES];
  logic [$clog2(LANES+1)-1:0]   ln_n_erased;
  logic [$clog2(2*LANES+1)-1:0] ln_bytes_fixed;
  ipar_t              enc_ipar [LANES];

  logic               dr_lw_valid, dr_rp_valid, dr_pay_valid, dr_dl_full, dr_dl_touched, dr_apply;
  logic [LANES-1:0]   dr_lw_en;
  logic [5:0]         dr_dl_idx;
  chunk_t             dr_dl_delta;
  chunk_t             image [LANES];

  logic               buf_wr_valid, buf_wr_par;
  logic [SW-1:0]      buf_slot;
  logic [N_CW_CH-1:0] buf_mask;

  logic               cl_job_valid, cl_job_ready, cl_rep_valid, cl_done, cl_fail;
  logic [NPIPES-1:0]  cl_rd_req, cl_busy;
  logic [SW-1:0]      cl_rd_slot  [NPIPES];
  logic [4:0]         cl_rd_group [NPIPES];
  chunk_t             cl_rd_data  [NPIPES][4];
  logic [SW-1:0]      cl_rep_slot, cl_done_slot;
  cidx_t              cl_rep_chunk;
  chunk_t             cl_rep_data;

  logic               dp_clear, dp_load_valid, dp_load_rep, dp_upd_valid;
  logic [N_PAR_CH-1:0] dp_load_mask;
  chunk_t             dp_load_data [N_PAR_CH];
  chunk_t             parity [N_PAR_CH];

  // -------------------------------------------------------- controller
  reach_ctrl #(.LANES(LANES), .ADDR_W(ADDR_W), .SW(SW), .NSLOTS(NSLOTS)) u_ctrl (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_op, .req_span, .req_mask, .req_bypass,
    .rsp_valid, .rsp_status, .rsp_mask,
    .cmd_valid, .cmd_ready, .cmd_write, .cmd_span, .cmd_par, .cmd_mask, .wr_bypass,
    .ln_bypass, .ln_out_valid, .ln_out_mask, .ln_erased, .ln_any_erasure, .ln_any_corrected,
    .dr_lw_valid, .dr_lw_en, .dr_rp_valid, .dr_pay_valid, .dr_dl_idx, .dr_dl_full,
    .dr_dl_touched, .dr_apply,
    .buf_wr_valid, .buf_slot, .buf_wr_par, .buf_mask,
    .cl_job_valid, .cl_job_ready, .cl_rep_valid, .cl_rep_chunk, .cl_done, .cl_fail,
    .dp_clear, .dp_load_valid, .dp_load_mask, .dp_load_rep, .dp_upd_valid,
    .stats
  );

  // ------------------------------------------------------ write sources
  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      if (cmd_par) wr_data[l] = (l < int'(N_PAR_CH)) ? parity[l] : '0;
      else         wr_data[l] = image[l];
      wr_ipar[l] = wr_bypass ? '0 : enc_ipar[l];
    end
  end

  // --------------------------------------------------- channel interface
  channel_if #(.LANES(LANES), .NCH(NCH), .ADDR_W(ADDR_W)) u_chif (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_write, .cmd_span, .cmd_par, .cmd_mask,
    .wr_data, .wr_ipar,
    .rsp_valid (ch_rsp_valid), .rsp_mask (ch_rsp_mask),
    .rsp_data  (ch_rsp_data),  .rsp_ipar (ch_rsp_ipar),
    .phy_cmd_valid, .phy_cmd_write, .phy_cmd_span, .phy_cmd_par, .phy_cmd_mask,
    .phy_wdata, .phy_rd_valid, .phy_rd_data
  );

  // ------------------------------------------------------- inner lanes
  inner_rs_lanes #(.LANES(LANES), .STAGES(STAGES)) u_lanes (
    .clk, .rst_n,
    .in_valid  (ch_rsp_valid),
    .in_bypass (ln_bypass),
    .in_mask   (ch_rsp_mask),
    .in_data   (ch_rsp_data),
    .in_ipar   (ch_rsp_ipar),
    .out_valid (ln_out_valid),
    .out_mask  (ln_out_mask),
    .out_data  (ln_out_data),
    .out_stat  (ln_out_stat),
    .out_erased(ln_erased),
    .out_any_erasure   (ln_any_erasure),
    .out_any_corrected (ln_any_corrected),
    .out_n_erased      (ln_n_erased),
    .out_bytes_fixed   (ln_bytes_fixed),
    .enc_data  (wr_data),
    .enc_ipar  (enc_ipar)
  );

  // -------------------------------------------------- data return image
  data_return #(.LANES(LANES)) u_ret (
    .clk, .rst_n,
    .lw_valid (dr_lw_valid), .lw_en (dr_lw_en), .lw_data (ln_out_data),
    .rp_valid (dr_rp_valid), .rp_chunk (cl_rep_chunk), .rp_data (cl_rep_data),
    .pay_valid (dr_pay_valid), .pay_mask (req_mask), .pay_data (req_wdata),
    .dl_idx (dr_dl_idx), .dl_full (dr_dl_full), .dl_delta (dr_dl_delta),
    .dl_touched (dr_dl_touched), .apply (dr_apply), .image (image)
  );
  assign rsp_data = image;

  // ------------------------------------------------- outer codeword pool
  outer_cw_buffer #(.NSLOTS(NSLOTS), .NRD(NPIPES), .LANES(LANES)) u_buf (
    .clk, .rst_n,
    .wr_valid (buf_wr_valid), .wr_slot (buf_slot), .wr_par (buf_wr_par),
    .wr_mask (ln_out_mask), .wr_erased (ln_erased), .wr_data (ln_out_data),
    .rd_req (cl_rd_req), .rd_slot (cl_rd_slot), .rd_group (cl_rd_group), .rd_data (cl_rd_data),
    .mask_slot (buf_slot), .mask_out (buf_mask)
  );

  // ------------------------------------------------ outer erasure cluster
  outer_rs_cluster #(.NPIPES(NPIPES), .SW(SW)) u_outer (
    .clk, .rst_n,
    .job_valid (cl_job_valid), .job_ready (cl_job_ready),
    .job_slot (buf_slot), .job_mask (buf_mask),
    .rd_req (cl_rd_req), .rd_slot (cl_rd_slot), .rd_group (cl_rd_group), .rd_data (cl_rd_data),
    .rep_valid (cl_rep_valid), .rep_slot (cl_rep_slot), .rep_chunk (cl_rep_chunk), .rep_data (cl_rep_data),
    .job_done (cl_done), .done_slot (cl_done_slot), .done_fail (cl_fail),
    .pipe_busy (cl_busy)
  );

  // ------------------------------------------- differential parity engine
  always_comb
    for (int k = 0; k < int'(N_PAR_CH); k++)
      dp_load_data[k] = dp_load_rep ? cl_rep_data : ln_out_data[k];

  diff_parity_engine u_dp (
    .clk, .rst_n,
    .clear (dp_clear),
    .load_valid (dp_load_valid), .load_mask (dp_load_mask), .load_data (dp_load_data),
    .upd_valid (dp_upd_valid), .upd_chunk (dr_dl_idx), .upd_delta (dr_dl_delta),
    .parity (parity)
  );

  // ------------------------------------------------ bit-plane layout unit
  bitplane_xpose #(.NBITS(16), .M(CHUNK_BITS)) u_bp (
    .clk, .rst_n,
    .in_valid (bp_in_valid), .dir (bp_dir), .in_block (bp_in_block), .crit_mask (bp_crit_mask),
    .out_valid (bp_out_valid), .out_block (bp_out_block), .prot (bp_prot), .n_prot (bp_n_prot)
  );

  initial assert (LANES == N_DATA_CH) else $error("reach_top: one lane per data chunk of a span is assumed");

endmodule
