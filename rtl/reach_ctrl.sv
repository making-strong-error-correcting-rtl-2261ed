// reach_ctrl: controller / scheduler of the two-level ECC.
//
// Serves one host request at a time over one outer codeword (span). The
// flows follow the paper's read, write and path-split flowcharts:
//  * Read of q chunks: read only those 36 B units; if every inner lane
//    accepts or corrects, return them (fast path). Otherwise escalate once:
//    read the whole codeword (64 data + 4 parity chunks) into an outer
//    codeword buffer with its erasure set (a read of all 64 chunks keeps
//    its data beat and adds only the parity beat), run one erasure-only repair
//    (|E| <= C = 4) and return the requested chunks; |E| > C is reported
//    as uncorrectable. There is never a second repair pass.
//  * Random write of q chunks: read the touched units and the 4 outer
//    parity chunks. If all pass, update the parity differentially
//    (P_new = P_old + RS(D_new) + RS(D_old)) and write the q units, then
//    the parity (data before parity). If any is rejected, escalate once as
//    for reads, apply the payload to the repaired codeword, update the
//    repaired parity the same way and write the full codeword back, data
//    before parity.
//  * Write of all 64 chunks (sequential): no read; parity is computed from
//    scratch by the same engine, then data and parity are written.
//  * Requests with `bypass` set address unprotected bit-planes: plain 32 B
//    chunks, no inner or outer code.
// Stalls: while an outer repair runs (or every erasure pipe is busy) the
// reliability path is stalled; stats.stall_cycles counts those cycles.
// Buffer slots are used round-robin. With one request in flight only one
// slot and one erasure pipe are busy at a time: the paper names a
// scheduler/QoS layer but gives no policy, so overlapping requests (and
// with them the double buffering and the parallel pipes) is left out.
//
// This module only sequences; the datapath (lanes, buffer, cluster, parity
// engine, data-return image) is wired in reach_top. Request handshake is
// valid/ready; the payload of a write is captured by data_return in the
// accept cycle (pay_valid). rsp_valid pulses for one cycle with the status;
// the returned data is data_return's image at that time.
module reach_ctrl
  import reach_pkg::*;
#(
  parameter int unsigned LANES  = 64,
  parameter int unsigned ADDR_W = 20,
  parameter int unsigned SW     = 7,
  parameter int unsigned NSLOTS = 128
) (
  input  logic               clk,
  input  logic               rst_n,
  // host
  input  logic               req_valid,
  output logic               req_ready,
  input  op_e                req_op,
  input  logic [ADDR_W-1:0]  req_span,
  input  logic [LANES-1:0]   req_mask,
  input  logic               req_bypass,
  output logic               rsp_valid,
  output rsp_stat_e          rsp_status,
  output logic [LANES-1:0]   rsp_mask,
  // channel interface
  output logic               cmd_valid,
  input  logic               cmd_ready,
  output logic               cmd_write,
  output logic [ADDR_W-1:0]  cmd_span,
  output logic               cmd_par,
  output logic [LANES-1:0]   cmd_mask,
  output logic               wr_bypass,      // write without inner parity
  // inner lanes (fed by the channel interface responses)
  output logic               ln_bypass,
  input  logic               ln_out_valid,
  input  logic [LANES-1:0]   ln_out_mask,
  input  logic [LANES-1:0]   ln_erased,
  input  logic               ln_any_erasure,
  input  logic               ln_any_corrected,
  // data return / commit
  output logic               dr_lw_valid,
  output logic [LANES-1:0]   dr_lw_en,
  output logic               dr_rp_valid,
  output logic               dr_pay_valid,
  output logic [5:0]         dr_dl_idx,
  output logic               dr_dl_full,
  input  logic               dr_dl_touched,
  output logic               dr_apply,
  // outer codeword buffer
  output logic               buf_wr_valid,
  output logic [SW-1:0]      buf_slot,
  output logic               buf_wr_par,
  input  logic [N_CW_CH-1:0] buf_mask,
  // outer cluster
  output logic               cl_job_valid,
  input  logic               cl_job_ready,
  input  logic               cl_rep_valid,
  input  cidx_t              cl_rep_chunk,
  input  logic               cl_done,
  input  logic               cl_fail,
  // differential parity engine
  output logic               dp_clear,       // start of a whole-span write
  output logic               dp_load_valid,
  output logic [N_PAR_CH-1:0] dp_load_mask,
  output logic               dp_load_rep,    // load source: 1 repaired chunk, 0 lanes
  output logic               dp_upd_valid,
  // statistics
  output reach_stats_t       stats
);

  typedef enum logic [3:0] {
    S_IDLE, S_CMD, S_WAIT, S_REP_START, S_REP_WAIT, S_DELTA, S_APPLY,
    S_COMMIT_DATA, S_COMMIT_PAR, S_RESP
  } state_e;

  typedef enum logic [2:0] {
    PH_TOUCH_DATA, PH_TOUCH_PAR, PH_FULL_DATA, PH_FULL_PAR, PH_BYPASS
  } phase_e;

  state_e            state;
  phase_e            phase;
  op_e               op_q;
  logic [ADDR_W-1:0] span_q;
  logic [LANES-1:0]  mask_q;
  logic              byp_q, full_q, esc_q, corr_q, era_q;
  logic [6:0]        idx_q;
  rsp_stat_e         stat_q;
  logic [SW-1:0]     slot_q;
  logic              job_sent_q;

  localparam logic [LANES-1:0] ALL = '1;
  localparam logic [LANES-1:0] PARM = LANES'(4'hF);

  assign req_ready = (state == S_IDLE);
  assign buf_slot  = slot_q;
  assign rsp_mask  = mask_q;
  assign ln_bypass = byp_q;
  assign wr_bypass = byp_q;
  assign cmd_span  = span_q;
  assign dr_dl_idx = idx_q[5:0];
  assign dr_dl_full = full_q;

  // command for the current phase / commit state
  always_comb begin
    cmd_valid = 1'b0;
    cmd_write = 1'b0;
    cmd_par   = 1'b0;
    cmd_mask  = '0;
    if (state == S_CMD) begin
      cmd_valid = 1'b1;
      unique case (phase)
        PH_TOUCH_DATA, PH_BYPASS: cmd_mask = mask_q;
        PH_TOUCH_PAR:             begin cmd_par = 1'b1; cmd_mask = PARM; end
        PH_FULL_DATA:             cmd_mask = ALL;
        PH_FULL_PAR:              begin cmd_par = 1'b1; cmd_mask = PARM; end
        default:                  cmd_mask = '0;
      endcase
    end else if (state == S_COMMIT_DATA) begin
      cmd_valid = 1'b1;
      cmd_write = 1'b1;
      cmd_mask  = (esc_q || full_q) ? ALL : mask_q;
    end else if (state == S_COMMIT_PAR) begin
      cmd_valid = !byp_q;
      cmd_write = 1'b1;
      cmd_par   = 1'b1;
      cmd_mask  = PARM;
    end
  end

  // datapath strobes
  logic lanes_done;
  assign lanes_done = (state == S_WAIT) && ln_out_valid;

  always_comb begin
    dr_lw_valid   = lanes_done && (phase == PH_TOUCH_DATA || phase == PH_FULL_DATA || phase == PH_BYPASS);
    dr_lw_en      = ln_out_mask & ~ln_erased;
    // a whole-span read already holds all data chunks: keep them so that an
    // escalation only has to add the parity beat
    buf_wr_valid  = lanes_done && (phase == PH_FULL_DATA || phase == PH_FULL_PAR
                                   || (phase == PH_TOUCH_DATA && op_q == OP_READ && mask_q == ALL));
    buf_wr_par    = (phase == PH_FULL_PAR);
    dp_load_valid = (lanes_done && (phase == PH_TOUCH_PAR || phase == PH_FULL_PAR))
                 || (state == S_REP_WAIT && cl_rep_valid && cl_rep_chunk >= cidx_t'(N_DATA_CH));
    dp_load_rep   = (state == S_REP_WAIT);
    dp_load_mask  = '0;
    if (state == S_REP_WAIT) begin
      if (cl_rep_chunk >= cidx_t'(N_DATA_CH)) dp_load_mask[cl_rep_chunk[1:0]] = 1'b1;
    end else begin
      dp_load_mask = ln_out_mask[N_PAR_CH-1:0] & ~ln_erased[N_PAR_CH-1:0];
    end
    dr_rp_valid   = (state == S_REP_WAIT) && cl_rep_valid;
    cl_job_valid  = (state == S_REP_START) && ($countones(buf_mask) <= int'(ERASE_CAP)) && !job_sent_q;
    dp_upd_valid  = (state == S_DELTA) && (full_q || dr_dl_touched);
    dr_apply      = (state == S_APPLY);
    dr_pay_valid  = req_valid && req_ready && (req_op == OP_WRITE);
    dp_clear      = req_valid && req_ready && (req_op == OP_WRITE) && (req_mask == ALL) && !req_bypass;
  end

  assign rsp_valid  = (state == S_RESP);
  assign rsp_status = stat_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; phase <= PH_TOUCH_DATA; op_q <= OP_READ; span_q <= '0; mask_q <= '0;
      byp_q <= 1'b0; full_q <= 1'b0; esc_q <= 1'b0; corr_q <= 1'b0; era_q <= 1'b0;
      idx_q <= '0; stat_q <= ST_OK; slot_q <= '0; job_sent_q <= 1'b0;
      stats <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid) begin
          op_q   <= req_op;
          span_q <= req_span;
          mask_q <= req_mask;
          byp_q  <= req_bypass;
          full_q <= (req_op == OP_WRITE) && (req_mask == ALL) && !req_bypass;
          esc_q  <= 1'b0;
          corr_q <= 1'b0;
          era_q  <= 1'b0;
          idx_q  <= '0;
          stat_q <= ST_OK;
          if (req_bypass) begin
            phase <= PH_BYPASS;
            state <= (req_op == OP_WRITE) ? S_APPLY : S_CMD;
          end else if (req_op == OP_WRITE && req_mask == ALL) begin
            state    <= S_DELTA;
          end else begin
            phase <= PH_TOUCH_DATA;
            state <= S_CMD;
          end
        end
        S_CMD: if (cmd_ready) state <= S_WAIT;
        S_WAIT: if (ln_out_valid) begin
          logic era;
          era = era_q || ln_any_erasure;
          era_q  <= era;
          corr_q <= corr_q || ln_any_corrected;
          unique case (phase)
            PH_BYPASS: begin
              stat_q <= ST_OK;
              state  <= S_RESP;
            end
            PH_TOUCH_DATA: begin
              if (op_q == OP_WRITE) begin
                phase <= PH_TOUCH_PAR;
                state <= S_CMD;
              end else if (era) begin
                phase <= (mask_q == ALL) ? PH_FULL_PAR : PH_FULL_DATA;
                state <= S_CMD;
                esc_q <= 1'b1;
                stats.escalations <= stats.escalations + 1;
              end else begin
                stat_q <= (corr_q || ln_any_corrected) ? ST_CORRECTED : ST_OK;
                state  <= S_RESP;
              end
            end
            PH_TOUCH_PAR: begin
              if (era) begin
                phase <= PH_FULL_DATA;
                state <= S_CMD;
                esc_q <= 1'b1;
                stats.escalations <= stats.escalations + 1;
              end else begin
                stat_q <= (corr_q || ln_any_corrected) ? ST_CORRECTED : ST_OK;
                idx_q  <= '0;
                state  <= S_DELTA;
              end
            end
            PH_FULL_DATA: begin
              phase <= PH_FULL_PAR;
              state <= S_CMD;
            end
            default: begin // PH_FULL_PAR
              job_sent_q <= 1'b0;
              state      <= S_REP_START;
            end
          endcase
        end
        S_REP_START: begin
          if ($countones(buf_mask) > int'(ERASE_CAP)) begin
            stat_q <= ST_UNCORR;
            state  <= S_RESP;
          end else begin
            stats.stall_cycles <= stats.stall_cycles + 1;
            if (cl_job_ready) begin
              job_sent_q <= 1'b1;
              state      <= S_REP_WAIT;
            end
          end
        end
        S_REP_WAIT: begin
         stats.stall_cycles <= stats.stall_cycles + 1;
         if (cl_done) begin
          slot_q <= (slot_q == SW'(NSLOTS - 1)) ? '0 : slot_q + 1'b1;
          if (cl_fail) begin
            stat_q <= ST_UNCORR;
            state  <= S_RESP;
          end else begin
            stat_q <= ST_REPAIRED;
            if (op_q == OP_WRITE) begin
              idx_q <= '0;
              state <= S_DELTA;
            end else begin
              state <= S_RESP;
            end
          end
         end
        end
        S_DELTA: begin
          // one chunk per cycle through the parity engine
          if (idx_q == 7'(LANES - 1)) state <= S_APPLY;
          idx_q <= idx_q + 1'b1;
        end
        S_APPLY: state <= S_COMMIT_DATA;
        S_COMMIT_DATA: if (cmd_ready) state <= byp_q ? S_RESP : S_COMMIT_PAR;
        S_COMMIT_PAR: if (cmd_ready) state <= S_RESP;
        S_RESP: begin
          state <= S_IDLE;
          stats.requests <= stats.requests + 1;
          if (byp_q) stats.bypassed <= stats.bypassed + 1;
          if (!esc_q && !byp_q) stats.fast_path <= stats.fast_path + 1;
          if (corr_q) stats.inner_fixed <= stats.inner_fixed + 1;
          if (stat_q == ST_REPAIRED) stats.repaired <= stats.repaired + 1;
          if (stat_q == ST_UNCORR) stats.uncorrectable <= stats.uncorrectable + 1;
          if (op_q == OP_WRITE && !byp_q && stat_q != ST_UNCORR) begin
            if (full_q) stats.full_writes <= stats.full_writes + 1;
            else        stats.diff_writes <= stats.diff_writes + 1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
