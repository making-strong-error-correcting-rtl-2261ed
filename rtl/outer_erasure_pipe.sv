// outer_erasure_pipe: one erasure-only repair pipe of the outer GF(2^16) code.
//
// The inner code has already told which chunks of a 2 KB outer codeword are
// bad (the erasure set E, given as a 68-bit chunk mask), so this pipe never
// searches for error positions: it only solves for the values of at most
// C = 4 known-position chunks. This follows the paper; the algebra below is
// this design's own.
//
// Code: 16 interleaved RS(68,64) codes (reach_pkg). For each interleave s
// the pipe forms four syndromes S_l = sum_p y_p * alpha^(l*p) with the erased
// symbols forced to zero, so S_l = sum_{i in E} c_i X_i^l where c_i are the
// lost symbols and X_i = alpha^(pos_i). With
//   L_i(x) = prod_{k in E, k != i} (x + X_k) = sum_l lam_{i,l} x^l and
//   D_i    = prod_{k in E, k != i} (X_i + X_k),
// the lost symbol is c_i = D_i^-1 * sum_l lam_{i,l} S_l. L_i and D_i depend
// only on the erasure positions, so they are shared by all 16 interleaves.
//
// Timing (fixed, independent of |E|): `start` with the mask. The pipe then
// reads the codeword as 17 beats of 4 chunks (code positions 4g..4g+3,
// g = 16 down to 0; data returns one cycle after rd_req) and accumulates
// the syndromes by Horner's rule with constant multipliers. In parallel it
// builds L_i and D_i (4 cycles) and inverts D_i by square-and-multiply
// (x^(2^16-2), 15 cycles). Then it emits one repaired chunk per cycle for
// each erased slot (out_valid, held while out_ready is low) and pulses
// `done`. With out_ready high `done` is high 25 cycles after the start edge;
// the paper quotes a fixed 32-cycle repair pipeline. |E| > 4 ends at once
// with done and fail (uncorrectable); |E| = 0 ends with done only.
module outer_erasure_pipe
  import reach_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [N_CW_CH-1:0]  erase_mask,   // by span chunk index
  output logic                busy,
  // codeword read (position group g, 4 chunks, 1-cycle latency)
  output logic                rd_req,
  output logic [4:0]          rd_group,
  input  chunk_t              rd_data [4],  // positions 4g+0..4g+3
  // repaired chunks
  output logic                out_valid,
  input  logic                out_ready,
  output cidx_t               out_chunk,
  output chunk_t              out_data,
  output logic                done,
  output logic                fail
);

  localparam int unsigned NGROUP = N_CW_CH / 4;   // 17
  localparam int unsigned NSLOT  = ERASE_CAP;      // 4

  typedef enum logic [2:0] {P_IDLE, P_RUN, P_OUT, P_DONE} pstate_e;
  pstate_e state;

  logic [5:0]        cnt;
  logic [N_CW_CH-1:0] emask_q;       // by position
  logic [6:0]        epos  [NSLOT];  // erased code positions
  logic [NSLOT-1:0]  evld;
  logic [15:0]       ex    [NSLOT];  // X_i
  logic [15:0]       lam   [NSLOT][4];
  logic [15:0]       dd    [NSLOT];
  logic [15:0]       inv   [NSLOT];
  logic [15:0]       syn   [SYM_PER_CH][4];
  logic [1:0]        oslot;
  logic              rd_pend;
  logic [4:0]        grp_q;

  // ---- erasure list extraction at start
  logic [N_CW_CH-1:0] pmask_c;
  logic [6:0]        pl_c [NSLOT];
  logic [NSLOT-1:0]  pv_c;
  logic [7:0]        ecount_c;

  always_comb begin
    pmask_c = '0;
    for (int c = 0; c < int'(N_CW_CH); c++)
      if (erase_mask[c]) pmask_c[chunk_pos(7'(c))] = 1'b1;
    ecount_c = '0;
    pv_c = '0;
    for (int i = 0; i < int'(NSLOT); i++) pl_c[i] = '0;
    for (int p = 0; p < int'(N_CW_CH); p++) begin
      if (pmask_c[p]) begin
        for (int i = 0; i < int'(NSLOT); i++)
          if (ecount_c == 8'(i)) begin pl_c[i] = 7'(p); pv_c[i] = 1'b1; end
        ecount_c = ecount_c + 8'd1;
      end
    end
  end

  // ---- syndrome update for one beat (Horner, descending positions)
  logic [15:0] syn_n [SYM_PER_CH][4];
  always_comb begin
    for (int s = 0; s < int'(SYM_PER_CH); s++) begin
      for (int l = 0; l < 4; l++) begin
        syn_n[s][l] = gf16_mul(syn[s][l], OUTER_X[4*l]);
        for (int b = 0; b < 4; b++) begin
          if (!emask_q[4*grp_q + 5'(b)])
            syn_n[s][l] ^= gf16_mul(rd_data[b][16*s +: 16], OUTER_X[b*l]);
        end
      end
    end
  end

  // ---- value of the slot being output
  chunk_t val_c;
  always_comb begin
    for (int s = 0; s < int'(SYM_PER_CH); s++) begin
      logic [15:0] acc;
      acc = '0;
      for (int l = 0; l < 4; l++) acc ^= gf16_mul(lam[oslot][l], syn[s][l]);
      val_c[16*s +: 16] = gf16_mul(acc, inv[oslot]);
    end
  end

  assign busy      = (state != P_IDLE);
  assign out_valid = (state == P_OUT) && evld[oslot];
  assign out_chunk = pos_chunk(epos[oslot]);
  assign out_data  = val_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= P_IDLE; cnt <= '0; emask_q <= '0; evld <= '0; oslot <= '0;
      rd_req <= 1'b0; rd_group <= '0; rd_pend <= 1'b0; grp_q <= '0;
      done <= 1'b0; fail <= 1'b0;
      for (int i = 0; i < int'(NSLOT); i++) begin
        epos[i] <= '0; ex[i] <= '0; dd[i] <= '0; inv[i] <= '0;
        for (int l = 0; l < 4; l++) lam[i][l] <= '0;
      end
      for (int s = 0; s < int'(SYM_PER_CH); s++)
        for (int l = 0; l < 4; l++) syn[s][l] <= '0;
    end else begin
      done <= 1'b0;
      fail <= 1'b0;
      rd_req <= 1'b0;
      unique case (state)
        P_IDLE: if (start) begin
          emask_q <= pmask_c;
          evld    <= pv_c;
          cnt     <= '0;
          oslot   <= '0;
          for (int i = 0; i < int'(NSLOT); i++) begin
            epos[i] <= pl_c[i];
            ex[i]   <= OUTER_X[pl_c[i]];
            dd[i]   <= 16'd1;
            lam[i][0] <= 16'd1; lam[i][1] <= '0; lam[i][2] <= '0; lam[i][3] <= '0;
          end
          for (int s = 0; s < int'(SYM_PER_CH); s++)
            for (int l = 0; l < 4; l++) syn[s][l] <= '0;
          if (ecount_c > 8'(ERASE_CAP)) begin
            done <= 1'b1; fail <= 1'b1;
          end else if (ecount_c == 8'd0) begin
            done <= 1'b1;
          end else begin
            state <= P_RUN;
          end
        end
        P_RUN: begin
          cnt <= cnt + 6'd1;
          // beat requests: cycles 0..16 ask for groups 16..0
          if (cnt < 6'(NGROUP)) begin
            rd_req   <= 1'b1;
            rd_group <= 5'(NGROUP - 1) - 5'(cnt);
          end
          rd_pend <= rd_req;
          grp_q   <= rd_group;
          if (rd_pend) begin
            for (int s = 0; s < int'(SYM_PER_CH); s++)
              for (int l = 0; l < 4; l++) syn[s][l] <= syn_n[s][l];
          end
          // cycles 0..3: build L_i and D_i with factor k = cnt
          if (cnt < 6'(NSLOT)) begin
            for (int i = 0; i < int'(NSLOT); i++) begin
              if (evld[cnt[1:0]] && (i != int'(cnt))) begin
                lam[i][0] <= gf16_mul(lam[i][0], ex[cnt[1:0]]);
                for (int d = 1; d < 4; d++)
                  lam[i][d] <= lam[i][d-1] ^ gf16_mul(lam[i][d], ex[cnt[1:0]]);
                dd[i] <= gf16_mul(dd[i], ex[i] ^ ex[cnt[1:0]]);
              end
            end
          end
          // cycle 4: start inversion, cycles 5..18: r = r^2 * D, cycle 19: r = r^2
          if (cnt == 6'd4) begin
            for (int i = 0; i < int'(NSLOT); i++) inv[i] <= dd[i];
          end else if (cnt > 6'd4 && cnt < 6'd19) begin
            for (int i = 0; i < int'(NSLOT); i++) inv[i] <= gf16_mul(gf16_sq(inv[i]), dd[i]);
          end else if (cnt == 6'd19) begin
            for (int i = 0; i < int'(NSLOT); i++) inv[i] <= gf16_sq(inv[i]);
            state <= P_OUT;
          end
        end
        P_OUT: begin
          if (!evld[oslot] || out_ready) begin
            if (oslot == 2'(NSLOT - 1)) begin
              state <= P_IDLE;
              done  <= 1'b1;
            end
            oslot <= oslot + 2'd1;
          end
        end
        default: state <= P_IDLE;
      endcase
    end
  end

endmodule
