// tb_inner_rs_lanes: an 8-lane array fed back to back with random beats.
// Each lane gets a clean unit, 1 or 2 byte errors, or 4 byte errors (must
// be flagged as an erasure; a rare miscorrection is tolerated and counted). The encoder side of each lane produces the
// inner parity. Every beat must appear exactly STAGES cycles after it
// entered; per-lane data, erasure flags and the beat summaries (any
// erasure, any correction, erased count, bytes fixed) are checked, and a
// bypass beat must pass data through untouched.
//
// Lanes reduced from 64 to 8 to keep the run short; the 12-stage latency
// is the paper's. Watchdog 2 ms.
// Ends with a TB_RESULT line giving the number of checks and failures.
module tb_inner_rs_lanes;
  import reach_pkg::*;
  `include "rs8_ref.svh"

  localparam int L = 8, ST = 12, NB = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_bypass, out_valid, out_any_erasure, out_any_corrected;
  logic [L-1:0] in_mask, out_mask, out_erased;
  chunk_t in_data [L];
  ipar_t in_ipar [L];
  chunk_t out_data [L];
  inner_stat_e out_stat [L];
  logic [$clog2(L+1)-1:0] out_n_erased;
  logic [$clog2(2*L+1)-1:0] out_bytes_fixed;
  chunk_t enc_data [L];
  ipar_t enc_ipar [L];

  inner_rs_lanes #(.LANES(L), .STAGES(ST)) dut (.*);

  chunk_t exp_d [NB][L];
  int     nerr  [NB][L];
  logic [L-1:0] exp_m [NB];
  bit     byp   [NB];
  int checks = 0, failures = 0, cyc = 0, n_out = 0, n_heavy = 0, n_miscorr = 0;
  int exp_cycle [NB];

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(negedge clk) cyc++;

  // output checker
  always @(negedge clk) if (rst_n && out_valid) begin
    int b, ne, nf;
    bit anyc, skip_fix;
    skip_fix = 0;
    b = n_out; n_out++;
    ne = 0; nf = 0; anyc = 0;
    chk(cyc == exp_cycle[b], $sformatf("latency beat %0d (%0d vs %0d)", b, cyc, exp_cycle[b]));
    chk(out_mask == exp_m[b], $sformatf("mask beat %0d", b));
    for (int l = 0; l < L; l++) if (exp_m[b][l]) begin
      if (nerr[b][l] > 2 && !byp[b]) begin
        // beyond t = 2 the decoder must flag an erasure, except for the rare
        // patterns that lie within distance 2 of another codeword
        n_heavy++;
        if (out_erased[l]) ne++;
        else begin n_miscorr++; skip_fix = 1; end
      end else begin
        chk(!out_erased[l] && out_data[l] == exp_d[b][l], $sformatf("data b%0d l%0d", b, l));
        if (!byp[b] && nerr[b][l] > 0) begin nf += nerr[b][l]; anyc = 1; end
      end
    end
    chk(out_any_erasure == (ne > 0) && out_n_erased == ne, $sformatf("erasure summary b%0d", b));
    if (!skip_fix) chk(out_any_corrected == anyc && out_bytes_fixed == nf, $sformatf("fix summary b%0d", b));
  end

  initial begin
    in_valid = 0; in_bypass = 0; in_mask = '0;
    for (int l = 0; l < L; l++) begin in_data[l] = '0; in_ipar[l] = '0; enc_data[l] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < NB; b++) begin
      byp[b] = (b % 15 == 7);
      for (int l = 0; l < L; l++) begin
        chunk_t d;
        ipar_t p;
        unit_t u;
        int k;
        d = rand256();
        enc_data[l] = d; p = r8_encode(d);
        u = {p, d};
        k = $urandom_range(0, 9);
        nerr[b][l] = (k < 5) ? 0 : (k < 7) ? 1 : (k < 9) ? 2 : 4;
        for (int e = 0; e < nerr[b][l]; e++) begin
          int pos;
          pos = $urandom_range(0, 35);
          while (u[8*pos +: 8] != {p, d}[8*pos +: 8]) pos = (pos + 1) % 36;
          u[8*pos +: 8] = u[8*pos +: 8] ^ 8'($urandom_range(1, 255));
        end
        in_data[l] = u[255:0]; in_ipar[l] = u[287:256];
        exp_d[b][l] = byp[b] ? u[255:0] : d;
        exp_m[b][l] = (b % 9 == 3) ? 1'b0 : ($urandom_range(0, 4) != 0);
      end
      #1;
      for (int l = 0; l < L; l++) chk(enc_ipar[l] == r8_encode(enc_data[l]), $sformatf("encoder b%0d l%0d", b, l));
      in_mask = exp_m[b]; in_bypass = byp[b]; in_valid = 1;
      exp_cycle[b] = cyc + 1 + ST - 1;
      @(negedge clk);
      if (b % 10 == 9) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0;
    repeat (ST + 3) @(negedge clk);
    chk(n_out == NB, "all beats out");
    chk(n_heavy > 20 && n_miscorr * 10 <= n_heavy, "heavy errors mostly flagged");
    $display("heavy-error lanes %0d, miscorrected %0d", n_heavy, n_miscorr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
