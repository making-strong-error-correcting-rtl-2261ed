// tb_diff_parity_engine: computes the parity of random spans by streaming
// all 64 chunks from a cleared state and compares with an independent LFSR
// encoder; then applies random small writes as deltas on top of the loaded
// old parity and compares with a fresh encode of the updated span.
//
// The reference is an LFSR encoder per interleave (rs16_ref.svh), written
// independently of the RTL's table-based update; watchdog 5 ms.
// Ends with a TB_RESULT line giving the number of checks and failures.
module tb_diff_parity_engine;
  import reach_pkg::*;
  `include "rs8_ref.svh"
  `include "rs16_ref.svh"

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, load_valid, upd_valid;
  logic [3:0] load_mask;
  chunk_t load_data [4];
  logic [5:0] upd_chunk;
  chunk_t upd_delta;
  chunk_t parity [4];

  diff_parity_engine dut (.*);

  int checks = 0, failures = 0;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    chunk_t d [64];
    chunk_t p [4];
    clear = 0; load_valid = 0; upd_valid = 0; load_mask = '0; upd_chunk = '0; upd_delta = '0;
    for (int k = 0; k < 4; k++) load_data[k] = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      for (int i = 0; i < 64; i++) d[i] = (t == 0 && i != 5) ? '0 : rand256();
      r16_encode(d, p);
      // full encode
      clear = 1; @(negedge clk); clear = 0;
      for (int i = 0; i < 64; i++) begin
        upd_valid = 1; upd_chunk = 6'(i); upd_delta = d[i]; @(negedge clk);
      end
      upd_valid = 0;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (parity[k] != p[k]) begin failures++; $display("FAIL full parity %0d/%0d", t, k); end
      end
      // differential updates of 1..4 chunks starting from a reloaded parity
      clear = 1; @(negedge clk); clear = 0;
      load_valid = 1; load_mask = 4'hF; load_data = p; @(negedge clk); load_valid = 0;
      for (int q = 0; q < 1 + t % 4; q++) begin
        int c;
        chunk_t nd;
        c = $urandom_range(0, 63);
        nd = rand256();
        upd_valid = 1; upd_chunk = 6'(c); upd_delta = d[c] ^ nd; @(negedge clk);
        d[c] = nd;
      end
      upd_valid = 0;
      r16_encode(d, p);
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (parity[k] != p[k]) begin failures++; $display("FAIL diff parity %0d/%0d", t, k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
