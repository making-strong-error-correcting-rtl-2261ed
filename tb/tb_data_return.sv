// tb_data_return: loads a span image through lane writes, patches chunks
// with repair writes (parity indices must be ignored), loads a partial
// payload and checks the delta outputs (old^new for touched chunks, zero
// otherwise, merged value in full mode) before and after `apply`.
//
// Runs at 64 lanes; watchdog 2 ms. Expected values come from a plain array model.
// Ends with a TB_RESULT line giving the number of checks and failures.
module tb_data_return;
  import reach_pkg::*;
  `include "rs8_ref.svh"

  localparam int L = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lw_valid, rp_valid, pay_valid, dl_full, dl_touched, apply;
  logic [L-1:0] lw_en, pay_mask;
  chunk_t lw_data [L];
  chunk_t pay_data [L];
  chunk_t image [L];
  cidx_t rp_chunk;
  chunk_t rp_data, dl_delta;
  logic [5:0] dl_idx;

  data_return #(.LANES(L)) dut (.*);

  chunk_t img [L];
  chunk_t nw [L];
  logic [L-1:0] msk;
  int checks = 0, failures = 0;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    lw_valid = 0; rp_valid = 0; pay_valid = 0; dl_full = 0; apply = 0;
    lw_en = '0; pay_mask = '0; rp_chunk = '0; rp_data = '0; dl_idx = '0;
    for (int l = 0; l < L; l++) begin lw_data[l] = '0; pay_data[l] = '0; img[l] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      // two partial lane beats
      for (int b = 0; b < 2; b++) begin
        lw_valid = 1;
        for (int l = 0; l < L; l++) begin
          lw_en[l] = $urandom_range(0, 1);
          lw_data[l] = rand256();
          if (lw_en[l]) img[l] = lw_data[l];
        end
        @(negedge clk);
      end
      lw_valid = 0;
      // repair writes: one data chunk and one parity index
      rp_valid = 1; rp_chunk = 7'($urandom_range(0, 63)); rp_data = rand256();
      img[rp_chunk[5:0]] = rp_data; @(negedge clk);
      rp_chunk = 7'(64 + t); rp_data = rand256(); @(negedge clk);
      rp_valid = 0;
      for (int l = 0; l < L; l++) begin
        chk(image[l] == img[l], $sformatf("image t%0d l%0d", t, l));
      end
      // payload
      pay_valid = 1;
      for (int l = 0; l < L; l++) begin
        pay_mask[l] = ($urandom_range(0, 3) == 0);
        pay_data[l] = rand256();
        nw[l] = pay_data[l];
      end
      msk = pay_mask;
      @(negedge clk);
      pay_valid = 0;
      for (int i = 0; i < L; i++) begin
        dl_idx = 6'(i); dl_full = 0; #1;
        chk(dl_touched == msk[i], $sformatf("touched %0d", i));
        chk(dl_delta == (msk[i] ? (img[i] ^ nw[i]) : '0), $sformatf("delta %0d", i));
        dl_full = 1; #1;
        chk(dl_delta == (msk[i] ? nw[i] : img[i]), $sformatf("full %0d", i));
      end
      dl_full = 0;
      @(negedge clk);
      apply = 1; @(negedge clk); apply = 0;
      for (int l = 0; l < L; l++) if (msk[l]) img[l] = nw[l];
      for (int l = 0; l < L; l++) chk(image[l] == img[l], $sformatf("applied l%0d", l));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
