// tb_bitplane_xpose: transposes random BF16 blocks to bit-planes, checks
// the bit mapping (plane i bit j = value j bit i) and the one-cycle latency,
// transposes back and expects the original block; also checks the
// protected-plane outputs for the default sign+exponent policy and others.
//
// Parameters at defaults (16 planes x 256 values); watchdog 2 ms.
// Ends with a TB_RESULT line giving the number of checks and failures.
module tb_bitplane_xpose;
  import reach_pkg::*;

  localparam int NB = 16, M = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, dir, out_valid;
  logic [NB*M-1:0] in_block, out_block, orig, planes;
  logic [NB-1:0] crit_mask, prot;
  logic [$clog2(NB+1)-1:0] n_prot;

  bitplane_xpose #(.NBITS(NB), .M(M)) dut (.*);

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
    in_valid = 0; dir = 0; in_block = '0; crit_mask = 16'hFF80;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      for (int w = 0; w < NB*M/32; w++) orig[32*w +: 32] = $urandom;
      crit_mask = (t == 0) ? 16'hFF80 : 16'($urandom);
      in_valid = 1; dir = 0; in_block = orig;
      @(negedge clk);
      in_valid = 0;
      chk(out_valid, "latency fwd");
      planes = out_block;
      for (int k = 0; k < 64; k++) begin
        int i, j;
        i = $urandom_range(0, NB-1); j = $urandom_range(0, M-1);
        chk(planes[i*M + j] == orig[j*NB + i], $sformatf("map i%0d j%0d", i, j));
      end
      chk(prot == crit_mask && n_prot == $countones(crit_mask), "prot");
      if (t == 0) chk(n_prot == 9, "default policy 9 planes");
      @(negedge clk);
      chk(!out_valid, "valid pulse");
      in_valid = 1; dir = 1; in_block = planes;
      @(negedge clk);
      in_valid = 0;
      chk(out_valid && out_block == orig, "round trip");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
