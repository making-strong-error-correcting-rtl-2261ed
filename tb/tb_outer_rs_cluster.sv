// tb_outer_rs_cluster: a 3-pipe cluster with a behavioural buffer pool.
// Five repair jobs on different slots are offered back to back: the first
// three are dispatched at once, the rest wait (job_ready low) until a pipe
// frees. Every repaired chunk must carry the right slot, chunk index and
// value (checked against an independent encoder), and each job must end
// exactly once; a job with 6 erasures must end with done_fail.
//
// Reduced to 3 pipes and 8 slots (paper: 26 pipes); watchdog 5 ms.
// Ends with a TB_RESULT line giving the number of checks and failures.
module tb_outer_rs_cluster;
  import reach_pkg::*;
  `include "rs8_ref.svh"
  `include "rs16_ref.svh"

  localparam int NP = 3, NS = 8, SW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic job_valid, job_ready, rep_valid, job_done, done_fail;
  logic [SW-1:0] job_slot, rep_slot, done_slot;
  logic [67:0] job_mask;
  logic [NP-1:0] rd_req, pipe_busy;
  logic [SW-1:0] rd_slot [NP];
  logic [4:0] rd_group [NP];
  chunk_t rd_data [NP][4];
  cidx_t rep_chunk;
  chunk_t rep_data;

  outer_rs_cluster #(.NPIPES(NP), .SW(SW)) dut (.*);

  chunk_t orig [NS][68];
  chunk_t stored [NS][68];
  logic [67:0] emask [NS];
  logic [67:0] seen [NS];
  int ndone [NS];
  int checks = 0, failures = 0, stalls = 0;

  always @(posedge clk)
    for (int p = 0; p < NP; p++)
      if (rd_req[p]) for (int b = 0; b < 4; b++) rd_data[p][b] <= stored[rd_slot[p]][pos_chunk(7'(4*rd_group[p] + b))];

  always @(negedge clk) if (rst_n) begin
    if (rep_valid) begin
      checks++;
      seen[rep_slot][rep_chunk] = 1'b1;
      if (!emask[rep_slot][rep_chunk] || rep_data != orig[rep_slot][rep_chunk]) begin
        failures++; $display("FAIL slot %0d chunk %0d", rep_slot, rep_chunk);
      end
    end
    if (job_done) begin
      ndone[done_slot]++;
      checks++;
      if (done_fail != ($countones(emask[done_slot]) > 4)) begin failures++; $display("FAIL fail flag slot %0d", done_slot); end
    end
  end

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    chunk_t d [64];
    chunk_t p [4];
    job_valid = 0; job_slot = '0; job_mask = '0;
    for (int s = 0; s < NS; s++) begin
      for (int i = 0; i < 64; i++) d[i] = rand256();
      r16_encode(d, p);
      for (int i = 0; i < 64; i++) orig[s][i] = d[i];
      for (int k = 0; k < 4; k++) orig[s][64+k] = p[k];
      emask[s] = '0;
      while ($countones(emask[s]) < ((s == 4) ? 6 : 1 + s % 4)) emask[s][$urandom_range(0, 67)] = 1'b1;
      for (int c = 0; c < 68; c++) stored[s][c] = emask[s][c] ? rand256() : orig[s][c];
      seen[s] = '0; ndone[s] = 0;
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int j = 0; j < 5; j++) begin
      job_valid = 1; job_slot = SW'(j); job_mask = emask[j];
      #1;
      while (!job_ready) begin stalls++; @(negedge clk); #1; end
      @(negedge clk);
    end
    job_valid = 0;
    repeat (80) @(negedge clk);
    for (int j = 0; j < 5; j++) begin
      checks++;
      if (ndone[j] != 1) begin failures++; $display("FAIL job %0d ended %0d times", j, ndone[j]); end
      if (j != 4) begin
        checks++;
        if (seen[j] != emask[j]) begin failures++; $display("FAIL job %0d repaired set", j); end
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no dispatch stall seen"); end
    $display("dispatch stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
