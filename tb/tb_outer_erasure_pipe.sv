// tb_outer_erasure_pipe: encodes random spans with an independent reference
// encoder, erases 0..4 random chunks (data or parity, garbage stored in
// their place), runs the pipe and checks every repaired chunk, the set of
// chunks reported, the fixed 25-cycle start-to-done latency, and that 5
// erasures end in `fail`.
//
// The 25-cycle latency checked is this design's (the paper quotes a 32-cycle
// pipeline). Watchdog stops a hung run.
// Ends with a TB_RESULT line giving the number of checks and failures.
module tb_outer_erasure_pipe;
  import reach_pkg::*;
  `include "rs8_ref.svh"
  `include "rs16_ref.svh"

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, rd_req, out_valid, out_ready, done, fail;
  logic [N_CW_CH-1:0] erase_mask;
  logic [4:0] rd_group;
  chunk_t rd_data [4];
  cidx_t out_chunk;
  chunk_t out_data;

  outer_erasure_pipe dut (.*);

  chunk_t cw [68];       // stored codeword by span chunk index (erased = garbage)
  chunk_t orig [68];
  int checks = 0, failures = 0;

  // memory model: 1-cycle read latency, group g = positions 4g..4g+3
  always @(posedge clk) if (rd_req)
    for (int b = 0; b < 4; b++) rd_data[b] <= cw[pos_chunk(7'(4*rd_group + b))];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_case(input int ne, input bit stall);
    chunk_t d [64];
    chunk_t p [4];
    int lat, got;
    logic [67:0] m, seen;
    for (int i = 0; i < 64; i++) d[i] = rand256();
    r16_encode(d, p);
    for (int i = 0; i < 64; i++) orig[i] = d[i];
    for (int k = 0; k < 4; k++) orig[64+k] = p[k];
    m = '0;
    while ($countones(m) < ne) m[$urandom_range(0, 67)] = 1'b1;
    for (int c = 0; c < 68; c++) cw[c] = m[c] ? rand256() : orig[c];
    @(negedge clk);
    erase_mask = m; start = 1;
    @(negedge clk);
    start = 0;
    lat = 1; got = 0; seen = '0;
    while (!done) begin
      out_ready = stall ? ($urandom_range(0, 1) == 1) : 1'b1;
      #1;
      if (out_valid && out_ready) begin
        checks++;
        seen[out_chunk] = 1'b1;
        if (out_data != orig[out_chunk] || !m[out_chunk]) begin
          failures++; $display("FAIL ne=%0d chunk %0d wrong", ne, out_chunk);
        end
        got++;
      end
      @(negedge clk);
      lat++;
    end
    checks++;
    if (ne > 4) begin
      if (!fail) begin failures++; $display("FAIL: %0d erasures not reported", ne); end
    end else begin
      if (fail || seen != m) begin failures++; $display("FAIL ne=%0d set %h vs %h", ne, seen, m); end
      if (ne > 0 && !stall) begin
        checks++;
        if (lat != 25) begin failures++; $display("FAIL latency %0d", lat); end
      end
    end
  endtask

  initial begin
    start = 0; erase_mask = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) run_case(t % 5, 1'b0);
    for (int t = 0; t < 10; t++) run_case(1 + t % 4, 1'b1);
    run_case(5, 1'b0);
    run_case(7, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
