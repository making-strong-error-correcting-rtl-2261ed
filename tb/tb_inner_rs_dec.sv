// tb_inner_rs_dec: drives one inner decoder lane with encoded chunks carrying
// 0, 1, 2 and 3..8 random byte errors (in data or parity bytes), one unit per
// cycle, and checks status, corrected data, byte count, tag and the 12-cycle
// latency. Clean, 1- and 2-byte cases must come out exact; 3+ byte errors must
// never be returned as clean, and whenever they are flagged as erasures that
// is counted (a decoder with distance 5 may mis-correct a few of them).
//
// Reference: LFSR encoder in rs8_ref.svh. Watchdog stops a hung run.
// Ends with a TB_RESULT line giving the number of checks and failures.
module tb_inner_rs_dec;
  import reach_pkg::*;
  `include "rs8_ref.svh"

  localparam int STAGES = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_bypass;
  unit_t in_unit;
  logic [15:0] in_tag;
  logic out_valid;
  chunk_t out_data;
  inner_stat_e out_stat;
  logic [1:0] out_nerr;
  logic [15:0] out_tag;

  inner_rs_dec #(.STAGES(STAGES), .TAG_W(16)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  int n_era = 0, n_big = 0;
  always @(negedge clk) cyc++;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results, indexed by tag
  chunk_t exp_data [1024];
  int     exp_nerr [1024];
  int     exp_cyc  [1024];
  int     exp_byp  [1024];

  task automatic send(input int tag, input int nerr, input bit byp);
    chunk_t d;
    unit_t u;
    int pos [8];
    d = rand256();
    u = {r8_encode(d), d};
    for (int e = 0; e < nerr; e++) begin
      bit dup;
      do begin
        pos[e] = $urandom_range(0, 35);
        dup = 0;
        for (int f = 0; f < e; f++) if (pos[f] == pos[e]) dup = 1;
      end while (dup);
      u[8*pos[e] +: 8] ^= 8'($urandom_range(1, 255));
    end
    exp_data[tag] = byp ? u[255:0] : d;
    exp_nerr[tag] = nerr;
    exp_byp[tag]  = byp;
    exp_cyc[tag]  = cyc + STAGES;
    in_valid <= 1; in_bypass <= byp; in_unit <= u; in_tag <= 16'(tag);
    @(posedge clk);
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    int t;
    t = int'(out_tag);
    checks++;
    if (cyc != exp_cyc[t] + 1) begin
      failures++; $display("FAIL latency tag %0d: at %0d expected %0d", t, cyc, exp_cyc[t] + 1);
    end
    if (exp_byp[t] != 0) begin
      if (out_stat != IN_BYPASS || out_data != exp_data[t]) begin failures++; $display("FAIL bypass tag %0d", t); end
    end else if (exp_nerr[t] == 0) begin
      if (out_stat != IN_CLEAN || out_data != exp_data[t] || out_nerr != 0) begin failures++; $display("FAIL clean tag %0d", t); end
    end else if (exp_nerr[t] <= 2) begin
      if (out_stat != IN_CORRECTED || out_data != exp_data[t] || int'(out_nerr) != exp_nerr[t]) begin
        failures++; $display("FAIL corr tag %0d n=%0d stat=%0d nerr=%0d", t, exp_nerr[t], out_stat, out_nerr);
      end
    end else begin
      n_big++;
      if (out_stat == IN_ERASURE) n_era++;
      if (out_stat == IN_CLEAN) begin failures++; $display("FAIL big error passed as clean tag %0d", t); end
    end
  end

  initial begin
    in_valid = 0; in_bypass = 0; in_unit = '0; in_tag = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 1000; i++) begin
      int n;
      n = (i % 10 < 3) ? 0 : (i % 10 < 6) ? 1 : (i % 10 < 8) ? 2 : $urandom_range(3, 8);
      send(i, n, (i % 50) == 7);
    end
    in_valid <= 0;
    repeat (STAGES + 4) @(posedge clk);
    checks++;
    // nearly all 3+ byte patterns must be flagged (mis-correction needs a
    // pattern within distance 2 of another codeword)
    if (n_big == 0 || n_era * 100 < n_big * 90) begin
      failures++; $display("FAIL only %0d of %0d heavy errors flagged", n_era, n_big);
    end
    $display("heavy-error units %0d, flagged as erasure %0d", n_big, n_era);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
