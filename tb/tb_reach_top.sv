// tb_reach_top: end-to-end test of the two-level ECC controller at its
// default size (64 lanes, 16 channels, 26 erasure pipes, 128 buffers),
// against a behavioural HBM that stores 36 B units and lets the test
// corrupt bytes. A shadow copy of every span's data is the reference.
//
// Scenarios: whole-span writes (parity from scratch); clean reads (fast
// path); 1- and 2-byte errors (inner correction); chunks with 3..8 bad
// bytes, including outer parity chunks (escalation + erasure-only repair
// of up to 4 chunks); 5 bad chunks (uncorrectable); random writes with
// differential parity, checked by later repairs that depend on that
// parity; a random write hitting a bad chunk (escalated write, full
// codeword rewritten, which also scrubs the span); unprotected-plane
// (bypass) writes and reads; the bit-plane transposer. Each mechanism is
// counted and must occur; the controller's statistics must agree.
//
// The top is instantiated with no parameter overrides. Latencies are checked
// in the block testbenches; here a watchdog ends a hung run. Ends with a
// TB_RESULT line giving the number of checks and failures.
module tb_reach_top;
  import reach_pkg::*;
  `include "rs8_ref.svh"

  localparam int LANES = 64, NCH = 16, LPC = 4, ADDR_W = 26;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, req_bypass, rsp_valid;
  op_e req_op;
  logic [ADDR_W-1:0] req_span;
  logic [LANES-1:0] req_mask, rsp_mask;
  chunk_t req_wdata [LANES];
  rsp_stat_e rsp_status;
  chunk_t rsp_data [LANES];
  logic bp_in_valid, bp_dir, bp_out_valid;
  logic [16*CHUNK_BITS-1:0] bp_in_block, bp_out_block;
  logic [15:0] bp_crit_mask, bp_prot;
  logic [4:0] bp_n_prot;
  logic [NCH-1:0] phy_cmd_valid, phy_cmd_write, phy_cmd_par, phy_rd_valid;
  logic [ADDR_W-1:0] phy_cmd_span [NCH];
  logic [LPC-1:0] phy_cmd_mask [NCH];
  unit_t phy_wdata [NCH][LPC];
  unit_t phy_rd_data [NCH][LPC];
  reach_stats_t stats;

  reach_top dut (.*);

  hbm_model #(.NCH(NCH), .LPC(LPC), .ADDR_W(ADDR_W)) hbm (
    .clk, .phy_cmd_valid, .phy_cmd_write, .phy_cmd_span, .phy_cmd_par, .phy_cmd_mask,
    .phy_wdata, .phy_rd_valid, .phy_rd_data
  );

  int checks = 0, failures = 0;
  chunk_t shadow [128][LANES];
  int n_fast = 0, n_corr = 0, n_rep = 0, n_unc = 0, n_diff = 0, n_full = 0, n_byp = 0,
      n_escw = 0, n_bp = 0;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic request(input op_e op, input int span, input logic [LANES-1:0] mask,
                         input bit byp, output rsp_stat_e st);
    @(negedge clk);
    req_valid = 1; req_op = op; req_span = ADDR_W'(span); req_mask = mask; req_bypass = byp;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    st = rsp_status;
  endtask

  task automatic write_span(input int span, input logic [LANES-1:0] mask, input rsp_stat_e exp);
    rsp_stat_e st;
    for (int l = 0; l < LANES; l++) begin
      req_wdata[l] = rand256();
      if (mask[l]) shadow[span][l] = req_wdata[l];
    end
    request(OP_WRITE, span, mask, 0, st);
    chk(st == exp, $sformatf("write span %0d status %0d expected %0d", span, int'(st), int'(exp)));
  endtask

  task automatic read_check(input int span, input logic [LANES-1:0] mask, input rsp_stat_e exp);
    rsp_stat_e st;
    request(OP_READ, span, mask, 0, st);
    chk(st == exp, $sformatf("read span %0d status %0d expected %0d", span, int'(st), int'(exp)));
    if (st != ST_UNCORR)
      for (int l = 0; l < LANES; l++)
        if (mask[l]) begin
          chunk_t d;
          bit ok;
          d = shadow[span][l];
          ok = (rsp_data[l] == d);
          chk(ok, $sformatf("read span %0d chunk %0d data", span, l));
        end
    case (st)
      ST_OK: n_fast++;
      ST_CORRECTED: n_corr++;
      ST_REPAIRED: n_rep++;
      default: n_unc++;
    endcase
  endtask

  function automatic logic [LANES-1:0] one(input int l);
    return LANES'(1) << l;
  endfunction

  initial begin
    rsp_stat_e st;
    logic [LANES-1:0] ALL;
    ALL = '1;
    req_valid = 0; req_op = OP_READ; req_span = '0; req_mask = '0; req_bypass = 0;
    for (int l = 0; l < LANES; l++) req_wdata[l] = '0;
    bp_in_valid = 0; bp_dir = 0; bp_in_block = '0; bp_crit_mask = 16'hFF80;
    repeat (4) @(posedge clk);
    rst_n = 1;

    // 1. whole-span writes of spans 0..5
    for (int s = 0; s < 6; s++) begin write_span(s, ALL, ST_OK); n_full++; end
    // stored inner parity must match an independent encoder
    for (int c = 0; c < 64; c += 9) begin
      unit_t u;
      chunk_t ref_d;
      ipar_t ref_p;
      bit ok;
      u = hbm.peek(ADDR_W'(3), c);
      ref_d = shadow[3][c];
      ref_p = r8_encode(ref_d);
      ok = (u[255:0] == ref_d) && (u[287:256] == ref_p);
      chk(ok, $sformatf("stored unit 3/%0d", c));
    end

    // 2. clean reads: whole span and random chunks
    read_check(0, ALL, ST_OK);
    read_check(1, one(3) | one(40), ST_OK);

    // 3. inner correction of 1 and 2 bad bytes
    hbm.corrupt(ADDR_W'(1), 5, 1);
    read_check(1, one(5), ST_CORRECTED);
    hbm.corrupt(ADDR_W'(1), 6, 2);
    read_check(1, one(6) | one(7), ST_CORRECTED);

    // 4. escalation: one heavily damaged chunk, then 4 incl. parity chunks
    hbm.corrupt(ADDR_W'(2), 10, 5);
    read_check(2, one(10), ST_REPAIRED);
    hbm.corrupt(ADDR_W'(3), 0, 8);
    hbm.corrupt(ADDR_W'(3), 33, 36);
    hbm.corrupt(ADDR_W'(3), 63, 4);
    hbm.corrupt(ADDR_W'(3), 66, 6);
    read_check(3, ALL, ST_REPAIRED);

    // 5. five bad chunks: beyond C = 4
    for (int c = 20; c < 25; c++) hbm.corrupt(ADDR_W'(4), c, 6);
    read_check(4, one(22), ST_UNCORR);

    // 6. random writes with differential parity, then prove the parity by
    //    repairs that need it (two data chunks + a parity chunk lost)
    write_span(0, one(2) | one(17) | one(50), ST_OK); n_diff++;
    write_span(0, one(63), ST_OK); n_diff++;
    read_check(0, ALL, ST_OK);
    hbm.corrupt(ADDR_W'(0), 17, 7);
    hbm.corrupt(ADDR_W'(0), 63, 7);
    hbm.corrupt(ADDR_W'(0), 64, 7);
    read_check(0, ALL, ST_REPAIRED);

    // 7. random write whose touched chunk is bad: escalated write, whole
    //    codeword rewritten (scrubbed), parity kept consistent
    hbm.corrupt(ADDR_W'(5), 9, 4);
    hbm.corrupt(ADDR_W'(5), 30, 5);
    write_span(5, one(9), ST_REPAIRED); n_escw++;
    read_check(5, ALL, ST_OK);
    hbm.corrupt(ADDR_W'(5), 9, 9);
    hbm.corrupt(ADDR_W'(5), 1, 9);
    read_check(5, one(9) | one(1) | one(2), ST_REPAIRED);

    // 8. random write with an inner correction in its read phase
    hbm.corrupt(ADDR_W'(2), 44, 2);
    write_span(2, one(44) | one(45), ST_CORRECTED); n_diff++;
    read_check(2, ALL, ST_REPAIRED);   // chunk 10 from step 4 is still bad in HBM

    // 9. unprotected planes: no inner parity stored, no outer code
    for (int l = 0; l < LANES; l++) begin req_wdata[l] = rand256(); shadow[100][l] = req_wdata[l]; end
    request(OP_WRITE, 100, one(0) | one(1), 1, st);
    chk(st == ST_OK, "bypass write");
    begin
      unit_t u;
      chunk_t d;
      bit ok;
      repeat (3) @(negedge clk);   // let the posted write reach the model
      u = hbm.peek(ADDR_W'(100), 1);
      d = shadow[100][1];
      ok = (u == {32'd0, d});
      chk(ok, "bypass write stores no inner parity");
    end
    request(OP_READ, 100, one(0) | one(1), 1, st);
    begin
      chunk_t d0, d1;
      bit ok;
      d0 = shadow[100][0]; d1 = shadow[100][1];
      ok = (st == ST_OK) && (rsp_data[0] == d0) && (rsp_data[1] == d1);
      chk(ok, "bypass read");
    end
    n_byp++;

    // 10. bit-plane layout round trip; sign+exponent planes are critical
    begin
      logic [16*CHUNK_BITS-1:0] vals;
      for (int i = 0; i < 16; i++) vals[256*i +: 256] = rand256();
      @(negedge clk); bp_in_valid = 1; bp_dir = 0; bp_in_block = vals;
      @(negedge clk); bp_in_valid = 0;
      chk(bp_out_valid && bp_prot == 16'hFF80 && bp_n_prot == 5'd9, "bit-plane mask");
      for (int t = 0; t < 20; t++) begin
        int i, j;
        i = $urandom_range(0, 15); j = $urandom_range(0, 255);
        chk(bp_out_block[256*i + j] == vals[16*j + i], "plane bit");
      end
      bp_in_valid = 1; bp_dir = 1; bp_in_block = bp_out_block;
      @(negedge clk); bp_in_valid = 0;
      chk(bp_out_block == vals, "bit-plane round trip");
      n_bp++;
    end

    // 11. mechanism coverage and statistics
    $display("fast=%0d corrected=%0d repaired=%0d uncorrectable=%0d diff_writes=%0d full_writes=%0d escalated_writes=%0d bypass=%0d bitplane=%0d skewed_channel_reads=%0d stall_cycles=%0d",
             n_fast, n_corr, n_rep, n_unc, n_diff, n_full, n_escw, n_byp, n_bp, hbm.skewed, stats.stall_cycles);
    chk(n_fast > 0, "fast path seen");
    chk(n_corr > 0, "inner correction seen");
    chk(n_rep > 0, "outer repair seen");
    chk(n_unc > 0, "uncorrectable seen");
    chk(n_diff > 0, "differential parity write seen");
    chk(n_full > 0, "full-span write seen");
    chk(n_escw > 0, "escalated write seen");
    chk(n_byp > 0, "bypass seen");
    chk(n_bp > 0, "bit-plane transpose seen");
    chk(hbm.skewed > 0, "out-of-step channel responses seen");
    chk(stats.stall_cycles > 0, "reliability-path stall seen");
    chk(stats.escalations == 32'(n_rep + n_unc + n_escw), $sformatf("escalation count %0d", stats.escalations));
    chk(stats.full_writes == 32'(n_full), "full write count");
    chk(stats.diff_writes == 32'(n_diff + n_escw), "diff write count");
    chk(stats.uncorrectable == 32'(n_unc), "uncorrectable count");
    chk(stats.bypassed == 32'(2), "bypass count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
