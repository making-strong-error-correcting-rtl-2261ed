// tb_reach_ctrl: the request controller alone, with a scripted datapath.
// The environment answers every read command a few cycles later with the
// inner-lane summary of a chosen erasure/correction scenario, throttles
// cmd_ready at random, and plays the outer cluster (repaired chunks, then
// done/fail). For each request the testbench checks the exact command
// sequence sent to the channels, the completion status, the datapath
// strobes (payload load, parity clear, parity loads, delta updates,
// repair job) and finally the event counters.
//
// Runs the controller at 64 lanes with a 12-bit span address and 8 slots;
// the command sequences expected are the paper's read and write flows. Watchdog 5 ms.
// Ends with a TB_RESULT line giving the number of checks and failures.
module tb_reach_ctrl;
  import reach_pkg::*;

  localparam int L = 64, AW = 12, SW = 3, NS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, req_bypass, rsp_valid;
  op_e req_op;
  logic [AW-1:0] req_span, cmd_span;
  logic [L-1:0] req_mask, rsp_mask, cmd_mask;
  rsp_stat_e rsp_status;
  logic cmd_valid, cmd_ready, cmd_write, cmd_par, wr_bypass, ln_bypass;
  logic ln_out_valid, ln_any_erasure, ln_any_corrected;
  logic [L-1:0] ln_out_mask, ln_erased, dr_lw_en;
  logic dr_lw_valid, dr_rp_valid, dr_pay_valid, dr_dl_full, dr_dl_touched, dr_apply;
  logic [5:0] dr_dl_idx;
  logic buf_wr_valid, buf_wr_par;
  logic [SW-1:0] buf_slot;
  logic [N_CW_CH-1:0] buf_mask;
  logic cl_job_valid, cl_job_ready, cl_rep_valid, cl_done, cl_fail;
  cidx_t cl_rep_chunk;
  logic dp_clear, dp_load_valid, dp_load_rep, dp_upd_valid;
  logic [N_PAR_CH-1:0] dp_load_mask;
  reach_stats_t stats;

  reach_ctrl #(.LANES(L), .ADDR_W(AW), .SW(SW), .NSLOTS(NS)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------ scenario
  logic [L-1:0]  era_data;      // lanes flagged erased on data beats
  logic [3:0]    era_par;       // parity lanes flagged erased
  bit            corr;          // inner code corrected something
  logic [67:0]   erase_total;   // erasure mask of the whole codeword

  // ------------------------------------------------------- channel + lanes
  typedef struct { bit w; bit p; logic [L-1:0] m; } cmd_s;
  cmd_s log_q [$];
  int rd_due = -1;
  logic [L-1:0] rd_mask_q;
  bit rd_par_q;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    cmd_ready <= ($urandom_range(0, 3) != 0);
    ln_out_valid <= 1'b0;
    if (cmd_valid && cmd_ready) begin
      cmd_s c;
      c.w = cmd_write; c.p = cmd_par; c.m = cmd_mask;
      log_q.push_back(c);
      if (!cmd_write) begin rd_due <= cyc + 4; rd_mask_q <= cmd_mask; rd_par_q <= cmd_par; end
    end
    if (cyc == rd_due) begin
      logic [L-1:0] e;
      e = (rd_par_q ? L'(era_par) : era_data) & rd_mask_q;
      ln_out_valid <= 1'b1;
      ln_out_mask <= rd_mask_q;
      ln_erased <= e;
      ln_any_erasure <= (e != '0) && !ln_bypass;
      ln_any_corrected <= corr && !ln_bypass;
    end
  end

  // --------------------------------------------------- data return model
  logic [L-1:0] pay_mask_q;
  always @(posedge clk) if (dr_pay_valid) pay_mask_q <= req_mask;
  assign dr_dl_touched = pay_mask_q[dr_dl_idx];

  // --------------------------------------------------------- outer cluster
  int job_at = -1, n_rep = 0;
  bit in_job = 0;
  int n_jobs = 0, n_upd = 0, n_load = 0, n_clear = 0, n_pay = 0, n_buf = 0, n_apply = 0;
  assign buf_mask = erase_total;
  always @(posedge clk) begin
    cl_job_ready <= ($urandom_range(0, 2) != 0) && !in_job;
    cl_rep_valid <= 1'b0; cl_done <= 1'b0; cl_fail <= 1'b0;
    if (cl_job_valid && cl_job_ready) begin in_job <= 1; job_at <= cyc; n_jobs++; end
    if (in_job && cyc > job_at + 3) begin
      // emit repaired chunks in index order, then done
      int c;
      c = -1;
      for (int i = 67; i >= 0; i--) if (erase_total[i] && i >= n_rep) c = i;
      if (c >= 0) begin
        cl_rep_valid <= 1'b1; cl_rep_chunk <= cidx_t'(c); n_rep <= c + 1;
      end else begin
        cl_done <= 1'b1; in_job <= 0; n_rep <= 0;
      end
    end
    if (dp_upd_valid) n_upd++;
    if (dp_load_valid) n_load++;
    if (dp_clear) n_clear++;
    if (dr_pay_valid) n_pay++;
    if (buf_wr_valid) n_buf++;
    if (dr_apply) n_apply++;
  end

  // ----------------------------------------------------------- driver
  task automatic run(input string name, input op_e op, input logic [L-1:0] m, input bit byp,
                     input rsp_stat_e exp_st, input cmd_s exp_cmds [$],
                     input int exp_jobs, input int exp_upd, input int exp_load);
    int t0;
    int j0, u0, l0, c0, p0;
    j0 = n_jobs; u0 = n_upd; l0 = n_load; c0 = n_clear; p0 = n_pay;
    log_q.delete();
    @(negedge clk);
    req_valid = 1; req_op = op; req_mask = m; req_bypass = byp; req_span = AW'($urandom);
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    t0 = cyc;
    while (!rsp_valid && cyc < t0 + 2000) @(negedge clk);
    chk(rsp_valid, {name, ": response"});
    chk(rsp_status == exp_st, $sformatf("%s: status %0d expected %0d", name, int'(rsp_status), int'(exp_st)));
    chk(rsp_mask == m, {name, ": response mask"});
    @(negedge clk);
    chk(log_q.size() == exp_cmds.size(), $sformatf("%s: %0d commands, expected %0d", name, log_q.size(), exp_cmds.size()));
    for (int i = 0; i < exp_cmds.size() && i < log_q.size(); i++)
      chk(log_q[i].w == exp_cmds[i].w && log_q[i].p == exp_cmds[i].p && log_q[i].m == exp_cmds[i].m,
          $sformatf("%s: command %0d", name, i));
    chk(n_jobs - j0 == exp_jobs, {name, ": repair jobs"});
    chk(n_upd - u0 == exp_upd, $sformatf("%s: %0d delta updates, expected %0d", name, n_upd - u0, exp_upd));
    chk(n_load - l0 == exp_load, $sformatf("%s: %0d parity loads, expected %0d", name, n_load - l0, exp_load));
    chk(n_clear - c0 == ((op == OP_WRITE && m == '1 && !byp) ? 1 : 0), {name, ": parity clear"});
    chk(n_pay - p0 == ((op == OP_WRITE) ? 1 : 0), {name, ": payload load"});
  endtask

  function automatic cmd_s C(input bit w, input bit p, input logic [L-1:0] m);
    cmd_s c;
    c.w = w; c.p = p; c.m = m;
    return c;
  endfunction

  localparam logic [L-1:0] ALL = '1, PARM = L'(4'hF);
  logic [L-1:0] m;
  initial begin
    req_valid = 0; req_op = OP_READ; req_mask = '0; req_bypass = 0; req_span = '0;
    era_data = '0; era_par = '0; corr = 0; erase_total = '0;
    ln_out_mask = '0; ln_erased = '0; ln_any_erasure = 0; ln_any_corrected = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    m = 64'h0000_00F0_0000_1001;
    run("clean read", OP_READ, m, 0, ST_OK, '{C(0, 0, m)}, 0, 0, 0);
    corr = 1;
    run("corrected read", OP_READ, m, 0, ST_CORRECTED, '{C(0, 0, m)}, 0, 0, 0);
    corr = 0;
    era_data = 64'h0000_0010_0000_0001; erase_total = 68'h0_0000_0010_0000_0001;
    run("repaired read", OP_READ, m, 0, ST_REPAIRED,
        '{C(0, 0, m), C(0, 0, ALL), C(0, 1, PARM)}, 1, 0, 1);
    run("repaired whole-span read", OP_READ, ALL, 0, ST_REPAIRED,
        '{C(0, 0, ALL), C(0, 1, PARM)}, 1, 0, 1);
    era_par = 4'b0100; erase_total = 68'h4_0000_0010_0000_0001;
    run("repaired read with parity loss", OP_READ, m, 0, ST_REPAIRED,
        '{C(0, 0, m), C(0, 0, ALL), C(0, 1, PARM)}, 1, 0, 2);
    era_data = 64'h0000_00F0_0000_1001; era_par = 4'b0011; erase_total = {4'b0011, era_data};
    run("uncorrectable read", OP_READ, m, 0, ST_UNCORR,
        '{C(0, 0, m), C(0, 0, ALL), C(0, 1, PARM)}, 0, 0, 1);
    era_data = '0; era_par = '0; erase_total = '0;
    run("partial write", OP_WRITE, m, 0, ST_OK,
        '{C(0, 0, m), C(0, 1, PARM), C(1, 0, m), C(1, 1, PARM)}, 0, $countones(m), 1);
    run("full write", OP_WRITE, ALL, 0, ST_OK, '{C(1, 0, ALL), C(1, 1, PARM)}, 0, 64, 0);
    era_par = 4'b1000; erase_total = 68'h8_0000_0000_0000_0000;
    run("escalated write", OP_WRITE, m, 0, ST_REPAIRED,
        '{C(0, 0, m), C(0, 1, PARM), C(0, 0, ALL), C(0, 1, PARM), C(1, 0, ALL), C(1, 1, PARM)},
        1, $countones(m), 1 + 1 + 1);
    era_par = '0; erase_total = '0;
    run("bypass read", OP_READ, m, 1, ST_OK, '{C(0, 0, m)}, 0, 0, 0);
    run("bypass write", OP_WRITE, m, 1, ST_OK, '{C(1, 0, m)}, 0, 0, 0);

    chk(stats.requests == 11, "stat requests");
    chk(stats.fast_path == 4, $sformatf("stat fast_path %0d", stats.fast_path));
    chk(stats.inner_fixed == 1, "stat inner_fixed");
    chk(stats.escalations == 5, "stat escalations");
    chk(stats.repaired == 4, "stat repaired");
    chk(stats.uncorrectable == 1, "stat uncorrectable");
    chk(stats.diff_writes == 2, "stat diff_writes");
    chk(stats.full_writes == 1, "stat full_writes");
    chk(stats.bypassed == 2, "stat bypassed");
    chk(stats.stall_cycles > 0, "stat stall_cycles");
    chk(n_buf == 10 && n_apply == 4, $sformatf("buffer writes %0d, applies %0d", n_buf, n_apply));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
