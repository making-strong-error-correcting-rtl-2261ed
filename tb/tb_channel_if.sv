// tb_channel_if: the channel interface in front of the behavioural HBM
// model (random per-channel read delay). Random masked data and parity
// beats are written with inner metadata, then read back with random lane
// masks; the aligned response must carry exactly the stored units of the
// requested lanes, only addressed channels may see a command, and
// cmd_ready must stay low while a read is outstanding.
//
// Runs at the paper's 64 lanes / 16 channels with an 8-bit span address; watchdog 2 ms.
// Ends with a TB_RESULT line giving the number of checks and failures.
module tb_channel_if;
  import reach_pkg::*;
  `include "rs8_ref.svh"

  localparam int L = 64, NC = 16, AW = 8, LPC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cmd_valid, cmd_ready, cmd_write, cmd_par, rsp_valid;
  logic [AW-1:0] cmd_span;
  logic [L-1:0] cmd_mask, rsp_mask;
  chunk_t wr_data [L];
  ipar_t wr_ipar [L];
  chunk_t rsp_data [L];
  ipar_t rsp_ipar [L];
  logic [NC-1:0] phy_cmd_valid, phy_cmd_write, phy_cmd_par, phy_rd_valid;
  logic [AW-1:0] phy_cmd_span [NC];
  logic [LPC-1:0] phy_cmd_mask [NC];
  unit_t phy_wdata [NC][LPC];
  unit_t phy_rd_data [NC][LPC];

  channel_if #(.LANES(L), .NCH(NC), .ADDR_W(AW)) dut (.*);
  hbm_model #(.NCH(NC), .LPC(LPC), .ADDR_W(AW)) u_hbm (.*);

  unit_t ref_u [4][2][L];
  logic [L-1:0] chk_mask;
  int checks = 0, failures = 0, bad_fanout = 0;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // only channels with a lane in the mask may be addressed
  always @(negedge clk) if (rst_n)
    for (int c = 0; c < NC; c++)
      if (phy_cmd_valid[c] && phy_cmd_mask[c] == '0) bad_fanout++;

  initial begin
    int lat, rsps;
    cmd_valid = 0; cmd_write = 0; cmd_par = 0; cmd_span = '0; cmd_mask = '0;
    for (int l = 0; l < L; l++) begin wr_data[l] = '0; wr_ipar[l] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // fill 4 spans, data and parity beats, in two masked halves
    for (int s = 0; s < 4; s++)
      for (int p = 0; p < 2; p++)
        for (int h = 0; h < 2; h++) begin
          cmd_valid = 1; cmd_write = 1; cmd_par = p[0]; cmd_span = AW'(10 + s);
          for (int l = 0; l < L; l++) begin
            cmd_mask[l] = ((l % 2) == h) && (p == 0 || l < 4);
            wr_data[l] = rand256(); wr_ipar[l] = $urandom;
            if (cmd_mask[l]) ref_u[s][p][l] = {wr_ipar[l], wr_data[l]};
          end
          #1; chk(cmd_ready, "ready for write");
          @(negedge clk);
        end
    cmd_valid = 0;
    repeat (3) @(negedge clk);
    for (int t = 0; t < 40; t++) begin
      int s, p;
      s = $urandom_range(0, 3); p = (t % 5 == 4);
      cmd_valid = 1; cmd_write = 0; cmd_par = p[0]; cmd_span = AW'(10 + s);
      for (int l = 0; l < L; l++)
        cmd_mask[l] = (p == 0) ? ($urandom_range(0, 2) != 0) : (l < 4);
      if (t == 0) cmd_mask = 64'h1;
      chk_mask = cmd_mask;
      @(negedge clk);
      cmd_valid = 0;
      lat = 0; rsps = 0;
      while (!rsp_valid && lat < 50) begin
        chk(!cmd_ready, "not ready while read pending");
        @(negedge clk); lat++;
      end
      chk(rsp_valid && rsp_mask == chk_mask, $sformatf("response %0d", t));
      for (int l = 0; l < L; l++)
        if (chk_mask[l]) chk({rsp_ipar[l], rsp_data[l]} == ref_u[s][p][l], $sformatf("unit t%0d l%0d", t, l));
      @(negedge clk);
      chk(!rsp_valid && cmd_ready, "single response");
    end
    chk(bad_fanout == 0, "fan-out only to addressed channels");
    chk(u_hbm.skewed > 0, "skewed channel responses exercised");
    $display("skewed reads %0d", u_hbm.skewed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
