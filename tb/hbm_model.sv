// hbm_model: behavioural model of the HBM stack behind the PHY, for the
// testbenches only. It stores 36 B units (32 B data + 4 B inner parity) per
// (span, chunk) in an associative array (unwritten units read as zero,
// which is a valid codeword of both linear codes), answers each channel's
// read after a per-command random delay of MIN_LAT..MAX_LAT cycles (so the
// channels come back out of step), and lets the testbench corrupt stored
// bytes to emulate raw bit errors.
//
// Interface: the PHY-side ports of channel_if. The DRAM itself is outside
// the design; this model only stands in for it in simulation.
module hbm_model
  import reach_pkg::*;
#(
  parameter int unsigned NCH     = 16,
  parameter int unsigned LPC     = 4,
  parameter int unsigned ADDR_W  = 26,
  parameter int unsigned MIN_LAT = 2,
  parameter int unsigned MAX_LAT = 6
) (
  input  logic              clk,
  input  logic [NCH-1:0]    phy_cmd_valid,
  input  logic [NCH-1:0]    phy_cmd_write,
  input  logic [ADDR_W-1:0] phy_cmd_span [NCH],
  input  logic [NCH-1:0]    phy_cmd_par,
  input  logic [LPC-1:0]    phy_cmd_mask [NCH],
  input  unit_t             phy_wdata    [NCH][LPC],
  output logic [NCH-1:0]    phy_rd_valid,
  output unit_t             phy_rd_data  [NCH][LPC]
);

  unit_t mem [longint];
  int    wait_q [NCH];
  unit_t pend [NCH][LPC];
  int    skewed = 0;    // read commands answered with different delays

  function automatic longint key(input logic [ADDR_W-1:0] span, input int chunk);
    return longint'(span) * 128 + chunk;
  endfunction

  function automatic unit_t peek(input logic [ADDR_W-1:0] span, input int chunk);
    longint k;
    k = key(span, chunk);
    return mem.exists(k) ? mem[k] : '0;
  endfunction

  // flip nbytes distinct bytes of a stored unit (36 byte positions)
  task automatic corrupt(input logic [ADDR_W-1:0] span, input int chunk, input int nbytes);
    unit_t u;
    logic [35:0] used;
    int p;
    u = peek(span, chunk);
    used = '0;
    for (int i = 0; i < nbytes; i++) begin
      do p = $urandom_range(0, 35); while (used[p]);
      used[p] = 1'b1;
      u[8*p +: 8] ^= 8'($urandom_range(1, 255));
    end
    mem[key(span, chunk)] = u;
  endtask

  initial begin
    phy_rd_valid = '0;
    for (int c = 0; c < int'(NCH); c++) wait_q[c] = 0;
  end

  always @(posedge clk) begin
    int first_d;
    first_d = -1;
    phy_rd_valid <= '0;
    for (int c = 0; c < int'(NCH); c++) begin
      if (wait_q[c] > 0) begin
        wait_q[c]--;
        if (wait_q[c] == 0) begin
          phy_rd_valid[c] <= 1'b1;
          phy_rd_data[c]  <= pend[c];
        end
      end
      if (phy_cmd_valid[c]) begin
        for (int u = 0; u < int'(LPC); u++) begin
          int ch;
          ch = (phy_cmd_par[c] ? 64 : 0) + c * int'(LPC) + u;
          if (phy_cmd_mask[c][u]) begin
            if (phy_cmd_write[c]) mem[key(phy_cmd_span[c], ch)] = phy_wdata[c][u];
            else pend[c][u] = peek(phy_cmd_span[c], ch);
          end else if (!phy_cmd_write[c]) begin
            pend[c][u] = '0;
          end
        end
        if (!phy_cmd_write[c]) begin
          wait_q[c] = $urandom_range(MIN_LAT, MAX_LAT);
          if (first_d >= 0 && first_d != wait_q[c]) skewed++;
          first_d = wait_q[c];
        end
      end
    end
  end

endmodule
