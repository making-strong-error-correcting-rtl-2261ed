// channel_if: channel interface between the controller and the HBM PHY.
//
// The PHY exposes NCH = 16 channels (paper). Each 36 B unit on the wire is a
// 32 B data chunk plus 4 B of inner-ECC metadata; this block inserts the
// metadata on writes and strips it on reads, as the paper describes. How the
// 4 B travel on the fixed 32 B interface (e.g. the HBM ECC pins) is not
// specified, so here the PHY side simply carries 36 B units.
//
// Lane mapping (this design's choice): lane l of a 64-lane beat belongs to
// channel l / (LANES/NCH); each channel carries LANES/NCH = 4 units per
// controller cycle. A command (span address, beat = data chunks 0..63 or
// parity chunks 64..67 on lanes 0..3, lane mask) is fanned out only to the
// channels that have a lane in the mask. Read data may come back from the
// channels on different cycles: the block collects them and presents one
// aligned beat (rsp_valid) once every addressed channel has answered. One
// read command may be outstanding; cmd_ready is low while it is.
//
// Timing: a command is registered once and reaches the channels one cycle
// after it is accepted; rsp_valid rises one cycle after the last addressed
// channel has answered. Writes are posted (no response).
module channel_if
  import reach_pkg::*;
#(
  parameter int unsigned LANES  = 64,
  parameter int unsigned NCH    = 16,
  parameter int unsigned ADDR_W = 20,
  localparam int unsigned LPC   = LANES / NCH
) (
  input  logic               clk,
  input  logic               rst_n,
  // controller side
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  logic               cmd_write,
  input  logic [ADDR_W-1:0]  cmd_span,
  input  logic               cmd_par,
  input  logic [LANES-1:0]   cmd_mask,
  input  chunk_t             wr_data [LANES],
  input  ipar_t              wr_ipar [LANES],
  output logic               rsp_valid,
  output logic [LANES-1:0]   rsp_mask,
  output chunk_t             rsp_data [LANES],
  output ipar_t              rsp_ipar [LANES],
  // PHY side, per channel
  output logic [NCH-1:0]     phy_cmd_valid,
  output logic [NCH-1:0]     phy_cmd_write,
  output logic [ADDR_W-1:0]  phy_cmd_span [NCH],
  output logic [NCH-1:0]     phy_cmd_par,
  output logic [LPC-1:0]     phy_cmd_mask [NCH],
  output unit_t              phy_wdata    [NCH][LPC],
  input  logic [NCH-1:0]     phy_rd_valid,
  input  unit_t              phy_rd_data  [NCH][LPC]
);

  logic [NCH-1:0]   pend_q;      // channels still to answer
  logic [LANES-1:0] mask_q;
  unit_t            rbuf [NCH][LPC];

  assign cmd_ready = (pend_q == '0);

  // command fan-out and metadata insertion (registered)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phy_cmd_valid <= '0; phy_cmd_write <= '0; phy_cmd_par <= '0;
      for (int c = 0; c < int'(NCH); c++) begin
        phy_cmd_span[c] <= '0; phy_cmd_mask[c] <= '0;
        for (int u = 0; u < int'(LPC); u++) phy_wdata[c][u] <= '0;
      end
    end else begin
      phy_cmd_valid <= '0;
      if (cmd_valid && cmd_ready) begin
        for (int c = 0; c < int'(NCH); c++) begin
          phy_cmd_valid[c] <= |cmd_mask[c*LPC +: LPC];
          phy_cmd_write[c] <= cmd_write;
          phy_cmd_par[c]   <= cmd_par;
          phy_cmd_span[c]  <= cmd_span;
          phy_cmd_mask[c]  <= cmd_mask[c*LPC +: LPC];
          for (int u = 0; u < int'(LPC); u++)
            phy_wdata[c][u] <= {wr_ipar[c*LPC + u], wr_data[c*LPC + u]};
        end
      end
    end
  end

  // response collection and metadata stripping
  logic [NCH-1:0] chmask_c;
  always_comb
    for (int c = 0; c < int'(NCH); c++) chmask_c[c] = |cmd_mask[c*LPC +: LPC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q <= '0; mask_q <= '0; rsp_valid <= 1'b0;
      for (int c = 0; c < int'(NCH); c++)
        for (int u = 0; u < int'(LPC); u++) rbuf[c][u] <= '0;
    end else begin
      rsp_valid <= 1'b0;
      for (int c = 0; c < int'(NCH); c++)
        if (phy_rd_valid[c] && pend_q[c]) rbuf[c] <= phy_rd_data[c];
      if (cmd_valid && cmd_ready && !cmd_write) begin
        pend_q <= chmask_c;
        mask_q <= cmd_mask;
      end else if (pend_q != '0) begin
        if ((pend_q & ~phy_rd_valid) == '0) rsp_valid <= 1'b1;
        pend_q <= pend_q & ~phy_rd_valid;
      end
    end
  end

  always_comb begin
    rsp_mask = mask_q;
    for (int c = 0; c < int'(NCH); c++)
      for (int u = 0; u < int'(LPC); u++) begin
        rsp_data[c*LPC + u] = rbuf[c][u][CHUNK_BITS-1:0];
        rsp_ipar[c*LPC + u] = rbuf[c][u][UNIT_BITS-1:CHUNK_BITS];
      end
  end

  // the lane count must split evenly over the channels
  initial assert (LANES % NCH == 0) else $error("channel_if: LANES must be a multiple of NCH");

endmodule
