// tb_outer_cw_buffer: writes data and parity beats with erasure flags into
// several slots, then reads every position group through two read ports
// and checks chunk placement (code position -> span chunk), the one-cycle
// read latency and the erasure masks.
//
// Reduced to 4 slots and 2 read ports (paper: 128 slots, 26 pipes); the
// read latency checked is this design's one cycle. Watchdog 2 ms.
// Ends with a TB_RESULT line giving the number of checks and failures.
module tb_outer_cw_buffer;
  import reach_pkg::*;
  `include "rs8_ref.svh"

  localparam int NS = 4, NR = 2, L = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_valid, wr_par;
  logic [1:0] wr_slot, mask_slot;
  logic [L-1:0] wr_mask, wr_erased;
  chunk_t wr_data [L];
  logic [NR-1:0] rd_req;
  logic [1:0] rd_slot [NR];
  logic [4:0] rd_group [NR];
  chunk_t rd_data [NR][4];
  logic [67:0] mask_out;

  outer_cw_buffer #(.NSLOTS(NS), .NRD(NR), .LANES(L)) dut (.*);

  chunk_t ref_c [NS][68];
  logic [67:0] ref_m [NS];
  int checks = 0, failures = 0;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_valid = 0; wr_par = 0; wr_slot = 0; mask_slot = 0; wr_mask = '0; wr_erased = '0;
    rd_req = '0;
    for (int r = 0; r < NR; r++) begin rd_slot[r] = '0; rd_group[r] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < NS; s++) begin
      for (int p = 0; p < 2; p++) begin
        wr_valid = 1; wr_slot = 2'(s); wr_par = p[0]; wr_mask = '1;
        for (int l = 0; l < L; l++) begin
          wr_data[l] = rand256();
          wr_erased[l] = ($urandom_range(0, 9) == 0);
          if (p == 0) begin ref_c[s][l] = wr_data[l]; ref_m[s][l] = wr_erased[l]; end
          else if (l < 4) begin ref_c[s][64+l] = wr_data[l]; ref_m[s][64+l] = wr_erased[l]; end
        end
        @(negedge clk);
      end
    end
    wr_valid = 0;
    for (int s = 0; s < NS; s++) begin
      mask_slot = 2'(s); #1;
      checks++;
      if (mask_out != ref_m[s]) begin failures++; $display("FAIL mask slot %0d", s); end
      for (int g = 0; g < 17; g++) begin
        rd_req = '1; rd_slot[0] = 2'(s); rd_group[0] = 5'(g);
        rd_slot[1] = 2'(NS - 1 - s); rd_group[1] = 5'(16 - g);
        @(negedge clk);
        rd_req = '0;
        for (int b = 0; b < 4; b++) begin
          checks += 2;
          if (rd_data[0][b] != ref_c[s][pos_chunk(7'(4*g + b))]) begin failures++; $display("FAIL port0 s%0d g%0d b%0d", s, g, b); end
          if (rd_data[1][b] != ref_c[NS-1-s][pos_chunk(7'(4*(16-g) + b))]) begin failures++; $display("FAIL port1 s%0d g%0d b%0d", s, g, b); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
