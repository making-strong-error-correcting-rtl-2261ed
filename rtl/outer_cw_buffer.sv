// outer_cw_buffer: the shared pool of outer-codeword buffers.
//
// When a request escalates, the controller reads the whole 2 KB outer
// codeword (64 data + 4 parity chunks) from HBM, and the inner lanes write
// it here together with the erasure set (one bit per chunk the inner code
// rejected). The outer erasure pipes then stream it out for repair. The
// paper sizes the pool as double-buffered 2 KB codewords per inner lane
// (~320 KB); the default NSLOTS = 128 = 64 lanes x 2 holds 128 x 68 x 32 B
// = 272 KB of codeword data (the paper's figure presumably also counts
// metadata; it gives no breakdown).
//
// Organisation (this design's choice): one array word per chunk, one write
// port that takes a whole lane beat (64 chunks, either the data chunks
// 0..63 or, with wr_par = 1, the parity chunks 64..67 on lanes 0..3), and
// NRD read ports, one per erasure pipe, each returning the 4 chunks of an
// outer-code position group (positions 4g..4g+3) one cycle after rd_req.
// The erasure mask of a slot is read combinationally (mask_slot).
// A written chunk's erasure bit is set from wr_erased and cleared otherwise.
module outer_cw_buffer
  import reach_pkg::*;
#(
  parameter int unsigned NSLOTS = 128,
  parameter int unsigned NRD    = 26,
  parameter int unsigned LANES  = 64,
  localparam int unsigned SW    = (NSLOTS > 1) ? $clog2(NSLOTS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // lane-beat write
  input  logic              wr_valid,
  input  logic [SW-1:0]     wr_slot,
  input  logic              wr_par,
  input  logic [LANES-1:0]  wr_mask,
  input  logic [LANES-1:0]  wr_erased,
  input  chunk_t            wr_data [LANES],
  // per-pipe group reads
  input  logic [NRD-1:0]    rd_req,
  input  logic [SW-1:0]     rd_slot  [NRD],
  input  logic [4:0]        rd_group [NRD],
  output chunk_t            rd_data  [NRD][4],
  // erasure set of one slot
  input  logic [SW-1:0]     mask_slot,
  output logic [N_CW_CH-1:0] mask_out
);

  chunk_t             mem   [NSLOTS][N_CW_CH];
  logic [N_CW_CH-1:0] emask [NSLOTS];

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      for (int l = 0; l < int'(LANES); l++) begin
        if (wr_mask[l]) begin
          if (!wr_par && l < int'(N_DATA_CH)) mem[wr_slot][l] <= wr_data[l];
          if (wr_par && l < int'(N_PAR_CH))   mem[wr_slot][int'(N_DATA_CH) + l] <= wr_data[l];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(NSLOTS); s++) emask[s] <= '0;
    end else if (wr_valid) begin
      for (int l = 0; l < int'(LANES); l++) begin
        if (wr_mask[l]) begin
          if (!wr_par && l < int'(N_DATA_CH)) emask[wr_slot][l] <= wr_erased[l];
          if (wr_par && l < int'(N_PAR_CH))   emask[wr_slot][int'(N_DATA_CH) + l] <= wr_erased[l];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < int'(NRD); r++) begin
      if (rd_req[r]) begin
        for (int b = 0; b < 4; b++)
          rd_data[r][b] <= mem[rd_slot[r]][pos_chunk(7'(4 * int'(rd_group[r]) + b))];
      end
    end
  end

  assign mask_out = emask[mask_slot];

endmodule
