// bitplane_xpose: bit-plane layout for importance-adaptive protection.
//
// A block of M = 256 BF16 values (512 B) is stored as 16 bit-planes: plane
// i holds bit i of every value, so one plane is exactly one 32 B chunk
// (plane i, bit j = bit i of value j). Planes named in `crit_mask` (the set
// S of critical planes) are protected by the two-level ECC; the others
// bypass it and move as plain 32 B chunks. The default policy of the paper's
// figure protects the sign (plane 15) and exponent (planes 14..7) planes,
// crit_mask = 16'hFF80, gamma = 9/16; the paper's text also quotes
// gamma = 0.5. The transpose is its own inverse in shape: with dir = 1 the
// block maps planes back to values.
//
// Interface: in_valid/in_block (dir 0: 256 values, value j at bits
// 16j+15:16j; dir 1: 16 planes, plane i at bits 256i+255:256i); one cycle
// later out_valid/out_block in the other form, with prot[i] = crit_mask[i]
// and n_prot = |S| (gamma * 16). Fully pipelined, one block per cycle.
module bitplane_xpose
  import reach_pkg::*;
#(
  parameter int unsigned NBITS = 16,       // BF16
  parameter int unsigned M     = CHUNK_BITS // values per block = bits per plane
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 dir,        // 0: values -> planes, 1: planes -> values
  input  logic [NBITS*M-1:0]   in_block,
  input  logic [NBITS-1:0]     crit_mask,
  output logic                 out_valid,
  output logic [NBITS*M-1:0]   out_block,
  output logic [NBITS-1:0]     prot,
  output logic [$clog2(NBITS+1)-1:0] n_prot
);

  logic [NBITS*M-1:0] to_planes, to_values;

  always_comb begin
    for (int i = 0; i < int'(NBITS); i++)
      for (int j = 0; j < int'(M); j++) begin
        to_planes[i*M + j]     = in_block[j*NBITS + i];
        to_values[j*NBITS + i] = in_block[i*M + j];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_block <= '0; prot <= '0; n_prot <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_block <= dir ? to_values : to_planes;
        prot      <= crit_mask;
        n_prot    <= ($bits(n_prot))'($countones(crit_mask));
      end
    end
  end

endmodule
