// outer_rs_cluster: the shared GF(2^16) erasure-repair cluster.
//
// NPIPES erasure-only pipes (outer_erasure_pipe) sit behind a dispatcher.
// The paper provisions 26 pipes for a 20 % utilisation target at 3.35 TB/s;
// that is the default. A job names a buffer slot and its erasure set; the
// dispatcher hands it to the lowest-numbered idle pipe (job_ready is low
// when all pipes are busy, which stalls the reliability path). Each pipe
// reads its codeword from the buffer pool through its own read port.
// Repaired chunks of all pipes leave through one output port, granted to
// the lowest-numbered pipe with a chunk ready (the others hold theirs);
// `job_done` reports the end of a job with its slot and whether it failed
// (more than C = 4 erasures). Arbitration order is this design's choice.
//
// Timing: a job is taken in the cycle job_valid and job_ready are both high;
// the pipe's repaired chunks and its done pulse follow with the pipe's own
// timing (25 cycles for 4 erasures when the output port is free). Only one
// completion is reported per cycle: two pipes ending in the same cycle would
// lose a report. The controller of this design keeps at most one job in
// flight, so that case cannot arise there.
module outer_rs_cluster
  import reach_pkg::*;
#(
  parameter int unsigned NPIPES = 26,
  parameter int unsigned SW     = 7
) (
  input  logic                clk,
  input  logic                rst_n,
  // job dispatch
  input  logic                job_valid,
  output logic                job_ready,
  input  logic [SW-1:0]       job_slot,
  input  logic [N_CW_CH-1:0]  job_mask,
  // buffer read ports, one per pipe
  output logic [NPIPES-1:0]   rd_req,
  output logic [SW-1:0]       rd_slot  [NPIPES],
  output logic [4:0]          rd_group [NPIPES],
  input  chunk_t              rd_data  [NPIPES][4],
  // repaired chunks
  output logic                rep_valid,
  output logic [SW-1:0]       rep_slot,
  output cidx_t               rep_chunk,
  output chunk_t              rep_data,
  // job completion
  output logic                job_done,
  output logic [SW-1:0]       done_slot,
  output logic                done_fail,
  output logic [NPIPES-1:0]   pipe_busy
);

  logic [NPIPES-1:0] start, ovalid, oready, pdone, pfail;
  cidx_t             ochunk [NPIPES];
  chunk_t            odata  [NPIPES];
  logic [SW-1:0]     slot_q [NPIPES];

  // lowest idle pipe
  logic [$clog2(NPIPES+1)-1:0] sel_c;
  logic                        any_idle_c;
  always_comb begin
    any_idle_c = 1'b0;
    sel_c = '0;
    for (int p = int'(NPIPES) - 1; p >= 0; p--)
      if (!pipe_busy[p]) begin any_idle_c = 1'b1; sel_c = ($bits(sel_c))'(p); end
  end
  assign job_ready = any_idle_c;

  always_comb begin
    start = '0;
    if (job_valid && any_idle_c) start[sel_c] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < int'(NPIPES); p++) slot_q[p] <= '0;
    end else begin
      for (int p = 0; p < int'(NPIPES); p++) if (start[p]) slot_q[p] <= job_slot;
    end
  end

  for (genvar p = 0; p < int'(NPIPES); p++) begin : g_pipe
    outer_erasure_pipe u_pipe (
      .clk, .rst_n,
      .start      (start[p]),
      .erase_mask (job_mask),
      .busy       (pipe_busy[p]),
      .rd_req     (rd_req[p]),
      .rd_group   (rd_group[p]),
      .rd_data    (rd_data[p]),
      .out_valid  (ovalid[p]),
      .out_ready  (oready[p]),
      .out_chunk  (ochunk[p]),
      .out_data   (odata[p]),
      .done       (pdone[p]),
      .fail       (pfail[p])
    );
    assign rd_slot[p] = slot_q[p];
  end

  // output arbitration: lowest pipe with a repaired chunk
  always_comb begin
    oready    = '0;
    rep_valid = 1'b0;
    rep_slot  = '0;
    rep_chunk = '0;
    rep_data  = '0;
    for (int p = int'(NPIPES) - 1; p >= 0; p--) begin
      if (ovalid[p]) begin
        oready    = '0;
        oready[p] = 1'b1;
        rep_valid = 1'b1;
        rep_slot  = slot_q[p];
        rep_chunk = ochunk[p];
        rep_data  = odata[p];
      end
    end
  end

  // completion: report the lowest pipe finishing this cycle (one dispatch
  // per cycle makes simultaneous completions rare; a second one is held by
  // no one and would be lost, so the controller keeps one job in flight)
  always_comb begin
    job_done  = 1'b0;
    done_slot = '0;
    done_fail = 1'b0;
    for (int p = int'(NPIPES) - 1; p >= 0; p--) begin
      if (pdone[p]) begin
        job_done  = 1'b1;
        done_fail = pfail[p];
        done_slot = slot_q[p];
      end
    end
  end

endmodule
