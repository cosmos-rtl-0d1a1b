// dist_array: the rank-parallel distance engine of one CXL device.
//
// N_CH memory channels, each with N_RANK rank_pu units. A distance job for
// node id goes to channel (id mod N_CH); all ranks of that channel start on
// it together, each computing the partial distance over the segments it
// holds, and a per-channel adder sums the N_RANK partials into the full
// distance. Different channels work on different vectors at the same time,
// so up to N_CH distances are in flight. A finished channel holds its result
// until a round-robin arbiter hands it out on the res_* port.
//
// Interface: job_valid/job_ready (ready only when the target channel is
// free; the issuer stalls otherwise), job_id and job_addr (the vector's
// addr_vector); res_valid/res_ready with res_id/res_dist/res_unsup; the
// query broadcast goes to every rank_pu; one read port per rank, flattened
// as index ch*N_RANK + rank.
// Timing: a channel's result is available one cycle after its slowest rank
// finishes. Channel interleaving, one job per channel and the arbiter are
// this design's choices; channel/rank counts default to the evaluated
// device (4 channels, 2 ranks per channel).
module dist_array
  import cosmos_pkg::*;
#(
  parameter int N_CH    = 4,
  parameter int N_RANK  = 2,
  parameter int MAX_SEG = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  metric_e    metric,
  input  elem_e      elem,
  input  logic [7:0] nseg,
  input  logic       qload_valid,
  input  logic [7:0] qload_idx,
  input  seg_t       qload_seg,
  input  logic       job_valid,
  output logic       job_ready,
  input  node_id_t   job_id,
  input  addr_t      job_addr,
  output logic       res_valid,
  input  logic       res_ready,
  output node_id_t   res_id,
  output dist_t      res_dist,
  output logic       res_unsup,
  output logic       rank_req_valid [N_CH*N_RANK],
  input  logic       rank_req_ready [N_CH*N_RANK],
  output addr_t      rank_req_addr  [N_CH*N_RANK],
  input  logic       rank_rsp_valid [N_CH*N_RANK],
  input  seg_t       rank_rsp_data  [N_CH*N_RANK]
);

  localparam int CHW = (N_CH > 1) ? $clog2(N_CH) : 1;

  logic              ch_busy   [N_CH];
  logic              ch_full   [N_CH];   // result waiting for the arbiter
  logic [N_RANK-1:0] ch_mask   [N_CH];   // ranks finished
  dist_t             ch_sum    [N_CH];
  node_id_t          ch_id     [N_CH];
  logic              ch_unsup  [N_CH];
  logic              pu_ready  [N_CH*N_RANK];
  logic              pu_done   [N_CH*N_RANK];
  logic              pu_unsup  [N_CH*N_RANK];
  dist_t             pu_part   [N_CH*N_RANK];
  logic              ch_start  [N_CH];
  logic [CHW-1:0]    job_ch, rr_ptr, grant;
  logic              grant_v;

  assign job_ch    = CHW'(job_id % N_CH);
  assign job_ready = !ch_busy[job_ch] && !ch_full[job_ch];

  always_comb
    for (int c = 0; c < N_CH; c++) ch_start[c] = job_valid && job_ready && (job_ch == CHW'(c));

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    for (genvar r = 0; r < N_RANK; r++) begin : g_rank
      rank_pu #(.N_RANK(N_RANK), .RANK_IDX(r), .MAX_SEG(MAX_SEG)) u_pu (
        .clk, .rst_n, .metric, .elem,
        .qload_valid, .qload_idx, .qload_seg,
        .job_valid    (ch_start[c]),
        .job_ready    (pu_ready[c*N_RANK+r]),
        .job_addr     (job_addr),
        .job_nseg     (nseg),
        .mem_req_valid(rank_req_valid[c*N_RANK+r]),
        .mem_req_ready(rank_req_ready[c*N_RANK+r]),
        .mem_req_addr (rank_req_addr[c*N_RANK+r]),
        .mem_rsp_valid(rank_rsp_valid[c*N_RANK+r]),
        .mem_rsp_data (rank_rsp_data[c*N_RANK+r]),
        .done         (pu_done[c*N_RANK+r]),
        .unsup        (pu_unsup[c*N_RANK+r]),
        .partial      (pu_part[c*N_RANK+r])
      );
    end

    // channel combiner: sum the partial distances of its ranks
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ch_busy[c]  <= 1'b0;
        ch_full[c]  <= 1'b0;
        ch_mask[c]  <= '0;
        ch_sum[c]   <= '0;
        ch_id[c]    <= '0;
        ch_unsup[c] <= 1'b0;
      end else begin
        if (ch_start[c]) begin
          ch_busy[c]  <= 1'b1;
          ch_mask[c]  <= '0;
          ch_sum[c]   <= '0;
          ch_id[c]    <= job_id;
          ch_unsup[c] <= 1'b0;
        end else if (ch_busy[c]) begin
          logic [N_RANK-1:0] m;
          dist_t             s;
          logic              u;
          m = ch_mask[c];
          s = ch_sum[c];
          u = ch_unsup[c];
          for (int r = 0; r < N_RANK; r++)
            if (pu_done[c*N_RANK+r]) begin
              m[r] = 1'b1;
              s    = s + pu_part[c*N_RANK+r];
              u    = u | pu_unsup[c*N_RANK+r];
            end
          ch_mask[c]  <= m;
          ch_sum[c]   <= s;
          ch_unsup[c] <= u;
          if (&m) begin
            ch_busy[c] <= 1'b0;
            ch_full[c] <= 1'b1;
          end
        end
        if (res_valid && res_ready && grant == CHW'(c)) ch_full[c] <= 1'b0;
      end
    end
  end

  // round-robin result arbiter
  always_comb begin
    grant   = rr_ptr;
    grant_v = 1'b0;
    for (int i = N_CH - 1; i >= 0; i--) begin
      logic [CHW-1:0] c;
      c = CHW'((32'(rr_ptr) + i) % N_CH);
      if (ch_full[c]) begin
        grant   = c;
        grant_v = 1'b1;
      end
    end
  end

  assign res_valid = grant_v;
  assign res_id    = ch_id[grant];
  assign res_dist  = ch_sum[grant];
  assign res_unsup = ch_unsup[grant];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr_ptr <= '0;
    else if (res_valid && res_ready) rr_ptr <= CHW'((32'(grant) + 1) % N_CH);
  end

endmodule
