// rank_pu: rank-level processing unit (one per DRAM rank).
//
// Vectors are split column-wise over the ranks of a channel: segment s of
// every vector lives in rank (s mod N_RANK), at byte address
// addr_vector + (s div N_RANK) * 64 of that rank. This unit keeps its own
// share of the query (loaded once per search by a broadcast of all query
// segments, of which it keeps those with idx mod N_RANK == RANK_IDX), and for
// each job reads its segments of one vector from its rank, pushes each
// through dist_calc together with the matching query segment and
// accumulates the rank's partial distance. All ranks of a channel work on
// the same vector at the same time, so the channel only carries one partial
// sum per rank instead of the vector itself.
//
// Interface: job_valid/job_ready handshake starts a job (job_addr is the
// vector's addr_vector, job_nseg its total segment count); the rank read
// port is a valid/ready request with in-order responses of 64 bytes; done
// pulses for one cycle with partial. A job whose rank holds no segment of
// the vector finishes with partial = 0 one cycle later.
// Timing: one read request per cycle; done arrives one cycle after the last
// read response. The query-share mapping and the address offset inside a
// rank are this design's choices; per-rank partial distance computation
// follows the architecture.
module rank_pu
  import cosmos_pkg::*;
#(
  parameter int N_RANK   = 2,
  parameter int RANK_IDX = 0,
  parameter int MAX_SEG  = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  input  metric_e    metric,
  input  elem_e      elem,
  // query broadcast
  input  logic       qload_valid,
  input  logic [7:0] qload_idx,
  input  seg_t       qload_seg,
  // job
  input  logic       job_valid,
  output logic       job_ready,
  input  addr_t      job_addr,
  input  logic [7:0] job_nseg,
  // rank read port
  output logic       mem_req_valid,
  input  logic       mem_req_ready,
  output addr_t      mem_req_addr,
  input  logic       mem_rsp_valid,
  input  seg_t       mem_rsp_data,
  // result
  output logic       done,
  output logic       unsup,
  output dist_t      partial
);

  localparam int LSEG = (MAX_SEG + N_RANK - 1) / N_RANK;  // segments kept per rank
  localparam int CW   = $clog2(LSEG + 1);
  localparam int SA   = (LSEG > 1) ? $clog2(LSEG) : 1;  // query store index bits

  seg_t            qstore [LSEG];
  logic            busy;
  addr_t           base;
  logic [CW-1:0]   my_nseg, req_cnt, rsp_cnt, acc_cnt;
  dist_t           acc;
  logic            dc_valid, dc_unsup, unsup_acc;
  dist_t           dc_partial;
  logic [CW-1:0]   nseg_c;

  // number of this rank's segments among job_nseg
  always_comb begin
    if (job_nseg > 8'(RANK_IDX)) nseg_c = CW'((job_nseg - 8'(RANK_IDX) + 8'(N_RANK - 1)) / 8'(N_RANK));
    else                          nseg_c = '0;
  end

  always_ff @(posedge clk) begin
    if (qload_valid && (32'(qload_idx) % N_RANK == RANK_IDX) && (32'(qload_idx) / N_RANK < LSEG))
      qstore[32'(qload_idx) / N_RANK] <= qload_seg;
  end

  assign job_ready     = !busy;
  assign mem_req_valid = busy && (req_cnt < my_nseg);
  assign mem_req_addr  = base + (addr_t'(req_cnt) << 6);

  dist_calc u_dc (
    .clk, .rst_n,
    .in_valid (mem_rsp_valid && busy),
    .metric, .elem,
    .query_seg(qstore[rsp_cnt < CW'(LSEG) ? rsp_cnt[SA-1:0] : '0]),
    .data_seg (mem_rsp_data),
    .out_valid(dc_valid),
    .out_unsup(dc_unsup),
    .partial  (dc_partial)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      base      <= '0;
      my_nseg   <= '0;
      req_cnt   <= '0;
      rsp_cnt   <= '0;
      acc_cnt   <= '0;
      acc       <= '0;
      done      <= 1'b0;
      unsup     <= 1'b0;
      unsup_acc <= 1'b0;
      partial   <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (job_valid) begin
          busy      <= 1'b1;
          base      <= job_addr;
          my_nseg   <= nseg_c;
          req_cnt   <= '0;
          rsp_cnt   <= '0;
          acc_cnt   <= '0;
          acc       <= '0;
          unsup_acc <= 1'b0;
        end
      end else if (my_nseg == '0) begin
        busy    <= 1'b0;
        done    <= 1'b1;
        unsup   <= 1'b0;
        partial <= '0;
      end else begin
        if (mem_req_valid && mem_req_ready) req_cnt <= req_cnt + 1'b1;
        if (mem_rsp_valid) rsp_cnt <= rsp_cnt + 1'b1;
        if (dc_valid) begin
          acc       <= acc + dc_partial;
          acc_cnt   <= acc_cnt + 1'b1;
          unsup_acc <= unsup_acc | dc_unsup;
          if (acc_cnt + 1'b1 == my_nseg) begin
            busy    <= 1'b0;
            done    <= 1'b1;
            unsup   <= unsup_acc | dc_unsup;
            partial <= acc + dc_partial;
          end
        end
      end
    end
  end

endmodule
