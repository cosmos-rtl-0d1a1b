// cosmos_device: compute side of one CXL memory device.
//
// Joins the near-memory search unit of the device controller with the
// rank-level PUs that sit at its DRAM ranks:
//   iface_regs  - host-mapped registers, query data buffer, result buffer
//   anns_engine - the search sequencer with candidate list, temporary
//                 buffer and address arithmetic
//   dist_array  - N_CH channels x N_RANK rank PUs computing distances
// A search runs entirely inside the device: the host writes the layout
// metadata, the query and the configuration, sets CTRL.start, polls
// STATUS.done and reads back only the local top-k.
// The CXL link (PHY and CXL IP), the DDR5 memory controllers and the DRAM
// itself are outside this module: the host side is a simple load/store port
// (host_*), the graph records are read through gr_* and each rank's vector
// data through rank_*[ch*N_RANK + rank] (valid/ready requests, in-order
// 64-byte responses). The block split follows the architecture; the ports
// standing in for the memory controllers are this design's choice.
module cosmos_device
  import cosmos_pkg::*;
#(
  parameter int N_CH    = 4,
  parameter int N_RANK  = 2,
  parameter int MAX_SEG = 16,
  parameter int K_MAX   = 16,
  parameter int MAX_DEG = 64,
  parameter int L_MAX   = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  // host load/store port
  input  logic               host_we,
  input  logic               host_re,
  input  logic [HADDR_W-1:0] host_addr,
  input  logic [HDATA_W-1:0] host_wdata,
  output logic [HDATA_W-1:0] host_rdata,
  output logic               host_rvalid,
  // graph read port
  output logic               gr_req_valid,
  input  logic               gr_req_ready,
  output addr_t              gr_req_addr,
  input  logic               gr_rsp_valid,
  input  seg_t               gr_rsp_data,
  // rank read ports
  output logic               rank_req_valid [N_CH*N_RANK],
  input  logic               rank_req_ready [N_CH*N_RANK],
  output addr_t              rank_req_addr  [N_CH*N_RANK],
  input  logic               rank_rsp_valid [N_CH*N_RANK],
  input  seg_t               rank_rsp_data  [N_CH*N_RANK],
  // event counts for observation
  output logic [31:0]        stat_stall,
  output logic [31:0]        stat_skip
);

  search_cfg_t cfg;
  logic        start, busy, done, error;
  logic [31:0] stat_dist, stat_exp;
  logic [7:0]  q_rd_idx;
  seg_t        q_rd_seg;
  logic        res_we;
  logic [7:0]  res_idx;
  node_id_t    res_id;
  dist_t       res_dist;
  logic        qload_valid;
  logic [7:0]  qload_idx;
  seg_t        qload_seg;
  logic        job_valid, job_ready;
  node_id_t    job_id;
  addr_t       job_addr;
  logic        dres_valid, dres_ready, dres_unsup;
  node_id_t    dres_id;
  dist_t       dres_dist;

  iface_regs #(.MAX_SEG(MAX_SEG), .K_MAX(K_MAX)) u_regs (
    .clk, .rst_n,
    .host_we, .host_re, .host_addr, .host_wdata, .host_rdata, .host_rvalid,
    .cfg, .start, .busy, .done, .error, .stat_dist, .stat_exp,
    .q_rd_idx, .q_rd_seg, .res_we, .res_idx, .res_id, .res_dist
  );

  anns_engine #(.MAX_DEG(MAX_DEG), .L_MAX(L_MAX)) u_engine (
    .clk, .rst_n, .cfg, .start, .busy, .done, .error,
    .q_rd_idx, .q_rd_seg, .res_we, .res_idx, .res_id, .res_dist,
    .gr_req_valid, .gr_req_ready, .gr_req_addr, .gr_rsp_valid, .gr_rsp_data,
    .qload_valid, .qload_idx, .qload_seg,
    .job_valid, .job_ready, .job_id, .job_addr,
    .dres_valid, .dres_ready, .dres_id, .dres_dist, .dres_unsup,
    .stat_dist, .stat_exp, .stat_stall, .stat_skip
  );

  dist_array #(.N_CH(N_CH), .N_RANK(N_RANK), .MAX_SEG(MAX_SEG)) u_dist (
    .clk, .rst_n, .metric(cfg.metric), .elem(cfg.elem), .nseg(cfg.num_seg),
    .qload_valid, .qload_idx, .qload_seg,
    .job_valid, .job_ready, .job_id, .job_addr,
    .res_valid(dres_valid), .res_ready(dres_ready), .res_id(dres_id),
    .res_dist(dres_dist), .res_unsup(dres_unsup),
    .rank_req_valid, .rank_req_ready, .rank_req_addr, .rank_rsp_valid, .rank_rsp_data
  );

endmodule
