// cosmos_system: the multi-device near-memory ANN search system (top).
//
// N_DEV CXL memory devices, each a cosmos_device with its own search unit
// and N_CH x N_RANK rank PUs. The host places clusters of the index on the
// devices ahead of time, picks the clusters nearest to a query, starts one
// search per chosen cluster on the device that holds it and merges the
// devices' local top-k lists into the global top-k. Devices search
// independently and in parallel; nothing passes between them.
// The host, the CXL switch, the links, memory controllers and DRAM are
// outside: each device's host port, graph read port and rank read ports are
// ports of this module, indexed by device (rank ports by
// dev*N_CH*N_RANK + ch*N_RANK + rank). Defaults are the evaluated system:
// four devices, four channels per device, two ranks per channel.
module cosmos_system
  import cosmos_pkg::*;
#(
  parameter int N_DEV   = 4,
  parameter int N_CH    = 4,
  parameter int N_RANK  = 2,
  parameter int MAX_SEG = 16,
  parameter int K_MAX   = 16,
  parameter int MAX_DEG = 64,
  parameter int L_MAX   = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               host_we     [N_DEV],
  input  logic               host_re     [N_DEV],
  input  logic [HADDR_W-1:0] host_addr   [N_DEV],
  input  logic [HDATA_W-1:0] host_wdata  [N_DEV],
  output logic [HDATA_W-1:0] host_rdata  [N_DEV],
  output logic               host_rvalid [N_DEV],
  output logic               gr_req_valid [N_DEV],
  input  logic               gr_req_ready [N_DEV],
  output addr_t              gr_req_addr  [N_DEV],
  input  logic               gr_rsp_valid [N_DEV],
  input  seg_t               gr_rsp_data  [N_DEV],
  output logic               rank_req_valid [N_DEV*N_CH*N_RANK],
  input  logic               rank_req_ready [N_DEV*N_CH*N_RANK],
  output addr_t              rank_req_addr  [N_DEV*N_CH*N_RANK],
  input  logic               rank_rsp_valid [N_DEV*N_CH*N_RANK],
  input  seg_t               rank_rsp_data  [N_DEV*N_CH*N_RANK],
  output logic [31:0]        stat_stall [N_DEV],
  output logic [31:0]        stat_skip  [N_DEV]
);

  localparam int NR = N_CH * N_RANK;

  for (genvar d = 0; d < N_DEV; d++) begin : g_dev
    logic  rq_v [NR];
    logic  rq_r [NR];
    addr_t rq_a [NR];
    logic  rs_v [NR];
    seg_t  rs_d [NR];

    for (genvar r = 0; r < NR; r++) begin : g_r
      assign rank_req_valid[d*NR+r] = rq_v[r];
      assign rank_req_addr[d*NR+r]  = rq_a[r];
      assign rq_r[r] = rank_req_ready[d*NR+r];
      assign rs_v[r] = rank_rsp_valid[d*NR+r];
      assign rs_d[r] = rank_rsp_data[d*NR+r];
    end

    cosmos_device #(
      .N_CH(N_CH), .N_RANK(N_RANK), .MAX_SEG(MAX_SEG),
      .K_MAX(K_MAX), .MAX_DEG(MAX_DEG), .L_MAX(L_MAX)
    ) u_dev (
      .clk, .rst_n,
      .host_we(host_we[d]), .host_re(host_re[d]), .host_addr(host_addr[d]),
      .host_wdata(host_wdata[d]), .host_rdata(host_rdata[d]), .host_rvalid(host_rvalid[d]),
      .gr_req_valid(gr_req_valid[d]), .gr_req_ready(gr_req_ready[d]), .gr_req_addr(gr_req_addr[d]),
      .gr_rsp_valid(gr_rsp_valid[d]), .gr_rsp_data(gr_rsp_data[d]),
      .rank_req_valid(rq_v), .rank_req_ready(rq_r), .rank_req_addr(rq_a),
      .rank_rsp_valid(rs_v), .rank_rsp_data(rs_d),
      .stat_stall(stat_stall[d]), .stat_skip(stat_skip[d])
    );
  end

endmodule
