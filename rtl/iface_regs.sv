// iface_regs: memory-mapped host interface of the near-memory search unit.
//
// The host reaches this block through its mapped region with plain 64-bit
// loads and stores (the CXL link and switch in between are not modelled).
// It holds
//   - the metadata registers of the static memory layout (graph base, node
//     stride, embedding base, vector stride), the entry node and the search
//     configuration word (segments per vector, k, cand_list_len, metric,
//     element type),
//   - the control/status register: writing bit0 of CTRL starts a search,
//     STATUS shows busy (bit0), done (bit1, sticky until the next start) and
//     error (bit2, unsupported element type),
//   - the data buffer: the query vector (8 words per 64-byte segment) and the
//     top-k result buffer ({dist[63:32], id[31:0]} per entry),
//   - a statistics word (distances computed, nodes expanded).
// Configuration and query writes are ignored while a search runs. The
// register split into data buffer and status register follows the
// architecture; the address map and field layout are this design's own
// (see cosmos_pkg).
// Timing: a write takes effect at the clock edge; host_rdata is valid with
// host_rvalid one cycle after host_re.
module iface_regs
  import cosmos_pkg::*;
#(
  parameter int MAX_SEG = 16,
  parameter int K_MAX   = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // host side
  input  logic                host_we,
  input  logic                host_re,
  input  logic [HADDR_W-1:0]  host_addr,
  input  logic [HDATA_W-1:0]  host_wdata,
  output logic [HDATA_W-1:0]  host_rdata,
  output logic                host_rvalid,
  // engine side
  output search_cfg_t         cfg,
  output logic                start,
  input  logic                busy,
  input  logic                done,
  input  logic                error,
  input  logic [31:0]         stat_dist,
  input  logic [31:0]         stat_exp,
  input  logic [7:0]          q_rd_idx,
  output seg_t                q_rd_seg,
  input  logic                res_we,
  input  logic [7:0]          res_idx,
  input  node_id_t            res_id,
  input  dist_t               res_dist
);

  localparam int QW = MAX_SEG * 8;   // query words
  localparam int QA = (QW > 1) ? $clog2(QW) : 1;        // query word index bits
  localparam int RA = (K_MAX > 1) ? $clog2(K_MAX) : 1;  // result index bits

  logic [HDATA_W-1:0] qbuf [QW];
  logic [HDATA_W-1:0] rbuf [K_MAX];
  logic               done_q, err_q;
  logic [HADDR_W-1:0] qoff, roff;

  assign qoff = host_addr - REG_QUERY_BASE;
  assign roff = host_addr - REG_RESULT_BASE;

  always_comb
    for (int w = 0; w < 8; w++)
      q_rd_seg[64*w +: 64] = (32'(q_rd_idx) < MAX_SEG) ? qbuf[32'(q_rd_idx) * 8 + w] : '0;

  assign start = host_we && host_addr == REG_CTRL && host_wdata[0] && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg         <= '0;
      done_q      <= 1'b0;
      err_q       <= 1'b0;
      host_rdata  <= '0;
      host_rvalid <= 1'b0;
      for (int i = 0; i < QW; i++)    qbuf[i] <= '0;
      for (int i = 0; i < K_MAX; i++) rbuf[i] <= '0;
    end else begin
      // host writes
      if (host_we && !busy) begin
        unique case (host_addr)
          REG_GRAPH_BASE:  cfg.graph_base    <= addr_t'(host_wdata);
          REG_NODE_STRIDE: cfg.node_stride   <= addr_t'(host_wdata);
          REG_EMB_BASE:    cfg.emb_base      <= addr_t'(host_wdata);
          REG_VEC_STRIDE:  cfg.vector_stride <= addr_t'(host_wdata);
          REG_ENTRY:       cfg.entry         <= node_id_t'(host_wdata);
          REG_CONFIG: begin
            cfg.num_seg <= host_wdata[7:0];
            cfg.k       <= host_wdata[15:8];
            cfg.l       <= host_wdata[23:16];
            cfg.metric  <= metric_e'(host_wdata[25:24]);
            cfg.elem    <= elem_e'(host_wdata[27:26]);
          end
          default: if (32'(qoff) < QW) qbuf[qoff[QA-1:0]] <= host_wdata;
        endcase
      end
      // status
      if (start) begin
        done_q <= 1'b0;
        err_q  <= 1'b0;
      end else begin
        if (done)  done_q <= 1'b1;
        if (error) err_q  <= 1'b1;
      end
      // engine writes results
      if (res_we && 32'(res_idx) < K_MAX) rbuf[res_idx[RA-1:0]] <= {32'(res_dist), 32'(res_id)};
      // host reads
      host_rvalid <= host_re;
      if (host_re) begin
        unique case (host_addr)
          REG_STATUS:      host_rdata <= 64'({err_q, done_q, busy});
          REG_GRAPH_BASE:  host_rdata <= 64'(cfg.graph_base);
          REG_NODE_STRIDE: host_rdata <= 64'(cfg.node_stride);
          REG_EMB_BASE:    host_rdata <= 64'(cfg.emb_base);
          REG_VEC_STRIDE:  host_rdata <= 64'(cfg.vector_stride);
          REG_ENTRY:       host_rdata <= 64'(cfg.entry);
          REG_CONFIG:      host_rdata <= 64'({cfg.elem, cfg.metric, cfg.l, cfg.k, cfg.num_seg});
          REG_STATS:       host_rdata <= {stat_exp, stat_dist};
          default: begin
            if (32'(qoff) < QW)         host_rdata <= qbuf[qoff[QA-1:0]];
            else if (32'(roff) < K_MAX) host_rdata <= rbuf[roff[RA-1:0]];
            else                        host_rdata <= '0;
          end
        endcase
      end
    end
  end

endmodule
