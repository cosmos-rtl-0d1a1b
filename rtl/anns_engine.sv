// anns_engine: sequencer for graph-based ANN search inside a CXL device.
//
// Runs the search procedure of the device controller for one query:
//   1. load the query from the data buffer and broadcast it, segment by
//      segment, to the rank-level PUs (qload_*);
//   then, starting from the entry node (whose distance is computed first),
//   repeat
//   2. take the nearest unvisited node of the candidate list, mark it
//      visited and read its graph record from DRAM into the temporary
//      buffer;
//   3. for every neighbour not already in the candidate list, issue a
//      distance job to the rank-parallel distance engine (up to one per
//      channel in flight; the sequencer stalls while the target channel is
//      busy);
//   4. insert every returned distance into the candidate list;
//   until no unvisited node is left (the list has converged), and
//   5. write the first k entries to the result buffer (missing entries read
//      id 0xFFFFFFFF, distance 0x7FFFFFFF) and pulse done.
// The procedure is the architecture's; in the original it is software on a
// programmable core, here it is a fixed state machine. The graph record
// format is this design's choice: 32-bit words, word 0 the degree, words
// 1..degree the neighbour ids, read as 64-byte beats from
// addr_node = graph_base + node * node_stride; degrees above MAX_DEG are
// cut to MAX_DEG. The candidate list (cand_list), temporary buffer
// (temp_buffer) and address arithmetic (addr_gen) are instantiated here.
//
// Interfaces: cfg/start/busy/done/error towards the interface registers;
// q_rd_* and res_* into the data buffer; gr_* is the graph read port
// (valid/ready request, in-order 64-byte responses, one outstanding);
// job_*/res_* talk to dist_array. Timing: two cycles per neighbour examined
// plus memory and distance latency; stat_* count distance jobs, expanded
// nodes, stall cycles and neighbours skipped as already listed.
// qload_seg is q_rd_seg passed straight through: the data buffer read is
// already registered, so the engine only supplies the index and the valid.
module anns_engine
  import cosmos_pkg::*;
#(
  parameter int MAX_DEG = 64,
  parameter int L_MAX   = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  search_cfg_t cfg,
  input  logic        start,
  output logic        busy,
  output logic        done,
  output logic        error,
  // data buffer
  output logic [7:0]  q_rd_idx,
  input  seg_t        q_rd_seg,
  output logic        res_we,
  output logic [7:0]  res_idx,
  output node_id_t    res_id,
  output dist_t       res_dist,
  // graph read port
  output logic        gr_req_valid,
  input  logic        gr_req_ready,
  output addr_t       gr_req_addr,
  input  logic        gr_rsp_valid,
  input  seg_t        gr_rsp_data,
  // distance engine
  output logic        qload_valid,
  output logic [7:0]  qload_idx,
  output seg_t        qload_seg,
  output logic        job_valid,
  input  logic        job_ready,
  output node_id_t    job_id,
  output addr_t       job_addr,
  input  logic        dres_valid,
  output logic        dres_ready,
  input  node_id_t    dres_id,
  input  dist_t       dres_dist,
  input  logic        dres_unsup,
  // statistics
  output logic [31:0] stat_dist,
  output logic [31:0] stat_exp,
  output logic [31:0] stat_stall,
  output logic [31:0] stat_skip
);

  localparam int WPB    = SEG_BYTES / 4;                  // 32-bit words per beat
  localparam int NBEAT  = (MAX_DEG + 1 + WPB - 1) / WPB;  // beats per record
  localparam int BW     = (NBEAT > 1) ? $clog2(NBEAT) : 1;
  localparam int DW     = $clog2(MAX_DEG + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_QLOAD, S_ENTRY, S_WAIT, S_SEL, S_GREQ, S_GRSP, S_DRD, S_DCHK, S_RES, S_DONE
  } state_e;

  state_e         state;
  node_id_t       cur;
  logic [7:0]     qidx, ridx;
  logic [BW-1:0]  beat;
  logic [BW:0]    nbeat;
  logic [DW-1:0]  deg, ni;
  logic [15:0]    outstanding;

  // candidate list
  logic       cl_clear, cl_pop, cl_ins, cl_next_valid, cl_look_hit;
  node_id_t   cl_next_id, cl_rd_id, cl_look_id;
  dist_t      cl_rd_dist;
  logic [7:0] cl_count;
  logic       cl_dup, cl_drop, cl_evict;

  // temporary buffer (neighbour list of the current node, one beat per entry)
  logic          tb_we;
  logic [BW-1:0] tb_raddr;
  seg_t          tb_rdata;
  logic [DW:0]   word_idx;
  node_id_t      nid;

  // address arithmetic
  addr_t node_addr, vec_addr;
  node_id_t vec_idx;

  addr_gen u_addr (
    .graph_base(cfg.graph_base), .node_stride(cfg.node_stride),
    .emb_base(cfg.emb_base), .vector_stride(cfg.vector_stride),
    .node_idx(cur), .vec_idx(vec_idx),
    .node_addr, .vec_addr
  );

  cand_list #(.L_MAX(L_MAX)) u_cl (
    .clk, .rst_n,
    .clear(cl_clear), .cfg_l(cfg.l),
    .ins_valid(cl_ins), .ins_id(dres_id), .ins_dist(dres_dist),
    .pop(cl_pop), .next_valid(cl_next_valid), .next_id(cl_next_id),
    .look_id(cl_look_id), .look_hit(cl_look_hit),
    .rd_idx(ridx), .rd_id(cl_rd_id), .rd_dist(cl_rd_dist),
    .count(cl_count), .ins_dup(cl_dup), .ins_drop(cl_drop), .ins_evict(cl_evict)
  );

  temp_buffer #(.DEPTH(NBEAT), .WIDTH(SEG_W), .AW(BW)) u_tb (
    .clk, .we(tb_we), .waddr(beat), .wdata(gr_rsp_data),
    .raddr(tb_raddr), .rdata(tb_rdata)
  );

  // neighbour ni is word ni+1 of the record
  assign word_idx   = (DW+1)'(ni) + 1'b1;
  assign tb_raddr   = BW'(word_idx / WPB);
  assign nid        = tb_rdata[32 * (32'(word_idx) % WPB) +: 32];
  assign cl_look_id = nid;

  assign busy        = (state != S_IDLE);
  assign q_rd_idx    = qidx;
  assign qload_valid = (state == S_QLOAD) && (qidx < cfg.num_seg);
  assign qload_idx   = qidx;
  assign qload_seg   = q_rd_seg;

  assign gr_req_valid = (state == S_GREQ);
  assign gr_req_addr  = node_addr + (addr_t'(beat) << 6);
  assign tb_we        = (state == S_GRSP) && gr_rsp_valid;

  assign vec_idx   = (state == S_ENTRY) ? cfg.entry : nid;
  assign job_id    = vec_idx;
  assign job_addr  = vec_addr;
  assign job_valid = (state == S_ENTRY) || (state == S_DCHK && !cl_look_hit);

  assign dres_ready = (state != S_SEL) && (state != S_IDLE);
  assign cl_ins     = dres_valid && dres_ready;
  assign cl_clear   = start && (state == S_IDLE);
  assign cl_pop     = (state == S_SEL) && cl_next_valid;

  assign res_we   = (state == S_RES);
  assign res_idx  = ridx;
  assign res_id   = (ridx < cl_count) ? cl_rd_id   : '1;
  assign res_dist = (ridx < cl_count) ? cl_rd_dist : dist_t'({1'b0, {(DIST_W-1){1'b1}}});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cur         <= '0;
      qidx        <= '0;
      ridx        <= '0;
      beat        <= '0;
      nbeat       <= '0;
      deg         <= '0;
      ni          <= '0;
      outstanding <= '0;
      done        <= 1'b0;
      error       <= 1'b0;
      stat_dist   <= '0;
      stat_exp    <= '0;
      stat_stall  <= '0;
      stat_skip   <= '0;
    end else begin
      done  <= 1'b0;
      error <= 1'b0;
      if (cl_ins && dres_unsup) error <= 1'b1;
      if (job_valid && job_ready) stat_dist <= stat_dist + 1'b1;
      if (job_valid && !job_ready) stat_stall <= stat_stall + 1'b1;
      // outstanding distance jobs
      outstanding <= outstanding + 16'(job_valid && job_ready) - 16'(cl_ins);

      unique case (state)
        S_IDLE: if (start) begin
          state      <= S_QLOAD;
          qidx       <= '0;
          stat_dist  <= '0;
          stat_exp   <= '0;
          stat_stall <= '0;
          stat_skip  <= '0;
        end
        // 1. load the query into the rank PUs
        S_QLOAD: begin
          if (qidx + 1'b1 >= cfg.num_seg) state <= S_ENTRY;
          qidx <= qidx + 1'b1;
        end
        S_ENTRY: if (job_ready) state <= S_WAIT;
        // wait for all distances of this round
        S_WAIT: if (outstanding == 16'(cl_ins)) state <= S_SEL;
        S_SEL: begin
          if (cl_next_valid) begin
            cur      <= cl_next_id;
            beat     <= '0;
            stat_exp <= stat_exp + 1'b1;
            state    <= S_GREQ;
          end else begin
            ridx  <= '0;
            state <= S_RES;
          end
        end
        // 2. retrieve the neighbours from the graph
        S_GREQ: if (gr_req_ready) state <= S_GRSP;
        S_GRSP: if (gr_rsp_valid) begin
          logic [BW:0]   nb;
          logic [DW-1:0] d;
          if (beat == '0) begin
            d  = (gr_rsp_data[31:0] > 32'(MAX_DEG)) ? DW'(MAX_DEG) : DW'(gr_rsp_data[31:0]);
            nb = (BW+1)'((32'(d) + WPB) / WPB);
            deg   <= d;
            nbeat <= nb;
          end else begin
            d  = deg;
            nb = nbeat;
          end
          if ((BW+1)'(beat) + 1'b1 >= nb) begin
            ni    <= '0;
            state <= (d == '0) ? S_WAIT : S_DRD;
          end else begin
            beat  <= beat + 1'b1;
            state <= S_GREQ;
          end
        end
        // 3. issue distance jobs for the new neighbours
        S_DRD: state <= S_DCHK;
        S_DCHK: begin
          if (cl_look_hit || job_ready) begin
            if (cl_look_hit) stat_skip <= stat_skip + 1'b1;
            ni    <= ni + 1'b1;
            state <= (ni + 1'b1 >= deg) ? S_WAIT : S_DRD;
          end
        end
        // 5. write top-k
        S_RES: begin
          ridx <= ridx + 1'b1;
          if (ridx + 1'b1 >= cfg.k) state <= S_DONE;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
