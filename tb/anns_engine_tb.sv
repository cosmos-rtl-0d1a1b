// anns_engine_tb: self-checking test of the graph search sequencer.
//
// The sequencer is connected to the graph-record model and to a
// behavioural distance service written here: it takes a job when its
// random job_ready is high, holds up to four jobs, and answers each after a
// random delay, out of order, with the distance tb_pkg::ref_dist computes
// from the query segments the sequencer broadcast. The testbench serves the
// query buffer and captures the result-buffer writes. For several queries
// and entry nodes it checks: the query broadcast (every segment, in order,
// before the first distance job), no job for a node already in the list
// (each node's distance is requested once when L >= cluster size), the
// top-k against brute force over the cluster, one done pulse with busy
// high throughout, and the expansion count (every node of the cluster).
module anns_engine_tb;
  import cosmos_pkg::*;
  import tb_pkg::*;

  localparam int CS = 48, D = 24, NRK = 2;
  localparam longint GB = 64'h8000, GS = 448, EMB = 64'h20_0000, VS = 512;

  logic clk = 0, rst_n = 0;
  search_cfg_t cfg;
  logic start, busy, done, error;
  logic [7:0] q_rd_idx; seg_t q_rd_seg;
  logic res_we; logic [7:0] res_idx; node_id_t res_id; dist_t res_dist;
  logic gq_v, gq_r, gs_v; addr_t gq_a; seg_t gs_d;
  logic qload_valid; logic [7:0] qload_idx; seg_t qload_seg;
  logic job_valid, job_ready; node_id_t job_id; addr_t job_addr;
  logic dres_valid, dres_ready, dres_unsup; node_id_t dres_id; dist_t dres_dist;
  logic [31:0] stat_dist, stat_exp, stat_stall, stat_skip;

  int checks = 0, failures = 0;
  logic [7:0] q[];
  logic [7:0] qb[16*64];     // query as broadcast to the PUs
  logic [7:0] qs[16*64];     // static copy served as the query buffer
  int qseen, jobs_before_q, n_done;
  int requested[int];
  int rk_id[16], rk_dist[16];
  int pend_id[$], pend_t[$];
  metric_e cm; elem_e ce; int cnseg;

  always #5 clk = ~clk;

  anns_engine #(.MAX_DEG(64), .L_MAX(64)) dut (.clk, .rst_n, .cfg, .start, .busy, .done, .error,
    .q_rd_idx, .q_rd_seg, .res_we, .res_idx, .res_id, .res_dist,
    .gr_req_valid(gq_v), .gr_req_ready(gq_r), .gr_req_addr(gq_a), .gr_rsp_valid(gs_v), .gr_rsp_data(gs_d),
    .qload_valid, .qload_idx, .qload_seg, .job_valid, .job_ready, .job_id, .job_addr,
    .dres_valid, .dres_ready, .dres_id, .dres_dist, .dres_unsup,
    .stat_dist, .stat_exp, .stat_stall, .stat_skip);

  mem_port_model #(.KIND(1), .LAT(7), .STALL_PCT(20), .GBASE(GB), .GSTRIDE(GS), .CS(CS), .D(D)) u_gmem (
    .clk, .req_valid(gq_v), .req_ready(gq_r), .req_addr(gq_a), .rsp_valid(gs_v), .rsp_data(gs_d));

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // query buffer
  always_comb
    for (int b = 0; b < 64; b++)
      q_rd_seg[8*b +: 8] = (q_rd_idx < 8'd16) ? qs[int'(q_rd_idx[3:0]) * 64 + b] : 8'h00;

  // behavioural distance service and observers
  always @(posedge clk) begin
    if (qload_valid) begin
      checks++;
      if (int'(qload_idx) != qseen) begin failures++; $display("FAIL query segment order"); end
      for (int b = 0; b < 64; b++) qb[int'(qload_idx) * 64 + b] = qload_seg[8*b +: 8];
      qseen++;
    end
    if (job_valid && job_ready) begin
      if (qseen < cnseg) jobs_before_q++;
      checks += 2;
      if (requested.exists(int'(job_id))) begin failures++; $display("FAIL job %0d requested twice", job_id); end
      if (longint'(job_addr) != EMB + longint'(job_id) * VS) begin failures++; $display("FAIL job address"); end
      requested[int'(job_id)] = 1;
      pend_id.push_back(int'(job_id));
      pend_t.push_back(2 + int'($urandom % 12));
    end
    foreach (pend_t[i]) if (pend_t[i] > 0) pend_t[i]--;
    if (dres_valid && dres_ready) begin
      int k;
      k = -1;
      foreach (pend_id[i]) if (pend_id[i] == int'(dres_id)) k = i;
      if (k >= 0) begin pend_id.delete(k); pend_t.delete(k); end
    end
    if (res_we && res_idx < 16) begin
      rk_id[res_idx]   = int'(res_id);
      rk_dist[res_idx] = int'(res_dist);
    end
    if (done) n_done++;
    job_ready <= (pend_id.size() < 4) && ($urandom % 4 != 0);
  end

  // distance from the broadcast copy of the query
  function automatic int bcast_dist(int v);
    logic [7:0] tmp[];
    tmp = new[cnseg * 64];
    foreach (tmp[i]) tmp[i] = qb[i];
    return ref_dist(v, cnseg, NRK, EMB, VS, cm, ce, tmp);
  endfunction

  // present one finished job (random pick among those whose delay ran out)
  always @(negedge clk) begin
    int k;
    k = -1;
    foreach (pend_t[i]) if (pend_t[i] == 0 && (k < 0 || ($urandom % 2 == 1))) k = i;
    dres_valid = (k >= 0);
    dres_id    = (k >= 0) ? node_id_t'(pend_id[k]) : '0;
    dres_dist  = (k >= 0) ? dist_t'(bcast_dist(pend_id[k])) : '0;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int entries[4] = '{0, CS + 17, 5 * CS + 47, 9 * CS + 1};
    start = 0; job_ready = 0; dres_valid = 0; dres_unsup = 0; dres_id = 0; dres_dist = 0;
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (entries[t]) begin
      int cl, bd[$], cyc;
      bd.delete();
      cl    = entries[t] / CS;
      cm    = (t % 2 == 0) ? METRIC_L2 : METRIC_IP;
      ce    = (t % 2 == 0) ? ELEM_UINT8 : ELEM_INT8;
      cnseg = 1 + t;
      q  = new[cnseg * 64];
      foreach (q[i]) q[i] = 8'($urandom);
      foreach (qs[i]) qs[i] = (i < q.size()) ? q[i] : 8'h00;
      requested.delete();
      qseen = 0; jobs_before_q = 0; n_done = 0;
      cfg.graph_base = addr_t'(GB); cfg.node_stride = addr_t'(GS);
      cfg.emb_base = addr_t'(EMB); cfg.vector_stride = addr_t'(VS);
      cfg.entry = node_id_t'(entries[t]); cfg.num_seg = 8'(cnseg); cfg.k = 8'd10;
      cfg.l = 8'd64; cfg.metric = cm; cfg.elem = ce;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 0;
      while (!done) begin
        @(negedge clk);
        cyc++;
        if (!done) chk("busy while searching", busy);
      end
      @(negedge clk);
      chk("done once", n_done == 1 && !busy);
      chk("query loaded", qseen == cnseg && jobs_before_q == 0);
      chk($sformatf("expanded %0d", stat_exp), stat_exp == 32'(CS));
      chk($sformatf("distances %0d", stat_dist), stat_dist == 32'(CS));
      chk("skips counted", stat_skip > 0);
      for (int i = 0; i < CS; i++) bd.push_back(ref_dist(cl * CS + i, cnseg, NRK, EMB, VS, cm, ce, q));
      sort_signed(bd);
      for (int i = 0; i < 10; i++) begin
        chk($sformatf("search %0d rank %0d: %0d exp %0d", t, i, rk_dist[i], bd[i]), rk_dist[i] == bd[i]);
        chk("result id", rk_id[i] / CS == cl &&
            ref_dist(rk_id[i], cnseg, NRK, EMB, VS, cm, ce, q) == rk_dist[i]);
      end
      $display("search %0d: %0d cycles, stalls %0d, skips %0d", t, cyc, stat_stall, stat_skip);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
