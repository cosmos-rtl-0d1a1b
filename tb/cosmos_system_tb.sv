// cosmos_system_tb: end-to-end test of the four-device system at its
// default size (4 devices x 4 channels x 2 ranks, L_MAX 64, max degree 64).
//
// The testbench plays the host. It
//   - places 16 clusters of 32 nodes on the devices with the
//     adjacency-aware placement (clusters sorted by size, each put on the
//     device with room whose already-placed clusters are least adjacent,
//     weighting the i-th nearest neighbour cluster by num_devices - i, ties
//     to the device with most room left) and, for comparison, round-robin
//     over the same size order, which ignores adjacency;
//     clusters lie on a ring, so cluster c's proximity list is c+1, c-1,
//     c+2, c-2, ...;
//   - for each query picks num_probes = 4 clusters (a random cluster and
//     its three nearest), writes the same query to every device holding one,
//     runs the devices in parallel (a device holding two probed clusters
//     searches them one after the other) and merges the local top-10 lists
//     into the global top-10;
//   - checks the global top-10 against brute force over the probed clusters
//     (L = 40 >= cluster size, so every local search is exhaustive), for
//     uint8/L2 and int8/inner-product queries;
//   - runs one search with L = 16 to exercise evictions and checks its
//     results for consistency.
// It counts, and requires at least once: devices searching in parallel, a
// device running two probes back to back, a channel stall, a neighbour
// skipped as already listed, a candidate-list eviction and a multi-beat
// graph record. The per-device query load of both placements is printed,
// and so is the number of serial search steps (most probes on one device)
// summed over one query aimed at every cluster; the adjacency-aware
// placement must need no more steps than round-robin.
module cosmos_system_tb;
  import cosmos_pkg::*;
  import tb_pkg::*;

  localparam int NDEV = 4, NCH = 4, NRK = 2, NR = NDEV * NCH * NRK;
  localparam int CS = 32, D = 20, NCL = 16, NPROBE = 4, K = 10, NQ = 8;
  localparam longint GB = 64'h20_0000, GS = 320, EMB = 64'h100_0000, VS = 256;

  logic clk = 0, rst_n = 0;
  logic host_we [NDEV]; logic host_re [NDEV]; logic [HADDR_W-1:0] host_addr [NDEV];
  logic [HDATA_W-1:0] host_wdata [NDEV]; logic [HDATA_W-1:0] host_rdata [NDEV];
  logic host_rvalid [NDEV];
  logic gq_v [NDEV]; logic gq_r [NDEV]; addr_t gq_a [NDEV]; logic gs_v [NDEV]; seg_t gs_d [NDEV];
  logic rq_v [NR]; logic rq_r [NR]; addr_t rq_a [NR]; logic rs_v [NR]; seg_t rs_d [NR];
  logic [31:0] stat_stall [NDEV]; logic [31:0] stat_skip [NDEV];

  int checks = 0, failures = 0;
  int n_parallel = 0, n_backtoback = 0, n_evict = 0, n_multibeat = 0;
  int place_adj[NCL], place_rr[NCL];
  logic [7:0] q[];

  always #5 clk = ~clk;

  cosmos_system dut (.clk, .rst_n, .host_we, .host_re, .host_addr, .host_wdata, .host_rdata,
    .host_rvalid, .gr_req_valid(gq_v), .gr_req_ready(gq_r), .gr_req_addr(gq_a),
    .gr_rsp_valid(gs_v), .gr_rsp_data(gs_d), .rank_req_valid(rq_v), .rank_req_ready(rq_r),
    .rank_req_addr(rq_a), .rank_rsp_valid(rs_v), .rank_rsp_data(rs_d), .stat_stall, .stat_skip);

  for (genvar d = 0; d < NDEV; d++) begin : g_dmem
    mem_port_model #(.KIND(1), .LAT(10), .GBASE(GB), .GSTRIDE(GS), .CS(CS), .D(D)) u_gmem (
      .clk, .req_valid(gq_v[d]), .req_ready(gq_r[d]), .req_addr(gq_a[d]),
      .rsp_valid(gs_v[d]), .rsp_data(gs_d[d]));
  end
  for (genvar i = 0; i < NR; i++) begin : g_rmem
    mem_port_model #(.KIND(0), .RANK(i % NRK), .LAT(8), .STALL_PCT(10)) u_mem (
      .clk, .req_valid(rq_v[i]), .req_ready(rq_r[i]), .req_addr(rq_a[i]),
      .rsp_valid(rs_v[i]), .rsp_data(rs_d[i]));
  end

  // mechanism observation
  always @(posedge clk) if (rst_n) begin
    int b;
    b = int'(dut.g_dev[0].u_dev.u_engine.busy) + int'(dut.g_dev[1].u_dev.u_engine.busy)
      + int'(dut.g_dev[2].u_dev.u_engine.busy) + int'(dut.g_dev[3].u_dev.u_engine.busy);
    if (b >= 2) n_parallel++;
    if (dut.g_dev[0].u_dev.u_engine.u_cl.ins_evict) n_evict++;
    for (int d = 0; d < NDEV; d++)
      if (gq_v[d] && gq_r[d] && (longint'(gq_a[d]) - GB) % GS != 0) n_multibeat++;
  end

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(int d, logic [HADDR_W-1:0] a, logic [63:0] v);
    @(negedge clk);
    host_we[d] = 1; host_addr[d] = a; host_wdata[d] = v;
    @(negedge clk);
    host_we[d] = 0;
  endtask

  task automatic rd(int d, logic [HADDR_W-1:0] a, output logic [63:0] v);
    @(negedge clk);
    host_re[d] = 1; host_addr[d] = a;
    @(negedge clk);
    host_re[d] = 0;
    v = host_rdata[d];
  endtask

  // one local search of cluster cl on device d; appends k results
  int n_finished;
  int res_id [NDEV][$];
  int res_dist[NDEV][$];

  task automatic dev_search(int d, int cl, int nseg, int l, metric_e m, elem_e e);
    logic [63:0] v;
    wr(d, REG_GRAPH_BASE, 64'(GB));
    wr(d, REG_NODE_STRIDE, 64'(GS));
    wr(d, REG_EMB_BASE, 64'(EMB));
    wr(d, REG_VEC_STRIDE, 64'(VS));
    wr(d, REG_ENTRY, 64'(cl * CS + (cl * 5) % CS));
    wr(d, REG_CONFIG, {36'd0, 2'(e), 2'(m), 8'(l), 8'(K), 8'(nseg)});
    for (int i = 0; i < nseg * 8; i++) begin
      for (int b = 0; b < 8; b++) v[8*b +: 8] = q[i*8+b];
      wr(d, REG_QUERY_BASE + 12'(i), v);
    end
    wr(d, REG_CTRL, 64'd1);
    do rd(d, REG_STATUS, v); while (!v[1]);
    for (int i = 0; i < K; i++) begin
      rd(d, REG_RESULT_BASE + 12'(i), v);
      res_id[d].push_back(int'(v[31:0]));
      res_dist[d].push_back(int'(v[63:32]));
    end
  endtask

  function automatic int clsize(int c);
    return 20 + (c * 7) % 13;
  endfunction

  function automatic int adj(int c, int j);   // j-th nearest cluster on the ring
    int step;
    step = j / 2 + 1;
    return (j % 2 == 0) ? (c + step) % NCL : (c + NCL - step) % NCL;
  endfunction

  // adjacency-aware placement, written after the placement algorithm
  task automatic place_clusters();
    int order[$], remain[NDEV], total;
    bit on_dev[NDEV][NCL];
    total = 0;
    for (int c = 0; c < NCL; c++) total += clsize(c);
    for (int d = 0; d < NDEV; d++) remain[d] = (total * 13) / (10 * NDEV);
    for (int c = 0; c < NCL; c++) begin
      int p;
      p = 0;
      while (p < order.size() && clsize(order[p]) >= clsize(c)) p++;
      order.insert(p, c);
    end
    foreach (order[oi]) begin
      int c, best_d, max_cap, min_loss;
      c = order[oi];
      best_d = -1; max_cap = 0; min_loss = 32'h7fffffff;
      for (int d = 0; d < NDEV; d++) begin
        if (remain[d] >= clsize(c)) begin
          int loss, prox;
          loss = 0; prox = NDEV;
          for (int j = 0; j < NCL - 1; j++) begin
            if (on_dev[d][adj(c, j)]) loss += prox;
            prox--;
          end
          if (best_d == -1 || loss < min_loss || (loss == min_loss && remain[d] > max_cap)) begin
            best_d = d; min_loss = loss; max_cap = remain[d];
          end
        end
      end
      remain[best_d] -= clsize(c);
      on_dev[best_d][c] = 1;
      place_adj[c] = best_d;
    end
    // round-robin baseline: the same size order, devices taken in turn
    foreach (order[oi]) place_rr[order[oi]] = oi % NDEV;
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int load_adj[NDEV], load_rr[NDEV];
    for (int d = 0; d < NDEV; d++) begin
      host_we[d] = 0; host_re[d] = 0; host_addr[d] = 0; host_wdata[d] = 0;
      load_adj[d] = 0; load_rr[d] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    place_clusters();
    for (int c = 0; c < NCL; c++) begin
      chk($sformatf("cluster %0d placed", c), place_adj[c] >= 0 && place_adj[c] < NDEV);
      chk($sformatf("cluster %0d apart from its nearest", c), place_adj[c] != place_adj[adj(c, 0)]);
    end
    for (int qi = 0; qi < NQ; qi++) begin
      int c0, nseg, probes[NPROBE], gid[$], gd[$], bd[$];
      metric_e m;
      elem_e   e;
      int per_dev[NDEV][$];
      gid.delete(); gd.delete(); bd.delete();
      for (int d = 0; d < NDEV; d++) per_dev[d].delete();
      c0   = int'($urandom % NCL);
      m    = (qi % 2 == 0) ? METRIC_L2 : METRIC_IP;
      e    = (qi % 2 == 0) ? ELEM_UINT8 : ELEM_INT8;
      nseg = (qi % 2 == 0) ? 2 : 2;   // 128-byte (SIFT-like) and 100-byte int8 vectors
      q = new[nseg * 64];
      foreach (q[i]) q[i] = 8'($urandom);
      probes[0] = c0;
      for (int j = 1; j < NPROBE; j++) probes[j] = adj(c0, j - 1);
      foreach (probes[j]) begin
        per_dev[place_adj[probes[j]]].push_back(probes[j]);
        load_adj[place_adj[probes[j]]]++;
        load_rr[place_rr[probes[j]]]++;
      end
      for (int d = 0; d < NDEV; d++) if (per_dev[d].size() > 1) n_backtoback++;
      // each device searches its probed clusters; devices run in parallel
      begin
        n_finished = 0;
        for (int d = 0; d < NDEV; d++) begin
          res_id[d].delete();
          res_dist[d].delete();
        end
        for (int d = 0; d < NDEV; d++) begin
          automatic int dd = d;
          fork
            begin
              foreach (per_dev[dd][j]) dev_search(dd, per_dev[dd][j], nseg, 40, m, e);
              n_finished++;
            end
          join_none
        end
        wait (n_finished == NDEV);
        // host merge of the local top-k lists
        for (int d = 0; d < NDEV; d++) foreach (res_dist[d][i]) begin
          gd.push_back(res_dist[d][i]);
          gid.push_back(res_id[d][i]);
          chk("local result distance", ref_dist(res_id[d][i], nseg, NRK, EMB, VS, m, e, q) == res_dist[d][i]);
        end
      end
      sort_signed(gd);
      foreach (probes[j]) for (int i = 0; i < CS; i++)
        bd.push_back(ref_dist(probes[j] * CS + i, nseg, NRK, EMB, VS, m, e, q));
      sort_signed(bd);
      for (int i = 0; i < K; i++)
        chk($sformatf("query %0d global rank %0d: %0d exp %0d", qi, i, gd[i], bd[i]), gd[i] == bd[i]);
    end
    // a short candidate list on device 0
    begin
      q = new[2 * 64];
      foreach (q[i]) q[i] = 8'($urandom);
      res_id[0].delete();
      res_dist[0].delete();
      dev_search(0, 5, 2, 16, METRIC_L2, ELEM_UINT8);
      foreach (res_id[0][i]) begin
        chk("short list distance", ref_dist(res_id[0][i], 2, NRK, EMB, VS, METRIC_L2, ELEM_UINT8, q) == res_dist[0][i]);
        if (i > 0) chk("short list order", res_dist[0][i] >= res_dist[0][i-1]);
      end
    end
    begin
      int st, sk, mx_a, mx_r, tot;
      st = 0; sk = 0; mx_a = 0; mx_r = 0; tot = 0;
      for (int d = 0; d < NDEV; d++) begin
        st += int'(stat_stall[d]); sk += int'(stat_skip[d]);
        if (load_adj[d] > mx_a) mx_a = load_adj[d];
        if (load_rr[d] > mx_r) mx_r = load_rr[d];
        tot += load_adj[d];
        $display("device %0d: probes adjacency-aware %0d, round-robin %0d", d, load_adj[d], load_rr[d]);
      end
      $display("load imbalance (max/ideal x100): adjacency-aware %0d, round-robin %0d",
               mx_a * 100 * NDEV / tot, mx_r * 100 * NDEV / tot);
      // serial search steps per query (largest number of probes on one
      // device), summed over a query aimed at every cluster, for 4, 8 and
      // 16 probes per query
      for (int np = 4; np <= 16; np *= 2) begin
        int steps_a, steps_r;
        steps_a = 0; steps_r = 0;
        for (int c = 0; c < NCL; c++) begin
          int na[NDEV], nr[NDEV], ma, mr;
          ma = 0; mr = 0;
          for (int d = 0; d < NDEV; d++) begin na[d] = 0; nr[d] = 0; end
          for (int j = 0; j < np; j++) begin
            int pc;
            pc = (j == 0) ? c : adj(c, j - 1);
            na[place_adj[pc]]++; nr[place_rr[pc]]++;
          end
          for (int d = 0; d < NDEV; d++) begin
            if (na[d] > ma) ma = na[d];
            if (nr[d] > mr) mr = nr[d];
          end
          steps_a += ma; steps_r += mr;
        end
        $display("serial steps for %0d queries of %0d probes: adjacency-aware %0d, round-robin %0d (ideal %0d)",
                 NCL, np, steps_a, steps_r, NCL * ((np + NDEV - 1) / NDEV));
        if (np == NPROBE)
          chk("adjacency-aware placement needs no more serial steps than round-robin", steps_a <= steps_r);
      end
      $display("mechanisms: parallel=%0d back_to_back=%0d stall=%0d skip=%0d evict=%0d multibeat=%0d",
               n_parallel, n_backtoback, st, sk, n_evict, n_multibeat);
      chk("devices ran in parallel", n_parallel > 0);
      chk("device ran probes back to back", n_backtoback > 0);
      chk("channel stall", st > 0);
      chk("listed neighbour skipped", sk > 0);
      chk("candidate eviction", n_evict > 0);
      chk("multi-beat graph record", n_multibeat > 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
