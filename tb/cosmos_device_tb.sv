// cosmos_device_tb: end-to-end searches on one CXL device.
//
// The device (default 4 channels x 2 ranks) is connected to a graph-record
// model and one memory model per rank. Acting as the host, the testbench
// writes the layout metadata, a random query and the configuration, starts
// the search, polls STATUS and reads back the top-k. Graph: clusters of 32
// nodes with out-degree up to 20 (two 64-byte beats per record).
//   1. uint8 / L2, 2 segments, L = 40 >= cluster size: the search must
//      expand every node of the cluster, so the top-10 must equal the
//      brute-force top-10 of the cluster (distances compared in order).
//   2. int8 / inner product, 3 segments, same check.
//   3. L = 8 (evictions): results must be sorted, unique, from the cluster
//      and carry their true distances.
//   4. fp32 configuration: STATUS.error must be set.
// It also requires that channel stalls and already-listed neighbours occur.
module cosmos_device_tb;
  import cosmos_pkg::*;
  import tb_pkg::*;

  localparam int NCH = 4, NRK = 2, CS = 32, D = 20;
  localparam longint GB = 64'h10_0000, GS = 320, EMB = 64'h40_0000, VS = 256;

  logic clk = 0, rst_n = 0;
  logic host_we, host_re, host_rvalid;
  logic [HADDR_W-1:0] host_addr;
  logic [HDATA_W-1:0] host_wdata, host_rdata;
  logic gq_v, gq_r, gs_v; addr_t gq_a; seg_t gs_d;
  logic rq_v [NCH*NRK]; logic rq_r [NCH*NRK]; addr_t rq_a [NCH*NRK];
  logic rs_v [NCH*NRK]; seg_t rs_d [NCH*NRK];
  logic [31:0] stat_stall, stat_skip;
  int checks = 0, failures = 0;
  logic [7:0] q[];

  always #5 clk = ~clk;

  cosmos_device dut (.clk, .rst_n, .host_we, .host_re, .host_addr, .host_wdata, .host_rdata,
    .host_rvalid, .gr_req_valid(gq_v), .gr_req_ready(gq_r), .gr_req_addr(gq_a),
    .gr_rsp_valid(gs_v), .gr_rsp_data(gs_d), .rank_req_valid(rq_v), .rank_req_ready(rq_r),
    .rank_req_addr(rq_a), .rank_rsp_valid(rs_v), .rank_rsp_data(rs_d), .stat_stall, .stat_skip);

  mem_port_model #(.KIND(1), .LAT(8), .GBASE(GB), .GSTRIDE(GS), .CS(CS), .D(D)) u_gmem (
    .clk, .req_valid(gq_v), .req_ready(gq_r), .req_addr(gq_a), .rsp_valid(gs_v), .rsp_data(gs_d));
  for (genvar i = 0; i < NCH*NRK; i++) begin : g_mem
    mem_port_model #(.KIND(0), .RANK(i % NRK), .LAT(6), .STALL_PCT(10)) u_mem (
      .clk, .req_valid(rq_v[i]), .req_ready(rq_r[i]), .req_addr(rq_a[i]),
      .rsp_valid(rs_v[i]), .rsp_data(rs_d[i]));
  end

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(logic [HADDR_W-1:0] a, logic [63:0] d);
    @(negedge clk);
    host_we = 1; host_addr = a; host_wdata = d;
    @(negedge clk);
    host_we = 0;
  endtask

  task automatic rd(logic [HADDR_W-1:0] a, output logic [63:0] d);
    @(negedge clk);
    host_re = 1; host_addr = a;
    @(negedge clk);
    host_re = 0;
    d = host_rdata;
  endtask

  // run one search; returns ids and distances of the k results
  task automatic search(int entry, int nseg, int k, int l, metric_e m, elem_e e,
                        output int ids[], output int ds[], output logic [63:0] status);
    logic [63:0] v;
    q = new[nseg * 64];
    foreach (q[i]) q[i] = 8'($urandom);
    wr(REG_GRAPH_BASE, 64'(GB));
    wr(REG_NODE_STRIDE, 64'(GS));
    wr(REG_EMB_BASE, 64'(EMB));
    wr(REG_VEC_STRIDE, 64'(VS));
    wr(REG_ENTRY, 64'(entry));
    wr(REG_CONFIG, {36'd0, 2'(e), 2'(m), 8'(l), 8'(k), 8'(nseg)});
    for (int i = 0; i < nseg * 8; i++) begin
      for (int b = 0; b < 8; b++) v[8*b +: 8] = q[i*8+b];
      wr(REG_QUERY_BASE + 12'(i), v);
    end
    wr(REG_CTRL, 64'd1);
    do rd(REG_STATUS, status); while (!status[1]);
    ids = new[k]; ds = new[k];
    for (int i = 0; i < k; i++) begin
      rd(REG_RESULT_BASE + 12'(i), v);
      ids[i] = int'(v[31:0]);
      ds[i]  = int'(v[63:32]);
    end
  endtask

  task automatic brute(int cl, int nseg, metric_e m, elem_e e, output int bd[$]);
    bd.delete();
    for (int i = 0; i < CS; i++) bd.push_back(ref_dist(cl * CS + i, nseg, NRK, EMB, VS, m, e, q));
    sort_signed(bd);
  endtask

  task automatic check_exact(string name, int cl, int nseg, int k, metric_e m, elem_e e,
                             int ids[], int ds[]);
    int bd[$];
    brute(cl, nseg, m, e, bd);
    for (int i = 0; i < k; i++) begin
      chk($sformatf("%s rank %0d dist %0d exp %0d", name, i, ds[i], bd[i]), ds[i] == bd[i]);
      chk($sformatf("%s id %0d in cluster", name, ids[i]), ids[i] / CS == cl);
      chk($sformatf("%s id %0d dist", name, ids[i]),
          ref_dist(ids[i], nseg, NRK, EMB, VS, m, e, q) == ds[i]);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ids[], ds[];
    logic [63:0] st, stats;
    host_we = 0; host_re = 0; host_addr = 0; host_wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. uint8 L2, full cluster visit
    search(3 * CS + 5, 2, 10, 40, METRIC_L2, ELEM_UINT8, ids, ds, st);
    chk("no error 1", !st[2]);
    check_exact("L2", 3, 2, 10, METRIC_L2, ELEM_UINT8, ids, ds);
    rd(REG_STATS, stats);
    chk($sformatf("expanded %0d nodes", stats[63:32]), stats[63:32] == 32'(CS));
    chk($sformatf("distances %0d", stats[31:0]), stats[31:0] >= 32'(CS));
    // 2. int8 inner product
    search(7 * CS + 30, 3, 10, 40, METRIC_IP, ELEM_INT8, ids, ds, st);
    check_exact("IP", 7, 3, 10, METRIC_IP, ELEM_INT8, ids, ds);
    // 3. short candidate list
    search(11 * CS, 2, 8, 8, METRIC_L2, ELEM_UINT8, ids, ds, st);
    for (int i = 0; i < 8; i++) begin
      chk("short list id dist", ref_dist(ids[i], 2, NRK, EMB, VS, METRIC_L2, ELEM_UINT8, q) == ds[i]);
      chk("short list in cluster", ids[i] / CS == 11);
      if (i > 0) chk("short list sorted", ds[i] >= ds[i-1] && ids[i] != ids[i-1]);
    end
    // 4. fp32 is reported as unsupported
    search(CS, 6, 4, 16, METRIC_L2, ELEM_FP32, ids, ds, st);
    chk("fp32 error", st[2]);
    chk($sformatf("stalls seen (%0d)", stat_stall), stat_stall > 0);
    chk($sformatf("skips seen (%0d)", stat_skip), stat_skip > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
