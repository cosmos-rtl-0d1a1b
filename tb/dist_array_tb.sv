// dist_array_tb: self-checking test of the rank-parallel distance engine.
//
// Default geometry (4 channels x 2 ranks), one memory model per rank with
// random backpressure. A random query is broadcast, then 300 distance jobs
// with random node ids are issued as fast as job_ready allows while the
// result side is randomly back-pressured. Every result must carry an id
// that was issued and the full distance (both ranks' partials summed)
// computed here with tb_pkg::ref_dist. Also required: at least one stall
// (job to a busy channel), several channels computing at once, and every
// job answered exactly once.
module dist_array_tb;
  import cosmos_pkg::*;
  import tb_pkg::*;

  localparam int NCH = 4, NRK = 2, NSEG = 6;
  localparam longint EMB = 64'h1000, STRIDE = 256;

  logic clk = 0, rst_n = 0;
  logic qload_valid; logic [7:0] qload_idx; seg_t qload_seg;
  logic job_valid, job_ready; node_id_t job_id; addr_t job_addr;
  logic res_valid, res_ready, res_unsup; node_id_t res_id; dist_t res_dist;
  logic  rq_v [NCH*NRK]; logic rq_r [NCH*NRK]; addr_t rq_a [NCH*NRK];
  logic  rs_v [NCH*NRK]; seg_t rs_d [NCH*NRK];
  int checks = 0, failures = 0, stalls = 0, max_busy = 0, got = 0;
  int pending[int];
  logic [7:0] q[];

  always #5 clk = ~clk;

  dist_array #(.N_CH(NCH), .N_RANK(NRK), .MAX_SEG(16)) dut (
    .clk, .rst_n, .metric(METRIC_L2), .elem(ELEM_UINT8), .nseg(8'(NSEG)),
    .qload_valid, .qload_idx, .qload_seg, .job_valid, .job_ready, .job_id, .job_addr,
    .res_valid, .res_ready, .res_id, .res_dist, .res_unsup,
    .rank_req_valid(rq_v), .rank_req_ready(rq_r), .rank_req_addr(rq_a),
    .rank_rsp_valid(rs_v), .rank_rsp_data(rs_d));

  for (genvar i = 0; i < NCH*NRK; i++) begin : g_mem
    mem_port_model #(.KIND(0), .RANK(i % NRK), .LAT(3 + i), .STALL_PCT(20)) u_mem (
      .clk, .req_valid(rq_v[i]), .req_ready(rq_r[i]), .req_addr(rq_a[i]),
      .rsp_valid(rs_v[i]), .rsp_data(rs_d[i]));
  end

  always @(posedge clk) if (rst_n) begin
    int b;
    b = 0;
    for (int c = 0; c < NCH; c++) b += int'(dut.ch_busy[c]);
    if (b > max_busy) max_busy = b;
    if (job_valid && !job_ready) stalls++;
    if (res_valid && res_ready) begin
      int id;
      id = int'(res_id);
      checks++;
      got++;
      if (!pending.exists(id)) begin
        failures++;
        $display("FAIL unexpected id %0d", id);
      end else begin
        if (res_dist != pending[id] || res_unsup) begin
          failures++;
          $display("FAIL id %0d got %0d exp %0d", id, res_dist, pending[id]);
        end
        pending.delete(id);
      end
    end
    res_ready <= ($urandom % 4) != 0;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    qload_valid = 0; qload_idx = 0; qload_seg = '0; job_valid = 0; job_id = 0; job_addr = 0;
    q = new[NSEG * 64];
    foreach (q[i]) q[i] = 8'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < NSEG; s++) begin
      @(negedge clk);
      qload_valid = 1; qload_idx = 8'(s);
      for (int b = 0; b < 64; b++) qload_seg[8*b +: 8] = q[s*64+b];
    end
    @(negedge clk);
    qload_valid = 0;
    for (int t = 0; t < 300; t++) begin
      int id;
      do id = int'($urandom % 5000); while (pending.exists(id));
      pending[id] = ref_dist(id, NSEG, NRK, EMB, STRIDE, METRIC_L2, ELEM_UINT8, q);
      job_valid = 1; job_id = node_id_t'(id); job_addr = addr_t'(EMB + longint'(id) * STRIDE);
      #1;
      // job_ready is settled at the falling edge; the next rising edge takes the job
      while (!job_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    job_valid = 0;
    while (pending.size() > 0) @(negedge clk);
    checks++;
    if (got != 300) begin failures++; $display("FAIL got %0d results", got); end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall seen"); end
    checks++;
    if (max_busy < 2) begin failures++; $display("FAIL channels never overlapped"); end
    $display("stalls=%0d max_busy_channels=%0d", stalls, max_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
