// rank_pu_tb: self-checking test of one rank-level processing unit.
//
// The unit under test is rank 1 of a 2-rank channel. A random query of up to
// 16 segments is broadcast; the unit must keep only the odd segments. Each
// job names a vector address and a segment count; the rank's memory model
// (random backpressure, 5-cycle latency) returns hashed data, and the
// partial distance is compared with a sum over the odd segments computed
// here. Also checked: the read addresses (addr + j*64), a job with no
// segment for this rank (nseg = 1 finishes with 0), job_ready while busy,
// and the cycle count of a job against the memory latency.
module rank_pu_tb;
  import cosmos_pkg::*;
  import tb_pkg::*;

  localparam int NR = 2, RI = 1, LAT = 5;

  logic clk = 0, rst_n = 0;
  metric_e metric; elem_e elem;
  logic qload_valid; logic [7:0] qload_idx; seg_t qload_seg;
  logic job_valid, job_ready; addr_t job_addr; logic [7:0] job_nseg;
  logic mreq_v, mreq_r, mrsp_v; addr_t mreq_a; seg_t mrsp_d;
  logic done, unsup; dist_t partial;
  int checks = 0, failures = 0;
  logic [7:0] q[];
  addr_t exp_addr[$];

  always #5 clk = ~clk;

  rank_pu #(.N_RANK(NR), .RANK_IDX(RI), .MAX_SEG(16)) dut (
    .clk, .rst_n, .metric, .elem, .qload_valid, .qload_idx, .qload_seg,
    .job_valid, .job_ready, .job_addr, .job_nseg,
    .mem_req_valid(mreq_v), .mem_req_ready(mreq_r), .mem_req_addr(mreq_a),
    .mem_rsp_valid(mrsp_v), .mem_rsp_data(mrsp_d),
    .done, .unsup, .partial);

  mem_port_model #(.KIND(0), .RANK(RI), .LAT(LAT), .STALL_PCT(30)) u_mem (
    .clk, .req_valid(mreq_v), .req_ready(mreq_r), .req_addr(mreq_a),
    .rsp_valid(mrsp_v), .rsp_data(mrsp_d));

  // address check
  always @(posedge clk) if (mreq_v && mreq_r) begin
    checks++;
    if (exp_addr.size() == 0 || exp_addr[0] != mreq_a) begin
      failures++;
      $display("FAIL address %h", mreq_a);
    end
    if (exp_addr.size() > 0) void'(exp_addr.pop_front());
  end

  // expected partial over this rank's segments only
  function automatic int exp_part(addr_t a, int nseg, metric_e m, elem_e e);
    int acc = 0;
    for (int s = RI; s < nseg; s += NR)
      for (int b = 0; b < 64; b++) begin
        int x, y;
        x = elem_val(q[s*64+b], e);
        y = elem_val(mem_byte(RI, longint'(a) + longint'((s / NR) * 64 + b)), e);
        acc += (m == METRIC_L2) ? (x - y) * (x - y) : -(x * y);
      end
    return acc;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    qload_valid = 0; qload_idx = 0; qload_seg = '0; job_valid = 0; job_addr = '0; job_nseg = 0;
    metric = METRIC_L2; elem = ELEM_UINT8;
    q = new[16 * 64];
    foreach (q[i]) q[i] = 8'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 16; s++) begin
      @(negedge clk);
      qload_valid = 1; qload_idx = 8'(s);
      for (int b = 0; b < 64; b++) qload_seg[8*b +: 8] = q[s*64+b];
    end
    @(negedge clk);
    qload_valid = 0;
    for (int t = 0; t < 60; t++) begin
      int nseg, ev, cyc;
      addr_t a;
      metric = metric_e'(t % 2);
      elem   = elem_e'((t / 2) % 2);
      nseg   = (t == 0) ? 1 : 1 + int'($urandom % 16);
      a      = addr_t'(($urandom % 100000) * 256);
      ev     = exp_part(a, nseg, metric, elem);
      for (int s = RI; s < nseg; s += NR) exp_addr.push_back(a + addr_t'((s / NR) * 64));
      @(negedge clk);
      job_valid = 1; job_addr = a; job_nseg = 8'(nseg);
      @(negedge clk);
      job_valid = 0;
      checks++;
      if (job_ready) begin failures++; $display("FAIL ready while busy"); end
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (partial != ev || unsup) begin
        failures++;
        $display("FAIL job %0d nseg %0d got %0d exp %0d", t, nseg, partial, ev);
      end
      // each of its n segments needs one request cycle; data returns LAT cycles later
      checks++;
      if (nseg > RI && cyc < LAT + 2) begin
        failures++;
        $display("FAIL job %0d finished in %0d cycles, below the memory latency", t, cyc);
      end
      if (nseg <= RI && cyc != 2) begin
        failures++;
        $display("FAIL empty job took %0d cycles", cyc);
      end
    end
    checks++;
    if (exp_addr.size() != 0) begin failures++; $display("FAIL missing requests"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
