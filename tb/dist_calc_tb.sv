// dist_calc_tb: self-checking test of the partial-distance datapath.
//
// Drives random 64-byte query/data segment pairs, one per cycle, through
// dist_calc for each metric (L2, inner product) and each integer element
// type (uint8, int8), and compares every result, one cycle later, with a
// sum computed here byte by byte. Also checks the fixed one-cycle latency,
// the all-equal and extreme-value corner cases, and that fp32 raises
// out_unsup.
module dist_calc_tb;
  import cosmos_pkg::*;

  logic    clk = 0, rst_n = 0;
  logic    in_valid;
  metric_e metric;
  elem_e   elem;
  seg_t    qs, ds;
  logic    out_valid, out_unsup;
  dist_t   partial;
  int      checks = 0, failures = 0;

  always #5 clk = ~clk;

  dist_calc dut (.clk, .rst_n, .in_valid, .metric, .elem, .query_seg(qs), .data_seg(ds),
                 .out_valid, .out_unsup, .partial);

  function automatic int ref_part(seg_t q, seg_t d, metric_e m, elem_e e);
    int acc = 0;
    for (int b = 0; b < 64; b++) begin
      int x, y;
      x = (e == ELEM_INT8) ? int'($signed(q[8*b +: 8])) : int'(q[8*b +: 8]);
      y = (e == ELEM_INT8) ? int'($signed(d[8*b +: 8])) : int'(d[8*b +: 8]);
      if (m == METRIC_L2) acc += (x - y) * (x - y);
      else                acc -= x * y;
    end
    return acc;
  endfunction

  function automatic seg_t rand_seg();
    seg_t s;
    for (int w = 0; w < 16; w++) s[32*w +: 32] = $urandom;
    return s;
  endfunction

  task automatic check_one(seg_t q, seg_t d, metric_e m, elem_e e);
    int expv;
    expv = ref_part(q, d, m, e);
    @(negedge clk);
    in_valid = 1; qs = q; ds = d; metric = m; elem = e;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || out_unsup || partial != expv) begin
      failures++;
      $display("FAIL m=%0d e=%0d got %0d (v=%0b) exp %0d", m, e, partial, out_valid, expv);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; metric = METRIC_L2; elem = ELEM_UINT8; qs = '0; ds = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // corner cases
    check_one('0, '0, METRIC_L2, ELEM_UINT8);
    check_one('1, '0, METRIC_L2, ELEM_UINT8);      // 64 * 255^2
    check_one('1, '1, METRIC_IP, ELEM_UINT8);      // -64 * 255^2
    check_one({64{8'h80}}, {64{8'h7f}}, METRIC_L2, ELEM_INT8);
    check_one({64{8'h80}}, {64{8'h80}}, METRIC_IP, ELEM_INT8);
    // random
    for (int i = 0; i < 400; i++)
      check_one(rand_seg(), rand_seg(), metric_e'(i % 2), elem_e'((i / 2) % 2));
    // back-to-back stream: one result per cycle
    begin
      seg_t qa[8], da[8];
      int   ev[8];
      for (int i = 0; i < 8; i++) begin
        qa[i] = rand_seg(); da[i] = rand_seg(); ev[i] = ref_part(qa[i], da[i], METRIC_L2, ELEM_UINT8);
      end
      for (int i = 0; i < 9; i++) begin
        @(negedge clk);
        if (i > 0) begin
          checks++;
          if (!out_valid || partial != ev[i-1]) begin
            failures++;
            $display("FAIL stream %0d", i - 1);
          end
        end
        in_valid = (i < 8); metric = METRIC_L2; elem = ELEM_UINT8;
        if (i < 8) begin qs = qa[i]; ds = da[i]; end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL valid after stream"); end
    end
    // fp32 is flagged as unsupported
    @(negedge clk);
    in_valid = 1; elem = ELEM_FP32; qs = rand_seg(); ds = rand_seg();
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_unsup || partial != 0) begin failures++; $display("FAIL fp32 flag"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
