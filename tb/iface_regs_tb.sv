// iface_regs_tb: self-checking test of the host-mapped interface registers.
//
// Acting as the host, writes every metadata register and the configuration
// word and checks both the decoded cfg fields and the read-back values
// (one-cycle read latency). Fills the whole query buffer and checks every
// segment on the engine-side read port. Checks that CTRL.start gives a
// one-cycle start pulse only while idle, that STATUS reflects busy/done/
// error and that done is cleared by the next start, that writes are
// ignored while busy, and that engine result writes and statistics are
// readable by the host.
module iface_regs_tb;
  import cosmos_pkg::*;

  logic clk = 0, rst_n = 0;
  logic host_we, host_re, host_rvalid;
  logic [HADDR_W-1:0] host_addr;
  logic [HDATA_W-1:0] host_wdata, host_rdata;
  search_cfg_t cfg;
  logic start, busy, done, error;
  logic [31:0] stat_dist, stat_exp;
  logic [7:0] q_rd_idx;
  seg_t q_rd_seg;
  logic res_we; logic [7:0] res_idx; node_id_t res_id; dist_t res_dist;
  logic [63:0] qw [16*8];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  iface_regs #(.MAX_SEG(16), .K_MAX(16)) dut (.clk, .rst_n, .host_we, .host_re, .host_addr,
    .host_wdata, .host_rdata, .host_rvalid, .cfg, .start, .busy, .done, .error, .stat_dist,
    .stat_exp, .q_rd_idx, .q_rd_seg, .res_we, .res_idx, .res_id, .res_dist);

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
    chk("rvalid", host_rvalid);
    d = host_rdata;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] v;
    host_we = 0; host_re = 0; host_addr = 0; host_wdata = 0; busy = 0; done = 0; error = 0;
    stat_dist = 32'd1234; stat_exp = 32'd56; q_rd_idx = 0; res_we = 0; res_idx = 0; res_id = 0; res_dist = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr(REG_GRAPH_BASE, 64'h12_3456_7000);
    wr(REG_NODE_STRIDE, 64'd320);
    wr(REG_EMB_BASE, 64'h80_0000_0000 | 64'h4000);
    wr(REG_VEC_STRIDE, 64'd128);
    wr(REG_ENTRY, 64'd777);
    wr(REG_CONFIG, {36'd0, 2'(ELEM_INT8), 2'(METRIC_IP), 8'd48, 8'd10, 8'd2});
    chk("graph_base", cfg.graph_base == 40'h12_3456_7000);
    chk("node_stride", cfg.node_stride == 40'd320);
    chk("emb_base", cfg.emb_base == 40'h80_0000_4000);
    chk("vector_stride", cfg.vector_stride == 40'd128);
    chk("entry", cfg.entry == 32'd777);
    chk("nseg/k/l", cfg.num_seg == 8'd2 && cfg.k == 8'd10 && cfg.l == 8'd48);
    chk("metric/elem", cfg.metric == METRIC_IP && cfg.elem == ELEM_INT8);
    rd(REG_NODE_STRIDE, v); chk("read node_stride", v == 64'd320);
    rd(REG_ENTRY, v);       chk("read entry", v == 64'd777);
    rd(REG_CONFIG, v);      chk("read config", v[27:0] == {2'(ELEM_INT8), 2'(METRIC_IP), 8'd48, 8'd10, 8'd2});
    rd(REG_STATS, v);       chk("read stats", v == {32'd56, 32'd1234});
    // query buffer
    for (int i = 0; i < 16 * 8; i++) begin
      qw[i] = {$urandom, $urandom};
      wr(REG_QUERY_BASE + 12'(i), qw[i]);
    end
    for (int s = 0; s < 16; s++) begin
      q_rd_idx = 8'(s);
      #1;
      for (int w = 0; w < 8; w++) chk("query seg", q_rd_seg[64*w +: 64] == qw[s*8+w]);
    end
    rd(REG_QUERY_BASE + 12'd5, v); chk("read query word", v == qw[5]);
    // start pulse while idle
    @(negedge clk);
    host_we = 1; host_addr = REG_CTRL; host_wdata = 64'd1;
    #1;
    chk("start pulse", start);
    @(negedge clk);
    host_we = 0;
    #1;
    chk("start one cycle", !start);
    busy = 1;
    rd(REG_STATUS, v); chk("status busy", v[2:0] == 3'b001);
    // no start and no config change while busy
    @(negedge clk);
    host_we = 1; host_addr = REG_CTRL; host_wdata = 64'd1;
    #1;
    chk("no start while busy", !start);
    @(negedge clk);
    host_we = 0;
    wr(REG_ENTRY, 64'd5);
    chk("entry kept while busy", cfg.entry == 32'd777);
    // engine writes results and finishes with an error flag
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      res_we = 1; res_idx = 8'(i); res_id = node_id_t'(100 + i); res_dist = dist_t'(-i * 3);
    end
    @(negedge clk);
    res_we = 0; busy = 0; done = 1; error = 1;
    @(negedge clk);
    done = 0; error = 0;
    rd(REG_STATUS, v); chk("status done+error", v[2:0] == 3'b110);
    for (int i = 0; i < 16; i++) begin
      rd(REG_RESULT_BASE + 12'(i), v);
      chk("result", v == {32'(-i * 3), 32'(100 + i)});
    end
    // a new start clears done
    wr(REG_CTRL, 64'd1);
    rd(REG_STATUS, v); chk("done cleared", v[2:0] == 3'b000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
