// cand_list_tb: self-checking test of the sorted candidate list.
//
// A queue-based model kept here mirrors every operation: insert (ids drawn
// from a small range so duplicates occur, distances from a small range so
// ties occur), pop of the nearest unvisited entry, and clear, under list
// lengths 8, 20 and 64. After every operation the whole list is read back
// through rd_idx and compared entry by entry, together with count,
// next_valid/next_id, a random look_id membership test and the
// dup/drop/evict indications. Each of dup, drop, evict and convergence
// (no unvisited entry left) must occur.
module cand_list_tb;
  import cosmos_pkg::*;

  localparam int LM = 64;
  typedef struct { int id; int d; bit vis; } ent_t;

  logic clk = 0, rst_n = 0;
  logic clear, ins_valid, pop;
  logic [7:0] cfg_l, rd_idx, count;
  node_id_t ins_id, next_id, look_id, rd_id;
  dist_t ins_dist, rd_dist;
  logic next_valid, look_hit, ins_dup, ins_drop, ins_evict;
  ent_t m[$];
  int checks = 0, failures = 0, n_dup = 0, n_drop = 0, n_evict = 0, n_conv = 0;

  always #5 clk = ~clk;

  cand_list #(.L_MAX(LM)) dut (.clk, .rst_n, .clear, .cfg_l, .ins_valid, .ins_id, .ins_dist,
    .pop, .next_valid, .next_id, .look_id, .look_hit, .rd_idx, .rd_id, .rd_dist, .count,
    .ins_dup, .ins_drop, .ins_evict);

  task automatic chk(string what, bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic compare(int lim);
    int nv;
    bit hit;
    nv = -1;
    chk("count", int'(count) == m.size());
    for (int i = 0; i < m.size(); i++) begin
      rd_idx = 8'(i);
      #1;
      chk($sformatf("entry %0d: %0d/%0d exp %0d/%0d", i, rd_id, rd_dist, m[i].id, m[i].d), int'(rd_id) == m[i].id && int'(rd_dist) == m[i].d);
      if (nv < 0 && !m[i].vis) nv = i;
    end
    chk("next_valid", next_valid == (nv >= 0));
    if (nv >= 0) chk("next_id", int'(next_id) == m[nv].id);
    look_id = node_id_t'($urandom % 40);
    #1;
    hit = 0;
    foreach (m[i]) if (m[i].id == int'(look_id)) hit = 1;
    chk("look_hit", look_hit == hit);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lims[3] = '{8, 20, 64};
    clear = 0; ins_valid = 0; pop = 0; ins_id = 0; ins_dist = 0; look_id = 0; rd_idx = 0;
    cfg_l = 8;
    repeat (3) @(negedge clk);
    rst_n = 1;
    foreach (lims[li]) begin
      int lim;
      lim = lims[li];
      cfg_l = 8'(lim);
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      m.delete();
      for (int t = 0; t < 600; t++) begin
        int r;
        @(negedge clk);   // compare() takes several clock periods
        r = int'($urandom % 10);
        if (r < 7 || m.size() == 0) begin
          int id, d, pos;
          bit dup;
          id = int'($urandom % (lim + 20));
          d  = int'($urandom % 50) - 10;
          ins_valid = 1; ins_id = node_id_t'(id); ins_dist = dist_t'(d);
          #1;
          dup = 0;
          foreach (m[i]) if (m[i].id == id) dup = 1;
          pos = 0;
          foreach (m[i]) if (m[i].d <= d) pos++;
          chk($sformatf("dup flag id=%0d rtl=%0d model=%0d size=%0d cnt=%0d", id, ins_dup, dup, m.size(), count), ins_dup == dup);
          chk("drop flag", ins_drop == (!dup && pos >= lim));
          chk("evict flag", ins_evict == (!dup && pos < lim && m.size() >= lim));
          if (dup) n_dup++;
          else if (pos < lim) begin
            ent_t e;
            e.id = id; e.d = d; e.vis = 0;
            m.insert(pos, e);
            if (m.size() > lim) begin void'(m.pop_back()); n_evict++; end
          end else n_drop++;
          @(negedge clk);
          ins_valid = 0;
        end else begin
          int nv;
          nv = -1;
          foreach (m[i]) if (nv < 0 && !m[i].vis) nv = i;
          if (nv < 0) n_conv++;
          pop = 1;
          @(negedge clk);
          pop = 0;
          if (nv >= 0) m[nv].vis = 1;
        end
        compare(lim);
      end
      // drain: pop until converged
      @(negedge clk);
      for (int t = 0; t < LM + 2; t++) begin
        int nv;
        nv = -1;
        foreach (m[i]) if (nv < 0 && !m[i].vis) nv = i;
        pop = 1;
        @(negedge clk);
        pop = 0;
        if (nv >= 0) m[nv].vis = 1;
      end
      compare(lim);
      chk("converged", !next_valid);
      if (!next_valid) n_conv++;
    end
    chk("dup seen", n_dup > 0);
    chk("drop seen", n_drop > 0);
    chk("evict seen", n_evict > 0);
    chk("convergence seen", n_conv > 0);
    $display("dup=%0d drop=%0d evict=%0d conv=%0d", n_dup, n_drop, n_evict, n_conv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
