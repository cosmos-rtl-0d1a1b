// cand_list: sorted candidate list of the graph search (cand_list_len = L).
//
// Holds up to cfg_l (<= L_MAX) nodes in ascending distance order, each with
// a visited flag. Operations, at most one of clear/pop/insert per cycle:
//   insert  - a node already present is ignored (ins_dup); otherwise it is
//             placed after all entries with distance <= its own, the entries
//             behind it move down one place, and the entry pushed past cfg_l
//             is dropped (ins_evict). A node that would land at or past
//             cfg_l is rejected (ins_drop).
//   pop     - marks the nearest unvisited entry (next_*) visited; the search
//             expands that node next.
//   clear   - empties the list for a new query.
// look_id/look_hit is a parallel membership test, and rd_idx/rd_id/rd_dist
// reads any entry, so the first k entries are the top-k. The search has
// converged when next_valid is low. All comparisons are parallel over the
// L_MAX entries (a shift-register insertion list). Keeping the list sorted
// and the convergence rule follow graph ANN search as the architecture
// describes it; L_MAX, tie order and the de-duplication rule are this
// design's choices.
// Timing: updates take effect at the next clock edge; outputs are
// combinational from the stored state. count is 8 bits wide so that it can
// hold any L_MAX up to 255; the bits above the entry counter read 0.
module cand_list
  import cosmos_pkg::*;
#(
  parameter int L_MAX = 64
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic [7:0] cfg_l,
  input  logic       ins_valid,
  input  node_id_t   ins_id,
  input  dist_t      ins_dist,
  input  logic       pop,
  output logic       next_valid,
  output node_id_t   next_id,
  input  node_id_t   look_id,
  output logic       look_hit,
  input  logic [7:0] rd_idx,
  output node_id_t   rd_id,
  output dist_t      rd_dist,
  output logic [7:0] count,
  output logic       ins_dup,
  output logic       ins_drop,
  output logic       ins_evict
);

  localparam int IW = $clog2(L_MAX + 1);                 // counts 0..L_MAX
  localparam int AW = (L_MAX > 1) ? $clog2(L_MAX) : 1;   // indexes 0..L_MAX-1

  node_id_t   ids  [L_MAX];
  dist_t      dists[L_MAX];
  logic       vis  [L_MAX];
  logic [IW-1:0] cnt, pos, next_idx, lim;
  logic       ins_hit;

  assign lim   = (32'(cfg_l) > L_MAX || cfg_l == 8'd0) ? IW'(L_MAX) : IW'(cfg_l);
  assign count = 8'(cnt);

  always_comb begin
    look_hit   = 1'b0;
    ins_hit    = 1'b0;
    pos        = '0;
    next_valid = 1'b0;
    next_idx   = '0;
    for (int i = 0; i < L_MAX; i++) begin
      if (IW'(i) < cnt) begin
        if (ids[i] == look_id) look_hit = 1'b1;
        if (ids[i] == ins_id)  ins_hit  = 1'b1;
        if (dists[i] <= ins_dist) pos = pos + 1'b1;
      end
    end
    for (int i = L_MAX - 1; i >= 0; i--)
      if (IW'(i) < cnt && !vis[i]) begin
        next_valid = 1'b1;
        next_idx   = IW'(i);
      end
  end

  assign next_id = ids[next_idx[AW-1:0]];   // next_idx < cnt <= L_MAX
  assign rd_id   = (32'(rd_idx) < L_MAX) ? ids[rd_idx[AW-1:0]]   : '0;
  assign rd_dist = (32'(rd_idx) < L_MAX) ? dists[rd_idx[AW-1:0]] : '0;

  assign ins_dup   = ins_valid && ins_hit;
  assign ins_drop  = ins_valid && !ins_hit && (pos >= lim);
  assign ins_evict = ins_valid && !ins_hit && (pos < lim) && (cnt >= lim);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      for (int i = 0; i < L_MAX; i++) begin
        ids[i]   <= '0;
        dists[i] <= '0;
        vis[i]   <= 1'b0;
      end
    end else if (clear) begin
      cnt <= '0;
      for (int i = 0; i < L_MAX; i++) vis[i] <= 1'b0;
    end else if (pop) begin
      if (next_valid) vis[next_idx[AW-1:0]] <= 1'b1;
    end else if (ins_valid && !ins_hit && pos < lim) begin
      for (int i = 1; i < L_MAX; i++)
        if (IW'(i) > pos) begin
          ids[i]   <= ids[i-1];
          dists[i] <= dists[i-1];
          vis[i]   <= vis[i-1];
        end
      ids[pos[AW-1:0]]   <= ins_id;     // pos < lim <= L_MAX here
      dists[pos[AW-1:0]] <= ins_dist;
      vis[pos[AW-1:0]]   <= 1'b0;
      if (cnt < lim) cnt <= cnt + 1'b1;
    end
  end

endmodule
