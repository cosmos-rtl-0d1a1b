// addr_gen: static address arithmetic of the device memory layout.
//
// Because the graph and the embeddings are read-only after indexing, they
// are placed at fixed locations and no address translation is needed at
// search time. A node record and a vector are found by one multiply-add each:
//   node_addr = graph_base + node_idx * node_stride
//   vec_addr  = emb_base   + vec_idx  * vector_stride
// Both formulas are the architecture's; the results wrap at ADDR_W bits.
// Purely combinational.
module addr_gen
  import cosmos_pkg::*;
(
  input  addr_t    graph_base,
  input  addr_t    node_stride,
  input  addr_t    emb_base,
  input  addr_t    vector_stride,
  input  node_id_t node_idx,
  input  node_id_t vec_idx,
  output addr_t    node_addr,
  output addr_t    vec_addr
);

  assign node_addr = graph_base + ADDR_W'(node_idx * node_stride);
  assign vec_addr  = emb_base   + ADDR_W'(vec_idx * vector_stride);

endmodule
