// cosmos_pkg: types and constants shared by the near-memory ANN search design.
//
// The design processes vectors in 64-byte sub-vector segments (the segment
// size is the one fixed number the architecture is built around). Node ids,
// distances and DRAM byte addresses use the widths below. Inner products are
// carried as negated values so that "smaller is nearer" holds for both
// metrics everywhere downstream (candidate list, top-k). Widths, encodings
// and the host register map are this design's own choices.
package cosmos_pkg;

  localparam int SEG_BYTES = 64;               // bytes per sub-vector segment
  localparam int SEG_W     = SEG_BYTES * 8;    // 512-bit segment
  localparam int ID_W      = 32;               // node / vector index
  localparam int DIST_W    = 32;               // signed distance
  localparam int ADDR_W    = 40;               // device-local byte address
  localparam int HDATA_W   = 64;               // host register width
  localparam int HADDR_W   = 12;               // host word address

  typedef logic [SEG_W-1:0]         seg_t;
  typedef logic [ID_W-1:0]          node_id_t;
  typedef logic signed [DIST_W-1:0] dist_t;
  typedef logic [ADDR_W-1:0]        addr_t;

  // Distance metric selected per search.
  typedef enum logic [1:0] {
    METRIC_L2 = 2'd0,   // sum (q - d)^2
    METRIC_IP = 2'd1    // -(sum q * d), negated so smaller is nearer
  } metric_e;

  // Element type of the stored vectors (Table of datasets: uint8, int8, fp32).
  typedef enum logic [1:0] {
    ELEM_UINT8 = 2'd0,
    ELEM_INT8  = 2'd1,
    ELEM_FP32  = 2'd2   // not computed by this datapath; reported as unsupported
  } elem_e;

  // Search configuration registered by the host before a search.
  typedef struct packed {
    addr_t      graph_base;     // addr of node record 0
    addr_t      node_stride;    // bytes per node record
    addr_t      emb_base;       // addr of vector 0 (per rank)
    addr_t      vector_stride;  // bytes per vector share in one rank
    node_id_t   entry;          // entry node of the graph to search
    logic [7:0] num_seg;        // 64B segments per vector
    logic [7:0] k;              // results wanted
    logic [7:0] l;              // cand_list_len
    metric_e    metric;
    elem_e      elem;
  } search_cfg_t;

  // Host register map (64-bit words).
  localparam logic [HADDR_W-1:0] REG_CTRL        = 12'h000; // W: bit0 start
  localparam logic [HADDR_W-1:0] REG_STATUS      = 12'h001; // R: bit0 busy, bit1 done, bit2 error
  localparam logic [HADDR_W-1:0] REG_GRAPH_BASE  = 12'h002;
  localparam logic [HADDR_W-1:0] REG_NODE_STRIDE = 12'h003;
  localparam logic [HADDR_W-1:0] REG_EMB_BASE    = 12'h004;
  localparam logic [HADDR_W-1:0] REG_VEC_STRIDE  = 12'h005;
  localparam logic [HADDR_W-1:0] REG_ENTRY       = 12'h006;
  localparam logic [HADDR_W-1:0] REG_CONFIG      = 12'h007; // [7:0] nseg [15:8] k [23:16] L [25:24] metric [27:26] elem
  localparam logic [HADDR_W-1:0] REG_STATS       = 12'h008; // R: [31:0] distances [63:32] expansions
  localparam logic [HADDR_W-1:0] REG_QUERY_BASE  = 12'h100; // query data buffer, 8 words per segment
  localparam logic [HADDR_W-1:0] REG_RESULT_BASE = 12'h200; // result buffer, {dist, id} per entry

endpackage
