// mem_port_model: behavioural model of a memory controller + DRAM behind one
// read port (a rank's vector data, or the graph records).
//
// Accepts a read request when req_ready is high (randomly deasserted when
// STALL_PCT > 0), and returns the 64-byte beat LAT cycles later, in order.
// KIND 0: vector data, beat = tb_pkg::seg_data(RANK, addr).
// KIND 1: graph records at GBASE with stride GSTRIDE: word 0 the degree,
//         words 1.. the neighbours of tb_pkg (cluster size CS, degree D).
// Not synthesizable; testbench use only.
module mem_port_model
  import cosmos_pkg::*;
#(
  parameter int     KIND      = 0,
  parameter int     RANK      = 0,
  parameter int     LAT       = 4,
  parameter int     STALL_PCT = 0,
  parameter longint GBASE     = 0,
  parameter longint GSTRIDE   = 512,
  parameter int     CS        = 32,
  parameter int     D         = 8
) (
  input  logic  clk,
  input  logic  req_valid,
  output logic  req_ready,
  input  addr_t req_addr,
  output logic  rsp_valid,
  output seg_t  rsp_data
);
  import tb_pkg::*;

  longint unsigned qa[$];
  longint          qt[$];
  longint          now = 0;
  int              accepted = 0;

  function automatic seg_t graph_beat(longint unsigned addr);
    seg_t   s;
    longint off, node, beat;
    int     deg;
    off  = longint'(addr) - GBASE;
    node = off / GSTRIDE;
    beat = (off % GSTRIDE) / 64;
    deg  = node_degree(int'(node), D);
    for (int w = 0; w < 16; w++) begin
      int wi;
      wi = int'(beat) * 16 + w;
      if (wi == 0)         s[32*w +: 32] = 32'(deg);
      else if (wi <= deg)  s[32*w +: 32] = 32'(node_nbr(int'(node), wi - 1, CS));
      else                 s[32*w +: 32] = 32'hDEAD_BEEF;
    end
    return s;
  endfunction

  initial begin
    req_ready = 1'b1;
    rsp_valid = 1'b0;
    rsp_data  = '0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    if (req_valid && req_ready) begin
      qa.push_back(longint'(req_addr));
      qt.push_back(now + LAT);
      accepted++;
    end
    if (qt.size() > 0 && qt[0] <= now) begin
      longint unsigned a;
      a = qa.pop_front();
      void'(qt.pop_front());
      rsp_valid <= 1'b1;
      rsp_data  <= (KIND == 0) ? seg_data(RANK, a) : graph_beat(a);
    end else begin
      rsp_valid <= 1'b0;
    end
    req_ready <= (STALL_PCT == 0) ? 1'b1 : (($urandom % 100) >= STALL_PCT);
  end
endmodule
