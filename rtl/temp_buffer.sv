// temp_buffer: on-controller scratch memory for intermediate results.
//
// A simple dual-port RAM (one write port, one synchronous read port). The
// search engine stores the neighbour list of the node it is expanding here,
// so each graph record is read from DRAM once and then walked locally while
// distance jobs are issued. Keeping intermediate data in a controller buffer
// follows the architecture; depth (max_degree) and width are this design's
// choices.
// Timing: a write lands at the clock edge; rdata shows the word at raddr one
// cycle after raddr is presented.
module temp_buffer #(
  parameter int DEPTH = 64,
  parameter int WIDTH = 32,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
