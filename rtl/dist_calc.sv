// dist_calc: partial-distance datapath of one rank-level processing unit.
//
// Takes one 64-byte data segment read from the rank together with the
// matching 64-byte query segment and reduces it to one partial distance:
//   L2: sum over the 64 byte lanes of (q_i - d_i)^2
//   IP: -(sum over the 64 byte lanes of q_i * d_i)
// Each lane widens its two bytes to 9-bit signed values (zero-extended for
// uint8, sign-extended for int8), subtracts (L2) or passes (IP), multiplies,
// and an adder tree sums the 64 products. The lane/subtract/multiply/adder
// structure follows the rank-level distance logic of the architecture; the
// lane count of 64 (one per byte of the segment), the negated inner product
// and the single output register are this design's choices. fp32 elements
// are not computed: the output is then zero and out_unsup is raised.
//
// Timing: one segment per cycle; out_valid/partial appear one cycle after
// in_valid.
module dist_calc
  import cosmos_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  metric_e metric,
  input  elem_e   elem,
  input  seg_t    query_seg,
  input  seg_t    data_seg,
  output logic    out_valid,
  output logic    out_unsup,
  output dist_t   partial
);

  logic signed [DIST_W-1:0] sum_c;

  always_comb begin
    logic signed [8:0]  q, d;
    logic signed [9:0]  diff;
    logic signed [19:0] prod;
    sum_c = '0;
    for (int i = 0; i < SEG_BYTES; i++) begin
      q = (elem == ELEM_INT8) ? {query_seg[8*i+7], query_seg[8*i +: 8]} : {1'b0, query_seg[8*i +: 8]};
      d = (elem == ELEM_INT8) ? {data_seg[8*i+7],  data_seg[8*i +: 8]}  : {1'b0, data_seg[8*i +: 8]};
      diff = 10'(q) - 10'(d);
      if (metric == METRIC_L2) prod = 20'(diff) * 20'(diff);
      else                     prod = 20'(q) * 20'(d);
      sum_c = sum_c + DIST_W'(prod);
    end
    if (metric == METRIC_IP) sum_c = -sum_c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_unsup <= 1'b0;
      partial   <= '0;
    end else begin
      out_valid <= in_valid;
      out_unsup <= in_valid && (elem == ELEM_FP32);
      partial   <= (elem == ELEM_FP32) ? '0 : sum_c;
    end
  end

endmodule
