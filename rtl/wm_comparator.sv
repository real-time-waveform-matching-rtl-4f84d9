// wm_comparator -- interval test for one template position.
//
// hit = 1 when lower <= sample <= upper. The two limits are the precomputed
// bounds c_i - o_offset and c_i + o_offset of template position i, held in
// registers outside this module (wm_config_regs) and shared by all matchers.
// The test is inclusive on both sides, as in the interval-matching definition
// (c_i + o >= t_i >= c_i - o); the block diagram draws the two comparators
// only as ">" boxes, so the inclusive form of the equation is followed.
// Samples and limits are signed two's complement (this design's choice).
// Purely combinational: two magnitude comparisons and an AND.
module wm_comparator #(
  parameter int unsigned P = wm_pkg::P_DEFAULT
) (
  input  logic signed [P-1:0] sample,
  input  logic signed [P-1:0] lower,
  input  logic signed [P-1:0] upper,
  output logic                hit
);
  logic above_lower, below_upper;

  always_comb begin
    above_lower = (sample >= lower);
    below_upper = (sample <= upper);
    hit         = above_lower & below_upper;
  end
endmodule
