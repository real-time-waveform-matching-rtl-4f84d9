// wm_matcher_module -- scores one window of the stream against the template.
//
// N_CMP comparators test sample i of the window against its interval
// [lower_i, upper_i]; the adder tree counts the hits (the interval-matching
// score s = sum of f_int over the template) and valid_o is raised when the
// score exceeds m_threshold. One window is scored per clock cycle.
//
// samples_i[i] is the window sample that template position i is compared
// with (position 0 = earliest in time); the caller picks these samples out of
// the SRG, which is where template sub-sampling (stride) is applied.
// Timing: valid_o refers to the samples presented tree_levels(N_CMP) cycles
// earlier; the threshold comparison after the tree register is combinational.
// "score > threshold" follows the ">" box of the matcher diagram; which input
// is on which side of that box is this design's reading.
module wm_matcher_module #(
  parameter int unsigned P     = wm_pkg::P_DEFAULT,
  parameter int unsigned N_CMP = wm_pkg::N_CMP_DEFAULT,
  localparam int unsigned SW   = wm_pkg::score_width(N_CMP)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [P-1:0] samples_i [N_CMP],
  input  logic signed [P-1:0] lower_i   [N_CMP],
  input  logic signed [P-1:0] upper_i   [N_CMP],
  input  logic [SW-1:0]       threshold_i,
  output logic [SW-1:0]       score_o,
  output logic                valid_o
);
  logic [N_CMP-1:0] hits;

  for (genvar i = 0; i < N_CMP; i++) begin : g_cmp
    wm_comparator #(.P(P)) u_cmp (
      .sample (samples_i[i]),
      .lower  (lower_i[i]),
      .upper  (upper_i[i]),
      .hit    (hits[i])
    );
  end

  wm_adder_tree #(.N(N_CMP)) u_sum (
    .clk    (clk),
    .rst_n  (rst_n),
    .bits_i (hits),
    .sum_o  (score_o)
  );

  assign valid_o = (score_o > threshold_i);
endmodule
