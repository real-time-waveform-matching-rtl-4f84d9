// wm_adder_tree -- pipelined population count of N one-bit comparator hits.
//
// A binary adder tree: level 0 is the N input bits, each further level adds
// neighbouring pairs of the level below and registers the result, so the sum
// appears tree_levels(N) = ceil(log2 N) cycles after its inputs (one cycle for
// N = 1). A new set of inputs is accepted every cycle. All nodes use the final
// score width. Registering every level is this design's choice; the source
// design only states that the sum is a clocked adder tree built from LUTs.
// Synchronous active-low reset clears the pipeline.
module wm_adder_tree #(
  parameter int unsigned N = wm_pkg::N_CMP_DEFAULT,
  localparam int unsigned W = wm_pkg::score_width(N),
  localparam int unsigned L = wm_pkg::tree_levels(N)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] bits_i,
  output logic [W-1:0] sum_o
);
  // Number of nodes on level l.
  function automatic int unsigned nodes(int unsigned l);
    return (N + (1 << l) - 1) >> l;
  endfunction

  for (genvar l = 0; l <= L; l++) begin : lv
    logic [W-1:0] s [nodes(l)];
    if (l == 0) begin : g_in
      for (genvar k = 0; k < N; k++) begin : g_bit
        assign s[k] = W'(bits_i[k]);
      end
    end else begin : g_add
      for (genvar k = 0; k < nodes(l); k++) begin : g_node
        if (2 * k + 1 < nodes(l - 1)) begin : g_pair
          always_ff @(posedge clk) begin
            if (!rst_n) s[k] <= '0;
            else        s[k] <= lv[l-1].s[2*k] + lv[l-1].s[2*k+1];
          end
        end else begin : g_single
          always_ff @(posedge clk) begin
            if (!rst_n) s[k] <= '0;
            else        s[k] <= lv[l-1].s[2*k];
          end
        end
      end
    end
  end

  assign sum_o = lv[L].s[0];
endmodule
