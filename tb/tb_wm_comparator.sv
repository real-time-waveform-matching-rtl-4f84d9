// tb_wm_comparator -- exhaustive check of the interval comparator at P = 6:
// every (sample, lower, upper) triple is compared with the inclusive test
// lower <= sample <= upper worked out on plain integers.
module tb_wm_comparator;
  localparam int P = 6;
  logic signed [P-1:0] sample, lower, upper;
  logic hit;
  int checks = 0, failures = 0;

  wm_comparator #(.P(P)) dut (.sample, .lower, .upper, .hit);

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = -(1 << (P-1)); s < (1 << (P-1)); s++)
      for (int lo = -(1 << (P-1)); lo < (1 << (P-1)); lo++)
        for (int up = -(1 << (P-1)); up < (1 << (P-1)); up++) begin
          bit exp;
          sample = P'(s); lower = P'(lo); upper = P'(up);
          #1;
          exp = (s >= lo) && (s <= up);
          checks++;
          if (hit !== exp) begin
            failures++;
            if (failures < 10) $display("mismatch s=%0d lo=%0d up=%0d hit=%0b", s, lo, up, hit);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
