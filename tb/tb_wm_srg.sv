// tb_wm_srg -- random beats through a 4-lane, 5-stage SRG. Checks that each
// beat leaves exactly 5 cycles after it entered, and that every tap k holds
// the k-th newest sample of the stream (0 before any sample arrived).
module tb_wm_srg;
  localparam int D = 4, P = 8, NS = 5;
  logic clk = 0, rst_n = 0;
  logic signed [P-1:0] in_beat [D];
  logic signed [P-1:0] out_beat [D];
  logic signed [P-1:0] taps [NS*D];
  int checks = 0, failures = 0;
  int stream [$];   // every sample in time order

  wm_srg #(.D(D), .P(P), .N_STAGES(NS)) dut (.clk, .rst_n, .in_beat, .out_beat, .taps_o(taps));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sample_at(int t);   // sample with time index t
    return (t < 0 || t >= stream.size()) ? 0 : stream[t];
  endfunction

  initial begin
    for (int m = 0; m < D; m++) in_beat[m] = 8'(m + 1);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 300; c++) begin
      for (int m = 0; m < D; m++) begin
        in_beat[m] = P'($urandom);
        stream.push_back(int'(in_beat[m]));
      end
      @(posedge clk); #1;
      // beat c is now in stage 0; newest sample has time index c*D + D-1
      for (int m = 0; m < D; m++) begin
        checks++;
        if (int'(out_beat[m]) != sample_at((c - NS + 1) * D + m)) failures++;
      end
      for (int k = 0; k < NS * D; k++) begin
        checks++;
        if (int'(taps[k]) != sample_at(c * D + D - 1 - k)) begin
          failures++;
          if (failures < 10) $display("c=%0d tap %0d = %0d exp %0d", c, k, taps[k], sample_at(c*D+D-1-k));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
