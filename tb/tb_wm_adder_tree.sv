// tb_wm_adder_tree -- random bit vectors into a 37-input tree (and a 1-input
// tree); the sum must equal the software popcount of the vector presented
// exactly ceil(log2 37) = 6 cycles earlier (1 cycle for the 1-input tree).
module tb_wm_adder_tree;
  localparam int N = 37, LAT = 6, W = 6;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] bits;
  logic [W-1:0] sum;
  logic [0:0]   bit1;
  logic [0:0]   sum1;
  int checks = 0, failures = 0;
  int hist [$];
  int hist1 [$];

  wm_adder_tree #(.N(N)) dut  (.clk, .rst_n, .bits_i(bits), .sum_o(sum));
  wm_adder_tree #(.N(1)) dut1 (.clk, .rst_n, .bits_i(bit1), .sum_o(sum1));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bits = '0; bit1 = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      int pc;
      // mix sparse, dense and random vectors
      case (c % 3)
        0: bits = N'({$urandom, $urandom});
        1: bits = N'({$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom});
        default: bits = N'(~({$urandom, $urandom} & {$urandom, $urandom}));
      endcase
      if (c == 5) bits = '1;
      bit1 = 1'($urandom);
      pc = 0;
      for (int k = 0; k < N; k++) pc += int'(bits[k]);
      hist.push_back(pc);
      hist1.push_back(int'(bit1));
      @(posedge clk); #1;
      // after this edge the sum of the vector pushed LAT edges ago is out
      if (hist.size() >= LAT) begin
        checks++;
        if (int'(sum) != hist[hist.size()-LAT]) begin
          failures++;
          if (failures < 10) $display("c=%0d sum=%0d exp=%0d", c, sum, hist[hist.size()-LAT]);
        end
      end
      checks++;
      if (int'(sum1) != hist1[hist1.size()-1]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
