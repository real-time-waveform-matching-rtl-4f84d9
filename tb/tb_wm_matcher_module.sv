// tb_wm_matcher_module -- a 10-comparator matcher with random windows and
// limits. Windows are drawn near the template so scores spread over 0..10.
// Score and valid must equal a software interval-match count, compared with
// the threshold, of the window presented ceil(log2 10) = 4 cycles earlier.
module tb_wm_matcher_module;
  localparam int P = 8, N = 10, LAT = 4, SW = 4;
  logic clk = 0, rst_n = 0;
  logic signed [P-1:0] samples [N], lower [N], upper [N];
  logic [SW-1:0] thr, score;
  logic valid;
  int checks = 0, failures = 0, n_valid = 0, n_invalid = 0, n_equal = 0;
  int exp_score [$];

  wm_matcher_module #(.P(P), .N_CMP(N)) dut (.clk, .rst_n, .samples_i(samples), .lower_i(lower),
    .upper_i(upper), .threshold_i(thr), .score_o(score), .valid_o(valid));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c_i [N];
    thr = 4'd6;
    for (int i = 0; i < N; i++) begin
      c_i[i] = int'($urandom_range(200)) - 100;
      lower[i] = P'(c_i[i] - 5); upper[i] = P'(c_i[i] + 5);
      samples[i] = '0;
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      int sc;
      sc = 0;
      if (c % 500 == 0) begin   // new template and offsets now and then
        for (int i = 0; i < N; i++) begin
          int o;
          o = int'($urandom_range(12));
          c_i[i] = int'($urandom_range(200)) - 100;
          lower[i] = P'(c_i[i] - o); upper[i] = P'(c_i[i] + o);
        end
      end
      for (int i = 0; i < N; i++) begin
        int v;
        v = c_i[i] + int'($urandom_range(30)) - 15;
        samples[i] = P'(v);
        if (v >= int'(lower[i]) && v <= int'(upper[i])) sc++;
      end
      exp_score.push_back(sc);
      @(posedge clk); #1;
      if (exp_score.size() >= LAT) begin
        int e;
        e = exp_score[exp_score.size()-LAT];
        checks += 2;
        if (int'(score) != e) failures++;
        if (valid != (e > int'(thr))) failures++;
        if (e > int'(thr)) n_valid++; else n_invalid++;
        if (e == int'(thr)) n_equal++;
      end
    end
    checks++;
    if (n_valid == 0 || n_invalid == 0 || n_equal == 0) failures++;
    $display("valid=%0d invalid=%0d score==thr=%0d", n_valid, n_invalid, n_equal);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
