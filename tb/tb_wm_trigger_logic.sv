// tb_wm_trigger_logic -- random match pulses on 4 lanes against a software
// model of "hold the trigger for trig_len cycles after an accepted match,
// ignore matches for holdoff cycles after it". The model keeps the end of the
// current trigger and the first cycle a new match may be accepted. Several
// trig_len / holdoff settings are run, including holdoff = 0 (every match
// accepted, trigger extended) and holdoff longer than the trigger.
module tb_wm_trigger_logic;
  localparam int D = 4, CW = 24;
  logic clk = 0, rst_n = 0;
  logic [D-1:0] valid;
  logic [CW-1:0] trig_len, holdoff;
  logic trigger, accepted, suppressed;
  int checks = 0, failures = 0, n_acc = 0, n_sup = 0, n_ext = 0;

  wm_trigger_logic #(.D(D), .CNT_W(CW)) dut (.clk, .rst_n, .valid_i(valid), .trig_len_i(trig_len),
    .holdoff_i(holdoff), .trigger_o(trigger), .accepted_o(accepted), .suppressed_o(suppressed));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int trig_end, hold_until, lens [4], hos [4];
    lens = '{5, 20, 3, 12};
    hos  = '{30, 0, 8, 12};
    valid = '0; trig_len = '0; holdoff = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int setting = 0; setting < 4; setting++) begin
      trig_len = CW'(lens[setting]);
      holdoff  = CW'(hos[setting]);
      // let the previous setting drain
      valid = '0;
      repeat (60) @(posedge clk);
      #1;
      trig_end = -1; hold_until = 0;
      for (int c = 0; c < 3000; c++) begin
        bit m, exp_acc;
        valid = ($urandom_range(9) == 0) ? D'(1 << $urandom_range(D-1)) : '0;
        if ($urandom_range(40) == 0) valid = '1;
        #1;
        m = |valid;
        exp_acc = m && (c >= hold_until);
        checks += 2;
        if (accepted != exp_acc) failures++;
        if (suppressed != (m && !exp_acc)) failures++;
        if (exp_acc) begin
          if (c < trig_end) n_ext++;
          trig_end = c + lens[setting];
          hold_until = c + hos[setting] + 1;
          n_acc++;
        end
        if (m && !exp_acc) n_sup++;
        @(posedge clk); #1;
        checks++;
        if (trigger != (c < trig_end)) begin
          failures++;
          if (failures < 10) $display("set %0d c=%0d trigger=%0b exp=%0b", setting, c, trigger, c < trig_end);
        end
      end
    end
    checks++;
    if (n_acc == 0 || n_sup == 0 || n_ext == 0) failures++;
    $display("accepted=%0d suppressed=%0d extended=%0d", n_acc, n_sup, n_ext);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
