// tb_wm_waveform_matcher -- end-to-end test of the waveform matcher at a
// reduced size: 4 samples per clock, 10-bit samples, a 12-position template
// sub-sampled by 3 (span 34 samples) and a 6-sample positional buffer. The
// test body (golden model, stimulus, checks) is in wm_top_tb_body.svh.
module tb_wm_waveform_matcher;
  localparam int D = 4, P = 10, N_CMP = 12, STRIDE = 3, POS_BUF = 6, N_TMPL = N_CMP, NBEATS = 400;
  `include "wm_top_tb_body.svh"

  // watchdog
  initial begin
    repeat (NBEATS + 4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  wm_waveform_matcher #(.D(D), .P(P), .N_CMP(N_CMP), .STRIDE(STRIDE), .POS_BUF(POS_BUF)) dut (
    .clk, .rst_n, .in_data, .cfg_i(cfg), .out_data, .trigger_o(trigger), .valid_o(valid),
    .accepted_o(accepted), .suppressed_o(suppressed));
endmodule
