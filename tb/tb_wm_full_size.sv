// tb_wm_full_size -- the end-to-end test of wm_top_tb_body.svh on the
// matcher at its default size: 32 samples of 14 bits per clock, a
// 1400-position template, stride 1, no positional buffer. The localparams
// below only tell the test body those sizes; the matcher keeps its defaults.
module tb_wm_full_size;
  localparam int D = 32, P = 14, N_CMP = 1400, STRIDE = 1, POS_BUF = 0, N_TMPL = N_CMP, NBEATS = 2700;
  `include "wm_top_tb_body.svh"

  // watchdog
  initial begin
    repeat (NBEATS + 4000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  wm_waveform_matcher dut (
    .clk, .rst_n, .in_data, .cfg_i(cfg), .out_data, .trigger_o(trigger), .valid_o(valid),
    .accepted_o(accepted), .suppressed_o(suppressed));
endmodule
