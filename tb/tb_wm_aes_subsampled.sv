// tb_wm_aes_subsampled -- the end-to-end test body on the configuration used
// for the AES-128 case study: a template covering 2800 samples at 10 GS/s,
// compared at every 4th sample, i.e. 700 comparators per matcher with
// stride 4 (span 2797 samples), 32 samples of 14 bits per clock. The SRG
// still holds every sample. Template values are random here; the measured
// AES template is not available.
module tb_wm_aes_subsampled;
  localparam int D = 32, P = 14, N_CMP = 700, STRIDE = 4, POS_BUF = 0, N_TMPL = N_CMP, NBEATS = 2800;
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
