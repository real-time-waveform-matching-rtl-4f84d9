// wm_waveform_matcher -- parallel interval-matching waveform trigger.
//
// Takes D samples of P bits every clock (D = 32 at 312.5 MHz is 10 GS/s),
// passes them unchanged through the shift register SRG and sends them out
// N_STAGES cycles later, together with a trigger bit that marks the samples
// of a detected operation. Any of the D samples of a beat may be the first
// sample of the operation, so D matchers run side by side: matcher j scores
// the window SRG[j : j + span - 1] (newest-first index, see wm_srg) against
// the N_CMP-position template every cycle. With STRIDE > 1 only every
// STRIDE-th sample of a window of span = (N_CMP-1)*STRIDE+1 samples is
// compared (template sub-sampling); the SRG keeps every sample.
// Template position i (0 = earliest) of matcher j reads tap
// j + (N_CMP-1-i)*STRIDE.
//
// The trigger logic ORs the D valid bits, keeps the trigger high for
// trig_len cycles and applies the hold-off. The SRG is long enough
// (span + D - 1 + latency*D + POS_BUF samples, in whole stages; latency =
// ceil(log2 N_CMP) adder-tree cycles + 1 trigger register) that the trigger
// rises on the outgoing beat that holds the first template sample, or the
// beat before it, minus ceil(POS_BUF/D) beats: POS_BUF samples ahead of the
// template are output under the trigger as well.
//
// The structure (SRG, D matchers on overlapping windows, trigger logic
// synchronised by the SRG length) and the default sizes follow the published
// architecture. The window orientation, the stride parameter, the shared
// configuration registers and their write port, and the monitoring outputs
// valid_o / accepted_o / suppressed_o are this design's own choices.
//
// Interface: in_data/out_data are D-sample beats, lane 0 earliest; cfg_i is
// the register write port (map in wm_pkg). No valid/ready: one beat per
// clock, as an ADC stream. Synchronous active-low reset.
module wm_waveform_matcher #(
  parameter int unsigned D       = wm_pkg::D_DEFAULT,
  parameter int unsigned P       = wm_pkg::P_DEFAULT,
  parameter int unsigned N_CMP   = wm_pkg::N_CMP_DEFAULT,
  parameter int unsigned STRIDE  = wm_pkg::STRIDE_DEFAULT,
  parameter int unsigned POS_BUF = wm_pkg::POS_BUF_DEFAULT,
  localparam int unsigned N_STAGES = wm_pkg::srg_stages(D, N_CMP, STRIDE, POS_BUF),
  localparam int unsigned SW       = wm_pkg::score_width(N_CMP),
  localparam int unsigned CW       = wm_pkg::CNT_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [P-1:0] in_data  [D],
  input  wm_pkg::cfg_req_t    cfg_i,
  output logic signed [P-1:0] out_data [D],
  output logic                trigger_o,
  output logic [D-1:0]        valid_o,       // per-lane match flags (debug/monitor)
  output logic                accepted_o,    // a match started a trigger
  output logic                suppressed_o   // a match was ignored by the hold-off
);
  logic signed [P-1:0] taps [N_STAGES*D];
  logic signed [P-1:0] lower [N_CMP];
  logic signed [P-1:0] upper [N_CMP];
  logic [SW-1:0]       threshold;
  logic [CW-1:0]       trig_len, holdoff;

  wm_config_regs #(.P(P), .N_CMP(N_CMP)) u_cfg (
    .clk, .rst_n, .cfg_i,
    .lower_o (lower), .upper_o (upper), .threshold_o (threshold),
    .trig_len_o (trig_len), .holdoff_o (holdoff)
  );

  wm_srg #(.D(D), .P(P), .N_STAGES(N_STAGES)) u_srg (
    .clk, .rst_n, .in_beat (in_data), .out_beat (out_data), .taps_o (taps)
  );

  for (genvar j = 0; j < D; j++) begin : g_match
    logic signed [P-1:0] win [N_CMP];
    for (genvar i = 0; i < N_CMP; i++) begin : g_sel
      assign win[i] = taps[j + (N_CMP - 1 - i) * STRIDE];
    end
    wm_matcher_module #(.P(P), .N_CMP(N_CMP)) u_mm (
      .clk, .rst_n, .samples_i (win), .lower_i (lower), .upper_i (upper),
      .threshold_i (threshold), .score_o (), .valid_o (valid_o[j])
    );
  end

  wm_trigger_logic #(.D(D)) u_trig (
    .clk, .rst_n, .valid_i (valid_o), .trig_len_i (trig_len), .holdoff_i (holdoff),
    .trigger_o, .accepted_o, .suppressed_o
  );
endmodule
