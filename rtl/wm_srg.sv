// wm_srg -- the sample shift register (SRG) of the waveform matcher.
//
// N_STAGES stages of D samples of P bits. Every clock the incoming beat of D
// samples enters stage 0 and every stage moves one place on; the last stage is
// the outgoing beat, so each sample leaves exactly N_STAGES cycles after it
// entered. Within a beat, lane 0 is the earliest sample in time.
//
// All stages are visible to the matchers through taps_o, a flat view ordered
// from newest to oldest sample: taps_o[k] is stage k/D, lane D-1-(k mod D).
// The window SRG[j : j+n-1] of matcher j is therefore a slice of taps_o.
// On an FPGA the unread tail of the SRG maps to LUT-based shift registers
// (SRL32); here it is written as plain registers with a synchronous
// active-low reset to zero, which is this design's choice.
module wm_srg #(
  parameter int unsigned D        = wm_pkg::D_DEFAULT,
  parameter int unsigned P        = wm_pkg::P_DEFAULT,
  parameter int unsigned N_STAGES = wm_pkg::srg_stages(wm_pkg::D_DEFAULT, wm_pkg::N_CMP_DEFAULT,
                                                       wm_pkg::STRIDE_DEFAULT, wm_pkg::POS_BUF_DEFAULT)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [P-1:0] in_beat  [D],
  output logic signed [P-1:0] out_beat [D],
  output logic signed [P-1:0] taps_o   [N_STAGES*D]
);
  logic signed [P-1:0] stage_q [N_STAGES][D];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int s = 0; s < N_STAGES; s++)
        for (int m = 0; m < D; m++)
          stage_q[s][m] <= '0;
    end else begin
      stage_q[0] <= in_beat;
      for (int s = 1; s < N_STAGES; s++)
        stage_q[s] <= stage_q[s-1];
    end
  end

  assign out_beat = stage_q[N_STAGES-1];

  for (genvar k = 0; k < N_STAGES * D; k++) begin : g_tap
    assign taps_o[k] = stage_q[k / D][D - 1 - (k % D)];
  end
endmodule
