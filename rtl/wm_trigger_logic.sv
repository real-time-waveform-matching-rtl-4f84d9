// wm_trigger_logic -- turns the D matcher valid signals into one trigger.
//
// Any valid_i bit is a match. A match is accepted when the hold-off counter
// is zero; an accepted match loads the trigger counter with trig_len_i and
// the hold-off counter with holdoff_i. trigger_o is high while the trigger
// counter is non-zero, i.e. for trig_len_i cycles starting one cycle after the
// match, which is meant to cover the whole operation of interest. Matches
// while the hold-off counter runs are ignored (counted on suppressed_o), so
// several matches inside one operation give one trigger. The source design
// names both jobs (hold the trigger for the operation, hold-off counter) but
// not their realisation: two down-counters loaded from registers are this
// design's choice. With holdoff_i = 0 every match is accepted and restarts the
// trigger. Synchronous active-low reset.
module wm_trigger_logic #(
  parameter int unsigned D     = wm_pkg::D_DEFAULT,
  parameter int unsigned CNT_W = wm_pkg::CNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [D-1:0]     valid_i,
  input  logic [CNT_W-1:0] trig_len_i,
  input  logic [CNT_W-1:0] holdoff_i,
  output logic             trigger_o,
  output logic             accepted_o,    // a match started a trigger (this cycle)
  output logic             suppressed_o   // a match fell into the hold-off (this cycle)
);
  logic [CNT_W-1:0] trig_cnt_q, hold_cnt_q;
  logic             match;

  always_comb begin
    match        = |valid_i;
    accepted_o   = match && (hold_cnt_q == '0);
    suppressed_o = match && (hold_cnt_q != '0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      trig_cnt_q <= '0;
      hold_cnt_q <= '0;
    end else begin
      if (accepted_o)             trig_cnt_q <= trig_len_i;
      else if (trig_cnt_q != '0)  trig_cnt_q <= trig_cnt_q - 1'b1;

      if (accepted_o)             hold_cnt_q <= holdoff_i;
      else if (hold_cnt_q != '0)  hold_cnt_q <= hold_cnt_q - 1'b1;
    end
  end

  assign trigger_o = (trig_cnt_q != '0);

  // A match during the hold-off window must never restart the trigger:
  // the trigger counter just keeps counting down.
  a_no_retrigger: assert property (@(posedge clk) disable iff (!rst_n)
    suppressed_o |=> trig_cnt_q == (($past(trig_cnt_q) == '0) ? '0 : $past(trig_cnt_q) - 1'b1));
endmodule
