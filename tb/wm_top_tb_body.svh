// wm_top_tb_body.svh -- end-to-end test body for wm_waveform_matcher.
//
// Included by a testbench that declares localparams D, P, N_CMP, STRIDE,
// POS_BUF, NBEATS, N_TMPL and instantiates the matcher as `dut` on the signals
// declared here. It keeps the whole input stream in time order and, for every
// beat and every lane j, recomputes the interval-match score of the window
// that lane sees (golden model written from the matching rule, not from the
// RTL), then runs a software trigger model (trigger length, hold-off). It
// checks after every clock edge:
//   * out_data is the input delayed by the SRG length,
//   * valid_o of every lane,
//   * trigger_o and suppressed_o,
//   * that each trigger rises on the output beat holding the first template
//     sample (or the beat before), less the positional buffer.
// The stream is random noise with planned events: exact template copies on
// varying lanes, a second copy inside the hold-off, a near miss scoring
// exactly the threshold, and a copy while the threshold is raised to N_CMP
// (matching disabled) at run time. With N_TMPL < N_CMP only the first N_TMPL
// positions hold the template; the rest are written as don't-care corridors
// (whole sample range) and always count, which is how a shorter template runs
// on a wider matcher. Each mechanism must happen at least once.
// The including testbench supplies the watchdog.

  localparam int SPAN = (N_CMP - 1) * STRIDE + 1;
  localparam int TL   = (N_CMP <= 1) ? 1 : $clog2(N_CMP);   // adder-tree latency
  localparam int NST  = (SPAN + 2 * D - 2) / D + TL + 1 + (POS_BUF + D - 1) / D;
  localparam int PBB  = (POS_BUF + D - 1) / D;               // positional buffer, beats
  localparam int OFS  = 1 << (P - 5);                          // interval half-width
  localparam int THR  = N_CMP - 2;
  localparam int TLEN = SPAN / D + 2;                          // trigger length, cycles
  localparam int HOLD = 2 * TLEN;                              // hold-off, cycles
  localparam int SMAX = (1 << (P - 1)) - 1;
  localparam int SMIN = -(1 << (P - 1));

  logic clk = 0, rst_n = 0;
  logic signed [P-1:0] in_data [D], out_data [D];
  wm_pkg::cfg_req_t cfg;
  logic trigger, accepted, suppressed;
  logic [D-1:0] valid;

  int checks = 0, failures = 0;
  int stream [];          // sample value by time index
  int tmpl [N_CMP];       // template values c_i
  int lo [N_CMP], up [N_CMP];  // corridor of every position
  int thr_at [];          // threshold that applies to beat c
  bit texp [];            // expected trigger for beat c (after the trigger register)
  int n_trig = 0, n_hold = 0, n_near = 0, n_disabled = 0, n_sync = 0;
  bit lane_hit [D];

  always #5 clk = ~clk;

  function automatic int x(int t);
    return (t < 0 || t >= stream.size()) ? 0 : stream[t];
  endfunction

  function automatic int clampv(int v);
    return (v > SMAX) ? SMAX : (v < SMIN) ? SMIN : v;
  endfunction

  // Golden score of lane j for beat c: template position i is compared with
  // the sample i*STRIDE after the window start; lane j's window ends j samples
  // before the newest sample of beat c.
  function automatic int score(int c, int j);
    int s, t0;
    s = 0;
    t0 = c * D + D - 1 - j - (N_CMP - 1) * STRIDE;
    for (int i = 0; i < N_CMP; i++) begin
      int v;
      v = x(t0 + i * STRIDE);
      if (v >= lo[i] && v <= up[i]) s++;
    end
    return s;
  endfunction

  // Place a template copy whose first sample has time index t0. Positions
  // listed as "miss" get a value outside their interval.
  task automatic place(int t0, int n_miss);
    for (int i = 0; i < N_TMPL; i++) begin
      int v;
      if (i < n_miss) v = (tmpl[i] > 0) ? tmpl[i] - 3 * OFS : tmpl[i] + 3 * OFS;
      else            v = tmpl[i] + int'($urandom_range(2 * OFS)) - OFS;
      stream[t0 + i * STRIDE] = v;
    end
  endtask

  task automatic cfg_write(logic [15:0] a, logic [31:0] d);
    cfg.we = 1; cfg.addr = a; cfg.wdata = d;
  endtask

  initial begin
    int cfg_end, ev, e, trig_end, hold_until, thr_w1, thr_w2, thr_w3;
    int ev_t [6], ev_miss [6];
    stream = new[NBEATS * D];
    thr_at = new[NBEATS];
    texp   = new[NBEATS];
    for (int t = 0; t < NBEATS * D; t++) stream[t] = int'($urandom_range(SMAX - SMIN)) + SMIN;
    for (int i = 0; i < N_CMP; i++) begin
      tmpl[i] = int'($urandom_range(2 * (SMAX - 4 * OFS))) - (SMAX - 4 * OFS);
      lo[i] = (i < N_TMPL) ? clampv(tmpl[i] - OFS) : SMIN;
      up[i] = (i < N_TMPL) ? clampv(tmpl[i] + OFS) : SMAX;
    end
    foreach (lane_hit[j]) lane_hit[j] = 0;

    // Event plan (time index of the first template sample). The cfg phase
    // writes N_CMP limits, waits, then the threshold.
    cfg_end = N_CMP + 3 + TL + 4;
    thr_w1  = cfg_end;                        // threshold = THR
    ev = (cfg_end + TL + 4) * D + SPAN;       // first sample position usable
    ev_t[0] = ev + 3;                  ev_miss[0] = 0;   // match
    ev_t[1] = ev_t[0] + SPAN + D + 1;     ev_miss[1] = 0;   // inside hold-off
    ev_t[2] = ev_t[1] + (HOLD + TLEN + NST + 8) * D + SPAN + 5; ev_miss[2] = N_CMP - THR; // near miss
    ev_t[3] = ev_t[2] + 2 * SPAN + (HOLD + 8) * D + 2; ev_miss[3] = 0; // match, other lane
    thr_w2  = (ev_t[3] + SPAN) / D + HOLD + 2 * TL + 10;   // threshold = N_CMP
    ev_t[4] = (thr_w2 + TL + 4) * D + 7;  ev_miss[4] = 0; // while disabled
    thr_w3  = (ev_t[4] + SPAN) / D + TL + 10;             // threshold = THR again
    ev_t[5] = (thr_w3 + TL + 4) * D + 2 * D + 1 + SPAN; ev_miss[5] = 0;
    if ((ev_t[5] + SPAN) / D + NST + TLEN + 10 > NBEATS) $fatal(1, "NBEATS too small");
    for (int k = 0; k < 6; k++) place(ev_t[k], ev_miss[k]);
    for (int c = 0; c < NBEATS; c++)
      thr_at[c] = (c + TL < thr_w1) ? N_CMP : (c + TL < thr_w2) ? THR : (c + TL < thr_w3) ? N_CMP : THR;

    // golden valid and trigger per beat
    trig_end = -1; hold_until = 0;
    for (int c = 0; c < NBEATS; c++) begin
      bit m;
      m = 0;
      for (int j = 0; j < D; j++) begin
        int s;
        s = score(c, j);
        if (s > thr_at[c]) begin m = 1; lane_hit[j] = 1; end
        if (s == thr_at[c] && thr_at[c] == THR) n_near++;
        if (s == N_CMP && thr_at[c] == N_CMP) n_disabled++;
      end
      if (m && c >= hold_until) begin
        trig_end = c + TLEN; hold_until = c + HOLD + 1; n_trig++;
      end else if (m) n_hold++;
      texp[c] = (c < trig_end);
    end

    cfg = '0;
    for (int m = 0; m < D; m++) in_data[m] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    e = 0;
    for (int c = 0; c < NBEATS; c++) begin
      int beat_out;
      cfg = '0;
      if (c < N_CMP) begin
        cfg_write(wm_pkg::ADDR_LIMIT_BASE + 16'(c), {16'(up[c]), 16'(lo[c])});
      end else if (c == N_CMP)     cfg_write(wm_pkg::ADDR_TRIG_LEN, 32'(TLEN));
      else if (c == N_CMP + 1)     cfg_write(wm_pkg::ADDR_HOLDOFF, 32'(HOLD));
      else if (c == thr_w1 - 1)    cfg_write(wm_pkg::ADDR_THRESHOLD, 32'(THR));
      else if (c == thr_w2 - 1)    cfg_write(wm_pkg::ADDR_THRESHOLD, 32'(N_CMP));
      else if (c == thr_w3 - 1)    cfg_write(wm_pkg::ADDR_THRESHOLD, 32'(THR));
      for (int m = 0; m < D; m++) in_data[m] = P'(x(c * D + m));
      @(posedge clk); #1;
      // after edge c: beat c is in SRG stage 0
      beat_out = c - NST + 1;
      for (int m = 0; m < D; m++) begin
        checks++;
        if (int'(out_data[m]) != x(beat_out * D + m)) failures++;
      end
      if (c - TL >= 0) begin
        for (int j = 0; j < D; j++) begin
          checks++;
          if (valid[j] != (score(c - TL, j) > thr_at[c - TL])) begin
            failures++;
            if (failures < 10) $display("beat %0d lane %0d valid=%0b score=%0d", c - TL, j, valid[j], score(c - TL, j));
          end
        end
      end
      if (c - TL - 1 >= 0) begin
        checks++;
        if (trigger != texp[c - TL - 1]) begin
          failures++;
          if (failures < 10) $display("edge %0d trigger=%0b exp=%0b", c, trigger, texp[c - TL - 1]);
        end
        // synchronisation: on a rising trigger, the output beat must hold the
        // first template sample of an event (or precede it by one beat),
        // shifted earlier by the positional buffer
        if (texp[c - TL - 1] && (c - TL - 2 < 0 || !texp[c - TL - 2])) begin
          bit ok;
          ok = 0;
          for (int k = 0; k < 6; k++) begin
            int sb;
            sb = ev_t[k] / D - PBB;
            if (beat_out == sb || beat_out == sb - 1) ok = 1;
          end
          checks++;
          if (!ok) begin failures++; $display("trigger at output beat %0d not aligned", beat_out); end
          else n_sync++;
        end
      end
    end

    begin
      int lanes;
      lanes = 0;
      foreach (lane_hit[j]) lanes += int'(lane_hit[j]);
      $display("triggers=%0d held-off=%0d near-miss=%0d disabled=%0d aligned=%0d lanes=%0d",
               n_trig, n_hold, n_near, n_disabled, n_sync, lanes);
      checks += 6;
      if (n_trig < 3) failures++;
      if (n_hold == 0) failures++;
      if (n_near == 0) failures++;
      if (n_disabled == 0) failures++;
      if (n_sync < 3) failures++;
      if (lanes < 2) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mirror of the DUT's suppressed flag: every suppressed match is a match
  always @(posedge clk) if (rst_n && suppressed && valid == '0) begin
    failures++;
    $display("suppressed without a match");
  end
