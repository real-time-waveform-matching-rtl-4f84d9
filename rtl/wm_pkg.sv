// wm_pkg -- shared constants, types and sizing arithmetic of the parallel
// interval-matching waveform trigger.
//
// The trigger takes D samples of P bits per clock (D = 32, P = 14 gives
// 10 GS/s at 312.5 MHz), keeps them in a shift register (SRG) and compares D
// overlapping windows of the stream against a template of N_CMP intervals
// every cycle. The defaults below are the numbers of the design this RTL
// follows: D = 32, P = 14, a template of 1400 comparators, stride 1.
//
// The SRG length follows l_SRG = n + l*d + l_positionalBuffer, with the
// circuit latency l counted in clock cycles from a beat entering the SRG to
// the registered trigger output; n is widened to the n + d - 1 samples the d
// windows cover together and the sum is rounded up to whole SRG stages.
// The configuration bus (one write port, address map below) is this design's
// own choice: the host-side control bus of the digitizer is not specified.
package wm_pkg;

  // ---- default sizes ------------------------------------------------------
  parameter int unsigned D_DEFAULT       = 32;    // samples per clock
  parameter int unsigned P_DEFAULT       = 14;    // bits per sample
  parameter int unsigned N_CMP_DEFAULT   = 1400;  // comparators per matcher
  parameter int unsigned STRIDE_DEFAULT  = 1;     // template sub-sampling factor
  parameter int unsigned POS_BUF_DEFAULT = 0;     // samples kept ahead of the template

  // Width of the trigger duration / hold-off counters (cycles).
  parameter int unsigned CNT_W = 24;

  // ---- configuration bus --------------------------------------------------
  // A single-cycle write: when we=1, wdata is stored at addr.
  //   ADDR_THRESHOLD : m_threshold, a match needs score > m_threshold
  //   ADDR_TRIG_LEN  : cycles the trigger stays high after an accepted match
  //   ADDR_HOLDOFF   : cycles after an accepted match in which matches are ignored
  //   ADDR_LIMIT_BASE + i : template position i,
  //                    wdata[15:0] = lower limit, wdata[31:16] = upper limit
  //                    (two's complement, the low P bits of each half are used)
  parameter int unsigned CFG_AW = 16;
  parameter int unsigned CFG_DW = 32;
  parameter logic [CFG_AW-1:0] ADDR_THRESHOLD  = 16'h0000;
  parameter logic [CFG_AW-1:0] ADDR_TRIG_LEN   = 16'h0001;
  parameter logic [CFG_AW-1:0] ADDR_HOLDOFF    = 16'h0002;
  parameter logic [CFG_AW-1:0] ADDR_LIMIT_BASE = 16'h8000;

  typedef struct packed {
    logic              we;
    logic [CFG_AW-1:0] addr;
    logic [CFG_DW-1:0] wdata;
  } cfg_req_t;

  // ---- sizing arithmetic --------------------------------------------------
  // Number of registered levels of the adder tree that sums n one-bit hits.
  function automatic int unsigned tree_levels(int unsigned n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction

  // Width of a score 0..n.
  function automatic int unsigned score_width(int unsigned n);
    return $clog2(n + 1);
  endfunction

  // Samples spanned by a template of n comparators taken every stride samples.
  function automatic int unsigned template_span(int unsigned n, int unsigned stride);
    return (n - 1) * stride + 1;
  endfunction

  // Latency l in cycles: adder-tree levels plus the trigger register.
  function automatic int unsigned match_latency(int unsigned n);
    return tree_levels(n) + 1;
  endfunction

  // SRG stages: l_SRG = n + l*d + l_positionalBuffer, in whole stages of d.
  // The d windows together span n + d - 1 samples (SRG[0 : n+d-2]), so that
  // many samples are the matched part; rounding it up to whole stages makes
  // the trigger rise on the outgoing beat that holds the first template
  // sample, or on the beat before it.
  function automatic int unsigned srg_stages(int unsigned d, int unsigned n,
                                             int unsigned stride, int unsigned pos_buf);
    return (template_span(n, stride) + d - 1 + d - 1) / d + match_latency(n)
           + (pos_buf + d - 1) / d;
  endfunction

endpackage
