// tb_wm_config_regs -- register file of a 20-position template, P = 14.
// Checks the reset values (nothing can match, threshold = N), then random
// writes to limits, threshold, trigger length and hold-off against a software
// copy of the register map, including writes to unmapped addresses (one past
// the last limit, and between the scalar registers and the limit block),
// which must change nothing.
module tb_wm_config_regs;
  import wm_pkg::*;
  localparam int P = 14, N = 20, SW = 5, CW = 24;
  logic clk = 0, rst_n = 0;
  cfg_req_t cfg;
  logic signed [P-1:0] lower [N], upper [N];
  logic [SW-1:0] thr;
  logic [CW-1:0] tlen, hoff;
  int checks = 0, failures = 0;
  int m_lo [N], m_up [N], m_thr, m_tlen, m_hoff;

  wm_config_regs #(.P(P), .N_CMP(N)) dut (.clk, .rst_n, .cfg_i(cfg), .lower_o(lower), .upper_o(upper),
    .threshold_o(thr), .trig_len_o(tlen), .holdoff_o(hoff));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare();
    for (int i = 0; i < N; i++) begin
      checks += 2;
      if (int'(lower[i]) != m_lo[i]) failures++;
      if (int'(upper[i]) != m_up[i]) failures++;
    end
    checks += 3;
    if (int'(thr) != m_thr) failures++;
    if (int'(tlen) != m_tlen) failures++;
    if (int'(hoff) != m_hoff) failures++;
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < N; i++) begin m_lo[i] = 8191; m_up[i] = -8192; end
    m_thr = N; m_tlen = 1; m_hoff = 0;
    compare();
    for (int c = 0; c < 3000; c++) begin
      int kind;
      kind = int'($urandom_range(9));
      cfg.we = ($urandom_range(3) != 0);
      cfg.wdata = $urandom;
      case (kind)
        0: cfg.addr = ADDR_THRESHOLD;
        1: cfg.addr = ADDR_TRIG_LEN;
        2: cfg.addr = ADDR_HOLDOFF;
        3: cfg.addr = ADDR_LIMIT_BASE + CFG_AW'(N);           // unmapped
        4: cfg.addr = CFG_AW'(3 + $urandom_range(100));         // unmapped
        default: cfg.addr = ADDR_LIMIT_BASE + CFG_AW'($urandom_range(N-1));
      endcase
      @(posedge clk); #1;
      if (cfg.we) begin
        if (cfg.addr == ADDR_THRESHOLD) m_thr = int'(cfg.wdata[SW-1:0]);
        else if (cfg.addr == ADDR_TRIG_LEN) m_tlen = int'(cfg.wdata[CW-1:0]);
        else if (cfg.addr == ADDR_HOLDOFF) m_hoff = int'(cfg.wdata[CW-1:0]);
        else if (cfg.addr >= ADDR_LIMIT_BASE && cfg.addr < ADDR_LIMIT_BASE + CFG_AW'(N)) begin
          int i, lo, up;
          i = int'(cfg.addr - ADDR_LIMIT_BASE);
          lo = int'(cfg.wdata[13:0]); if (lo >= 8192) lo -= 16384;
          up = int'(cfg.wdata[29:16]); if (up >= 8192) up -= 16384;
          m_lo[i] = lo; m_up[i] = up;
        end
      end
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
