// wm_config_regs -- run-time registers of the waveform matcher.
//
// Holds, for every template position i, the precomputed interval limits
// o_i,lowerLimit and o_i,upperLimit (template value minus/plus the chosen
// offset), the match threshold m_threshold, and the trigger duration and
// hold-off lengths of the trigger logic. The limits are the same for every
// matcher, so one copy feeds all D matchers (the block diagram draws the limit
// registers inside each comparator; sharing them is this design's choice).
// Written through a single-cycle write port (wm_pkg::cfg_req_t), address map
// in wm_pkg; the bus itself is this design's choice. Writes to unmapped
// addresses are ignored. After reset no position can match (lower = most
// positive, upper = most negative) and the threshold is N_CMP, so nothing
// triggers until the registers have been written.
module wm_config_regs #(
  parameter int unsigned P     = wm_pkg::P_DEFAULT,
  parameter int unsigned N_CMP = wm_pkg::N_CMP_DEFAULT,
  localparam int unsigned SW   = wm_pkg::score_width(N_CMP),
  localparam int unsigned CW   = wm_pkg::CNT_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  wm_pkg::cfg_req_t    cfg_i,
  output logic signed [P-1:0] lower_o [N_CMP],
  output logic signed [P-1:0] upper_o [N_CMP],
  output logic [SW-1:0]       threshold_o,
  output logic [CW-1:0]       trig_len_o,
  output logic [CW-1:0]       holdoff_o
);
  import wm_pkg::*;

  localparam logic signed [P-1:0] S_MAX = {1'b0, {(P-1){1'b1}}};
  localparam logic signed [P-1:0] S_MIN = {1'b1, {(P-1){1'b0}}};

  logic                    limit_sel;
  logic [CFG_AW-1:0]       limit_idx;

  always_comb begin
    limit_sel = cfg_i.we && (cfg_i.addr >= ADDR_LIMIT_BASE)
                && ((cfg_i.addr - ADDR_LIMIT_BASE) < CFG_AW'(N_CMP));
    limit_idx = cfg_i.addr - ADDR_LIMIT_BASE;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      threshold_o <= SW'(N_CMP);
      trig_len_o  <= CW'(1);
      holdoff_o   <= '0;
    end else if (cfg_i.we) begin
      unique case (cfg_i.addr)
        ADDR_THRESHOLD: threshold_o <= cfg_i.wdata[SW-1:0];
        ADDR_TRIG_LEN:  trig_len_o  <= cfg_i.wdata[CW-1:0];
        ADDR_HOLDOFF:   holdoff_o   <= cfg_i.wdata[CW-1:0];
        default: ;
      endcase
    end
  end

  for (genvar i = 0; i < N_CMP; i++) begin : g_lim
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        lower_o[i] <= S_MAX;
        upper_o[i] <= S_MIN;
      end else if (limit_sel && limit_idx == CFG_AW'(i)) begin
        lower_o[i] <= cfg_i.wdata[P-1:0];
        upper_o[i] <= cfg_i.wdata[16 +: P];
      end
    end
  end
endmodule
