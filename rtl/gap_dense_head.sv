// gap_dense_head: decision head of the classifier, GlobalAveragePooling
// followed by Dense(1).
//
// The LEN x C feature map of the last classifier block (ap_fixed<15,7>) is
// averaged over positions per channel and converted to the GAP result type
// ap_fixed<15,7>; the C averages are then weighted (ap_fixed<6,1> weights),
// a bias (ap_fixed<6,1>) is added and the sum is converted once to the Dense
// result type ap_fixed<15,6>. All conversions round to nearest and saturate.
// The formats are the classifier's published ones; LEN must be a power of two
// so the average is an exact shift. The head has no output activation: its
// score is the pre-sigmoid value, and thresholding it is equivalent to
// thresholding the signal probability, because the sigmoid is monotonic.
//
// Timing: 'done' and 'score' are registered one clock after 'start';
// 'score' then holds until the next start. Weights: cfg words
// CFG_BASE + c (weights) and CFG_BASE + C (bias).
module gap_dense_head
  import ht_pkg::*;
#(
  parameter int LEN      = 2,
  parameter int C        = 4,
  parameter int IN_W     = 15,
  parameter int IN_F     = 8,
  parameter int CFG_BASE = clf_base(CLF_NB),
  localparam int GAP_F   = GAP_W - GAP_I,
  localparam int W_F     = HD_WW - HD_WI,
  localparam int B_F     = HD_BW - HD_BI
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_wr_t                   cfg,
  input  logic                      start,
  output logic                      done,
  input  logic signed [IN_W-1:0]    in_fm [LEN][C],
  output logic signed [SCORE_W-1:0] score
);

  localparam int LW = $clog2(LEN);

  logic signed [HD_WW-1:0] w [C];
  logic signed [HD_BW-1:0] b;

  for (genvar c = 0; c < C; c++) begin : g_w
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) w[c] <= '0;
      else if (cfg.we && cfg.addr == CFG_AW'(CFG_BASE + c)) w[c] <= cfg.data[HD_WW-1:0];
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) b <= '0;
    else if (cfg.we && cfg.addr == CFG_AW'(CFG_BASE + C)) b <= cfg.data[HD_BW-1:0];
  end

  logic signed [GAP_W-1:0] gap [C];
  logic signed [63:0]      acc;

  always_comb begin
    acc = 64'(b) <<< (GAP_F + W_F - B_F);
    for (int c = 0; c < C; c++) begin
      logic signed [63:0] s;
      s = '0;
      for (int p = 0; p < LEN; p++) s += 64'(in_fm[p][c]);
      gap[c] = GAP_W'(fx_requant(s, IN_F + LW, GAP_W, GAP_F));
      acc += 64'(gap[c]) * 64'(w[c]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done  <= 1'b0;
      score <= '0;
    end else begin
      done <= start;
      if (start) score <= SCORE_W'(fx_requant(acc, GAP_F + W_F, SCORE_W, SCORE_F));
    end
  end

endmodule
