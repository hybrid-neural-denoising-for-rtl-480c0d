// classifier: six-block Conv1D network that scores one denoised trace.
//
// Blocks 1..6 are Conv1D (kernel 3) + ReLU + MaxPool(2) with 4, 4, 2, 2, 6
// and 4 filters; the frame shrinks 128 -> 64 -> 32 -> 16 -> 8 -> 4 -> 2. Every
// block uses its own published fixed-point formats for weights, biases, the
// Conv1D result and the ReLU/MaxPool result (see ht_pkg CLF_* tables). The
// input is the denoiser's ap_fixed<14,8> trace, used as it is. The head
// (gap_dense_head) averages the 2 x 4 result and applies Dense(1), giving the
// ap_fixed<15,6> score.
//
// The blocks run one after the other: 128 + 64 + 32 + 16 + 8 + 4 clocks plus
// one per block hand-over and one for the head, 259 clocks from 'start' to
// 'done'. x_fm must stay stable until 'done'; 'score' holds until the next
// run. Weights are loaded over cfg (addresses ht_pkg::clf_base()).
module classifier
  import ht_pkg::*;
#(
  parameter int LEN  = 128,
  parameter int IN_W = DEN_W,
  parameter int IN_I = DEN_I
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  cfg_wr_t                   cfg,
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  input  logic signed [IN_W-1:0]    x_fm [LEN][1],
  output logic signed [SCORE_W-1:0] score
);

  logic [CLF_NB:0] b_start, b_busy, b_done;
  logic            h_done;

  assign b_start[0] = start;
  logic signed [CLF_AW[0]-1:0] fm0 [(LEN >> 1)][CLF_COUT[0]];
  logic signed [CLF_AW[1]-1:0] fm1 [(LEN >> 2)][CLF_COUT[1]];
  logic signed [CLF_AW[2]-1:0] fm2 [(LEN >> 3)][CLF_COUT[2]];
  logic signed [CLF_AW[3]-1:0] fm3 [(LEN >> 4)][CLF_COUT[3]];
  logic signed [CLF_AW[4]-1:0] fm4 [(LEN >> 5)][CLF_COUT[4]];
  logic signed [CLF_AW[5]-1:0] fm5 [(LEN >> 6)][CLF_COUT[5]];

  logic                         b0_wr;
  logic [$clog2(LEN)-1:0]      b0_idx;
  logic signed [CLF_AW[0]-1:0] b0_vec [CLF_COUT[0]];

  conv1d_layer #(
    .LEN(LEN), .CIN(CLF_CIN[0]), .COUT(CLF_COUT[0]), .K(CLF_K[0]), .POOL(2), .RELU(1'b1),
    .IN_W(IN_W), .IN_F(IN_W - IN_I),
    .W_W(CLF_WW[0]), .W_F(CLF_WW[0] - CLF_WI[0]),
    .B_W(CLF_BW[0]), .B_F(CLF_BW[0] - CLF_BI[0]),
    .R_W(CLF_RW[0]), .R_F(CLF_RW[0] - CLF_RI[0]),
    .O_W(CLF_AW[0]), .O_F(CLF_AW[0] - CLF_AI[0]),
    .CFG_BASE(clf_base(0))
  ) u_b1 (
    .clk, .rst_n, .cfg, .start(b_start[0]), .busy(b_busy[0]), .done(b_done[0]),
    .in_fm(x_fm), .out_fm(fm0), .out_wr(b0_wr), .out_idx(b0_idx), .out_vec(b0_vec)
  );
  assign b_start[1] = b_done[0];

  logic                         b1_wr;
  logic [$clog2((LEN >> 1))-1:0]      b1_idx;
  logic signed [CLF_AW[1]-1:0] b1_vec [CLF_COUT[1]];

  conv1d_layer #(
    .LEN((LEN >> 1)), .CIN(CLF_CIN[1]), .COUT(CLF_COUT[1]), .K(CLF_K[1]), .POOL(2), .RELU(1'b1),
    .IN_W(CLF_AW[0]), .IN_F(CLF_AW[0] - CLF_AI[0]),
    .W_W(CLF_WW[1]), .W_F(CLF_WW[1] - CLF_WI[1]),
    .B_W(CLF_BW[1]), .B_F(CLF_BW[1] - CLF_BI[1]),
    .R_W(CLF_RW[1]), .R_F(CLF_RW[1] - CLF_RI[1]),
    .O_W(CLF_AW[1]), .O_F(CLF_AW[1] - CLF_AI[1]),
    .CFG_BASE(clf_base(1))
  ) u_b2 (
    .clk, .rst_n, .cfg, .start(b_start[1]), .busy(b_busy[1]), .done(b_done[1]),
    .in_fm(fm0), .out_fm(fm1), .out_wr(b1_wr), .out_idx(b1_idx), .out_vec(b1_vec)
  );
  assign b_start[2] = b_done[1];

  logic                         b2_wr;
  logic [$clog2((LEN >> 2))-1:0]      b2_idx;
  logic signed [CLF_AW[2]-1:0] b2_vec [CLF_COUT[2]];

  conv1d_layer #(
    .LEN((LEN >> 2)), .CIN(CLF_CIN[2]), .COUT(CLF_COUT[2]), .K(CLF_K[2]), .POOL(2), .RELU(1'b1),
    .IN_W(CLF_AW[1]), .IN_F(CLF_AW[1] - CLF_AI[1]),
    .W_W(CLF_WW[2]), .W_F(CLF_WW[2] - CLF_WI[2]),
    .B_W(CLF_BW[2]), .B_F(CLF_BW[2] - CLF_BI[2]),
    .R_W(CLF_RW[2]), .R_F(CLF_RW[2] - CLF_RI[2]),
    .O_W(CLF_AW[2]), .O_F(CLF_AW[2] - CLF_AI[2]),
    .CFG_BASE(clf_base(2))
  ) u_b3 (
    .clk, .rst_n, .cfg, .start(b_start[2]), .busy(b_busy[2]), .done(b_done[2]),
    .in_fm(fm1), .out_fm(fm2), .out_wr(b2_wr), .out_idx(b2_idx), .out_vec(b2_vec)
  );
  assign b_start[3] = b_done[2];

  logic                         b3_wr;
  logic [$clog2((LEN >> 3))-1:0]      b3_idx;
  logic signed [CLF_AW[3]-1:0] b3_vec [CLF_COUT[3]];

  conv1d_layer #(
    .LEN((LEN >> 3)), .CIN(CLF_CIN[3]), .COUT(CLF_COUT[3]), .K(CLF_K[3]), .POOL(2), .RELU(1'b1),
    .IN_W(CLF_AW[2]), .IN_F(CLF_AW[2] - CLF_AI[2]),
    .W_W(CLF_WW[3]), .W_F(CLF_WW[3] - CLF_WI[3]),
    .B_W(CLF_BW[3]), .B_F(CLF_BW[3] - CLF_BI[3]),
    .R_W(CLF_RW[3]), .R_F(CLF_RW[3] - CLF_RI[3]),
    .O_W(CLF_AW[3]), .O_F(CLF_AW[3] - CLF_AI[3]),
    .CFG_BASE(clf_base(3))
  ) u_b4 (
    .clk, .rst_n, .cfg, .start(b_start[3]), .busy(b_busy[3]), .done(b_done[3]),
    .in_fm(fm2), .out_fm(fm3), .out_wr(b3_wr), .out_idx(b3_idx), .out_vec(b3_vec)
  );
  assign b_start[4] = b_done[3];

  logic                         b4_wr;
  logic [$clog2((LEN >> 4))-1:0]      b4_idx;
  logic signed [CLF_AW[4]-1:0] b4_vec [CLF_COUT[4]];

  conv1d_layer #(
    .LEN((LEN >> 4)), .CIN(CLF_CIN[4]), .COUT(CLF_COUT[4]), .K(CLF_K[4]), .POOL(2), .RELU(1'b1),
    .IN_W(CLF_AW[3]), .IN_F(CLF_AW[3] - CLF_AI[3]),
    .W_W(CLF_WW[4]), .W_F(CLF_WW[4] - CLF_WI[4]),
    .B_W(CLF_BW[4]), .B_F(CLF_BW[4] - CLF_BI[4]),
    .R_W(CLF_RW[4]), .R_F(CLF_RW[4] - CLF_RI[4]),
    .O_W(CLF_AW[4]), .O_F(CLF_AW[4] - CLF_AI[4]),
    .CFG_BASE(clf_base(4))
  ) u_b5 (
    .clk, .rst_n, .cfg, .start(b_start[4]), .busy(b_busy[4]), .done(b_done[4]),
    .in_fm(fm3), .out_fm(fm4), .out_wr(b4_wr), .out_idx(b4_idx), .out_vec(b4_vec)
  );
  assign b_start[5] = b_done[4];

  logic                         b5_wr;
  logic [$clog2((LEN >> 5))-1:0]      b5_idx;
  logic signed [CLF_AW[5]-1:0] b5_vec [CLF_COUT[5]];

  conv1d_layer #(
    .LEN((LEN >> 5)), .CIN(CLF_CIN[5]), .COUT(CLF_COUT[5]), .K(CLF_K[5]), .POOL(2), .RELU(1'b1),
    .IN_W(CLF_AW[4]), .IN_F(CLF_AW[4] - CLF_AI[4]),
    .W_W(CLF_WW[5]), .W_F(CLF_WW[5] - CLF_WI[5]),
    .B_W(CLF_BW[5]), .B_F(CLF_BW[5] - CLF_BI[5]),
    .R_W(CLF_RW[5]), .R_F(CLF_RW[5] - CLF_RI[5]),
    .O_W(CLF_AW[5]), .O_F(CLF_AW[5] - CLF_AI[5]),
    .CFG_BASE(clf_base(5))
  ) u_b6 (
    .clk, .rst_n, .cfg, .start(b_start[5]), .busy(b_busy[5]), .done(b_done[5]),
    .in_fm(fm4), .out_fm(fm5), .out_wr(b5_wr), .out_idx(b5_idx), .out_vec(b5_vec)
  );
  assign b_start[6] = b_done[5];

  gap_dense_head #(
    .LEN(LEN >> CLF_NB), .C(CLF_COUT[CLF_NB-1]),
    .IN_W(CLF_AW[CLF_NB-1]), .IN_F(CLF_AW[CLF_NB-1] - CLF_AI[CLF_NB-1]),
    .CFG_BASE(clf_base(CLF_NB))
  ) u_head (
    .clk, .rst_n, .cfg, .start(b_start[CLF_NB]), .done(h_done), .in_fm(fm5), .score
  );

  assign b_busy[CLF_NB] = b_start[CLF_NB];
  assign b_done[CLF_NB] = h_done;
  assign busy = |b_busy;
  assign done = h_done;

endmodule
