// denoiser: fully convolutional waveform-cleaning network of the trigger.
//
// Maps one normalised 128-sample trace x to a cleaned trace y of the same
// length. The layer sequence follows the network diagram: ten Conv1D+ReLU
// layers with 4 filters and kernel sizes 3,3,3,3,2,3,3,2,3,2, then a Conv1D
// with kernel 1 and a single filter and no activation. The skip connection of
// the diagram, which runs from the network input to that last layer, is
// realised as an addition of x (broadcast to the 4 channels) to the output of
// the tenth layer; the sum is what the k=1 projection sees. Every weight,
// bias, layer result and the skip sum use the global ap_fixed<14,8> format
// (round to nearest, saturate). Where exactly the sum is taken is this
// design's reading of the diagram.
//
// Each layer is a conv1d_layer holding its own output frame in registers; the
// layers run one after the other (128 clocks each), so a trace takes
// 11 * (128 + 1) clocks from 'start' to 'done'. x_fm must stay stable until
// 'done'. The cleaned samples also leave as a stream (y_wr, y_idx, y_data)
// while the last layer runs, and the whole frame stays in y_fm until the next
// start. Weights are loaded over cfg (addresses ht_pkg::den_base()).
module denoiser
  import ht_pkg::*;
#(
  parameter int LEN = 128,
  localparam int NL = DEN_NL,
  localparam int F  = 4,
  localparam int LW = $clog2(LEN)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  cfg_wr_t                 cfg,
  input  logic                    start,
  output logic                    busy,
  output logic                    done,
  input  logic signed [DEN_W-1:0] x_fm [LEN][1],
  output logic signed [DEN_W-1:0] y_fm [LEN][1],
  output logic                    y_wr,
  output logic [LW-1:0]           y_idx,
  output logic signed [DEN_W-1:0] y_data
);

  logic signed [DEN_W-1:0] fm     [NL-1][LEN][F];
  logic signed [DEN_W-1:0] res_in [LEN][F];
  logic [NL-1:0] l_start, l_busy, l_done;

  // layer i starts when layer i-1 is done
  assign l_start = {l_done[NL-2:0], start};
  assign busy    = |l_busy;
  assign done    = l_done[NL-1];

  // unused per-layer streams of the hidden layers
  logic                    h_wr  [NL-1];
  logic [LW-1:0]           h_idx [NL-1];
  logic signed [DEN_W-1:0] h_vec [NL-1][F];

  conv1d_layer #(
    .LEN(LEN), .CIN(DEN_CIN[0]), .COUT(DEN_COUT[0]), .K(DEN_K[0]), .POOL(1), .RELU(1'b1),
    .IN_W(DEN_W), .IN_F(DEN_F), .W_W(DEN_W), .W_F(DEN_F), .B_W(DEN_W), .B_F(DEN_F),
    .R_W(DEN_W), .R_F(DEN_F), .O_W(DEN_W), .O_F(DEN_F), .CFG_BASE(den_base(0))
  ) u_l0 (
    .clk, .rst_n, .cfg, .start(l_start[0]), .busy(l_busy[0]), .done(l_done[0]),
    .in_fm(x_fm), .out_fm(fm[0]), .out_wr(h_wr[0]), .out_idx(h_idx[0]), .out_vec(h_vec[0])
  );

  for (genvar i = 1; i < NL - 1; i++) begin : g_hidden
    conv1d_layer #(
      .LEN(LEN), .CIN(DEN_CIN[i]), .COUT(DEN_COUT[i]), .K(DEN_K[i]), .POOL(1), .RELU(1'b1),
      .IN_W(DEN_W), .IN_F(DEN_F), .W_W(DEN_W), .W_F(DEN_F), .B_W(DEN_W), .B_F(DEN_F),
      .R_W(DEN_W), .R_F(DEN_F), .O_W(DEN_W), .O_F(DEN_F), .CFG_BASE(den_base(i))
    ) u_l (
      .clk, .rst_n, .cfg, .start(l_start[i]), .busy(l_busy[i]), .done(l_done[i]),
      .in_fm(fm[i-1]), .out_fm(fm[i]), .out_wr(h_wr[i]), .out_idx(h_idx[i]), .out_vec(h_vec[i])
    );
  end

  // skip connection: input added to every channel of the last hidden layer
  always_comb begin
    for (int p = 0; p < LEN; p++)
      for (int c = 0; c < F; c++)
        res_in[p][c] = DEN_W'(fx_requant(64'(fm[NL-2][p][c]) + 64'(x_fm[p][0]),
                                         DEN_F, DEN_W, DEN_F));
  end

  logic signed [DEN_W-1:0] y_vec [1];

  conv1d_layer #(
    .LEN(LEN), .CIN(DEN_CIN[NL-1]), .COUT(DEN_COUT[NL-1]), .K(DEN_K[NL-1]), .POOL(1),
    .RELU(1'b0),
    .IN_W(DEN_W), .IN_F(DEN_F), .W_W(DEN_W), .W_F(DEN_F), .B_W(DEN_W), .B_F(DEN_F),
    .R_W(DEN_W), .R_F(DEN_F), .O_W(DEN_W), .O_F(DEN_F), .CFG_BASE(den_base(NL-1))
  ) u_out (
    .clk, .rst_n, .cfg, .start(l_start[NL-1]), .busy(l_busy[NL-1]), .done(l_done[NL-1]),
    .in_fm(res_in), .out_fm(y_fm), .out_wr(y_wr), .out_idx(y_idx), .out_vec(y_vec)
  );

  assign y_data = y_vec[0];

endmodule
