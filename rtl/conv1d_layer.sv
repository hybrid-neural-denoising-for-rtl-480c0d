// conv1d_layer: one fixed-point Conv1D layer of the trigger networks, with
// optional ReLU and optional MaxPool of size 2.
//
// The layer reads a whole input feature map (LEN positions x CIN channels),
// held in registers by the layer before it, and produces one convolution
// position per clock with all COUT output channels computed in parallel
// (K*CIN*COUT multipliers). Padding is Keras 'same': PAD_L = (K-1)/2 zeros on
// the left and K-1-PAD_L on the right, so the convolution keeps LEN positions.
// Each output is the exact sum of products plus bias, converted once to the
// layer's Conv1D result type <R_W, R_F fractional bits> and then, after the
// optional ReLU, to the activation type <O_W, O_F>; both conversions round to
// nearest (ties up) and saturate. With POOL = 2, pairs of activations
// (2q, 2q+1) are reduced by max to position q, so LEN/POOL positions are
// written. The kernel sizes, filter counts and bit widths come from the
// network description; padding, pool size, the single final rounding and the
// one-position-per-clock schedule are this design's choices.
//
// Weights w[o][c][k] and biases b[o] live in registers reset to zero and are
// written over the cfg bus: word CFG_BASE + (o*CIN + c)*K + k holds a weight,
// word CFG_BASE + COUT*CIN*K + o holds a bias.
//
// Timing: a one-cycle start pulse while idle begins a run; busy stays high
// for LEN cycles; out_wr pulses with each written position (out_idx, out_vec,
// which also land in out_fm); done pulses one cycle after the last write.
// in_fm must stay stable while busy.
module conv1d_layer
  import ht_pkg::*;
#(
  parameter int LEN      = 128,
  parameter int CIN      = 1,
  parameter int COUT     = 4,
  parameter int K        = 3,
  parameter int POOL     = 1,
  parameter bit RELU     = 1'b1,
  parameter int IN_W     = 14,
  parameter int IN_F     = 6,
  parameter int W_W      = 14,
  parameter int W_F      = 6,
  parameter int B_W      = 14,
  parameter int B_F      = 6,
  parameter int R_W      = 14,
  parameter int R_F      = 6,
  parameter int O_W      = 14,
  parameter int O_F      = 6,
  parameter int CFG_BASE = 0,
  localparam int LEN_OUT = LEN / POOL,
  localparam int PW      = (LEN > 1) ? $clog2(LEN) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  cfg_wr_t               cfg,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  input  logic signed [IN_W-1:0] in_fm  [LEN][CIN],
  output logic signed [O_W-1:0]  out_fm [LEN_OUT][COUT],
  output logic                  out_wr,
  output logic [PW-1:0]         out_idx,
  output logic signed [O_W-1:0]  out_vec [COUT]
);

  localparam int PAD_L  = (K - 1) / 2;
  localparam int OW     = (LEN_OUT > 1) ? $clog2(LEN_OUT) : 1;
  localparam int PROD_F = IN_F + W_F;
  localparam int NW     = COUT * CIN * K;
  localparam int ACC_W  = ((IN_W + W_W) > (B_W + PROD_F - B_F) ? (IN_W + W_W)
                                                                : (B_W + PROD_F - B_F))
                          + $clog2(K * CIN + 1) + 2;

  // ---------------------------------------------------------------- weights
  logic signed [W_W-1:0] w [COUT][CIN][K];
  logic signed [B_W-1:0] b [COUT];

  for (genvar o = 0; o < COUT; o++) begin : g_wo
    for (genvar c = 0; c < CIN; c++) begin : g_wc
      for (genvar k = 0; k < K; k++) begin : g_wk
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) w[o][c][k] <= '0;
          else if (cfg.we && cfg.addr == CFG_AW'(CFG_BASE + (o * CIN + c) * K + k))
            w[o][c][k] <= cfg.data[W_W-1:0];
        end
      end
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) b[o] <= '0;
      else if (cfg.we && cfg.addr == CFG_AW'(CFG_BASE + NW + o))
        b[o] <= cfg.data[B_W-1:0];
    end
  end

  // ------------------------------------------------------------ sequencing
  logic [PW-1:0] pos;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      pos  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          pos  <= '0;
        end
      end else begin
        pos <= pos + 1'b1;
        if (pos == PW'(LEN - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // ----------------------------------------------- one position, all outputs
  logic signed [O_W-1:0] act [COUT];

  always_comb begin
    for (int o = 0; o < COUT; o++) begin
      logic signed [ACC_W-1:0] acc;
      logic signed [63:0]      r;
      acc = ACC_W'(b[o]) <<< (PROD_F - B_F);
      for (int k = 0; k < K; k++) begin
        int ip;
        ip = int'(pos) + k - PAD_L;
        if (ip >= 0 && ip < LEN) begin
          for (int c = 0; c < CIN; c++) begin
            acc += ACC_W'(in_fm[ip][c]) * ACC_W'(w[o][c][k]);
          end
        end
      end
      r = fx_requant(64'(acc), PROD_F, R_W, R_F);
      if (RELU && r < 0) r = '0;
      act[o] = O_W'(fx_requant(r, R_F, O_W, O_F));
    end
  end

  // ------------------------------------------------ optional pool and write
  logic signed [O_W-1:0] hold [COUT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_wr  <= 1'b0;
      out_idx <= '0;
    end else begin
      out_wr <= 1'b0;
      if (busy) begin
        if (POOL == 1) begin
          out_wr  <= 1'b1;
          out_idx <= pos;
        end else if (pos[0]) begin
          out_wr  <= 1'b1;
          out_idx <= pos >> 1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy) begin
      for (int o = 0; o < COUT; o++) begin
        if (POOL == 1) begin
          out_fm[OW'(pos)][o] <= act[o];
          out_vec[o]     <= act[o];
        end else if (!pos[0]) begin
          hold[o] <= act[o];
        end else begin
          out_fm[OW'(pos >> 1)][o] <= (act[o] > hold[o]) ? act[o] : hold[o];
          out_vec[o]          <= (act[o] > hold[o]) ? act[o] : hold[o];
        end
      end
    end
  end

  // A new run must not be requested while one is in progress.
  assert property (@(posedge clk) disable iff (!rst_n) !(start && busy))
    else $error("conv1d_layer: start while busy");

endmodule
