// zscore_norm: per-trace z-score normalisation in front of the denoiser.
//
// Each trace of LEN signed IN_W-bit ADC samples is mapped to
// z_i = (x_i - mu) / sigma, mu and sigma being the mean and the population
// standard deviation of that same trace, and z_i is delivered in the
// denoiser's input format ap_fixed<14,8> (6 fractional bits, round to nearest,
// saturate). The normalisation itself is the one the networks were trained
// with; the way it is computed here is this design's choice.
//
// How: while the trace streams in, the samples are stored and the exact
// integer sums S1 = sum(x) and S2 = sum(x^2) are accumulated. Then
//   D    = LEN*S2 - S1^2          (= LEN^2 * variance, exact)
//   root = floor(sqrt(D * 2^16))  (= 256 * LEN * sigma, 32 steps, 1 bit/step)
//   r    = floor(2^48 / root)     (one restoring division, 49 steps)
// and every output is one multiplication,
//   z_i * 2^6 = (LEN*x_i - S1) * r / 2^34, rounded and saturated.
// A trace with zero variance produces all-zero outputs.
//
// Interface: s_valid/s_ready/s_data accept one sample per clock; s_ready is
// high only while a trace is being collected. After the last sample the block
// needs 1 + 32 + 49 cycles of arithmetic and LEN cycles of output writes, then
// raises 'full' with the frame in x_fm. x_fm stays valid and no new trace is
// accepted until 'release' is pulsed.
module zscore_norm
  import ht_pkg::*;
#(
  parameter int LEN   = 128,
  parameter int IN_W  = 16,
  parameter int OUT_W = 14,
  parameter int OUT_I = 8,
  localparam int OUT_F = OUT_W - OUT_I,
  localparam int LW    = $clog2(LEN)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   s_valid,
  output logic                   s_ready,
  input  logic signed [IN_W-1:0] s_data,
  output logic                   full,
  input  logic                   release_i,
  output logic signed [OUT_W-1:0] x_fm [LEN][1]
);

  localparam int S1_W  = IN_W + LW + 1;
  localparam int S2_W  = 2 * IN_W + LW + 1;
  localparam int D_W   = S2_W + LW + 1;          // LEN*S2 and S1^2 fit
  localparam int RAD_W = 64;                     // D * 2^16 fits for IN_W <= 16
  localparam int RT_W  = RAD_W / 2;
  localparam int RK    = 48;                     // reciprocal scale 2^RK
  localparam int NUM_W = IN_W + LW + 2;

  typedef enum logic [2:0] {S_CAPTURE, S_VAR, S_SQRT, S_DIV, S_OUT, S_FULL} state_t;
  state_t state;

  logic signed [IN_W-1:0]  raw [LEN];
  logic [LW-1:0]           cnt;
  logic signed [S1_W-1:0]  s1;
  logic        [S2_W-1:0]  s2;

  // square root
  logic [RAD_W-1:0]        rad;
  logic [RT_W:0]           rem;
  logic [RT_W-1:0]         root;
  logic [5:0]              step;
  // division
  logic [RK:0]             dvd;
  logic [RT_W:0]           drem;
  logic [RK:0]             recip;

  assign s_ready = (state == S_CAPTURE);
  assign full    = (state == S_FULL);

  // next-step values for the iterative units
  logic [RT_W+2:0] rem_sh, trial;
  logic [RT_W:0]   drem_sh;
  always_comb begin
    rem_sh  = {rem, rad[RAD_W-1 -: 2]};
    trial   = {1'b0, root, 2'b01};
    drem_sh = {drem[RT_W-1:0], dvd[RK]};
  end

  // output arithmetic for sample cnt
  logic signed [NUM_W-1:0] num;
  logic signed [63:0]      prod;
  always_comb begin
    num  = NUM_W'(raw[cnt]) * NUM_W'(LEN) - NUM_W'(s1);
    prod = 64'(num) * $signed({1'b0, 63'(recip)});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_CAPTURE;
      cnt   <= '0;
      s1    <= '0;
      s2    <= '0;
      rad   <= '0;
      rem   <= '0;
      root  <= '0;
      step  <= '0;
      dvd   <= '0;
      drem  <= '0;
      recip <= '0;
    end else begin
      unique case (state)
        S_CAPTURE: if (s_valid) begin
          s1  <= s1 + S1_W'(s_data);
          s2  <= s2 + S2_W'($unsigned(32'(s_data) * 32'(s_data)));
          cnt <= cnt + 1'b1;
          if (cnt == LW'(LEN - 1)) state <= S_VAR;
        end
        S_VAR: begin
          // D = LEN*S2 - S1^2 >= 0, scaled by 2^16 for 8 extra root bits
          rad   <= RAD_W'(D_W'(s2) * D_W'(LEN) - D_W'($unsigned(64'(s1) * 64'(s1)))) << 16;
          rem   <= '0;
          root  <= '0;
          step  <= '0;
          state <= S_SQRT;
        end
        S_SQRT: begin
          rad <= rad << 2;
          if (rem_sh >= trial) begin
            rem  <= (RT_W + 1)'(rem_sh - trial);
            root <= {root[RT_W-2:0], 1'b1};
          end else begin
            rem  <= (RT_W + 1)'(rem_sh);
            root <= {root[RT_W-2:0], 1'b0};
          end
          step <= step + 1'b1;
          if (step == 6'(RT_W - 1)) begin
            step  <= '0;
            dvd   <= (RK + 1)'(1) << RK;
            drem  <= '0;
            state <= S_DIV;
          end
        end
        S_DIV: begin
          dvd <= dvd << 1;
          if (root != '0 && drem_sh >= {1'b0, root}) begin
            drem  <= drem_sh - {1'b0, root};
            recip <= {recip[RK-1:0], 1'b1};
          end else begin
            drem  <= drem_sh;
            recip <= {recip[RK-1:0], 1'b0};
          end
          step <= step + 1'b1;
          if (step == 6'(RK)) begin
            step  <= '0;
            cnt   <= '0;
            state <= S_OUT;
          end
        end
        S_OUT: begin
          cnt <= cnt + 1'b1;
          if (cnt == LW'(LEN - 1)) state <= S_FULL;
        end
        S_FULL: if (release_i) begin
          s1    <= '0;
          s2    <= '0;
          cnt   <= '0;
          recip <= '0;
          state <= S_CAPTURE;
        end
        default: state <= S_CAPTURE;
      endcase
    end
  end

  // sample and frame storage (no reset: every entry is written before use)
  always_ff @(posedge clk) begin
    if (state == S_CAPTURE && s_valid) raw[cnt] <= s_data;
    if (state == S_OUT) x_fm[cnt][0] <= OUT_W'(fx_requant(prod, RK - 8, OUT_W, OUT_F));
  end

  assert property (@(posedge clk) disable iff (!rst_n) s_ready |-> !release_i)
    else $error("zscore_norm: release without a held frame");

endmodule
