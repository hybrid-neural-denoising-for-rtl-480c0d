// tb_conv1d_case: one test case for conv1d_layer, used by tb_conv1d_layer.
//
// On 'go' it writes random weights and biases over the cfg bus, applies
// NFRAMES random input frames, runs the layer on each and compares every
// output position (out_fm and the out_wr stream) with tb_ref_pkg::ref_conv.
// It also checks that 'done' comes exactly LEN clocks after the start pulse.
module tb_conv1d_case
  import ht_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int LEN = 16, parameter int CIN = 1, parameter int COUT = 4,
  parameter int K = 3, parameter int POOL = 1, parameter bit RELU = 1'b1,
  parameter int IN_W = 14, parameter int IN_F = 6,
  parameter int W_W = 14, parameter int W_F = 6,
  parameter int B_W = 14, parameter int B_F = 6,
  parameter int R_W = 14, parameter int R_F = 6,
  parameter int O_W = 14, parameter int O_F = 6,
  parameter int CFG_BASE = 100,
  parameter longint IN_LIM = 8191, parameter longint W_LIM = 8191,
  parameter int NFRAMES = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic fin,
  output int   checks,
  output int   failures
);
  localparam int LO = LEN / POOL;

  cfg_wr_t cfg;
  logic    start, busy, done, out_wr;
  logic signed [IN_W-1:0] in_fm  [LEN][CIN];
  logic signed [O_W-1:0]  out_fm [LO][COUT];
  logic [((LEN > 1) ? $clog2(LEN) : 1)-1:0] out_idx;
  logic signed [O_W-1:0]  out_vec [COUT];

  conv1d_layer #(.LEN(LEN), .CIN(CIN), .COUT(COUT), .K(K), .POOL(POOL), .RELU(RELU),
    .IN_W(IN_W), .IN_F(IN_F), .W_W(W_W), .W_F(W_F), .B_W(B_W), .B_F(B_F),
    .R_W(R_W), .R_F(R_F), .O_W(O_W), .O_F(O_F), .CFG_BASE(CFG_BASE)) dut (.*);

  wt_t  w;
  bs_t  b;
  fm_t  xin, yref;
  int   nstream;

  // stream monitor
  always @(posedge clk) begin
    if (out_wr && fin == 1'b0 && busy_seen) begin
      nstream++;
      for (int o = 0; o < COUT; o++) begin
        checks++;
        if (longint'(out_vec[o]) != yref[out_idx][o]) begin
          failures++;
          $display("conv case K=%0d: stream pos %0d ch %0d got %0d exp %0d",
                   K, out_idx, o, out_vec[o], yref[out_idx][o]);
        end
      end
    end
  end
  logic busy_seen;

  initial begin
    cfg = '0; start = 0; fin = 0; checks = 0; failures = 0; busy_seen = 0; nstream = 0;
    for (int p = 0; p < LEN; p++) for (int c = 0; c < CIN; c++) in_fm[p][c] = '0;
    wait (go);
    for (int f = 0; f < NFRAMES; f++) begin
      int cyc;
      // weights: new set every other frame
      if (f % 2 == 0) begin
        for (int o = 0; o < COUT; o++)
          for (int c = 0; c < CIN; c++)
            for (int t = 0; t < K; t++) begin
              w[o][c][t] = rnd_code(W_W, W_LIM);
              @(negedge clk);
              cfg = '{we: 1'b1, addr: CFG_AW'(CFG_BASE + (o * CIN + c) * K + t),
                      data: CFG_DW'(w[o][c][t])};
            end
        for (int o = 0; o < COUT; o++) begin
          b[o] = rnd_code(B_W, 1 << (B_W - 1));
          @(negedge clk);
          cfg = '{we: 1'b1, addr: CFG_AW'(CFG_BASE + COUT * CIN * K + o), data: CFG_DW'(b[o])};
        end
        @(negedge clk);
        cfg = '0;
      end
      for (int p = 0; p < LEN; p++)
        for (int c = 0; c < CIN; c++) begin
          xin[p][c]   = rnd_code(IN_W, IN_LIM);
          in_fm[p][c] = IN_W'(xin[p][c]);
        end
      ref_conv(xin, LEN, CIN, COUT, K, POOL, RELU, IN_F, w, W_F, b, B_F, R_W, R_F, O_W, O_F, yref);
      nstream = 0;
      busy_seen = 1;
      @(negedge clk);
      start = 1;
      @(posedge clk);
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      @(posedge clk);
      @(negedge clk);   // let the monitor see the last stream write
      checks++;
      if (cyc != LEN + 1) begin
        failures++;
        $display("conv case K=%0d: done after %0d clocks, expected %0d", K, cyc, LEN + 1);
      end
      for (int q = 0; q < LO; q++)
        for (int o = 0; o < COUT; o++) begin
          checks++;
          if (longint'(out_fm[q][o]) != yref[q][o]) begin
            failures++;
            if (failures < 10)
              $display("conv case K=%0d: out[%0d][%0d] got %0d exp %0d", K, q, o,
                       out_fm[q][o], yref[q][o]);
          end
        end
      checks++;
      if (nstream != LO) begin
        failures++;
        $display("conv case K=%0d: %0d stream writes, expected %0d", K, nstream, LO);
      end
      busy_seen = 0;
    end
    fin = 1;
  end
endmodule
