// hybrid_trigger_top: single-channel denoiser + classifier radio trigger.
//
// A stream of signed 16-bit ADC samples is cut into frames of LEN = 128
// samples. Each frame is z-score normalised (zscore_norm), cleaned by the
// convolutional denoiser, and scored by the convolutional classifier. The
// trigger fires for a frame when the classifier score is strictly greater
// than the threshold tau. With den_bypass set, the denoiser is skipped and
// the classifier scores the normalised frame directly: this is the
// classifier-only branch the published design compares against (its chain
// shows the denoiser as optional); it needs classifier weights trained for
// raw traces. The chain, the frame length, the input width and the number
// formats follow the published design; the frame controller, the
// handshakes, the configuration bus, the bypass input and the source select
// are this design's own.
//
// Frame controller: the three stages form a frame pipeline. The normaliser
// holds its output until the denoiser has finished with it (the denoiser's
// skip connection reads it until its last layer), then accepts the next
// frame. The denoiser holds its output until the classifier has finished with
// it. So the normaliser can collect frame n+1 while the classifier scores
// frame n, and the input is stalled (s_ready low) whenever the normaliser is
// not collecting. In bypass the normaliser's frame takes the denoiser
// output's place and is held until the classifier is done. den_bypass is
// sampled once per frame, when the normalised frame is handed on.
//
// Ports:
//   s_valid/s_ready/s_data  sample stream (valid/ready handshake)
//   src_prbs                1: feed the chain from the internal PRBS16
//                           generator instead (standalone test mode);
//                           s_ready is then low
//   den_bypass              1: classifier-only branch (no den_* output)
//   cfg_we/cfg_addr/cfg_data  one weight or bias per write; map in ht_pkg
//   tau                     threshold, same format as score
//   res_valid               one-cycle pulse per frame with trigger and score
//   score                   Dense output, ap_fixed<15,6> (signed, 9 frac bits)
//   den_valid/den_idx/den_data  the denoised frame, one sample per pulse
//
// Timing per frame: 128 input clocks, 210 normalisation clocks, 1419
// denoiser clocks and 259 classifier clocks plus hand-over clocks: 1891
// clocks from the last sample to res_valid (472 in bypass). With the input
// never stalled by its source, a frame is accepted every 1758 clocks
// (normaliser + denoiser); in bypass every 599 clocks (normaliser +
// classifier).
module hybrid_trigger_top
  import ht_pkg::*;
#(
  parameter int LEN = TRACE_LEN
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      src_prbs,
  input  logic                      den_bypass,
  input  logic                      s_valid,
  output logic                      s_ready,
  input  logic signed [SAMPLE_W-1:0] s_data,
  input  logic                      cfg_we,
  input  logic [CFG_AW-1:0]         cfg_addr,
  input  logic [CFG_DW-1:0]         cfg_data,
  input  logic signed [SCORE_W-1:0] tau,
  output logic                      res_valid,
  output logic                      trigger,
  output logic signed [SCORE_W-1:0] score,
  output logic                      den_valid,
  output logic [$clog2(LEN)-1:0]    den_idx,
  output logic signed [DEN_W-1:0]   den_data
);

  cfg_wr_t cfg;
  assign cfg = '{we: cfg_we, addr: cfg_addr, data: cfg_data};

  // ------------------------------------------------------ input selection
  logic                       n_valid, n_ready;
  logic signed [SAMPLE_W-1:0] n_data;
  logic [15:0]                prbs_q;

  prbs16 u_prbs (.clk, .rst_n, .en(src_prbs && n_ready), .q(prbs_q));

  assign n_valid = src_prbs ? 1'b1 : s_valid;
  assign n_data  = src_prbs ? SAMPLE_W'(signed'(prbs_q)) : s_data;
  assign s_ready = !src_prbs && n_ready;

  // ------------------------------------------------------------- stages
  logic                    n_full, n_release;
  logic signed [DEN_W-1:0] x_fm [LEN][1];

  zscore_norm #(.LEN(LEN), .IN_W(SAMPLE_W), .OUT_W(DEN_W), .OUT_I(DEN_I)) u_norm (
    .clk, .rst_n, .s_valid(n_valid), .s_ready(n_ready), .s_data(n_data),
    .full(n_full), .release_i(n_release), .x_fm
  );

  logic                    d_start, d_busy, d_done;
  logic signed [DEN_W-1:0] y_fm [LEN][1];

  denoiser #(.LEN(LEN)) u_den (
    .clk, .rst_n, .cfg, .start(d_start), .busy(d_busy), .done(d_done),
    .x_fm, .y_fm, .y_wr(den_valid), .y_idx(den_idx), .y_data(den_data)
  );

  logic                      c_start, c_busy, c_done;
  logic signed [DEN_W-1:0]   c_in [LEN][1];
  logic signed [SCORE_W-1:0] c_score;

  classifier #(.LEN(LEN)) u_clf (
    .clk, .rst_n, .cfg, .start(c_start), .busy(c_busy), .done(c_done),
    .x_fm(c_in), .score(c_score)
  );

  // ------------------------------------------------------- frame control
  logic d_run;   // denoiser working on the normaliser's frame
  logic d_hold;  // denoiser output waiting for / in use by the classifier
  logic c_run;
  logic byp;     // the held frame is the normaliser's (bypass)
  logic h_start; // normalised frame handed on

  assign h_start   = n_full && !d_run && !d_hold;
  assign d_start   = h_start && !den_bypass;
  assign n_release = d_done || (c_done && byp);
  assign c_start   = d_hold && !c_run;

  for (genvar i = 0; i < LEN; i++) begin : g_cin
    assign c_in[i][0] = byp ? x_fm[i][0] : y_fm[i][0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_run     <= 1'b0;
      d_hold    <= 1'b0;
      c_run     <= 1'b0;
      byp       <= 1'b0;
      res_valid <= 1'b0;
      trigger   <= 1'b0;
      score     <= '0;
    end else begin
      res_valid <= 1'b0;
      if (d_start) d_run <= 1'b1;
      if (h_start && den_bypass) begin
        d_hold <= 1'b1;
        byp    <= 1'b1;
      end
      if (d_done) begin
        d_run  <= 1'b0;
        d_hold <= 1'b1;
      end
      if (c_start) c_run <= 1'b1;
      if (c_done) begin
        c_run     <= 1'b0;
        d_hold    <= 1'b0;
        byp       <= 1'b0;
        res_valid <= 1'b1;
        score     <= c_score;
        trigger   <= (c_score > tau);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) d_start |-> !d_busy)
    else $error("hybrid_trigger_top: denoiser started while busy");
  assert property (@(posedge clk) disable iff (!rst_n) c_start |-> !c_busy)
    else $error("hybrid_trigger_top: classifier started while busy");

endmodule
