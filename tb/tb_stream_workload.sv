// tb_stream_workload: continuous-stream run of the full-size trigger, the
// way it is used on a dataset of traces: 64 traces with s_valid never
// dropped. Half of them are background-like noise with random level and
// narrow-band tones, half carry an injected bipolar pulse of random position
// and amplitude. The first 48 go through the full denoiser + classifier
// chain back to back; after the pipeline has drained, the last 16 go back to
// back through the classifier-only branch (den_bypass). Weights are random;
// the threshold sits inside the resulting score range so both trigger
// outcomes occur.
//
// Checked for every trace: the normalised frame (+-1 LSB against a
// double-precision z-score), the score and the trigger bit against the
// reference arithmetic of tb_ref_pkg (computed from the normalised frame),
// results in order with none lost. Also checked: the steady-state frame
// period, 1758 clocks for the full chain (1 release + 128 collect + 210
// normalise + 1419 denoise; the classifier is hidden behind the next frame's
// collection) and 599 clocks in bypass (1 + 128 + 210 + 1 hand-over + 259
// classify).
module tb_stream_workload;
  import ht_pkg::*;
  import tb_ref_pkg::*;

  localparam int LEN     = TRACE_LEN;
  localparam int NFRAMES = 64;
  localparam int NDEN    = 48;   // traces through the full chain, then bypass
  localparam int PERIOD  = 1 + LEN + 210 + DEN_NL * (LEN + 1);
  localparam int PER_BYP = 1 + LEN + 210 + 1 + 259;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic src_prbs = 0, den_bypass = 0, s_valid = 0, s_ready;
  logic signed [15:0] s_data = 0;
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = 0;
  logic [CFG_DW-1:0] cfg_data = 0;
  logic signed [14:0] tau = -15'sd3700;  // about -7.2: mid-range for these random weights
  logic res_valid, trigger, den_valid;
  logic signed [14:0] score;
  logic [6:0] den_idx;
  logic signed [13:0] den_data;

  hybrid_trigger_top dut (.*);

  int checks = 0, failures = 0, n_results = 0, n_fire = 0;

  wt_t    dw [DEN_NL];
  bs_t    db [DEN_NL];
  wt_t    cw [CLF_NB];
  bs_t    cb [CLF_NB];
  longint hw [MAXC];
  longint hb;

  task automatic wr(input int a, input longint d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_AW'(a); cfg_data = CFG_DW'(d);
  endtask

  task automatic load_all();
    for (int l = 0; l < DEN_NL; l++) begin
      for (int o = 0; o < DEN_COUT[l]; o++)
        for (int c = 0; c < DEN_CIN[l]; c++)
          for (int t = 0; t < DEN_K[l]; t++) begin
            dw[l][o][c][t] = rnd_code(DEN_W, 44);
            wr(den_base(l) + (o * DEN_CIN[l] + c) * DEN_K[l] + t, dw[l][o][c][t]);
          end
      for (int o = 0; o < DEN_COUT[l]; o++) begin
        db[l][o] = rnd_code(DEN_W, 8);
        wr(den_base(l) + DEN_COUT[l] * DEN_CIN[l] * DEN_K[l] + o, db[l][o]);
      end
    end
    for (int l = 0; l < CLF_NB; l++) begin
      for (int o = 0; o < CLF_COUT[l]; o++)
        for (int c = 0; c < CLF_CIN[l]; c++)
          for (int t = 0; t < CLF_K[l]; t++) begin
            cw[l][o][c][t] = rnd_code(CLF_WW[l], 10);
            wr(clf_base(l) + (o * CLF_CIN[l] + c) * CLF_K[l] + t, cw[l][o][c][t]);
          end
      for (int o = 0; o < CLF_COUT[l]; o++) begin
        cb[l][o] = rnd_code(CLF_BW[l], 3);
        wr(clf_base(l) + CLF_COUT[l] * CLF_CIN[l] * CLF_K[l] + o, cb[l][o]);
      end
    end
    for (int c = 0; c < 4; c++) begin
      hw[c] = rnd_code(HD_WW, 31);
      wr(clf_base(CLF_NB) + c, hw[c]);
    end
    hb = rnd_code(HD_BW, 31);
    wr(clf_base(CLF_NB) + 4, hb);
    @(negedge clk);
    cfg_we = 0;
  endtask

  // raw traces as sent, for the z-score reference
  longint traces [NFRAMES][MAXL];
  longint sq [$];
  longint cyc = 0;
  longint t_full [$];
  logic   full_d = 0;
  int     fr = 0;

  always @(posedge clk) cyc++;

  always @(posedge clk) begin
    full_d <= dut.n_full;
    if (rst_n && dut.n_full && !full_d) begin
      fm_t zr, xd, y;
      longint raw [MAXL];
      raw = traces[fr];
      ref_zscore(raw, LEN, DEN_W, DEN_F, zr);
      for (int p = 0; p < MAXL; p++) for (int c = 0; c < MAXC; c++) xd[p][c] = 0;
      for (int i = 0; i < LEN; i++) begin
        longint d;
        xd[i][0] = longint'(dut.x_fm[i][0]);
        d = xd[i][0] - zr[i][0];
        checks++;
        if (d > 1 || d < -1) begin
          failures++;
          if (failures < 10) $display("trace %0d: z[%0d] got %0d exp %0d", fr, i, xd[i][0], zr[i][0]);
        end
      end
      if (den_bypass) begin
        sq.push_back(ref_classifier(xd, LEN, cw, cb, hw, hb));
      end else begin
        ref_denoiser(xd, LEN, dw, db, y);
        sq.push_back(ref_classifier(y, LEN, cw, cb, hw, hb));
      end
      t_full.push_back(cyc);
      fr++;
    end
  end

  always @(posedge clk) if (rst_n && res_valid) begin
    longint es;
    checks += 2;
    if (sq.size() == 0) begin
      failures += 2;
      $display("unexpected result");
    end else begin
      es = sq.pop_front();
      if (longint'(score) != es) begin
        failures++;
        $display("trace %0d: score %0d exp %0d", n_results, score, es);
      end
      if (trigger != (es > longint'(tau))) begin
        failures++;
        $display("trace %0d: trigger %0d", n_results, trigger);
      end
    end
    if (trigger) n_fire++;
    n_results++;
  end

  initial begin
    // generate the traces
    for (int f = 0; f < NFRAMES; f++) begin
      int  lvl, pos, amp;
      real ph, fq;
      lvl = $urandom_range(20, 400);
      fq  = 0.05 + real'($urandom_range(0, 100)) / 400.0;
      ph  = real'($urandom_range(0, 628)) / 100.0;
      pos = $urandom_range(16, LEN - 24);
      amp = (f % 2) ? $urandom_range(lvl / 2, 8 * lvl) : 0;
      for (int i = 0; i < LEN; i++) begin
        real v;
        v = real'($urandom_range(0, 2 * lvl)) - real'(lvl);
        v += 0.5 * real'(lvl) * $sin(6.2832 * fq * real'(i) + ph);
        if (i >= pos && i < pos + 8) v += real'(amp) * (((i - pos) % 2) ? -1.0 : 1.0) * (1.0 - real'(i - pos) / 8.0);
        traces[f][i] = longint'(v);
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_all();
    for (int f = 0; f < NFRAMES; f++) begin
      if (f == NDEN) begin
        // drain, then run the rest through the classifier-only branch
        @(negedge clk);
        s_valid = 0;
        wait (n_results == NDEN);
        @(negedge clk);
        den_bypass = 1;
      end
      for (int i = 0; i < LEN; i++) begin
        @(negedge clk);
        s_valid = 1;
        s_data = 16'(traces[f][i]);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
      end
    end
    @(negedge clk);
    s_valid = 0;
    wait (n_results == NFRAMES);
    repeat (5) @(negedge clk);
    // steady-state period between successive normalised frames
    for (int k = 2; k < NFRAMES; k++) begin
      int ep;
      if (k == NDEN) continue;
      ep = (k < NDEN) ? PERIOD : PER_BYP;
      checks++;
      if (t_full[k] - t_full[k-1] != ep) begin
        failures++;
        if (failures < 10) $display("frame period %0d at %0d, expected %0d", t_full[k] - t_full[k-1], k, ep);
      end
    end
    checks++;
    if (n_results != NFRAMES || fr != NFRAMES) begin
      failures++;
      $display("results %0d frames %0d", n_results, fr);
    end
    $display("traces %0d, triggered %0d, period %0d clocks (%0d in bypass)", n_results, n_fire, PERIOD, PER_BYP);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NFRAMES * 2000 + 50000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
