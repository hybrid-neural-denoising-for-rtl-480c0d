// tb_hybrid_trigger_top: end-to-end test of the trigger at its default size
// (128-sample frames, all eleven denoiser layers, all six classifier blocks).
//
// Random weights are written for every layer through the configuration
// ports, then reloaded with a second set halfway. Frames come first from the
// sample stream (random noise, a bipolar pulse on quiet noise, full-scale
// noise, a constant trace; random gaps in s_valid) and then from the
// internal PRBS16 source; three frames in between take the classifier-only
// branch (den_bypass). For every frame the testbench
//   - rebuilds the raw trace from the normaliser's input handshake and checks
//     the normalised frame against a double-precision z-score (+-1 LSB),
//   - recomputes the denoiser and classifier from that normalised frame with
//     the reference arithmetic of tb_ref_pkg and checks every denoised
//     sample of the den_* stream, the score and the trigger bit,
//   - sets tau to score-1 or to score, so the strict '>' is exercised both
//     ways.
// PRBS samples are checked against a bit-level LFSR model. Counted
// mechanisms, each of which must occur: input stall, normaliser collecting
// while the classifier works (frame overlap), trigger fired, trigger not
// fired, PRBS frames, zero-variance frame, weight reload, bypass frame. Also
// checked: the latency from the last sample of a frame to its result.
module tb_hybrid_trigger_top;
  import ht_pkg::*;
  import tb_ref_pkg::*;

  localparam int LEN = TRACE_LEN;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic src_prbs = 0, den_bypass = 0, s_valid = 0, s_ready;
  logic signed [15:0] s_data = 0;
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = 0;
  logic [CFG_DW-1:0] cfg_data = 0;
  logic signed [14:0] tau = 0;
  logic res_valid, trigger, den_valid;
  logic signed [14:0] score;
  logic [6:0] den_idx;
  logic signed [13:0] den_data;

  hybrid_trigger_top dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_overlap = 0, n_fire = 0, n_nofire = 0, n_prbs_fr = 0, n_const = 0;
  int n_reload = 0, n_results = 0, n_bypass = 0;

  // ------------------------------------------------------------ weights
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

  task automatic load_all(input longint dlim, input longint clim);
    for (int l = 0; l < DEN_NL; l++) begin
      for (int o = 0; o < DEN_COUT[l]; o++)
        for (int c = 0; c < DEN_CIN[l]; c++)
          for (int t = 0; t < DEN_K[l]; t++) begin
            dw[l][o][c][t] = rnd_code(DEN_W, dlim);
            wr(den_base(l) + (o * DEN_CIN[l] + c) * DEN_K[l] + t, dw[l][o][c][t]);
          end
      for (int o = 0; o < DEN_COUT[l]; o++) begin
        db[l][o] = rnd_code(DEN_W, 16);
        wr(den_base(l) + DEN_COUT[l] * DEN_CIN[l] * DEN_K[l] + o, db[l][o]);
      end
    end
    for (int l = 0; l < CLF_NB; l++) begin
      for (int o = 0; o < CLF_COUT[l]; o++)
        for (int c = 0; c < CLF_CIN[l]; c++)
          for (int t = 0; t < CLF_K[l]; t++) begin
            cw[l][o][c][t] = rnd_code(CLF_WW[l], clim);
            wr(clf_base(l) + (o * CLF_CIN[l] + c) * CLF_K[l] + t, cw[l][o][c][t]);
          end
      for (int o = 0; o < CLF_COUT[l]; o++) begin
        cb[l][o] = rnd_code(CLF_BW[l], 4);
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

  // -------------------------------------------------------------- monitors
  longint raw [MAXL];
  int     nraw = 0;
  logic [15:0] lfsr = 16'hFFFF;
  fm_t    yq [$];
  longint sq [$];
  bit     fq [$];
  longint tq [$];
  longint lq [$];
  int     ystream = 0;
  int     fr_in = 0;
  longint t_last [$];
  longint cyc = 0;
  logic   full_d = 0;

  always @(posedge clk) cyc++;

  // normaliser input handshake: rebuild the raw frame, check PRBS samples
  always @(posedge clk) if (rst_n && dut.u_norm.s_valid && dut.u_norm.s_ready) begin
    raw[nraw] = longint'(dut.u_norm.s_data);
    if (src_prbs) begin
      checks++;
      if (dut.u_norm.s_data != lfsr) begin
        failures++;
        $display("PRBS sample %h expected %h", dut.u_norm.s_data, lfsr);
      end
      lfsr = {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
    end
    nraw++;
    if (nraw == LEN) begin
      nraw = 0;
      t_last.push_back(cyc);
    end
  end

  always @(posedge clk) if (rst_n) begin
    if (s_valid && !s_ready && !src_prbs) n_stall++;
    if (dut.u_norm.s_ready && dut.u_clf.busy) n_overlap++;
  end

  // normalised frame ready: check it and predict the rest of the chain
  always @(posedge clk) begin
    full_d <= dut.n_full;
    if (rst_n && dut.n_full && !full_d) begin
      fm_t zr, xd, y;
      longint s, mn, mx;
      bit   cst;
      ref_zscore(raw, LEN, DEN_W, DEN_F, zr);
      cst = 1;
      mn = raw[0]; mx = raw[0];
      for (int i = 0; i < LEN; i++) if (raw[i] != raw[0]) cst = 0;
      if (cst) n_const++;
      if (src_prbs) n_prbs_fr++;
      for (int p = 0; p < MAXL; p++) for (int c = 0; c < MAXC; c++) xd[p][c] = 0;
      for (int i = 0; i < LEN; i++) begin
        longint d;
        xd[i][0] = longint'(dut.x_fm[i][0]);
        d = xd[i][0] - zr[i][0];
        checks++;
        if (d > 1 || d < -1) begin
          failures++;
          if (failures < 10) $display("frame %0d: z[%0d] got %0d exp %0d", fr_in, i, xd[i][0], zr[i][0]);
        end
      end
      if (den_bypass) begin
        // classifier-only branch: the classifier sees the normalised frame
        n_bypass++;
        s = ref_classifier(xd, LEN, cw, cb, hw, hb);
        lq.push_back(1891 - DEN_NL * (LEN + 1));
      end else begin
        ref_denoiser(xd, LEN, dw, db, y);
        s = ref_classifier(y, LEN, cw, cb, hw, hb);
        yq.push_back(y);
        lq.push_back(1891);
      end
      sq.push_back(s);
      if (fr_in % 2 == 0 && s > -16384) begin
        tau = 15'(s - 1);
        fq.push_back(1'b1);
      end else begin
        tau = 15'(s);
        fq.push_back(1'b0);
      end
      fr_in++;
    end
  end

  // denoised stream
  always @(posedge clk) if (rst_n && den_valid) begin
    checks++;
    if (yq.size() == 0) begin
      failures++;
      $display("unexpected denoised sample");
    end else begin
      if (longint'(den_data) != yq[0][den_idx][0]) begin
        failures++;
        if (failures < 10) $display("denoised[%0d] got %0d exp %0d", den_idx, den_data, yq[0][den_idx][0]);
      end
      ystream++;
      if (ystream == LEN) begin
        ystream = 0;
        void'(yq.pop_front());
      end
    end
  end

  // results
  always @(posedge clk) if (rst_n && res_valid) begin
    longint es, lat;
    bit     ef;
    checks += 3;
    if (sq.size() == 0 || t_last.size() == 0 || lq.size() == 0) begin
      failures += 3;
      $display("unexpected result");
    end else begin
      es = sq.pop_front();
      ef = fq.pop_front();
      lat = cyc - t_last.pop_front();
      if (longint'(score) != es) begin
        failures++;
        $display("result %0d: score %0d exp %0d", n_results, score, es);
      end
      if (trigger != ef) begin
        failures++;
        $display("result %0d: trigger %0d exp %0d", n_results, trigger, ef);
      end
      // last sample -> result: 210 normalisation + 11*129 denoiser
      // + 259 classifier + hand-over clocks; no denoiser in bypass
      if (lat != lq.pop_front()) begin
        failures++;
        $display("result %0d: latency %0d clocks", n_results, lat);
      end
      if (trigger) n_fire++; else n_nofire++;
    end
    n_results++;
  end

  // ------------------------------------------------------------ stimulus
  task automatic send_frame(input int kind);
    for (int i = 0; i < LEN; i++) begin
      longint v;
      unique case (kind)
        0: v = longint'($urandom_range(0, 400)) - 200;
        1: v = (i >= 50 && i < 58) ? ((i % 2) ? 2500 : -2300) + longint'($urandom_range(0, 40)) - 20
                                   : longint'($urandom_range(0, 60)) - 30;
        2: v = longint'($urandom_range(0, 65535)) - 32768;
        default: v = 777;
      endcase
      @(negedge clk);
      while ($urandom_range(0, 4) == 0) begin
        s_valid = 0;
        @(negedge clk);
      end
      s_valid = 1;
      s_data = 16'(v);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
    end
    @(negedge clk);
    s_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_all(48, 1 << 20);
    n_reload++;
    send_frame(1);
    // keep s_valid up while the chain is busy: stalls
    @(negedge clk);
    s_valid = 1; s_data = 16'sd5;
    wait (dut.n_full);
    s_valid = 0;
    send_frame(0);
    send_frame(3);
    send_frame(2);
    wait (n_results == 4);
    repeat (10) @(negedge clk);
    load_all(40, 12);
    n_reload++;
    send_frame(1);
    send_frame(0);
    send_frame(1);
    // classifier-only branch; switch once the pipeline is empty
    wait (n_results == 7);
    @(negedge clk);
    den_bypass = 1;
    send_frame(1);
    send_frame(0);
    send_frame(2);
    wait (n_results == 10);
    @(negedge clk);
    den_bypass = 0;
    // switch to the PRBS source at a frame boundary
    src_prbs = 1;
    wait (n_results >= 13);
    @(negedge clk);
    checks++;
    if (n_results != 13 || sq.size() > 2) begin
      failures++;
      $display("results %0d, pending %0d", n_results, sq.size());
    end
    $display("stall=%0d overlap=%0d fire=%0d nofire=%0d prbs_frames=%0d const=%0d reload=%0d bypass=%0d",
             n_stall, n_overlap, n_fire, n_nofire, n_prbs_fr, n_const, n_reload, n_bypass);
    checks += 8;
    if (n_stall == 0)   begin failures++; $display("no stall"); end
    if (n_overlap == 0) begin failures++; $display("no frame overlap"); end
    if (n_fire == 0)    begin failures++; $display("no trigger"); end
    if (n_nofire == 0)  begin failures++; $display("no rejected frame"); end
    if (n_prbs_fr == 0) begin failures++; $display("no PRBS frame"); end
    if (n_const == 0)   begin failures++; $display("no constant frame"); end
    if (n_reload < 2)   begin failures++; $display("no weight reload"); end
    if (n_bypass == 0)  begin failures++; $display("no bypass frame"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
