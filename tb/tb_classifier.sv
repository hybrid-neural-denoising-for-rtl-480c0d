// tb_classifier: self-checking test of the full-size classifier (128-sample
// input, six Conv1D+ReLU+MaxPool blocks, GAP, Dense(1)).
//
// Random weights are drawn over the whole range of each block's published
// weight and bias formats and written over the cfg bus at the ht_pkg address
// map. Random denoised frames in ap_fixed<14,8> are scored and compared with
// a reference that chains tb_ref_pkg::ref_conv and ref_head with the same
// format table. Besides the score, every stored activation of every block
// (the MaxPool outputs) is compared, so an error is located to its block.
// Also checked: the 259-clock latency and that 'score' holds.
module tb_classifier;
  import ht_pkg::*;
  import tb_ref_pkg::*;

  localparam int LEN = 128;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg = '0;
  logic start = 0, busy, done;
  logic signed [13:0] x_fm [LEN][1];
  logic signed [14:0] score;

  classifier dut (.*);

  int checks = 0, failures = 0;
  wt_t    w [CLF_NB];
  bs_t    b [CLF_NB];
  longint hw [MAXC];
  longint hb;
  fm_t    xin;

  task automatic wr(input int a, input longint d);
    @(negedge clk);
    cfg = '{we: 1'b1, addr: CFG_AW'(a), data: CFG_DW'(d)};
  endtask

  task automatic load_weights();
    for (int l = 0; l < CLF_NB; l++) begin
      for (int o = 0; o < CLF_COUT[l]; o++)
        for (int c = 0; c < CLF_CIN[l]; c++)
          for (int t = 0; t < CLF_K[l]; t++) begin
            w[l][o][c][t] = rnd_code(CLF_WW[l], 1 << 20);
            wr(clf_base(l) + (o * CLF_CIN[l] + c) * CLF_K[l] + t, w[l][o][c][t]);
          end
      for (int o = 0; o < CLF_COUT[l]; o++) begin
        b[l][o] = rnd_code(CLF_BW[l], 1 << 20);
        wr(clf_base(l) + CLF_COUT[l] * CLF_CIN[l] * CLF_K[l] + o, b[l][o]);
      end
    end
    for (int c = 0; c < 4; c++) begin
      hw[c] = rnd_code(HD_WW, 1 << 20);
      wr(clf_base(CLF_NB) + c, hw[c]);
    end
    hb = rnd_code(HD_BW, 1 << 20);
    wr(clf_base(CLF_NB) + 4, hb);
    @(negedge clk);
    cfg = '0;
  endtask

  // per-block reference outputs of the last frame
  fm_t blk [CLF_NB];

  function automatic longint ref_model(input fm_t x);
    fm_t a, t;
    int  len, in_f;
    a = x;
    len = LEN;
    in_f = DEN_F;
    for (int l = 0; l < CLF_NB; l++) begin
      ref_conv(a, len, CLF_CIN[l], CLF_COUT[l], CLF_K[l], 2, 1'b1, in_f,
               w[l], CLF_WW[l] - CLF_WI[l], b[l], CLF_BW[l] - CLF_BI[l],
               CLF_RW[l], CLF_RW[l] - CLF_RI[l], CLF_AW[l], CLF_AW[l] - CLF_AI[l], t);
      a = t;
      blk[l] = t;
      len = len / 2;
      in_f = CLF_AW[l] - CLF_AI[l];
    end
    return ref_head(a, len, 4, in_f, GAP_W, GAP_W - GAP_I, hw, HD_WW - HD_WI,
                    hb, HD_BW - HD_BI, SCORE_W, SCORE_F);
  endfunction

  // stored output of classifier block l at position p, channel c
  function automatic longint dut_fm(input int l, input int p, input int c);
    case (l)
      0: return longint'(dut.fm0[p][c]);
      1: return longint'(dut.fm1[p][c]);
      2: return longint'(dut.fm2[p][c]);
      3: return longint'(dut.fm3[p][c]);
      4: return longint'(dut.fm4[p][c]);
      default: return longint'(dut.fm5[p][c]);
    endcase
  endfunction

  initial begin
    for (int p = 0; p < LEN; p++) x_fm[p][0] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 24; f++) begin
      int cyc;
      longint exp_s;
      if (f % 3 == 0) load_weights();
      for (int p = 0; p < MAXL; p++) for (int c = 0; c < MAXC; c++) xin[p][c] = 0;
      for (int p = 0; p < LEN; p++) begin
        xin[p][0] = rnd_code(DEN_W, (f % 2) ? 8191 : 200);
        x_fm[p][0] = 14'(xin[p][0]);
      end
      exp_s = ref_model(xin);
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      checks++;
      if (cyc != 259) begin
        failures++;
        $display("frame %0d: done after %0d clocks, expected 259", f, cyc);
      end
      checks++;
      if (longint'(score) != exp_s) begin
        failures++;
        $display("frame %0d: score got %0d exp %0d", f, score, exp_s);
      end
      // every stored activation of every block
      for (int l = 0; l < CLF_NB; l++)
        for (int p = 0; p < (LEN >> (l + 1)); p++)
          for (int c = 0; c < CLF_COUT[l]; c++) begin
            checks++;
            if (dut_fm(l, p, c) != blk[l][p][c]) begin
              failures++;
              if (failures < 10)
                $display("frame %0d: block %0d [%0d][%0d] got %0d exp %0d",
                         f, l + 1, p, c, dut_fm(l, p, c), blk[l][p][c]);
            end
          end
      if (f < 4) $display("frame %0d score %0d", f, score);
      repeat (5) @(negedge clk);
      checks++;
      if (longint'(score) != exp_s) begin
        failures++;
        $display("frame %0d: score not held", f);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
