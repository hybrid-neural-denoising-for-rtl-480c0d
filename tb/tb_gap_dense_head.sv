// tb_gap_dense_head: self-checking test of the GlobalAveragePooling + Dense(1)
// head with the classifier's formats (2 x 4 inputs in ap_fixed<15,7>).
// Random inputs and weights, including full-scale values that make the GAP
// rounding and the result saturation matter, are compared with
// tb_ref_pkg::ref_head. Also checks the one-clock latency.
module tb_gap_dense_head;
  import ht_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg = '0;
  logic start = 0, done;
  logic signed [14:0] in_fm [2][4];
  logic signed [14:0] score;

  gap_dense_head dut (.*);

  int checks = 0, failures = 0, sat = 0;
  longint w [MAXC];
  longint b;
  fm_t    x;

  initial begin
    for (int p = 0; p < 2; p++) for (int c = 0; c < 4; c++) in_fm[p][c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      longint e;
      if (t % 10 == 0) begin
        for (int c = 0; c < 4; c++) begin
          w[c] = rnd_code(HD_WW, 31);
          @(negedge clk);
          cfg = '{we: 1'b1, addr: CFG_AW'(clf_base(CLF_NB) + c), data: CFG_DW'(w[c])};
        end
        b = rnd_code(HD_BW, 31);
        @(negedge clk);
        cfg = '{we: 1'b1, addr: CFG_AW'(clf_base(CLF_NB) + 4), data: CFG_DW'(b)};
        @(negedge clk);
        cfg = '0;
      end
      for (int p = 0; p < MAXL; p++) for (int c = 0; c < MAXC; c++) x[p][c] = 0;
      for (int p = 0; p < 2; p++)
        for (int c = 0; c < 4; c++) begin
          x[p][c] = rnd_code(15, (t % 2) ? 16383 : 300);
          in_fm[p][c] = 15'(x[p][c]);
        end
      e = ref_head(x, 2, 4, 8, GAP_W, GAP_W - GAP_I, w, HD_WW - HD_WI, b, HD_BW - HD_BI,
                   SCORE_W, SCORE_F);
      if (e == 16383 || e == -16384) sat++;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      checks++;
      if (!done || longint'(score) != e) begin
        failures++;
        if (failures < 10) $display("test %0d: done=%0d score %0d exp %0d", t, done, score, e);
      end
    end
    $display("saturated results: %0d", sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
