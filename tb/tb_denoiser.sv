// tb_denoiser: self-checking test of the denoiser network at its full size
// (128-sample frames).
//
// Random weights (|w| <= 0.75) and biases are written for all eleven layers
// through the cfg bus at the ht_pkg address map; random normalised frames
// (|x| <= 6) are applied. The reference chains tb_ref_pkg::ref_conv through
// the same layer table, adds the input to the tenth layer's output (global
// <14,8>, saturated) and applies the k=1 projection. Checked: every sample of
// y_fm, every sample of the y_wr stream, and the 11 * (LEN + 1) clock latency.
module tb_denoiser;
  import ht_pkg::*;
  import tb_ref_pkg::*;

  localparam int LEN = TRACE_LEN;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_wr_t cfg = '0;
  logic start = 0, busy, done, y_wr;
  logic [$clog2(LEN)-1:0] y_idx;
  logic signed [13:0] y_data;
  logic signed [13:0] x_fm [LEN][1];
  logic signed [13:0] y_fm [LEN][1];

  denoiser dut (.*);

  int checks = 0, failures = 0, nstream = 0;
  wt_t w [DEN_NL];
  bs_t b [DEN_NL];
  fm_t xin, yref;

  always @(posedge clk) if (rst_n && y_wr) begin
    nstream++;
    checks++;
    if (longint'(y_data) != yref[y_idx][0]) begin
      failures++;
      if (failures < 10) $display("stream y[%0d] got %0d exp %0d", y_idx, y_data, yref[y_idx][0]);
    end
  end

  task automatic load_weights();
    for (int l = 0; l < DEN_NL; l++) begin
      for (int o = 0; o < DEN_COUT[l]; o++)
        for (int c = 0; c < DEN_CIN[l]; c++)
          for (int t = 0; t < DEN_K[l]; t++) begin
            w[l][o][c][t] = rnd_code(DEN_W, 48);
            @(negedge clk);
            cfg = '{we: 1'b1, addr: CFG_AW'(den_base(l) + (o * DEN_CIN[l] + c) * DEN_K[l] + t),
                    data: CFG_DW'(w[l][o][c][t])};
          end
      for (int o = 0; o < DEN_COUT[l]; o++) begin
        b[l][o] = rnd_code(DEN_W, 32);
        @(negedge clk);
        cfg = '{we: 1'b1, addr: CFG_AW'(den_base(l) + DEN_COUT[l] * DEN_CIN[l] * DEN_K[l] + o),
                data: CFG_DW'(b[l][o])};
      end
    end
    @(negedge clk);
    cfg = '0;
  endtask

  function automatic void ref_model(input fm_t x, output fm_t y);
    fm_t a, t;
    a = x;
    for (int l = 0; l < DEN_NL - 1; l++) begin
      ref_conv(a, LEN, DEN_CIN[l], DEN_COUT[l], DEN_K[l], 1, 1'b1, DEN_F, w[l], DEN_F,
               b[l], DEN_F, DEN_W, DEN_F, DEN_W, DEN_F, t);
      a = t;
    end
    for (int p = 0; p < LEN; p++)
      for (int c = 0; c < 4; c++)
        a[p][c] = ref_q(val(a[p][c], DEN_F) + val(x[p][0], DEN_F), DEN_W, DEN_F);
    ref_conv(a, LEN, 4, 1, 1, 1, 1'b0, DEN_F, w[DEN_NL-1], DEN_F, b[DEN_NL-1], DEN_F,
             DEN_W, DEN_F, DEN_W, DEN_F, y);
  endfunction

  initial begin
    for (int p = 0; p < LEN; p++) x_fm[p][0] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++) begin
      int cyc;
      if (f % 2 == 0) load_weights();
      for (int p = 0; p < MAXL; p++) for (int c = 0; c < MAXC; c++) xin[p][c] = 0;
      for (int p = 0; p < LEN; p++) begin
        xin[p][0] = rnd_code(DEN_W, 384);
        x_fm[p][0] = 14'(xin[p][0]);
      end
      ref_model(xin, yref);
      nstream = 0;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      @(negedge clk);
      checks++;
      if (cyc != DEN_NL * (LEN + 1)) begin
        failures++;
        $display("frame %0d: done after %0d clocks, expected %0d", f, cyc, DEN_NL * (LEN + 1));
      end
      checks++;
      if (nstream != LEN) begin
        failures++;
        $display("frame %0d: %0d stream samples", f, nstream);
      end
      for (int p = 0; p < LEN; p++) begin
        checks++;
        if (longint'(y_fm[p][0]) != yref[p][0]) begin
          failures++;
          if (failures < 10) $display("frame %0d: y[%0d] got %0d exp %0d", f, p, y_fm[p][0], yref[p][0]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
