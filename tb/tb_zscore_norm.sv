// tb_zscore_norm: self-checking test of the z-score normaliser at full size
// (128-sample traces of signed 16-bit samples).
//
// Traces: small-amplitude noise, full-scale noise, a pulse on a quiet
// baseline, a trace with a large offset and a constant trace. Each output is
// compared with a double-precision reference (population standard
// deviation), rounded to ap_fixed<14,8>; one LSB of difference is allowed for
// the finite precision of the integer square root and reciprocal. The test
// also checks the stall (s_ready low while a trace is processed, with
// s_valid held high), the 210-clock processing time from the last sample to
// 'full', and that the frame is held until 'release'.
module tb_zscore_norm;
  import tb_ref_pkg::*;

  localparam int LEN = 128;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_valid = 0, s_ready, full, release_i = 0;
  logic signed [15:0] s_data = 0;
  logic signed [13:0] x_fm [LEN][1];

  zscore_norm dut (.clk, .rst_n, .s_valid, .s_ready, .s_data, .full, .release_i, .x_fm);

  int checks = 0, failures = 0, stalls = 0;

  always @(posedge clk) if (rst_n && s_valid && !s_ready) stalls++;

  longint x [MAXL];
  fm_t    zr;

  task automatic run_trace(input int kind);
    int cyc;
    for (int i = 0; i < LEN; i++) begin
      unique case (kind)
        0: x[i] = longint'($urandom_range(0, 40)) - 20;
        1: x[i] = longint'($urandom_range(0, 65535)) - 32768;
        2: x[i] = (i >= 60 && i < 66) ? ((i % 2) ? 3000 : -2800) : longint'($urandom_range(0, 6)) - 3;
        3: x[i] = 30000 + longint'($urandom_range(0, 200)) - 100;
        default: x[i] = -1234;
      endcase
    end
    // stream in with random gaps
    for (int i = 0; i < LEN; i++) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) begin
        s_valid = 0;
        @(negedge clk);
      end
      s_valid = 1;
      s_data  = 16'(x[i]);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
    end
    // keep s_valid high with garbage: it must be stalled
    @(negedge clk);
    s_data = 16'h7fff;
    cyc = 1;
    while (!full) begin
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (cyc != 211) begin
      failures++;
      $display("trace %0d: full after %0d clocks, expected 211", kind, cyc);
    end
    ref_zscore(x, LEN, 14, 6, zr);
    for (int i = 0; i < LEN; i++) begin
      longint d;
      d = longint'(x_fm[i][0]) - zr[i][0];
      checks++;
      if (d > 1 || d < -1) begin
        failures++;
        if (failures < 10) $display("trace %0d: z[%0d] got %0d exp %0d", kind, i, x_fm[i][0], zr[i][0]);
      end
    end
    // held until release
    repeat (20) @(negedge clk);
    checks++;
    if (!full || s_ready) begin
      failures++;
      $display("trace %0d: frame not held", kind);
    end
    s_valid = 0;
    release_i = 1;
    @(negedge clk);
    release_i = 0;
    checks++;
    if (full || !s_ready) begin
      failures++;
      $display("trace %0d: release not taken", kind);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 5; k++) run_trace(k);
    for (int k = 0; k < 3; k++) run_trace(k);
    checks++;
    if (stalls == 0) begin
      failures++;
      $display("no stall seen");
    end
    $display("stalled clocks: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
