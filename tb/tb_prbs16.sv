// tb_prbs16: self-checking test of the PRBS16 source.
// Checks the all-ones start value, every step against a bit-level model of
// the feedback b15 ^ b13 ^ b12 ^ b10 shifted into bit 0, that the register
// holds while 'en' is low, and that the sequence has the maximal period
// 2^16 - 1 (it returns to all ones after exactly 65535 steps and not before).
module tb_prbs16;
  logic clk = 0, rst_n = 0, en = 0;
  logic [15:0] q;
  always #5 clk = ~clk;

  prbs16 dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] m;
  int period;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (q != 16'hFFFF) begin failures++; $display("seed %h", q); end
    m = 16'hFFFF;
    period = 0;
    for (int i = 1; i <= 65535; i++) begin
      logic fbit;
      en = ($urandom_range(0, 7) != 0);
      @(negedge clk);
      if (en) begin
        fbit = m[15] ^ m[13] ^ m[12] ^ m[10];
        m = {m[14:0], fbit};
      end else i--;
      if (q != m) begin
        failures++;
        if (failures < 10) $display("step %0d: got %h exp %h", i, q, m);
      end
      checks++;
      if (en && q == 16'hFFFF && period == 0) period = i;
    end
    checks++;
    if (period != 65535) begin
      failures++;
      $display("period %0d", period);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
