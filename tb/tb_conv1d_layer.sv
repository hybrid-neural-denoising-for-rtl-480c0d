// tb_conv1d_layer: self-checking test of conv1d_layer in four shapes taken
// from the trigger networks: a denoiser layer with kernel 3 and with kernel 2
// (global <14,8> formats), the k=1 linear output projection, and classifier
// block 5 (kernel 3, 2 -> 6 channels, MaxPool 2, mixed formats). Frames are
// shortened to 16 positions to keep the run brief.
module tb_conv1d_layer;
  import ht_pkg::*;

  logic clk = 0, rst_n = 0, go = 0;
  always #5 clk = ~clk;

  logic fin [4];
  int   ck [4], fl [4];

  tb_conv1d_case #(.LEN(16), .CIN(4), .COUT(4), .K(3), .IN_LIM(400), .W_LIM(60))
    c0 (.clk, .rst_n, .go, .fin(fin[0]), .checks(ck[0]), .failures(fl[0]));
  tb_conv1d_case #(.LEN(16), .CIN(4), .COUT(4), .K(2), .IN_LIM(400), .W_LIM(60))
    c1 (.clk, .rst_n, .go, .fin(fin[1]), .checks(ck[1]), .failures(fl[1]));
  tb_conv1d_case #(.LEN(16), .CIN(4), .COUT(1), .K(1), .RELU(1'b0), .IN_LIM(400), .W_LIM(60))
    c2 (.clk, .rst_n, .go, .fin(fin[2]), .checks(ck[2]), .failures(fl[2]));
  tb_conv1d_case #(.LEN(16), .CIN(2), .COUT(6), .K(3), .POOL(2),
    .IN_W(14), .IN_F(7), .W_W(7), .W_F(5), .B_W(7), .B_F(5), .R_W(19), .R_F(11),
    .O_W(15), .O_F(8))
    c3 (.clk, .rst_n, .go, .fin(fin[3]), .checks(ck[3]), .failures(fl[3]));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    go = 1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    $display("TB_RESULT checks=%0d failures=%0d", ck[0] + ck[1] + ck[2] + ck[3],
             fl[0] + fl[1] + fl[2] + fl[3]);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog: timeout");
    $display("TB_RESULT checks=%0d failures=%0d", ck[0] + ck[1] + ck[2] + ck[3],
             fl[0] + fl[1] + fl[2] + fl[3] + 1);
    $finish;
  end
endmodule
