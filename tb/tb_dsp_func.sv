// tb_dsp_func: accuracy test of the fixed-point DSP functions.
//
// Sweeps sigmoid over x = -12000..12000 (scale 1:1000) and log10 over
// x = 10..30000 (scale 1:10) and compares each result with the real function
// computed here: 1000 / (1 + e^(-x/1000)) and 100 * log10(x / 10).  The tolerances
// are those of the table-based integer algorithms (sigmoid within 30/1000; log10
// within 5/100, since dividing by 10 until the argument is below 100 keeps as
// little as two digits: 1089 becomes 10 and gives 200 for log10(108.9)).  The
// mirror property y(-x) = 1000 - y(x) of the sigmoid, relu, the x <= 0 case of
// log10, the unknown-function error and the one-clock latency are checked exactly.
`timescale 1ns/1ps
module tb_dsp_func;
  import rexa_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic        start, done, err;
  logic [7:0]  func;
  logic [15:0] x, y;
  dsp_func dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic eval(logic [7:0] f, int xv, output int yv);
    @(negedge clk); start = 1'b1; func = f; x = 16'(xv);
    @(negedge clk); start = 1'b0;
    check("done one clock after start", done);
    yv = int'($signed(y));
  endtask

  int yv, yn, maxe_s = 0, maxe_l = 0, e;
  real r;
  initial begin
    start = 1'b0; func = '0; x = '0;
    repeat (3) @(negedge clk); rst_n = 1'b1;
    for (int xv = -12000; xv <= 12000; xv += 37) begin
      eval(IOS_SIGMOID, xv, yv);
      r = 1000.0 / (1.0 + $exp(-real'(xv) / 1000.0));
      e = (yv > int'(r)) ? yv - int'(r) : int'(r) - yv;
      if (e > maxe_s) maxe_s = e;
      check($sformatf("sigmoid(%0d) = %0d, real %f", xv, yv, r), e <= 30);
      eval(IOS_SIGMOID, -xv, yn);
      check($sformatf("sigmoid mirror at %0d", xv), yn == 1000 - yv);
    end
    for (int xv = 10; xv <= 30000; xv += 13) begin
      eval(IOS_LOG10, xv, yv);
      r = 100.0 * $log10(real'(xv) / 10.0);
      e = (yv > int'(r)) ? yv - int'(r) : int'(r) - yv;
      if (e > maxe_l) maxe_l = e;
      check($sformatf("log10(%0d) = %0d, real %f", xv, yv, r), e <= 5);
    end
    eval(IOS_LOG10, 0, yv);    check("log10(0)", yv == -32768);
    eval(IOS_LOG10, -5, yv);   check("log10(-5)", yv == -32768);
    eval(IOS_RELU, -1234, yv); check("relu negative", yv == 0);
    eval(IOS_RELU, 4321, yv);  check("relu positive", yv == 4321);
    eval(8'd77, 1, yv);        check("unknown function", err);
    $display("largest error: sigmoid %0d/1000, log10 %0d/100", maxe_s, maxe_l);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
