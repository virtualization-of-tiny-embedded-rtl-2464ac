// dsp_func: fixed-point scalar functions of the DSP library (sigmoid, log10, relu).
//
// All values are signed 16-bit integers with a fixed decimal scale:
//   sigmoid  x scale 1:1000, y scale 1:1000 (y in 0..1000)
//   log10    x scale 1:10,   y scale 1:100  (log10(x/10) * 100)
//   relu     max(0, x), scale unchanged
// The sigmoid is range-segmented exactly as the paper's integer algorithm: linear
// for |x| <= 1000 (500 + x*231/1000), a 24-entry table indexed through the integer
// log10 of x/5 for 1000 < |x| < 3000, a 6-entry table indexed through the log10 of
// x/10 for 3000 <= |x| < 10000, saturation at 0 or 1000 beyond, and the mirror
// y(-x) = 1000 - y(x).  The integer log10 divides by 10 until the argument is
// below 100 and adds 100 per division to a 90-entry table of the two-digit range.
// Table contents (all follow the paper's formulas):
//   log10lut[i] = int(100 * log10((i + 10) / 10)),            i = 0..89
//   sglut13[j]  = int(1000 * sigmoid(x)) - 731 for the first x in 1.00, 1.05, ..
//                 2.95 with int(fplog10(int(1000 x / 5)) / 2) - 65 = j
//   sglut310[j] = int(1000 * sigmoid(x)) - 952 for the first x in 3.0, 3.1, .. 9.9
//                 with int(fplog10(int(1000 x / 10)) / 10) - 14 = j
// The paper's log10 table formula reads log10(i/10) for i = 0..99 while its code
// indexes the table with x - 10; the code's reading is followed.  The paper's
// operation table gives the log word a y scale of 1:1000, its code 1:100; the
// code is followed.  Arguments below 10 (outside the paper's range) are scaled up
// by 10 with 100 subtracted per step; x <= 0 returns -32768.
//
// Interface: start with func and x; y is valid with done one clock later.  The
// unit is combinational with a registered result, i.e. one result per clock.
module dsp_func
  import rexa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [7:0]  func,    // IOS_SIGMOID, IOS_LOG10 or IOS_RELU
  input  logic [15:0] x,
  output logic        done,
  output logic        err,     // unknown function
  output logic [15:0] y
);
  localparam logic [7:0] LOG10LUT [90] = '{
    0, 4, 7, 11, 14, 17, 20, 23, 25, 27, 30, 32, 34, 36, 38, 39, 41, 43, 44, 46,
    47, 49, 50, 51, 53, 54, 55, 56, 57, 59, 60, 61, 62, 63, 64, 65, 66, 67, 68, 69,
    69, 70, 71, 72, 73, 74, 74, 75, 76, 77, 77, 78, 79, 79, 80, 81, 81, 82, 83, 83,
    84, 85, 85, 86, 86, 87, 88, 88, 89, 89, 90, 90, 91, 91, 92, 92, 93, 93, 94, 94,
    95, 95, 96, 96, 97, 97, 98, 98, 99, 99};
  localparam logic [7:0] SGLUT13 [24] = '{
    0, 9, 19, 28, 37, 54, 63, 71, 78, 93, 101, 114, 120, 133, 144, 149, 159, 169,
    177, 185, 196, 203, 208, 216};
  localparam logic [7:0] SGLUT310 [6] = '{0, 8, 30, 41, 46, 47};

  // integer log10, argument scale 1:10, result scale 1:100
  function automatic logic signed [15:0] fplog10(logic signed [31:0] a);
    logic signed [31:0] v, s;
    v = a; s = 0;
    if (a <= 0) return 16'sh8000;
    for (int k = 0; k < 5; k++)
      if (v >= 100) begin v = v / 10; s = s + 1; end
    for (int k = 0; k < 2; k++)
      if (v < 10) begin v = v * 10; s = s - 1; end
    return 16'(s * 100 + 32'(LOG10LUT[v - 10]));
  endfunction

  function automatic logic [15:0] fpsigmoid(logic signed [15:0] xi);
    logic signed [31:0] a, yv, i10;
    logic mirror;
    a = 32'(xi);
    mirror = (a < 0);
    if (mirror) a = -a;
    if (a >= 10000) return mirror ? 16'd0 : 16'd1000;
    if (a <= 1000) begin
      yv = 500 + (a * 231) / 1000;
    end else if (a < 3000) begin
      i10 = 32'(fplog10(a / 5)) / 2 - 65;
      yv = 32'(SGLUT13[i10[4:0]]) + 731;
    end else begin
      i10 = 32'(fplog10(a / 10)) / 10 - 14;
      yv = 32'(SGLUT310[i10[2:0]]) + 952;
    end
    return mirror ? 16'(1000 - yv) : 16'(yv);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done <= 1'b0; err <= 1'b0; y <= '0;
    end else begin
      done <= start;
      err  <= 1'b0;
      if (start) begin
        case (func)
          IOS_SIGMOID: y <= fpsigmoid(x);
          IOS_LOG10:   y <= fplog10(32'($signed(x)));
          IOS_RELU:    y <= x[15] ? 16'h0 : x;
          default: begin y <= '0; err <= 1'b1; end
        endcase
      end
    end
  end
endmodule
