// tb_sample_buf: test of the ADC sample buffer (DMA ring, status, access port).
//
// A 2048-cell buffer is used.  (1) A free-running conversion of 1 kS: the start
// pulse to the converter, sampled = 0 while sampling, sampled = 1 after exactly
// 1024 samples, and the window read back from sample0 on, cyclically, holds the
// samples in order; samples after the window are ignored.  (2) A triggered
// conversion: samples circulate in the ring before the trigger and the window is
// the 1024 samples from the trigger on.  (3) A depth above the buffer size is
// capped.  (4) The access port writes and reads cells while the converter writes.
`timescale 1ns/1ps
module tb_sample_buf;
  import rexa_pkg::*;
  localparam int DEPTH = 2048;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic        start, adc_start, adc_valid, adc_trig, acc_req, acc_we;
  logic [15:0] trigmode, depth_ks, adc_data, sampled, sample0, win_len, acc_addr, acc_wdata, acc_rdata;

  sample_buf #(.DEPTH(DEPTH), .TRIG_FREE(10)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic conv(int mode, int dks);
    @(negedge clk); start = 1'b1; trigmode = 16'(mode); depth_ks = 16'(dks);
    @(negedge clk); start = 1'b0;
    check("start pulse to the converter", adc_start);
    check("sampled cleared", sampled == 16'd0);
  endtask
  task automatic sample(int v, logic trg = 1'b0);
    @(negedge clk); adc_valid = 1'b1; adc_data = 16'(v); adc_trig = trg;
    @(negedge clk); adc_valid = 1'b0; adc_trig = 1'b0;
  endtask
  task automatic rd(int a, output int v);
    @(negedge clk); acc_req = 1'b1; acc_we = 1'b0; acc_addr = 16'(a);
    @(negedge clk); acc_req = 1'b0;
    v = int'(acc_rdata);
  endtask
  task automatic wr(int a, int v);
    @(negedge clk); acc_req = 1'b1; acc_we = 1'b1; acc_addr = 16'(a); acc_wdata = 16'(v);
    @(negedge clk); acc_req = 1'b0; acc_we = 1'b0;
  endtask

  int v, bad, s0, n;
  initial begin
    start = 1'b0; trigmode = '0; depth_ks = '0; adc_valid = 1'b0; adc_data = '0;
    adc_trig = 1'b0; acc_req = 1'b0; acc_we = 1'b0; acc_addr = '0; acc_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // (1) free running, 1 kS
    conv(10, 1);
    check("window length 1024", win_len == 16'd1024);
    for (int k = 0; k < 1023; k++) sample(1000 + k);
    check("not yet sampled", sampled == 16'd0);
    sample(1000 + 1023);
    @(negedge clk);
    check("sampled after 1024 samples", sampled == 16'd1);
    for (int k = 0; k < 20; k++) sample(9999);         // ignored
    s0 = int'(sample0); bad = 0;
    for (int k = 0; k < 1024; k++) begin rd((s0 + k) % 1024, v); if (v != 1000 + k) bad++; end
    check($sformatf("free window in order (%0d wrong)", bad), bad == 0);

    // (2) triggered: 700 samples before the trigger, then 1024
    conv(0, 1);
    n = 0;
    for (int k = 0; k < 700; k++) sample(20000 + k);
    check("waiting for trigger", sampled == 16'd0);
    sample(5000, 1'b1);
    for (int k = 1; k < 1024; k++) sample(5000 + k);
    @(negedge clk);
    check("triggered window complete", sampled == 16'd1);
    s0 = int'(sample0); bad = 0;
    for (int k = 0; k < 1024; k++) begin rd((s0 + k) % 1024, v); if (v != 5000 + k) bad++; end
    check($sformatf("triggered window from the trigger on (%0d wrong)", bad), bad == 0);
    check("ring wrapped: sample0 not 0", s0 == 700 % 1024);

    // (3) depth capped at the buffer size
    conv(10, 7);
    check("depth capped", win_len == 16'(DEPTH));

    // (4) access port during conversion
    wr(17, 16'hbeef); rd(17, v);
    check("access write/read", v == 16'hbeef);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
