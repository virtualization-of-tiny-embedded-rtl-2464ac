// tb_ios_sched: test of the IOS scheduler with its DSP, vector and sample units.
//
// Two VM-thread ports issue FCALL requests, at times in the same clock, and wait
// for the done pulses; a byte-wide code-segment model serves the vector unit and
// an ADC model delivers samples after the start pulse.  Checked: sigmoid, log10
// and relu results (known points), both threads served when they ask together,
// the IOS data addresses, an ADC conversion (converter parameters, start pulse,
// status variable sampled read through DREAD before and after the window, sample
// values read through DREAD from sample0 on), a DWRITE/DREAD of a sample cell, the
// DAC parameter registers and start pulse, a vecadd on code-segment arrays, and
// errors for an unknown function and for writing a status variable.
`timescale 1ns/1ps
module tb_ios_sched;
  import rexa_pkg::*;
  localparam int NT = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  ios_req_t    req [NT];
  ios_rsp_t    rsp [NT];
  mem_req_t    mreq;
  logic        mgnt, mrvalid, adc_start, adc_valid, adc_trig, dac_start;
  logic [7:0]  mrdata;
  logic [15:0] adc_trigmode, adc_depth, adc_gain, adc_freq, adc_device, adc_data;
  logic [15:0] dac_wave, dac_interval, dac_ampl, dac_freq, dac_device, sampled, sample0;

  ios_sched #(.NTHREADS(NT), .SB_DEPTH(2048)) dut (.*);

  logic [7:0] mem [4096];
  assign mgnt = mreq.req;
  always_ff @(posedge clk) begin
    mrvalid <= mgnt && !mreq.we;
    mrdata  <= mem[mreq.addr[11:0]];
    if (mgnt && mreq.we) mem[mreq.addr[11:0]] <= mreq.wdata;
  end

  // ADC model: 1500 samples of value 2k+3, one every other clock, after a start
  int adc_k = -1, n_dac = 0;
  always_ff @(posedge clk) begin
    adc_valid <= 1'b0;
    if (rst_n && dac_start) n_dac <= n_dac + 1;
    if (adc_start) adc_k <= 0;
    else if (adc_k >= 0 && adc_k < 1500 && !adc_valid) begin
      adc_valid <= 1'b1; adc_data <= 16'(2 * adc_k + 3); adc_k <= adc_k + 1;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ios_rsp_t r [NT];
  task automatic call(int t, ios_func_e f, int a0 = 0, int a1 = 0, int a2 = 0, int a3 = 0, int a4 = 0);
    @(negedge clk);
    req[t] = '{valid: 1'b1, func: 8'(f), args: {16'(a4), 16'(a3), 16'(a2), 16'(a1), 16'(a0)}};
    @(negedge clk); req[t] = '0;
    while (!rsp[t].done) @(negedge clk);
    r[t] = rsp[t];
  endtask

  int v;
  initial begin
    for (int t = 0; t < NT; t++) req[t] = '0;
    adc_trig = 1'b0; adc_data = '0;
    for (int k = 0; k < 4096; k++) mem[k] = 8'h0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // both threads at once
    fork
      call(0, IOS_SIGMOID, 0);
      call(1, IOS_RELU, -5);
    join
    check("sigmoid(0) = 500", !r[0].err && r[0].result == 16'd500);
    check("relu(-5) = 0", !r[1].err && r[1].result == 16'd0);
    call(1, IOS_LOG10, 1000);  check("log10(100.0) = 200", r[1].result == 16'd200);
    call(0, IOS_SAMPLED);      check("sampled address", r[0].result == DIOS_SAMPLED);
    call(0, IOS_SAMPLES);      check("samples address", r[0].result == DIOS_SAMPLES);
    call(1, IOS_SAMPLE0);      check("sample0 address", r[1].result == DIOS_SAMPLE0);

    // ADC: ( trigmode depth gain freq device -- ), args[0] = device
    call(0, IOS_ADC, 3, 500, 2, 1, 10);
    check("ADC parameters", adc_device == 16'd3 && adc_freq == 16'd500 && adc_gain == 16'd2 &&
          adc_depth == 16'd1 && adc_trigmode == 16'd10);
    call(1, IOS_DREAD, int'(DIOS_SAMPLED), 0);
    check("sampled = 0 while converting", r[1].result == 16'd0);
    repeat (2200) @(negedge clk);
    call(1, IOS_DREAD, int'(DIOS_SAMPLED), 0);
    check("sampled = 1 after the window", r[1].result == 16'd1);
    call(1, IOS_DREAD, int'(DIOS_SAMPLE0), 0);
    v = int'(r[1].result);
    call(0, IOS_DREAD, int'(DIOS_SAMPLES), v + 10);
    check($sformatf("sample 10 = %0d", r[0].result), r[0].result == 16'(2 * 10 + 3));
    call(0, IOS_DREAD, int'(DIOS_SAMPLES), v + 1023);
    check("last sample", r[0].result == 16'(2 * 1023 + 3));
    call(1, IOS_DWRITE, int'(DIOS_SAMPLES), 77, 1234);
    call(0, IOS_DREAD, int'(DIOS_SAMPLES), 77);
    check("sample cell written", r[0].result == 16'd1234);
    call(0, IOS_DWRITE, int'(DIOS_SAMPLED), 0, 5);
    check("status variable not writable", r[0].err);

    // DAC: ( wave interval ampl freq device -- )
    call(1, IOS_DAC, 4, 440, 100, 20, 2);
    check("DAC parameters", dac_device == 16'd4 && dac_freq == 16'd440 && dac_ampl == 16'd100 &&
          dac_interval == 16'd20 && dac_wave == 16'd2);
    check("DAC start", n_dac == 1);

    // vecadd on code-segment arrays: a[i] + b[i] into d
    for (int a = 'h100; a <= 'h300; a += 'h100) begin mem[a] = 0; mem[a+1] = 3; end
    for (int k = 0; k < 3; k++) begin
      mem['h102 + 2*k] = 0; mem['h103 + 2*k] = 8'(10 * k + 1);
      mem['h202 + 2*k] = 0; mem['h203 + 2*k] = 8'(k + 5);
    end
    call(0, IOS_VECADD, 0, 'h300, 'h200, 'h100);
    check("vecadd done", !r[0].err);
    for (int k = 0; k < 3; k++)
      check($sformatf("vecadd cell %0d", k), {mem['h302 + 2*k], mem['h303 + 2*k]} == 16'(11 * k + 6));
    call(1, ios_func_e'(8'd99));
    check("unknown function", r[1].err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
