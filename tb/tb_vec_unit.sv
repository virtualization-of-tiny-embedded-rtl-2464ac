// tb_vec_unit: test of the vector (ANN) unit against a reference model.
//
// Arrays (cell count + cells) are placed in a byte-wide code-segment model that
// delays grants at random; a 64-cell sample-buffer model and a DSP-function model
// (y = x + 100 * func, one clock) complete the environment.  Each operation is run
// on random data with a random scale vector (entries -3..3, i.e. divide, keep or
// multiply), and the destination is compared cell by cell with the model's result
// (32-bit arithmetic, saturation to 16 bits): vecadd, vecmul, vecscale, vecfold (a
// 4-input, 3-neuron layer), vecmap without scaling, vecload from the sample buffer
// across the ring end and from a code-segment array with an offset.  Size errors
// (unequal sizes, a too short weight vector) must end with err and leave the
// destination untouched.
`timescale 1ns/1ps
module tb_vec_unit;
  import rexa_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic        start, done, err, mgnt, mrvalid, sb_req, sb_we, f_start, f_done, f_err;
  logic [7:0]  func, mrdata, f_func;
  logic [IOS_NARGS_MAX-1:0][15:0] args;
  mem_req_t    mreq;
  logic [15:0] sb_addr, sb_wdata, sb_rdata, sb_len, f_x, f_y;

  vec_unit dut (.*);

  // code segment model
  logic [7:0] mem [4096];
  logic       stall;
  assign mgnt = mreq.req && !stall;
  always_ff @(posedge clk) begin
    stall   <= ($urandom % 3) == 0;
    mrvalid <= mgnt && !mreq.we;
    mrdata  <= mem[mreq.addr[11:0]];
    if (mgnt && mreq.we) mem[mreq.addr[11:0]] <= mreq.wdata;
  end
  // sample buffer model
  logic [15:0] sb [64];
  assign sb_len = 16'd64;
  always_ff @(posedge clk) if (sb_req) begin
    if (sb_we) sb[sb_addr[5:0]] <= sb_wdata;
    sb_rdata <= sb[sb_addr[5:0]];
  end
  // DSP function model
  always_ff @(posedge clk) begin
    f_done <= f_start; f_err <= 1'b0; f_y <= f_x + 16'd100 * {8'h0, f_func};
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int getc(int a, int k); return int'($signed({mem[a+2+2*k], mem[a+3+2*k]})); endfunction
  task automatic setc(int a, int k, int v); mem[a+2+2*k] = 8'(v >> 8); mem[a+3+2*k] = 8'(v); endtask
  task automatic mkarr(int a, int n, int lo, int hi);
    mem[a] = 8'(n >> 8); mem[a+1] = 8'(n);
    for (int k = 0; k < n; k++) setc(a, k, lo + int'($urandom % (hi - lo + 1)));
  endtask
  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction
  function automatic int S(longint v, int s);
    if (s > 0) return sat(v * s);
    if (s < 0) return sat(v / (-s));
    return sat(v);
  endfunction

  task automatic run(ios_func_e f, int a0, int a1, int a2, int a3 = 0);
    @(negedge clk);
    func = 8'(f); args = '0;
    args[0] = 16'(a0); args[1] = 16'(a1); args[2] = 16'(a2); args[3] = 16'(a3);
    start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
  endtask

  localparam int A = 'h100, B = 'h200, D = 'h300, SC = 'h400, W = 'h500;
  int ex [16], bad, s;
  initial begin
    start = 1'b0; func = '0; args = '0; stall = 1'b0; mrvalid = 1'b0; mrdata = '0;
    sb_rdata = '0; f_done = 1'b0; f_err = 1'b0; f_y = '0;
    for (int k = 0; k < 4096; k++) mem[k] = 8'h0;
    for (int k = 0; k < 64; k++) sb[k] = 16'(1000 + 7 * k);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // vecadd
    mkarr(A, 8, -20000, 20000); mkarr(B, 8, -20000, 20000); mkarr(D, 8, 0, 0); mkarr(SC, 8, -3, 3);
    for (int k = 0; k < 8; k++) ex[k] = S(longint'(getc(A, k)) + getc(B, k), getc(SC, k));
    run(IOS_VECADD, SC, D, B, A);
    bad = 0; for (int k = 0; k < 8; k++) if (getc(D, k) != ex[k]) bad++;
    check($sformatf("vecadd (%0d wrong)", bad), !err && bad == 0);

    // vecmul
    mkarr(A, 8, -300, 300); mkarr(B, 8, -300, 300); mkarr(SC, 8, -3, 3);
    for (int k = 0; k < 8; k++) ex[k] = S(longint'(getc(A, k)) * getc(B, k), getc(SC, k));
    run(IOS_VECMUL, SC, D, B, A);
    bad = 0; for (int k = 0; k < 8; k++) if (getc(D, k) != ex[k]) bad++;
    check($sformatf("vecmul (%0d wrong)", bad), !err && bad == 0);

    // vecscale
    mkarr(A, 10, -15000, 15000); mkarr(SC, 8, -3, 3);
    for (int k = 0; k < 8; k++) ex[k] = S(getc(A, k), getc(SC, k));
    run(IOS_VECSCALE, SC, D, A);
    bad = 0; for (int k = 0; k < 8; k++) if (getc(D, k) != ex[k]) bad++;
    check($sformatf("vecscale (%0d wrong)", bad), !err && bad == 0);

    // vecfold: 4 inputs, 3 neurons, weights neuron by neuron
    mkarr(A, 4, -1000, 1000); mkarr(W, 12, -100, 100); mkarr(D, 3, 0, 0); mkarr(SC, 3, -3, -1);
    for (int j = 0; j < 3; j++) begin
      longint acc; acc = 0;
      for (int i = 0; i < 4; i++) acc += longint'(getc(A, i)) * getc(W, j * 4 + i);
      ex[j] = S(acc, getc(SC, j));
    end
    run(IOS_VECFOLD, SC, D, W, A);
    bad = 0; for (int k = 0; k < 3; k++) if (getc(D, k) != ex[k]) bad++;
    check($sformatf("vecfold (%0d wrong)", bad), !err && bad == 0);

    // vecmap with function 2, no scaling
    mkarr(A, 8, -1000, 1000); mkarr(D, 8, 0, 0);
    for (int k = 0; k < 8; k++) ex[k] = sat(getc(A, k) + 200);
    run(IOS_VECMAP, 0, 2, D, A);
    bad = 0; for (int k = 0; k < 8; k++) if (getc(D, k) != ex[k]) bad++;
    check($sformatf("vecmap (%0d wrong)", bad), !err && bad == 0);

    // vecload from the sample buffer across the ring end
    run(IOS_VECLOAD, D, 60, 16'h8000);
    bad = 0; for (int k = 0; k < 8; k++) if (getc(D, k) != 1000 + 7 * ((60 + k) % 64)) bad++;
    check($sformatf("vecload ring (%0d wrong)", bad), !err && bad == 0);

    // vecload from a code-segment array with an offset
    mkarr(A, 12, -500, 500);
    run(IOS_VECLOAD, D, 4, A);
    bad = 0; for (int k = 0; k < 8; k++) if (getc(D, k) != getc(A, 4 + k)) bad++;
    check($sformatf("vecload offset (%0d wrong)", bad), !err && bad == 0);

    // size errors leave the destination alone
    mkarr(D, 8, 5, 5); mkarr(B, 7, 1, 1); mkarr(A, 8, 1, 1);
    run(IOS_VECADD, 0, D, B, A);
    bad = 0; for (int k = 0; k < 8; k++) if (getc(D, k) != 5) bad++;
    check("vecadd size error", err && bad == 0);
    mkarr(A, 4, 1, 1); mkarr(W, 11, 1, 1); mkarr(D, 3, 5, 5);
    run(IOS_VECFOLD, 0, D, W, A);
    check("vecfold weight size error", err && getc(D, 0) == 5);
    run(IOS_VECLOAD, D, 9, A);
    check("vecload source too short", err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
