// tb_ann_workload: neural-network forward passes on the whole VM at its default size.
//
// Runs the layer configurations of the published ANN evaluation on rexa_top:
//   [2,3,1], [4,3,2] (the network of the published example), [4,8,8,4] and
//   [8,32,32,8], the largest of the evaluated networks that fits a 4096-byte code
//   segment.
// For each network the testbench (as host) writes one code frame into the code
// segment.  The frame holds the input vector, per layer a weight array, a scale
// vector, a fold output and an activation output, and a short program that runs
// each layer as
//   act[l-1] W[l] F[l] S[l] vecfold     F[l] = S(act[l-1] . W[l])
//   F[l] act[l] 0 0 vecmap              act[l] = sigmoid(F[l])
// and ends.  Weights and inputs are random (weights -500..500 on a 1:1000 scale,
// every scale element -1000, i.e. divide by 1000).  After the task has ended
// without error the host reads every fold output and activation back and checks
// them: each fold result exactly, recomputed here from the activations read back
// for the layer before (32-bit sum, truncating division, 16-bit saturation), and
// each activation against the real sigmoid of the fold result within 25/1000.
// The clock count of each forward pass is printed.
`timescale 1ns/1ps
module tb_ann_workload;
  import rexa_pkg::*;

  localparam int NT = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ DUT
  mem_req_t    host_req;
  logic        host_gnt, host_rvalid;
  logic [7:0]  host_rdata;
  logic        run_valid, run_ready;
  logic [15:0] run_pc;
  logic [0:0]  run_thread;
  logic [15:0] frames [NT];
  logic        preempt [NT], out_valid [NT], out_ready [NT], in_valid [NT], in_ready [NT];
  logic [15:0] out_data [NT], in_data [NT], tx_dst [NT], tx_data [NT], rx_src [NT], rx_data [NT];
  logic        tx_valid [NT], tx_ready [NT], rx_ready [NT], rx_valid [NT];
  logic [3:0]  task_busy [NT];
  logic        fin_valid [NT], fin_err [NT], ev_resume [NT], to_resume [NT];
  logic [15:0] fin_pc [NT];
  vm_status_t  vm_st [NT];
  logic        gc_req, gc_done;
  logic [15:0] gc_lo, gc_hi;
  logic [5:0]  dict_used;
  logic        lst_wr_en, lst_start, lst_busy, lst_done, lst_found;
  logic [9:0]  lst_wr_addr;
  logic [7:0]  lst_wr_data, lst_index;
  logic [15:0][7:0] lst_chars;
  logic [4:0]  lst_len;
  logic        adc_start, adc_valid, adc_trig, dac_start;
  logic [15:0] adc_trigmode, adc_depth, adc_gain, adc_freq, adc_device, adc_data;
  logic [15:0] dac_wave, dac_interval, dac_ampl, dac_freq, dac_device;

  rexa_top dut (.*);

  always_comb
    for (int t = 0; t < NT; t++) begin
      preempt[t] = 1'b0; out_ready[t] = 1'b1; tx_ready[t] = 1'b1;
      in_valid[t] = 1'b0; in_data[t] = '0; rx_valid[t] = 1'b0; rx_data[t] = '0;
    end

  // ------------------------------------------------------------ assembler
  logic [7:0] img [4096];
  int ap, top;
  task automatic b(int v); img[ap] = 8'(v); ap++; endtask
  task automatic lit(int v); b((v >> 8) & 'h3f); b(v & 'hff); endtask
  task automatic op(opcode_e o); b('h80 | int'(o)); endtask
  task automatic fcall(ios_func_e f); op(OP_FCALL); b(int'(f)); endtask
  task automatic setcell(int a, int v); img[a] = 8'(v >> 8); img[a+1] = 8'(v); endtask
  // allocate an array of n cells after the code, return its address
  function automatic int arr(int n);
    int a;
    a = top; img[a] = 8'(n >> 8); img[a+1] = 8'(n); top = top + 2 + 2 * n;
    return a;
  endfunction

  // ------------------------------------------------------------ host port
  task automatic hwrite(int a, int d);
    host_req = '{req: 1'b1, we: 1'b1, addr: 16'(a), wdata: 8'(d)};
    #1;
    while (!host_gnt) begin @(negedge clk); #1; end
    @(posedge clk); host_req <= '0; @(negedge clk);
  endtask
  task automatic hread(int a, output logic [7:0] d);
    host_req = '{req: 1'b1, we: 1'b0, addr: 16'(a), wdata: 8'h0};
    #1;
    while (!host_gnt) begin @(negedge clk); #1; end
    @(posedge clk); host_req <= '0;
    @(negedge clk);
    while (!host_rvalid) @(negedge clk);
    d = host_rdata;
  endtask
  task automatic hcell(int a, output int v);
    logic [7:0] h, l;
    hread(a, h); hread(a + 1, l);
    v = int'($signed({h, l}));
  endtask

  // ------------------------------------------------------------ reference
  function automatic int sig_ref(int x);
    return int'(1000.0 / (1.0 + $exp(-real'(x) / 1000.0)));
  endfunction
  function automatic int sat(longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return int'(v);
  endfunction

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_fin = 0, n_err = 0;
  always_ff @(posedge clk)
    if (rst_n)
      for (int t = 0; t < NT; t++)
        if (fin_valid[t]) begin n_fin <= n_fin + 1; if (fin_err[t]) n_err <= n_err + 1; end

  // ------------------------------------------------------------ one network
  int wt [8][];          // weights per layer, neuron by neuron
  task automatic run_net(int sz[$]);
    int L, actA [8], wA [8], fA [8], sA [8], fin0, err0, cyc, v, got_f, exp_f;
    longint t0;
    longint acc;
    int prev [], cur [];
    string name;
    L = sz.size();
    name = "[";
    foreach (sz[k]) name = {name, $sformatf("%0d%s", sz[k], k == L - 1 ? "]" : ",")};
    for (int k = 0; k < 4096; k++) img[k] = 8'h0;
    // data area after a code area of 16 bytes per layer
    top = 16 * L + 8;
    actA[0] = arr(sz[0]);
    for (int i = 0; i < sz[0]; i++) setcell(actA[0] + 2 + 2 * i, int'($urandom_range(2000)) - 1000);
    for (int l = 1; l < L; l++) begin
      wA[l] = arr(sz[l - 1] * sz[l]);
      wt[l] = new[sz[l - 1] * sz[l]];
      foreach (wt[l][k]) begin
        wt[l][k] = int'($urandom_range(1000)) - 500;
        setcell(wA[l] + 2 + 2 * k, wt[l][k]);
      end
      sA[l] = arr(sz[l]);
      for (int j = 0; j < sz[l]; j++) setcell(sA[l] + 2 + 2 * j, -1000);
      fA[l] = arr(sz[l]);
      actA[l] = arr(sz[l]);
    end
    check($sformatf("%s fits the code segment (%0d bytes)", name, top), top <= 4096);
    ap = 0;
    for (int l = 1; l < L; l++) begin
      lit(actA[l - 1]); lit(wA[l]); lit(fA[l]); lit(sA[l]); fcall(IOS_VECFOLD);
      lit(fA[l]); lit(actA[l]); lit(0); lit(0); fcall(IOS_VECMAP);
    end
    op(OP_END);
    for (int a = 0; a < top; a++) hwrite(a, int'(img[a]));

    fin0 = n_fin; err0 = n_err;
    run_pc = 16'h0; run_valid = 1'b1;
    #1; while (!run_ready) begin @(negedge clk); #1; end
    @(posedge clk); run_valid <= 1'b0;
    t0 = longint'($time);
    while (n_fin == fin0) @(negedge clk);
    cyc = int'((longint'($time) - t0) / 10);
    check($sformatf("%s ends without error", name), n_err == err0);
    $display("network %s: %0d bytes of code and data, forward pass %0d clocks", name, top, cyc);

    // read back and check layer by layer
    prev = new[sz[0]];
    for (int i = 0; i < sz[0]; i++) begin hcell(actA[0] + 2 + 2 * i, v); prev[i] = v; end
    for (int l = 1; l < L; l++) begin
      cur = new[sz[l]];
      for (int j = 0; j < sz[l]; j++) begin
        acc = 0;
        for (int i = 0; i < sz[l - 1]; i++) acc += longint'(prev[i]) * longint'(wt[l][j * sz[l - 1] + i]);
        exp_f = sat(acc / 1000);
        hcell(fA[l] + 2 + 2 * j, got_f);
        check($sformatf("%s layer %0d fold %0d: %0d expected %0d", name, l, j, got_f, exp_f), got_f == exp_f);
        hcell(actA[l] + 2 + 2 * j, v);
        check($sformatf("%s layer %0d sigmoid %0d: %0d for %0d", name, l, j, v, got_f),
              v - sig_ref(got_f) <= 25 && sig_ref(got_f) - v <= 25);
        cur[j] = v;
      end
      prev = cur;
    end
  endtask

  initial begin
    host_req = '0; run_valid = 1'b0; run_pc = '0; gc_req = 1'b0; gc_lo = '0; gc_hi = '0;
    lst_wr_en = 1'b0; lst_wr_addr = '0; lst_wr_data = '0; lst_start = 1'b0; lst_chars = '0;
    lst_len = '0; adc_trig = 1'b0; adc_valid = 1'b0; adc_data = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    run_net('{2, 3, 1});
    run_net('{4, 3, 2});
    run_net('{4, 8, 8, 4});
    run_net('{8, 32, 32, 8});
    check("four forward passes", n_fin == 4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
