// tb_rexa_top: end-to-end test of the whole hardware VM at its default size.
//
// The testbench is the host: it assembles two code frames and their data into the
// code segment through the host port, offers both frames to the thread scheduler
// (one lands on each VM thread) and plays the ADC, the word streams and the
// communication peers.  The frames exercise, across both threads, the mechanisms
// of the design: arithmetic, loops and calls; a task created by the `task` word
// that runs beside its parent and is preempted by the step budget and yields; a
// sleeping task woken by the millisecond clock; an await on a code-segment
// variable satisfied by the other thread; an await that times out; export and
// import through the shared dictionary; a caught division by zero and an uncaught
// user exception; sigmoid on the DSP unit; a two-neuron network layer (vecfold +
// vecmap sigmoid) on the vector unit; an ADC conversion awaited through the IOS
// status variable and read back from the sample buffer; the DAC parameters;
// in/out/send/receive streams; word-table lookups; dictionary garbage collection
// and host read-back.  Each mechanism is counted and a mechanism that never
// happened is a failure.  Expected values are worked out here (sigmoid against
// the real function within a tolerance).
`timescale 1ns/1ps
module tb_rexa_top;
  import rexa_pkg::*;

  localparam int NT = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
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

  // ------------------------------------------------------------ assembler
  logic [7:0] img [4096];
  int ap;
  task automatic b(int v); img[ap] = 8'(v); ap++; endtask
  task automatic lit(int v); b((v >> 8) & 'h3f); b(v & 'hff); endtask
  task automatic op(opcode_e o); b('h80 | int'(o)); endtask
  task automatic op3(opcode_e o, int a); op(o); b(a >> 8); b(a); endtask
  task automatic fcall(ios_func_e f); op(OP_FCALL); b(int'(f)); endtask
  task automatic patch(int at, int a); img[at+1] = 8'(a >> 8); img[at+2] = 8'(a); endtask
  task automatic setcell(int a, int v); img[a] = 8'(v >> 8); img[a+1] = 8'(v); endtask

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

  // ------------------------------------------------------------ peers and counters
  int outq [NT][$];
  int n_load = 0, n_hread = 0, n_thread [NT], n_steps = 0, n_yield = 0, n_sleep = 0,
      n_await = 0, n_ev = 0, n_to = 0, n_spawn = 0, n_fin = 0, n_err = 0, n_ios = 0,
      n_vec = 0, n_adc = 0, n_samples = 0, n_sampled = 0, n_dac = 0, n_dict = 0,
      n_gc = 0, n_lst_hit = 0, n_lst_miss = 0, n_conflict = 0, n_in = 0, n_tx = 0,
      n_rx = 0, n_out = 0, n_fin_t [NT];
  logic        adc_run = 1'b0;
  int          adc_k = 0, adc_gap = 0;
  logic [15:0] last_tx_dst = '0, last_tx_data = '0;
  logic [15:0] sampled_q = '0;

  always_comb
    for (int t = 0; t < NT; t++) begin
      preempt[t] = 1'b0; out_ready[t] = 1'b1; tx_ready[t] = 1'b1;
      in_valid[t] = in_ready[t]; in_data[t] = 16'h1234;
      rx_valid[t] = rx_ready[t]; rx_data[t] = rx_src[t] + 16'd1000;
    end

  always_ff @(posedge clk) if (rst_n) begin
    int nreq;
    for (int t = 0; t < NT; t++) begin
      if (out_valid[t]) begin outq[t].push_back(int'($signed(out_data[t]))); n_out++; end
      if (vm_st[t].valid) begin
        if (vm_st[t].status == ST_STEPS) n_steps++;
        if (vm_st[t].status == ST_YIELD) n_yield++;
        if (vm_st[t].status == ST_SLEEP) n_sleep++;
        if (vm_st[t].status == ST_AWAIT) n_await++;
      end
      if (ev_resume[t]) n_ev++;
      if (to_resume[t]) n_to++;
      if (fin_valid[t]) begin n_fin++; n_fin_t[t]++; if (fin_err[t]) n_err++; end
      if (dut.ios_rsp[t].done) n_ios++;
      if (dut.d_done[t]) n_dict++;
      if (in_valid[t] && in_ready[t]) n_in++;
      if (tx_valid[t]) begin n_tx++; last_tx_dst <= tx_dst[t]; last_tx_data <= tx_data[t]; end
      if (rx_valid[t]) n_rx++;
    end
    if (dut.g_thr[0].spawn_req || dut.g_thr[1].spawn_req) n_spawn++;
    if (dut.u_ios.v_start) n_vec++;
    if (dac_start) n_dac++;
    if (gc_done) n_gc++;
    nreq = 0;
    for (int r = 0; r < 2 * NT + 2; r++) nreq += int'(dut.rq[r].req);
    if (nreq > 1) n_conflict++;
    sampled_q <= dut.sampled;
    if (dut.sampled == 16'd1 && sampled_q == 16'd0) n_sampled++;
  end

  // ADC model: one sample every fourth clock after the start pulse, value 3k+1
  always_ff @(posedge clk) begin
    adc_valid <= 1'b0;
    if (rst_n && adc_start) begin adc_run <= 1'b1; adc_k <= 0; adc_gap <= 0; n_adc++; end
    else if (adc_run) begin
      adc_gap <= (adc_gap + 1) % 4;
      if (adc_gap == 3) begin
        adc_valid <= 1'b1; adc_data <= 16'(3 * adc_k + 1); adc_k <= adc_k + 1; n_samples++;
        if (adc_k == 2047) adc_run <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------ word table
  task automatic lst_load();
    logic [7:0] t [72];
    for (int k = 0; k < 72; k++) t[k] = 8'h0;
    t[2] = 0;  t[3] = 32;      // length 2
    t[4] = 0;  t[5] = 40;      // length 3
    t[6] = 0;  t[7] = 54;      // length 4
    // "do" -> 7
    t[32] = "d"; t[33] = 2;  t[36] = "o"; t[37] = 7;
    // "dup" -> 5 (a 'b' entry is passed over first)
    t[40] = "b"; t[41] = 99; t[42] = "d"; t[43] = 2; t[46] = "u"; t[47] = 2;
    t[50] = "p"; t[51] = 5;
    // "drop" -> 6
    t[54] = "d"; t[55] = 2; t[58] = "r"; t[59] = 2; t[62] = "o"; t[63] = 2;
    t[66] = "p"; t[67] = 6;
    for (int k = 0; k < 72; k++) begin
      @(negedge clk); lst_wr_en = 1'b1; lst_wr_addr = 10'(k); lst_wr_data = t[k];
    end
    @(negedge clk); lst_wr_en = 1'b0;
  endtask
  task automatic lst_find(string w, logic exp_found, int exp_idx);
    lst_chars = '0;
    for (int k = 0; k < w.len(); k++) lst_chars[k] = w[k];
    lst_len = 5'(w.len());
    lst_start = 1'b1; @(negedge clk); lst_start = 1'b0;
    while (!lst_done) @(negedge clk);
    check($sformatf("lst %s", w), lst_found == exp_found && (!exp_found || lst_index == 8'(exp_idx)));
    if (lst_found) n_lst_hit++; else n_lst_miss++;
  endtask

  // ------------------------------------------------------------ helpers
  function automatic int sig_ref(int x);
    return int'(1000.0 / (1.0 + $exp(-real'(x) / 1000.0)));
  endfunction
  function automatic int abs_i(int v); return v < 0 ? -v : v; endfunction
  task automatic take(int t, int v, string what);
    int got;
    got = (outq[t].size() > 0) ? outq[t].pop_front() : -99999;
    check($sformatf("%s: %0d expected %0d", what, got, v), got == v);
  endtask
  task automatic take_near(int t, int v, int tol, string what);
    int got;
    got = (outq[t].size() > 0) ? outq[t].pop_front() : -99999;
    check($sformatf("%s: %0d expected %0d +- %0d", what, got, v, tol), abs_i(got - v) <= tol);
  endtask
  // remove one given value from a thread's outputs (output of a concurrent task)
  task automatic take_any(int t, int v, string what);
    int hit;
    hit = -1;
    for (int k = 0; k < outq[t].size(); k++) if (hit < 0 && outq[t][k] == v) hit = k;
    check($sformatf("%s: %0d output", what, v), hit >= 0);
    if (hit >= 0) outq[t].delete(hit);
  endtask

  // watchdog
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int V = 'h800, V2 = 'h802, IN = 'h840, W = 'h850, OUT = 'h860, OUT2 = 'h868;
  int fa, fb, at, at2, l_dbl, l_spawn, a_spawn, a_dbl;
  logic [7:0] rb0, rb1;

  initial begin
    host_req = '0; run_valid = 1'b0; run_pc = '0; gc_req = 1'b0; gc_lo = '0; gc_hi = '0;
    lst_wr_en = 1'b0; lst_wr_addr = '0; lst_wr_data = '0; lst_start = 1'b0; lst_chars = '0;
    lst_len = '0; adc_trig = 1'b0; adc_valid = 1'b0; adc_data = '0;
    for (int t = 0; t < NT; t++) begin n_thread[t] = 0; n_fin_t[t] = 0; end
    for (int k = 0; k < 4096; k++) img[k] = 8'h0;

    // ---- frame A: computation, task creation, sleep, exceptions, network layer
    ap = 'h000; fa = ap;
    lit(0); lit(10); lit(0); op(OP_DO); at = ap; op(OP_I); op(OP_I); op(OP_MUL); op(OP_ADD);
    op3(OP_LOOP, at); op(OP_OUT);                                   // 285
    lit(21); a_dbl = ap; op3(OP_CALL, 0); op(OP_OUT);               // 42
    lit(500); lit(V); op(OP_EXPORT);
    lit(0); lit(0); a_spawn = ap; lit(0); op(OP_TASK); op(OP_DROP);
    lit(1); lit(2); lit(3); lit(4); lit(5); fcall(IOS_DAC);
    lit(2); op(OP_SLEEP);
    lit(7); lit(V); op(OP_STORE);
    op(OP_CATCH); op(OP_DUP); at = ap; op3(OP_BRANCHZ, 0); op(OP_OUT); at2 = ap;
    op3(OP_BRANCH, 0);
    patch(at, ap); op(OP_DROP); lit(5); lit(0); op(OP_DIV); op(OP_DROP);
    patch(at2, ap);
    lit(IN); lit(W); lit(OUT); lit(0); fcall(IOS_VECFOLD);
    lit(OUT); lit(OUT2); lit(0); lit(0); fcall(IOS_VECMAP);
    lit(0); lit(OUT2); op(OP_READ); op(OP_OUT);
    lit(1); lit(OUT2); op(OP_READ); op(OP_OUT);
    op(OP_END);
    l_dbl = ap; op(OP_DUP); op(OP_ADD); op(OP_RET);
    patch(a_dbl, l_dbl);
    l_spawn = ap;
    lit(0); lit(40); lit(0); op(OP_DO); at = ap; op(OP_I); op(OP_ADD); op3(OP_LOOP, at);
    op(OP_OUT); op(OP_YIELD); lit(1); op(OP_OUT); op(OP_END);
    img[a_spawn] = 8'((l_spawn >> 8) & 'h3f); img[a_spawn + 1] = 8'(l_spawn);

    // ---- frame B: awaits, import, sigmoid, ADC, streams, uncaught exception
    ap = 'h300; fb = ap;
    lit(0); lit(7); lit(V); op(OP_AWAIT); op(OP_OUT);               // 1
    lit(500); op(OP_IMPORT); op(OP_OUT);                            // 0x800
    lit(3); lit(99); lit(V2); op(OP_AWAIT); op(OP_OUT);             // -1
    lit(1500); fcall(IOS_SIGMOID); op(OP_OUT);
    lit(10); lit(1); lit(1); lit(1000); lit(0); fcall(IOS_ADC);
    lit(0); lit(1); fcall(IOS_SAMPLED); op(OP_AWAIT); op(OP_DROP);
    lit(5); fcall(IOS_SAMPLE0); op(OP_FETCH); op(OP_ADD); fcall(IOS_SAMPLES); op(OP_READ);
    op(OP_OUT);                                                     // 16
    op(OP_IN); op(OP_OUT);
    lit(55); lit(2); op(OP_SEND);
    lit(3); op(OP_RECEIVE); op(OP_OUT);                             // 1003
    lit(9); op(OP_THROW);

    // ---- data
    setcell(IN, 3); setcell(IN + 2, 100); setcell(IN + 4, -200); setcell(IN + 6, 300);
    setcell(W, 6); setcell(W + 2, 1); setcell(W + 4, 2); setcell(W + 6, 3);
    setcell(W + 8, -1); setcell(W + 10, 0); setcell(W + 12, 2);
    setcell(OUT, 2); setcell(OUT2, 2);

    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---- load through the host port
    for (int a = 0; a < 'h880; a++) begin hwrite(a, int'(img[a])); n_load++; end
    hread(fa + 1, rb0); n_hread++;
    check("host read-back", rb0 == img[fa + 1]);

    // ---- word table lookups
    lst_load();
    lst_find("do", 1'b1, 7);
    lst_find("dup", 1'b1, 5);
    lst_find("drop", 1'b1, 6);
    lst_find("dip", 1'b0, 0);
    lst_find("x", 1'b0, 0);

    // ---- start the frames
    run_pc = 16'(fa); run_valid = 1'b1;
    #1; while (!run_ready) begin @(negedge clk); #1; end
    n_thread[run_thread]++;
    check("frame A on thread 0", run_thread == 1'b0);
    @(posedge clk); run_valid <= 1'b0;
    repeat (3) @(negedge clk);
    run_pc = 16'(fb); run_valid = 1'b1;
    #1; while (!run_ready) begin @(negedge clk); #1; end
    n_thread[run_thread]++;
    check("frame B on the less busy thread 1", run_thread == 1'b1);
    @(posedge clk); run_valid <= 1'b0;

    // ---- wait for all tasks: A and its task on thread 0, B on thread 1
    while (n_fin_t[0] < 2 || n_fin_t[1] < 1) @(negedge clk);
    repeat (5) @(negedge clk);

    // thread 0: the created task's outputs interleave with A's
    take_any(0, 780, "created task loop sum");
    take_any(0, 1, "created task after yield");
    take(0, 285, "sum of squares");
    take(0, 42, "call");
    take(0, int'(EXC_DIVBYZERO), "caught division by zero");
    take_near(0, sig_ref(600), 12, "neuron 0");
    take_near(0, sig_ref(500), 12, "neuron 1");
    check("thread 0 no stray output", outq[0].size() == 0);

    take(1, 1, "await event");
    take(1, V, "import");
    take(1, -1, "await time-out");
    take_near(1, sig_ref(1500), 12, "sigmoid 1.5");
    take(1, 16, "ADC sample");
    take(1, 'h1234, "in stream");
    take(1, 1003, "receive");
    check("thread 1 no stray output", outq[1].size() == 0);
    check("send", last_tx_dst == 16'd2 && last_tx_data == 16'd55);
    check("uncaught exception ends B", n_err == 1);
    check("DAC parameters", dac_wave == 16'd1 && dac_interval == 16'd2 && dac_ampl == 16'd3 &&
          dac_freq == 16'd4 && dac_device == 16'd5);
    check("ADC parameters", adc_trigmode == 16'd10 && adc_depth == 16'd1 && adc_freq == 16'd1000);

    // variable and vecfold result in the code segment
    hread(V + 1, rb0); n_hread++;
    check("variable stored by thread 0", rb0 == 8'd7);
    hread(OUT + 2, rb0); hread(OUT + 3, rb1); n_hread += 2;
    check("vecfold neuron 0 in memory", {rb0, rb1} == 16'd600);

    // ---- garbage collection of frame A's data exports
    check("dictionary holds the export", dict_used == 6'd1);
    gc_lo = 16'h800; gc_hi = 16'h8ff; gc_req = 1'b1;
    @(negedge clk); gc_req = 1'b0;
    while (!gc_done) @(negedge clk);
    @(negedge clk);
    check("dictionary emptied", dict_used == 6'd0);

    // ---- every mechanism must have happened
    check("host writes", n_load > 0);
    check("host reads", n_hread > 0);
    check("both threads", n_thread[0] > 0 && n_thread[1] > 0);
    check("step budget preemption", n_steps > 0);
    check("yield", n_yield > 0);
    check("sleep", n_sleep > 0);
    check("await", n_await > 0);
    check("resume by event", n_ev > 0);
    check("resume by time", n_to > 0);
    check("task creation", n_spawn > 0);
    check("tasks ended", n_fin == 3);
    check("IOS calls", n_ios > 0);
    check("vector unit", n_vec == 2);
    check("ADC start", n_adc == 1);
    check("ADC samples", n_samples > 0);
    check("window complete", n_sampled == 1);
    check("DAC start", n_dac == 1);
    check("dictionary", n_dict > 0);
    check("garbage collection", n_gc == 1);
    check("word table hits", n_lst_hit == 3);
    check("word table misses", n_lst_miss == 2);
    check("memory port contention", n_conflict > 0);
    check("streams", n_in > 0 && n_tx > 0 && n_rx > 0 && n_out > 0);
    $display("counts: load=%0d threads=%0d/%0d steps=%0d yield=%0d sleep=%0d await=%0d ev=%0d to=%0d",
             n_load, n_thread[0], n_thread[1], n_steps, n_yield, n_sleep, n_await, n_ev, n_to);
    $display("counts: spawn=%0d fin=%0d err=%0d ios=%0d vec=%0d adc=%0d samples=%0d dac=%0d dict=%0d gc=%0d conflict=%0d",
             n_spawn, n_fin, n_err, n_ios, n_vec, n_adc, n_samples, n_dac, n_dict, n_gc, n_conflict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
