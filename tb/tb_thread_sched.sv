// tb_thread_sched: test of the frame distribution over the VM threads.
//
// Three threads with four task slots each are modelled: a model task table per
// thread accepts a new task when the scheduler raises its cr_valid (if it has a
// free slot) and frees tasks at random.  The host offers frames continuously.  For
// every accepted frame the testbench checks that it went to a thread with a free
// slot and the fewest busy slots (lowest index on a tie), that run_thread names
// it, that cr_pc carries the frame address, and that the per-thread frame counters
// agree; while all threads are full no frame may be accepted.
`timescale 1ns/1ps
module tb_thread_sched;
  localparam int NT = 3, MT = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic          run_valid, run_ready;
  logic [15:0]   run_pc, cr_pc;
  logic [1:0]    run_thread;
  logic [NT-1:0] cr_valid, cr_ack, cr_ok;
  logic [MT-1:0] busy [NT];
  logic [15:0]   frames [NT];

  thread_sched #(.NTHREADS(NT), .MAXTASKS(MT)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cnt [NT], full_waits = 0, accepted = 0;

  always_comb
    for (int t = 0; t < NT; t++) begin
      cr_ok[t]  = (busy[t] != '1);
      cr_ack[t] = cr_valid[t];
    end

  initial begin
    int best, bt;
    for (int t = 0; t < NT; t++) begin busy[t] = '0; cnt[t] = 0; end
    run_valid = 1'b0; run_pc = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      // tasks end at random
      for (int t = 0; t < NT; t++)
        for (int s = 0; s < MT; s++) if (it >= 200 && busy[t][s] && ($urandom % 12) == 0) busy[t][s] = 1'b0;
      run_valid = ($urandom % 2) == 0; run_pc = 16'($urandom);
      #1;
      best = MT + 1; bt = -1;
      for (int t = 0; t < NT; t++)
        if (busy[t] != '1 && $countones(busy[t]) < best) begin best = $countones(busy[t]); bt = t; end
      if (run_valid) begin
        check("accepted exactly when a thread has room", run_ready == (bt >= 0));
        if (bt < 0) full_waits++;
      end else check("no frame, no task", cr_valid == '0);
      if (run_ready) begin
        check($sformatf("least busy thread %0d, got %0d", bt, run_thread), int'(run_thread) == bt);
        check("one task request", cr_valid == NT'(1 << bt));
        check("frame address", cr_pc == run_pc);
        cnt[bt]++; accepted++;
      end
      @(posedge clk); #1;
      // the model thread takes the task into its lowest free slot at the clock edge
      if (run_ready)
        for (int s = 0; s < MT; s++) if (!busy[bt][s]) begin busy[bt][s] = 1'b1; break; end
      for (int t = 0; t < NT; t++) check("frame counter", int'(frames[t]) == cnt[t]);
    end
    check("frames accepted", accepted > 100);
    check("full threads seen", full_waits > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
