// tb_task_sched: test of one thread's task scheduler, with the testbench as VMEXEC.
//
// With 10 clocks per millisecond, the testbench creates tasks from the thread
// scheduler port and by the task word, takes the task tokens the scheduler hands
// out and answers each with a status token, checking: fresh tokens for new tasks,
// round-robin order after a yield, a sleeping task resumed no earlier than its
// deadline and without a pushed status, an await on a code-segment variable
// (polled through the memory port, whose value the testbench changes) resumed with
// 1, an await time-out resumed with -1, an await on the IOS status variable, the
// end of a task (fin, slot freed), an uncaught error (fin_err), a full task table
// refusing creation, and the event/time resume flags.
`timescale 1ns/1ps
module tb_task_sched;
  import rexa_pkg::*;
  localparam int MT = 4, CPM = 10;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic        cr_valid, cr_ack, cr_ok, spawn_req, spawn_ack, spawn_ok, tok_ready;
  logic [15:0] cr_pc, spawn_pc, steps, dios_sampled, dios_sample0, fin_pc;
  logic [1:0]  spawn_id;
  task_token_t tok;
  vm_status_t  st;
  mem_req_t    mreq;
  logic        mgnt, mrvalid;
  logic [7:0]  mrdata;
  logic [MT-1:0] busy;
  logic        fin_valid, fin_err, ev_resume, to_resume;

  task_sched #(.MAXTASKS(MT), .CLK_PER_MS(CPM), .STEPS(16)) dut (.*);

  // code segment model for the poller
  logic [7:0] mem [256];
  assign mgnt = mreq.req;
  always_ff @(posedge clk) begin
    mrvalid <= mgnt;
    mrdata  <= mem[mreq.addr[7:0]];
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0;
  int n_ev = 0, n_to = 0, n_fin = 0, n_err = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && ev_resume) n_ev <= n_ev + 1;
    if (rst_n && to_resume) n_to <= n_to + 1;
    if (rst_n && fin_valid) begin n_fin <= n_fin + 1; if (fin_err) n_err <= n_err + 1; end
  end

  task_token_t t;
  int t_at;
  task automatic get_tok(int maxwait = 200);
    int w; w = 0;
    tok_ready = 1'b1;
    @(negedge clk);
    while (!tok.valid && w < maxwait) begin @(negedge clk); w++; end
    check("token given", tok.valid);
    t = tok; t_at = cyc; tok_ready = 1'b0;
  endtask
  task automatic put_st(vm_status_e s, logic [15:0] pc, int tmo = 0, int val = 0, int adr = 0);
    @(negedge clk);
    st = '{valid: 1'b1, task_id: t.task_id, status: s, pc: 16'(pc), timeout: 16'(tmo),
           ev_value: 16'(val), ev_addr: 16'(adr), exc: EXC_NONE};
    @(negedge clk); st = '0;
  endtask
  task automatic create(logic [15:0] pc);
    @(negedge clk); cr_valid = 1'b1; cr_pc = 16'(pc);
    #1 check("create accepted", cr_ack && cr_ok);
    @(negedge clk); cr_valid = 1'b0;
  endtask

  int t0_id, t1_id, st_at;
  initial begin
    cr_valid = 1'b0; cr_pc = '0; spawn_req = 1'b0; spawn_pc = '0; tok_ready = 1'b0;
    st = '0; dios_sampled = '0; dios_sample0 = '0;
    for (int a = 0; a < 256; a++) mem[a] = 8'h0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check("step budget", steps == 16'd16);

    create(16'h100);
    get_tok();
    check("fresh task", t.fresh && t.pc == 16'h100 && !t.push_status);
    t0_id = int'(t.task_id);
    // a task word from the running task
    @(negedge clk); spawn_req = 1'b1; spawn_pc = 16'h200;
    #1 check("spawn accepted", spawn_ack && spawn_ok);
    t1_id = int'(spawn_id);
    @(negedge clk); spawn_req = 1'b0;
    put_st(ST_YIELD, 16'h105);
    get_tok();
    check("round robin after yield", int'(t.task_id) == t1_id && t.fresh && t.pc == 16'h200);
    put_st(ST_SLEEP, 16'h203, 3);
    st_at = cyc;
    get_tok();
    check("yielded task resumes", int'(t.task_id) == t0_id && !t.fresh && t.pc == 16'h105);
    put_st(ST_AWAIT, 16'h108, 0, 5, 16'h40);      // await var[0x40] == 5, no time-out
    get_tok(100);
    check("sleeper resumes", int'(t.task_id) == t1_id && t.pc == 16'h203 && !t.push_status);
    check($sformatf("sleep lasted %0d clocks", t_at - st_at),
          t_at - st_at >= 2 * CPM && t_at - st_at <= 4 * CPM + 4);
    // task 1 awaits the IOS status with a 2 ms time-out
    put_st(ST_AWAIT, 16'h206, 2, 1, 32'(DIOS_SAMPLED));
    st_at = cyc;
    tok_ready = 1'b1;
    repeat (10) @(negedge clk);
    check("await holds while the value differs", !tok.valid);
    mem[8'h41] = 8'h05;                            // the event happens
    get_tok(100);
    check("event resume", int'(t.task_id) == t0_id && t.push_status && t.status_val == 16'd1
          && t.pc == 16'h108);
    put_st(ST_END, 16'h10a);
    get_tok(100);
    check("time-out resume", int'(t.task_id) == t1_id && t.push_status && t.status_val == 16'hffff);
    check($sformatf("time-out after %0d clocks", t_at - st_at),
          t_at - st_at >= 1 * CPM && t_at - st_at <= 3 * CPM + 4);
    put_st(ST_AWAIT, 16'h208, 0, 1, 32'(DIOS_SAMPLED));
    repeat (5) @(negedge clk);
    dios_sampled = 16'd1;
    get_tok(50);
    check("IOS event resume", int'(t.task_id) == t1_id && t.status_val == 16'd1);
    put_st(ST_ERROR, 16'h20a);
    repeat (3) @(negedge clk);
    check("all slots free", busy == '0);
    // fill the table
    for (int k = 0; k < MT; k++) create(16'h300 + k);
    check("table full", busy == '1);
    @(negedge clk); cr_valid = 1'b1; #1 check("full table refuses", !cr_ok);
    @(negedge clk); cr_valid = 1'b0;
    // step budget end keeps the task ready
    get_tok();
    put_st(ST_STEPS, 16'h350);
    check("fins", n_fin == 2 && n_err == 1);
    check("event resumes", n_ev == 2);
    check("time resumes", n_to == 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
