// tb_vmexec: self-checking test of one VM execution unit (VMEXEC).
//
// Small bytecode programs are assembled into a byte array that models the code
// segment (grants are delayed at random to exercise the request/grant handshake).
// The testbench plays the task scheduler: it hands out task tokens, collects the
// status tokens, and re-issues a task that used up its step budget or yielded.  The
// IOS, the dictionary, task creation and the word streams are modelled by simple
// responders.  Expected results are computed here from the meaning of each word:
// arithmetic, loops, calls, variables and arrays, exceptions caught and uncaught,
// stack overflow, yield/sleep/await status tokens, FCALL, export/import, task and
// stream words.
`timescale 1ns/1ps
module tb_vmexec;
  import rexa_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ DUT
  task_token_t tok;
  logic        tok_ready;
  logic [15:0] steps;
  logic        preempt;
  vm_status_t  st;
  mem_req_t    mreq;
  logic        mgnt, mrvalid;
  logic [7:0]  mrdata;
  ios_req_t    ios_req;
  ios_rsp_t    ios_rsp;
  logic        dict_req, dict_def, dict_done, dict_found;
  logic [15:0] dict_key, dict_addr, dict_raddr;
  logic        spawn_req, spawn_ack, spawn_ok;
  logic [15:0] spawn_pc;
  logic [1:0]  spawn_id;
  logic        out_valid, out_ready, in_valid, in_ready, tx_valid, tx_ready, rx_ready, rx_valid;
  logic [15:0] out_data, in_data, tx_dst, tx_data, rx_src, rx_data;

  vmexec dut (.*);

  // ------------------------------------------------------------ code segment model
  logic [7:0] img [4096];
  logic       stall;
  assign mgnt = mreq.req && !stall;
  always_ff @(posedge clk) begin
    stall   <= ($urandom % 4) == 0;
    mrvalid <= mgnt && !mreq.we;
    mrdata  <= img[mreq.addr[11:0]];
    if (mgnt && mreq.we) img[mreq.addr[11:0]] <= mreq.wdata;
  end

  // ------------------------------------------------------------ IOS model
  // function 0: x+1 after 3 clocks; DREAD: 100+index; function 99: error
  int ios_cnt = 0, ios_wait = 0;
  ios_req_t ios_held;
  always_ff @(posedge clk) begin
    ios_rsp <= '0;
    if (ios_req.valid) begin ios_held <= ios_req; ios_wait <= 3; end
    else if (ios_wait > 0) begin
      ios_wait <= ios_wait - 1;
      if (ios_wait == 1) begin
        ios_cnt <= ios_cnt + 1;
        ios_rsp.done <= 1'b1;
        ios_rsp.err  <= (ios_held.func == 8'd99);
        ios_rsp.result <= (ios_held.func == IOS_DREAD)   ? 16'd100 + ios_held.args[1] :
                          (ios_held.func == IOS_SAMPLES) ? DIOS_SAMPLES :
                                                           ios_held.args[0] + 16'd1;
      end
    end
  end

  // ------------------------------------------------------------ dictionary model
  logic [15:0] dkey [4], dval [4];
  int          dn = 0;
  logic        dbusy = 1'b0;
  always_ff @(posedge clk) begin
    dict_done <= 1'b0;
    if (dict_req && !dbusy && !dict_done) begin
      dbusy <= 1'b1;
    end else if (dbusy) begin
      dbusy <= 1'b0; dict_done <= 1'b1;
      if (dict_def) begin dkey[dn] <= dict_key; dval[dn] <= dict_addr; dn <= dn + 1; dict_found <= 1'b1; end
      else begin
        dict_found <= 1'b0;
        for (int k = 0; k < dn; k++) if (dkey[k] == dict_key) begin dict_found <= 1'b1; dict_raddr <= dval[k]; end
      end
    end
  end

  assign spawn_ack = spawn_req;
  assign spawn_ok  = 1'b1;
  assign spawn_id  = 2'd2;
  assign out_ready = 1'b1;
  assign in_valid  = in_ready;
  assign in_data   = 16'h0055;
  assign tx_ready  = 1'b1;
  assign rx_valid  = rx_ready;
  assign rx_data   = rx_src * 16'd10;

  int outq[$];
  logic [15:0] last_spawn, last_tx_dst, last_tx_data;
  int n_tx = 0, tx0;
  always_ff @(posedge clk) begin
    if (out_valid && out_ready) outq.push_back(int'($signed(out_data)));
    if (spawn_req) last_spawn <= spawn_pc;
    if (tx_valid) begin last_tx_dst <= tx_dst; last_tx_data <= tx_data; n_tx <= n_tx + 1; end
  end

  // ------------------------------------------------------------ assembler
  int ap;
  task automatic b(int v); img[ap] = 8'(v); ap++; endtask
  task automatic lit(int v); b((v >> 8) & 'h3f); b(v & 'hff); endtask
  task automatic llit(int v); b('h40 | ((v >> 24) & 'h3f)); b(v >> 16); b(v >> 8); b(v); endtask
  task automatic op(opcode_e o); b('h80 | int'(o)); endtask
  task automatic op3(opcode_e o, int a); op(o); b(a >> 8); b(a); endtask
  task automatic fcall(int f); op(OP_FCALL); b(f); endtask
  task automatic patch(int at, int a); img[at+1] = 8'(a >> 8); img[at+2] = 8'(a); endtask

  // ------------------------------------------------------------ scheduler model
  vm_status_t s;
  int yields = 0, steps_ends = 0;
  task automatic run1(int pc, logic fresh, int id, logic push, int pval);
    while (!tok_ready) @(posedge clk);
    tok <= '{valid: 1'b1, task_id: 2'(id), pc: 16'(pc), fresh: fresh, push_status: push,
             status_val: 16'(pval)};
    @(posedge clk);
    tok <= '0;
    while (!st.valid) @(posedge clk);
    s = st;
    @(posedge clk);
  endtask
  // run until the task leaves the ready state
  task automatic run(int pc, int id = 0);
    run1(pc, 1'b1, id, 1'b0, 0);
    while (s.status == ST_STEPS || s.status == ST_YIELD) begin
      if (s.status == ST_YIELD) yields++; else steps_ends++;
      run1(int'(s.pc), 1'b0, id, 1'b0, 0);
    end
  endtask
  task automatic expect_out(string what, int v);
    int got;
    got = (outq.size() > 0) ? outq.pop_front() : -99999;
    check($sformatf("%s: out %0d, expected %0d", what, got, v), got == v);
  endtask

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int p_alu, p_loop, p_call, p_sub, p_var, p_exc, p_div, p_trap, p_unc, p_rsov, p_yld,
      p_slp, p_aw, p_ios, p_dict, p_misc, p_long, p_ioerr, p_dsov, p_sendn, p_sendx, at, at2, x, y;

  initial begin
    tok = '0; steps = 16'd16; preempt = 1'b0; dict_found = 1'b0; dict_raddr = '0;
    stall = 1'b0; mrvalid = 1'b0; mrdata = '0;
    for (int k = 0; k < 4096; k++) img[k] = 8'h0;
    for (int k = 0; k < 4; k++) begin dkey[k] = '0; dval[k] = '0; end
    last_spawn = '0; last_tx_dst = '0; last_tx_data = '0; ios_held = '0;

    // ---- programs
    x = int'($urandom % 2000) - 1000;  y = int'($urandom % 50) + 1;
    ap = 'h10; p_alu = ap;
    lit(x); lit(y); op(OP_ADD); op(OP_OUT);
    lit(x); lit(y); op(OP_SUB); op(OP_OUT);
    lit(x); lit(y); op(OP_MUL); op(OP_OUT);
    lit(x); lit(y); op(OP_DIV); op(OP_OUT);
    lit(x); lit(y); op(OP_MOD); op(OP_OUT);
    lit(x); op(OP_NEGATE); op(OP_OUT);
    lit(x); lit(y); op(OP_LT); op(OP_OUT);
    lit(x); lit(y); op(OP_SWAP); op(OP_DROP); op(OP_DUP); op(OP_MUL); op(OP_OUT);
    lit(3); lit(4); op(OP_OVER); op(OP_OUT); op(OP_DROP); op(OP_DROP);
    lit(12); lit(10); op(OP_AND); op(OP_OUT);
    lit(0); op(OP_ZEQ); op(OP_OUT);
    op(OP_END);

    // sum of i for i = 0..9 with a do-loop
    p_loop = ap;
    lit(0); lit(10); lit(0); op(OP_DO); at = ap; op(OP_I); op(OP_ADD); op3(OP_LOOP, at);
    op(OP_OUT); op(OP_END);

    // call a word that doubles its argument; branchz skips the word body
    p_sub = ap; op(OP_DUP); op(OP_ADD); op(OP_RET);
    p_call = ap; lit(21); op3(OP_CALL, p_sub); op(OP_OUT);
    lit(0); at = ap; op3(OP_BRANCHZ, 0); lit(111); op(OP_OUT); patch(at, ap);
    lit(222); op(OP_OUT); op(OP_END);

    // variable at 0x800 and an array of 4 cells at 0x810
    img['h810] = 8'h00; img['h811] = 8'h04;
    p_var = ap;
    lit(1234); lit('h800); op(OP_STORE); lit('h800); op(OP_FETCH); op(OP_OUT);
    lit(77); lit(2); lit('h810); op(OP_WRITE); lit(2); lit('h810); op(OP_READ); op(OP_OUT);
    lit(-5); lit(3); lit('h810); op(OP_WRITE); lit(3); lit('h810); op(OP_READ); op(OP_OUT);
    op(OP_END);

    // catch / throw: the handler prints the exception code, then a bounds error
    p_exc = ap;
    op(OP_CATCH); op(OP_DUP); at = ap; op3(OP_BRANCHZ, 0);
    op(OP_OUT);                                   // handler: print code
    op(OP_END);
    patch(at, ap); op(OP_DROP); lit(42); op(OP_THROW); op(OP_END);

    p_div = ap;                                    // division by zero, caught
    op(OP_CATCH); op(OP_DUP); at = ap; op3(OP_BRANCHZ, 0); op(OP_OUT); op(OP_END);
    patch(at, ap); op(OP_DROP); lit(5); lit(0); op(OP_DIV); op(OP_END);

    p_trap = ap;                                   // undefined op code, caught
    op(OP_CATCH); op(OP_DUP); at = ap; op3(OP_BRANCHZ, 0); op(OP_OUT); op(OP_END);
    patch(at, ap); op(OP_DROP); b(8'hff); op(OP_END);

    p_ioerr = ap;                                  // array index out of range, caught
    op(OP_CATCH); op(OP_DUP); at = ap; op3(OP_BRANCHZ, 0); op(OP_OUT); op(OP_END);
    patch(at, ap); op(OP_DROP); lit(4); lit('h810); op(OP_READ); op(OP_END);

    p_unc = ap; op(OP_DROP); op(OP_END);           // underflow, not caught
    p_rsov = ap; op3(OP_CALL, ap);                 // endless recursion
    p_dsov = ap; at = ap; lit(1); op3(OP_BRANCH, at);   // endless pushing

    p_yld = ap; lit(1); op(OP_OUT); op(OP_YIELD); lit(2); op(OP_OUT); op(OP_END);
    p_slp = ap; lit(25); op(OP_SLEEP); op(OP_END);
    p_aw  = ap; lit(500); lit(7); lit('h800); op(OP_AWAIT); op(OP_OUT); op(OP_END);

    p_ios = ap; lit(41); fcall(0); op(OP_OUT);
    fcall(IOS_SAMPLES); op(OP_OUT);
    lit(6); fcall(99); op(OP_END);                 // error: not caught

    p_dict = ap; lit(300); lit('h820); op(OP_EXPORT); lit(300); op(OP_IMPORT); op(OP_OUT);
    lit(301); op(OP_IMPORT); op(OP_END);

    p_misc = ap; lit(9); lit(8); lit('h400); op(OP_TASK); op(OP_OUT);
    op(OP_IN); op(OP_OUT); lit(99); lit(3); op(OP_SEND); lit(4); op(OP_RECEIVE); op(OP_OUT);
    op(OP_END);

    // sendn: cells 2 and 3 of the array at 'h810 to destination 5; then index 4 (error)
    p_sendn = ap; lit(2); lit(2); lit('h810); lit(5); op(OP_SENDN); op(OP_END);
    p_sendx = ap; lit(2); lit(3); lit('h810); lit(5); op(OP_SENDN); op(OP_END);

    p_long = ap; llit(32'h0123_4567 & 32'h3fff_ffff); op(OP_OUT); op(OP_OUT); op(OP_END);

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---- ALU
    run(p_alu);
    check("alu ends", s.status == ST_END);
    expect_out("add", x + y);
    expect_out("sub", x - y);
    expect_out("mul", int'($signed(16'(x * y))));
    expect_out("div", x / y);
    expect_out("mod", x % y);
    expect_out("negate", -x);
    expect_out("lt", (x < y) ? -1 : 0);
    expect_out("swap drop dup mul", int'($signed(16'(y * y))));
    expect_out("over", 3);
    expect_out("and", 8);
    expect_out("0=", -1);
    check("step budget used up at least once", steps_ends > 0);

    run(p_loop);  expect_out("do loop sum", 45);
    run(p_call);  expect_out("call/ret", 42); expect_out("branchz", 222);
    run(p_var);   expect_out("store/fetch", 1234); expect_out("write/read", 77);
    expect_out("write/read negative", -5);
    check("array cell in memory", {img['h818], img['h819]} == 16'hfffb);

    run(p_exc);   expect_out("throw caught", 42); check("exc task ends", s.status == ST_END);
    run(p_div);   expect_out("div by zero", int'(EXC_DIVBYZERO));
    run(p_trap);  expect_out("trap", int'(EXC_TRAP));
    run(p_ioerr); expect_out("bounds", int'(EXC_IO));
    run(p_unc);   check("uncaught underflow", s.status == ST_ERROR && s.exc == EXC_STACK);
    run(p_rsov);  check("return stack overflow", s.status == ST_ERROR && s.exc == EXC_STACK);
    run(p_dsov);  check("data stack overflow", s.status == ST_ERROR && s.exc == EXC_STACK);

    // ---- yield: the tb re-issues the token
    yields = 0;
    run(p_yld); expect_out("before yield", 1); expect_out("after yield", 2);
    check("one yield", yields == 1);

    run1(p_slp, 1'b1, 1, 1'b0, 0);
    check("sleep status", s.status == ST_SLEEP && s.timeout == 16'd25 && s.task_id == 2'd1);
    run1(int'(s.pc), 1'b0, 1, 1'b0, 0);
    check("end after sleep", s.status == ST_END);

    run1(p_aw, 1'b1, 2, 1'b0, 0);
    check("await status", s.status == ST_AWAIT && s.timeout == 16'd500 &&
          s.ev_value == 16'd7 && s.ev_addr == 16'h800);
    run1(int'(s.pc), 1'b0, 2, 1'b1, -1);            // resumed by time-out
    expect_out("await result", -1);

    run(p_ios);
    expect_out("fcall 0", 42); expect_out("fcall no args", 16'h8000 - 65536);
    check("ios error uncaught", s.status == ST_ERROR && s.exc == EXC_IO);

    run(p_dict);
    expect_out("import", 16'h820);
    check("import unknown", s.status == ST_ERROR && s.exc == EXC_IO);

    run(p_misc);
    expect_out("task id", 2); check("task pc", last_spawn == 16'h400);
    expect_out("in", 16'h55);
    check("send", last_tx_dst == 16'd3 && last_tx_data == 16'd99);
    expect_out("receive", 40);

    tx0 = n_tx;
    run(p_sendn);
    check("sendn ends", s.status == ST_END);
    check("sendn count", n_tx - tx0 == 2);
    check("sendn last cell", last_tx_dst == 16'd5 && last_tx_data == 16'hfffb);
    tx0 = n_tx;
    run(p_sendx);
    check("sendn out of range", s.status == ST_ERROR && s.exc == EXC_IO && n_tx - tx0 == 1);

    run(p_long);
    expect_out("long lsw", 16'h4567);
    expect_out("long msw", 16'h0123);

    check("no stray output", outq.size() == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
