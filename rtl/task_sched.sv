// task_sched: the task scheduler of one VM thread (Task SCHED).
//
// Keeps a table of up to MAXTASKS co-routine tasks, each with its resume pc and a
// state: free, ready, running, sleeping (until a millisecond deadline) or awaiting
// (a variable reaching a value, with an optional millisecond time-out).  When its
// VMEXEC is idle, the scheduler scans the table once and hands out one task token:
// like the paper's multi-tasking loop, a task whose awaited event has happened or
// whose time-out has expired is taken at once (the scan stops there); otherwise the
// first ready task found is taken.  The scan starts after the task scheduled last,
// so ready tasks take turns (the paper's loop always starts at task 0; the rotation
// is this design's choice, so that `yield` lets other tasks run).  The VMEXEC runs
// the task for at most STEPS instructions and returns a status token; the scheduler
// stores the new state.  An awaiting task is resumed with the await result on top
// of its data stack: 1 when the event happened, -1 when the time-out expired.
//
// Awaited variables in the code segment are polled through a CS read port (two
// byte reads per poll, one awaiting task after the other); the IOS data variables
// (conversion status, sample ring offset) arrive as plain inputs.  A time-out of
// 0 ms waits without limit.  Milliseconds are counted from the clock with
// CLK_PER_MS cycles per millisecond (70 MHz, the clock of the reported FPGA build).
//
// New tasks come from the thread scheduler (new code frames) and from the `task`
// word of a running task; the latter has priority.  Task priorities and deadlines
// of the energy-aware scheduler are not used.
module task_sched
  import rexa_pkg::*;
#(
  parameter int MAXTASKS   = 4,
  parameter int CLK_PER_MS = 70000,
  parameter int STEPS      = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // new code frame from the thread scheduler
  input  logic        cr_valid,
  input  logic [15:0] cr_pc,
  output logic        cr_ack,
  output logic        cr_ok,
  // task word of the running task
  input  logic        spawn_req,
  input  logic [15:0] spawn_pc,
  output logic        spawn_ack,
  output logic        spawn_ok,
  output logic [1:0]  spawn_id,
  // VMEXEC
  output task_token_t tok,
  input  logic        tok_ready,
  output logic [15:0] steps,
  input  vm_status_t  st,
  // awaited variables
  output mem_req_t    mreq,
  input  logic        mgnt,
  input  logic        mrvalid,
  input  logic [7:0]  mrdata,
  input  logic [15:0] dios_sampled,
  input  logic [15:0] dios_sample0,
  // status
  output logic [MAXTASKS-1:0] busy,        // task slot in use
  output logic        fin_valid,           // a task ended (pulse)
  output logic        fin_err,             // ... by an uncaught exception
  output logic [15:0] fin_pc,
  output logic        ev_resume,           // an awaiting task resumed by its event
  output logic        to_resume            // a sleeping/awaiting task resumed by time
);
  typedef enum logic [2:0] { T_FREE, T_READY, T_RUN, T_SLEEP, T_AWAIT } tstate_e;

  tstate_e     ts    [MAXTASKS];
  logic [15:0] tpc   [MAXTASKS];
  logic        tnew  [MAXTASKS];
  logic [31:0] tdl   [MAXTASKS];   // deadline in ms
  logic        tdlen [MAXTASKS];   // deadline enabled
  logic [15:0] tval  [MAXTASKS];
  logic [15:0] tadr  [MAXTASKS];
  logic        thit  [MAXTASKS];   // polled CS variable equals the awaited value

  localparam int IW = $clog2(MAXTASKS);

  // ---------------------------------------------------------------- millisecond clock
  logic [31:0] cyc, now;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= '0; now <= '0;
    end else if (cyc == 32'(CLK_PER_MS - 1)) begin
      cyc <= '0; now <= now + 32'd1;
    end else begin
      cyc <= cyc + 32'd1;
    end
  end

  // ---------------------------------------------------------------- selection
  function automatic logic ev_ok(int i);
    if (tadr[i] == DIOS_SAMPLED) return dios_sampled == tval[i];
    if (tadr[i] == DIOS_SAMPLE0) return dios_sample0 == tval[i];
    return thit[i];
  endfunction

  logic          running;
  logic [IW-1:0] last;

  // k-th slot after the one scheduled last
  function automatic int rot(int k);
    return (int'(last) + k) % MAXTASKS;
  endfunction
  logic          pick;
  logic [IW-1:0] pidx;
  logic          pev, pto;       // picked by event / by time

  always_comb begin
    logic found_rdy;
    logic [IW-1:0] rdy;
    pick = 1'b0; pidx = '0; pev = 1'b0; pto = 1'b0;
    found_rdy = 1'b0; rdy = '0;
    for (int k = 1; k <= MAXTASKS; k++) begin
      if (!pick) begin
        if (ts[rot(k)] == T_AWAIT && ev_ok(rot(k))) begin
          pick = 1'b1; pidx = IW'(rot(k)); pev = 1'b1;
        end else if ((ts[rot(k)] == T_AWAIT || ts[rot(k)] == T_SLEEP) && tdlen[rot(k)]
                     && now >= tdl[rot(k)]) begin
          pick = 1'b1; pidx = IW'(rot(k)); pto = 1'b1;
        end else if (ts[rot(k)] == T_READY && !found_rdy) begin
          found_rdy = 1'b1; rdy = IW'(rot(k));
        end
      end
    end
    if (!pick && found_rdy) begin
      pick = 1'b1; pidx = rdy;
    end
  end

  // free slot for creation
  logic          has_free;
  logic [IW-1:0] free_idx;
  always_comb begin
    has_free = 1'b0; free_idx = '0;
    for (int i = MAXTASKS - 1; i >= 0; i--) begin
      if (ts[i] == T_FREE) begin
        has_free = 1'b1; free_idx = IW'(i);
      end
    end
  end

  assign spawn_ack = spawn_req;
  assign spawn_ok  = has_free;
  assign spawn_id  = 2'(free_idx);
  assign cr_ack    = cr_valid && !spawn_req;
  assign cr_ok     = has_free;
  assign steps     = 16'(STEPS);

  always_comb
    for (int i = 0; i < MAXTASKS; i++) busy[i] = (ts[i] != T_FREE);

  // ---------------------------------------------------------------- event poller
  typedef enum logic [1:0] { P_NEXT, P_REQ, P_WAIT } pstate_e;
  pstate_e     ps;
  logic [IW-1:0] pi;
  logic        pbyte;      // 0: high byte, 1: low byte
  logic [7:0]  phi;

  assign mreq = '{req: (ps == P_REQ), we: 1'b0,
                  addr: tadr[pi] + {15'h0, pbyte}, wdata: 8'h0};

  // ---------------------------------------------------------------- table update
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAXTASKS; i++) begin
        ts[i] <= T_FREE; tpc[i] <= '0; tnew[i] <= 1'b0; tdl[i] <= '0; tdlen[i] <= 1'b0;
        tval[i] <= '0; tadr[i] <= '0; thit[i] <= 1'b0;
      end
      running <= 1'b0; last <= IW'(MAXTASKS - 1); tok <= '0;
      fin_valid <= 1'b0; fin_err <= 1'b0; fin_pc <= '0;
      ev_resume <= 1'b0; to_resume <= 1'b0;
      ps <= P_NEXT; pi <= '0; pbyte <= 1'b0; phi <= '0;
    end else begin
      tok.valid <= 1'b0;
      fin_valid <= 1'b0; ev_resume <= 1'b0; to_resume <= 1'b0;

      // creation
      if (spawn_req && has_free) begin
        ts[free_idx] <= T_READY; tpc[free_idx] <= spawn_pc; tnew[free_idx] <= 1'b1;
      end else if (cr_valid && has_free) begin
        ts[free_idx] <= T_READY; tpc[free_idx] <= cr_pc; tnew[free_idx] <= 1'b1;
      end

      // dispatch
      if (!running && tok_ready && pick) begin
        running <= 1'b1;
        last    <= pidx;
        ts[pidx]   <= T_RUN;
        tnew[pidx] <= 1'b0;
        tok <= '{valid: 1'b1, task_id: 2'(pidx), pc: tpc[pidx], fresh: tnew[pidx],
                 push_status: pev || (pto && ts[pidx] == T_AWAIT), status_val: pev ? 16'd1 : 16'hffff};
        ev_resume <= pev;
        to_resume <= pto;
      end

      // status back from the VMEXEC
      if (st.valid) begin
        running <= 1'b0;
        tpc[st.task_id] <= st.pc;
        case (st.status)
          ST_STEPS, ST_YIELD: ts[st.task_id] <= T_READY;
          ST_SLEEP: begin
            ts[st.task_id] <= T_SLEEP;
            tdl[st.task_id] <= now + 32'(st.timeout); tdlen[st.task_id] <= 1'b1;
          end
          ST_AWAIT: begin
            ts[st.task_id]   <= T_AWAIT;
            tdl[st.task_id]  <= now + 32'(st.timeout);
            tdlen[st.task_id] <= (st.timeout != 16'h0);
            tval[st.task_id] <= st.ev_value;
            tadr[st.task_id] <= st.ev_addr;
            thit[st.task_id] <= 1'b0;
          end
          default: begin   // ST_END, ST_ERROR
            ts[st.task_id] <= T_FREE;
            fin_valid <= 1'b1;
            fin_err   <= (st.status == ST_ERROR);
            fin_pc    <= st.pc;
          end
        endcase
      end

      // poll awaited code-segment variables, one task at a time
      case (ps)
        P_NEXT: begin
          if (ts[pi] == T_AWAIT && !tadr[pi][15]) begin
            ps <= P_REQ; pbyte <= 1'b0;
          end else begin
            pi <= (pi == IW'(MAXTASKS - 1)) ? '0 : pi + 1'b1;
          end
        end
        P_REQ: if (mgnt) ps <= P_WAIT;
        default: if (mrvalid) begin
          if (!pbyte) begin
            phi <= mrdata; pbyte <= 1'b1; ps <= P_REQ;
          end else begin
            if (ts[pi] == T_AWAIT) thit[pi] <= ({phi, mrdata} == tval[pi]);
            ps <= P_NEXT;
            pi <= (pi == IW'(MAXTASKS - 1)) ? '0 : pi + 1'b1;
          end
        end
      endcase
    end
  end
endmodule
