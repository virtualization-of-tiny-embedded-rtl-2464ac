// vmexec: the bytecode execution loop of one VM thread (VMEXEC).
//
// A thread is started by a task token from its task scheduler (task id, pc) and runs
// the task's bytecode until its step budget `steps` is used up, `preempt` is raised,
// or the task reaches a scheduling point (yield, sleep, await, end) or an uncaught
// exception.  It then sends one status token back (resume pc, reason, sleep/await
// parameters) and waits for the next task token.  This is the paper's vmloop: fetch
// the word at pc, decode it by its two top bits (short literal, long literal, lower
// or upper op-code range), execute it on the stacks, compute the next pc.
//
// The thread owns its data, return and loop stacks (vm_stack instances), each
// partitioned per task; the task id selects the partition, so a task switch costs
// no copying.  Code and embedded data are read and written byte by byte through a
// shared-memory request port (mem_req_t, hold req until gnt, read data with rvalid
// one cycle later).  FCALL words go to the IOS scheduler (ios_req_t / ios_rsp_t),
// export / import to the global dictionary, the task word to the task scheduler,
// and out / in / send / receive to stream ports with valid/ready handshakes.
// sendn ( length offset arr dst -- ) sends `length` cells of a code-segment array
// from index `offset` on the send port, one cell per handshake, each index checked
// against the array's length cell (EXC_IO when out of range).
//
// Timing: every byte access takes at least two cycles (grant, data), so a one-byte
// operation takes about four cycles, a literal or branch about eight; stack-only
// operations execute in one cycle after the fetch.  One instruction is one step.
//
// Exceptions (stack over/underflow, division by zero, unknown op code, failed IOS
// call or import, throw): if the task has set a catch point, the return and loop
// stacks are unwound to the depth at the catch point, the exception code is made
// pending and execution resumes at the catch instruction, which pushes the code
// (and 0 when nothing is pending), as the paper describes.  Without a catch point
// the task ends with status ST_ERROR.  Binding user handler words to exceptions is
// not built.
//
// Follows the paper: bytecode format, the register set (OPC, PC, DSTOP, RSTOP,
// FSTOP), stacks separated into data, return and loop stack, the return stack not
// reachable by user words, step-limited loop with status tokens.  This design's own:
// op-code numbering and operand order (see rexa_pkg), byte-serial memory access,
// array bounds checks against the array's length cell, per-task catch points.
module vmexec
  import rexa_pkg::*;
#(
  parameter int DS_DEPTH = 1024,
  parameter int RS_DEPTH = 32,
  parameter int FS_DEPTH = 32,
  parameter int MAXTASKS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // scheduler side
  input  task_token_t tok,
  output logic        tok_ready,
  input  logic [15:0] steps,
  input  logic        preempt,
  output vm_status_t  st,
  // code segment
  output mem_req_t    mreq,
  input  logic        mgnt,
  input  logic        mrvalid,
  input  logic [7:0]  mrdata,
  // IOS
  output ios_req_t    ios_req,
  input  ios_rsp_t    ios_rsp,
  // dictionary
  output logic        dict_req,
  output logic        dict_def,      // 1: define (export), 0: lookup (import)
  output logic [15:0] dict_key,
  output logic [15:0] dict_addr,
  input  logic        dict_done,
  input  logic        dict_found,
  input  logic [15:0] dict_raddr,
  // task creation
  output logic        spawn_req,
  output logic [15:0] spawn_pc,
  input  logic        spawn_ack,
  input  logic        spawn_ok,
  input  logic [1:0]  spawn_id,
  // streams
  output logic        out_valid,
  output logic [15:0] out_data,
  input  logic        out_ready,
  input  logic        in_valid,
  input  logic [15:0] in_data,
  output logic        in_ready,
  output logic        tx_valid,
  output logic [15:0] tx_dst,
  output logic [15:0] tx_data,
  input  logic        tx_ready,
  output logic        rx_ready,
  output logic [15:0] rx_src,
  input  logic        rx_valid,
  input  logic [15:0] rx_data
);
  localparam int PW = $clog2(MAXTASKS);

  typedef enum logic [4:0] {
    S_IDLE, S_START, S_PUSHST, S_FETCH, S_MEM, S_MWAIT, S_MDONE, S_EXEC, S_POPARGS,
    S_OP2, S_IOS, S_IOSW, S_DICT, S_SPAWN, S_OUT, S_IN, S_TX, S_RX, S_REPORT
  } state_e;

  typedef enum logic [2:0] { MP_OP, MP_ARGS, MP_HDR, MP_DATA, MP_STORE } mphase_e;

  // ---------------------------------------------------------------- registers
  state_e       state, state_n;
  mphase_e      mph, mph_n;
  logic [PW-1:0] tid, tid_n;
  logic [15:0]  pc, pc_n;             // PC
  logic [7:0]   opc, opc_n;           // OPC
  logic [2:0]   ilen, ilen_n;         // length of the current instruction
  logic [15:0]  nsteps, nsteps_n;
  logic [15:0]  maddr, maddr_n;
  logic [2:0]   mleft, mleft_n;
  logic         mwe, mwe_n;
  logic [15:0]  wbuf, wbuf_n;
  logic [31:0]  rbuf, rbuf_n;
  logic [23:0]  abuf, abuf_n;         // operand bytes of the instruction
  logic [IOS_NARGS_MAX-1:0][15:0] args, args_n;
  logic [2:0]   nargs, nargs_n, argi, argi_n;
  logic [7:0]   ifunc, ifunc_n;
  logic         hold_pstat, hold_pstat_n;
  logic [15:0]  pstat, pstat_n;
  vm_status_t   st_r, st_n;

  logic [MAXTASKS-1:0] cvalid, cvalid_n;   // catch point set
  logic [MAXTASKS-1:0] pend, pend_n;       // exception pending
  logic [15:0]  cpc   [MAXTASKS], cpc_n   [MAXTASKS];
  logic [15:0]  pcode [MAXTASKS], pcode_n [MAXTASKS];
  logic [$clog2(RS_DEPTH):0] crs [MAXTASKS], crs_n [MAXTASKS];
  logic [$clog2(FS_DEPTH):0] cfs [MAXTASKS], cfs_n [MAXTASKS];

  // ---------------------------------------------------------------- stacks
  stack_op_e ds_op, rs_op, fs_op;
  logic [15:0] ds_w, ds_w2, rs_w, fs_w, fs_w2;
  logic [15:0] ds_tos, ds_nos, rs_tos, rs_nos, fs_tos, fs_nos;
  logic ds_err, rs_err, fs_err;
  logic ds_load, rs_load, fs_load;
  logic [$clog2(DS_DEPTH):0] ds_depth, ds_ld;
  logic [$clog2(RS_DEPTH):0] rs_depth, rs_ld;
  logic [$clog2(FS_DEPTH):0] fs_depth, fs_ld;

  vm_stack #(.DEPTH(DS_DEPTH), .PARTS(MAXTASKS)) u_ds (
    .clk, .rst_n, .part(tid), .op(ds_op), .wdata(ds_w), .wdata2(ds_w2),
    .load(ds_load), .load_depth(ds_ld), .tos(ds_tos), .nos(ds_nos),
    .depth(ds_depth), .err(ds_err));
  vm_stack #(.DEPTH(RS_DEPTH), .PARTS(MAXTASKS)) u_rs (
    .clk, .rst_n, .part(tid), .op(rs_op), .wdata(rs_w), .wdata2(16'h0),
    .load(rs_load), .load_depth(rs_ld), .tos(rs_tos), .nos(rs_nos),
    .depth(rs_depth), .err(rs_err));
  vm_stack #(.DEPTH(FS_DEPTH), .PARTS(MAXTASKS)) u_fs (
    .clk, .rst_n, .part(tid), .op(fs_op), .wdata(fs_w), .wdata2(fs_w2),
    .load(fs_load), .load_depth(fs_ld), .tos(fs_tos), .nos(fs_nos),
    .depth(fs_depth), .err(fs_err));

  // ---------------------------------------------------------------- decode helpers
  logic [6:0]  opcode;
  logic [15:0] addr16;
  assign opcode = opc[6:0];
  assign addr16 = abuf[15:0];

  function automatic logic [2:0] operand_bytes(logic [7:0] b);
    if (b[7:6] == 2'b00) return 3'd1;
    if (b[7:6] == 2'b01) return 3'd3;
    case (b[6:0])
      OP_BRANCH, OP_BRANCHZ, OP_CALL, OP_LOOP: return 3'd2;
      OP_FCALL: return 3'd1;
      default: return 3'd0;
    endcase
  endfunction

  // number of data-stack arguments popped into args[] before the operation
  function automatic logic [2:0] pop_count(logic [6:0] o);
    case (o)
      OP_FETCH, OP_SLEEP, OP_OUT, OP_RECEIVE, OP_THROW, OP_IMPORT: return 3'd1;
      OP_STORE, OP_READ, OP_SEND, OP_EXPORT: return 3'd2;
      OP_WRITE, OP_AWAIT, OP_TASK: return 3'd3;
      OP_SENDN: return 3'd4;
      default: return 3'd0;
    endcase
  endfunction

  logic signed [15:0] sa, sb;   // nos, tos
  assign sb = ds_tos;
  assign sa = ds_nos;
  logic signed [31:0] prod;
  assign prod = 32'(sa) * 32'(sb);

  // an operation that would over- or underflow a stack (the stack refuses it, too)
  function automatic logic sbad(stack_op_e o, int d, int cap);
    case (o)
      SOP_PUSH:                   return d >= cap;
      SOP_PUSH2:                  return d >= cap - 1;
      SOP_POP, SOP_REPL:          return d < 1;
      SOP_POPR, SOP_SWAP, SOP_POP2: return d < 2;
      default:                    return 1'b0;
    endcase
  endfunction

  // ---------------------------------------------------------------- outputs
  assign tok_ready = (state == S_IDLE);
  assign st        = st_r;

  // code-segment request: held in S_MEM until granted (kept apart from the
  // next-state logic so that the request does not depend on the grant)
  assign mreq = '{req: (state == S_MEM), we: mwe, addr: maddr, wdata: wbuf[15:8]};

  // ---------------------------------------------------------------- next state
  always_comb begin
    state_n = state; mph_n = mph; tid_n = tid; pc_n = pc; opc_n = opc; ilen_n = ilen;
    nsteps_n = nsteps; maddr_n = maddr; mleft_n = mleft; mwe_n = mwe; wbuf_n = wbuf;
    rbuf_n = rbuf; abuf_n = abuf; args_n = args; nargs_n = nargs; argi_n = argi;
    ifunc_n = ifunc; hold_pstat_n = hold_pstat; pstat_n = pstat;
    st_n = st_r; st_n.valid = 1'b0;
    cvalid_n = cvalid; pend_n = pend;
    for (int k = 0; k < MAXTASKS; k++) begin
      cpc_n[k] = cpc[k]; pcode_n[k] = pcode[k]; crs_n[k] = crs[k]; cfs_n[k] = cfs[k];
    end

    ds_op = SOP_NONE; rs_op = SOP_NONE; fs_op = SOP_NONE;
    ds_w = '0; ds_w2 = '0; rs_w = '0; fs_w = '0; fs_w2 = '0;
    ds_load = 1'b0; rs_load = 1'b0; fs_load = 1'b0;
    ds_ld = '0; rs_ld = '0; fs_ld = '0;

    ios_req = '0;
    dict_req = 1'b0; dict_def = 1'b0; dict_key = args[0]; dict_addr = '0;
    spawn_req = 1'b0; spawn_pc = args[0];
    out_valid = 1'b0; out_data = args[0];
    in_ready = 1'b0;
    tx_valid = 1'b0; tx_dst = args[0]; tx_data = args[1];
    rx_ready = 1'b0; rx_src = args[0];

    case (state)
      S_IDLE: if (tok.valid) begin
        tid_n        = PW'(tok.task_id);
        pc_n         = tok.pc;
        nsteps_n     = '0;
        hold_pstat_n = tok.push_status;
        pstat_n      = tok.status_val;
        state_n      = tok.fresh ? S_START : (tok.push_status ? S_PUSHST : S_FETCH);
      end

      // new task: empty the stacks of its partition, forget its catch point
      S_START: begin
        ds_load = 1'b1; rs_load = 1'b1; fs_load = 1'b1;
        cvalid_n[tid] = 1'b0; pend_n[tid] = 1'b0;
        state_n = hold_pstat ? S_PUSHST : S_FETCH;
      end

      // resumed after await: the status is the result of the await word
      S_PUSHST: begin
        ds_op = SOP_PUSH; ds_w = pstat;
        state_n = S_FETCH;
      end

      S_FETCH: begin
        if (nsteps >= steps || preempt) begin
          st_n = '{valid: 1'b1, task_id: 2'(tid), status: ST_STEPS, pc: pc,
                   timeout: 16'h0, ev_value: 16'h0, ev_addr: 16'h0, exc: EXC_NONE};
          state_n = S_REPORT;
        end else begin
          maddr_n = pc; mleft_n = 3'd1; mwe_n = 1'b0; mph_n = MP_OP; rbuf_n = '0;
          state_n = S_MEM;
        end
      end

      // byte-serial memory sequencer
      S_MEM: begin
        if (mgnt) begin
          maddr_n = maddr + 16'd1;
          mleft_n = mleft - 3'd1;
          if (mwe) begin
            wbuf_n = {wbuf[7:0], 8'h00};
            if (mleft == 3'd1) state_n = S_MDONE;
          end else begin
            state_n = S_MWAIT;
          end
        end
      end
      S_MWAIT: if (mrvalid) begin
        rbuf_n  = {rbuf[23:0], mrdata};
        state_n = (mleft == 3'd0) ? S_MDONE : S_MEM;
      end

      S_MDONE: begin
        case (mph)
          MP_OP: begin
            opc_n  = rbuf[7:0];
            ilen_n = operand_bytes(rbuf[7:0]) + 3'd1;
            maddr_n = pc + 16'd1; mleft_n = operand_bytes(rbuf[7:0]);
            mph_n = MP_ARGS; rbuf_n = '0;
            state_n = (operand_bytes(rbuf[7:0]) == 3'd0) ? S_EXEC : S_MEM;
          end
          MP_ARGS: begin
            abuf_n  = rbuf[23:0];
            state_n = S_EXEC;
          end
          MP_HDR: begin
            // args[0] = array, args[1] = index; rbuf = length cell
            if (args[1] >= rbuf[15:0]) begin
              raise(16'(EXC_IO));
            end else begin
              maddr_n = args[0] + 16'd2 + {args[1][14:0], 1'b0};
              mleft_n = 3'd2; rbuf_n = '0;
              if (opcode == OP_WRITE) begin
                mwe_n = 1'b1; wbuf_n = args[2]; mph_n = MP_STORE;
              end else begin
                mwe_n = 1'b0; mph_n = MP_DATA;
              end
              state_n = S_MEM;
            end
          end
          MP_DATA: if (opcode == OP_SENDN) begin
            args_n[4] = rbuf[15:0];
            state_n = S_TX;
          end else begin
            ds_op = SOP_PUSH; ds_w = rbuf[15:0];
            if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) raise(16'(EXC_STACK)); else next_instr(pc + 16'(ilen));
          end
          default: next_instr(pc + 16'(ilen));   // MP_STORE
        endcase
      end

      S_EXEC: begin
        if (opc[7:6] == 2'b00) begin
          ds_op = SOP_PUSH; ds_w = {{2{opc[5]}}, opc[5:0], abuf[7:0]};
          if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) raise(16'(EXC_STACK)); else next_instr(pc + 16'd2);
        end else if (opc[7:6] == 2'b01) begin
          ds_op = SOP_PUSH2; ds_w2 = {{2{opc[5]}}, opc[5:0], abuf[23:16]};
          ds_w = abuf[15:0];
          if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) raise(16'(EXC_STACK)); else next_instr(pc + 16'd4);
        end else if (pop_count(opcode) != 3'd0) begin
          nargs_n = pop_count(opcode); argi_n = '0;
          state_n = S_POPARGS;
        end else if (opcode == OP_FCALL) begin
          ifunc_n = abuf[7:0];
          nargs_n = 3'(ios_nargs(abuf[7:0])); argi_n = '0;
          state_n = (ios_nargs(abuf[7:0]) == 0) ? S_IOS : S_POPARGS;
        end else begin
          exec_simple();
        end
      end

      S_POPARGS: begin
        ds_op = SOP_POP;
        if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) begin
          raise(16'(EXC_STACK));
        end else begin
          args_n[argi] = ds_tos;
          argi_n = argi + 3'd1;
          if (argi + 3'd1 == nargs) state_n = (opcode == OP_FCALL) ? S_IOS : S_OP2;
        end
      end

      S_OP2: exec_args();

      S_IOS: begin
        ios_req.valid = 1'b1; ios_req.func = ifunc; ios_req.args = args;
        state_n = S_IOSW;
      end
      S_IOSW: if (ios_rsp.done) begin
        if (ios_rsp.err) raise(16'(EXC_IO));
        else if (ios_has_ret(ifunc) || opcode != OP_FCALL) begin
          // FCALL with a result, or @ / read on an IOS data object
          if (opcode == OP_STORE || opcode == OP_WRITE) next_instr(pc + 16'(ilen));
          else begin
            ds_op = SOP_PUSH; ds_w = ios_rsp.result;
            if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) raise(16'(EXC_STACK)); else next_instr(pc + 16'(ilen));
          end
        end else next_instr(pc + 16'(ilen));
      end

      S_DICT: begin
        dict_req = 1'b1; dict_def = (opcode == OP_EXPORT);
        dict_key = (opcode == OP_EXPORT) ? args[1] : args[0];
        dict_addr = args[0];
        if (dict_done) begin
          if (opcode == OP_EXPORT) begin
            if (!dict_found) raise(16'(EXC_IO)); else next_instr(pc + 16'd1);
          end else if (!dict_found) begin
            raise(16'(EXC_IO));
          end else begin
            ds_op = SOP_PUSH; ds_w = dict_raddr;
            if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) raise(16'(EXC_STACK)); else next_instr(pc + 16'd1);
          end
        end
      end

      S_SPAWN: begin
        spawn_req = 1'b1; spawn_pc = args[0];
        if (spawn_ack) begin
          ds_op = SOP_PUSH; ds_w = spawn_ok ? {14'h0, spawn_id} : 16'hffff;
          if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) raise(16'(EXC_STACK)); else next_instr(pc + 16'd1);
        end
      end

      S_OUT: begin
        out_valid = 1'b1; out_data = args[0];
        if (out_ready) next_instr(pc + 16'd1);
      end
      S_IN: begin
        in_ready = 1'b1;
        if (in_valid) begin
          ds_op = SOP_PUSH; ds_w = in_data;
          if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) raise(16'(EXC_STACK)); else next_instr(pc + 16'd1);
        end
      end
      S_TX: begin
        if (opcode == OP_SENDN) begin
          // args[0] = array, [1] = index, [2] = cells left, [3] = peer, [4] = cell
          tx_valid = 1'b1; tx_dst = args[3]; tx_data = args[4];
          if (tx_ready) begin
            if (args[2] == 16'd1) next_instr(pc + 16'd1);
            else begin
              args_n[1] = args[1] + 16'd1; args_n[2] = args[2] - 16'd1;
              maddr_n = args[0]; mleft_n = 3'd2; mwe_n = 1'b0; mph_n = MP_HDR;
              rbuf_n = '0; state_n = S_MEM;
            end
          end
        end else begin
          tx_valid = 1'b1; tx_dst = args[0]; tx_data = args[1];
          if (tx_ready) next_instr(pc + 16'd1);
        end
      end
      S_RX: begin
        rx_ready = 1'b1; rx_src = args[0];
        if (rx_valid) begin
          ds_op = SOP_PUSH; ds_w = rx_data;
          if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) raise(16'(EXC_STACK)); else next_instr(pc + 16'd1);
        end
      end

      S_REPORT: state_n = S_IDLE;
      default:  state_n = S_IDLE;
    endcase
  end

  // finish the current instruction
  function automatic void next_instr(logic [15:0] npc);
    pc_n     = npc;
    nsteps_n = nsteps + 16'd1;
    state_n  = S_FETCH;
  endfunction

  // raise an exception with code `code`
  function automatic void raise(logic [15:0] code);
    ds_op = SOP_NONE; rs_op = SOP_NONE; fs_op = SOP_NONE;
    if (cvalid[tid]) begin
      pend_n[tid]  = 1'b1;
      pcode_n[tid] = code;
      rs_load = 1'b1; rs_ld = crs[tid];
      fs_load = 1'b1; fs_ld = cfs[tid];
      pc_n     = cpc[tid];
      nsteps_n = nsteps + 16'd1;
      state_n  = S_FETCH;
    end else begin
      st_n = '{valid: 1'b1, task_id: 2'(tid), status: ST_ERROR, pc: pc,
               timeout: 16'h0, ev_value: 16'h0, ev_addr: 16'h0,
               exc: (code < 16'd8) ? exc_e'(code[3:0]) : EXC_USER};
      state_n = S_REPORT;
    end
  endfunction

  // operations that need no popped arguments
  function automatic void exec_simple();
    logic [15:0] r;
    r = '0;
    case (opcode)
      OP_NOP: next_instr(pc + 16'd1);
      OP_ADD, OP_SUB, OP_MUL, OP_DIV, OP_MOD, OP_AND, OP_OR, OP_XOR,
      OP_EQ, OP_NE, OP_LT, OP_GT, OP_LE, OP_GE: begin
        case (opcode)
          OP_ADD: r = sa + sb;
          OP_SUB: r = sa - sb;
          OP_MUL: r = prod[15:0];
          OP_DIV: r = (sb != 0) ? 16'(sa / sb) : 16'h0;
          OP_MOD: r = (sb != 0) ? 16'(sa % sb) : 16'h0;
          OP_AND: r = sa & sb;
          OP_OR:  r = sa | sb;
          OP_XOR: r = sa ^ sb;
          OP_EQ:  r = (sa == sb) ? 16'hffff : 16'h0;
          OP_NE:  r = (sa != sb) ? 16'hffff : 16'h0;
          OP_LT:  r = (sa <  sb) ? 16'hffff : 16'h0;
          OP_GT:  r = (sa >  sb) ? 16'hffff : 16'h0;
          OP_LE:  r = (sa <= sb) ? 16'hffff : 16'h0;
          default: r = (sa >= sb) ? 16'hffff : 16'h0;   // OP_GE
        endcase
        ds_op = SOP_POPR; ds_w = r;
        if ((opcode == OP_DIV || opcode == OP_MOD) && sb == 0 && ds_depth >= 2)
          raise(16'(EXC_DIVBYZERO));
        else if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) raise(16'(EXC_STACK));
        else next_instr(pc + 16'd1);
      end
      OP_NEGATE, OP_INVERT, OP_ZEQ: begin
        case (opcode)
          OP_NEGATE: r = -sb;
          OP_INVERT: r = ~sb;
          default:   r = (sb == 0) ? 16'hffff : 16'h0;
        endcase
        ds_op = SOP_REPL; ds_w = r;
        if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) raise(16'(EXC_STACK)); else next_instr(pc + 16'd1);
      end
      OP_DUP, OP_OVER: begin
        ds_op = SOP_PUSH; ds_w = (opcode == OP_DUP) ? ds_tos : ds_nos;
        if (sbad(ds_op, 32'(ds_depth), DS_DEPTH) || (opcode == OP_DUP ? ds_depth < 1 : ds_depth < 2))
          raise(16'(EXC_STACK));
        else next_instr(pc + 16'd1);
      end
      OP_DROP, OP_SWAP: begin
        ds_op = (opcode == OP_DROP) ? SOP_POP : SOP_SWAP;
        if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) raise(16'(EXC_STACK)); else next_instr(pc + 16'd1);
      end
      OP_BRANCH: next_instr(addr16);
      OP_BRANCHZ: begin
        ds_op = SOP_POP;
        if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) raise(16'(EXC_STACK));
        else next_instr((ds_tos == 16'h0) ? addr16 : pc + 16'd3);
      end
      OP_CALL: begin
        rs_op = SOP_PUSH; rs_w = pc + 16'd3;
        if (sbad(rs_op, 32'(rs_depth), RS_DEPTH)) raise(16'(EXC_STACK)); else next_instr(addr16);
      end
      OP_RET: begin
        rs_op = SOP_POP;
        if (sbad(rs_op, 32'(rs_depth), RS_DEPTH)) raise(16'(EXC_STACK)); else next_instr(rs_tos);
      end
      OP_DO: begin
        // loop stack: limit below, index on top
        ds_op = SOP_POP2; fs_op = SOP_PUSH2; fs_w2 = ds_nos; fs_w = ds_tos;
        if (sbad(ds_op, 32'(ds_depth), DS_DEPTH) || sbad(fs_op, 32'(fs_depth), FS_DEPTH)) raise(16'(EXC_STACK)); else next_instr(pc + 16'd1);
      end
      OP_LOOP: begin
        if (fs_depth < 2) raise(16'(EXC_STACK));
        else if ($signed(fs_tos + 16'd1) < $signed(fs_nos)) begin
          fs_op = SOP_REPL; fs_w = fs_tos + 16'd1;
          next_instr(addr16);
        end else begin
          fs_op = SOP_POP2;
          next_instr(pc + 16'd3);
        end
      end
      OP_I: begin
        ds_op = SOP_PUSH; ds_w = fs_tos;
        if (sbad(ds_op, 32'(ds_depth), DS_DEPTH) || fs_depth < 1) raise(16'(EXC_STACK)); else next_instr(pc + 16'd1);
      end
      OP_YIELD: begin
        st_n = '{valid: 1'b1, task_id: 2'(tid), status: ST_YIELD, pc: pc + 16'd1,
                 timeout: 16'h0, ev_value: 16'h0, ev_addr: 16'h0, exc: EXC_NONE};
        state_n = S_REPORT;
      end
      OP_END: begin
        st_n = '{valid: 1'b1, task_id: 2'(tid), status: ST_END, pc: pc,
                 timeout: 16'h0, ev_value: 16'h0, ev_addr: 16'h0, exc: EXC_NONE};
        state_n = S_REPORT;
      end
      OP_IN: state_n = S_IN;
      OP_CATCH: begin
        ds_op = SOP_PUSH; ds_w = pend[tid] ? pcode[tid] : 16'h0;
        if (sbad(ds_op, 32'(ds_depth), DS_DEPTH)) raise(16'(EXC_STACK));
        else begin
          pend_n[tid]   = 1'b0;
          cvalid_n[tid] = 1'b1;
          cpc_n[tid]    = pc;
          crs_n[tid]    = rs_depth;
          cfs_n[tid]    = fs_depth;
          next_instr(pc + 16'd1);
        end
      end
      default: raise(16'(EXC_TRAP));
    endcase
  endfunction

  // operations whose arguments were popped into args[] (args[0] = former top)
  function automatic void exec_args();
    case (opcode)
      OP_FETCH: begin
        if (args[0][15]) begin
          ifunc_n = IOS_DREAD; args_n[1] = 16'h0; state_n = S_IOS;
        end else begin
          maddr_n = args[0]; mleft_n = 3'd2; mwe_n = 1'b0; mph_n = MP_DATA;
          rbuf_n = '0; state_n = S_MEM;
        end
      end
      OP_STORE: begin   // args[0] = addr, args[1] = value
        if (args[0][15]) begin
          ifunc_n = IOS_DWRITE;
          args_n[2] = args[1]; args_n[1] = 16'h0; args_n[0] = args[0];
          state_n = S_IOS;
        end else begin
          maddr_n = args[0]; mleft_n = 3'd2; mwe_n = 1'b1; wbuf_n = args[1];
          mph_n = MP_STORE; state_n = S_MEM;
        end
      end
      OP_READ, OP_WRITE: begin   // args[0] = array, args[1] = index, args[2] = value
        if (args[0][15]) begin
          ifunc_n = (opcode == OP_READ) ? IOS_DREAD : IOS_DWRITE;
          state_n = S_IOS;
        end else begin
          maddr_n = args[0]; mleft_n = 3'd2; mwe_n = 1'b0; mph_n = MP_HDR;
          rbuf_n = '0; state_n = S_MEM;
        end
      end
      OP_SLEEP: begin
        st_n = '{valid: 1'b1, task_id: 2'(tid), status: ST_SLEEP, pc: pc + 16'd1,
                 timeout: args[0], ev_value: 16'h0, ev_addr: 16'h0, exc: EXC_NONE};
        state_n = S_REPORT;
      end
      OP_AWAIT: begin   // ( ms value addr -- status )
        st_n = '{valid: 1'b1, task_id: 2'(tid), status: ST_AWAIT, pc: pc + 16'd1,
                 timeout: args[2], ev_value: args[1], ev_addr: args[0], exc: EXC_NONE};
        state_n = S_REPORT;
      end
      OP_OUT:     state_n = S_OUT;
      OP_SEND:    state_n = S_TX;
      OP_SENDN: begin   // popped: args[0] = dst, [1] = arr, [2] = offset, [3] = length
        args_n[0] = args[1]; args_n[1] = args[2]; args_n[2] = args[3]; args_n[3] = args[0];
        if (args[3] == 16'd0) next_instr(pc + 16'd1);
        else if (args[1][15]) raise(16'(EXC_IO));
        else begin
          maddr_n = args[1]; mleft_n = 3'd2; mwe_n = 1'b0; mph_n = MP_HDR;
          rbuf_n = '0; state_n = S_MEM;
        end
      end
      OP_RECEIVE: state_n = S_RX;
      OP_THROW:   raise(args[0]);
      OP_TASK:    state_n = S_SPAWN;
      OP_EXPORT, OP_IMPORT: state_n = S_DICT;
      default:    raise(16'(EXC_TRAP));
    endcase
  endfunction

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; mph <= MP_OP; tid <= '0; pc <= '0; opc <= '0; ilen <= '0;
      nsteps <= '0; maddr <= '0; mleft <= '0; mwe <= 1'b0; wbuf <= '0; rbuf <= '0;
      abuf <= '0; args <= '0; nargs <= '0; argi <= '0; ifunc <= '0;
      hold_pstat <= 1'b0; pstat <= '0; st_r <= '0; cvalid <= '0; pend <= '0;
      for (int k = 0; k < MAXTASKS; k++) begin
        cpc[k] <= '0; pcode[k] <= '0; crs[k] <= '0; cfs[k] <= '0;
      end
    end else begin
      state <= state_n; mph <= mph_n; tid <= tid_n; pc <= pc_n; opc <= opc_n;
      ilen <= ilen_n; nsteps <= nsteps_n; maddr <= maddr_n; mleft <= mleft_n;
      mwe <= mwe_n; wbuf <= wbuf_n; rbuf <= rbuf_n; abuf <= abuf_n; args <= args_n;
      nargs <= nargs_n; argi <= argi_n; ifunc <= ifunc_n; hold_pstat <= hold_pstat_n;
      pstat <= pstat_n; st_r <= st_n; cvalid <= cvalid_n; pend <= pend_n;
      for (int k = 0; k < MAXTASKS; k++) begin
        cpc[k] <= cpc_n[k]; pcode[k] <= pcode_n[k]; crs[k] <= crs_n[k]; cfs[k] <= cfs_n[k];
      end
    end
  end
endmodule
