// rexa_top: the hardware REXA VM, a multi-threaded stack machine for small embedded
// nodes that runs compact Forth-like bytecode and reaches sensors and signal and
// neural-network co-processors through an input-output system.
//
// Structure (after the paper's figure of the hardware VM):
//   - one code segment (CS) shared by everything: bytecode, variables and arrays
//   - NTHREADS VM threads, each a VMEXEC with its own data, return and loop stacks
//     (partitioned among its tasks) and its own task scheduler
//   - a thread scheduler that hands each new code frame (a program entry point
//     given by the host) to the thread with the fewest tasks
//   - a dictionary shared by the threads for exported words and variables
//   - the IOS scheduler with the DSP function unit, the vector (ANN) unit and the
//     ADC sample buffer, plus parameter registers for the DAC
//   - a linear-search-table lookup unit for the word table of the compiler
//   - a round-robin arbiter for the single CS port, with requesters
//       0..NTHREADS-1          VMEXEC code and data accesses
//       NTHREADS..2*NTHREADS-1 task-scheduler pollers of awaited variables
//       2*NTHREADS             vector unit
//       2*NTHREADS+1           host port (loading code, reading results)
// Parts the paper takes from the platform (ADC and DAC converters, I2C devices,
// host communication, the text compiler) are outside; their signals are ports.
//
// Interface: the host writes bytecode through host_req (hold req until host_gnt;
// read data arrives with host_rvalid one clock after the grant), then offers a code
// frame entry with run_valid/run_pc (taken when run_ready; run_thread says which
// thread received it).  Each thread has word streams for `out`/`in` (valid/ready)
// and `send`/`receive` (valid/ready with a peer number), a preempt input, and
// reports finished tasks on fin_*.  Event counters for the evaluation of the design
// are not kept here; they can be derived from fin_*, ev_resume and to_resume.
module rexa_top
  import rexa_pkg::*;
#(
  parameter int NTHREADS   = 2,
  parameter int CS_SIZE    = 4096,
  parameter int DS_DEPTH   = 1024,
  parameter int RS_DEPTH   = 32,
  parameter int FS_DEPTH   = 32,
  parameter int MAXTASKS   = 4,
  parameter int STEPS      = 16,
  parameter int CLK_PER_MS = 70000,
  parameter int DICT_SIZE  = 32,
  parameter int SB_DEPTH   = 8192,
  parameter int LST_BYTES  = 1024,
  parameter int LST_MAXLEN = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // host port to the code segment
  input  mem_req_t    host_req,
  output logic        host_gnt,
  output logic        host_rvalid,
  output logic [7:0]  host_rdata,
  // code frames
  input  logic        run_valid,
  input  logic [15:0] run_pc,
  output logic        run_ready,
  output logic [$clog2(NTHREADS)-1:0] run_thread,
  output logic [15:0] frames [NTHREADS],
  // per-thread streams and status
  input  logic        preempt   [NTHREADS],
  output logic        out_valid [NTHREADS],
  output logic [15:0] out_data  [NTHREADS],
  input  logic        out_ready [NTHREADS],
  input  logic        in_valid  [NTHREADS],
  input  logic [15:0] in_data   [NTHREADS],
  output logic        in_ready  [NTHREADS],
  output logic        tx_valid  [NTHREADS],
  output logic [15:0] tx_dst    [NTHREADS],
  output logic [15:0] tx_data   [NTHREADS],
  input  logic        tx_ready  [NTHREADS],
  output logic        rx_ready  [NTHREADS],
  output logic [15:0] rx_src    [NTHREADS],
  input  logic        rx_valid  [NTHREADS],
  input  logic [15:0] rx_data   [NTHREADS],
  output logic [MAXTASKS-1:0] task_busy [NTHREADS],
  output logic        fin_valid [NTHREADS],
  output logic        fin_err   [NTHREADS],
  output logic [15:0] fin_pc    [NTHREADS],
  output logic        ev_resume [NTHREADS],
  output logic        to_resume [NTHREADS],
  output vm_status_t  vm_st     [NTHREADS],
  // dictionary garbage collection (code frame removal)
  input  logic        gc_req,
  input  logic [15:0] gc_lo,
  input  logic [15:0] gc_hi,
  output logic        gc_done,
  output logic [$clog2(DICT_SIZE):0] dict_used,
  // word table lookup
  input  logic        lst_wr_en,
  input  logic [$clog2(LST_BYTES)-1:0] lst_wr_addr,
  input  logic [7:0]  lst_wr_data,
  input  logic        lst_start,
  input  logic [LST_MAXLEN-1:0][7:0] lst_chars,
  input  logic [$clog2(LST_MAXLEN):0] lst_len,
  output logic        lst_busy,
  output logic        lst_done,
  output logic        lst_found,
  output logic [7:0]  lst_index,
  // ADC
  output logic        adc_start,
  output logic [15:0] adc_trigmode,
  output logic [15:0] adc_depth,
  output logic [15:0] adc_gain,
  output logic [15:0] adc_freq,
  output logic [15:0] adc_device,
  input  logic        adc_valid,
  input  logic [15:0] adc_data,
  input  logic        adc_trig,
  // DAC
  output logic        dac_start,
  output logic [15:0] dac_wave,
  output logic [15:0] dac_interval,
  output logic [15:0] dac_ampl,
  output logic [15:0] dac_freq,
  output logic [15:0] dac_device
);
  localparam int NREQ = 2 * NTHREADS + 2;
  localparam int RQ_VEC  = 2 * NTHREADS;
  localparam int RQ_HOST = 2 * NTHREADS + 1;

  // ---------------------------------------------------------------- code segment
  mem_req_t         rq   [NREQ];
  logic [NREQ-1:0]  gnt, rvalid;
  mem_req_t         cs_req;
  logic [7:0]       cs_rdata;

  mem_arbiter #(.NREQ(NREQ)) u_arb (
    .clk, .rst_n, .req(rq), .gnt, .rvalid, .mreq(cs_req));

  code_segment #(.CS_SIZE(CS_SIZE)) u_cs (
    .clk, .req(cs_req), .rdata(cs_rdata));

  assign rq[RQ_HOST] = host_req;
  assign host_gnt    = gnt[RQ_HOST];
  assign host_rvalid = rvalid[RQ_HOST];
  assign host_rdata  = cs_rdata;

  // ---------------------------------------------------------------- shared units
  ios_req_t    ios_req [NTHREADS];
  ios_rsp_t    ios_rsp [NTHREADS];
  logic [15:0] sampled, sample0;

  ios_sched #(.NTHREADS(NTHREADS), .SB_DEPTH(SB_DEPTH)) u_ios (
    .clk, .rst_n, .req(ios_req), .rsp(ios_rsp),
    .mreq(rq[RQ_VEC]), .mgnt(gnt[RQ_VEC]), .mrvalid(rvalid[RQ_VEC]), .mrdata(cs_rdata),
    .adc_start, .adc_trigmode, .adc_depth, .adc_gain, .adc_freq, .adc_device,
    .adc_valid, .adc_data, .adc_trig,
    .dac_start, .dac_wave, .dac_interval, .dac_ampl, .dac_freq, .dac_device,
    .sampled, .sample0);

  logic [NTHREADS-1:0] d_req, d_def, d_done;
  logic [15:0]         d_key [NTHREADS];
  logic [15:0]         d_addr [NTHREADS];
  logic                d_found;
  logic [15:0]         d_raddr;

  dict #(.ENTRIES(DICT_SIZE), .NPORT(NTHREADS)) u_dict (
    .clk, .rst_n, .req(d_req), .def(d_def), .key(d_key), .addr(d_addr),
    .done(d_done), .found(d_found), .raddr(d_raddr),
    .gc_req, .gc_lo, .gc_hi, .gc_done, .used(dict_used));

  lst_search #(.TBL_BYTES(LST_BYTES), .MAXLEN(LST_MAXLEN)) u_lst (
    .clk, .rst_n, .wr_en(lst_wr_en), .wr_addr(lst_wr_addr), .wr_data(lst_wr_data),
    .start(lst_start), .chars(lst_chars), .len(lst_len),
    .busy(lst_busy), .done(lst_done), .found(lst_found), .index(lst_index), .probes());

  // ---------------------------------------------------------------- thread scheduler
  logic [NTHREADS-1:0] cr_valid, cr_ack, cr_ok;
  logic [15:0]         cr_pc;

  thread_sched #(.NTHREADS(NTHREADS), .MAXTASKS(MAXTASKS)) u_tsched (
    .clk, .rst_n, .run_valid, .run_pc, .run_ready, .run_thread,
    .cr_valid, .cr_pc, .cr_ack, .cr_ok, .busy(task_busy), .frames);

  // ---------------------------------------------------------------- VM threads
  for (genvar t = 0; t < NTHREADS; t++) begin : g_thr
    task_token_t tok;
    logic        tok_ready;
    logic [15:0] steps;
    logic        spawn_req, spawn_ack, spawn_ok;
    logic [15:0] spawn_pc;
    logic [1:0]  spawn_id;

    task_sched #(.MAXTASKS(MAXTASKS), .CLK_PER_MS(CLK_PER_MS), .STEPS(STEPS)) u_task (
      .clk, .rst_n,
      .cr_valid(cr_valid[t]), .cr_pc, .cr_ack(cr_ack[t]), .cr_ok(cr_ok[t]),
      .spawn_req, .spawn_pc, .spawn_ack, .spawn_ok, .spawn_id,
      .tok, .tok_ready, .steps, .st(vm_st[t]),
      .mreq(rq[NTHREADS + t]), .mgnt(gnt[NTHREADS + t]), .mrvalid(rvalid[NTHREADS + t]),
      .mrdata(cs_rdata), .dios_sampled(sampled), .dios_sample0(sample0),
      .busy(task_busy[t]), .fin_valid(fin_valid[t]), .fin_err(fin_err[t]),
      .fin_pc(fin_pc[t]), .ev_resume(ev_resume[t]), .to_resume(to_resume[t]));

    vmexec #(.DS_DEPTH(DS_DEPTH), .RS_DEPTH(RS_DEPTH), .FS_DEPTH(FS_DEPTH),
             .MAXTASKS(MAXTASKS)) u_vm (
      .clk, .rst_n,
      .tok, .tok_ready, .steps, .preempt(preempt[t]), .st(vm_st[t]),
      .mreq(rq[t]), .mgnt(gnt[t]), .mrvalid(rvalid[t]), .mrdata(cs_rdata),
      .ios_req(ios_req[t]), .ios_rsp(ios_rsp[t]),
      .dict_req(d_req[t]), .dict_def(d_def[t]), .dict_key(d_key[t]),
      .dict_addr(d_addr[t]), .dict_done(d_done[t]), .dict_found(d_found),
      .dict_raddr(d_raddr),
      .spawn_req, .spawn_pc, .spawn_ack, .spawn_ok, .spawn_id,
      .out_valid(out_valid[t]), .out_data(out_data[t]), .out_ready(out_ready[t]),
      .in_valid(in_valid[t]), .in_data(in_data[t]), .in_ready(in_ready[t]),
      .tx_valid(tx_valid[t]), .tx_dst(tx_dst[t]), .tx_data(tx_data[t]),
      .tx_ready(tx_ready[t]),
      .rx_ready(rx_ready[t]), .rx_src(rx_src[t]), .rx_valid(rx_valid[t]),
      .rx_data(rx_data[t]));
  end
endmodule
