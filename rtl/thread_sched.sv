// thread_sched: the central scheduler that spreads code frames over the VM threads
// (Thread SCHED).
//
// The host announces a loaded code frame by its start address (run_valid / run_pc);
// the scheduler hands it, as a new task, to the thread whose task table is least
// occupied (fewest busy slots, lowest thread index on a tie) and that still has a
// free slot.  run_ready is high in the cycle the frame is accepted; while every
// thread is full the request waits.  The thread index chosen is reported with the
// acceptance.  The paper states only that one central scheduler distributes code
// frame execution to the VM thread instances; the least-occupied rule is this
// design's choice.
module thread_sched
  import rexa_pkg::*;
#(
  parameter int NTHREADS = 2,
  parameter int MAXTASKS = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        run_valid,
  input  logic [15:0]                 run_pc,
  output logic                        run_ready,
  output logic [$clog2(NTHREADS)-1:0] run_thread,
  // task creation ports of the task schedulers
  output logic [NTHREADS-1:0]         cr_valid,
  output logic [15:0]                 cr_pc,
  input  logic [NTHREADS-1:0]         cr_ack,
  input  logic [NTHREADS-1:0]         cr_ok,
  input  logic [MAXTASKS-1:0]         busy [NTHREADS],
  // number of frames handed to each thread so far
  output logic [15:0]                 frames [NTHREADS]
);
  localparam int TW = (NTHREADS > 1) ? $clog2(NTHREADS) : 1;

  logic          any;
  logic [TW-1:0] sel;

  always_comb begin
    int best;
    best = MAXTASKS + 1;
    any = 1'b0; sel = '0;
    for (int t = 0; t < NTHREADS; t++) begin
      if (cr_ok[t] && $countones(busy[t]) < best) begin
        best = $countones(busy[t]);
        any = 1'b1; sel = TW'(t);
      end
    end
    cr_valid = '0;
    if (run_valid && any) cr_valid[sel] = 1'b1;
  end

  assign cr_pc      = run_pc;
  assign run_ready  = run_valid && any && cr_ack[sel];
  assign run_thread = sel;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NTHREADS; t++) frames[t] <= '0;
    end else if (run_ready) begin
      frames[sel] <= frames[sel] + 16'd1;
    end
  end
endmodule
