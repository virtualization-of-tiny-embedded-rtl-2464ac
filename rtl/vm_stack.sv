// vm_stack: one hardware stack of the VM (used for the data, return and loop stacks).
//
// The memory is split into PARTS equal partitions of DEPTH cells, one per task of
// the owning VM thread, so that a task switch only changes the partition select
// `part`; each partition keeps its own fill count (the stack pointer, dstop / rstop /
// fstop in the paper's register set).  The top two cells of the selected partition
// are always visible on tos/nos, which lets the execution unit combine them in one
// cycle.  One operation is applied per clock edge:
//   PUSH  push wdata             POP   drop the top        POP2  drop two
//   REPL  top := wdata           POPR  drop top, new top := wdata (binary operators)
//   SWAP  exchange top two       PUSH2 push wdata2, then wdata
// An operation that would overflow or underflow the partition is not executed and
// raises err in the same cycle (combinational), which the VM turns into the stack
// exception.  `load` overrides the operation and sets the fill count directly; the
// VM uses it to empty a new task's partition and to unwind to a catch point.  Partitioning per task follows the paper's multi-tasking scheme; the
// register-file organisation with two read ports is this design's choice.
module vm_stack
  import rexa_pkg::*;
#(
  parameter int DEPTH = 1024,
  parameter int PARTS = 4,
  parameter int W     = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(PARTS)-1:0] part,
  input  stack_op_e                op,
  input  logic [W-1:0]             wdata,
  input  logic [W-1:0]             wdata2,
  input  logic                     load,      // set the fill count of the selected
  input  logic [$clog2(DEPTH):0]   load_depth,// partition (empty it, or unwind it)
  output logic [W-1:0]             tos,
  output logic [W-1:0]             nos,
  output logic [$clog2(DEPTH):0]   depth,
  output logic                     err
);
  localparam int DW = $clog2(DEPTH);
  localparam int AW = $clog2(DEPTH * PARTS);

  logic [W-1:0]  mem [DEPTH*PARTS];
  logic [DW:0]   cnt [PARTS];
  logic [AW-1:0] base, a_top, a_nos, a_new;

  always_comb begin
    depth = cnt[part];
    base  = AW'(int'(part) * DEPTH);
    a_top = base + AW'(depth) - AW'(1);
    a_nos = base + AW'(depth) - AW'(2);
    a_new = base + AW'(depth);
    tos   = (depth >= 1) ? mem[a_top] : '0;
    nos   = (depth >= 2) ? mem[a_nos] : '0;
    case (op)
      SOP_PUSH:            err = (depth >= (DW+1)'(DEPTH));
      SOP_PUSH2:           err = (depth >= (DW+1)'(DEPTH - 1));
      SOP_POP, SOP_REPL:   err = (depth < 1);
      SOP_POPR, SOP_SWAP,
      SOP_POP2:            err = (depth < 2);
      default:             err = 1'b0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!err && !load) begin
      case (op)
        SOP_PUSH:  mem[a_new] <= wdata;
        SOP_PUSH2: begin mem[a_new] <= wdata2; mem[a_new + AW'(1)] <= wdata; end
        SOP_REPL:  mem[a_top] <= wdata;
        SOP_POPR:  mem[a_nos] <= wdata;
        SOP_SWAP:  begin mem[a_top] <= nos; mem[a_nos] <= tos; end
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < PARTS; p++) cnt[p] <= '0;
    end else if (load) begin
      cnt[part] <= load_depth;
    end else if (!err) begin
      case (op)
        SOP_PUSH:           cnt[part] <= depth + 1'b1;
        SOP_PUSH2:          cnt[part] <= depth + (DW+1)'(2);
        SOP_POP, SOP_POPR:  cnt[part] <= depth - 1'b1;
        SOP_POP2:           cnt[part] <= depth - (DW+1)'(2);
        default: ;
      endcase
    end
  end
endmodule
