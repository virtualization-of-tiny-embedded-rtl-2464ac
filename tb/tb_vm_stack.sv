// tb_vm_stack: random test of the partitioned VM stack against a queue model.
//
// A small stack (8 cells in each of 4 partitions) receives random operations on
// random partitions, with random fill-count loads now and then.  After every clock
// the testbench compares tos, nos, depth and err of the selected partition with a
// model that keeps one queue per partition; overflow and underflow attempts are
// frequent at this size and must be refused with err and leave the stack as is.
`timescale 1ns/1ps
module tb_vm_stack;
  import rexa_pkg::*;
  localparam int DEPTH = 8, PARTS = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [1:0]  part;
  stack_op_e   op;
  logic [15:0] wdata, wdata2, tos, nos;
  logic        load, err;
  logic [3:0]  load_depth, depth;

  vm_stack #(.DEPTH(DEPTH), .PARTS(PARTS)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] m [PARTS][$];
  int n_over = 0, n_under = 0, n_ok = 0;

  function automatic logic model_err(stack_op_e o, int d);
    case (o)
      SOP_PUSH:  return d >= DEPTH;
      SOP_PUSH2: return d >= DEPTH - 1;
      SOP_POP, SOP_REPL: return d < 1;
      SOP_POPR, SOP_SWAP, SOP_POP2: return d < 2;
      default: return 1'b0;
    endcase
  endfunction

  initial begin
    int d, p;
    logic e;
    logic [15:0] t0, t1;
    part = '0; op = SOP_NONE; wdata = '0; wdata2 = '0; load = 1'b0; load_depth = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      p = int'($urandom % PARTS);
      part = 2'(p); op = stack_op_e'($urandom % 8);
      wdata = 16'($urandom); wdata2 = 16'($urandom);
      load = ($urandom % 40) == 0;
      load_depth = 4'($urandom % (m[p].size() + 1));   // unwinding only lowers the count
      #1;
      d = m[p].size();
      // compare the combinational view of the selected partition
      check("depth", depth == 4'(d));
      check($sformatf("tos %h d=%0d p=%0d it=%0d", tos, d, p, it), tos == ((d >= 1) ? m[p][d-1] : 16'h0));
      check("nos", nos == ((d >= 2) ? m[p][d-2] : 16'h0));
      e = model_err(op, d);
      check($sformatf("err op %0d depth %0d", op, d), err == e);
      // update the model
      if (load) begin
        while (m[p].size() > int'(load_depth)) void'(m[p].pop_back());
      end else if (!e) begin
        case (op)
          SOP_PUSH:  m[p].push_back(wdata);
          SOP_PUSH2: begin m[p].push_back(wdata2); m[p].push_back(wdata); end
          SOP_POP:   void'(m[p].pop_back());
          SOP_POP2:  begin void'(m[p].pop_back()); void'(m[p].pop_back()); end
          SOP_REPL:  m[p][d-1] = wdata;
          SOP_POPR:  begin void'(m[p].pop_back()); m[p][d-2] = wdata; end
          SOP_SWAP:  begin t0 = m[p][d-1]; t1 = m[p][d-2]; m[p][d-1] = t1; m[p][d-2] = t0; end
          default: ;
        endcase
      end
      if (!load && e && (op == SOP_PUSH || op == SOP_PUSH2)) n_over++;
      else if (!load && e) n_under++;
      else n_ok++;
    end
    check("overflows seen", n_over > 0);
    check("underflows seen", n_under > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
