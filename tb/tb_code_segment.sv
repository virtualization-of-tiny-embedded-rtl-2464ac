// tb_code_segment: write/read test of the code segment memory.
//
// Fills the whole 4096-byte segment with a pseudo-random pattern, then reads every
// address back and compares with the pattern; read data must appear on the clock
// after the request.  A second pass rewrites a random subset and re-checks all.
`timescale 1ns/1ps
module tb_code_segment;
  import rexa_pkg::*;
  localparam int N = 4096;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  mem_req_t   req;
  logic [7:0] rdata;
  logic [7:0] ref_m [N];

  code_segment dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd_all();
    for (int a = 0; a < N; a++) begin
      @(negedge clk); req = '{req: 1'b1, we: 1'b0, addr: 16'(a), wdata: 8'h0};
      @(negedge clk); req = '0;
      checks++;
      if (rdata !== ref_m[a]) begin
        failures++; if (failures < 10) $display("FAIL: addr %0d %h != %h", a, rdata, ref_m[a]);
      end
    end
  endtask

  initial begin
    req = '0;
    for (int a = 0; a < N; a++) begin
      ref_m[a] = 8'($urandom);
      @(negedge clk); req = '{req: 1'b1, we: 1'b1, addr: 16'(a), wdata: ref_m[a]};
    end
    @(negedge clk); req = '0;
    rd_all();
    for (int k = 0; k < 500; k++) begin
      int a;
      a = int'($urandom % N); ref_m[a] = 8'($urandom);
      @(negedge clk); req = '{req: 1'b1, we: 1'b1, addr: 16'(a), wdata: ref_m[a]};
    end
    @(negedge clk); req = '0;
    rd_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
