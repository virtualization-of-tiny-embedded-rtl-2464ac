// tb_mem_arbiter: test of the round-robin arbiter of the code-segment port.
//
// Six requesters raise read or write requests at random and hold them until they
// are granted.  Each clock the testbench checks that at most one grant is given,
// that a grant goes to a requester that asks, that the forwarded request is the
// granted one, that no requester waits while the port idles, that rvalid follows a
// read grant by one clock, and that the wait of any requester stays below one full
// round (NREQ grants), which is the fairness round-robin promises.
`timescale 1ns/1ps
module tb_mem_arbiter;
  import rexa_pkg::*;
  localparam int NREQ = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  mem_req_t        req [NREQ];
  logic [NREQ-1:0] gnt, rvalid;
  mem_req_t        mreq;

  mem_arbiter #(.NREQ(NREQ)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wait_c [NREQ], maxwait = 0, grants = 0;
  logic [NREQ-1:0] rd_gnt_q;

  initial begin
    for (int r = 0; r < NREQ; r++) begin req[r] = '0; wait_c[r] = 0; end
    rd_gnt_q = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      check("rvalid one clock after a read grant", rvalid == rd_gnt_q);
      // new requests from idle requesters
      for (int r = 0; r < NREQ; r++)
        if (!req[r].req && ($urandom % 3) == 0)
          req[r] = '{req: 1'b1, we: 1'($urandom), addr: 16'($urandom), wdata: 8'($urandom)};
      #1;
      check("one grant at most", $countones(gnt) <= 1);
      check("no idle port while requested", (gnt != 0) || !(req[0].req || req[1].req || req[2].req ||
            req[3].req || req[4].req || req[5].req));
      rd_gnt_q = '0;
      for (int r = 0; r < NREQ; r++) begin
        if (gnt[r]) begin
          check("grant to a requester", req[r].req);
          check("forwarded request", mreq == req[r]);
          if (!req[r].we) rd_gnt_q[r] = 1'b1;
        end
      end
      @(posedge clk);
      for (int r = 0; r < NREQ; r++) begin
        if (gnt[r]) begin
          grants++;
          if (wait_c[r] > maxwait) maxwait = wait_c[r];
          wait_c[r] = 0; req[r] <= '0;
        end else if (req[r].req) wait_c[r]++;
      end
    end
    check($sformatf("fair: longest wait %0d < %0d", maxwait, NREQ), maxwait < NREQ);
    check("grants given", grants > 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
