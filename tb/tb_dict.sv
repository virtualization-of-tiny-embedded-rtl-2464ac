// tb_dict: random test of the shared dictionary (def, lookup, gc).
//
// Two ports issue random exports (def) and imports (lookup) over a small key set,
// holding req until done, while a third process now and then removes an address
// range (gc).  A model table (key -> address, at most ENTRIES entries) is updated
// in the order the dictionary completes the operations; every done is checked
// against it (found, returned address), and the entry count `used` is compared
// after every operation.  The operation time (ENTRIES + 2 clocks from acceptance)
// is checked for requests that did not have to wait.
`timescale 1ns/1ps
module tb_dict;
  import rexa_pkg::*;
  localparam int ENTRIES = 8, NPORT = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [NPORT-1:0] req, def, done;
  logic [15:0]      key [NPORT], addr [NPORT];
  logic             found, gc_req, gc_done;
  logic [15:0]      raddr, gc_lo, gc_hi;
  logic [3:0]       used;

  dict #(.ENTRIES(ENTRIES), .NPORT(NPORT)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] mtab [logic [15:0]];
  int ports_done = 0;
  int n_full = 0, n_miss = 0, n_hit = 0, n_gc = 0, n_fast = 0;

  // checker: completes the model in completion order
  always @(posedge clk) if (rst_n) begin
    #1;
    for (int p = 0; p < NPORT; p++) if (done[p]) begin
      if (def[p]) begin
        if (mtab.exists(key[p]) || mtab.num() < ENTRIES) begin
          check("def accepted", found); mtab[key[p]] = addr[p];
        end else begin
          check("def refused when full", !found); n_full++;
        end
      end else if (mtab.exists(key[p])) begin
        check($sformatf("lookup %0d", key[p]), found && raddr == mtab[key[p]]); n_hit++;
      end else begin
        check($sformatf("lookup unknown %0d", key[p]), !found); n_miss++;
      end
      check("used", int'(used) == mtab.num());
    end
    if (gc_done) begin
      logic [15:0] dead [$];
      n_gc++; dead.delete();
      for (int k = 0; k < 16; k++)
        if (mtab.exists(16'(k)) && mtab[16'(k)] >= gc_lo && mtab[16'(k)] < gc_hi) dead.push_back(16'(k));
      foreach (dead[i]) mtab.delete(dead[i]);
      #1; @(negedge clk);
      check($sformatf("used after gc %0d model %0d lo %0d hi %0d t=%0t", used, mtab.num(), gc_lo, gc_hi, $time), int'(used) == mtab.num());
    end
  end

  for (genvar p = 0; p < NPORT; p++) begin : g_port
    initial begin
      int t0;
      req[p] = 1'b0; def[p] = 1'b0; key[p] = '0; addr[p] = '0;
      wait (rst_n);
      for (int it = 0; it < 400; it++) begin
        @(negedge clk);
        def[p] = ($urandom % 2) == 0; key[p] = 16'($urandom % 14);
        addr[p] = 16'($urandom % 256);
        req[p] = 1'b1; t0 = 0;
        while (!done[p]) begin @(negedge clk); t0++; end
        if (t0 == ENTRIES + 2) n_fast++;
        req[p] = 1'b0;
        repeat ($urandom % 4) @(negedge clk);
      end
      ports_done++;
    end
  end

  initial begin
    gc_req = 1'b0; gc_lo = '0; gc_hi = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 30; it++) begin
      repeat (200 + $urandom % 200) @(negedge clk);
      gc_lo = 16'($urandom % 200); gc_hi = gc_lo + 16'($urandom % 100);
      gc_req = 1'b1;
      while (!gc_done) @(negedge clk);
      gc_req = 1'b0;
    end
    wait (ports_done == NPORT);
    repeat (5) @(negedge clk);
    check("full table seen", n_full > 0);
    check("hits and misses seen", n_hit > 0 && n_miss > 0);
    check("gc runs", n_gc == 30);
    check($sformatf("operation time ENTRIES+2 seen %0d times", n_fast), n_fast > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
