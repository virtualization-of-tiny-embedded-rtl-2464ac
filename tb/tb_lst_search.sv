// tb_lst_search: test of the linear-search-table word lookup.
//
// The testbench builds a table for a random vocabulary of distinct words (1 to 6
// lower-case letters, word i has index i): a head entry per word length, and per
// length a tree of slices, one slice per common prefix, each entry holding a
// character and either the forward distance (in entries) to the slice of the next
// character or, at the last character, the word index; a slice ends with a 0
// entry.  The table is written through the load port; then every word must be
// found with its index, and random strings that are not in the vocabulary
// (including lengths 0 and above the maximum) must not be found.  The number of
// entries compared for each search is checked against the count the builder expects.
`timescale 1ns/1ps
module tb_lst_search;
  localparam int TBL = 1024, MAXLEN = 16, NW = 30;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic        wr_en, start, busy, done, found;
  logic [9:0]  wr_addr;
  logic [7:0]  wr_data, index;
  logic [MAXLEN-1:0][7:0] chars;
  logic [4:0]  len;
  logic [15:0] probes;

  lst_search #(.TBL_BYTES(TBL), .MAXLEN(MAXLEN)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  string      words [NW];
  logic [7:0] tbl [TBL];
  int         top;

  // build the table breadth first: each work item is a prefix of words of one
  // length, and the entry (or head cell, patch < 0) that must point to its slice
  task automatic build();
    string pre [$];
    int    wl [$], patch [$];
    top = 2 * MAXLEN;
    for (int l = 1; l <= MAXLEN; l++) begin pre.push_back(""); wl.push_back(l); patch.push_back(-l); end
    while (pre.size() > 0) begin
      string p; int l, pt, d, at;
      byte cs [$];
      p = pre.pop_front(); l = wl.pop_front(); pt = patch.pop_front(); d = p.len();
      for (int i = 0; i < NW; i++)
        if (words[i].len() == l && words[i].substr(0, d - 1) == p) begin
          logic seen; seen = 1'b0;
          foreach (cs[j]) if (cs[j] == byte'(words[i][d])) seen = 1'b1;
          if (!seen) cs.push_back(byte'(words[i][d]));
        end
      if (cs.size() == 0) continue;
      at = top; top += 2 * (cs.size() + 1);
      if (pt < 0) begin tbl[2 * (-pt - 1)] = 8'(at >> 8); tbl[2 * (-pt - 1) + 1] = 8'(at); end
      else tbl[pt + 1] = 8'((at - pt) / 2);
      foreach (cs[j]) begin
        string q;
        tbl[at + 2 * j] = cs[j];
        q = {p, string'(cs[j])};
        if (d == l - 1) begin
          for (int i = 0; i < NW; i++) if (words[i] == q) tbl[at + 2 * j + 1] = 8'(i);
        end else begin
          pre.push_back(q); wl.push_back(l); patch.push_back(at + 2 * j);
        end
      end
    end
  endtask

  // entries a search for word w compares, following the same layout
  function automatic int model_probes(string w);
    int p, n;
    p = {tbl[2 * (w.len() - 1)], tbl[2 * (w.len() - 1) + 1]};
    n = 0;
    for (int d = 0; d < w.len(); d++) begin
      forever begin
        n++;
        if (tbl[p] == 0) return n;
        if (tbl[p] == byte'(w[d])) break;
        p += 2;
      end
      if (d < w.len() - 1) p += 2 * int'(tbl[p + 1]);
    end
    return n;
  endfunction

  task automatic search(string w, output logic f, output int idx);
    @(negedge clk);
    chars = '0;
    for (int k = 0; k < w.len() && k < MAXLEN; k++) chars[k] = w[k];
    len = 5'(w.len()); start = 1'b1;
    @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    f = found; idx = int'(index);
  endtask

  initial begin
    logic f; int idx, hits, misses;
    string w;
    wr_en = 1'b0; wr_addr = '0; wr_data = '0; start = 1'b0; chars = '0; len = '0;
    for (int a = 0; a < TBL; a++) tbl[a] = 8'h0;
    // vocabulary
    for (int i = 0; i < NW; i++) begin
      logic dup;
      do begin
        w = "";
        for (int k = 0; k < 1 + int'($urandom % 6); k++)
          w = {w, string'(byte'(8'h61 + $urandom % 6))};
        dup = 1'b0;
        for (int j = 0; j < i; j++) if (words[j] == w) dup = 1'b1;
      end while (dup);
      words[i] = w;
    end
    build();
    check("table fits", top <= TBL);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < TBL; a++) begin
      @(negedge clk); wr_en = 1'b1; wr_addr = 10'(a); wr_data = tbl[a];
    end
    @(negedge clk); wr_en = 1'b0;

    hits = 0; misses = 0;
    for (int i = 0; i < NW; i++) begin
      search(words[i], f, idx);
      check($sformatf("find %s f=%0d idx=%0d i=%0d", words[i], f, idx, i), f && idx == i);
      check($sformatf("probes %s", words[i]), int'(probes) == model_probes(words[i]));
      hits++;
    end
    for (int t = 0; t < 200; t++) begin
      logic known;
      w = "";
      for (int k = 0; k < 1 + int'($urandom % 7); k++) w = {w, string'(byte'(8'h61 + $urandom % 7))};
      known = 1'b0;
      for (int i = 0; i < NW; i++) if (words[i] == w) known = 1'b1;
      search(w, f, idx);
      if (known) check($sformatf("find %s", w), f);
      else begin check($sformatf("no %s", w), !f); misses++; end
    end
    search("", f, idx);        check("empty word", !f);
    search("abcdefghijklmnopq", f, idx); check("too long", !f);
    check("misses tested", misses > 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
