// mem_arbiter: round-robin arbiter that shares the single CS port.
//
// Requesters present a mem_req_t and hold it until they see their gnt bit.  In the
// grant cycle the request is passed to the memory; for a read, the memory's data is
// valid on rdata one cycle later, flagged by rvalid[i] for the granted requester.
// The search for the next grant starts one above the last granted requester, so no
// requester waits longer than NREQ-1 grants.  The paper only states that the VM
// threads share the CS; the arbitration scheme is this design's choice.
module mem_arbiter
  import rexa_pkg::*;
#(
  parameter int NREQ = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  mem_req_t           req   [NREQ],
  output logic [NREQ-1:0]    gnt,
  output logic [NREQ-1:0]    rvalid,
  output mem_req_t           mreq
);
  localparam int IW = (NREQ > 1) ? $clog2(NREQ) : 1;
  logic [IW-1:0] last;
  logic [IW-1:0] sel;
  logic          any;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = 1; k <= NREQ; k++) begin
      if (!any && req[(int'(last) + k) % NREQ].req) begin
        any = 1'b1;
        sel = IW'((int'(last) + k) % NREQ);
      end
    end
    gnt = '0;
    if (any) gnt[sel] = 1'b1;
    mreq = any ? req[sel] : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last   <= IW'(NREQ - 1);
      rvalid <= '0;
    end else begin
      rvalid <= '0;
      if (any) begin
        last <= sel;
        rvalid[sel] <= ~req[sel].we;
      end
    end
  end

  // a granted requester is unique
  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
