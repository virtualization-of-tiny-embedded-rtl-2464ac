// code_segment: the VM code segment (CS), a byte-organised single-port RAM.
//
// The CS holds the bytecode and the embedded data (variables, arrays) of all code
// frames.  It is shared by every VM thread, so it sits behind mem_arbiter and has a
// single port: a write stores wdata at addr in the cycle the request is presented,
// a read returns the addressed byte on rdata in the following cycle (synchronous
// read, as a block RAM would).  Addresses wrap modulo CS_SIZE.
// The size (4096 bytes) is the hardware configuration the paper reports; the
// single-port organisation and the read latency are this design's choice.
module code_segment
  import rexa_pkg::*;
#(
  parameter int CS_SIZE = 4096
) (
  input  logic     clk,
  input  mem_req_t req,
  output logic [7:0] rdata
);
  localparam int AW = $clog2(CS_SIZE);

  logic [7:0] mem [CS_SIZE];

  always_ff @(posedge clk) begin
    if (req.req) begin
      if (req.we) mem[req.addr[AW-1:0]] <= req.wdata;
      rdata <= mem[req.addr[AW-1:0]];
    end
  end
endmodule
