// dict: the global word dictionary shared by all VM threads (DICT with its def,
// lookup and gc processes).
//
// Each entry binds a name key (a 16-bit code of the word's name, formed by the
// compiler) to the CS address of an exported word.  Three operations:
//   def     (export)  insert key -> addr; an existing key is overwritten, so newer
//                     code replaces older code; found = 0 when the table is full
//   lookup  (import)  key -> addr, found = 0 if the key is unknown
//   gc                remove every entry whose address lies in [gc_lo, gc_hi), used
//                     when a code frame is released
// Requests from NPORT requesters (hold req until done) are served one at a time,
// lowest port first; an operation walks the table linearly, one entry per clock,
// so it takes ENTRIES+2 cycles, and done pulses for one cycle at the end.  The paper
// names the dictionary and its def / lookup / gc processes and says that
// dictionary words use simple hashing with linear search of a small table; the
// plain linear search over keys is this design's simplification.
module dict
  import rexa_pkg::*;
#(
  parameter int ENTRIES = 32,
  parameter int NPORT   = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NPORT-1:0]  req,
  input  logic [NPORT-1:0]  def,
  input  logic [15:0]       key   [NPORT],
  input  logic [15:0]       addr  [NPORT],
  output logic [NPORT-1:0]  done,
  output logic              found,
  output logic [15:0]       raddr,
  input  logic              gc_req,
  input  logic [15:0]       gc_lo,
  input  logic [15:0]       gc_hi,
  output logic              gc_done,
  output logic [$clog2(ENTRIES):0] used
);
  localparam int EW = $clog2(ENTRIES);
  localparam int PW = (NPORT > 1) ? $clog2(NPORT) : 1;

  logic              ev [ENTRIES];
  logic [15:0]       ek [ENTRIES];
  logic [15:0]       ea [ENTRIES];

  typedef enum logic [1:0] { D_IDLE, D_SCAN, D_DONE, D_GAP } dstate_e;
  dstate_e       ds;
  logic [PW-1:0] port;
  logic          is_gc, is_def;
  logic [EW:0]   idx;
  logic          hit, hasfree;
  logic [EW-1:0] hidx, fidx;

  // port chosen when idle
  logic          any;
  logic [PW-1:0] psel;
  always_comb begin
    any = 1'b0; psel = '0;
    for (int p = NPORT - 1; p >= 0; p--)
      if (req[p]) begin any = 1'b1; psel = PW'(p); end
  end

  always_comb begin
    int c;
    c = 0;
    for (int e = 0; e < ENTRIES; e++) c += int'(ev[e]);
    used = (EW+1)'(c);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) begin ev[e] <= 1'b0; ek[e] <= '0; ea[e] <= '0; end
      ds <= D_IDLE; port <= '0; is_gc <= 1'b0; is_def <= 1'b0; idx <= '0;
      hit <= 1'b0; hasfree <= 1'b0; hidx <= '0; fidx <= '0;
      done <= '0; found <= 1'b0; raddr <= '0; gc_done <= 1'b0;
    end else begin
      done <= '0; gc_done <= 1'b0;
      case (ds)
        D_IDLE: begin
          idx <= '0; hit <= 1'b0; hasfree <= 1'b0;
          if (gc_req) begin
            is_gc <= 1'b1; ds <= D_SCAN;
          end else if (any) begin
            is_gc <= 1'b0; port <= psel; is_def <= def[psel]; ds <= D_SCAN;
          end
        end
        D_SCAN: begin
          if (is_gc) begin
            if (ev[idx[EW-1:0]] && ea[idx[EW-1:0]] >= gc_lo && ea[idx[EW-1:0]] < gc_hi)
              ev[idx[EW-1:0]] <= 1'b0;
          end else begin
            if (ev[idx[EW-1:0]] && ek[idx[EW-1:0]] == key[port] && !hit) begin
              hit <= 1'b1; hidx <= idx[EW-1:0];
            end
            if (!ev[idx[EW-1:0]] && !hasfree) begin
              hasfree <= 1'b1; fidx <= idx[EW-1:0];
            end
          end
          if (idx == (EW+1)'(ENTRIES - 1)) ds <= D_DONE;
          idx <= idx + 1'b1;
        end
        D_GAP: ds <= D_IDLE;     // lets the requester drop req after done
        default: begin   // D_DONE
          ds <= D_GAP;
          if (is_gc) begin
            gc_done <= 1'b1;
          end else begin
            done[port] <= 1'b1;
            if (is_def) begin
              found <= hit || hasfree;
              if (hit) ea[hidx] <= addr[port];
              else if (hasfree) begin
                ev[fidx] <= 1'b1; ek[fidx] <= key[port]; ea[fidx] <= addr[port];
              end
              raddr <= addr[port];
            end else begin
              found <= hit;
              raddr <= hit ? ea[hidx] : 16'h0;
            end
          end
        end
      endcase
    end
  end
endmodule
