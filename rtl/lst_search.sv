// lst_search: word lookup in a Linear Search Table (LST), the compiler's table that
// maps a word string to its index.
//
// The table is a byte array (loaded through the write port) made of a head section
// and token slices, as the paper describes:
//   head:   for each word length L = 1..MAXLEN a 2-byte big-endian byte address of
//           the first slice of the sub-tree of words with L characters (0: none)
//   slices: runs of 2-byte entries (character, value), closed by a character 0
//           ("not found").  Before the last character of a word, value is the
//           forward distance, in entries, from this entry to the slice of the next
//           character; at the last character it is the word's index.
// A search takes the word (chars[0] is its first character) and its length.  It
// reads the head entry, then walks the slices: one entry per clock is compared
// with the current character; on a match it jumps to the next slice (or ends with
// the index), otherwise it steps to the next entry, and the closing entry ends the
// search with found = 0.  Search time therefore grows with the word length and the
// slice sizes, not with the number of words.  The table layout is the paper's;
// its field widths (8-bit character, 8-bit branch or index) are this design's.
// done pulses for one clock with found and index.
module lst_search #(
  parameter int TBL_BYTES = 1024,
  parameter int MAXLEN    = 16
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // table load
  input  logic                      wr_en,
  input  logic [$clog2(TBL_BYTES)-1:0] wr_addr,
  input  logic [7:0]                wr_data,
  // search
  input  logic                      start,
  input  logic [MAXLEN-1:0][7:0]    chars,
  input  logic [$clog2(MAXLEN):0]   len,
  output logic                      busy,
  output logic                      done,
  output logic                      found,
  output logic [7:0]                index,
  output logic [15:0]               probes     // entries compared in the last search
);
  localparam int AW = $clog2(TBL_BYTES);

  logic [7:0] tbl [TBL_BYTES];
  always_ff @(posedge clk) if (wr_en) tbl[wr_addr] <= wr_data;

  typedef enum logic [1:0] { L_IDLE, L_HEAD, L_WALK } lstate_e;
  lstate_e      ls;
  logic [AW-1:0] p;
  logic [$clog2(MAXLEN):0] pos, wlen;
  logic [MAXLEN-1:0][7:0] w;

  logic [7:0] ec, ev;       // entry at p
  assign ec = tbl[p];
  assign ev = tbl[p + AW'(1)];

  assign busy = (ls != L_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ls <= L_IDLE; p <= '0; pos <= '0; wlen <= '0; w <= '0;
      done <= 1'b0; found <= 1'b0; index <= '0; probes <= '0;
    end else begin
      done <= 1'b0;
      case (ls)
        L_IDLE: if (start) begin
          w <= chars; wlen <= len; pos <= '0; probes <= '0;
          if (len == 0 || len > ($clog2(MAXLEN)+1)'(MAXLEN)) begin
            done <= 1'b1; found <= 1'b0;
          end else begin
            p  <= AW'(2 * (int'(len) - 1));
            ls <= L_HEAD;
          end
        end
        L_HEAD: begin
          if ({ec, ev} == 16'h0) begin
            done <= 1'b1; found <= 1'b0; ls <= L_IDLE;
          end else begin
            p  <= AW'({ec, ev});
            ls <= L_WALK;
          end
        end
        default: begin   // L_WALK
          probes <= probes + 16'd1;
          if (ec == 8'h0) begin
            done <= 1'b1; found <= 1'b0; ls <= L_IDLE;
          end else if (ec == w[pos]) begin
            if (pos == wlen - 1'b1) begin
              done <= 1'b1; found <= 1'b1; index <= ev; ls <= L_IDLE;
            end else begin
              p   <= p + AW'({ev, 1'b0});
              pos <= pos + 1'b1;
            end
          end else begin
            p <= p + AW'(2);
          end
        end
      endcase
    end
  end
endmodule
