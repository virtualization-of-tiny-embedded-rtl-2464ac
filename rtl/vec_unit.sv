// vec_unit: the vector (ANN) unit executing the paper's vector operations.
//
// Operations (arguments as popped from the data stack, args[0] = former top):
//   vecload  ( src off dst -- )         dst[i] = src[off + i]
//   vecscale ( src dst scale -- )       dst[i] = S(src[i], scale[i])
//   vecadd   ( a b dst scale -- )       dst[i] = S(a[i] + b[i], scale[i])
//   vecmul   ( a b dst scale -- )       dst[i] = S(a[i] * b[i], scale[i])
//   vecfold  ( in w out scale -- )      out[j] = S(sum_i in[i] * w[j*n + i], scale[j])
//   vecmap   ( src dst func scale -- )  dst[i] = S(f(src[i]), scale[i]), f a DSP function
// with n = |in|, and S(v, s) = v * s for s > 0, v / -s for s < 0, v for s = 0,
// computed on 32 bits and saturated to signed 16 bits.  A scale vector address of
// 0 disables scaling.  Vector sizes come from the arrays themselves: an array in
// the code segment is a 16-bit cell count followed by the cells (big-endian); the
// sample buffer (IOS address 0x8000) is an array of the current window length and
// is indexed cyclically.  Size rules: vecadd/vecmul need equal sizes, vecfold
// needs |w| = |in| * |out| (weights stored neuron by neuron, as in the paper's
// network example), the other sources must be at least as long as the
// destination.  A violated rule finishes the request with err and writes nothing.
//
// The unit is sequential: one multiply-accumulate per element, code-segment cells
// read and written byte by byte through a shared-memory port (hold req until gnt,
// read data one cycle after the grant), sample-buffer cells through its access
// port.  vecmap calls the DSP function unit through a start/done port.  The
// operation set, the formulas, the 32-bit internal arithmetic and the scale rule
// are the paper's; the sequential single-MAC organisation, array layout and
// saturation are this design's choices (the paper mentions fixed-width parallel
// vector operations without giving the width).
module vec_unit
  import rexa_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [7:0]  func,
  input  logic [IOS_NARGS_MAX-1:0][15:0] args,
  output logic        done,
  output logic        err,
  // code segment
  output mem_req_t    mreq,
  input  logic        mgnt,
  input  logic        mrvalid,
  input  logic [7:0]  mrdata,
  // sample buffer
  output logic        sb_req,
  output logic        sb_we,
  output logic [15:0] sb_addr,
  output logic [15:0] sb_wdata,
  input  logic [15:0] sb_rdata,
  input  logic [15:0] sb_len,
  // DSP function unit
  output logic        f_start,
  output logic [7:0]  f_func,
  output logic [15:0] f_x,
  input  logic        f_done,
  input  logic        f_err,
  input  logic [15:0] f_y
);
  typedef enum logic [4:0] {
    V_IDLE, V_H0, V_H1, V_H2, V_H3, V_CHECK, V_RA, V_RB, V_RS, V_CALC, V_F, V_FW,
    V_WR, V_NEXT, V_FIN,
    M_REQ, M_WAIT, M_SBREQ, M_SBWAIT
  } vstate_e;

  vstate_e     vs, ret;
  logic [7:0]  op;
  logic [15:0] va, vb, vd, vsc, off, fn;
  logic [15:0] la, lb, ld, ls;
  logic [15:0] n, m, i, j;
  logic signed [31:0] acc;
  logic [15:0] ta, tb, tsc, tres;
  logic        fail;

  // memory sub-sequence
  logic [15:0] mvec;        // array
  logic [16:0] midx;        // element index; 17'h1ffff reads the length cell
  logic        mwe;
  logic [15:0] mwd, mrd;
  logic        mbyte;       // CS byte being accessed: 0 high, 1 low

  logic [15:0] cs_addr;
  always_comb begin
    if (midx == 17'h1ffff) cs_addr = mvec;
    else cs_addr = mvec + 16'd2 + {midx[14:0], 1'b0};
  end

  assign mreq = '{req: (vs == M_REQ), we: mwe, addr: cs_addr + {15'h0, mbyte},
                  wdata: mbyte ? mwd[7:0] : mwd[15:8]};

  logic [15:0] sb_index;
  always_comb begin
    logic [16:0] q;
    q = midx;
    if (sb_len != 0) q = midx % {1'b0, sb_len};
    sb_index = q[15:0];
  end
  assign sb_req   = (vs == M_SBREQ);
  assign sb_we    = mwe;
  assign sb_addr  = sb_index;
  assign sb_wdata = mwd;

  assign f_start = (vs == V_F);
  assign f_func  = fn[7:0];
  assign f_x     = ta;

  function automatic logic [15:0] scale(logic signed [31:0] v, logic signed [15:0] s);
    logic signed [31:0] r;
    if (s > 0)      r = v * 32'(s);
    else if (s < 0) r = v / (-32'(s));
    else            r = v;
    return sat16(r);
  endfunction

  logic uses_b, uses_s;
  assign uses_b = (op == IOS_VECADD || op == IOS_VECMUL || op == IOS_VECFOLD);
  assign uses_s = (vsc != 16'h0);

  // element index of the current operand reads
  logic [16:0] ia, ib, is_;
  always_comb begin
    ia = {1'b0, i}; ib = {1'b0, i}; is_ = {1'b0, i};
    case (op)
      IOS_VECLOAD: ia = 17'(off) + 17'(i);
      IOS_VECFOLD: begin
        ib  = 17'(32'(j) * 32'(n) + 32'(i));
        is_ = {1'b0, j};
      end
      default: ;
    endcase
  end

  // start a memory access, continue in state r afterwards
  task automatic access(input logic [15:0] vec, input logic [16:0] idx, input logic we,
                        input logic [15:0] wd, input vstate_e r);
    mvec <= vec; midx <= idx; mwe <= we; mwd <= wd; mbyte <= 1'b0; ret <= r;
    vs <= vec[15] ? M_SBREQ : M_REQ;
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vs <= V_IDLE; ret <= V_IDLE; op <= '0; va <= '0; vb <= '0; vd <= '0; vsc <= '0;
      off <= '0; fn <= '0; la <= '0; lb <= '0; ld <= '0; ls <= '0; n <= '0; m <= '0;
      i <= '0; j <= '0; acc <= '0; ta <= '0; tb <= '0; tsc <= '0; tres <= '0;
      fail <= 1'b0; mvec <= '0; midx <= '0; mwe <= 1'b0; mwd <= '0; mrd <= '0;
      mbyte <= 1'b0; done <= 1'b0; err <= 1'b0;
    end else begin
      done <= 1'b0; err <= 1'b0;
      case (vs)
        V_IDLE: if (start) begin
          op <= func; fail <= 1'b0; off <= '0; fn <= '0; vb <= '0;
          case (func)
            IOS_VECLOAD:  begin vd <= args[0]; off <= args[1]; va <= args[2]; vsc <= '0; end
            IOS_VECSCALE: begin vsc <= args[0]; vd <= args[1]; va <= args[2]; end
            IOS_VECADD, IOS_VECMUL, IOS_VECFOLD:
                          begin vsc <= args[0]; vd <= args[1]; vb <= args[2]; va <= args[3]; end
            default:      begin vsc <= args[0]; fn <= args[1]; vd <= args[2]; va <= args[3]; end
          endcase
          vs <= V_H0;
        end
        // sizes of the arrays involved
        V_H0: access(vd, 17'h1ffff, 1'b0, 16'h0, V_H1);
        V_H1: begin ld <= mrd; access(va, 17'h1ffff, 1'b0, 16'h0, V_H2); end
        V_H2: begin
          la <= mrd;
          if (uses_b) access(vb, 17'h1ffff, 1'b0, 16'h0, V_H3);
          else vs <= V_H3;
        end
        V_H3: begin
          if (uses_b) lb <= mrd;
          if (uses_s) access(vsc, 17'h1ffff, 1'b0, 16'h0, V_CHECK);
          else vs <= V_CHECK;
        end
        V_CHECK: begin
          logic bad;
          ls <= uses_s ? mrd : 16'hffff;
          i <= '0; j <= '0; acc <= '0;
          bad = 1'b0;
          if (op == IOS_VECFOLD) begin
            n <= la; m <= ld;
            bad = (32'(lb) != 32'(la) * 32'(ld)) || (uses_s && mrd < ld);
            bad = bad || (la == 0) || (ld == 0);
          end else begin
            n <= ld; m <= 16'd1;
            case (op)
              IOS_VECLOAD:             bad = !va[15] && (32'(la) < 32'(off) + 32'(ld));
              IOS_VECADD, IOS_VECMUL:  bad = (la != ld) || (lb != ld);
              IOS_VECSCALE, IOS_VECMAP: bad = (la < ld);
              default:                 bad = 1'b1;
            endcase
            bad = bad || (uses_s && mrd < ld) || (ld == 0);
            if (op == IOS_VECMAP && fn > 16'(IOS_RELU)) bad = 1'b1;
          end
          if (bad) begin fail <= 1'b1; vs <= V_FIN; end
          else vs <= V_RA;
        end
        V_RA: access(va, ia, 1'b0, 16'h0, V_RB);
        V_RB: begin
          ta <= mrd;
          if (uses_b) access(vb, ib, 1'b0, 16'h0, V_RS);
          else vs <= V_RS;
        end
        V_RS: begin
          if (uses_b) tb <= mrd;
          if (uses_s && (op != IOS_VECFOLD || i == n - 16'd1))
            access(vsc, is_, 1'b0, 16'h0, V_CALC);
          else vs <= V_CALC;
        end
        V_CALC: begin
          logic signed [15:0] s;
          s = (uses_s && (op != IOS_VECFOLD || i == n - 16'd1)) ? mrd : 16'sh0;
          tsc <= s;
          case (op)
            IOS_VECLOAD:  begin tres <= ta; vs <= V_WR; end
            IOS_VECSCALE: begin tres <= scale(32'($signed(ta)), s); vs <= V_WR; end
            IOS_VECADD:   begin tres <= scale(32'($signed(ta)) + 32'($signed(tb)), s); vs <= V_WR; end
            IOS_VECMUL:   begin tres <= scale(32'($signed(ta)) * 32'($signed(tb)), s); vs <= V_WR; end
            IOS_VECFOLD: begin
              logic signed [31:0] a2;
              a2 = acc + 32'($signed(ta)) * 32'($signed(tb));
              if (i == n - 16'd1) begin
                tres <= scale(a2, s); acc <= '0; vs <= V_WR;
              end else begin
                acc <= a2; i <= i + 16'd1; vs <= V_RA;
              end
            end
            default: vs <= V_F;   // vecmap
          endcase
        end
        V_F:  vs <= V_FW;          // f_start is high in V_F
        V_FW: if (f_done) begin
          if (f_err) begin fail <= 1'b1; vs <= V_FIN; end
          else begin tres <= scale(32'($signed(f_y)), tsc); vs <= V_WR; end
        end
        V_WR: access(vd, (op == IOS_VECFOLD) ? {1'b0, j} : {1'b0, i}, 1'b1, tres, V_NEXT);
        V_NEXT: begin
          if (op == IOS_VECFOLD) begin
            i <= '0;
            if (j == m - 16'd1) vs <= V_FIN;
            else begin j <= j + 16'd1; vs <= V_RA; end
          end else begin
            if (i == n - 16'd1) vs <= V_FIN;
            else begin i <= i + 16'd1; vs <= V_RA; end
          end
        end
        V_FIN: begin done <= 1'b1; err <= fail; vs <= V_IDLE; end

        // ---- code segment cell: two byte accesses
        M_REQ: if (mgnt) begin
          if (mwe) begin
            if (mbyte) vs <= ret;
            mbyte <= ~mbyte;
          end else vs <= M_WAIT;
        end
        M_WAIT: if (mrvalid) begin
          if (!mbyte) begin mrd[15:8] <= mrdata; mbyte <= 1'b1; vs <= M_REQ; end
          else begin mrd[7:0] <= mrdata; vs <= ret; end
        end
        // ---- sample buffer cell
        M_SBREQ: begin
          if (midx == 17'h1ffff) begin mrd <= sb_len; vs <= ret; end
          else if (mwe) vs <= ret;
          else vs <= M_SBWAIT;
        end
        M_SBWAIT: begin mrd <= sb_rdata; vs <= ret; end
        default: vs <= V_IDLE;
      endcase
    end
  end
endmodule
