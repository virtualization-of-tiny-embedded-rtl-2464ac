// rexa_pkg: types and constants shared by the blocks of the hardware REXA stack VM.
//
// Bytecode format (follows the paper's bytecode definition): the two top bits of a
// code byte select the kind of word:
//   00  short literal, 2 bytes, 14-bit signed value, most significant byte first
//   01  long literal,  4 bytes, 30-bit signed value, most significant byte first
//   10  operation, lower range (op codes 0..63 in bits 5:0)
//   11  operation, upper range (op codes 64..127)
// Branches, calls and loops carry a 16-bit address after the op byte (3-byte form),
// FCALL carries an 8-bit IOS function index.  The numbering of the op codes below is
// this design's own: the paper generates it from a word list it does not print.
//
// Data address space (this design's choice): a 16-bit data address with bit 15 clear
// is a CS byte address; a scalar variable is a 2-byte big-endian cell there and an
// array is a 2-byte cell count followed by the cells.  Bit 15 set selects an IOS data
// object (DIOS) by its low bits: the sample buffer, the conversion status and the
// top offset of the sample ring.
package rexa_pkg;

  // ---------------------------------------------------------------- op codes
  typedef enum logic [6:0] {
    OP_NOP     = 7'd0,
    OP_ADD     = 7'd1,
    OP_SUB     = 7'd2,
    OP_MUL     = 7'd3,
    OP_DIV     = 7'd4,
    OP_MOD     = 7'd5,
    OP_NEGATE  = 7'd6,
    OP_AND     = 7'd7,
    OP_OR      = 7'd8,
    OP_XOR     = 7'd9,
    OP_INVERT  = 7'd10,
    OP_EQ      = 7'd11,
    OP_NE      = 7'd12,
    OP_LT      = 7'd13,
    OP_GT      = 7'd14,
    OP_LE      = 7'd15,
    OP_GE      = 7'd16,
    OP_ZEQ     = 7'd17,
    OP_DUP     = 7'd18,
    OP_DROP    = 7'd19,
    OP_SWAP    = 7'd20,
    OP_OVER    = 7'd21,
    OP_FETCH   = 7'd22,  // ( addr -- v )
    OP_STORE   = 7'd23,  // ( v addr -- )
    OP_READ    = 7'd24,  // ( index arr -- v )
    OP_WRITE   = 7'd25,  // ( v index arr -- )
    OP_BRANCH  = 7'd26,  // + 16-bit address
    OP_BRANCHZ = 7'd27,  // + 16-bit address, taken when TOS == 0
    OP_CALL    = 7'd28,  // + 16-bit address
    OP_RET     = 7'd29,
    OP_DO      = 7'd30,  // ( limit start -- )
    OP_LOOP    = 7'd31,  // + 16-bit address of the loop body
    OP_I       = 7'd32,
    OP_YIELD   = 7'd33,
    OP_SLEEP   = 7'd34,  // ( ms -- )
    OP_AWAIT   = 7'd35,  // ( ms value addr -- status )
    OP_END     = 7'd36,
    OP_OUT     = 7'd37,  // ( v -- )
    OP_IN      = 7'd38,  // ( -- v )
    OP_SEND    = 7'd39,  // ( v dst -- )
    OP_RECEIVE = 7'd40,  // ( src -- v )
    OP_THROW   = 7'd41,  // ( exc -- )
    OP_CATCH   = 7'd42,  // ( -- exc|0 )
    OP_FCALL   = 7'd43,  // + 8-bit IOS function index
    OP_TASK    = 7'd44,  // ( prio deadline addr -- taskid )
    OP_EXPORT  = 7'd45,  // ( key addr -- )
    OP_IMPORT  = 7'd46,  // ( key -- addr )
    OP_SENDN   = 7'd47   // ( length offset arr dst -- ), send arr[offset..] cells
  } opcode_e;

  // ---------------------------------------------------------------- exceptions
  typedef enum logic [3:0] {
    EXC_NONE      = 4'd0,
    EXC_TRAP      = 4'd1,   // undefined op code
    EXC_STACK     = 4'd2,   // stack over- or underflow
    EXC_INTERRUPT = 4'd3,
    EXC_IO        = 4'd4,   // failed IOS call, import of an unknown word
    EXC_TIMEOUT   = 4'd5,
    EXC_DIVBYZERO = 4'd6,
    EXC_USER      = 4'd7    // raised by throw
  } exc_e;

  // ---------------------------------------------------------------- IOS functions
  localparam int IOS_NARGS_MAX = 5;
  typedef enum logic [7:0] {
    IOS_SIGMOID  = 8'd0,  // ( x -- y )
    IOS_LOG10    = 8'd1,  // ( x -- y )
    IOS_RELU     = 8'd2,  // ( x -- y )
    IOS_VECLOAD  = 8'd3,  // ( srcvec srcoff dstvec -- )
    IOS_VECSCALE = 8'd4,  // ( srcvec dstvec scalevec -- )
    IOS_VECADD   = 8'd5,  // ( op1vec op2vec dstvec scalevec -- )
    IOS_VECMUL   = 8'd6,  // ( op1vec op2vec dstvec scalevec -- )
    IOS_VECFOLD  = 8'd7,  // ( invec wgtvec outvec scalevec -- )
    IOS_VECMAP   = 8'd8,  // ( srcvec dstvec func scalevec -- )
    IOS_ADC      = 8'd9,  // ( trigmode depth gain freq device -- )
    IOS_DAC      = 8'd10, // ( wave interval ampl freq device -- )
    IOS_SAMPLED  = 8'd11, // ( -- addr )
    IOS_SAMPLES  = 8'd12, // ( -- addr )
    IOS_SAMPLE0  = 8'd13, // ( -- addr )
    IOS_DREAD    = 8'd14, // ( index addr -- v )   DIOS read, used by @ and read
    IOS_DWRITE   = 8'd15  // ( v index addr -- )   DIOS write, used by ! and write
  } ios_func_e;

  localparam int IOS_NFUNC = 16;

  // argument count and whether one value is returned
  function automatic int ios_nargs(logic [7:0] f);
    case (f)
      IOS_SIGMOID, IOS_LOG10, IOS_RELU: return 1;
      IOS_VECLOAD, IOS_VECSCALE, IOS_DWRITE: return 3;
      IOS_VECADD, IOS_VECMUL, IOS_VECFOLD, IOS_VECMAP: return 4;
      IOS_ADC, IOS_DAC: return 5;
      IOS_DREAD: return 2;
      default: return 0;
    endcase
  endfunction

  function automatic logic ios_has_ret(logic [7:0] f);
    case (f)
      IOS_SIGMOID, IOS_LOG10, IOS_RELU, IOS_SAMPLED, IOS_SAMPLES,
      IOS_SAMPLE0, IOS_DREAD: return 1'b1;
      default: return 1'b0;
    endcase
  endfunction

  // DIOS object addresses (bit 15 set)
  localparam logic [15:0] DIOS_SAMPLES = 16'h8000;
  localparam logic [15:0] DIOS_SAMPLED = 16'h8001;
  localparam logic [15:0] DIOS_SAMPLE0 = 16'h8002;

  // ---------------------------------------------------------------- bundles
  // one byte access to the code segment; read data returns one cycle after grant
  typedef struct packed {
    logic        req;
    logic        we;
    logic [15:0] addr;
    logic [7:0]  wdata;
  } mem_req_t;

  typedef struct packed {
    logic                          valid;
    logic [7:0]                    func;
    logic [IOS_NARGS_MAX-1:0][15:0] args;  // args[0] = top of stack
  } ios_req_t;

  typedef struct packed {
    logic        done;     // one-cycle pulse, request finished
    logic        err;      // request failed (unknown function, bad address)
    logic [15:0] result;
  } ios_rsp_t;

  // task token: scheduler -> VMEXEC
  typedef struct packed {
    logic        valid;
    logic [1:0]  task_id;
    logic [15:0] pc;
    logic        fresh;        // new task: empty its stacks first
    logic        push_status;  // resuming an await: push status first
    logic [15:0] status_val;
  } task_token_t;

  typedef enum logic [2:0] {
    ST_STEPS   = 3'd0,  // step budget used up, task stays ready
    ST_YIELD   = 3'd1,
    ST_SLEEP   = 3'd2,
    ST_AWAIT   = 3'd3,
    ST_END     = 3'd4,
    ST_ERROR   = 3'd5   // uncaught exception, task removed
  } vm_status_e;

  // status token: VMEXEC -> scheduler
  typedef struct packed {
    logic        valid;
    logic [1:0]  task_id;
    vm_status_e  status;
    logic [15:0] pc;        // where to resume
    logic [15:0] timeout;   // milliseconds for sleep / await
    logic [15:0] ev_value;  // awaited value
    logic [15:0] ev_addr;   // awaited variable
    exc_e        exc;
  } vm_status_t;

  // stack operations
  typedef enum logic [2:0] {
    SOP_NONE = 3'd0,
    SOP_PUSH = 3'd1,   // push wdata
    SOP_POP  = 3'd2,   // drop top
    SOP_REPL = 3'd3,   // replace top with wdata
    SOP_POPR = 3'd4,   // drop top, replace new top with wdata (binary op)
    SOP_SWAP = 3'd5,
    SOP_POP2 = 3'd6,   // drop two
    SOP_PUSH2 = 3'd7   // push wdata2 then wdata (wdata on top)
  } stack_op_e;

  // ---------------------------------------------------------------- helpers
  function automatic logic [15:0] sat16(logic signed [31:0] v);
    if (v > 32'sd32767) return 16'h7fff;
    if (v < -32'sd32768) return 16'h8000;
    return v[15:0];
  endfunction

endpackage
