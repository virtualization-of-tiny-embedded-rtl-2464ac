// ios_sched: the IOS scheduler, the gateway from the VM threads to the devices and
// co-processors of the input-output system (IOS SCHED).
//
// Each VM thread issues an FCALL request (ios_req_t: function index and up to five
// arguments, valid for one clock) and waits for its done pulse (ios_rsp_t, with a
// result for functions that return one, err for an unknown function, a bad address
// or a vector size error).  Requests are latched per thread and served one at a
// time, round-robin between the threads.  The scheduler dispatches to
//   dsp_func   sigmoid, log10, relu (one clock)
//   vec_unit   vecload, vecscale, vecadd, vecmul, vecfold, vecmap (many clocks)
//   sample_buf adc (start a conversion), reads and writes of the sample buffer and
//              of its status variables through the IOS data addresses
//   dac        the dac word's parameters are latched into output registers and a
//              start pulse is given to the external converter
// and returns the IOS data addresses for the samples, sampled and sample0 words.
// The DSP function unit is shared: vecmap uses it through the vector unit while
// the scheduler itself is waiting for the vector unit.  The paper describes the IOS
// as the layer that bridges device functions and data into the VM and shows one IOS
// scheduler shared by the VM threads with ADC, DAC, I2C, DSP and ANN units; the
// latching, round-robin service and the dispatch table are this design's.
module ios_sched
  import rexa_pkg::*;
#(
  parameter int NTHREADS = 2,
  parameter int SB_DEPTH = 8192
) (
  input  logic        clk,
  input  logic        rst_n,
  input  ios_req_t    req [NTHREADS],
  output ios_rsp_t    rsp [NTHREADS],
  // code-segment port of the vector unit
  output mem_req_t    mreq,
  input  logic        mgnt,
  input  logic        mrvalid,
  input  logic [7:0]  mrdata,
  // ADC side
  output logic        adc_start,
  output logic [15:0] adc_trigmode,
  output logic [15:0] adc_depth,
  output logic [15:0] adc_gain,
  output logic [15:0] adc_freq,
  output logic [15:0] adc_device,
  input  logic        adc_valid,
  input  logic [15:0] adc_data,
  input  logic        adc_trig,
  // DAC side
  output logic        dac_start,
  output logic [15:0] dac_wave,
  output logic [15:0] dac_interval,
  output logic [15:0] dac_ampl,
  output logic [15:0] dac_freq,
  output logic [15:0] dac_device,
  // IOS data variables for the task schedulers
  output logic [15:0] sampled,
  output logic [15:0] sample0
);
  localparam int TW = (NTHREADS > 1) ? $clog2(NTHREADS) : 1;

  // ---------------------------------------------------------------- request latches
  logic [NTHREADS-1:0] pend;
  ios_req_t            preq [NTHREADS];

  typedef enum logic [2:0] { I_IDLE, I_DSP, I_VSTART, I_VEC, I_SB, I_SBW, I_RESP } istate_e;
  istate_e       is;
  logic [TW-1:0] cur, last;
  logic [7:0]    fn;
  logic [IOS_NARGS_MAX-1:0][15:0] a;
  logic [15:0]   result;
  logic          rerr;

  // round-robin choice among pending requests
  logic          any;
  logic [TW-1:0] sel;
  always_comb begin
    any = 1'b0; sel = '0;
    for (int k = 1; k <= NTHREADS; k++) begin
      if (!any && pend[(int'(last) + k) % NTHREADS]) begin
        any = 1'b1; sel = TW'((int'(last) + k) % NTHREADS);
      end
    end
  end

  // ---------------------------------------------------------------- units
  logic        d_start, d_done, d_err;
  logic [7:0]  d_func;
  logic [15:0] d_x, d_y;
  logic        v_start, v_done, v_err;
  logic        vf_start;
  logic [7:0]  vf_func;
  logic [15:0] vf_x;
  logic        vsb_req, vsb_we;
  logic [15:0] vsb_addr, vsb_wdata;
  logic        sb_start;
  logic        acc_req, acc_we;
  logic [15:0] acc_addr, acc_wdata, acc_rdata, win_len;

  dsp_func u_dsp (
    .clk, .rst_n, .start(d_start), .func(d_func), .x(d_x),
    .done(d_done), .err(d_err), .y(d_y));

  vec_unit u_vec (
    .clk, .rst_n, .start(v_start), .func(fn), .args(a), .done(v_done), .err(v_err),
    .mreq, .mgnt, .mrvalid, .mrdata,
    .sb_req(vsb_req), .sb_we(vsb_we), .sb_addr(vsb_addr), .sb_wdata(vsb_wdata),
    .sb_rdata(acc_rdata), .sb_len(win_len),
    .f_start(vf_start), .f_func(vf_func), .f_x(vf_x),
    .f_done(d_done), .f_err(d_err), .f_y(d_y));

  sample_buf #(.DEPTH(SB_DEPTH)) u_sb (
    .clk, .rst_n, .start(sb_start), .trigmode(a[4]), .depth_ks(a[3]),
    .adc_start, .adc_valid, .adc_data, .adc_trig,
    .sampled, .sample0, .win_len,
    .acc_req, .acc_we, .acc_addr, .acc_wdata, .acc_rdata);

  // the DSP unit serves the scheduler, or the vector unit during vecmap
  assign d_start = (is == I_VEC) ? vf_start : (is == I_DSP);
  assign d_func  = (is == I_VEC) ? vf_func  : fn;
  assign d_x     = (is == I_VEC) ? vf_x     : a[0];

  // sample buffer access: vector unit while it runs, else IOS data reads/writes
  logic dios_sb;   // current request addresses the sample array
  assign dios_sb   = (a[0] == DIOS_SAMPLES);
  assign acc_req   = (is == I_VEC) ? vsb_req   : (is == I_SB && dios_sb);
  assign acc_we    = (is == I_VEC) ? vsb_we    : (fn == IOS_DWRITE);
  assign acc_addr  = (is == I_VEC) ? vsb_addr  : ((win_len != 0) ? a[1] % win_len : a[1]);
  assign acc_wdata = (is == I_VEC) ? vsb_wdata : a[2];

  assign v_start  = (is == I_VSTART);
  assign sb_start = (is == I_RESP) && (fn == IOS_ADC) && !rerr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend <= '0;
      for (int t = 0; t < NTHREADS; t++) begin preq[t] <= '0; rsp[t] <= '0; end
      is <= I_IDLE; cur <= '0; last <= TW'(NTHREADS - 1); fn <= '0; a <= '0;
      result <= '0; rerr <= 1'b0;
      adc_trigmode <= '0; adc_depth <= '0; adc_gain <= '0; adc_freq <= '0; adc_device <= '0;
      dac_start <= 1'b0; dac_wave <= '0; dac_interval <= '0; dac_ampl <= '0;
      dac_freq <= '0; dac_device <= '0;
    end else begin
      dac_start <= 1'b0;
      for (int t = 0; t < NTHREADS; t++) begin
        rsp[t].done <= 1'b0;
        if (req[t].valid) begin pend[t] <= 1'b1; preq[t] <= req[t]; end
      end

      case (is)
        I_IDLE: if (any) begin
          cur <= sel; last <= sel; pend[sel] <= 1'b0;
          fn <= preq[sel].func; a <= preq[sel].args;
          result <= '0; rerr <= 1'b0;
          case (preq[sel].func)
            IOS_SIGMOID, IOS_LOG10, IOS_RELU: is <= I_DSP;
            IOS_VECLOAD, IOS_VECSCALE, IOS_VECADD, IOS_VECMUL, IOS_VECFOLD, IOS_VECMAP:
              is <= I_VSTART;
            IOS_ADC: begin
              // ( trigmode depth gain freq device -- )
              adc_trigmode <= preq[sel].args[4]; adc_depth <= preq[sel].args[3];
              adc_gain <= preq[sel].args[2]; adc_freq <= preq[sel].args[1];
              adc_device <= preq[sel].args[0];
              is <= I_RESP;
            end
            IOS_DAC: begin
              // ( wave interval ampl freq device -- )
              dac_wave <= preq[sel].args[4]; dac_interval <= preq[sel].args[3];
              dac_ampl <= preq[sel].args[2]; dac_freq <= preq[sel].args[1];
              dac_device <= preq[sel].args[0]; dac_start <= 1'b1;
              is <= I_RESP;
            end
            IOS_SAMPLED: begin result <= DIOS_SAMPLED; is <= I_RESP; end
            IOS_SAMPLES: begin result <= DIOS_SAMPLES; is <= I_RESP; end
            IOS_SAMPLE0: begin result <= DIOS_SAMPLE0; is <= I_RESP; end
            IOS_DREAD, IOS_DWRITE: is <= I_SB;
            default: begin rerr <= 1'b1; is <= I_RESP; end
          endcase
        end
        I_DSP: is <= I_SBW;                // result registered in dsp_func
        I_VSTART: is <= I_VEC;
        I_VEC: if (v_done) begin rerr <= v_err; is <= I_RESP; end
        I_SB: begin
          // args[0] = IOS data address, args[1] = index, args[2] = value (write)
          if (dios_sb) begin
            if (fn == IOS_DWRITE) is <= I_RESP;
            else is <= I_SBW;
          end else begin
            if (fn == IOS_DREAD && a[0] == DIOS_SAMPLED) result <= sampled;
            else if (fn == IOS_DREAD && a[0] == DIOS_SAMPLE0) result <= sample0;
            else rerr <= 1'b1;                 // unknown object, or status written
            is <= I_RESP;
          end
        end
        I_SBW: begin
          // data of the sample buffer (or the DSP unit) is available now
          if (fn == IOS_SIGMOID || fn == IOS_LOG10 || fn == IOS_RELU) begin
            result <= d_y; rerr <= d_err;
          end else result <= acc_rdata;
          is <= I_RESP;
        end
        default: begin   // I_RESP
          rsp[cur].done   <= 1'b1;
          rsp[cur].err    <= rerr;
          rsp[cur].result <= result;
          is <= I_IDLE;
        end
      endcase
    end
  end
endmodule
