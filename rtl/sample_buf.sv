// sample_buf: the ADC sample buffer with its DMA write side (samples, sampled, sample0).
//
// The converter delivers samples (adc_valid / adc_data); the buffer stores them by
// DMA as a ring of `depth * 1024` cells (the depth is given in kS, capped at DEPTH).
// A conversion is started by `start` with the parameters of the adc word; the
// buffer raises the start pulse towards the converter and clears the status
// `sampled`.  In free-running mode (trigmode == TRIG_FREE) the window begins with
// the first sample; in any other mode samples circulate in the ring until the
// analog front end signals its trigger (adc_trig), and the window is the `depth`
// samples from the trigger on.  When the window is complete, sampled becomes 1 and
// sample0 holds the ring position of the window's oldest sample, where a reader
// starts (cyclically, as the paper describes).  Samples arriving while no
// conversion runs are ignored.
//
// A second, read/write port (acc_*) gives the VM and the vector unit access to the
// buffer for reading and for in-place signal processing; reads return one clock
// after the request.  Both ports may be active in the same clock (a dual-port RAM).
// The buffer size, the status and offset variables and the ring organisation are
// the paper's; trigger handling and the kS depth unit of 1024 samples are this
// design's reading of the adc word's description.
module sample_buf
  import rexa_pkg::*;
#(
  parameter int DEPTH     = 8192,
  parameter int TRIG_FREE = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  // conversion control (adc word)
  input  logic        start,
  input  logic [15:0] trigmode,
  input  logic [15:0] depth_ks,
  // converter side
  output logic        adc_start,
  input  logic        adc_valid,
  input  logic [15:0] adc_data,
  input  logic        adc_trig,
  // status
  output logic [15:0] sampled,
  output logic [15:0] sample0,
  output logic [15:0] win_len,     // window length in samples
  // access port
  input  logic        acc_req,
  input  logic        acc_we,
  input  logic [15:0] acc_addr,
  input  logic [15:0] acc_wdata,
  output logic [15:0] acc_rdata
);
  localparam int AW = $clog2(DEPTH);

  logic [15:0] mem [DEPTH];
  logic [AW:0] len, wp, cnt;
  logic        run, trig;

  always_comb begin
    logic [31:0] n;
    n = 32'(depth_ks) * 32'd1024;
    if (n == 0 || n > DEPTH) n = DEPTH;
    len = (AW+1)'(n);
  end

  always_ff @(posedge clk) begin
    if (run && adc_valid) mem[wp[AW-1:0]] <= adc_data;
    if (acc_req) begin
      if (acc_we) mem[acc_addr[AW-1:0]] <= acc_wdata;
      acc_rdata <= mem[acc_addr[AW-1:0]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; trig <= 1'b0; wp <= '0; cnt <= '0; win_len <= '0;
      sampled <= '0; sample0 <= '0; adc_start <= 1'b0;
    end else begin
      adc_start <= start;
      if (start) begin
        run <= 1'b1; trig <= (trigmode == 16'(TRIG_FREE));
        wp <= '0; cnt <= '0; win_len <= 16'(len);
        sampled <= '0; sample0 <= '0;
      end else if (run) begin
        if (adc_trig) trig <= 1'b1;
        if (adc_valid) begin
          logic [AW:0] nwp;
          nwp = (wp + 1'b1 == (AW+1)'(win_len)) ? '0 : wp + 1'b1;
          wp <= nwp;
          if (trig || adc_trig) begin
            cnt <= cnt + 1'b1;
            if (cnt + 1'b1 == (AW+1)'(win_len)) begin
              run <= 1'b0; sampled <= 16'd1; sample0 <= 16'(nwp);
            end
          end
        end
      end
    end
  end
endmodule
