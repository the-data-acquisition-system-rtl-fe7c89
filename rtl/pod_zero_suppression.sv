// pod_zero_suppression -- Pulse Only Digitization (POD) of one channel.
//
// The baseline is the rolling average of the BL_LEN (32) samples before the
// current sample.  A sample that lies more than `thr` ADC counts below that
// baseline "crosses the POD threshold".  Around every crossing the channel
// keeps the PRE (32) samples before it and the POST (32) samples after the
// waveform is back within the threshold; when a new crossing falls inside the
// post-samples of the previous one, the two PODs merge into one.
// How it works: the input is delayed by PRE samples.  A counter holds the
// distance, in samples, to the most recent crossing; the delayed sample is kept
// exactly when that distance is at most PRE+POST, which yields the pre-samples,
// the post-samples and the merging without any state machine.  The baseline
// comparison is done on sums (sum of 32 samples against 32 times the sample)
// so the fractional average is exact.
// With zs_on low the channel records raw data instead: the RAW_LEN (500)
// samples starting at a `raw_trig` pulse are kept, as in the paper's
// raw-plus-POD verification mode.
// Interface: one sample per clock on `x` with its time stamp `ts`.  Outputs,
// registered: `keep`, the delayed sample `y` and its time stamp `y_ts`
// (PRE+1 cycles of latency in total), and for the rate monitors `over` (this
// input sample is beyond the threshold) and `crossing` (first sample of a
// crossing).  Following the example POD in the paper, pulses are taken to be
// negative-going; the polarity is this design's reading of that figure.
module pod_zero_suppression
  import fadr_pkg::*;
#(
  parameter int unsigned BL_LEN  = 32,
  parameter int unsigned PRE     = 32,
  parameter int unsigned POST    = 32,
  parameter int unsigned RAW_LEN = 500
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t x,
  input  tstamp_t ts,
  input  sample_t thr,
  input  logic    zs_on,
  input  logic    raw_trig,
  output logic    keep,
  output sample_t y,
  output tstamp_t y_ts,
  output logic    over,
  output logic    crossing
);
  localparam int unsigned HD  = (BL_LEN > PRE) ? BL_LEN : PRE;
  localparam int unsigned BLW = $clog2(BL_LEN);
  localparam int unsigned SUMW = ADC_BITS + BLW + 1;
  localparam int unsigned DW  = $clog2(PRE + POST + 2);
  localparam int unsigned RW  = $clog2(RAW_LEN + 1);

  sample_t           hist [HD];          // hist[k] = x(t-1-k)
  logic [HD-1:0]     hist_ok;            // hist[k] holds a real sample
  logic [SUMW-1:0]   bsum;               // sum of hist[0 .. BL_LEN-1]
  logic [DW-1:0]     gap;               // distance to last crossing, saturating
  logic [DW-1:0]     gap_now;
  logic              over_now, over_q;
  logic [PRE-1:0]    trig_dly;
  logic [RW-1:0]     raw_cnt;
  sample_t           x_old;

  assign x_old    = hist[BL_LEN-1];
  // baseline - x > thr  <=>  bsum - BL_LEN*x > BL_LEN*thr
  logic [SUMW:0]     rhs;
  assign rhs      = ((SUMW+1)'(x) << BLW) + ((SUMW+1)'(thr) << BLW);
  assign over_now = hist_ok[BL_LEN-1] && ((SUMW+1)'(bsum) > rhs);
  assign gap_now = over_now ? '0 :
                    (gap == '1) ? gap : gap + 1'b1;

  always_ff @(posedge clk) begin
    hist[0] <= x;
    for (int k = 1; k < HD; k++) hist[k] <= hist[k-1];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      hist_ok  <= '0;
      bsum     <= '0;
      gap     <= '1;
      over_q   <= 1'b0;
      trig_dly <= '0;
      raw_cnt  <= '0;
      keep     <= 1'b0;
      y        <= '0;
      y_ts     <= '0;
      over     <= 1'b0;
      crossing    <= 1'b0;
    end else begin
      hist_ok  <= {hist_ok[HD-2:0], 1'b1};
      bsum     <= bsum + SUMW'(x) - (hist_ok[BL_LEN-1] ? SUMW'(x_old) : '0);
      gap     <= gap_now;
      over_q   <= over_now;
      trig_dly <= {trig_dly[PRE-2:0], raw_trig};
      if (trig_dly[PRE-1])     raw_cnt <= RW'(RAW_LEN - 1);
      else if (raw_cnt != '0)  raw_cnt <= raw_cnt - 1'b1;
      over     <= over_now;
      crossing    <= over_now && !over_q;
      y        <= hist[PRE-1];
      y_ts     <= ts - TS_BITS'(PRE);
      if (zs_on) keep <= hist_ok[PRE-1] && (int'(gap_now) <= PRE + POST);
      else       keep <= trig_dly[PRE-1] || (raw_cnt != '0);
    end
endmodule
