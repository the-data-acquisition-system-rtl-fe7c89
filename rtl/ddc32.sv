// ddc32 -- firmware of one DDC-32, the 32-channel, 100 MHz digitizer.
//
// Data path, in order:
//   ADC samples -> arbitrary waveform injection (waveform_injector)
//   -> channel pairing multiplexer: digital channel 2n+i takes ADC channel
//      2n+i when ch_mux[2n+i] is 0 and its partner ADC channel when it is 1,
//      so one ADC can be recorded by two digital channels at once (for
//      example raw in one and zero-suppressed in the other)
//   -> 32 x ddc_channel (POD storage, trigger and monitor filters, rates)
// Beside it: the first stage of the digital sum, the two spy outputs, and the
// readout of closed event buffers to the Data Extractor (ddc_readout).
// Event control, from the DAQ Master: `event_start` marks an accepted trigger
// at `event_time`; from then on PODs that end before event_time - pre_window
// are no longer discarded.  Without an event pending the buffers keep only
// PODs that end within pre_window of the present time.  `event_close`, at the
// end of the post-event window, closes the filling buffers.  `live` is low
// while some channel has no buffer to write to (dead time).
// Trigger outputs to the Data Sparsifier, one bit per channel: the S1 and S2
// filter above-threshold flags.  The per-channel rates can be read back one at
// a time through rate_ch/rate_kind.
// The ADCs and spy DACs are outside the FPGA; the processor that writes the
// injection memory and reads the rates is outside this design.
module ddc32
  import fadr_pkg::*;
#(
  parameter int unsigned NCH         = 32,
  parameter int unsigned NHDR        = 250,
  parameter int unsigned NSMP        = 5120,
  parameter int unsigned INJ_DEPTH   = 16384,
  parameter int unsigned S1_NMAX     = 16,
  parameter int unsigned S2_MMAX     = 128,
  parameter int unsigned RATE_PERIOD = 1_000_000_000
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  tstamp_t                      now,
  input  logic [7:0]                   ddc_id,
  input  sample_t                      adc [NCH],
  // configuration
  input  filt_cfg_t                    cfg,
  input  logic [NCH-1:0]               zs_on,
  input  logic [NCH-1:0]               ch_mux,
  input  logic [NCH-1:0]               sum_mask,
  input  logic                         raw_trig,
  // waveform injection
  input  logic                         inj_wr_en,
  input  logic [$clog2(INJ_DEPTH)-1:0] inj_wr_addr,
  input  logic signed [15:0]           inj_wr_data,
  input  logic                         inj_strobe,
  input  logic [$clog2(INJ_DEPTH):0]   inj_len,
  input  inj_mode_t                    inj_mode,
  input  logic [$clog2(NCH)-1:0]       inj_ch,
  // spy outputs
  input  spy_src_t                     spy_src [2],
  input  logic [$clog2(NCH)-1:0]       spy_ch  [2],
  output sample_t                      spy     [2],
  // event control
  input  logic                         event_start,
  input  tstamp_t                      event_time,
  input  win_t                         pre_window,
  input  logic                         event_close,
  output logic                         live,
  // to the Data Sparsifier
  output logic [NCH-1:0]               s1_above,
  output logic [NCH-1:0]               s2_above,
  output logic [16:0]                  dsum,
  // to the Data Extractor
  output rd_word_t                     rd_out,
  input  logic                         rd_out_ready,
  // rate readback
  input  logic [$clog2(NCH)-1:0]       rate_ch,
  input  rate_kind_t                   rate_kind,
  output logic [31:0]                  rate_val
);
  // ---- injection and channel pairing ---------------------------------------
  sample_t inj [NCH];
  sample_t xs  [NCH];

  waveform_injector #(.NCH(NCH), .DEPTH(INJ_DEPTH)) u_inj (
    .clk, .rst_n, .adc_in(adc), .adc_out(inj),
    .wr_en(inj_wr_en), .wr_addr(inj_wr_addr), .wr_data(inj_wr_data),
    .strobe(inj_strobe), .play_len(inj_len), .mode(inj_mode), .sel_ch(inj_ch)
  );

  always_comb
    for (int c = 0; c < NCH; c++)
      xs[c] = ch_mux[c] ? inj[c ^ 1] : inj[c];

  // The injector adds two clocks; the channels stamp each sample with the
  // time at which it left the ADC, so they see the time stamp two clocks late.
  tstamp_t now_d1, now_d2;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      now_d1 <= '0; now_d2 <= '0;
    end else begin
      now_d1 <= now; now_d2 <= now_d1;
    end

  // ---- event window bookkeeping --------------------------------------------
  logic    ev_pending;
  tstamp_t ev_time;
  tstamp_t ref_t, prune_before;
  assign ref_t        = ev_pending ? ev_time : now;
  assign prune_before = (ref_t > TS_BITS'(pre_window)) ? ref_t - TS_BITS'(pre_window) : '0;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      ev_pending <= 1'b0; ev_time <= '0;
    end else if (event_start) begin
      ev_pending <= 1'b1; ev_time <= event_time;
    end else if (event_close) begin
      ev_pending <= 1'b0;
    end

  // ---- channels ------------------------------------------------------------
  logic                  ch_live  [NCH];
  logic                  ch_ready [NCH];
  tstamp_t               ch_start [NCH];
  tstamp_t               ch_end   [NCH];
  logic                  ch_trunc [NCH];
  logic [7:0]            ch_tail  [NCH];
  logic [7:0]            ch_cnt   [NCH];
  pod_hdr_t              ch_hdr   [NCH];
  word_t                 ch_smp   [NCH];
  logic signed [S1W+1:0] s1_f     [NCH];
  logic [31:0]           rates    [NCH][N_RATES];

  logic [7:0]            rd_hdr_idx;
  logic                  rd_smp_en;
  logic [SADDR_BITS-1:0] rd_smp_addr;
  logic                  release_b;

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    ddc_channel #(.NHDR(NHDR), .NSMP(NSMP), .S1_NMAX(S1_NMAX), .S2_MMAX(S2_MMAX),
                  .RATE_PERIOD(RATE_PERIOD)) u_ch (
      .clk, .rst_n, .x(xs[c]), .now(now_d2), .cfg, .zs_on(zs_on[c]), .raw_trig,
      .s1_above(s1_above[c]), .s2_above(s2_above[c]), .s1_f(s1_f[c]),
      .prune_before, .event_close, .release_i(release_b), .live(ch_live[c]),
      .rd_ready(ch_ready[c]), .rd_start_time(ch_start[c]), .rd_end_time(ch_end[c]),
      .rd_trunc(ch_trunc[c]), .rd_tail(ch_tail[c]), .rd_cnt(ch_cnt[c]),
      .rd_hdr_idx, .rd_hdr(ch_hdr[c]), .rd_smp_en, .rd_smp_addr, .rd_smp(ch_smp[c]),
      .rate(rates[c])
    );
  end

  always_comb begin
    live = 1'b1;
    for (int c = 0; c < NCH; c++) live &= ch_live[c];
  end

  // ---- readout -------------------------------------------------------------
  logic rd_busy;
  ddc_readout #(.NCH(NCH), .NHDR(NHDR), .NSMP(NSMP)) u_rd (
    .clk, .rst_n, .ddc_id, .ch_ready, .ch_start, .ch_end, .ch_trunc,
    .ch_tail, .ch_cnt, .ch_hdr, .ch_smp,
    .rd_hdr_idx, .rd_smp_en, .rd_smp_addr, .release_o(release_b),
    .out(rd_out), .out_ready(rd_out_ready), .busy(rd_busy)
  );

  // ---- digital sum, spy outputs, rate readback ----------------------------
  ddc_digital_sum #(.NCH(NCH)) u_sum (.clk, .rst_n, .x(xs), .mask(sum_mask), .dsum);

  spy_selector #(.NCH(NCH)) u_spy (
    .clk, .rst_n, .x(xs), .s1_f, .dsum, .src(spy_src), .ch(spy_ch), .spy);

  always_comb begin
    rate_val = '0;
    if (int'(rate_kind) < N_RATES) rate_val = rates[rate_ch][rate_kind];
  end
endmodule
