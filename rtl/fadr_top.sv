// fadr_top -- FADR: the FPGA-based data acquisition and real-time monitoring
// system, as one synchronous design.
//
// Four processing chains of DDC-32 digitizers (TPC high gain: 16 digitizers,
// 2 Data Sparsifiers, 6 Data Extractors; TPC low gain: the same; Skin: 5, 1,
// 1; OD: 8, 1, 1), one Data Sparsifier Master, one DAQ Master and one time
// stamp counter, all on the global 100 MHz clock.  Every digitizer stores
// zero-suppressed PODs of all its channels in double-buffered circular
// memories and reports filter threshold crossings in real time; the
// sparsifiers form multiplicities; the sparsifier master selects events from
// them and from the external triggers; the DAQ Master defines the event
// window and ends it on every digitizer at once; the Data Extractors then
// pull the event's PODs and send them out as checksummed packets, one packet
// stream per Data Collector.
// On silicon these functions are spread over 45 digitizer FPGAs and 20 logic
// board FPGAs joined by HDMI/LVDS links; here the boards are modules and the
// links are wires with no delay.  The links, the ADCs, the spy DACs, the
// Ethernet/UDP transmitters, the board processors and the servers behind the
// Data Collector links are outside this design; their signals are ports.
// Ports: `adc` holds the samples of all digitizers, chain after chain (TPC
// high gain first).  Per-digitizer masks use the same order.  `de_out` holds
// the Data Extractor packet streams in the same chain order (6, 6, 1, 1).
module fadr_top
  import fadr_pkg::*;
#(
  parameter int unsigned HG_DDC = 16, HG_DS = 2, HG_DE = 6,   // TPC high gain
  parameter int unsigned LG_DDC = 16, LG_DS = 2, LG_DE = 6,   // TPC low gain
  parameter int unsigned SK_DDC = 5,  SK_DS = 1, SK_DE = 1,   // Skin
  parameter int unsigned OD_DDC = 8,  OD_DS = 1, OD_DE = 1,   // OD
  parameter int unsigned NCH         = 32,
  parameter int unsigned NHDR        = 250,
  parameter int unsigned NSMP        = 5120,
  parameter int unsigned INJ_DEPTH   = 16384,
  parameter int unsigned S1_NMAX     = 16,
  parameter int unsigned S2_MMAX     = 128,
  parameter int unsigned RATE_PERIOD = 1_000_000_000,
  parameter int unsigned PKT_WORDS   = 4400,
  parameter int unsigned NDDC_ALL    = HG_DDC + LG_DDC + SK_DDC + OD_DDC,
  parameter int unsigned NDE_ALL     = HG_DE + LG_DE + SK_DE + OD_DE
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  // digitized PMT signals
  input  logic [NDDC_ALL-1:0][NCH-1:0][ADC_BITS-1:0] adc,
  // run control and external triggers
  input  logic                                    run_start,
  input  logic                                    run_stop,
  input  logic                                    ext_random,
  input  logic                                    ext_pps,
  input  logic                                    ext_dd,
  input  logic                                    ext_led,
  input  logic                                    ext_aux,
  input  logic [N_EXT-1:0]                        ext_en,
  // event selection settings
  input  filt_cfg_t                               chain_cfg [N_CHAINS],
  input  logic [11:0]                             s1_coinc  [N_CHAINS],
  input  logic [11:0]                             s2_coinc  [N_CHAINS],
  input  logic [10:0]                             req_s1    [N_CHAINS],
  input  logic [10:0]                             req_s2    [N_CHAINS],
  input  logic [15:0]                             downscale [N_SOURCES],
  input  win_t                                    pre_window,
  input  win_t                                    post_window,
  input  win_t                                    holdoff,
  // per-digitizer channel settings
  input  logic [NDDC_ALL-1:0][NCH-1:0]            zs_on,
  input  logic [NDDC_ALL-1:0][NCH-1:0]            ch_mux,
  input  logic [NDDC_ALL-1:0][NCH-1:0]            sum_mask,
  input  logic [NDDC_ALL-1:0][NCH-1:0]            s1_mask,
  input  logic [NDDC_ALL-1:0][NCH-1:0]            s2_mask,
  input  logic                                    raw_trig,
  // arbitrary waveform injection (broadcast to all digitizers)
  input  logic                                    inj_wr_en,
  input  logic [$clog2(INJ_DEPTH)-1:0]            inj_wr_addr,
  input  logic signed [15:0]                      inj_wr_data,
  input  logic                                    inj_strobe,
  input  logic [$clog2(INJ_DEPTH):0]              inj_len,
  input  inj_mode_t                               inj_mode,
  input  logic [$clog2(NCH)-1:0]                  inj_ch,
  // spy outputs / DAQScope
  input  spy_src_t                                spy_src [2],
  input  logic [$clog2(NCH)-1:0]                  spy_ch  [2],
  output logic [NDDC_ALL-1:0][1:0][ADC_BITS-1:0]  spy,
  // Data Extractor packet streams to the Data Collectors
  output rd_word_t [NDE_ALL-1:0]                  de_out,
  input  logic [NDE_ALL-1:0]                      de_ready,
  output logic [NDE_ALL-1:0]                      de_overflow,
  // status and monitoring
  output tstamp_t                                 timestamp,
  output logic                                    ts_clear_out,
  output logic                                    trigger_out,
  output logic [N_SOURCES-1:0]                    trigger_src,
  output logic                                    extra_trig,
  output logic [N_SOURCES-1:0]                    extra_src,
  output logic                                    running,
  output logic                                    live,
  output logic [31:0]                             event_id,
  output logic                                    event_close,
  output logic [18:0]                             dsum_total,
  output logic [31:0]                             trig_rate [N_SOURCES],
  input  logic [$clog2(NCH)-1:0]                  rate_ch,
  input  rate_kind_t                              rate_kind,
  output logic [NDDC_ALL-1:0][31:0]               rate_val,
  output logic [47:0]                             busy_cycles,
  output logic [47:0]                             hold_cycles,
  output logic [47:0]                             full_cycles
);
  localparam int unsigned MW = 11;
  localparam int unsigned NDDC_C [N_CHAINS] = '{HG_DDC, LG_DDC, SK_DDC, OD_DDC};
  localparam int unsigned NDS_C  [N_CHAINS] = '{HG_DS,  LG_DS,  SK_DS,  OD_DS};
  localparam int unsigned NDE_C  [N_CHAINS] = '{HG_DE,  LG_DE,  SK_DE,  OD_DE};

  function automatic int unsigned ddc_off(int unsigned g);
    int unsigned o = 0;
    for (int unsigned i = 0; i < g; i++) o += NDDC_C[i];
    return o;
  endfunction
  function automatic int unsigned de_off(int unsigned g);
    int unsigned o = 0;
    for (int unsigned i = 0; i < g; i++) o += NDE_C[i];
    return o;
  endfunction

  // ---- time stamp ----------------------------------------------------------
  tstamp_t now;
  logic    ts_clear;
  timestamp_counter u_ts (.clk, .rst_n, .clear(ts_clear), .ts(now));
  assign timestamp    = now;
  assign ts_clear_out = ts_clear;

  // ---- event control nets --------------------------------------------------
  logic       event_start, extract, dm_ready;
  tstamp_t    event_time;
  logic [MW-1:0] mult_s1 [N_CHAINS];
  logic [MW-1:0] mult_s2 [N_CHAINS];
  logic [N_CHAINS-1:0] chain_live;
  logic [17:0] dsum_top, dsum_bot;

  // ---- processing chains ---------------------------------------------------
  for (genvar g = 0; g < N_CHAINS; g++) begin : g_chain
    localparam int unsigned ND  = NDDC_C[g];
    localparam int unsigned NS  = NDS_C[g];
    localparam int unsigned NE  = NDE_C[g];
    localparam int unsigned DO  = ddc_off(g);
    localparam int unsigned EO  = de_off(g);
    logic [NS-1:0][17:0] ds_sum;
    rd_word_t [NE-1:0]   c_out;

    fadr_chain #(.NDDC(ND), .NDS(NS), .NDE(NE), .NCH(NCH), .NHDR(NHDR), .NSMP(NSMP),
                 .INJ_DEPTH(INJ_DEPTH), .S1_NMAX(S1_NMAX), .S2_MMAX(S2_MMAX),
                 .RATE_PERIOD(RATE_PERIOD), .PKT_WORDS(PKT_WORDS), .MW(MW)) u_chain (
      .clk, .rst_n, .now, .ddc_id_base(8'(DO)),
      .adc(adc[DO +: ND]), .cfg(chain_cfg[g]),
      .zs_on(zs_on[DO +: ND]), .ch_mux(ch_mux[DO +: ND]), .sum_mask(sum_mask[DO +: ND]),
      .s1_mask(s1_mask[DO +: ND]), .s2_mask(s2_mask[DO +: ND]),
      .s1_coinc(s1_coinc[g]), .s2_coinc(s2_coinc[g]), .raw_trig,
      .inj_wr_en, .inj_wr_addr, .inj_wr_data, .inj_strobe, .inj_len, .inj_mode, .inj_ch,
      .spy_src, .spy_ch, .spy(spy[DO +: ND]),
      .event_start, .event_time, .pre_window, .event_close, .live(chain_live[g]),
      .mult_s1(mult_s1[g]), .mult_s2(mult_s2[g]), .dsum(ds_sum),
      .extract, .event_id,
      .de_out(c_out), .de_ready(de_ready[EO +: NE]), .de_overflow(de_overflow[EO +: NE]),
      .rate_ch, .rate_kind, .rate_val(rate_val[DO +: ND])
    );
    assign de_out[EO +: NE] = c_out;

    // the two sparsifiers of the TPC high-gain chain carry the top and the
    // bottom PMT arrays; their sums make the total digital sum
    if (g == 0) begin : g_sum
      assign dsum_top = ds_sum[0];
      if (NS > 1) begin : g_bot
        assign dsum_bot = ds_sum[1];
      end else begin : g_nobot
        assign dsum_bot = '0;
      end
    end
  end
  assign live = &chain_live;

  // ---- Data Sparsifier Master ---------------------------------------------
  tstamp_t             trig_ts;
  logic                trig;
  logic [N_SOURCES-1:0] trig_src;

  sparsifier_master #(.MW(MW), .RATE_PERIOD(RATE_PERIOD)) u_dsm (
    .clk, .rst_n, .now,
    .mult_s1, .mult_s2, .req_s1, .req_s2,
    .ext_random, .ext_pps, .ext_dd, .ext_led, .ext_aux, .ext_en, .downscale,
    .run_start, .run_stop, .running, .ts_clear,
    .dm_ready, .trig, .trig_ts, .trig_src, .extra_trig, .extra_src,
    .dsum_top, .dsum_bot, .dsum_total, .rate(trig_rate)
  );
  assign trigger_out = trig && dm_ready;
  assign trigger_src = trig_src;

  // ---- DAQ Master ----------------------------------------------------------
  logic [N_SOURCES-1:0] event_src;
  daq_master #(.SW(N_SOURCES)) u_dm (
    .clk, .rst_n, .running, .post_window, .holdoff, .live,
    .ready(dm_ready), .trig, .trig_ts, .trig_src,
    .event_start, .event_time, .event_close, .extract, .event_id, .event_src,
    .busy_cycles, .hold_cycles, .full_cycles
  );
endmodule
