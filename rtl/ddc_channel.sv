// ddc_channel -- everything behind one input of a DDC-32 digitizer.
//
// The (possibly injected and re-routed) 14-bit sample stream of one channel
// feeds two independent paths, as in the paper's per-channel data flow:
//  * storage: Pulse Only Digitization (pod_zero_suppression) writes PODs into
//    the channel's double-buffered POD memory (pod_buffer);
//  * real-time analysis: the S1 and S2 trigger filters, whose above-threshold
//    flags go to the Data Sparsifier, and three monitor filters (an S1 filter
//    tuned to electronics noise, an S1 filter tuned to single photoelectrons
//    and an S2 filter) that run beside them.
// Five rate counters count, per monitoring period, the threshold crossings of
// the three monitor filters, the POD threshold crossings and the samples
// beyond the POD threshold.  A crossing is counted on the first sample above
// threshold.  The filters see the raw waveform, not the PODs.
// Timing: the trigger flags lag the sample by one cycle; PODs reach the
// memory PRE+1 cycles after their samples arrive.
module ddc_channel
  import fadr_pkg::*;
#(
  parameter int unsigned NHDR        = 250,
  parameter int unsigned NSMP        = 5120,
  parameter int unsigned S1_NMAX     = 16,
  parameter int unsigned S2_MMAX     = 128,
  parameter int unsigned RATE_PERIOD = 1_000_000_000
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  sample_t                x,
  input  tstamp_t                now,
  input  filt_cfg_t              cfg,
  input  logic                   zs_on,
  input  logic                   raw_trig,
  // trigger outputs
  output logic                   s1_above,
  output logic                   s2_above,
  output logic signed [S1W+1:0]  s1_f,
  // buffer control and readout
  input  tstamp_t                prune_before,
  input  logic                   event_close,
  input  logic                   release_i,
  output logic                   live,
  output logic                   rd_ready,
  output tstamp_t                rd_start_time,
  output tstamp_t                rd_end_time,
  output logic                   rd_trunc,
  output logic [7:0]             rd_tail,
  output logic [7:0]             rd_cnt,
  input  logic [7:0]             rd_hdr_idx,
  output pod_hdr_t               rd_hdr,
  input  logic                   rd_smp_en,
  input  logic [SADDR_BITS-1:0]  rd_smp_addr,
  output word_t                  rd_smp,
  // monitoring
  output logic [31:0]            rate [N_RATES]
);
  // ---- zero suppression and storage --------------------------------------
  logic    keep, over, pod_cross;
  sample_t y;
  tstamp_t y_ts;

  pod_zero_suppression u_zs (
    .clk, .rst_n, .x, .ts(now), .thr(cfg.pod_thr), .zs_on, .raw_trig,
    .keep, .y, .y_ts, .over, .crossing(pod_cross)
  );

  logic rd_bank;
  pod_buffer #(.NHDR(NHDR), .NSMP(NSMP)) u_buf (
    .clk, .rst_n, .now, .keep, .sample(y), .sts(y_ts),
    .prune_before, .event_close, .release_i, .live,
    .rd_bank, .rd_ready, .rd_start_time, .rd_end_time, .rd_trunc,
    .rd_tail, .rd_cnt, .rd_hdr_idx, .rd_hdr, .rd_smp_en, .rd_smp_addr, .rd_smp
  );

  // ---- trigger filters ---------------------------------------------------
  logic signed [S2W+1:0] s2_f;
  s1_filter #(.NMAX(S1_NMAX), .SW(S1W)) u_s1 (
    .clk, .rst_n, .x, .n(cfg.s1_n), .thr(cfg.s1_thr), .f(s1_f), .above(s1_above));
  s2_filter #(.MMAX(S2_MMAX), .SW(S2W)) u_s2 (
    .clk, .rst_n, .x, .m(cfg.s2_m), .thr(cfg.s2_thr), .f(s2_f), .above(s2_above));

  // ---- monitor filters ---------------------------------------------------
  logic signed [S1W+1:0] noise_f, sphe_f;
  logic signed [S2W+1:0] mon2_f;
  logic noise_a, sphe_a, mon2_a;
  s1_filter #(.NMAX(S1_NMAX), .SW(S1W)) u_noise (
    .clk, .rst_n, .x, .n(cfg.noise_n), .thr(cfg.noise_thr), .f(noise_f), .above(noise_a));
  s1_filter #(.NMAX(S1_NMAX), .SW(S1W)) u_sphe (
    .clk, .rst_n, .x, .n(cfg.sphe_n), .thr(cfg.sphe_thr), .f(sphe_f), .above(sphe_a));
  s2_filter #(.MMAX(S2_MMAX), .SW(S2W)) u_mon2 (
    .clk, .rst_n, .x, .m(cfg.mon2_m), .thr(cfg.mon2_thr), .f(mon2_f), .above(mon2_a));

  logic noise_q, sphe_q, mon2_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) {noise_q, sphe_q, mon2_q} <= '0;
    else        {noise_q, sphe_q, mon2_q} <= {noise_a, sphe_a, mon2_a};

  logic [N_RATES-1:0] rate_ev;
  assign rate_ev[RATE_NOISE] = noise_a && !noise_q;
  assign rate_ev[RATE_SPHE]  = sphe_a  && !sphe_q;
  assign rate_ev[RATE_S2]    = mon2_a  && !mon2_q;
  assign rate_ev[RATE_POD]   = pod_cross;
  assign rate_ev[RATE_OVER]  = over;

  for (genvar r = 0; r < N_RATES; r++) begin : g_rate
    logic upd;
    rate_counter #(.PERIOD(RATE_PERIOD), .CW(32)) u_rc (
      .clk, .rst_n, .event_i(rate_ev[r]), .count(rate[r]), .update(upd));
  end
endmodule
