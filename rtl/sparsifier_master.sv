// sparsifier_master -- Data Sparsifier Master: final event selection, run
// start and the last stage of the digital sum.
//
// Trigger sources (numbering in fadr_pkg): for each processing chain an S1
// and an S2 multiplicity trigger, which fires when the chain's multiplicity
// reaches the required value (a required value of 0 disables it), and four
// external inputs: a random trigger, the GPS trigger (the 1 PPS pulse), the
// calibration trigger (the OR of the DD-generator and LED triggers) and an
// auxiliary input.  External inputs are synchronised (two flip-flops) and
// all sources fire on their rising edge.  Each source can be downscaled: with
// a downscale D > 1 only every D-th firing is passed on.  The event
// selection is the OR of the enabled, downscaled sources.
// A trigger is issued (`trig`, with the time stamp and the mask of sources
// that fired) only while the run is on and the DAQ Master is ready.  Sources
// firing while it is not ready (post-event window, holdoff, dead time) are
// reported on `extra_trig`/`extra_src` so they can be recorded with the data.
// Run start: `run_start` arms the master; on the next rising PPS edge it
// clears the FADR time stamp (`ts_clear`) and starts the run, which aligns
// time stamp zero with a GPS second.
// Every source's firing rate (before downscaling) is counted per monitoring
// period.  Digital sum: the 18-bit sums of the top and bottom PMT arrays are
// added into the final 19-bit sum.
// Latency: a multiplicity reaching its required value in cycle t gives
// `trig` in cycle t+2.  The paper measures about 93 samples from the
// multiplicity condition to the trigger time stamp in its system, which
// includes the board-to-board links that are not modelled here.
module sparsifier_master
  import fadr_pkg::*;
#(
  parameter int unsigned MW          = 11,
  parameter int unsigned RATE_PERIOD = 1_000_000_000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  tstamp_t               now,
  // multiplicities from the chains
  input  logic [MW-1:0]         mult_s1 [N_CHAINS],
  input  logic [MW-1:0]         mult_s2 [N_CHAINS],
  input  logic [MW-1:0]         req_s1  [N_CHAINS],
  input  logic [MW-1:0]         req_s2  [N_CHAINS],
  // external trigger inputs (asynchronous)
  input  logic                  ext_random,
  input  logic                  ext_pps,
  input  logic                  ext_dd,
  input  logic                  ext_led,
  input  logic                  ext_aux,
  input  logic [N_EXT-1:0]      ext_en,
  input  logic [15:0]           downscale [N_SOURCES],
  // run control
  input  logic                  run_start,
  input  logic                  run_stop,
  output logic                  running,
  output logic                  ts_clear,
  // to/from the DAQ Master
  input  logic                  dm_ready,
  output logic                  trig,
  output tstamp_t               trig_ts,
  output logic [N_SOURCES-1:0]  trig_src,
  output logic                  extra_trig,
  output logic [N_SOURCES-1:0]  extra_src,
  // digital sum
  input  logic [17:0]           dsum_top,
  input  logic [17:0]           dsum_bot,
  output logic [18:0]           dsum_total,
  // trigger rates
  output logic [31:0]           rate [N_SOURCES]
);
  // ---- synchronisers ------------------------------------------------------
  logic [N_EXT-1:0] ext_raw, s0, s1q;
  assign ext_raw = {ext_aux, ext_dd | ext_led, ext_pps, ext_random};
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin s0 <= '0; s1q <= '0; end
    else        begin s0 <= ext_raw; s1q <= s0; end

  // ---- source conditions ---------------------------------------------------
  logic [N_SOURCES-1:0] cond, cond_q, fire, pass;
  always_comb begin
    for (int c = 0; c < N_CHAINS; c++) begin
      cond[SRC_S1 + c] = (req_s1[c] != '0) && (mult_s1[c] >= req_s1[c]);
      cond[SRC_S2 + c] = (req_s2[c] != '0) && (mult_s2[c] >= req_s2[c]);
    end
    for (int e = 0; e < N_EXT; e++)
      cond[SRC_RAND + e] = s1q[e] && ext_en[e];
  end
  assign fire = cond & ~cond_q;

  // PPS edge for the run start, independent of the GPS trigger enable
  logic pps_q, pps_edge, armed_q;
  assign pps_edge = s1q[SRC_GPS - SRC_RAND] && !pps_q;

  // ---- downscaling ---------------------------------------------------------
  logic [15:0] dsc [N_SOURCES];
  always_comb
    for (int i = 0; i < N_SOURCES; i++)
      pass[i] = fire[i] && (downscale[i] <= 16'd1 || dsc[i] == downscale[i] - 1'b1);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      cond_q <= '0; pps_q <= 1'b0;
      for (int i = 0; i < N_SOURCES; i++) dsc[i] <= '0;
      running <= 1'b0; ts_clear <= 1'b0; armed_q <= 1'b0;
      trig <= 1'b0; trig_ts <= '0; trig_src <= '0;
      extra_trig <= 1'b0; extra_src <= '0;
    end else begin
      cond_q <= cond;
      pps_q  <= s1q[SRC_GPS - SRC_RAND];
      for (int i = 0; i < N_SOURCES; i++)
        if (fire[i] && running && downscale[i] > 16'd1)
          dsc[i] <= (dsc[i] == downscale[i] - 1'b1) ? '0 : dsc[i] + 1'b1;
      // run control: start on the PPS edge after run_start
      ts_clear <= 1'b0;
      if (run_stop) begin
        running <= 1'b0; armed_q <= 1'b0;
      end else if (run_start) begin
        armed_q <= 1'b1;
      end else if (armed_q && pps_edge) begin
        armed_q <= 1'b0; running <= 1'b1; ts_clear <= 1'b1;
        for (int i = 0; i < N_SOURCES; i++) dsc[i] <= '0;
      end
      // event selection
      trig       <= running && dm_ready && (|pass);
      trig_ts    <= now;
      trig_src   <= pass;
      extra_trig <= running && !dm_ready && (|pass);
      extra_src  <= running && !dm_ready ? pass : '0;
    end

  // ---- trigger rates -------------------------------------------------------
  for (genvar i = 0; i < N_SOURCES; i++) begin : g_rate
    logic upd;
    rate_counter #(.PERIOD(RATE_PERIOD), .CW(32)) u_rc (
      .clk, .rst_n, .event_i(fire[i] && running), .count(rate[i]), .update(upd));
  end

  // ---- digital sum ---------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dsum_total <= '0;
    else        dsum_total <= 19'(dsum_top) + 19'(dsum_bot);
endmodule
