// tb_fadr_top -- end-to-end test of the whole acquisition system, scaled to
// five digitizers of two channels (TPC high gain 2, TPC low gain 1, Skin 1,
// OD 1, each chain with one sparsifier; 2+1+1+1 Data Extractors), 256-sample
// banks, 40-word packets and short event windows (pre 100, post 150,
// holdoff 100 clocks).
// A scripted run starts on a GPS pulse and then provokes, one after the
// other, every mechanism of the design: a TPC S2 trigger, an OD S1 trigger,
// random (downscaled by 2), GPS, LED calibration and auxiliary triggers, an
// extra trigger during an event window, triggers refused in the holdoff, an
// injected waveform on all channels, a channel-multiplexer swap, a raw
// (not zero-suppressed) record long enough to truncate a bank, and dead time
// while the Data Collectors hold off the packet streams.  The test captures
// all five packet streams, checks every packet (event number, sequence,
// size limit, CRC-32) and every digitizer record inside them, and counts how
// often each mechanism happened; a mechanism that never happened is a
// failure.  It also checks that every closed event reaches every extractor
// with consecutive event numbers.
module tb_fadr_top;
  import fadr_pkg::*;
  localparam int NCH = 2, NDDC = 5, NDE = 5, PKT = 40;
  localparam int POST = 150, HOLD = 100, PRE = 100;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NDDC-1:0][NCH-1:0][ADC_BITS-1:0] adc;
  logic run_start = 0, run_stop = 0, ext_random = 0, ext_pps = 0, ext_dd = 0, ext_led = 0, ext_aux = 0;
  logic [N_EXT-1:0] ext_en = '1;
  filt_cfg_t chain_cfg [N_CHAINS];
  logic [11:0] s1_coinc [N_CHAINS], s2_coinc [N_CHAINS];
  logic [10:0] req_s1 [N_CHAINS], req_s2 [N_CHAINS];
  logic [15:0] downscale [N_SOURCES];
  win_t pre_window = win_t'(PRE), post_window = win_t'(POST), holdoff = win_t'(HOLD);
  logic [NDDC-1:0][NCH-1:0] zs_on = '1, ch_mux = '0, sum_mask = '1, s1_mask = '1, s2_mask = '1;
  logic raw_trig = 0, inj_wr_en = 0, inj_strobe = 0;
  logic [4:0] inj_wr_addr = '0;
  logic signed [15:0] inj_wr_data = '0;
  logic [5:0] inj_len = 6'd32;
  inj_mode_t inj_mode = INJ_NONE;
  logic [0:0] inj_ch = '0;
  spy_src_t spy_src [2];
  logic [0:0] spy_ch [2];
  logic [NDDC-1:0][1:0][ADC_BITS-1:0] spy;
  rd_word_t [NDE-1:0] de_out;
  logic [NDE-1:0] de_ready = '1, de_overflow;
  tstamp_t timestamp;
  logic ts_clear_out, trigger_out, extra_trig, running, live, event_close;
  logic [N_SOURCES-1:0] trigger_src, extra_src;
  logic [31:0] event_id;
  logic [18:0] dsum_total;
  logic [31:0] trig_rate [N_SOURCES];
  logic [0:0] rate_ch = '0;
  rate_kind_t rate_kind = RATE_POD;
  logic [NDDC-1:0][31:0] rate_val;
  logic [47:0] busy_cycles, hold_cycles, full_cycles;
  int checks = 0, failures = 0;

  fadr_top #(.HG_DDC(2), .HG_DS(1), .HG_DE(2), .LG_DDC(1), .LG_DS(1), .LG_DE(1),
             .SK_DDC(1), .SK_DS(1), .SK_DE(1), .OD_DDC(1), .OD_DS(1), .OD_DE(1),
             .NCH(NCH), .NHDR(8), .NSMP(256), .INJ_DEPTH(32), .S1_NMAX(16), .S2_MMAX(16),
             .RATE_PERIOD(1000), .PKT_WORDS(PKT)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- PMT pulses -------------------------------------------------------------
  int pl [NDDC][NCH];
  always @(negedge clk)
    for (int d = 0; d < NDDC; d++) for (int c = 0; c < NCH; c++) begin
      adc[d][c] = (pl[d][c] > 0) ? 14'd6500 : 14'd7100 + 14'($urandom % 3);
      if (pl[d][c] > 0) pl[d][c]--;
    end

  // ---- mechanism counters ----------------------------------------------------
  int m_run = 0, m_s2 = 0, m_s1 = 0, m_rand = 0, m_gps = 0, m_cal = 0, m_aux = 0;
  int m_extra = 0, m_dead = 0, m_split = 0, m_inject = 0, m_mux = 0;
  int m_raw = 0, m_trunc = 0, m_events = 0, m_downscaled = 0;
  bit injecting = 0;
  always @(posedge clk) begin
    if (ts_clear_out) m_run++;
    if (trigger_out) begin
      if (trigger_src[SRC_S2 + 0]) m_s2++;
      if (trigger_src[SRC_S1 + 3]) begin m_s1++; if (injecting) m_inject++; end
      if (trigger_src[SRC_RAND]) m_rand++;
      if (trigger_src[SRC_GPS])  m_gps++;
      if (trigger_src[SRC_CAL])  m_cal++;
      if (trigger_src[SRC_AUX])  m_aux++;
    end
    if (extra_trig) m_extra++;
    if (running && !live) m_dead++;
    if (event_close) m_events++;
  end

  // ---- packet streams ------------------------------------------------------------
  word_t cur [NDE][$];
  word_t evdata [NDE][$];
  int    de_events [NDE];
  int    pods [int];          // key ddc*16+ch: PODs seen
  int    maxlen [int];
  function automatic logic [31:0] crc_ref(word_t w[$]);
    logic [31:0] c = '1;
    foreach (w[i]) for (int by = 1; by >= 0; by--)
      for (int b = 0; b < 8; b++) begin
        logic fb = c[0] ^ w[i][8*by + b];
        c = c >> 1;
        if (fb) c ^= 32'hEDB8_8320;
      end
    return ~c;
  endfunction

  task automatic parse_event(int e);
    int p = 0, nrec = 0;
    word_t w[$];
    w = evdata[e];
    while (p < w.size()) begin
      int id = int'(w[p][7:0]);
      word_t rec[$];
      int p0 = p;
      check(w[p][15:12] == 4'hD, $sformatf("extractor %0d: digitizer marker", e));
      if (w[p][15:12] != 4'hD) return;
      p++;
      for (int c = 0; c < NCH; c++) begin
        int n;
        check(w[p][15:12] == 4'hC && int'(w[p][4:0]) == c, "channel marker");
        if (w[p][5]) m_trunc++;
        n = int'(w[p+7]); p += 8;
        for (int i = 0; i < n; i++) begin
          int len = int'(w[p+3][10:0]);
          check(w[p+3][15:12] == 4'hB, "POD marker");
          if (!pods.exists(id*16+c)) begin pods[id*16+c] = 0; maxlen[id*16+c] = 0; end
          pods[id*16+c]++;
          if (len > maxlen[id*16+c]) maxlen[id*16+c] = len;
          p += 4 + len;
        end
      end
      for (int i = p0; i < p; i++) rec.push_back(w[i]);
      check(w[p] == 16'hE000 && {w[p+1], w[p+2]} == crc_ref(rec), "digitizer record CRC");
      p += 3; nrec++;
    end
    // extractor e serves one digitizer in this configuration
    check(nrec == 1, $sformatf("extractor %0d: %0d digitizer records", e, nrec));
  endtask

  int seq [NDE];
  always @(posedge clk) for (int e = 0; e < NDE; e++)
    if (de_out[e].valid && de_ready[e]) begin
      cur[e].push_back(de_out[e].data);
      if (de_out[e].last) begin
        automatic int n = cur[e].size();
        automatic word_t pay[$] = cur[e][3 : n - 4];
        automatic bit done = cur[e][n-3][15];
        check(int'(cur[e][2]) == seq[e], "packet sequence number");
        check({cur[e][0], cur[e][1]} == 32'(de_events[e] + 1), $sformatf("extractor %0d event number", e));
        check(pay.size() <= PKT, "packet size limit");
        check({cur[e][n-2], cur[e][n-1]} == crc_ref(pay), "packet CRC");
        foreach (pay[i]) evdata[e].push_back(pay[i]);
        if (done) begin
          parse_event(e);
          evdata[e].delete(); de_events[e]++; seq[e] = 0;
        end else begin m_split++; seq[e]++; end
        cur[e].delete();
      end
    end

  task automatic wait_clk(int n); repeat (n) @(negedge clk); endtask
  task automatic pulse(ref logic s); s = 1; wait_clk(3); s = 0; wait_clk(5); endtask
  task automatic quiet(); wait_clk(POST + HOLD + 60); endtask

  initial begin
    for (int d = 0; d < NDDC; d++) for (int c = 0; c < NCH; c++) pl[d][c] = 0;
    for (int e = 0; e < NDE; e++) begin de_events[e] = 0; seq[e] = 0; end
    for (int g = 0; g < N_CHAINS; g++) begin
      chain_cfg[g] = '0;
      chain_cfg[g].pod_thr = 14'd25;
      chain_cfg[g].s1_n = 5'd4;  chain_cfg[g].s1_thr = S1W'(500);
      chain_cfg[g].s2_m = 8'd4;  chain_cfg[g].s2_thr = S2W'(3000);
      chain_cfg[g].noise_n = 5'd1; chain_cfg[g].noise_thr = S1W'(50);
      chain_cfg[g].sphe_n = 5'd2;  chain_cfg[g].sphe_thr = S1W'(100);
      chain_cfg[g].mon2_m = 8'd2;  chain_cfg[g].mon2_thr = S2W'(2000);
      s1_coinc[g] = 12'd32; s2_coinc[g] = 12'd50;
      req_s1[g] = '0; req_s2[g] = '0;
    end
    req_s2[0] = 11'd1;       // TPC high gain S2
    req_s1[3] = 11'd1;       // OD S1
    for (int i = 0; i < N_SOURCES; i++) downscale[i] = 16'd1;
    downscale[SRC_RAND] = 16'd2;
    spy_src[0] = SPY_CHAN; spy_src[1] = SPY_SUM; spy_ch[0] = '0; spy_ch[1] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // injection waveform: 8 samples of -600
    for (int i = 0; i < 32; i++) begin
      inj_wr_en = 1; inj_wr_addr = 5'(i); inj_wr_data = (i < 8) ? -16'sd600 : 16'sd0;
      @(negedge clk);
    end
    inj_wr_en = 0;
    // run start on the PPS
    run_start = 1; wait_clk(1); run_start = 0;
    wait_clk(50);
    check(!running, "waiting for the PPS");
    pulse(ext_pps);
    check(running && timestamp < 20, "run started with the time stamp cleared");
    wait_clk(100);
    // TPC S2 trigger, then a second pulse inside the window: extra trigger
    pl[0][0] = 20; wait_clk(60);
    pl[1][0] = 20; wait_clk(20);
    pulse(ext_led);                 // refused during the event: extra trigger
    wait_clk(POST);
    pulse(ext_aux);                 // refused during the holdoff
    quiet();
    // OD S1 trigger
    pl[4][1] = 6; quiet();
    // external triggers
    repeat (4) begin pulse(ext_random); quiet(); end
    pulse(ext_pps); quiet();
    pulse(ext_dd); quiet();
    pulse(ext_aux); quiet();
    // injection on all channels of all digitizers
    injecting = 1; inj_mode = INJ_ALL; inj_strobe = 1; wait_clk(1); inj_strobe = 0;
    wait_clk(40); injecting = 0; inj_mode = INJ_NONE;
    quiet();
    // channel multiplexer: digitizer 2 channel 1 shows channel 0
    ch_mux[2] = 2'b10;
    pl[2][0] = 20; pl[0][0] = 20; wait_clk(20);
    quiet();
    ch_mux[2] = 2'b00;
    // raw record on the skin digitizer with a random trigger: 500 samples
    zs_on[3] = 2'b00;
    raw_trig = 1; wait_clk(1); raw_trig = 0;
    wait_clk(20); pulse(ext_random); pulse(ext_random);
    wait_clk(600);
    zs_on[3] = 2'b11;
    quiet();
    // dead time: the collectors stop taking packets
    de_ready = '0;
    repeat (3) begin pl[0][0] = 20; quiet(); end
    check(!live, "dead while data waits");
    wait_clk(500);
    de_ready = '1;
    wait_clk(3000);
    // ---- results -----------------------------------------------------------
    if (pods.exists(3*16+0) && maxlen[3*16+0] >= 100) m_raw = 1;   // the skin sees no pulses
    if (pods.exists(2*16+1)) m_mux = pods[2*16+1];
    m_downscaled = 6 - m_rand;       // six random pulses were sent
    for (int e = 0; e < NDE; e++)
      check(de_events[e] == m_events, $sformatf("extractor %0d delivered %0d of %0d events", e, de_events[e], m_events));
    check(de_overflow == '0, "no extractor overflow");
    check(hold_cycles > 0 && busy_cycles > 0, "event window and holdoff counted");
    check(full_cycles > 0, "dead time counted");
    $display("mechanism counts:");
    $display("  run start on PPS     %0d", m_run);
    $display("  events               %0d", m_events);
    $display("  TPC S2 triggers      %0d", m_s2);
    $display("  OD S1 triggers       %0d", m_s1);
    $display("  random triggers      %0d (downscaled away %0d)", m_rand, m_downscaled);
    $display("  GPS triggers         %0d", m_gps);
    $display("  calibration triggers %0d", m_cal);
    $display("  auxiliary triggers   %0d", m_aux);
    $display("  extra triggers       %0d", m_extra);
    $display("  injection triggers   %0d", m_inject);
    $display("  multiplexed PODs     %0d", m_mux);
    $display("  raw records          %0d", m_raw);
    $display("  truncated buffers    %0d", m_trunc);
    $display("  dead clocks          %0d", m_dead);
    $display("  split events         %0d", m_split);
    check(m_run == 1, "run start");
    check(m_s2 > 0, "S2 trigger happened");
    check(m_s1 > 0, "S1 trigger happened");
    check(m_rand > 0, "random trigger happened");
    check(m_downscaled > 0, "downscale happened");
    check(m_gps > 0, "GPS trigger happened");
    check(m_cal > 0, "calibration trigger happened");
    check(m_aux > 0, "auxiliary trigger happened");
    check(m_extra > 0, "extra trigger happened");
    check(m_inject > 0, "injection happened");
    check(m_mux > 0, "channel multiplexing happened");
    check(m_raw > 0, "raw record happened");
    check(m_trunc > 0, "truncation happened");
    check(m_dead > 0, "dead time happened");
    check(m_split > 0, "packet split happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
