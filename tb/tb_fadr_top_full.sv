// tb_fadr_top_full -- one complete acquisition cycle of the full-size
// system: 45 DDC-32 digitizers (TPC high gain 16, TPC low gain 16, Skin 5,
// OD 8) with 1440 channels, 6 Data Sparsifiers, the Data Sparsifier Master,
// the DAQ Master and 14 Data Extractors, every parameter at its default.
// Only the run-time settings are chosen here: event windows of a few
// hundred clocks instead of milliseconds, so that the run fits in a short
// simulation.  The run starts on a GPS pulse; negative pulses are placed on
// TPC high-gain channels (one per high-gain digitizer, channel = digitizer
// number) and on one OD channel; the TPC S2 multiplicity trigger (required
// multiplicity 6, centre lobe 4M = 16 samples here) must start an event; the
// event is closed after the post-event window and every Data Extractor must
// deliver it as CRC-checked packets holding one well-formed record per
// digitizer it serves, in which exactly the pulsed channels carry PODs.
module tb_fadr_top_full;
  import fadr_pkg::*;
  localparam int NDDC = 45, NDE = 14, NCH = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NDDC-1:0][NCH-1:0][ADC_BITS-1:0] adc;
  logic run_start = 0, run_stop = 0, ext_random = 0, ext_pps = 0, ext_dd = 0, ext_led = 0, ext_aux = 0;
  logic [N_EXT-1:0] ext_en = '1;
  filt_cfg_t chain_cfg [N_CHAINS];
  logic [11:0] s1_coinc [N_CHAINS], s2_coinc [N_CHAINS];
  logic [10:0] req_s1 [N_CHAINS], req_s2 [N_CHAINS];
  logic [15:0] downscale [N_SOURCES];
  win_t pre_window = win_t'(300), post_window = win_t'(300), holdoff = win_t'(300);
  logic [NDDC-1:0][NCH-1:0] zs_on = '1, ch_mux = '0, sum_mask = '1, s1_mask = '1, s2_mask = '1;
  logic raw_trig = 0, inj_wr_en = 0, inj_strobe = 0;
  logic [13:0] inj_wr_addr = '0;
  logic signed [15:0] inj_wr_data = '0;
  logic [14:0] inj_len = '0;
  inj_mode_t inj_mode = INJ_NONE;
  logic [4:0] inj_ch = '0;
  spy_src_t spy_src [2];
  logic [4:0] spy_ch [2];
  logic [NDDC-1:0][1:0][ADC_BITS-1:0] spy;
  rd_word_t [NDE-1:0] de_out;
  logic [NDE-1:0] de_ready = '1, de_overflow;
  tstamp_t timestamp;
  logic ts_clear_out, trigger_out, extra_trig, running, live, event_close;
  logic [N_SOURCES-1:0] trigger_src, extra_src;
  logic [31:0] event_id;
  logic [18:0] dsum_total;
  logic [31:0] trig_rate [N_SOURCES];
  logic [4:0] rate_ch = '0;
  rate_kind_t rate_kind = RATE_POD;
  logic [NDDC-1:0][31:0] rate_val;
  logic [47:0] busy_cycles, hold_cycles, full_cycles;
  int checks = 0, failures = 0;

  fadr_top dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pl [NDDC][NCH];
  always @(negedge clk)
    for (int d = 0; d < NDDC; d++) for (int c = 0; c < NCH; c++) begin
      adc[d][c] = (pl[d][c] > 0) ? 14'd6800 : 14'd7169;
      if (pl[d][c] > 0) pl[d][c]--;
    end

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

  // DE e of a chain serves digitizers e, e+NDE, ...; ids are global
  int chain_ddc0 [4] = '{0, 16, 32, 37};
  int chain_nddc [4] = '{16, 16, 5, 8};
  int chain_nde  [4] = '{6, 6, 1, 1};
  int chain_de0  [4] = '{0, 6, 12, 13};

  word_t cur [NDE][$];
  word_t evdata [NDE][$];
  int    de_done [NDE];
  int    pod_keys [$];

  task automatic parse_event(int e, int expected_ids[$]);
    int p = 0, r = 0;
    word_t w[$] = evdata[e];
    while (p < w.size() && r < 64) begin
      int id = int'(w[p][7:0]);
      word_t rec[$];
      int p0 = p;
      check(w[p][15:12] == 4'hD, "digitizer marker");
      if (w[p][15:12] != 4'hD) return;
      check(r < expected_ids.size() && id == expected_ids[r], $sformatf("extractor %0d record %0d is digitizer %0d", e, r, id));
      p++;
      for (int c = 0; c < NCH; c++) begin
        int n;
        check(w[p][15:12] == 4'hC && int'(w[p][4:0]) == c, "channel marker");
        n = int'(w[p+7]); p += 8;
        for (int i = 0; i < n; i++) begin
          pod_keys.push_back(id * 64 + c);
          p += 4 + int'(w[p+3][10:0]);
        end
      end
      for (int i = p0; i < p; i++) rec.push_back(w[i]);
      check(w[p] == 16'hE000 && {w[p+1], w[p+2]} == crc_ref(rec), "digitizer record CRC");
      p += 3; r++;
    end
    check(r == expected_ids.size(), $sformatf("extractor %0d: %0d records", e, r));
  endtask

  always @(posedge clk) for (int e = 0; e < NDE; e++)
    if (de_out[e].valid && de_ready[e]) begin
      cur[e].push_back(de_out[e].data);
      if (de_out[e].last) begin
        automatic int n = cur[e].size();
        automatic word_t pay[$] = cur[e][3 : n - 4];
        check({cur[e][0], cur[e][1]} == 32'd1, "event number 1");
        check(pay.size() <= 4400, "packet size limit");
        check({cur[e][n-2], cur[e][n-1]} == crc_ref(pay), "packet CRC");
        foreach (pay[i]) evdata[e].push_back(pay[i]);
        if (cur[e][n-3][15]) de_done[e]++;
        cur[e].delete();
      end
    end

  int n_trig = 0;
  logic [N_SOURCES-1:0] src_seen = '0;
  always @(posedge clk) if (trigger_out) begin n_trig++; src_seen |= trigger_src; end

  initial begin
    for (int d = 0; d < NDDC; d++) for (int c = 0; c < NCH; c++) pl[d][c] = 0;
    for (int e = 0; e < NDE; e++) de_done[e] = 0;
    for (int g = 0; g < N_CHAINS; g++) begin
      chain_cfg[g] = '0;
      chain_cfg[g].pod_thr = 14'd25;
      chain_cfg[g].s1_n = 5'd15; chain_cfg[g].s1_thr = S1W'(3000);   // OD S1 setting
      chain_cfg[g].s2_m = 8'd4;  chain_cfg[g].s2_thr = S2W'(1500);
      chain_cfg[g].noise_n = 5'd1; chain_cfg[g].noise_thr = S1W'(50);
      chain_cfg[g].sphe_n = 5'd2;  chain_cfg[g].sphe_thr = S1W'(100);
      chain_cfg[g].mon2_m = 8'd2;  chain_cfg[g].mon2_thr = S2W'(2000);
      s1_coinc[g] = 12'd32; s2_coinc[g] = 12'd500;                   // first science run
      req_s1[g] = '0; req_s2[g] = '0;
    end
    req_s2[0] = 11'd6;      // TPC S2, multiplicity 6
    req_s1[3] = 11'd15;     // OD S1, multiplicity 15
    for (int i = 0; i < N_SOURCES; i++) downscale[i] = 16'd1;
    spy_src[0] = SPY_CHAN; spy_src[1] = SPY_SUM; spy_ch[0] = '0; spy_ch[1] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    run_start = 1; @(negedge clk); run_start = 0;
    repeat (20) @(negedge clk);
    ext_pps = 1; repeat (5) @(negedge clk); ext_pps = 0;
    check(running, "run started on the PPS");
    repeat (100) @(negedge clk);
    // S2-like pulses on 8 high-gain digitizers within the coincidence window
    for (int d = 0; d < 8; d++) begin pl[d][d] = 30; repeat (10) @(negedge clk); end
    repeat (400) @(negedge clk);
    check(n_trig == 1 && src_seen[SRC_S2 + 0], $sformatf("%0d triggers, sources %b", n_trig, src_seen));
    // wait for all extractors
    for (int i = 0; i < 15000; i++) begin
      automatic int nd = 0;
      for (int e = 0; e < NDE; e++) if (de_done[e] > 0) nd++;
      if (nd == NDE) break;
      @(negedge clk);
    end
    for (int g = 0; g < 4; g++)
      for (int k = 0; k < chain_nde[g]; k++) begin
        automatic int e = chain_de0[g] + k;
        automatic int ids[$];
        for (int d = k; d < chain_nddc[g]; d += chain_nde[g]) ids.push_back(chain_ddc0[g] + d);
        check(de_done[e] == 1, $sformatf("extractor %0d delivered the event", e));
        parse_event(e, ids);
      end
    // exactly the eight pulsed channels hold PODs
    pod_keys.sort();
    check(pod_keys.size() == 8, $sformatf("%0d PODs in the event", pod_keys.size()));
    foreach (pod_keys[i]) check(pod_keys[i] == i * 64 + i, $sformatf("POD on digitizer %0d channel %0d", pod_keys[i] / 64, pod_keys[i] % 64));
    check(live && de_overflow == '0, "live, no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
