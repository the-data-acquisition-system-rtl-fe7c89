// tb_ddc32 -- self-checking test of one DDC-32 digitizer (scaled to 4
// channels, 16 headers and 512 samples per bank, 64-word injection memory,
// 1000-clock rate period).
// Channel 0 gets negative pulses at known times on a flat baseline; channel
// 1 is switched by the channel multiplexer to show its partner (channel 0);
// channel 2 receives an injected waveform; channel 3 stays flat.  The test
// checks:
//   * the spy output and the digital sum against its own copy of the inputs
//     (three and two clocks of latency);
//   * the event readout: after an event with a 100-clock pre-event window is
//     started and closed, the word stream is parsed, its CRC-32 recomputed,
//     and each channel's PODs compared with the pulses that fall inside the
//     event window (channel 1 must carry the same PODs as channel 0, channel
//     2 the injected pulse, channel 3 none);
//   * dead time: a second and a third event close while the first is still
//     unread make the digitizer not live, and reading it out restores it;
//   * the POD-crossing rate of channel 0 read through the rate port.
module tb_ddc32;
  import fadr_pkg::*;
  localparam int NCH = 4, NHDR = 16, NSMP = 512, INJ = 64, PERIOD = 1000;
  logic clk = 1'b0, rst_n = 1'b0;
  tstamp_t now = '0;
  logic [7:0] ddc_id = 8'd7;
  sample_t adc [NCH];
  filt_cfg_t cfg;
  logic [NCH-1:0] zs_on = '1, ch_mux = 4'b0010, sum_mask = 4'b1101;
  logic raw_trig = 1'b0;
  logic inj_wr_en = 1'b0, inj_strobe = 1'b0;
  logic [5:0] inj_wr_addr = '0;
  logic signed [15:0] inj_wr_data = '0;
  logic [6:0] inj_len = 7'd20;
  inj_mode_t inj_mode = INJ_ONE;
  logic [1:0] inj_ch = 2'd2;
  spy_src_t spy_src [2];
  logic [1:0] spy_ch [2];
  sample_t spy [2];
  logic event_start = 1'b0, event_close = 1'b0;
  tstamp_t event_time = '0;
  win_t pre_window = win_t'(100);
  logic live;
  logic [NCH-1:0] s1_above, s2_above;
  logic [16:0] dsum;
  rd_word_t rd_out;
  logic rd_out_ready = 1'b0;
  logic [1:0] rate_ch = '0;
  rate_kind_t rate_kind = RATE_POD;
  logic [31:0] rate_val;
  int checks = 0, failures = 0;

  ddc32 #(.NCH(NCH), .NHDR(NHDR), .NSMP(NSMP), .INJ_DEPTH(INJ), .S1_NMAX(16),
          .S2_MMAX(16), .RATE_PERIOD(PERIOD)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- input generation ------------------------------------------------------
  longint t = 0;
  int hist [$][NCH];
  int pulse_at [$];            // channel-0 pulse starts
  int pulse_len = 6;
  int inj_at = -1;             // clock of the injection strobe

  task automatic tick();
    int row [NCH];
    for (int c = 0; c < NCH; c++) row[c] = 7000 + c;
    if (pulse_at.size() > 0)
      foreach (pulse_at[i]) if (t >= pulse_at[i] && t < pulse_at[i] + pulse_len) row[0] = 6000;
    for (int c = 0; c < NCH; c++) adc[c] = 14'(row[c]);
    hist.push_back(row);
    now = t;
    @(posedge clk); #1;
    // spy: adc -> injector (2) -> spy register (1)
    if (t >= 3) begin
      check(int'(spy[0]) == hist[t-2][0], $sformatf("spy 0 at %0d", t));
      check(int'(spy[1]) == hist[t-2][0], $sformatf("spy 1 (channel 1 shows its partner) at %0d", t));
      if (inj_at < 0 || t < inj_at) begin
        int s = 0;
        for (int c = 0; c < NCH; c++) if (sum_mask[c]) s += hist[t-2][c == 1 ? 0 : c];
        check(dsum == 17'(s >> 3), $sformatf("digital sum at %0d", t));
      end
    end
    t++;
    @(negedge clk);
    inj_strobe = 0;
  endtask

  // ---- readout capture ----------------------------------------------------------
  word_t words[$];
  task automatic read_event(output bit ok);
    words.delete();
    rd_out_ready = 1;
    ok = 0;
    for (int i = 0; i < 20000 && !ok; i++) begin
      @(posedge clk);
      if (rd_out.valid) begin words.push_back(rd_out.data); if (rd_out.last) ok = 1; end
      #1;
      @(negedge clk);
    end
    rd_out_ready = 0;
  endtask

  function automatic logic [31:0] crc_ref(int upto);
    logic [31:0] c = '1;
    for (int i = 0; i < upto; i++) for (int by = 1; by >= 0; by--)
      for (int b = 0; b < 8; b++) begin
        logic fb = c[0] ^ words[i][8*by + b];
        c = c >> 1;
        if (fb) c ^= 32'hEDB8_8320;
      end
    return ~c;
  endfunction

  // parses the stream; returns per channel the list of (ts, len)
  typedef struct { longint ts; int len; int first; } pod_t;
  pod_t got [NCH][$];
  function automatic bit parse();
    int p = 1;
    logic [31:0] crc;
    if (words.size() < 4 || words[0] != {4'hD, 4'h0, ddc_id}) return 0;
    for (int c = 0; c < NCH; c++) begin
      int n;
      got[c].delete();
      if (words[p][15:12] != 4'hC || int'(words[p][4:0]) != c) return 0;
      n = int'(words[p+7]); p += 8;
      for (int i = 0; i < n; i++) begin
        pod_t q;
        q.ts = {words[p], words[p+1], words[p+2]};
        if (words[p+3][15:12] != 4'hB) return 0;
        q.len = int'(words[p+3][10:0]);
        q.first = int'(words[p+4]);
        p += 4 + q.len;
        got[c].push_back(q);
      end
    end
    crc = crc_ref(p);
    if (words[p] != 16'hE000 || {words[p+1], words[p+2]} != crc) return 0;
    return p + 3 == words.size();
  endfunction

  initial begin
    bit ok;
    int close_t, ev_t;
    cfg = '0;
    cfg.pod_thr = 14'd25;
    cfg.s1_n = 5'd4;  cfg.s1_thr = S1W'(300);
    cfg.s2_m = 8'd4;  cfg.s2_thr = S2W'(5000);
    cfg.noise_n = 5'd1; cfg.noise_thr = S1W'(5);
    cfg.sphe_n = 5'd2;  cfg.sphe_thr = S1W'(40);
    cfg.mon2_m = 8'd4;  cfg.mon2_thr = S2W'(800);
    spy_src[0] = SPY_CHAN; spy_src[1] = SPY_CHAN; spy_ch[0] = 2'd0; spy_ch[1] = 2'd1;
    for (int c = 0; c < NCH; c++) adc[c] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // waveform: a negative square pulse of 10 samples
    for (int i = 0; i < INJ; i++) begin
      inj_wr_en = 1; inj_wr_addr = 6'(i); inj_wr_data = (i < 10) ? -16'sd800 : 16'sd0;
      @(negedge clk);
    end
    inj_wr_en = 0;
    // ---- first rate period: pulses at known times ---------------------------
    pulse_at = '{200, 400, 700};
    while (t < PERIOD + 10) tick();
    check(rate_val == 32'd3, $sformatf("channel 0 POD crossing rate %0d", rate_val));
    rate_ch = 2'd1;
    #1 check(rate_val == 32'd3, "channel 1 (multiplexed) POD crossing rate");
    rate_ch = 2'd3;
    #1 check(rate_val == 32'd0, "quiet channel rate");
    // ---- event 1 ------------------------------------------------------------
    pulse_at = '{1100, 1250, 1400};
    while (t < 1200) tick();
    ev_t = 1260;
    event_start = 1; event_time = tstamp_t'(ev_t);
    tick(); event_start = 0;
    while (t < 1300) tick();
    inj_strobe = 1; inj_at = 1300; tick();
    while (t < 1500) tick();
    event_close = 1; close_t = int'(t); tick(); event_close = 0;
    check(live, "live after the first close");
    // ---- events 2 and 3 without readout: dead time --------------------------
    pulse_at = '{};
    repeat (50) tick();
    event_start = 1; event_time = tstamp_t'(t); tick(); event_start = 0;
    repeat (50) tick();
    event_close = 1; tick(); event_close = 0;
    check(!live, "dead with both banks waiting for readout");
    // ---- read event 1 ---------------------------------------------------------
    read_event(ok);
    check(ok, "event 1 read out");
    check(parse(), "event 1 stream well formed with correct CRC");
    // channel 0: pulses at 1250 and 1400 are inside [ev_t - 100, close];
    // the one at 1100 ends before the pre-event window and is dropped
    check(got[0].size() == 2, $sformatf("channel 0 holds %0d PODs", got[0].size()));
    if (got[0].size() == 2) begin
      check(got[0][0].ts == 1250 - 32 && got[0][0].len == pulse_len + 64, $sformatf("channel 0 POD 1 time %0d length %0d", got[0][0].ts, got[0][0].len));
      check(got[0][1].ts == 1400 - 32 && got[0][1].len == pulse_len + 64, "channel 0 POD 2 time and length");
      check(got[0][0].first == 7000, "POD begins with baseline pre-samples");
    end
    check(got[1].size() == got[0].size(), "channel 1 mirrors channel 0");
    check(got[2].size() == 1, $sformatf("channel 2 holds the injected pulse (%0d PODs)", got[2].size()));
    if (got[2].size() == 1)
      check(got[2][0].ts == inj_at + 1 - 32 && got[2][0].len == 10 + 64, "injected POD time and length");
    check(got[3].size() == 0, "channel 3 empty");
    repeat (2) tick();
    check(live, "live again after the readout");
    read_event(ok);
    check(ok && parse(), "event 2 read out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
