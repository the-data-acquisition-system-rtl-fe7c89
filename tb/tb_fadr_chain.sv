// tb_fadr_chain -- self-checking test of one processing chain (scaled to 3
// digitizers of 2 channels, 1 Data Sparsifier, 2 Data Extractors, small
// memories and 30-word packets).
// A negative pulse on digitizer 1, channel 0 must raise the chain's S1
// multiplicity to one for the coincidence window (C = 32 clocks) and two
// pulses on different digitizers inside that window must raise it to two.
// An event is then started and closed by hand; Data Extractor 0 must send
// the event data of digitizers 0 and 2 and Data Extractor 1 that of
// digitizer 1, in packets whose payloads, joined, form well-formed digitizer
// records (checked field by field) in which only digitizer 1 channel 0 and
// digitizer 2 channel 1 hold PODs, of the expected length.
module tb_fadr_chain;
  import fadr_pkg::*;
  localparam int NDDC = 3, NDS = 1, NDE = 2, NCH = 2, PKT = 30, MW = 11;
  logic clk = 1'b0, rst_n = 1'b0;
  tstamp_t now = '0;
  logic [NDDC-1:0][NCH-1:0][ADC_BITS-1:0] adc;
  filt_cfg_t cfg;
  logic [NDDC-1:0][NCH-1:0] zs_on = '1, ch_mux = '0, sum_mask = '1, s1_mask = '1, s2_mask = '1;
  logic [11:0] s1_coinc = 12'd32, s2_coinc = 12'd100;
  logic raw_trig = 0, inj_wr_en = 0, inj_strobe = 0;
  logic [3:0] inj_wr_addr = '0;
  logic signed [15:0] inj_wr_data = '0;
  logic [4:0] inj_len = '0;
  inj_mode_t inj_mode = INJ_NONE;
  logic [0:0] inj_ch = '0;
  spy_src_t spy_src [2];
  logic [0:0] spy_ch [2];
  logic [NDDC-1:0][1:0][ADC_BITS-1:0] spy;
  logic event_start = 0, event_close = 0, extract = 0, live;
  tstamp_t event_time = '0;
  win_t pre_window = win_t'(200);
  logic [MW-1:0] mult_s1, mult_s2;
  logic [NDS-1:0][17:0] dsum;
  logic [31:0] event_id = 32'd1;
  rd_word_t [NDE-1:0] de_out;
  logic [NDE-1:0] de_ready = '1, de_overflow;
  logic [0:0] rate_ch = '0;
  rate_kind_t rate_kind = RATE_POD;
  logic [NDDC-1:0][31:0] rate_val;
  int checks = 0, failures = 0;

  fadr_chain #(.NDDC(NDDC), .NDS(NDS), .NDE(NDE), .NCH(NCH), .NHDR(8), .NSMP(256),
               .INJ_DEPTH(16), .S1_NMAX(16), .S2_MMAX(8), .RATE_PERIOD(500),
               .PKT_WORDS(PKT), .MW(MW)) dut (.*, .ddc_id_base(8'd40));

  always #5 clk = ~clk;
  always @(posedge clk) now <= now + 1;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pulse generator: pulses[d][c] = clocks left of the current pulse
  int pl [NDDC][NCH];
  always @(negedge clk)
    for (int d = 0; d < NDDC; d++) for (int c = 0; c < NCH; c++) begin
      adc[d][c] = (pl[d][c] > 0) ? 14'd6500 : 14'd7100;
      if (pl[d][c] > 0) pl[d][c]--;
    end

  // packet capture per extractor
  word_t payload [NDE][$];
  bit    done [NDE];
  word_t cur [NDE][$];
  always @(posedge clk) for (int e = 0; e < NDE; e++)
    if (de_out[e].valid && de_ready[e]) begin
      cur[e].push_back(de_out[e].data);
      if (de_out[e].last) begin
        for (int i = 3; i < cur[e].size() - 3; i++) payload[e].push_back(cur[e][i]);
        if (cur[e][cur[e].size()-3][15]) done[e] = 1;
        check(cur[e].size() - 6 <= PKT, "packet within the size limit");
        cur[e].delete();
      end
    end

  // parse joined payload: returns ids in order and POD lengths per ddc/channel
  task automatic parse(int e, output int ids[$], output int lens[int][$]);
    int p = 0;
    ids.delete();
    while (p < payload[e].size()) begin
      int id = int'(payload[e][p][7:0]);
      check(payload[e][p][15:12] == 4'hD, "digitizer marker");
      ids.push_back(id); p++;
      for (int c = 0; c < NCH; c++) begin
        int n;
        check(payload[e][p][15:12] == 4'hC && int'(payload[e][p][4:0]) == c, "channel marker");
        n = int'(payload[e][p+7]); p += 8;
        for (int i = 0; i < n; i++) begin
          int len = int'(payload[e][p+3][10:0]);
          check(payload[e][p+3][15:12] == 4'hB, "POD marker");
          lens[id * 16 + c].push_back(len);
          p += 4 + len;
        end
      end
      check(payload[e][p] == 16'hE000, "CRC marker"); p += 3;
    end
  endtask

  initial begin
    int m_hi;
    int ids0[$], ids1[$];
    int lens0[int][$], lens1[int][$];
    for (int d = 0; d < NDDC; d++) for (int c = 0; c < NCH; c++) pl[d][c] = 0;
    cfg = '0;
    cfg.pod_thr = 14'd25;
    cfg.s1_n = 5'd4; cfg.s1_thr = S1W'(200);
    cfg.s2_m = 8'd4; cfg.s2_thr = S2W'(100000);
    cfg.noise_n = 5'd1; cfg.noise_thr = S1W'(50);
    cfg.sphe_n = 5'd2;  cfg.sphe_thr = S1W'(100);
    cfg.mon2_m = 8'd2;  cfg.mon2_thr = S2W'(2000);
    spy_src[0] = SPY_CHAN; spy_src[1] = SPY_SUM; spy_ch[0] = '0; spy_ch[1] = '0;
    for (int e = 0; e < NDE; e++) done[e] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (100) @(negedge clk);
    check(live && mult_s1 == 0, "live and quiet");
    // one pulse: multiplicity 1 for the coincidence window
    pl[1][0] = 6;
    m_hi = 0;
    repeat (80) begin @(negedge clk); if (mult_s1 == 1) m_hi++; end
    check(m_hi >= 32 && m_hi <= 32 + 8, $sformatf("multiplicity 1 held %0d clocks", m_hi));
    // two pulses 10 clocks apart on different digitizers: multiplicity 2
    event_time = now; event_start = 1; @(negedge clk); event_start = 0;
    pl[2][1] = 6;
    repeat (10) @(negedge clk);
    pl[0][1] = 0; pl[1][0] = 6;
    m_hi = 0;
    repeat (60) begin @(negedge clk); if (mult_s1 == 2) m_hi++; end
    check(m_hi > 0, "two-fold coincidence");
    repeat (100) @(negedge clk);
    event_close = 1; extract = 1; @(negedge clk); event_close = 0; extract = 0;
    repeat (3000) @(negedge clk);
    check(done[0] && done[1], "both extractors finished the event");
    parse(0, ids0, lens0);
    parse(1, ids1, lens1);
    check(ids0.size() == 2 && ids0[0] == 40 && ids0[1] == 42, "extractor 0 reads digitizers 0 and 2");
    check(ids1.size() == 1 && ids1[0] == 41, "extractor 1 reads digitizer 1");
    // digitizer 1 channel 0: two pulses (the first lies before the event but
    // inside the 200-clock pre-event window), each 6 + 64 samples
    check(lens1.exists(41 * 16 + 0) && lens1[41 * 16 + 0].size() == 2, "digitizer 1 channel 0 PODs");
    if (lens1.exists(41 * 16 + 0)) foreach (lens1[41 * 16 + 0][i]) check(lens1[41 * 16 + 0][i] == 70, $sformatf("POD %0d length %0d", i, lens1[41 * 16 + 0][i]));
    check(lens0.exists(42 * 16 + 1) && lens0[42 * 16 + 1].size() == 1, "digitizer 2 channel 1 POD");
    check(!lens0.exists(40 * 16 + 0) && !lens0.exists(40 * 16 + 1) && !lens1.exists(41 * 16 + 1), "quiet channels empty");
    check(de_overflow == '0, "no overflow");
    check(live, "live after readout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
