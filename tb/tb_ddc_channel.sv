// tb_ddc_channel -- self-checking test of one digitizer channel: zero
// suppression into the double buffer, the S1 and S2 trigger filters, the
// three monitor filters and the five rate counters.
// Negative rectangular pulses of random height and width are placed on a
// noisy 7169-count baseline, well apart from each other and from the ends
// of the 2000-clock rate period used here (10 s in the real system).  The
// test computes, from its own copy of the samples:
//   * the S1 and S2 trigger flags, checked every clock (one clock latency);
//   * the expected POD list (32 samples before the first and 32 after the
//     last over-threshold sample), compared with the finished bank after an
//     event close through the header and sample read ports;
//   * the number of filter-threshold crossings, POD-threshold crossings and
//     over-threshold samples in the first rate period, compared with the
//     five rate counters at the first update.
module tb_ddc_channel;
  import fadr_pkg::*;
  localparam int PRE = 32, POST = 32, PERIOD = 2000;
  logic clk = 1'b0, rst_n = 1'b0;
  sample_t x = '0;
  tstamp_t now = '0, prune_before = '0;
  filt_cfg_t cfg;
  logic zs_on = 1'b1, raw_trig = 1'b0, event_close = 1'b0, release_i = 1'b0;
  logic s1_above, s2_above, live, rd_ready, rd_trunc;
  logic signed [S1W+1:0] s1_f;
  tstamp_t rd_start_time, rd_end_time;
  logic [7:0] rd_tail, rd_cnt, rd_hdr_idx = '0;
  pod_hdr_t rd_hdr;
  logic rd_smp_en = 1'b0;
  logic [SADDR_BITS-1:0] rd_smp_addr = '0;
  word_t rd_smp;
  logic [31:0] rate [N_RATES];
  int checks = 0, failures = 0;

  ddc_channel #(.NHDR(16), .NSMP(1024), .S1_NMAX(16), .S2_MMAX(16), .RATE_PERIOD(PERIOD)) dut (.*);

  always #5 clk = ~clk;

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

  int xs[$];
  bit ov[$];

  function automatic int sum(int from, int to);   // inclusive, zero before 0
    int s = 0;
    for (int i = from; i <= to; i++) if (i >= 0) s += xs[i];
    return s;
  endfunction
  function automatic bit s1_ref(int t, int n, int thr);
    if (t < 3 * n - 1) return 0;
    return sum(t-3*n+1, t-2*n) + sum(t-n+1, t) - 2 * sum(t-2*n+1, t-n) > 2 * thr;
  endfunction
  function automatic bit s2_ref(int t, int m, int thr);
    if (t < 6 * m - 1) return 0;
    return 2 * sum(t-6*m+1, t-5*m) - sum(t-5*m+1, t-m) + 2 * sum(t-m+1, t) > thr;
  endfunction
  function automatic bit over_ref(int t, int thr);
    if (t < 32) return 0;
    return sum(t-32, t-1) > 32 * (xs[t] + thr);
  endfunction

  initial begin
    int plen = 0, ph = 0;
    int n_noise = 0, n_sphe = 0, n_s2 = 0, n_pod = 0, n_over = 0;
    bit p_noise = 0, p_sphe = 0, p_s2 = 0;
    int n_s1_trig = 0, n_s2_trig = 0;
    cfg = '0;
    cfg.pod_thr = 14'd25;
    cfg.s1_n = 5'd4;  cfg.s1_thr = S1W'(150);
    cfg.s2_m = 8'd8;  cfg.s2_thr = S2W'(3000);
    cfg.noise_n = 5'd1; cfg.noise_thr = S1W'(5);
    cfg.sphe_n = 5'd2;  cfg.sphe_thr = S1W'(40);
    cfg.mon2_m = 8'd4;  cfg.mon2_thr = S2W'(800);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < PERIOD + 200; t++) begin
      automatic int v = 7169 + int'($urandom % 5) - 2;
      automatic bit a;
      if (t % 300 == 200 && t < PERIOD - 300) begin plen = 2 + $urandom % 8; ph = 60 + $urandom % 600; end
      if (plen > 0) begin v -= ph; plen--; end
      xs.push_back(v);
      ov.push_back(over_ref(t, 25));
      x = 14'(v); now = t;
      @(posedge clk); #1;
      check(s1_above == s1_ref(t, 4, 150), $sformatf("S1 flag at %0d", t));
      check(s2_above == s2_ref(t, 8, 3000), $sformatf("S2 flag at %0d", t));
      if (s1_above) n_s1_trig++;
      if (s2_above) n_s2_trig++;
      if (t < PERIOD - 50) begin
        a = s1_ref(t, 1, 5);   if (a && !p_noise) n_noise++; p_noise = a;
        a = s1_ref(t, 2, 40);  if (a && !p_sphe)  n_sphe++;  p_sphe = a;
        a = s2_ref(t, 4, 800); if (a && !p_s2)    n_s2++;    p_s2 = a;
        if (ov[t]) n_over++;
        if (ov[t] && (t == 0 || !ov[t-1])) n_pod++;
      end
      @(negedge clk);
      if (t == PERIOD + 5) begin
        check(rate[RATE_NOISE] == 32'(n_noise), $sformatf("noise monitor rate %0d vs %0d", rate[RATE_NOISE], n_noise));
        check(rate[RATE_SPHE]  == 32'(n_sphe),  $sformatf("SPHE monitor rate %0d vs %0d", rate[RATE_SPHE], n_sphe));
        check(rate[RATE_S2]    == 32'(n_s2),    $sformatf("S2 monitor rate %0d vs %0d", rate[RATE_S2], n_s2));
        check(rate[RATE_POD]   == 32'(n_pod),   $sformatf("POD crossing rate %0d vs %0d", rate[RATE_POD], n_pod));
        check(rate[RATE_OVER]  == 32'(n_over),  $sformatf("samples over threshold %0d vs %0d", rate[RATE_OVER], n_over));
      end
    end
    check(n_s1_trig > 0 && n_s2_trig > 0 && n_noise > 0, "filters fired");
    // ---- close the event and read the bank back ---------------------------
    x = 14'd7169;
    repeat (PRE + POST + 2) begin xs.push_back(7169); ov.push_back(0); @(negedge clk); end
    event_close = 1; @(negedge clk); event_close = 0;
    check(rd_ready && live, "bank ready, other bank live");
    begin
      automatic int npods = 0, idx;
      automatic int s = 0;
      while (s < PERIOD + 200) begin
        automatic bit k = 0;
        for (int u = s - POST; u <= s + PRE; u++) if (u >= 0 && u < ov.size() && ov[u]) k = 1;
        if (k) begin
          automatic int first = s, len = 0;
          while (1) begin
            automatic bit kk = 0;
            for (int u = s - POST; u <= s + PRE; u++) if (u >= 0 && u < ov.size() && ov[u]) kk = 1;
            if (!kk) break;
            len++; s++;
          end
          idx = (int'(rd_tail) + npods) % 16;
          rd_hdr_idx = 8'(idx); #1;
          check(int'(rd_hdr.ts) == first && int'(rd_hdr.len) == len,
                $sformatf("POD %0d: %0d+%0d vs %0d+%0d", npods, rd_hdr.ts, rd_hdr.len, first, len));
          for (int j = 0; j < len; j++) begin
            rd_smp_en = 1; rd_smp_addr = SADDR_BITS'((int'(rd_hdr.start) + j) % 1024);
            @(posedge clk); #1 rd_smp_en = 0;
            check(int'(rd_smp) == xs[first + j], $sformatf("POD %0d sample %0d", npods, j));
            @(negedge clk);
          end
          npods++;
        end else s++;
      end
      check(int'(rd_cnt) == npods && npods >= 5, $sformatf("%0d PODs stored, %0d expected", rd_cnt, npods));
    end
    release_i = 1; @(negedge clk); release_i = 0;
    check(!rd_ready, "released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
