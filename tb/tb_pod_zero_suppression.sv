// tb_pod_zero_suppression -- self-checking test of the POD (pulse only
// digitization) zero suppression of one channel.
// A reference model kept here marks sample t as "over" when the mean of the
// 32 samples before it exceeds x(t) by more than the threshold (negative
// pulses), and keeps every sample that lies no more than 32 samples before
// or 32 samples after an over-threshold sample.  The DUT delays the data by
// 32 samples; after the clock that takes in sample t it presents sample
// t-32 with its keep flag and time stamp, and the test checks all three, and
// the crossing pulse, every clock.  Pulses are placed so that some PODs
// merge (gap below 64 samples) and some stay apart.  A second phase turns the
// suppression off and checks that a raw-mode trigger keeps exactly RAW_LEN
// samples starting with the sample at the trigger.
module tb_pod_zero_suppression;
  import fadr_pkg::*;
  localparam int PRE = 32, POST = 32, BL = 32, RAW_LEN = 50;
  localparam longint TS0 = 64'h1234_5678;
  logic clk = 1'b0, rst_n = 1'b0;
  sample_t x = '0;
  tstamp_t ts = '0;
  sample_t thr = 14'd25;
  logic zs_on = 1'b1, raw_trig = 1'b0;
  logic keep, over, crossing;
  sample_t y;
  tstamp_t y_ts;
  int checks = 0, failures = 0;

  pod_zero_suppression #(.BL_LEN(BL), .PRE(PRE), .POST(POST), .RAW_LEN(RAW_LEN)) dut (
    .clk, .rst_n, .x, .ts, .thr, .zs_on, .raw_trig, .keep, .y, .y_ts, .over, .crossing);

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
  int n_kept = 0, n_pods = 0, n_merged = 0, n_cross = 0;

  function automatic bit ref_over(int t);
    int s = 0;
    if (t < BL) return 0;
    for (int i = 1; i <= BL; i++) s += xs[t - i];
    return s > BL * (xs[t] + int'(thr));
  endfunction

  initial begin
    int N = 4000, t_next_pulse = 200;
    int plen = 0, ph = 0;
    bit prev_keep = 0;
    int last_pod_end = -1000;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // ---- zero-suppressed phase (baseline 7169 as in the example waveform) --
    for (int t = 0; t < N + PRE + POST + 2; t++) begin
      automatic int v = 7169 + int'($urandom % 5) - 2;
      if (t == t_next_pulse) begin
        plen = 1 + $urandom % 10; ph = 30 + $urandom % 800;
        // alternate between close pulses (PODs merge) and distant ones
        t_next_pulse = t + (($urandom % 2) ? 40 + $urandom % 20 : 70 + $urandom % 200);
      end
      if (plen > 0) begin v -= ph; plen--; end
      xs.push_back(v);
      ov.push_back(ref_over(t));
      x = 14'(v); ts = TS0 + t;
      @(posedge clk); #1;
      check(over == ov[t], $sformatf("over at %0d", t));
      check(crossing == (ov[t] && (t == 0 || !ov[t-1])), $sformatf("crossing at %0d", t));
      if (crossing) n_cross++;
      if (t >= PRE) begin
        automatic int s = t - PRE;
        automatic bit k = 0;
        for (int u = s - POST; u <= s + PRE; u++) if (u >= 0 && ov[u]) k = 1;
        check(keep == k, $sformatf("keep of sample %0d: %0b", s, keep));
        if (k) begin
          check(y == 14'(xs[s]), $sformatf("data of sample %0d", s));
          check(y_ts == TS0 + s, $sformatf("time of sample %0d", s));
          n_kept++;
          if (!prev_keep) begin
            n_pods++;
            if (s - last_pod_end < 4) n_merged++;
          end
        end else if (prev_keep) last_pod_end = s;
        prev_keep = k;
      end else check(!keep, "nothing kept before the delay line fills");
      @(negedge clk);
    end
    check(n_pods > 5, $sformatf("%0d PODs", n_pods));
    check(n_cross > n_pods, $sformatf("merging: %0d crossings in %0d PODs", n_cross, n_pods));
    // ---- raw phase: suppression off, one trigger ----------------------------
    zs_on = 1'b0;
    begin
      automatic int kept = 0, first = -1, T = 100;
      for (int t = 0; t < 300; t++) begin
        x = 14'(t); raw_trig = (t == T);
        @(posedge clk); #1;
        if (keep) begin
          if (first < 0) first = int'(y);
          kept++;
        end
        @(negedge clk);
      end
      check(kept == RAW_LEN, $sformatf("raw mode kept %0d samples", kept));
      check(first == T, $sformatf("raw record starts with sample %0d", first));
    end
    $display("PODs %0d, crossings %0d, samples kept %0d", n_pods, n_cross, n_kept);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
