// tb_waveform_injector -- self-checking test of the arbitrary waveform
// injector.
// A random signed waveform is loaded into a 64-word memory through the
// write port and played three times, once per channel selection (none, one
// channel, all channels), on 8 channels with random ADC samples, some near
// the ends of the 14-bit range so that the clamp is used.  The test keeps
// its own copy of the waveform and of the input samples and checks every
// output sample, every clock: out(n) = clamp(in(n-1) + w[n-S-2]) for the
// selected channels while the waveform plays (S = clock of the strobe),
// out(n) = in(n-1) otherwise: two clocks of latency, no gaps in playback.
module tb_waveform_injector;
  import fadr_pkg::*;
  localparam int NCH = 8, DEPTH = 64, AW = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  sample_t adc_in [NCH], adc_out [NCH];
  logic wr_en = 1'b0, strobe = 1'b0;
  logic [AW-1:0] wr_addr = '0;
  logic signed [15:0] wr_data = '0;
  logic [AW:0] play_len = '0;
  inj_mode_t mode = INJ_NONE;
  logic [2:0] sel_ch = '0;
  int checks = 0, failures = 0, n_injected = 0, n_clamped = 0;

  waveform_injector #(.NCH(NCH), .DEPTH(DEPTH)) dut (.*);

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

  int w [DEPTH];
  int in_hist [$][NCH];
  int n = 0, S = -1000, len = 0;

  task automatic tick(bit strb);
    int row [NCH];
    strobe = strb;
    for (int c = 0; c < NCH; c++) begin
      int r = $urandom % 10;
      row[c] = (r == 0) ? int'($urandom % 40) : (r == 1) ? 16383 - int'($urandom % 40) : int'($urandom % 16384);
      adc_in[c] = 14'(row[c]);
    end
    in_hist.push_back(row);
    @(posedge clk); #1;
    if (strb) S = n;
    if (n >= 1) for (int c = 0; c < NCH; c++) begin
      int k = n - S - 2, e;
      bit hit = (k >= 0 && k < len) &&
                (mode == INJ_ALL || (mode == INJ_ONE && c == int'(sel_ch)));
      e = in_hist[n-1][c] + (hit ? w[k] : 0);
      if (hit) n_injected++;
      if (e < 0 || e > 16383) n_clamped++;
      e = (e < 0) ? 0 : (e > 16383) ? 16383 : e;
      check(int'(adc_out[c]) == e, $sformatf("clock %0d channel %0d: %0d vs %0d", n, c, adc_out[c], e));
    end
    n++;
    strobe = 0;
    @(negedge clk);
  endtask

  initial begin
    for (int c = 0; c < NCH; c++) adc_in[c] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int i = 0; i < DEPTH; i++) begin
      w[i] = int'($urandom % 4001) - 2000;
      wr_en = 1; wr_addr = AW'(i); wr_data = 16'(w[i]);
      @(negedge clk);
    end
    wr_en = 0;
    @(negedge clk);
    for (int m = 0; m < 3; m++) begin
      mode = inj_mode_t'(m); sel_ch = 3'(3 + m);
      S = -1000; len = 20 + 20 * m; play_len = 7'(len);
      repeat (5) tick(0);
      tick(1);
      repeat (len + 10) tick(0);
    end
    // full-depth playback on all channels
    S = -1000; len = DEPTH; play_len = 7'(DEPTH);
    tick(1);
    repeat (DEPTH + 5) tick(0);
    check(n_injected == 40 + 60 * NCH + DEPTH * NCH, $sformatf("injected samples %0d", n_injected));
    check(n_injected > 0 && n_clamped > 0, $sformatf("%0d injected samples, %0d clamped", n_injected, n_clamped));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
