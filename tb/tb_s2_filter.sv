// tb_s2_filter -- self-checking test of the S2 three-lobe filter.
// Feeds baseline-plus-noise samples with long negative-going pulses (the
// shape of an electroluminescence signal, microseconds wide) and, every
// clock, compares F = 2A - B + 2C with a reference computed from the test's
// own copy of the sample history: side lobes A (oldest) and C (newest) are M
// samples wide, the centre lobe B is 4M.  One clock of latency, as in the S1
// filter.  Widths include M = 61 (centre lobe 244, the TPC setting of the
// first science run) and the largest M = 128 (centre lobe 512).
module tb_s2_filter;
  import fadr_pkg::*;
  localparam int unsigned SW = S2W;
  logic clk = 1'b0, rst_n = 1'b0;
  sample_t x = '0;
  logic [7:0] n = 8'd4;
  logic signed [SW-1:0] thr = '0;
  logic signed [SW+1:0] f;
  logic above;
  int checks = 0, failures = 0, n_above = 0;

  s2_filter #(.MMAX(128), .SW(SW)) dut (.clk, .rst_n, .x, .m(n), .thr, .f, .above);

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

  int hist[$];
  int pulse_left = 0, pulse_h = 0;

  function automatic int lobe(int from_back, int len);
    int s = 0;
    for (int i = 0; i < len; i++) s += hist[hist.size() - 1 - from_back - i];
    return s;
  endfunction

  task automatic run(int nn, int cycles);
    @(negedge clk) rst_n = 1'b0; n = 8'(nn); hist.delete();
    thr = SW'(1000 + $urandom % 20000);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < cycles; c++) begin
      int v;
      if (pulse_left == 0 && ($urandom % (8 * nn)) == 0) begin
        pulse_left = 1 + $urandom % (6 * nn); pulse_h = 10 + $urandom % 500;
      end
      v = 7169 + int'($urandom % 9) - 4;
      if (pulse_left > 0) begin v -= pulse_h; pulse_left--; end
      x = 14'(v);
      hist.push_back(v);
      @(posedge clk); #1;
      if (hist.size() >= 6 * nn) begin
        int a = lobe(5 * nn, nn), b = lobe(nn, 4 * nn), cc = lobe(0, nn);
        int e = 2 * a - b + 2 * cc;
        check(f == (SW+2)'(e), $sformatf("M=%0d F=%0d expected %0d", nn, f, e));
        check(above == (e > thr), "threshold flag");
        if (above) n_above++;
      end else begin
        check(f == 0 && !above, "silent until all three lobes are filled");
      end
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    run(1, 300);
    run(4, 600);
    run(61, 3000);    // TPC S2 setting of the first science run
    run(128, 5000);
    run(9, 1000);
    check(n_above > 50, $sformatf("pulses crossed the threshold %0d times", n_above));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
