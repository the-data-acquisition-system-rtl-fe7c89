// tb_s1_filter -- self-checking test of the S1 three-lobe filter.
// Feeds baseline-plus-noise samples with negative-going pulses of random
// width and height and, every clock, compares F = (A + C)/2 - B with a
// reference computed from the test's own copy of the sample history (A the
// oldest lobe, B the centre, C the newest, all N samples wide).  The filter
// has one clock of latency: F for the window ending with sample k is valid
// in the clock after k was presented.  Several widths N are used, including
// the maximum of 16, and the threshold flag is checked against F.
module tb_s1_filter;
  import fadr_pkg::*;
  localparam int unsigned SW = S1W;
  logic clk = 1'b0, rst_n = 1'b0;
  sample_t x = '0;
  logic [4:0] n = 5'd4;
  logic signed [SW-1:0] thr = '0;
  logic signed [SW+1:0] f;
  logic above;
  int checks = 0, failures = 0, n_above = 0;

  s1_filter #(.NMAX(16), .SW(SW)) dut (.clk, .rst_n, .x, .n, .thr, .f, .above);

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

  int hist[$];
  int pulse_left = 0, pulse_h = 0;

  function automatic int lobe(int from_back, int len);
    int s = 0;
    for (int i = 0; i < len; i++) s += hist[hist.size() - 1 - from_back - i];
    return s;
  endfunction

  task automatic run(int nn, int cycles);
    @(negedge clk) rst_n = 1'b0; n = 5'(nn); hist.delete();
    thr = SW'(20 + $urandom % 200);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < cycles; c++) begin
      int v;
      if (pulse_left == 0 && ($urandom % 40) == 0) begin
        pulse_left = 1 + $urandom % 20; pulse_h = 50 + $urandom % 3000;
      end
      v = 7169 + int'($urandom % 9) - 4;
      if (pulse_left > 0) begin v -= pulse_h; pulse_left--; end
      x = 14'(v);
      hist.push_back(v);
      @(posedge clk); #1;
      if (hist.size() >= 3 * nn) begin
        int a = lobe(2 * nn, nn), b = lobe(nn, nn), cc = lobe(0, nn);
        int e2 = a + cc - 2 * b;
        check(f == (SW+2)'(e2 >>> 1), $sformatf("N=%0d F=%0d expected %0d", nn, f, e2 >>> 1));
        check(above == (e2 > 2 * thr), "threshold flag");
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
    run(15, 800);   // OD S1 setting of the first science run
    run(16, 800);
    run(7, 600);
    check(n_above > 50, $sformatf("pulses crossed the threshold %0d times", n_above));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
