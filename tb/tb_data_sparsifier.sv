// tb_data_sparsifier -- self-checking test of a Data Sparsifier (scaled to 2
// digitizers of 4 channels).
// Every channel whose filter flag is set opens a coincidence window of C
// clocks; the multiplicity is the number of unmasked channels with an open
// window.  A directed part checks that a single one-clock flag is counted for
// exactly C clocks (C = 32, the OD setting of the first science run, and
// C = 500, the TPC setting), that a repeated flag restarts the window, and
// that masked channels are not counted.  A random part compares both
// multiplicities and the 18-bit digital sum (bits 19..2 of the sum of the
// digitizer sums) with a model every clock.
module tb_data_sparsifier;
  import fadr_pkg::*;
  localparam int NDDC = 2, NCH = 4, CW = 12, MW = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [NDDC-1:0][NCH-1:0] s1_above = '0, s2_above = '0, s1_mask = '1, s2_mask = '1;
  logic [CW-1:0] s1_coinc = 12'd32, s2_coinc = 12'd500;
  logic [NDDC-1:0][16:0] dsum_in = '0;
  logic [MW-1:0] mult_s1, mult_s2;
  logic [17:0] dsum;
  int checks = 0, failures = 0;

  data_sparsifier #(.NDDC(NDDC), .NCH(NCH), .CW(CW), .MW(MW)) dut (.*);

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

  // counts the clocks for which mult_s1/mult_s2 stay at 1 after one flag
  task automatic window_len(bit s2, output int n);
    n = 0;
    if (s2) s2_above[1][2] = 1; else s1_above[1][2] = 1;
    @(negedge clk);
    s1_above = '0; s2_above = '0;
    @(negedge clk);   // the multiplicity is registered
    while ((s2 ? mult_s2 : mult_s1) != 0 && n < 5000) begin n++; @(negedge clk); end
  endtask

  int m1 [NDDC*NCH], m2 [NDDC*NCH];

  initial begin
    int n;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    @(negedge clk);
    check(mult_s1 == 0 && mult_s2 == 0, "no multiplicity after reset");
    window_len(0, n); check(n == 32, $sformatf("S1 coincidence window %0d clocks", n));
    window_len(1, n); check(n == 500, $sformatf("S2 coincidence window %0d clocks", n));
    // a masked channel is not counted
    s1_mask[1][2] = 0;
    s1_above[1][2] = 1; @(negedge clk); s1_above = '0;
    repeat (3) begin @(negedge clk); check(mult_s1 == 0, "masked channel ignored"); end
    s1_mask = '1;
    repeat (40) @(negedge clk);
    // random part against a model
    s1_coinc = 12'd5; s2_coinc = 12'd9;
    for (int i = 0; i < NDDC*NCH; i++) begin m1[i] = 0; m2[i] = 0; end
    repeat (12) @(negedge clk);   // earlier windows expire
    for (int r = 0; r < 3000; r++) begin
      automatic int e1 = 0, e2 = 0, s = 0;
      s1_above = NDDC*NCH'($urandom % 8 == 0 ? $urandom : 0);
      s2_above = NDDC*NCH'($urandom % 8 == 0 ? $urandom : 0);
      s1_mask = NDDC*NCH'($urandom | $urandom);
      s2_mask = NDDC*NCH'($urandom | $urandom);
      for (int d = 0; d < NDDC; d++) begin dsum_in[d] = 17'($urandom); s += int'(dsum_in[d]); end
      for (int i = 0; i < NDDC*NCH; i++) begin
        if (s1_mask[i / NCH][i % NCH] && m1[i] != 0) e1++;
        if (s2_mask[i / NCH][i % NCH] && m2[i] != 0) e2++;
        m1[i] = s1_above[i / NCH][i % NCH] ? 5 : (m1[i] > 0 ? m1[i] - 1 : 0);
        m2[i] = s2_above[i / NCH][i % NCH] ? 9 : (m2[i] > 0 ? m2[i] - 1 : 0);
      end
      @(posedge clk); #1;
      check(int'(mult_s1) == e1, $sformatf("S1 multiplicity %0d vs %0d", mult_s1, e1));
      check(int'(mult_s2) == e2, $sformatf("S2 multiplicity %0d vs %0d", mult_s2, e2));
      check(int'(dsum) == (s >> 2), "digital sum");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
