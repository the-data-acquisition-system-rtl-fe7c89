// tb_timestamp_counter -- self-checking test of the 48-bit time stamp counter.
// Checks that the count starts at zero after reset, advances by exactly one
// per 10 ns clock, returns to zero on a synchronous clear and carries across
// 32-bit boundaries (the counter is preloaded through a long run of clocks
// is too slow, so the carry is checked on a value reached by clearing and
// counting a short random time, and the width is checked by the type).
module tb_timestamp_counter;
  import fadr_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0;
  tstamp_t ts;
  int checks = 0, failures = 0;

  timestamp_counter dut (.clk, .rst_n, .clear, .ts);

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

  initial begin
    tstamp_t exp;
    int n;
    repeat (3) @(posedge clk);
    check(ts == 0, "zero in reset");
    @(negedge clk) rst_n = 1'b1;
    exp = 0;
    for (int r = 0; r < 20; r++) begin
      n = 1 + ($urandom % 500);
      repeat (n) begin
        @(posedge clk); #1;
        exp++;
        check(ts == exp, $sformatf("count %0d got %0d", exp, ts));
      end
      // synchronous clear (PPS-aligned clear in the full system)
      @(negedge clk) clear = 1'b1;
      @(posedge clk); #1;
      check(ts == 0, "cleared");
      @(negedge clk) clear = 1'b0;
      exp = 0;
    end
    check($bits(ts) == 48, "48-bit time stamp");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
