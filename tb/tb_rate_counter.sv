// tb_rate_counter -- self-checking test of the periodic rate counter.
// The counter runs with a short period (PERIOD = 97 clocks instead of the
// 10 s of the real monitors) and is fed random event pulses.  The test counts
// the pulses itself and checks, at every update strobe, that the published
// count equals the number of pulses in the period just ended, that the
// strobe comes exactly PERIOD clocks after the previous one, and that the
// count saturates rather than wraps (a second instance with an 4-bit count).
module tb_rate_counter;
  localparam int unsigned PERIOD = 97;
  logic clk = 1'b0, rst_n = 1'b0, ev = 1'b0;
  logic [31:0] count;
  logic [3:0]  count_s;
  logic        update, update_s;
  int checks = 0, failures = 0;

  rate_counter #(.PERIOD(PERIOD), .CW(32)) dut (.clk, .rst_n, .event_i(ev), .count, .update);
  rate_counter #(.PERIOD(PERIOD), .CW(4))  dut_s (.clk, .rst_n, .event_i(ev), .count(count_s), .update(update_s));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (PERIOD * 40) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, in_period = 0, last_upd = -1, ref_q[$];
  int n_upd = 0;

  // stimulus and reference: one sample per clock, in step with the DUT
  always @(posedge clk) if (rst_n) begin
    if (ev) in_period++;
    cyc++;
    if (cyc % PERIOD == 0) begin ref_q.push_back(in_period); in_period = 0; end
  end

  always @(negedge clk) ev <= ($urandom % 4) == 0;

  always @(posedge clk) if (rst_n && update) begin
    int e;
    n_upd++;
    e = ref_q.size() > 0 ? ref_q.pop_front() : -1;
    check(count == e, $sformatf("count %0d expected %0d", count, e));
    check(count_s == ((e > 15) ? 15 : e), $sformatf("saturated count %0d", count_s));
    check(update_s, "both strobes together");
    if (last_upd >= 0) check(cyc - last_upd == PERIOD, $sformatf("period %0d", cyc - last_upd));
    else check(cyc == PERIOD + 1, $sformatf("first update at %0d", cyc));
    last_upd = cyc;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    repeat (PERIOD * 20 + 5) @(posedge clk);
    check(n_upd == 20, $sformatf("updates %0d", n_upd));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
