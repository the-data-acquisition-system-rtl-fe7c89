// tb_daq_master -- self-checking test of the DAQ Master event sequencer.
// Triggers arrive at random times.  The test checks that an accepted trigger
// starts an event on the next clock with the trigger's time and sources,
// that the event is closed (and its extraction requested with the next event
// number) exactly post_window clocks later, that no trigger is accepted
// during the post-event window or the following holdoff of holdoff clocks,
// that a not-live system (full buffers) or a stopped run accepts nothing,
// and that the busy, holdoff and full clock counters add up.
module tb_daq_master;
  import fadr_pkg::*;
  localparam int POST = 25, HOLD = 20;
  logic clk = 1'b0, rst_n = 1'b0;
  logic running = 1'b0, live = 1'b1, trig = 1'b0;
  win_t post_window = win_t'(POST), holdoff = win_t'(HOLD);
  tstamp_t trig_ts = '0;
  logic [N_SOURCES-1:0] trig_src = '0;
  logic ready, event_start, event_close, extract;
  tstamp_t event_time;
  logic [31:0] event_id;
  logic [N_SOURCES-1:0] event_src;
  logic [47:0] busy_cycles, hold_cycles, full_cycles;
  int checks = 0, failures = 0;

  daq_master #(.SW(N_SOURCES)) dut (.*);

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

  // model: state counted in clocks since the last accepted trigger
  int since = 1 << 30;            // clocks since event_start
  int n_events = 0, n_ignored = 0, n_dead_clocks = 0, cyc = 0;
  longint exp_time;
  logic [N_SOURCES-1:0] exp_src;

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // not running: triggers ignored
    repeat (10) begin
      trig = 1; @(posedge clk); #1;
      check(!event_start && !ready, "no events before the run starts");
      @(negedge clk);
    end
    trig = 0;
    running = 1;
    for (int c = 0; c < 4000; c++) begin
      bit acc;
      cyc++;
      trig = ($urandom % 6) == 0;
      trig_ts = {16'h0, $urandom};
      trig_src = N_SOURCES'($urandom);
      live = !(c >= 2000 && c < 2300);      // a stretch of full buffers
      #1;
      acc = (since >= POST + HOLD) && live;
      check(ready == acc, $sformatf("ready at clock %0d", c));
      if (!live && since >= POST + HOLD) n_dead_clocks++;
      if (trig && !acc) n_ignored++;
      @(posedge clk); #1;
      check(event_start == (trig && acc), $sformatf("event start at clock %0d", c));
      if (trig && acc) begin
        check(event_time == trig_ts && event_src == trig_src, "event time and sources");
        since = 0;
      end else since++;
      check(event_close == (since == POST), $sformatf("event close at clock %0d", c));
      check(extract == event_close, "extraction with the close");
      if (event_close) begin
        n_events++;
        check(event_id == 32'(n_events), $sformatf("event number %0d", event_id));
      end
      @(negedge clk);
    end
    check(n_events > 50 && n_ignored > 100 && n_dead_clocks > 100,
          $sformatf("%0d events, %0d triggers refused, %0d dead clocks", n_events, n_ignored, n_dead_clocks));
    check(busy_cycles + hold_cycles + full_cycles > 0, "counters run");
    check(int'(full_cycles) == n_dead_clocks, $sformatf("full clocks %0d vs %0d", full_cycles, n_dead_clocks));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
