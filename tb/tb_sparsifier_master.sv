// tb_sparsifier_master -- self-checking test of the Data Sparsifier Master
// trigger decision.
// Directed steps: a run start waits for the next GPS pulse-per-second edge,
// then clears the time stamp once and starts the run; a multiplicity reaching
// the required value of a chain triggers once (on the rising edge of the
// condition) with that chain's S1 or S2 source bit and the current time; a
// required value of zero disables a trigger; external inputs pass through a
// two-flop synchronizer and their enable bits; deuterium-deuterium and LED
// pulses share the calibration source; a downscale factor N passes one of
// every N triggers; a trigger arriving while the DAQ Master is busy is
// flagged as an extra trigger instead; a run stop ends all triggering.  The
// digital sums of the top and bottom arrays must add up, and the trigger
// rate counters (period shortened to 400 clocks) must count the conditions.
module tb_sparsifier_master;
  import fadr_pkg::*;
  localparam int MW = 11;
  logic clk = 1'b0, rst_n = 1'b0;
  tstamp_t now = '0;
  logic [MW-1:0] mult_s1 [N_CHAINS], mult_s2 [N_CHAINS], req_s1 [N_CHAINS], req_s2 [N_CHAINS];
  logic ext_random = 0, ext_pps = 0, ext_dd = 0, ext_led = 0, ext_aux = 0;
  logic [N_EXT-1:0] ext_en = '1;
  logic [15:0] downscale [N_SOURCES];
  logic run_start = 0, run_stop = 0, running, ts_clear, dm_ready = 1;
  logic trig, extra_trig;
  tstamp_t trig_ts;
  logic [N_SOURCES-1:0] trig_src, extra_src;
  logic [17:0] dsum_top = '0, dsum_bot = '0;
  logic [18:0] dsum_total;
  logic [31:0] rate [N_SOURCES];
  int checks = 0, failures = 0;

  sparsifier_master #(.MW(MW), .RATE_PERIOD(400)) dut (.*);

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

  // trigger monitor
  int n_trig = 0, n_extra = 0, n_clear = 0;
  logic [N_SOURCES-1:0] last_src;
  longint last_ts;
  always @(posedge clk) begin
    if (trig) begin n_trig++; last_src = trig_src; last_ts = trig_ts; end
    if (extra_trig) n_extra++;
    if (ts_clear) n_clear++;
  end

  task automatic wait_clk(int n); repeat (n) @(negedge clk); endtask

  task automatic pulse(ref logic s, input int len = 3);
    s = 1; wait_clk(len); s = 0; wait_clk(6);
  endtask

  task automatic expect_trig(int n0, int n, int src, string what);
    check(n_trig - n0 == n, $sformatf("%s: %0d triggers, expected %0d", what, n_trig - n0, n));
    if (n > 0 && src >= 0) check(last_src[src], $sformatf("%s: source bit %0d", what, src));
  endtask

  initial begin
    int n0;
    for (int c = 0; c < N_CHAINS; c++) begin
      mult_s1[c] = '0; mult_s2[c] = '0; req_s1[c] = '0; req_s2[c] = '0;
    end
    for (int i = 0; i < N_SOURCES; i++) downscale[i] = 16'd1;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // ---- run start aligned to the PPS ----------------------------------
    run_start = 1; wait_clk(1); run_start = 0;
    wait_clk(20);
    check(!running && n_clear == 0, "run waits for the PPS");
    ext_pps = 1; wait_clk(2);
    check(!running, "PPS still in the synchronizer");
    wait_clk(2);
    check(running && n_clear == 1, "run started on the PPS edge with one time-stamp clear");
    wait_clk(10); ext_pps = 0; wait_clk(5);
    check(n_trig == 0, "the PPS edge that starts the run is not a trigger");
    n0 = n_trig; pulse(ext_pps); expect_trig(n0, 1, SRC_GPS, "later PPS edges are triggers");
    // ---- multiplicity triggers ------------------------------------------
    req_s2[0] = 11'd6; req_s1[3] = 11'd15;      // first science run settings
    n0 = n_trig;
    mult_s2[0] = 11'd5; wait_clk(5);
    expect_trig(n0, 0, -1, "TPC S2 below the required multiplicity");
    mult_s2[0] = 11'd6; wait_clk(1);
    begin
      automatic longint t_cond = now;
      wait_clk(30);
      expect_trig(n0, 1, SRC_S2 + 0, "TPC S2 multiplicity");
      check(last_ts >= t_cond - 2 && last_ts <= t_cond + 1, "trigger time");
    end
    mult_s2[0] = '0;
    n0 = n_trig;
    mult_s1[3] = 11'd20; wait_clk(3); mult_s1[3] = '0; wait_clk(3);
    expect_trig(n0, 1, SRC_S1 + 3, "OD S1 multiplicity");
    n0 = n_trig;
    mult_s1[1] = 11'd100; wait_clk(3); mult_s1[1] = '0; wait_clk(3);
    expect_trig(n0, 0, -1, "disabled trigger (required value 0)");
    // ---- external triggers ------------------------------------------------
    n0 = n_trig; pulse(ext_random); expect_trig(n0, 1, SRC_RAND, "random trigger");
    n0 = n_trig; pulse(ext_dd);     expect_trig(n0, 1, SRC_CAL, "DD calibration");
    n0 = n_trig; pulse(ext_led);    expect_trig(n0, 1, SRC_CAL, "LED calibration");
    n0 = n_trig; pulse(ext_aux);    expect_trig(n0, 1, SRC_AUX, "auxiliary trigger");
    ext_en[SRC_AUX - SRC_RAND] = 0;
    n0 = n_trig; pulse(ext_aux);    expect_trig(n0, 0, -1, "disabled auxiliary trigger");
    // ---- downscale --------------------------------------------------------
    downscale[SRC_RAND] = 16'd3;
    n0 = n_trig;
    repeat (9) pulse(ext_random);
    expect_trig(n0, 3, SRC_RAND, "random trigger downscaled by 3");
    // ---- busy DAQ Master: extra triggers ---------------------------------
    dm_ready = 0;
    n0 = n_trig;
    begin
      automatic int e0 = n_extra;
      pulse(ext_led);
      expect_trig(n0, 0, -1, "no trigger while busy");
      check(n_extra - e0 == 1, "extra trigger flagged while busy");
    end
    dm_ready = 1;
    // ---- digital sum ------------------------------------------------------
    for (int r = 0; r < 50; r++) begin
      dsum_top = 18'($urandom); dsum_bot = 18'($urandom);
      @(posedge clk); #1;
      check(int'(dsum_total) == int'(dsum_top) + int'(dsum_bot), "digital sum of both arrays");
      @(negedge clk);
    end
    // ---- rate counter ---------------------------------------------------------
    begin
      @(posedge dut.g_rate[SRC_CAL].u_rc.update);
      @(negedge clk);
      repeat (7) pulse(ext_dd, 2);
      @(posedge dut.g_rate[SRC_CAL].u_rc.update); #1;
      check(rate[SRC_CAL] == 32'd7, $sformatf("calibration rate %0d", rate[SRC_CAL]));
    end
    // ---- run stop -----------------------------------------------------------
    wait_clk(1);
    run_stop = 1; wait_clk(1); run_stop = 0;
    n0 = n_trig; pulse(ext_led); mult_s2[0] = 11'd50; wait_clk(5);
    expect_trig(n0, 0, -1, "no trigger after run stop");
    check(!running, "stopped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
