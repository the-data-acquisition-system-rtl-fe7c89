// tb_pod_buffer -- self-checking test of the double-buffered POD memory.
// Banks are shrunk to 8 headers and 64 samples.  PODs of known length are
// written at known times while the filling bank continuously drops PODs
// that end before a sliding "pre-event" limit; the test keeps a model of the
// PODs the bank must still hold (same drop rule: at most one POD per clock,
// only PODs already recorded) and, after an event close, reads the finished
// bank back through the read port and compares headers and samples.
// Scenarios: close while the other bank is free (acquisition continues in
// the other bank, live stays high), close while the other bank still waits
// for readout (live drops: dead time), release of a bank (live returns the
// next clock), and overflow of a bank (truncation flag, end time = the
// moment the bank became full).
module tb_pod_buffer;
  import fadr_pkg::*;
  localparam int NHDR = 8, NSMP = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  tstamp_t now = '0, sts = '0, prune_before = '0;
  logic keep = 1'b0, event_close = 1'b0, release_i = 1'b0;
  sample_t sample = '0;
  logic live, rd_bank, rd_ready, rd_trunc;
  tstamp_t rd_start_time, rd_end_time;
  logic [7:0] rd_tail, rd_cnt, rd_hdr_idx = '0;
  pod_hdr_t rd_hdr;
  logic rd_smp_en = 1'b0;
  logic [SADDR_BITS-1:0] rd_smp_addr = '0;
  word_t rd_smp;
  int checks = 0, failures = 0;
  int n_dead = 0, n_swap = 0, n_full = 0;

  pod_buffer #(.NHDR(NHDR), .NSMP(NSMP)) dut (.*);

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

  typedef struct { longint ts; int smp[$]; } pod_t;
  pod_t pods[$];          // model of the filling bank
  pod_t exp_bank[2][$];   // frozen contents of finished banks
  longint exp_start[2], exp_end[2];
  int fill_bank = 0;
  longint t = 0;
  int window = 40;

  // one clock: keep flag and sample in, model updated like the bank
  task automatic tick(bit k);
    bit closing;
    keep = k; sample = 14'(t % 1000); sts = t; now = t;
    prune_before = (t > window) ? t - window : 0;
    // model: prune first (sees only recorded PODs), then record
    if (live && pods.size() > 0 && pods[0].ts + pods[0].smp.size() < longint'(prune_before))
      void'(pods.pop_front());
    @(posedge clk); #1;
    t++;
    @(negedge clk);
  endtask

  task automatic pod(int len, int gap);
    pod_t p;
    p.ts = t;
    for (int i = 0; i < len; i++) begin p.smp.push_back(int'(t % 1000)); tick(1); end
    pods.push_back(p);
    repeat (gap) tick(0);
  endtask

  task automatic close_event();
    event_close = 1;
    exp_end[fill_bank] = t;
    tick(0);
    event_close = 0;
  endtask

  task automatic read_bank(int b, string what, bit trunc_exp);
    check(rd_ready && rd_bank == 1'(b), $sformatf("%s: bank %0d ready", what, b));
    check(rd_trunc == trunc_exp, $sformatf("%s: truncation flag", what));
    check(rd_cnt == 8'(exp_bank[b].size()), $sformatf("%s: %0d PODs, model %0d", what, rd_cnt, exp_bank[b].size()));
    check(longint'(rd_end_time) == exp_end[b], $sformatf("%s: end time %0d vs %0d", what, rd_end_time, exp_end[b]));
    check(longint'(rd_start_time) == exp_start[b], $sformatf("%s: start time %0d vs %0d", what, rd_start_time, exp_start[b]));
    for (int i = 0; i < exp_bank[b].size() && i < int'(rd_cnt); i++) begin
      rd_hdr_idx = 8'((int'(rd_tail) + i) % NHDR);
      #1;
      check(longint'(rd_hdr.ts) == exp_bank[b][i].ts, $sformatf("%s: POD %0d time %0d vs %0d", what, i, rd_hdr.ts, exp_bank[b][i].ts));
      check(int'(rd_hdr.len) == exp_bank[b][i].smp.size(), $sformatf("%s: POD %0d length %0d vs %0d", what, i, rd_hdr.len, exp_bank[b][i].smp.size()));
      for (int j = 0; j < int'(rd_hdr.len); j++) begin
        rd_smp_en = 1; rd_smp_addr = SADDR_BITS'((int'(rd_hdr.start) + j) % NSMP);
        @(posedge clk); #1 rd_smp_en = 0;
        check(int'(rd_smp) == exp_bank[b][i].smp[j], $sformatf("%s: POD %0d sample %0d", what, i, j));
        @(negedge clk);
      end
    end
  endtask

  task automatic freeze_and_swap();
    exp_bank[fill_bank] = pods;
    pods.delete();
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(live && !rd_ready, "live and nothing to read after reset");
    exp_start[0] = 0;
    // ---- event 1: bank 0 closes, bank 1 takes over -------------------------
    for (int i = 0; i < 12; i++) pod(2 + $urandom % 5, 3 + $urandom % 6);
    freeze_and_swap();
    close_event();
    check(live, "still live after the first close"); n_swap++;
    fill_bank = 1; exp_start[1] = t - 1;
    // ---- event 2 while bank 0 still waits: dead time -------------------------
    for (int i = 0; i < 10; i++) pod(2 + $urandom % 5, 3 + $urandom % 6);
    freeze_and_swap();
    close_event();
    check(!live, "dead while both banks hold events"); n_dead++;
    for (int i = 0; i < 3; i++) pod(3, 3);   // lost: nothing is filling
    pods.delete();
    check(!live, "still dead");
    read_bank(0, "event 1", 0);
    release_i = 1; tick(0); release_i = 0;
    check(live, "live again after the release");
    fill_bank = 0; exp_start[0] = t - 1;
    read_bank(1, "event 2", 0);
    release_i = 1; tick(0); release_i = 0;
    check(!rd_ready, "nothing to read after both releases");
    // ---- event 3: overflow of bank 0 (no pruning) ---------------------------
    window = 1_000_000;
    begin
      automatic longint t_full = -1;
      automatic int stored = 0;
      for (int i = 0; i < 12; i++) begin
        automatic pod_t p;
        p.ts = t;
        for (int j = 0; j < 9; j++) begin
          if (stored < NSMP) begin p.smp.push_back(int'(t % 1000)); stored++; end
          else if (t_full < 0) t_full = t;
          tick(1);
        end
        if (p.smp.size() > 0 && pods.size() < NHDR) pods.push_back(p);
        tick(0); tick(0);
      end
      freeze_and_swap();
      close_event();
      exp_end[0] = t_full;
      n_full++;
    end
    read_bank(0, "overflow", 1);
    $display("swaps %0d, dead periods %0d, overflows %0d", n_swap, n_dead, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
