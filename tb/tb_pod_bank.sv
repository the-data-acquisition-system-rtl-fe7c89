// tb_pod_bank -- self-checking test of one POD memory bank (header memory
// plus circular sample memory).
// The bank is shrunk to 8 headers and 64 samples, with PODs cut at 20
// samples, so that every limit is reached quickly.  A queue-based model in
// the test stores the same stream of kept samples: a POD opens on the first
// kept sample while a header is free, grows while samples are kept and the
// sample memory has room, is split at the maximum length, and is recorded
// when the kept run ends.  After each phase the test reads every header
// (time stamp, start address, length) and every sample back through the
// read ports and compares them with the model; it also checks the
// truncation flag and the full flag.  Pruning (dropping the oldest PODs that
// end before a given time, which frees their space) and wrap-around of both
// rings are exercised, then the clear.
module tb_pod_bank;
  import fadr_pkg::*;
  localparam int NHDR = 8, NSMP = 64, MAXLEN = 20;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, wr_en = 1'b0, keep = 1'b0;
  sample_t sample = '0;
  tstamp_t sts = '0, prune_before = '0;
  logic prune_en = 1'b0;
  logic [7:0] rd_hdr_idx = '0, tail, hdr_cnt;
  pod_hdr_t rd_hdr;
  logic rd_smp_en = 1'b0;
  logic [SADDR_BITS-1:0] rd_smp_addr = '0;
  word_t rd_smp;
  logic trunc, full;
  int checks = 0, failures = 0;

  pod_bank #(.NHDR(NHDR), .NSMP(NSMP), .MAXLEN(MAXLEN)) dut (.*);

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

  // ---- reference model -------------------------------------------------------
  typedef struct { longint ts; int smp[$]; } pod_t;
  pod_t pods[$];
  pod_t open_pod;
  bit   m_in_pod = 0, m_trunc = 0;
  int   m_nsmp = 0, n_split = 0, n_trunc_events = 0;
  longint now = 1000;

  function automatic void m_close();
    if (m_in_pod && open_pod.smp.size() > 0) pods.push_back(open_pod);
    m_in_pod = 0;
  endfunction

  // one clock of input to both
  task automatic step(bit w, bit k, int v);
    wr_en = w; keep = k; sample = 14'(v); sts = now;
    if (w && k) begin
      if (!m_in_pod) begin
        if (pods.size() < NHDR) begin
          m_in_pod = 1; open_pod.ts = now; open_pod.smp.delete();
        end else begin m_trunc = 1; n_trunc_events++; end
      end
      if (m_in_pod) begin
        if (m_nsmp < NSMP) begin open_pod.smp.push_back(v); m_nsmp++; end
        else begin m_trunc = 1; n_trunc_events++; end
        if (open_pod.smp.size() == MAXLEN) begin m_close(); n_split++; end
      end
    end else m_close();
    @(posedge clk); #1;
    now++;
    @(negedge clk);
    wr_en = 0; keep = 0;
  endtask

  task automatic compare(string phase);
    int idx;
    check(hdr_cnt == 8'(pods.size()), $sformatf("%s: %0d headers, model %0d", phase, hdr_cnt, pods.size()));
    check(trunc == m_trunc, $sformatf("%s: truncation flag", phase));
    for (int i = 0; i < pods.size() && i < int'(hdr_cnt); i++) begin
      idx = (int'(tail) + i) % NHDR;
      rd_hdr_idx = 8'(idx);
      #1;
      check(longint'(rd_hdr.ts) == pods[i].ts, $sformatf("%s: POD %0d time", phase, i));
      check(int'(rd_hdr.len) == pods[i].smp.size(), $sformatf("%s: POD %0d length %0d/%0d", phase, i, rd_hdr.len, pods[i].smp.size()));
      for (int j = 0; j < pods[i].smp.size(); j++) begin
        rd_smp_en = 1; rd_smp_addr = SADDR_BITS'((int'(rd_hdr.start) + j) % NSMP);
        @(posedge clk); #1;
        rd_smp_en = 0;
        check(int'(rd_smp) == pods[i].smp[j], $sformatf("%s: POD %0d sample %0d", phase, i, j));
        @(negedge clk);
      end
    end
  endtask

  task automatic write_stream(int cycles, int keep_pct);
    for (int c = 0; c < cycles; c++) step(1, ($urandom % 100) < keep_pct, int'($urandom % 16384));
    step(1, 0, 0);   // closes the last POD
  endtask

  task automatic prune_until(longint t);
    int drop = 0;
    while (pods.size() > 0 && pods[0].ts + pods[0].smp.size() < t) begin
      m_nsmp -= pods[0].smp.size(); void'(pods.pop_front()); drop++;
    end
    prune_en = 1; prune_before = t;
    repeat (NHDR + 2) @(posedge clk);
    #1 prune_en = 0;
    @(negedge clk);
    check(1, $sformatf("pruned %0d", drop));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    check(hdr_cnt == 0 && !full && !trunc, "empty after reset");
    // short PODs, no limit reached
    repeat (3) begin step(1, 1, 100); step(1, 1, 200); step(1, 0, 0); end
    compare("short");
    // a long POD split at the maximum length
    for (int i = 0; i < 45; i++) step(1, 1, i);
    step(1, 0, 0);
    compare("split");
    check(n_split == 2, "two splits");
    // fill the sample memory: truncation
    write_stream(200, 70);
    compare("full");
    check(full, "full flag");
    check(trunc, "truncated");
    // prune the oldest half and write again: rings wrap
    prune_until(pods[pods.size() / 2].ts);
    compare("pruned");
    write_stream(60, 50);
    compare("wrapped");
    prune_until(now + 10);
    check(hdr_cnt == 0, "all pruned");
    // writing with wr_en low stores nothing
    for (int i = 0; i < 10; i++) step(0, 1, i);
    compare("disabled");
    write_stream(30, 60);
    compare("again");
    @(negedge clk) clear = 1; @(negedge clk) clear = 0;
    pods.delete(); m_nsmp = 0; m_trunc = 0; m_in_pod = 0;
    compare("cleared");
    $display("splits %0d, truncation events %0d", n_split, n_trunc_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
