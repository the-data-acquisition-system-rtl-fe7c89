// tb_ddc_readout -- self-checking test of a digitizer's event readout
// sequencer.
// The test plays the part of four channel buffers: it holds random POD
// headers (some with zero PODs, some whose samples wrap around the end of the
// circular sample memory) and sample memories, answers header reads at once
// and sample reads one clock later, as the real banks do.  It builds the
// expected word stream itself (digitizer word; per channel a channel word,
// start and end times, POD count; per POD its time, length word and samples;
// then the CRC marker and the CRC-32 of all preceding words, computed here
// bit by bit) and compares it word by word with the output, under random
// back-pressure in some events and none in others.  With no back-pressure
// the readout must send one word per clock.  The release pulse must come
// with the last word and only then.
module tb_ddc_readout;
  import fadr_pkg::*;
  localparam int NCH = 4, NHDR = 8, NSMP = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] ddc_id = 8'h2A;
  logic ch_ready [NCH];
  tstamp_t ch_start [NCH], ch_end [NCH];
  logic ch_trunc [NCH];
  logic [7:0] ch_tail [NCH], ch_cnt [NCH];
  pod_hdr_t ch_hdr [NCH];
  word_t ch_smp [NCH];
  logic [7:0] rd_hdr_idx;
  logic rd_smp_en;
  logic [SADDR_BITS-1:0] rd_smp_addr;
  logic release_o, busy;
  rd_word_t out;
  logic out_ready = 1'b0;
  int checks = 0, failures = 0;

  ddc_readout #(.NCH(NCH), .NHDR(NHDR), .NSMP(NSMP)) dut (.*);

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

  // ---- channel buffer models ----------------------------------------------
  pod_hdr_t hmem [NCH][NHDR];
  int       smem [NCH][NSMP];
  for (genvar c = 0; c < NCH; c++) begin : g_ch
    assign ch_hdr[c] = hmem[c][rd_hdr_idx];
    always @(posedge clk) if (rd_smp_en) ch_smp[c] <= 16'(smem[c][rd_smp_addr]);
  end

  function automatic logic [31:0] crc_ref(word_t w[$]);
    logic [31:0] c = '1;
    foreach (w[i]) for (int by = 1; by >= 0; by--)
      for (int b = 0; b < 8; b++) begin
        logic fb = c[0] ^ w[i][8*by + b];
        c = c >> 1;
        if (fb) c ^= 32'hEDB8_8320;
      end
    return ~c;
  endfunction

  word_t exp_q[$];

  task automatic make_event();
    exp_q.delete();
    exp_q.push_back({4'hD, 4'h0, ddc_id});
    for (int c = 0; c < NCH; c++) begin
      int n = $urandom % 5, addr = int'($urandom % NSMP);
      ch_start[c] = {$urandom, $urandom};
      ch_end[c]   = {$urandom, $urandom};
      ch_trunc[c] = $urandom;
      ch_tail[c]  = 8'($urandom % NHDR);
      ch_cnt[c]   = 8'(n);
      exp_q.push_back({4'hC, 6'b0, ch_trunc[c], 5'(c)});
      exp_q.push_back(ch_start[c][47:32]); exp_q.push_back(ch_start[c][31:16]); exp_q.push_back(ch_start[c][15:0]);
      exp_q.push_back(ch_end[c][47:32]);   exp_q.push_back(ch_end[c][31:16]);   exp_q.push_back(ch_end[c][15:0]);
      exp_q.push_back(16'(n));
      for (int p = 0; p < n; p++) begin
        pod_hdr_t h;
        int len = 1 + $urandom % 10;
        h.ts = {$urandom, $urandom}; h.start = SADDR_BITS'(addr); h.len = PLEN_BITS'(len);
        hmem[c][(int'(ch_tail[c]) + p) % NHDR] = h;
        exp_q.push_back(h.ts[47:32]); exp_q.push_back(h.ts[31:16]); exp_q.push_back(h.ts[15:0]);
        exp_q.push_back({4'hB, 1'b0, 11'(len)});
        for (int j = 0; j < len; j++) begin
          smem[c][addr] = int'($urandom % 16384);
          exp_q.push_back(16'(smem[c][addr]));
          addr = (addr + 1) % NSMP;
        end
      end
    end
    begin
      logic [31:0] crc = crc_ref(exp_q);
      exp_q.push_back(16'hE000); exp_q.push_back(crc[31:16]); exp_q.push_back(crc[15:0]);
    end
  endtask

  task automatic run_event(int stall_pct);
    int n = 0, cycles = 0, total;
    bit done = 0;
    make_event();
    total = exp_q.size();
    for (int c = 0; c < NCH; c++) ch_ready[c] = 1;
    while (!done) begin
      out_ready = ($urandom % 100) >= stall_pct;
      @(posedge clk);
      cycles++;
      if (out.valid && out_ready) begin
        word_t e = exp_q.pop_front();
        check(out.data == e, $sformatf("word %0d: %h vs %h", n, out.data, e));
        check(out.last == (exp_q.size() == 0), $sformatf("last flag at word %0d", n));
        check(release_o == out.last, "release with the last word");
        n++;
        if (out.last) done = 1;
      end else check(!release_o, "no release without the last word");
      #1;
      if (done) for (int c = 0; c < NCH; c++) ch_ready[c] = 0;
      @(negedge clk);
      if (cycles > 10 * total + 100) begin check(0, "event not finished"); done = 1; end
    end
    check(n == total, $sformatf("%0d words sent, %0d expected", n, total));
    if (stall_pct == 0) check(cycles == total + 1, $sformatf("%0d clocks for %0d words", cycles, total));
    out_ready = 0;
    repeat (3) @(negedge clk);
    check(!busy, "idle after the event");
  endtask

  initial begin
    for (int c = 0; c < NCH; c++) begin
      ch_ready[c] = 0; ch_start[c] = '0; ch_end[c] = '0; ch_trunc[c] = 0;
      ch_tail[c] = '0; ch_cnt[c] = '0; ch_smp[c] = '0;
      for (int i = 0; i < NHDR; i++) hmem[c][i] = '0;
      for (int i = 0; i < NSMP; i++) smem[c][i] = 0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // not all channels ready: nothing happens
    ch_ready[0] = 1;
    repeat (10) @(negedge clk);
    check(!busy && !out.valid, "waits for all channels");
    ch_ready[0] = 0;
    for (int e = 0; e < 12; e++) run_event((e % 2) ? 40 : 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
