// tb_data_extractor -- self-checking test of a Data Extractor (3 digitizer
// inputs, packets cut at 20 payload words instead of 4400).
// Behavioural digitizer sources in the test hold one word stream per event
// (random length, last flag on its final word) and offer it with random
// gaps; the packet sink applies random back-pressure.  For every event the
// test reassembles the packets and checks: the event number in the first
// two header words, the packet sequence number, that no payload exceeds the
// packet limit, the word count and end-of-event flag of the trailer, the
// CRC-32 of each payload (computed here bit by bit), and that the payloads
// joined together equal the three digitizer streams in order.  Three event
// requests with none yet served must set the overflow flag.
module tb_data_extractor;
  import fadr_pkg::*;
  localparam int NDDC = 3, PKT = 20;
  logic clk = 1'b0, rst_n = 1'b0;
  logic extract = 1'b0;
  logic [31:0] event_id = '0;
  rd_word_t in [NDDC];
  logic in_ready [NDDC];
  rd_word_t out;
  logic out_ready = 1'b0, overflow;
  int checks = 0, failures = 0;

  data_extractor #(.NDDC(NDDC), .PKT_WORDS(PKT)) dut (.*);

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

  // ---- digitizer sources ---------------------------------------------------
  word_t src_q [NDDC][$];      // words of the current event, per digitizer
  int    gap_pct = 30;
  bit    offer [NDDC];
  always @(negedge clk) for (int i = 0; i < NDDC; i++) offer[i] = ($urandom % 100) >= gap_pct;
  always_comb for (int i = 0; i < NDDC; i++) begin
    in[i].valid = offer[i] && src_q[i].size() > 0;
    in[i].last  = src_q[i].size() == 1;
    in[i].data  = (src_q[i].size() > 0) ? src_q[i][0] : '0;
  end
  always @(posedge clk) for (int i = 0; i < NDDC; i++)
    if (in[i].valid && in_ready[i]) void'(src_q[i].pop_front());

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

  // ---- packet sink ---------------------------------------------------------------
  word_t pkt[$];
  int    stall_pct = 30;
  always @(negedge clk) out_ready = ($urandom % 100) >= stall_pct;

  task automatic get_packet(output bit ok);
    pkt.delete(); ok = 0;
    for (int i = 0; i < 5000 && !ok; i++) begin
      @(posedge clk);
      if (out.valid && out_ready) begin pkt.push_back(out.data); if (out.last) ok = 1; end
    end
  endtask

  int n_packets = 0, n_split = 0;

  task automatic run_event(logic [31:0] id, int max_len);
    word_t expect_all[$], got_all[$];
    bit ok, done = 0;
    int seq = 0;
    for (int i = 0; i < NDDC; i++) begin
      int n = 2 + $urandom % max_len;
      for (int j = 0; j < n; j++) begin
        word_t w = 16'($urandom);
        src_q[i].push_back(w); expect_all.push_back(w);
      end
    end
    @(negedge clk) extract = 1; event_id = id;
    @(negedge clk) extract = 0;
    while (!done) begin
      word_t pay[$];
      get_packet(ok);
      check(ok && pkt.size() >= 6, "packet received");
      if (!ok || pkt.size() < 6) return;
      n_packets++;
      check({pkt[0], pkt[1]} == id, $sformatf("event number %h", {pkt[0], pkt[1]}));
      check(int'(pkt[2]) == seq, $sformatf("sequence %0d vs %0d", pkt[2], seq));
      pay = pkt[3 : pkt.size() - 4];
      check(pay.size() <= PKT, $sformatf("payload %0d words", pay.size()));
      check(int'(pkt[pkt.size()-3][14:0]) == pay.size(), "trailer word count");
      check({pkt[pkt.size()-2], pkt[pkt.size()-1]} == crc_ref(pay), "packet CRC");
      done = pkt[pkt.size()-3][15];
      foreach (pay[i]) got_all.push_back(pay[i]);
      if (!done) n_split++;
      seq++;
    end
    check(got_all == expect_all, $sformatf("event %0d payload (%0d vs %0d words)", id, got_all.size(), expect_all.size()));
  endtask

  initial begin
    for (int i = 0; i < NDDC; i++) offer[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int e = 1; e <= 15; e++) run_event(32'h0001_0000 + 32'(e), (e % 3 == 0) ? 40 : 8);
    check(n_split > 3, $sformatf("%0d events split over packets", n_split));
    // full speed: one word per clock
    gap_pct = 0; stall_pct = 0;
    begin
      automatic int t0, t1;
      for (int i = 0; i < NDDC; i++) repeat (6) src_q[i].push_back(16'h1234);
      repeat (3) @(negedge clk);
      @(negedge clk) extract = 1; event_id = 32'hABCD; t0 = $time;
      @(negedge clk) extract = 0;
      wait (out.valid && out.last && out_ready);
      t1 = $time;
      // the request is queued on one clock edge, the packet leaves idle on
      // the next, then 3 header + 18 payload + 3 trailer words follow, one
      // per clock: the last word is on the output 24 clocks after the request
      check((t1 - t0) / 10 == 24, $sformatf("%0d clocks for an 18-word event", (t1 - t0) / 10));
      @(negedge clk);
    end
    // overflow: sources silent, three requests
    check(!overflow, "no overflow yet");
    for (int k = 0; k < 3; k++) begin
      @(negedge clk) extract = 1; event_id = 32'(k);
      @(negedge clk) extract = 0;
    end
    repeat (3) @(negedge clk);
    check(overflow, "overflow after three waiting requests");
    $display("packets %0d, split events %0d", n_packets, n_split);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
