// tb_crc32_engine -- self-checking test of the 16-bit-per-clock CRC-32.
// Checks the standard check value (CRC-32 of the ASCII string "12345678" is
// 9AE0DAAF) and random messages against a bit-serial reference written here
// independently of the package function, plus the clear and the hold when
// the enable is low.  One word is absorbed per clock, so a message of N
// words is finished N clocks after its first word.
module tb_crc32_engine;
  import fadr_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, en = 1'b0;
  word_t data = '0;
  logic [31:0] crc;
  int checks = 0, failures = 0;

  crc32_engine dut (.clk, .rst_n, .clear, .en, .data, .crc);

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

  // bit-serial reference, LSB first, polynomial 04C11DB7 reflected
  function automatic logic [31:0] ref_crc(byte unsigned msg[$]);
    logic [31:0] c = 32'hFFFF_FFFF;
    foreach (msg[i]) begin
      for (int b = 0; b < 8; b++) begin
        logic fb = c[0] ^ msg[i][b];
        c = c >> 1;
        if (fb) c = c ^ 32'hEDB8_8320;
      end
    end
    return ~c;
  endfunction

  task automatic send(byte unsigned msg[$]);
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    for (int i = 0; i < msg.size(); i += 2) begin
      data = {msg[i], msg[i+1]};
      en   = 1'b1;
      @(negedge clk);
      en   = ($urandom % 3) == 0;   // idle clocks must not change the CRC
      data = 16'($urandom);
      if (en) begin en = 1'b0; @(negedge clk); end
    end
    en = 1'b0;
    @(negedge clk);
  endtask

  initial begin
    byte unsigned m[$];
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    m = '{8'h31, 8'h32, 8'h33, 8'h34, 8'h35, 8'h36, 8'h37, 8'h38};
    send(m);
    check(crc == 32'h9AE0_DAAF, $sformatf("check value %h", crc));
    check(ref_crc(m) == 32'h9AE0_DAAF, "reference model check value");
    for (int r = 0; r < 40; r++) begin
      automatic int n = 2 * (1 + $urandom % 40);
      m.delete();
      for (int i = 0; i < n; i++) m.push_back(8'($urandom));
      send(m);
      check(crc == ref_crc(m), $sformatf("random message %0d: %h vs %h", r, crc, ref_crc(m)));
    end
    @(negedge clk) clear = 1'b1;
    @(negedge clk) clear = 1'b0;
    check(crc == 32'h0, "cleared CRC reads zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
