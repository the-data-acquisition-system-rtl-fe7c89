// tb_ddc_digital_sum -- self-checking test of a digitizer's digital sum.
// Random 14-bit samples on 32 channels and a random channel mask; the test
// adds the masked samples itself, keeps bits 19..3 of the 20-bit sum and
// checks the registered output one clock later.  All-ones samples on all
// channels check that the 20-bit sum cannot overflow.
module tb_ddc_digital_sum;
  import fadr_pkg::*;
  localparam int NCH = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  sample_t x [NCH];
  logic [NCH-1:0] mask = '0;
  logic [16:0] dsum;
  int checks = 0, failures = 0;

  ddc_digital_sum #(.NCH(NCH)) dut (.*);

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
    int s;
    for (int c = 0; c < NCH; c++) x[c] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int r = 0; r < 2000; r++) begin
      s = 0;
      mask = (r < 10) ? '1 : NCH'($urandom);
      for (int c = 0; c < NCH; c++) begin
        x[c] = (r < 10) ? 14'h3FFF : 14'($urandom);
        if (mask[c]) s += int'(x[c]);
      end
      @(posedge clk); #1;
      check(dsum == 17'(s >> 3), $sformatf("sum %0d vs %0d", dsum, s >> 3));
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
