// tb_spy_selector -- self-checking test of the two spy (monitor) outputs.
// Each output independently shows one channel's sample, the digital sum
// (upper 14 of its 17 bits) or one channel's S1 filter value (offset by 8192
// and clamped to the 14-bit range).  Random inputs and selections; each
// output is checked one clock after its inputs.
module tb_spy_selector;
  import fadr_pkg::*;
  localparam int NCH = 32, FW = S1W + 2;
  logic clk = 1'b0, rst_n = 1'b0;
  sample_t x [NCH];
  logic signed [FW-1:0] s1_f [NCH];
  logic [16:0] dsum = '0;
  spy_src_t src [2];
  logic [4:0] ch [2];
  sample_t spy [2];
  int checks = 0, failures = 0, n_clamp = 0;

  spy_selector #(.NCH(NCH), .FW(FW)) dut (.*);

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
    int e [2];
    for (int c = 0; c < NCH; c++) begin x[c] = '0; s1_f[c] = '0; end
    src[0] = SPY_CHAN; src[1] = SPY_CHAN; ch[0] = '0; ch[1] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int r = 0; r < 3000; r++) begin
      for (int c = 0; c < NCH; c++) begin
        x[c] = 14'($urandom);
        s1_f[c] = FW'(int'($urandom % 24000) - 12000);
      end
      dsum = 17'($urandom);
      for (int o = 0; o < 2; o++) begin
        int f;
        src[o] = spy_src_t'($urandom % 3);
        ch[o] = 5'($urandom);
        f = int'(s1_f[ch[o]]);
        case (src[o])
          SPY_CHAN: e[o] = int'(x[ch[o]]);
          SPY_SUM:  e[o] = int'(dsum >> 3);
          default: begin
            if (f > 8191 || f < -8192) n_clamp++;
            e[o] = (f > 8191) ? 16383 : (f < -8192) ? 0 : f + 8192;
          end
        endcase
      end
      @(posedge clk); #1;
      for (int o = 0; o < 2; o++)
        check(int'(spy[o]) == e[o], $sformatf("output %0d source %0d: %0d vs %0d", o, src[o], spy[o], e[o]));
      @(negedge clk);
    end
    check(n_clamp > 0, "clamp exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
