// spy_selector -- chooses what the two spy (monitor DAC) outputs show.
//
// Each digitizer has two 14-bit, 100 MHz DAC outputs used for diagnostics and
// for the DAQScope: an individual channel, the digitizer's digital sum, or a
// digital filter output can be sent to each.  The paper says "any signal
// internal to the FPGA" can be shown; this design offers the three it names.
// Scaling is this design's choice: the 17-bit sum shows its top 14 bits; the
// signed S1 filter value is clamped to +-8191 and offset to mid-scale.
// The DAC itself is outside the FPGA.  One cycle of latency.
module spy_selector
  import fadr_pkg::*;
#(
  parameter int unsigned NCH = 32,
  parameter int unsigned FW  = S1W + 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  sample_t                     x    [NCH],
  input  logic signed [FW-1:0]        s1_f [NCH],
  input  logic [16:0]                 dsum,
  input  spy_src_t                    src  [2],
  input  logic [$clog2(NCH)-1:0]      ch   [2],
  output sample_t                     spy  [2]
);
  function automatic sample_t clamp_f(logic signed [FW-1:0] f);
    if (f > FW'(8191))       return 14'h3FFF;
    else if (f < -FW'(8192)) return 14'h0000;
    else                     return sample_t'(f + FW'(8192));
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      spy[0] <= '0; spy[1] <= '0;
    end else begin
      for (int o = 0; o < 2; o++)
        unique case (src[o])
          SPY_CHAN: spy[o] <= x[ch[o]];
          SPY_SUM:  spy[o] <= dsum[16:3];
          SPY_S1:   spy[o] <= clamp_f(s1_f[ch[o]]);
          default:  spy[o] <= '0;
        endcase
    end
endmodule
