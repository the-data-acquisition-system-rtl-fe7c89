// ddc_digital_sum -- first stage of the digital sum, on one digitizer.
//
// Adds the samples of the selected channels (`mask`) of one digitizer.  As in
// the paper, the three least significant bits of the sum are dropped so that
// the sum travels to the Data Sparsifier as a 17-bit word: the full sum is
// formed 20 bits wide and bits 19:3 are sent.  (32 samples of 14 bits need
// only 19 bits, so the top bit is always zero; the 17-bit width is kept to
// match the paper.)  One cycle of latency.
module ddc_digital_sum
  import fadr_pkg::*;
#(
  parameter int unsigned NCH = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  sample_t        x [NCH],
  input  logic [NCH-1:0] mask,
  output logic [16:0]    dsum
);
  logic [19:0] s;
  always_comb begin
    s = '0;
    for (int c = 0; c < NCH; c++)
      if (mask[c]) s = s + 20'(x[c]);
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dsum <= '0;
    else        dsum <= s[19:3];
endmodule
