// data_sparsifier -- Data Sparsifier: coincidence and multiplicity for up to
// eight digitizers, and the second stage of the digital sum.
//
// Each digitizer reports, every sample, which of its channels have an S1 or
// S2 filter value above threshold.  Whenever a channel is above threshold it
// contributes to the multiplicity for the next C samples, C being the
// coincidence window (configured separately for S1 and S2, up to 2^CW-1
// samples).  Each channel therefore has a counter that is reloaded with C
// while the channel is above threshold and counts down otherwise; the
// multiplicity is the number of selected channels (mask) whose counter is
// non-zero.  The masks select the channels that take part, e.g. only the top
// TPC array for the S2 trigger.
// Digital sum: the 17-bit sums of the digitizers are added and the two least
// significant bits dropped, giving the 18-bit word the paper sends on to the
// Data Sparsifier Master.
// Timing: a channel above threshold in cycle t counts in mult_* from cycle t+2
// to t+C+1 (two registers); the sum has one cycle of latency.
module data_sparsifier
  import fadr_pkg::*;
#(
  parameter int unsigned NDDC = 8,
  parameter int unsigned NCH  = 32,
  parameter int unsigned CW   = 12,
  parameter int unsigned MW   = $clog2(NDDC*NCH + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NDDC-1:0][NCH-1:0]  s1_above,
  input  logic [NDDC-1:0][NCH-1:0]  s2_above,
  input  logic [NDDC-1:0][NCH-1:0]  s1_mask,
  input  logic [NDDC-1:0][NCH-1:0]  s2_mask,
  input  logic [CW-1:0]             s1_coinc,
  input  logic [CW-1:0]             s2_coinc,
  input  logic [NDDC-1:0][16:0]     dsum_in,
  output logic [MW-1:0]             mult_s1,
  output logic [MW-1:0]             mult_s2,
  output logic [17:0]               dsum
);
  logic [CW-1:0] c1 [NDDC*NCH];
  logic [CW-1:0] c2 [NDDC*NCH];

  // multiplicity: unmasked channels whose window is open
  logic [MW-1:0] m1, m2;
  always_comb begin
    m1 = '0; m2 = '0;
    for (int d = 0; d < NDDC; d++)
      for (int c = 0; c < NCH; c++) begin
        if (s1_mask[d][c] && c1[d*NCH + c] != '0) m1 = m1 + 1'b1;
        if (s2_mask[d][c] && c2[d*NCH + c] != '0) m2 = m2 + 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < NDDC*NCH; i++) begin c1[i] <= '0; c2[i] <= '0; end
      mult_s1 <= '0; mult_s2 <= '0;
    end else begin
      for (int d = 0; d < NDDC; d++)
        for (int c = 0; c < NCH; c++) begin
          if (s1_above[d][c])                c1[d*NCH + c] <= s1_coinc;
          else if (c1[d*NCH + c] != '0)      c1[d*NCH + c] <= c1[d*NCH + c] - 1'b1;
          if (s2_above[d][c])                c2[d*NCH + c] <= s2_coinc;
          else if (c2[d*NCH + c] != '0)      c2[d*NCH + c] <= c2[d*NCH + c] - 1'b1;
        end
      mult_s1 <= m1;
      mult_s2 <= m2;
    end

  logic [19:0] s;
  always_comb begin
    s = '0;
    for (int d = 0; d < NDDC; d++) s = s + 20'(dsum_in[d]);
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) dsum <= '0;
    else        dsum <= s[19:2];
endmodule
