// s2_filter -- the S2 trigger filter of one digitizer channel.
//
// Implements the paper's S2 filter: with side lobes of M samples and a central
// lobe four times wider (4M), the output at time t is
//     F = 2 * sum(a[-6M .. -5M-1]) - sum(a[-5M .. -M-1]) + 2 * sum(a[-M .. -1])
// so the total window is 6M samples, 1.5 times the central lobe.  The narrow
// side lobes keep the filter cheap while still subtracting the baseline.  The
// central lobe may be up to 512 samples (M up to MMAX = 128).
// `above` is high while F exceeds `thr`.  Timing as for the S1 filter: one
// cycle of latency, outputs low until the 6M-sample window has filled.
module s2_filter
  import fadr_pkg::*;
#(
  parameter int unsigned MMAX = 128,
  parameter int unsigned SW   = 26
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  sample_t               x,
  input  logic [7:0]            m,        // side lobe width, 1..MMAX
  input  logic signed [SW-1:0]  thr,
  output logic signed [SW+1:0]  f,
  output logic                  above
);
  logic signed [SW-1:0] s_new, s_mid, s_old;
  logic [9:0]           m4;
  logic                 primed;

  assign m4 = {m, 2'b00};

  three_lobe_sums #(.MAXD(6*MMAX), .LW(10), .SW(SW)) u_sums (
    .clk, .rst_n, .x,
    .len_new({2'b00, m}), .len_mid(m4), .len_old({2'b00, m}),
    .sum_new(s_new), .sum_mid(s_mid), .sum_old(s_old), .primed
  );

  logic signed [SW+1:0] fv;
  assign fv    = ((SW+2)'(s_old) <<< 1) - (SW+2)'(s_mid) + ((SW+2)'(s_new) <<< 1);
  assign f     = primed ? fv : '0;
  assign above = primed && (fv > (SW+2)'(thr));
endmodule
