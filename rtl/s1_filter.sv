// s1_filter -- the S1 trigger filter of one digitizer channel.
//
// Implements the paper's S1 filter: with a central lobe of N samples, the
// output at time t is
//     F = 1/2 * sum(a[-3N .. -2N-1]) - sum(a[-2N .. -N-1]) + 1/2 * sum(a[-N .. -1])
// i.e. two side lobes of weight +1/2 around a central lobe of weight -1, 3N
// samples in total.  The lobes integrate the pulse and subtract the local
// baseline, so a negative-going photomultiplier pulse gives a positive F
// proportional to its area whatever the channel's DC offset.
// N is a run-time setting from 1 to NMAX (16 in the paper).  The weights of
// 1/2 are handled exactly by comparing 2F with 2*threshold; `f` is F rounded
// down to an integer.  `above` is high while F exceeds `thr`.
// Timing: `f` and `above` in a cycle are computed from the samples that
// arrived in earlier cycles (one cycle of latency); they are forced low until
// the 3N-sample window has filled after reset.
module s1_filter
  import fadr_pkg::*;
#(
  parameter int unsigned NMAX = 16,
  parameter int unsigned SW   = 24
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  sample_t               x,
  input  logic [4:0]            n,        // central lobe width, 1..NMAX
  input  logic signed [SW-1:0]  thr,      // threshold on F, in ADC counts
  output logic signed [SW+1:0]  f,
  output logic                  above
);
  logic signed [SW-1:0] s_new, s_mid, s_old;
  logic signed [SW+1:0] f2;
  logic                 primed;

  three_lobe_sums #(.MAXD(3*NMAX), .LW(5), .SW(SW)) u_sums (
    .clk, .rst_n, .x,
    .len_new(n), .len_mid(n), .len_old(n),
    .sum_new(s_new), .sum_mid(s_mid), .sum_old(s_old), .primed
  );

  assign f2    = (SW+2)'(s_old) + (SW+2)'(s_new) - ((SW+2)'(s_mid) <<< 1);
  logic signed [SW+1:0] half;
  assign half  = f2 >>> 1;             // arithmetic: f2 is signed
  assign f     = primed ? half : '0;
  assign above = primed && (f2 > ((SW+2)'(thr) <<< 1));
endmodule
