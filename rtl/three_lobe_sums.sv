// three_lobe_sums -- running sums over three adjacent windows of a waveform.
//
// Both trigger filters of the digitizer are box-car FIR filters made of three
// adjacent lobes: for the current time t the newest lobe covers the last
// `len_new` samples, the middle lobe the `len_mid` samples before those and the
// oldest lobe the `len_old` samples before those.  Instead of an adder tree
// over the whole window (the S2 window is up to 768 samples long), each lobe
// sum is kept as a running sum: the sample entering a lobe is added and the
// sample leaving it is subtracted.  The history is a circular RAM of MAXD
// samples with three read taps at delays len_new, len_new+len_mid and
// len_new+len_mid+len_old.
// Timing: one sample per clock; the sums registered at the end of the cycle in
// which sample a(t) arrives cover a(t) and older samples, so the filter value
// seen in the next cycle is built from "the previous samples" as in the paper.
// Samples older than the first one after reset count as zero, and `primed`
// rises once the whole window holds real samples.  The lobe lengths are
// configuration, to be held constant during a run; changing them needs a reset.
module three_lobe_sums
  import fadr_pkg::*;
#(
  parameter int unsigned MAXD = 48,    // longest total window
  parameter int unsigned LW   = 8,     // width of the lobe length inputs
  parameter int unsigned SW   = 24     // width of the signed lobe sums
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  sample_t              x,
  input  logic [LW-1:0]        len_new,
  input  logic [LW-1:0]        len_mid,
  input  logic [LW-1:0]        len_old,
  output logic signed [SW-1:0] sum_new,
  output logic signed [SW-1:0] sum_mid,
  output logic signed [SW-1:0] sum_old,
  output logic                 primed
);
  localparam int unsigned AW = $clog2(MAXD + 1);

  sample_t        hist [MAXD];
  logic [AW-1:0]  wp;           // next write position
  logic [AW-1:0]  fill;         // samples written, saturating at MAXD
  logic [AW:0]    d1, d2, d3;   // tap delays
  sample_t        t1, t2, t3;   // samples leaving the lobes

  assign d1 = (AW+1)'(len_new);
  assign d2 = d1 + (AW+1)'(len_mid);
  assign d3 = d2 + (AW+1)'(len_old);

  // Sample written d steps ago, or zero if there is none yet.
  function automatic sample_t tap(logic [AW:0] d);
    logic [AW:0] idx;
    if (d == '0 || d > (AW+1)'(fill)) return '0;
    idx = (AW+1)'(wp) + (AW+1)'(MAXD) - d;
    if (idx >= (AW+1)'(MAXD)) idx = idx - (AW+1)'(MAXD);
    return hist[idx[AW-1:0]];
  endfunction

  always_comb begin
    t1 = tap(d1);
    t2 = tap(d2);
    t3 = tap(d3);
  end

  always_ff @(posedge clk) hist[wp] <= x;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wp <= '0; fill <= '0;
      sum_new <= '0; sum_mid <= '0; sum_old <= '0;
      primed <= 1'b0;
    end else begin
      wp      <= (wp == AW'(MAXD - 1)) ? '0 : wp + 1'b1;
      if (fill != AW'(MAXD)) fill <= fill + 1'b1;
      sum_new <= sum_new + SW'(x)  - SW'(t1);
      sum_mid <= sum_mid + SW'(t1) - SW'(t2);
      sum_old <= sum_old + SW'(t2) - SW'(t3);
      primed  <= ((AW+1)'(fill) + 1'b1 >= d3) && (d3 != '0);
    end
endmodule
