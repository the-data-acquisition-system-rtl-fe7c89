// timestamp_counter -- the 48-bit FADR time stamp.
//
// Every board runs from the same 100 MHz clock and keeps a 48-bit count of
// clock cycles.  The count is cleared at the start of a run (clear, one cycle
// wide, issued by the Data Sparsifier Master on the PPS edge) and then
// increments once per clock; at 100 MHz it wraps after about 32 days.
// The paper builds the counter from DSP48 slices; here it is a plain
// behavioural adder that a synthesiser may map the same way.
// Timing: ts is 0 in the cycle after clear and counts up from there.
module timestamp_counter
  import fadr_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,
  output tstamp_t ts
);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)      ts <= '0;
    else if (clear)  ts <= '0;
    else             ts <= ts + 1'b1;
endmodule
