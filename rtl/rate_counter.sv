// rate_counter -- counts events over a fixed period and latches the result.
//
// Used for the rate monitors of the digitizer channels (filter and POD
// threshold crossings, samples above the POD threshold) and for the trigger
// rates of the Data Sparsifier Master.  The paper captures these rates every
// 10 s; PERIOD is that interval in 100 MHz cycles.  When the period ends the
// running count is copied to `count` and `update` pulses for one cycle; an
// event in the last cycle of a period is counted in that period.  The count
// saturates instead of wrapping (a choice of this design).
module rate_counter #(
  parameter int unsigned PERIOD = 1_000_000_000,   // 10 s at 100 MHz
  parameter int unsigned CW     = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          event_i,
  output logic [CW-1:0] count,
  output logic          update
);
  localparam int unsigned PW = $clog2(PERIOD);
  logic [PW-1:0] tick;
  logic [CW-1:0] run;
  logic          period_end;
  logic [CW-1:0] run_inc;

  assign period_end = (tick == PW'(PERIOD - 1));
  assign run_inc    = (event_i && run != '1) ? run + 1'b1 : run;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      tick <= '0; run <= '0; count <= '0; update <= 1'b0;
    end else begin
      update <= period_end;
      if (period_end) begin
        tick  <= '0;
        count <= run_inc;
        run   <= '0;
      end else begin
        tick <= tick + 1'b1;
        run  <= run_inc;
      end
    end
endmodule
