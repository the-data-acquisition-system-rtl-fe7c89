// waveform_injector -- arbitrary waveform injection behind the ADCs.
//
// A waveform memory of DEPTH (16384) samples, written by the board's
// processor, is played out on a trigger/strobe and added to the digitised
// samples of none, one or all of the NCH channels before any processing, so
// the response includes the real ADC noise.  This is how the paper tests the
// sparsification logic with pulses of known area and multiplicity.
// The stored values are signed 16-bit offsets (a photomultiplier pulse is a
// negative offset); the sum is clamped to the 14-bit ADC range.  The play
// length, the signed format and the clamping are this design's choices.
// Interface: processor write port (wr_en/wr_addr/wr_data); `strobe` starts a
// playback of `play_len` samples from address 0 (a strobe during playback
// restarts it); `mode` and `sel_ch` choose the channels.
// Timing: two cycles from `adc_in` to `adc_out`; the first injected sample
// appears two cycles after the strobe.
module waveform_injector
  import fadr_pkg::*;
#(
  parameter int unsigned NCH   = 32,
  parameter int unsigned DEPTH = 16384
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  sample_t                    adc_in  [NCH],
  output sample_t                    adc_out [NCH],
  input  logic                       wr_en,
  input  logic [$clog2(DEPTH)-1:0]   wr_addr,
  input  logic signed [15:0]         wr_data,
  input  logic                       strobe,
  input  logic [$clog2(DEPTH):0]     play_len,
  input  inj_mode_t                  mode,
  input  logic [$clog2(NCH)-1:0]     sel_ch
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic signed [15:0] wmem [DEPTH];
  logic signed [15:0] wq;
  logic [AW:0]        pos;
  logic               playing, play_q;
  sample_t            adc_d [NCH];

  always_ff @(posedge clk) begin
    if (wr_en) wmem[wr_addr] <= wr_data;
    wq <= wmem[pos[AW-1:0]];
  end

  // sum of the delayed ADC sample and the waveform, clamped to 14 bits
  sample_t mixed [NCH];
  always_comb
    for (int c = 0; c < NCH; c++) begin
      logic               hit;
      logic signed [17:0] v;
      hit = play_q && (mode == INJ_ALL ||
                       (mode == INJ_ONE && sel_ch == ($clog2(NCH))'(c)));
      v   = $signed({4'b0, adc_d[c]}) + (hit ? 18'(wq) : 18'sd0);
      if (v < 0)                  mixed[c] = '0;
      else if (v > 18'sd16383)    mixed[c] = '1;
      else                        mixed[c] = v[ADC_BITS-1:0];
    end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      pos <= '0; playing <= 1'b0; play_q <= 1'b0;
      for (int c = 0; c < NCH; c++) begin
        adc_d[c] <= '0; adc_out[c] <= '0;
      end
    end else begin
      if (strobe) begin
        pos <= '0; playing <= (play_len != '0);
      end else if (playing) begin
        if (pos + 1'b1 >= play_len) playing <= 1'b0;
        pos <= pos + 1'b1;
      end
      play_q <= playing && !strobe;
      for (int c = 0; c < NCH; c++) begin
        adc_d[c]   <= adc_in[c];
        adc_out[c] <= mixed[c];
      end
    end
endmodule
