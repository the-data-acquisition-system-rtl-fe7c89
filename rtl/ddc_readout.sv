// ddc_readout -- sends one closed event buffer of a digitizer to its Data
// Extractor.
//
// When every channel has a closed buffer waiting, the readout walks the
// channels in order and streams their PODs as 16-bit words, then a CRC-32 of
// everything it sent, then frees the buffers.  Stream format (this design's
// own; the paper does not publish its link protocol):
//   {D, 0, ddc_id[7:0]}                        one per digitizer event
//   per channel:
//     {C, 000000, trunc, ch[4:0]}              channel marker, truncation flag
//     start time [47:32] [31:16] [15:0]        buffer start time
//     end time   [47:32] [31:16] [15:0]        buffer end time
//     {00000000, pod_count[7:0]}
//     per POD: time stamp [47:32] [31:16] [15:0], {B, 0, length[10:0]},
//              then `length` sample words {00, sample[13:0]}
//   {E, 000}, crc[31:16], crc[15:0]            crc over all words before {E,000}
// The last word carries `last`.  Handshake: a word moves when out.valid and
// out_ready are both high.  Header words come from the channels' POD header
// memories (asynchronous read); each sample is read one cycle ahead through
// the registered sample-memory port (rd_smp_en/rd_smp_addr), so samples move
// at one word per cycle while out_ready stays high.
module ddc_readout
  import fadr_pkg::*;
#(
  parameter int unsigned NCH  = 32,
  parameter int unsigned NHDR = 250,
  parameter int unsigned NSMP = 5120
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [7:0]             ddc_id,
  // per-channel buffer status and read data
  input  logic                   ch_ready [NCH],
  input  tstamp_t                ch_start [NCH],
  input  tstamp_t                ch_end   [NCH],
  input  logic                   ch_trunc [NCH],
  input  logic [7:0]             ch_tail  [NCH],
  input  logic [7:0]             ch_cnt   [NCH],
  input  pod_hdr_t               ch_hdr   [NCH],
  input  word_t                  ch_smp   [NCH],
  // read controls, shared by all channels
  output logic [7:0]             rd_hdr_idx,
  output logic                   rd_smp_en,
  output logic [SADDR_BITS-1:0]  rd_smp_addr,
  output logic                   release_o,
  // stream to the Data Extractor
  output rd_word_t               out,
  input  logic                   out_ready,
  output logic                   busy
);
  localparam int unsigned CHW = (NCH > 1) ? $clog2(NCH) : 1;

  typedef enum logic [2:0] {S_IDLE, S_DDC, S_CH, S_PH, S_SMP, S_CRCM, S_CRC1, S_CRC2} st_t;
  st_t st;
  logic [CHW-1:0]        ch;
  logic [3:0]            k;          // word index inside a header
  logic [7:0]            pi;         // POD index within the channel
  logic [PLEN_BITS-1:0]  j;          // sample index within the POD
  logic [SADDR_BITS-1:0] saddr;      // address of the sample on the output

  logic all_ready;
  always_comb begin
    all_ready = 1'b1;
    for (int c = 0; c < NCH; c++) all_ready &= ch_ready[c];
  end

  pod_hdr_t hdr;
  tstamp_t  st_t0, st_t1;
  logic [7:0] cnt;
  assign hdr   = ch_hdr[ch];
  assign st_t0 = ch_start[ch];
  assign st_t1 = ch_end[ch];
  assign cnt   = ch_cnt[ch];

  always_comb begin
    logic [8:0] idx;
    idx = 9'(ch_tail[ch]) + 9'(pi);
    if (idx >= 9'(NHDR)) idx = idx - 9'(NHDR);
    rd_hdr_idx = idx[7:0];
  end

  logic acc;
  assign acc = out.valid && out_ready;

  function automatic logic [SADDR_BITS-1:0] next_addr(logic [SADDR_BITS-1:0] a);
    return (a == SADDR_BITS'(NSMP - 1)) ? '0 : a + 1'b1;
  endfunction

  // ---- output word ---------------------------------------------------------
  logic [31:0] crc;
  always_comb begin
    out = '0;
    unique case (st)
      S_IDLE: ;
      S_DDC:  out = '{valid: 1'b1, last: 1'b0, data: {MK_DDC, 4'h0, ddc_id}};
      S_CH: begin
        out.valid = 1'b1;
        unique case (k)
          4'd0: out.data = {MK_CHAN, 6'b0, ch_trunc[ch], 5'(ch)};
          4'd1: out.data = st_t0[47:32];
          4'd2: out.data = st_t0[31:16];
          4'd3: out.data = st_t0[15:0];
          4'd4: out.data = st_t1[47:32];
          4'd5: out.data = st_t1[31:16];
          4'd6: out.data = st_t1[15:0];
          default: out.data = {8'h00, cnt};
        endcase
      end
      S_PH: begin
        out.valid = 1'b1;
        unique case (k)
          4'd0: out.data = hdr.ts[47:32];
          4'd1: out.data = hdr.ts[31:16];
          4'd2: out.data = hdr.ts[15:0];
          default: out.data = {MK_POD, 1'b0, hdr.len};
        endcase
      end
      S_SMP:  out = '{valid: 1'b1, last: 1'b0, data: ch_smp[ch]};
      S_CRCM: out = '{valid: 1'b1, last: 1'b0, data: {MK_CRC, 12'h000}};
      S_CRC1: out = '{valid: 1'b1, last: 1'b0, data: crc[31:16]};
      S_CRC2: out = '{valid: 1'b1, last: 1'b1, data: crc[15:0]};
      default: ;
    endcase
  end

  crc32_engine u_crc (
    .clk, .rst_n, .clear(st == S_IDLE),
    .en(acc && st != S_CRCM && st != S_CRC1 && st != S_CRC2),
    .data(out.data), .crc
  );

  // ---- sample prefetch -----------------------------------------------------
  always_comb begin
    rd_smp_en   = 1'b0;
    rd_smp_addr = saddr;
    if (acc && st == S_PH && k == 4'd3) begin
      rd_smp_en = 1'b1; rd_smp_addr = hdr.start;
    end else if (acc && st == S_SMP && j + 1'b1 != hdr.len) begin
      rd_smp_en = 1'b1; rd_smp_addr = next_addr(saddr);
    end
  end

  assign busy      = (st != S_IDLE);
  assign release_o = acc && st == S_CRC2;

  // ---- sequencing ----------------------------------------------------------
  // the current channel is finished with the word accepted now
  logic nc;
  always_comb begin
    nc = 1'b0;
    if (acc && st == S_CH && k == 4'd7 && cnt == '0) nc = 1'b1;
    if (acc && st == S_SMP && j + 1'b1 == hdr.len && pi + 1'b1 == cnt) nc = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= S_IDLE; ch <= '0; k <= '0; pi <= '0; j <= '0; saddr <= '0;
    end else begin
      if (rd_smp_en) saddr <= rd_smp_addr;
      unique case (st)
        S_IDLE: if (all_ready) begin st <= S_DDC; ch <= '0; end
        S_DDC:  if (acc) begin st <= S_CH; k <= '0; end
        S_CH: if (acc) begin
          if (k == 4'd7) begin
            pi <= '0; k <= '0;
            if (cnt != '0) st <= S_PH;
          end else k <= k + 1'b1;
        end
        S_PH: if (acc) begin
          if (k == 4'd3) begin st <= S_SMP; j <= '0; end
          else k <= k + 1'b1;
        end
        S_SMP: if (acc) begin
          if (j + 1'b1 == hdr.len) begin
            k <= '0;
            if (pi + 1'b1 != cnt) begin pi <= pi + 1'b1; st <= S_PH; end
          end else j <= j + 1'b1;
        end
        S_CRCM: if (acc) st <= S_CRC1;
        S_CRC1: if (acc) st <= S_CRC2;
        S_CRC2: if (acc) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
      if (nc) begin
        if (ch == CHW'(NCH - 1)) st <= S_CRCM;
        else begin
          ch <= ch + 1'b1; st <= S_CH; k <= '0;
        end
      end
    end
endmodule
