// pod_bank -- one of the two POD buffers of a digitizer channel.
//
// The storage follows the published memory map: a POD header (overhead)
// memory of NHDR = 250 words of 72 bits {time stamp 48, pulse start address
// 13, pulse length 11} and a POD sample memory of NSMP = 5120 words of 16 bits
// (the 14-bit sample in the low bits).  Samples of consecutive PODs are stored
// back to back; each header points at the first sample of its POD.
// Both memories are used as rings, which makes the bank a circular buffer:
// while the bank is filling, the oldest POD is dropped as soon as it ends
// before `prune_before` (the start of the pre-event window), one POD per
// cycle, freeing its header and its samples.  When a trigger has been
// accepted the owner freezes `prune_before` at trigger time minus the
// pre-event window, so everything of the event is retained.
// Writing: while `wr_en` is high, a run of `keep` samples forms a POD.  The
// header is written when the run ends, when `wr_en` drops (the bank is being
// closed) or when the POD reaches 2047 samples, the largest length the 11-bit
// field can hold (a longer run continues as a new POD).  If no header slot is
// free when a POD starts, or the sample memory fills up, samples are lost and
// the sticky `trunc` flag is raised: the paper flags such PODs as truncated,
// but its header word has no spare bit, so the flag is kept per bank.
// `full` is high while either memory has no free entry.
// Reading: `rd_hdr` is the header at index `rd_hdr_idx` (asynchronous read);
// `rd_smp` is the sample word at `rd_smp_addr`, registered when `rd_smp_en`
// is high.  `clear` empties the bank in one cycle.
module pod_bank
  import fadr_pkg::*;
#(
  parameter int unsigned NHDR   = 250,
  parameter int unsigned NSMP   = 5120,
  parameter int unsigned MAXLEN = 2047
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   wr_en,
  input  logic                   keep,
  input  sample_t                sample,
  input  tstamp_t                sts,
  input  logic                   prune_en,
  input  tstamp_t                prune_before,
  input  logic [7:0]             rd_hdr_idx,
  output pod_hdr_t               rd_hdr,
  input  logic                   rd_smp_en,
  input  logic [SADDR_BITS-1:0]  rd_smp_addr,
  output word_t                  rd_smp,
  output logic [7:0]             tail,
  output logic [7:0]             hdr_cnt,
  output logic                   trunc,
  output logic                   full
);
  localparam int unsigned SCW = $clog2(NSMP + 1);

  pod_hdr_t               hdr_mem [NHDR];
  word_t                  smp_mem [NSMP];

  logic [7:0]             head;
  logic [SADDR_BITS-1:0]  wp;          // next sample address
  logic [SCW-1:0]         smp_cnt;     // samples held, open POD included
  logic                   in_pod;
  pod_hdr_t               cur;         // header of the open POD

  // ---- write side ----------------------------------------------------------
  logic     start_pod, take, smp_room, hdr_room, end_pod;
  logic [PLEN_BITS-1:0] len_new;
  pod_hdr_t tail_hdr;
  logic     prune;
  tstamp_t  tail_end;

  assign hdr_room  = (hdr_cnt != 8'(NHDR));
  assign smp_room  = (smp_cnt != SCW'(NSMP));
  assign start_pod = wr_en && keep && !in_pod && hdr_room;
  assign take      = wr_en && keep && (in_pod || start_pod) && smp_room;
  assign len_new   = (start_pod ? '0 : cur.len) + (take ? PLEN_BITS'(1) : PLEN_BITS'(0));
  assign end_pod   = (in_pod || start_pod) &&
                     (!wr_en || !keep || len_new == PLEN_BITS'(MAXLEN));
  assign full      = !hdr_room || !smp_room;

  // ---- pruning of the oldest POD -------------------------------------------
  assign tail_hdr  = hdr_mem[tail];
  assign tail_end  = tail_hdr.ts + TS_BITS'(tail_hdr.len);
  assign prune     = prune_en && (hdr_cnt != '0) && (tail_end < prune_before);

  logic hdr_wr;
  assign hdr_wr = end_pod && (len_new != '0);

  always_ff @(posedge clk) begin
    if (take) smp_mem[wp] <= {{(WORD_BITS-ADC_BITS){1'b0}}, sample};
    if (hdr_wr)
      hdr_mem[head] <= '{ts: start_pod ? sts : cur.ts,
                         start: start_pod ? wp : cur.start,
                         len: len_new};
    if (rd_smp_en) rd_smp <= smp_mem[rd_smp_addr];
  end

  function automatic logic [7:0] inc_h(logic [7:0] v);
    return (v == 8'(NHDR - 1)) ? '0 : v + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      head <= '0; tail <= '0; hdr_cnt <= '0;
      wp <= '0; smp_cnt <= '0; in_pod <= 1'b0; cur <= '0; trunc <= 1'b0;
    end else if (clear) begin
      head <= '0; tail <= '0; hdr_cnt <= '0;
      wp <= '0; smp_cnt <= '0; in_pod <= 1'b0; cur <= '0; trunc <= 1'b0;
    end else begin
      if (start_pod) begin
        cur.ts    <= sts;
        cur.start <= wp;
      end
      cur.len <= len_new;
      in_pod  <= (in_pod || start_pod) && !end_pod;
      if (take) wp <= (wp == SADDR_BITS'(NSMP - 1)) ? '0 : wp + 1'b1;
      if (hdr_wr) head <= inc_h(head);
      if (prune)  tail <= inc_h(tail);
      hdr_cnt <= hdr_cnt + (hdr_wr ? 8'd1 : 8'd0) - (prune ? 8'd1 : 8'd0);
      smp_cnt <= smp_cnt + (take ? SCW'(1) : SCW'(0))
                         - (prune ? SCW'(tail_hdr.len) : SCW'(0));
      // samples lost: no header slot for a starting POD, or no sample space
      if ((wr_en && keep && !in_pod && !hdr_room) ||
          (wr_en && keep && (in_pod || start_pod) && !smp_room))
        trunc <= 1'b1;
    end

  assign rd_hdr = hdr_mem[rd_hdr_idx];
endmodule
