// pod_buffer -- the double-buffered POD memory of one digitizer channel.
//
// Each channel has two POD banks.  PODs are written into the filling bank
// while the other one may be waiting for, or under, readout.  When the DAQ
// Master ends an event (`event_close`, at the end of the post-event window)
// the filling bank is closed and, if the other bank is empty, writing moves
// there at once and no time is lost.  If the other bank has not been read out
// yet, no bank can take data: the channel is dead (`live` low) until the
// readout releases a bank, which then starts filling.
// For each bank the buffer start time (when it became ready to receive data)
// and the buffer end time (the end of the event, or the moment the bank first
// filled up if that came earlier) are kept for the readout; from these the
// live time is computed offline, as in the paper.
// Banks are read in the order they were closed.  The readout sees the bank
// named by `rd_bank`; `rd_ready` says it is closed and waiting.  `release`
// (one cycle) frees it.  Read ports are those of pod_bank.
// Pruning with `prune_before` applies to the filling bank only.
module pod_buffer
  import fadr_pkg::*;
#(
  parameter int unsigned NHDR = 250,
  parameter int unsigned NSMP = 5120
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  tstamp_t                now,
  // from zero suppression
  input  logic                   keep,
  input  sample_t                sample,
  input  tstamp_t                sts,
  // event control
  input  tstamp_t                prune_before,
  input  logic                   event_close,
  input  logic                   release_i,
  output logic                   live,
  // readout
  output logic                   rd_bank,
  output logic                   rd_ready,
  output tstamp_t                rd_start_time,
  output tstamp_t                rd_end_time,
  output logic                   rd_trunc,
  output logic [7:0]             rd_tail,
  output logic [7:0]             rd_cnt,
  input  logic [7:0]             rd_hdr_idx,
  output pod_hdr_t               rd_hdr,
  input  logic                   rd_smp_en,
  input  logic [SADDR_BITS-1:0]  rd_smp_addr,
  output word_t                  rd_smp
);
  bank_state_t st [2];
  logic        act;           // filling bank, valid while live
  tstamp_t     t_start [2];
  tstamp_t     t_end   [2];
  logic        full_seen [2];

  logic        b_clear [2];
  pod_hdr_t    b_hdr   [2];
  word_t       b_smp   [2];
  logic [7:0]  b_tail  [2];
  logic [7:0]  b_cnt   [2];
  logic        b_trunc [2];
  logic        b_full  [2];

  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic filling;
    assign filling = live && (act == 1'(b));
    pod_bank #(.NHDR(NHDR), .NSMP(NSMP)) u_bank (
      .clk, .rst_n,
      .clear       (b_clear[b]),
      .wr_en       (filling && st[b] == BANK_FILLING),
      .keep, .sample, .sts,
      .prune_en    (filling),
      .prune_before,
      .rd_hdr_idx,
      .rd_hdr      (b_hdr[b]),
      .rd_smp_en   (rd_smp_en && rd_bank == 1'(b)),
      .rd_smp_addr,
      .rd_smp      (b_smp[b]),
      .tail        (b_tail[b]),
      .hdr_cnt     (b_cnt[b]),
      .trunc       (b_trunc[b]),
      .full        (b_full[b])
    );
  end

  // Next-state logic.  A release is applied before a close in the same
  // cycle, so a bank freed in that cycle can take the data at once.
  bank_state_t st_n [2];
  logic        act_n, live_n, rd_bank_n;
  logic        open_b [2];           // bank starts filling next cycle
  always_comb begin
    st_n[0] = st[0]; st_n[1] = st[1];
    act_n = act; live_n = live; rd_bank_n = rd_bank;
    open_b[0] = 1'b0; open_b[1] = 1'b0;
    if (release_i) begin
      st_n[rd_bank] = BANK_EMPTY;
      rd_bank_n     = !rd_bank;
    end
    if (event_close && live) begin
      st_n[act] = BANK_READY;
      live_n    = 1'b0;
    end
    if (!live_n || (event_close && live)) begin
      // find an empty bank to fill: the other one after a close, or the
      // released one after dead time
      if (st_n[!act] == BANK_EMPTY && (event_close && live)) begin
        act_n = !act; open_b[!act] = 1'b1;
      end else if (!live && release_i) begin
        act_n = rd_bank; open_b[rd_bank] = 1'b1;
      end
      if (open_b[0] || open_b[1]) begin
        live_n = 1'b1;
        st_n[act_n] = BANK_FILLING;
      end
    end
    b_clear[0] = open_b[0];
    b_clear[1] = open_b[1];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st[0] <= BANK_FILLING; st[1] <= BANK_EMPTY;
      act <= 1'b0; live <= 1'b1; rd_bank <= 1'b0;
      t_start[0] <= '0; t_start[1] <= '0; t_end[0] <= '0; t_end[1] <= '0;
      full_seen[0] <= 1'b0; full_seen[1] <= 1'b0;
    end else begin
      st[0] <= st_n[0]; st[1] <= st_n[1];
      act <= act_n; live <= live_n; rd_bank <= rd_bank_n;
      // the first time the filling bank is full marks its end time
      if (live && b_full[act] && !full_seen[act]) begin
        full_seen[act] <= 1'b1;
        t_end[act]     <= now;
      end
      if (event_close && live && !(full_seen[act] || b_full[act]))
        t_end[act] <= now;
      for (int b = 0; b < 2; b++)
        if (open_b[b]) begin
          t_start[b]   <= now;
          full_seen[b] <= 1'b0;
        end
    end

  assign rd_ready      = (st[rd_bank] == BANK_READY);
  assign rd_start_time = t_start[rd_bank];
  assign rd_end_time   = t_end[rd_bank];
  assign rd_trunc      = b_trunc[rd_bank];
  assign rd_tail       = b_tail[rd_bank];
  assign rd_cnt        = b_cnt[rd_bank];
  assign rd_hdr        = b_hdr[rd_bank];
  assign rd_smp        = b_smp[rd_bank];

  // The readout only releases a bank that is closed.
  a_release_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                    release_i |-> rd_ready);
endmodule
