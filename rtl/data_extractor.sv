// data_extractor -- Data Extractor: collects the event data of its digitizers
// and cuts it into checksummed packets for its Data Collector.
//
// For every event number it receives from the DAQ Master (`extract`, kept in
// a small queue) the extractor takes the readout stream of each of its NDDC
// digitizers in turn, from the first word to the word marked `last`, and
// forwards the words into packets.  A packet holds at most PKT_WORDS payload
// words (4400 words, the paper's 8,800-byte jumbo-frame chunk).  Packet
// layout (16-bit words; this design's own, the paper gives only the size
// limit and the per-packet payload checksum):
//   event_id[31:16], event_id[15:0], packet sequence number within the event,
//   payload words...,
//   {last_packet_of_event, payload_word_count[14:0]},
//   crc32 of the payload [31:16], [15:0]      (the last word has `last`)
// The packets go to the Gigabit Ethernet UDP transmitter, which is outside
// this design.  Handshake on every stream: a word moves when valid and ready
// are both high.
module data_extractor
  import fadr_pkg::*;
#(
  parameter int unsigned NDDC      = 3,
  parameter int unsigned PKT_WORDS = 4400
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         extract,
  input  logic [31:0]  event_id,
  input  rd_word_t     in       [NDDC],
  output logic         in_ready [NDDC],
  output rd_word_t     out,
  input  logic         out_ready,
  output logic         overflow
);
  localparam int unsigned DW = (NDDC > 1) ? $clog2(NDDC) : 1;

  // ---- queue of event numbers (two entries: one per digitizer buffer) ----
  logic [31:0] q [2];
  logic        q_rd, q_wr;
  logic [1:0]  q_n;
  logic        pop;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      q[0] <= '0; q[1] <= '0; q_rd <= 1'b0; q_wr <= 1'b0; q_n <= '0; overflow <= 1'b0;
    end else begin
      if (extract) begin
        if (q_n == 2'd2 && !pop) overflow <= 1'b1;
        else begin q[q_wr] <= event_id; q_wr <= !q_wr; end
      end
      if (pop) q_rd <= !q_rd;
      q_n <= q_n + ((extract && (q_n != 2'd2 || pop)) ? 2'd1 : 2'd0) - (pop ? 2'd1 : 2'd0);
    end

  // ---- packetiser ----------------------------------------------------------
  typedef enum logic [2:0] {P_IDLE, P_H0, P_H1, P_H2, P_DATA, P_T0, P_C1, P_C2} pst_t;
  pst_t        st;
  logic [DW-1:0] d;
  logic [15:0] seq;
  logic [14:0] cnt;
  logic        ev_done;
  logic [31:0] crc;
  logic        acc, in_acc;
  logic [31:0] ev;
  rd_word_t    cur;

  assign ev  = q[q_rd];
  assign cur = in[d];

  always_comb begin
    out = '0;
    unique case (st)
      P_H0:   out = '{valid: 1'b1, last: 1'b0, data: ev[31:16]};
      P_H1:   out = '{valid: 1'b1, last: 1'b0, data: ev[15:0]};
      P_H2:   out = '{valid: 1'b1, last: 1'b0, data: seq};
      P_DATA: out = '{valid: cur.valid, last: 1'b0, data: cur.data};
      P_T0:   out = '{valid: 1'b1, last: 1'b0, data: {ev_done, cnt}};
      P_C1:   out = '{valid: 1'b1, last: 1'b0, data: crc[31:16]};
      P_C2:   out = '{valid: 1'b1, last: 1'b1, data: crc[15:0]};
      default: ;
    endcase
  end

  assign acc    = out.valid && out_ready;
  assign in_acc = acc && st == P_DATA;
  assign pop    = acc && st == P_C2 && ev_done;

  always_comb
    for (int i = 0; i < NDDC; i++)
      in_ready[i] = (st == P_DATA) && (d == DW'(i)) && out_ready;

  crc32_engine u_crc (
    .clk, .rst_n, .clear(st == P_H0), .en(in_acc), .data(cur.data), .crc);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= P_IDLE; d <= '0; seq <= '0; cnt <= '0; ev_done <= 1'b0;
    end else begin
      unique case (st)
        P_IDLE: if (q_n != '0) begin
          st <= P_H0; d <= '0; seq <= '0; ev_done <= 1'b0;
        end
        P_H0: if (acc) st <= P_H1;
        P_H1: if (acc) st <= P_H2;
        P_H2: if (acc) begin st <= P_DATA; cnt <= '0; end
        P_DATA: if (in_acc) begin
          cnt <= cnt + 1'b1;
          if (cur.last) begin
            if (d == DW'(NDDC - 1)) begin ev_done <= 1'b1; st <= P_T0; end
            else d <= d + 1'b1;
          end
          if (cnt + 1'b1 == 15'(PKT_WORDS)) st <= P_T0;
        end
        P_T0: if (acc) st <= P_C1;
        P_C1: if (acc) st <= P_C2;
        P_C2: if (acc) begin
          if (ev_done) st <= P_IDLE;
          else begin st <= P_H0; seq <= seq + 1'b1; end
        end
        default: st <= P_IDLE;
      endcase
    end

  // words are only taken from the digitizer being forwarded
  a_one_source: assert property (@(posedge clk) disable iff (!rst_n)
                                 in_acc |-> cur.valid);
endmodule
