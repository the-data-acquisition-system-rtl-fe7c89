// crc32_engine -- running CRC-32 over a stream of 16-bit words.
//
// The digitizer checksums every byte of event data as it leaves the block
// RAMs, and the Data Extractor checksums every UDP payload.  Both use this
// engine.  It applies the IEEE 802.3 CRC-32 (reflected, polynomial
// 0xEDB88320, initial value all ones, final inversion), taking the high byte of
// each word first; the byte order and polynomial variant are this design's
// choice, the paper only says "CRC32".
// Interface: `clear` restarts the checksum, `en` folds `data` into it.  `crc`
// is the finished (inverted) checksum of every word folded in since the last
// clear; it is valid the cycle after the last `en`.
module crc32_engine
  import fadr_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        en,
  input  word_t       data,
  output logic [31:0] crc
);
  logic [31:0] state;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)      state <= '1;
    else if (clear)  state <= '1;
    else if (en)     state <= crc32_byte(crc32_byte(state, data[15:8]), data[7:0]);

  assign crc = ~state;
endmodule
