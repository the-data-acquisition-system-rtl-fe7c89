// fadr_pkg -- types and constants shared by the FADR firmware blocks.
//
// FADR digitises photomultiplier waveforms at 100 MHz with 14-bit ADCs and
// runs the whole system from one global clock.  This package holds the sample
// and time stamp types, the layout of the 72-bit POD header word (time stamp in
// bits 71:24, pulse start address in bits 23:11, pulse length in bits 10:0, as
// printed in the memory map of the POD storage), and the word codes of the
// 16-bit readout stream that the digitizer sends to its Data Extractor.
// The readout word codes and the trigger source numbering are this design's
// own choice; the field widths of the header follow the published memory map.
package fadr_pkg;

  localparam int unsigned ADC_BITS   = 14;   // ADC resolution
  localparam int unsigned TS_BITS    = 48;   // time stamp counter width
  localparam int unsigned SADDR_BITS = 13;   // POD sample start address width
  localparam int unsigned PLEN_BITS  = 11;   // POD length width
  localparam int unsigned HDR_BITS   = TS_BITS + SADDR_BITS + PLEN_BITS; // 72
  localparam int unsigned WORD_BITS  = 16;   // sample memory / readout word
  localparam int unsigned WIN_BITS   = 20;   // event window lengths in samples

  typedef logic [ADC_BITS-1:0]   sample_t;
  typedef logic [TS_BITS-1:0]    tstamp_t;
  typedef logic [WORD_BITS-1:0]  word_t;
  typedef logic [WIN_BITS-1:0]   win_t;

  // One entry of the POD header (overhead) memory.
  typedef struct packed {
    tstamp_t                ts;      // time of the first stored sample
    logic [SADDR_BITS-1:0]  start;   // address of the first sample
    logic [PLEN_BITS-1:0]   len;     // number of stored samples
  } pod_hdr_t;

  // Readout stream, one 16-bit word per cycle.
  typedef struct packed {
    logic  valid;
    logic  last;
    word_t data;
  } rd_word_t;

  // Marker nibbles of the readout stream (bits 15:12 of a marker word).
  localparam logic [3:0] MK_DDC  = 4'hD;  // start of one digitizer's event data
  localparam logic [3:0] MK_CHAN = 4'hC;  // start of one channel's buffer
  localparam logic [3:0] MK_POD  = 4'hB;  // start of one POD header
  localparam logic [3:0] MK_CRC  = 4'hE;  // CRC32 follows in two words

  // Trigger sources seen by the Data Sparsifier Master: an S1 and an S2
  // multiplicity trigger per processing chain, then the external triggers.
  localparam int unsigned N_CHAINS  = 4;  // TPC high gain, TPC low gain, Skin, OD
  localparam int unsigned N_EXT     = 4;  // random, GPS (PPS), calibration (DD | LED), AUX
  localparam int unsigned N_SOURCES = 2*N_CHAINS + N_EXT;
  localparam int unsigned SRC_S1    = 0;              // + chain
  localparam int unsigned SRC_S2    = N_CHAINS;       // + chain
  localparam int unsigned SRC_RAND  = 2*N_CHAINS;
  localparam int unsigned SRC_GPS   = 2*N_CHAINS + 1;
  localparam int unsigned SRC_CAL   = 2*N_CHAINS + 2;
  localparam int unsigned SRC_AUX   = 2*N_CHAINS + 3;

  localparam int unsigned S1W = 24;   // S1 filter sum / threshold width
  localparam int unsigned S2W = 26;   // S2 filter sum / threshold width

  // Filter and POD settings of one digitizer, shared by its 32 channels.
  // Two extra S1 filters and one extra S2 filter run beside the trigger
  // filters and only feed the rate monitors.
  typedef struct packed {
    sample_t                pod_thr;      // POD threshold, ADC counts
    logic [4:0]             s1_n;         // S1 trigger filter central lobe
    logic signed [S1W-1:0]  s1_thr;
    logic [7:0]             s2_m;         // S2 trigger filter side lobe (central = 4M)
    logic signed [S2W-1:0]  s2_thr;
    logic [4:0]             noise_n;      // S1 monitor tuned to electronics noise
    logic signed [S1W-1:0]  noise_thr;
    logic [4:0]             sphe_n;       // S1 monitor tuned to single photoelectrons
    logic signed [S1W-1:0]  sphe_thr;
    logic [7:0]             mon2_m;       // S2 monitor filter
    logic signed [S2W-1:0]  mon2_thr;
  } filt_cfg_t;

  // Rate monitors of one channel.
  localparam int unsigned N_RATES = 5;
  typedef enum logic [2:0] {
    RATE_NOISE = 3'd0,   // S1 noise-monitor filter threshold crossings
    RATE_SPHE  = 3'd1,   // S1 SPHE-monitor filter threshold crossings
    RATE_S2    = 3'd2,   // S2 monitor filter threshold crossings
    RATE_POD   = 3'd3,   // POD threshold crossings
    RATE_OVER  = 3'd4    // samples beyond the POD threshold
  } rate_kind_t;

  // Arbitrary waveform injection channel selector.
  typedef enum logic [1:0] {
    INJ_NONE = 2'd0,
    INJ_ONE  = 2'd1,
    INJ_ALL  = 2'd2
  } inj_mode_t;

  // Source of a spy (monitor DAC) output.
  typedef enum logic [1:0] {
    SPY_CHAN = 2'd0,     // one channel's samples
    SPY_SUM  = 2'd1,     // the digitizer's digital sum
    SPY_S1   = 2'd2      // one channel's S1 trigger filter output
  } spy_src_t;

  typedef enum logic [1:0] {
    BANK_EMPTY   = 2'd0,   // free, waiting to be filled
    BANK_FILLING = 2'd1,   // receiving PODs
    BANK_READY   = 2'd2    // closed, waiting for or under readout
  } bank_state_t;

  // CRC-32 (IEEE 802.3, reflected, polynomial 0xEDB88320) of one byte.
  function automatic logic [31:0] crc32_byte(logic [31:0] crc, logic [7:0] b);
    logic [31:0] c;
    c = crc ^ {24'd0, b};
    for (int k = 0; k < 8; k++)
      c = c[0] ? ((c >> 1) ^ 32'hEDB8_8320) : (c >> 1);
    return c;
  endfunction

endpackage
