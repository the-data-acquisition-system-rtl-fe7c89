// fadr_chain -- one parallel processing chain of FADR.
//
// A chain is a group of DDC-32 digitizers with its own Data Sparsifiers and
// Data Extractors.  FADR has four: TPC high gain, TPC low gain, Skin, and OD
// (high and low gain).  Within a chain:
//  * digitizer d feeds Data Sparsifier d/8 (a sparsifier takes up to eight
//    digitizers, as for the digital sum in the paper);
//  * digitizer d is read out by Data Extractor d mod NDE, so the TPC chains'
//    16 digitizers spread over 6 extractors as 3,3,3,3,2,2 ("up to three
//    DDC-32s per Data Extractor");
//  * the multiplicities of the chain's sparsifiers are added into the
//    chain's S1 and S2 multiplicity for the Data Sparsifier Master.
// All digitizers of a chain share one filter configuration, as the paper
// allows different filter parameters per trigger system.
module fadr_chain
  import fadr_pkg::*;
#(
  parameter int unsigned NDDC        = 16,
  parameter int unsigned NDS         = 2,
  parameter int unsigned NDE         = 6,
  parameter int unsigned NCH         = 32,
  parameter int unsigned NHDR        = 250,
  parameter int unsigned NSMP        = 5120,
  parameter int unsigned INJ_DEPTH   = 16384,
  parameter int unsigned S1_NMAX     = 16,
  parameter int unsigned S2_MMAX     = 128,
  parameter int unsigned RATE_PERIOD = 1_000_000_000,
  parameter int unsigned PKT_WORDS   = 4400,
  parameter int unsigned MW          = 11,
  parameter int unsigned CW          = 12
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  tstamp_t                           now,
  input  logic [7:0]                        ddc_id_base,
  input  logic [NDDC-1:0][NCH-1:0][ADC_BITS-1:0] adc,
  input  filt_cfg_t                         cfg,
  input  logic [NDDC-1:0][NCH-1:0]          zs_on,
  input  logic [NDDC-1:0][NCH-1:0]          ch_mux,
  input  logic [NDDC-1:0][NCH-1:0]          sum_mask,
  input  logic [NDDC-1:0][NCH-1:0]          s1_mask,
  input  logic [NDDC-1:0][NCH-1:0]          s2_mask,
  input  logic [CW-1:0]                     s1_coinc,
  input  logic [CW-1:0]                     s2_coinc,
  input  logic                              raw_trig,
  input  logic                              inj_wr_en,
  input  logic [$clog2(INJ_DEPTH)-1:0]      inj_wr_addr,
  input  logic signed [15:0]                inj_wr_data,
  input  logic                              inj_strobe,
  input  logic [$clog2(INJ_DEPTH):0]        inj_len,
  input  inj_mode_t                         inj_mode,
  input  logic [$clog2(NCH)-1:0]            inj_ch,
  input  spy_src_t                          spy_src [2],
  input  logic [$clog2(NCH)-1:0]            spy_ch  [2],
  output logic [NDDC-1:0][1:0][ADC_BITS-1:0] spy,
  input  logic                              event_start,
  input  tstamp_t                           event_time,
  input  win_t                              pre_window,
  input  logic                              event_close,
  output logic                              live,
  output logic [MW-1:0]                     mult_s1,
  output logic [MW-1:0]                     mult_s2,
  output logic [NDS-1:0][17:0]              dsum,
  input  logic                              extract,
  input  logic [31:0]                       event_id,
  output rd_word_t [NDE-1:0]                de_out,
  input  logic [NDE-1:0]                    de_ready,
  output logic [NDE-1:0]                    de_overflow,
  input  logic [$clog2(NCH)-1:0]            rate_ch,
  input  rate_kind_t                        rate_kind,
  output logic [NDDC-1:0][31:0]             rate_val
);
  localparam int unsigned DPS = 8;   // digitizers per Data Sparsifier

  logic [NDDC-1:0][NCH-1:0] s1_above, s2_above;
  logic [NDDC-1:0][16:0]    ddc_sum;
  logic [NDDC-1:0]          ddc_live;
  rd_word_t                 rd_out   [NDDC];
  logic                     rd_ready [NDDC];

  for (genvar d = 0; d < NDDC; d++) begin : g_ddc
    sample_t adc_u [NCH];
    sample_t spy_u [2];
    for (genvar c = 0; c < NCH; c++) begin : g_a
      assign adc_u[c] = adc[d][c];
    end
    assign spy[d][0] = spy_u[0];
    assign spy[d][1] = spy_u[1];

    ddc32 #(.NCH(NCH), .NHDR(NHDR), .NSMP(NSMP), .INJ_DEPTH(INJ_DEPTH),
            .S1_NMAX(S1_NMAX), .S2_MMAX(S2_MMAX), .RATE_PERIOD(RATE_PERIOD)) u_ddc (
      .clk, .rst_n, .now, .ddc_id(ddc_id_base + 8'(d)), .adc(adc_u),
      .cfg, .zs_on(zs_on[d]), .ch_mux(ch_mux[d]), .sum_mask(sum_mask[d]), .raw_trig,
      .inj_wr_en, .inj_wr_addr, .inj_wr_data, .inj_strobe, .inj_len, .inj_mode, .inj_ch,
      .spy_src, .spy_ch, .spy(spy_u),
      .event_start, .event_time, .pre_window, .event_close, .live(ddc_live[d]),
      .s1_above(s1_above[d]), .s2_above(s2_above[d]), .dsum(ddc_sum[d]),
      .rd_out(rd_out[d]), .rd_out_ready(rd_ready[d]),
      .rate_ch, .rate_kind, .rate_val(rate_val[d])
    );
  end
  assign live = &ddc_live;

  // ---- Data Sparsifiers ----------------------------------------------------
  logic [MW-1:0] ds_m1 [NDS];
  logic [MW-1:0] ds_m2 [NDS];
  for (genvar k = 0; k < NDS; k++) begin : g_ds
    localparam int unsigned ND  = (NDDC - DPS*k < DPS) ? NDDC - DPS*k : DPS;
    localparam int unsigned DMW = $clog2(ND*NCH + 1);
    logic [DMW-1:0] m1, m2;
    data_sparsifier #(.NDDC(ND), .NCH(NCH), .CW(CW)) u_ds (
      .clk, .rst_n,
      .s1_above(s1_above[DPS*k +: ND]), .s2_above(s2_above[DPS*k +: ND]),
      .s1_mask(s1_mask[DPS*k +: ND]),   .s2_mask(s2_mask[DPS*k +: ND]),
      .s1_coinc, .s2_coinc, .dsum_in(ddc_sum[DPS*k +: ND]),
      .mult_s1(m1), .mult_s2(m2), .dsum(dsum[k])
    );
    assign ds_m1[k] = MW'(m1);
    assign ds_m2[k] = MW'(m2);
  end

  always_comb begin
    mult_s1 = '0; mult_s2 = '0;
    for (int k = 0; k < NDS; k++) begin
      mult_s1 = mult_s1 + ds_m1[k];
      mult_s2 = mult_s2 + ds_m2[k];
    end
  end

  // ---- Data Extractors -----------------------------------------------------
  for (genvar e = 0; e < NDE; e++) begin : g_de
    localparam int unsigned ND = (NDDC - e + NDE - 1) / NDE;
    rd_word_t de_in  [ND];
    logic     de_rdy [ND];
    for (genvar i = 0; i < ND; i++) begin : g_in
      assign de_in[i]            = rd_out[e + i*NDE];
      assign rd_ready[e + i*NDE] = de_rdy[i];
    end
    rd_word_t o;
    data_extractor #(.NDDC(ND), .PKT_WORDS(PKT_WORDS)) u_de (
      .clk, .rst_n, .extract, .event_id, .in(de_in), .in_ready(de_rdy),
      .out(o), .out_ready(de_ready[e]), .overflow(de_overflow[e])
    );
    assign de_out[e] = o;
  end
endmodule
