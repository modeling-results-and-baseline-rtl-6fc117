// mkid_readout_top: programmable-logic datapath of a frequency-multiplexed MKID readout.
//
// Each of NFEED feedlines has a transmit side and a receive side:
//   transmit: dac_lut replays a host-written period of the probe-tone comb to the I/Q DACs;
//   receive:  I/Q ADC samples -> pfb_fir (8-tap window, frames every 3456 samples, i.e.
//             oversampled by 32/27) -> fft_sdf (4096 bins) -> channel_select (2000 channels
//             from a bin map) -> dds + ddc (per-channel down-conversion to 0 Hz, removing the
//             tone's offset and the oversampling rotation) -> lpf -> phase_recorder (phase of
//             each channel written to a record memory the host reads).
// The host configures everything through one write port: cfg_feed selects the feedline,
// cfg_region the table (see mkid_pkg::cfg_region_e) and cfg_addr/cfg_data the entry. In
// region CFG_CTRL address 0 sets the DAC loop length and address 1 bit 0 starts the DAC.
// The converters, the RF mixers and the host computer are outside: their sample streams
// and the host's register and read ports are the ports of this module.
//
// Timing: one complex sample per clock at the DAC port; the ADC port accepts up to HOP/N
// samples per clock (adc_ready), since each frame of N output samples needs HOP new inputs.
// The paper's converters run at 4 GSPS (ADC) with a 500 MHz fabric clock, which needs eight
// samples per clock; this design is the one-sample-per-clock version of that datapath.
// The chain, its sizes (4,096 points, 8 taps, 32/27, 2,000 channels, two feedlines) follow the
// paper; the interfaces and everything inside the blocks that the paper does not describe
// are this design's choices (see each block).
module mkid_readout_top
  import mkid_pkg::*;
#(
  parameter int unsigned NFEED     = 2,
  parameter int unsigned N         = 4096,
  parameter int unsigned TAPS      = 8,
  parameter int unsigned HOP       = 3456,
  parameter int unsigned NCHAN     = 2000,
  parameter int unsigned DAC_DEPTH = 65536,
  parameter int unsigned REC_DEPTH = 65536,
  parameter int unsigned LPF_SHIFT = 2,
  localparam int unsigned FDW      = (NFEED > 1) ? $clog2(NFEED) : 1,
  localparam int unsigned RAW      = $clog2(REC_DEPTH),
  localparam int unsigned RDW      = $clog2(NCHAN) + 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host configuration writes
  input  logic                 cfg_we,
  input  logic [FDW-1:0]       cfg_feed,
  input  cfg_region_e          cfg_region,
  input  logic [19:0]          cfg_addr,
  input  logic [31:0]          cfg_data,
  // ADC sample streams
  input  logic                 adc_valid [NFEED],
  output logic                 adc_ready [NFEED],
  input  cplx_t                adc_data  [NFEED],
  // DAC sample streams
  output logic                 dac_valid [NFEED],
  output cplx_t                dac_data  [NFEED],
  // host reads of the phase record
  input  logic [RAW-1:0]       rec_rd_addr  [NFEED],
  output logic [RDW-1:0]       rec_rd_data  [NFEED],
  output logic [RAW:0]         rec_wr_count [NFEED],
  // frame marker: one pulse per processed frame (last channel leaves the LPF)
  output logic                 frame_done   [NFEED]
);
  localparam int unsigned DAW = $clog2(DAC_DEPTH);
  localparam int unsigned BW  = $clog2(N);
  localparam int unsigned CW  = $clog2(NCHAN);
  localparam int unsigned KW  = $clog2(N * TAPS);

  initial begin
    assert (HOP * 32 == N * 27) else $warning("mkid_readout_top: HOP is not N*27/32");
  end

  for (genvar f = 0; f < int'(NFEED); f++) begin : g_feed
    logic sel;
    assign sel = cfg_we && (cfg_feed == FDW'(f));

    // ---------------- control registers ----------------
    logic [DAW:0] play_len;
    logic         run;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        play_len <= '0;
        run      <= 1'b0;
      end else if (sel && cfg_region == CFG_CTRL) begin
        if (cfg_addr == 20'd0) play_len <= (DAW+1)'(cfg_data);
        if (cfg_addr == 20'd1) run      <= cfg_data[0];
      end
    end

    // ---------------- transmit ----------------
    dac_lut #(.DEPTH(DAC_DEPTH)) u_dac_lut (
      .clk, .rst_n,
      .wr_en   (sel && cfg_region == CFG_DAC_LUT),
      .wr_addr (cfg_addr[DAW-1:0]),
      .wr_data (cplx_t'(cfg_data)),
      .play_len, .run,
      .out_valid (dac_valid[f]),
      .out_data  (dac_data[f])
    );

    // ---------------- receive: coarse channelisation ----------------
    logic  pfb_v, pfb_l;
    cplx_t pfb_d;
    pfb_fir #(.N(N), .TAPS(TAPS), .HOP(HOP), .COEF_W(18)) u_pfb (
      .clk, .rst_n,
      .in_valid (adc_valid[f]),
      .in_ready (adc_ready[f]),
      .in_data  (adc_data[f]),
      .coef_we  (sel && cfg_region == CFG_PFB_COEF),
      .coef_addr(cfg_addr[KW-1:0]),
      .coef_data(cfg_data[17:0]),
      .out_valid(pfb_v), .out_last(pfb_l), .out_data(pfb_d)
    );

    logic          fft_v, fft_l;
    cplx_t         fft_d;
    logic [BW-1:0] fft_bin;
    fft_sdf #(.N(N)) u_fft (
      .clk, .rst_n,
      .in_valid (pfb_v), .in_data(pfb_d),
      .out_valid(fft_v), .out_last(fft_l), .out_data(fft_d), .out_bin(fft_bin)
    );

    // ---------------- receive: fine channelisation ----------------
    logic          cs_v, cs_l;
    cplx_t         cs_d;
    logic [CW-1:0] cs_c;
    channel_select #(.N(N), .NCHAN(NCHAN)) u_chsel (
      .clk, .rst_n,
      .in_valid(fft_v), .in_last(fft_l), .in_data(fft_d), .in_bin(fft_bin),
      .map_we  (sel && cfg_region == CFG_CHAN_MAP),
      .map_addr(cfg_addr[CW-1:0]),
      .map_data(cfg_data[BW-1:0]),
      .out_valid(cs_v), .out_last(cs_l), .out_data(cs_d), .out_chan(cs_c)
    );

    logic          lo_v, lo_l;
    cplx_t         lo_d;
    logic [CW-1:0] lo_ch;
    samp_t         lo_cos, lo_sin;
    dds #(.NCHAN(NCHAN), .PHASE_W(32)) u_dds (
      .clk, .rst_n,
      .in_valid(cs_v), .in_last(cs_l), .in_data(cs_d), .in_chan(cs_c),
      .inc_we  (sel && cfg_region == CFG_DDS_INC),
      .inc_addr(cfg_addr[CW-1:0]),
      .inc_data(cfg_data),
      .out_valid(lo_v), .out_last(lo_l), .out_data(lo_d), .out_chan(lo_ch),
      .out_cos(lo_cos), .out_sin(lo_sin)
    );

    logic          dc_v, dc_l;
    cplx_t         dc_d;
    logic [CW-1:0] dc_c;
    ddc #(.NCHAN(NCHAN)) u_ddc (
      .clk, .rst_n,
      .in_valid(lo_v), .in_last(lo_l), .in_data(lo_d), .in_chan(lo_ch),
      .lo_cos, .lo_sin,
      .out_valid(dc_v), .out_last(dc_l), .out_data(dc_d), .out_chan(dc_c)
    );

    logic          lp_v, lp_l, lp_clearing;
    cplx_t         lp_d;
    logic [CW-1:0] lp_c;
    lpf #(.NCHAN(NCHAN), .SHIFT(LPF_SHIFT)) u_lpf (
      .clk, .rst_n,
      .in_valid(dc_v), .in_last(dc_l), .in_data(dc_d), .in_chan(dc_c),
      .clearing(lp_clearing),
      .out_valid(lp_v), .out_last(lp_l), .out_data(lp_d), .out_chan(lp_c)
    );
    assign frame_done[f] = lp_v && lp_l;

    phase_recorder #(.NCHAN(NCHAN), .DEPTH(REC_DEPTH)) u_rec (
      .clk, .rst_n,
      .in_valid(lp_v), .in_data(lp_d), .in_chan(lp_c),
      .rd_addr (rec_rd_addr[f]),
      .rd_data (rec_rd_data[f]),
      .wr_count(rec_wr_count[f])
    );
  end
endmodule
