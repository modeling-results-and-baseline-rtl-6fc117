// tb_mkid_readout_full: end-to-end test of the readout at its default size: two feedlines,
// 4096-point filter bank with 8 taps and hop 3456 (32/27 oversampling), 2000 channels,
// 65536-sample DAC tables and phase records. The readout is instantiated without parameter
// overrides. Twenty frames are processed; the scenario and checks are described in
// mkid_e2e_bench.sv (tones in bins 500, 1200, 2000 (two tones), 3096 (negative frequency),
// 900 and the edge between bins 2600 and 2601).
module tb_mkid_readout_full;
  import mkid_pkg::*;
  localparam int NFEED = 2, N = 4096, TAPS = 8, HOP = 3456, NCHAN = 2000;
  localparam int DAC_DEPTH = 65536, REC_DEPTH = 65536;
  localparam int FDW = 1, RAW = $clog2(REC_DEPTH), RDW = $clog2(NCHAN) + 16;

  logic           clk, rst_n, cfg_we;
  logic [FDW-1:0] cfg_feed;
  cfg_region_e    cfg_region;
  logic [19:0]    cfg_addr;
  logic [31:0]    cfg_data;
  logic           adc_valid [NFEED];
  logic           adc_ready [NFEED];
  cplx_t          adc_data  [NFEED];
  logic           dac_valid [NFEED];
  cplx_t          dac_data  [NFEED];
  logic [RAW-1:0] rec_rd_addr  [NFEED];
  logic [RDW-1:0] rec_rd_data  [NFEED];
  logic [RAW:0]   rec_wr_count [NFEED];
  logic           frame_done   [NFEED];

  mkid_readout_top dut (.*);

  mkid_e2e_bench #(
    .NFEED(NFEED), .N(N), .TAPS(TAPS), .HOP(HOP), .NCHAN(NCHAN),
    .DAC_DEPTH(DAC_DEPTH), .REC_DEPTH(REC_DEPTH), .NFRAMES(20), .SETTLE(10),
    .KA(500), .KB(1200), .KC(2000), .KD(3096), .KE(900), .KF(2600), .WATCHDOG(3000000)
  ) bench (
    .*,
    .mon_v(dut.g_feed[1].lp_v), .mon_chan(dut.g_feed[1].lp_c), .mon_data(dut.g_feed[1].lp_d)
  );
endmodule
