// tb_mkid_readout_top: end-to-end test of the readout at reduced size (64-point filter bank,
// hop 54 = 64*27/32, 8 taps, 6 channels, two feedlines). The scenario and its checks are
// described in mkid_e2e_bench.sv.
module tb_mkid_readout_top;
  import mkid_pkg::*;
  localparam int NFEED = 2, N = 64, TAPS = 8, HOP = 54, NCHAN = 6;
  localparam int DAC_DEPTH = 1024, REC_DEPTH = 4096;
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

  mkid_readout_top #(
    .NFEED(NFEED), .N(N), .TAPS(TAPS), .HOP(HOP), .NCHAN(NCHAN),
    .DAC_DEPTH(DAC_DEPTH), .REC_DEPTH(REC_DEPTH), .LPF_SHIFT(2)
  ) dut (.*);

  mkid_e2e_bench #(
    .NFEED(NFEED), .N(N), .TAPS(TAPS), .HOP(HOP), .NCHAN(NCHAN),
    .DAC_DEPTH(DAC_DEPTH), .REC_DEPTH(REC_DEPTH), .NFRAMES(30), .SETTLE(10),
    .KA(5), .KB(12), .KC(20), .KD(40), .KE(9), .KF(26), .WATCHDOG(200000)
  ) bench (
    .*,
    .mon_v(dut.g_feed[1].lp_v), .mon_chan(dut.g_feed[1].lp_c), .mon_data(dut.g_feed[1].lp_d)
  );
endmodule
