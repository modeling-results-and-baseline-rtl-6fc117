// mkid_e2e_bench: stimulus and checking for the end-to-end readout testbenches. The
// testbench top instantiates the readout and this bench side by side and connects them
// port to port; the bench's parameters must match the readout's sizes. mon_* carry the
// low-pass filter output of feedline 1, used to compare tone amplitudes.
//
// Scenario. The host loads, for every feedline, the window coefficients (a Hamming-windowed
// sinc widened by 32/27), a DAC waveform holding a few probe tones, the channel-to-bin map and
// the oscillator increments inc = frac(f_tone * HOP) * 2^32 (f_tone in cycles per sample).
// The DAC output is captured and fed back to the ADC input at the rate the ADC port accepts,
// standing in for the RF loop through the resonators. After NFRAMES frames the phase record
// is read back through the host port and checked:
//   feed 0: ch0 bin-centred tone, ch1 tone 1/4 bin off centre, ch2/ch3 two tones in one bin
//           (the bin is copied to both channels), ch4 a negative-frequency tone 1/8 bin off
//           centre: all must hold a steady phase once the filter has settled; ch5 reads the
//           bin of ch0 with no correction and must rotate by frac(KA*HOP/N) turn per frame,
//           the rotation the oversampled filter bank introduces;
//   feed 1: ch0 a bin-centred tone and ch1 a tone on the edge between two bins, of equal
//           amplitude; the edge tone must come out within 3 dB of the centred one (no
//           scalloping loss) and both phases must be steady.
// Mechanisms counted (each must happen): ADC back-pressure, DAC loop wrap, copied bin,
// corrected channel steady, uncorrected rotation, edge tone without scalloping.

module mkid_e2e_bench
  import mkid_pkg::*;
#(
  parameter int NFEED = 2, N = 64, TAPS = 8, HOP = 54, NCHAN = 6,
  parameter int DAC_DEPTH = 1024, REC_DEPTH = 4096, NFRAMES = 30, SETTLE = 10,
  parameter int KA = 5, KB = 12, KC = 20, KD = 40, KE = 9, KF = 26,
  parameter int WATCHDOG = 200000,
  localparam int FDW = (NFEED > 1) ? $clog2(NFEED) : 1,
  localparam int RAW = $clog2(REC_DEPTH),
  localparam int RDW = $clog2(NCHAN) + 16,
  localparam int CW  = $clog2(NCHAN)
) (
  output logic              clk,
  output logic              rst_n,
  output logic              cfg_we,
  output logic [FDW-1:0]    cfg_feed,
  output cfg_region_e       cfg_region,
  output logic [19:0]       cfg_addr,
  output logic [31:0]       cfg_data,
  output logic              adc_valid [NFEED],
  input  logic              adc_ready [NFEED],
  output cplx_t             adc_data  [NFEED],
  input  logic              dac_valid [NFEED],
  input  cplx_t             dac_data  [NFEED],
  output logic [RAW-1:0]    rec_rd_addr  [NFEED],
  input  logic [RDW-1:0]    rec_rd_data  [NFEED],
  input  logic [RAW:0]      rec_wr_count [NFEED],
  input  logic              frame_done   [NFEED],
  input  logic              mon_v,
  input  logic [CW-1:0]     mon_chan,
  input  cplx_t             mon_data
);
  initial begin
    clk = 0; rst_n = 0; cfg_we = 0; cfg_feed = '0; cfg_region = CFG_CTRL; cfg_addr = '0; cfg_data = '0;
  end

  localparam real TWO_PI = 6.283185307179586;

  int checks = 0, failures = 0;
  int n_backpressure = 0, n_dac_wrap = 0, n_copied = 0, n_steady = 0, n_rotation = 0, n_flat = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- tone plan ----------------
  // tone t of feed f: bin k, offset d (in bins), amplitude a
  localparam int NT = 5;
  real tk [2][NT], td [2][NT], ta [2][NT];
  initial begin
    tk[0] = '{KA, KB, KC, KC, KD};  td[0] = '{0.0, 0.25, -0.25, 0.25, 0.125};
    ta[0] = '{5000.0, 5000.0, 5000.0, 5000.0, 5000.0};
    tk[1] = '{KE, KF, 0, 0, 0};     td[1] = '{0.0, 0.5, 0.0, 0.0, 0.0};
    ta[1] = '{8000.0, 8000.0, 0.0, 0.0, 0.0};
  end

  function automatic logic [31:0] inc_of(real k, real d);
    real cyc = (k + d) * HOP / N;          // turns per frame
    cyc = cyc - $floor(cyc);
    if (cyc >= 0.5) cyc -= 1.0;            // keep within the signed 32-bit range
    return 32'($rtoi($floor(cyc * 4294967296.0 + 0.5)));
  endfunction

  task automatic cfg(int f, cfg_region_e r, int a, logic [31:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_feed = FDW'(f); cfg_region = r; cfg_addr = 20'(a); cfg_data = d;
  endtask

  // ---------------- loopback: DAC -> capture -> ADC ----------------
  cplx_t cap [NFEED][DAC_DEPTH];
  int    ncap [NFEED], adc_idx [NFEED], nframes [NFEED];

  for (genvar f = 0; f < NFEED; f++) begin : g_loop
    always_comb begin
      adc_valid[f] = (ncap[f] > adc_idx[f]) || (ncap[f] >= DAC_DEPTH);
      adc_data[f]  = cap[f][adc_idx[f] % DAC_DEPTH];
    end
    always @(posedge clk) begin
      if (rst_n && dac_valid[f]) begin
        if (ncap[f] < DAC_DEPTH) cap[f][ncap[f]] <= dac_data[f];
        else if (ncap[f] < 2 * DAC_DEPTH) begin
          checks++;
          if (dac_data[f] != cap[f][ncap[f] % DAC_DEPTH]) begin
            failures++; $display("feed %0d: DAC period differs at %0d", f, ncap[f]);
          end
          if (ncap[f] == 2 * DAC_DEPTH - 1) n_dac_wrap++;
        end
        ncap[f] <= ncap[f] + 1;
      end
      if (rst_n && adc_valid[f] && adc_ready[f]) adc_idx[f] <= adc_idx[f] + 1;
      if (rst_n && adc_valid[f] && !adc_ready[f]) n_backpressure++;
      if (rst_n && frame_done[f]) nframes[f] <= nframes[f] + 1;
    end
  end

  // ---------------- analysis helpers ----------------
  int ph [NFEED][NCHAN][$];

  function automatic int wrap16(int d);
    d = d % 65536;
    if (d >= 32768) d -= 65536;
    if (d < -32768) d += 65536;
    return d;
  endfunction

  // largest deviation of the phase of (f, c) from its value at frame SETTLE
  function automatic int spread(int f, int c);
    int m = 0;
    for (int k = SETTLE; k < ph[f][c].size(); k++) begin
      int d = wrap16(ph[f][c][k] - ph[f][c][SETTLE]);
      if (d < 0) d = -d;
      if (d > m) m = d;
    end
    return m;
  endfunction

  // magnitude of the LPF output of feed 1, channels 0 and 1, after settling
  real mag1 [2];
  int  mframes = 0;
  always @(posedge clk) begin
    if (rst_n && mon_v && nframes[1] >= SETTLE && mon_chan < 2) begin
      automatic real re = real'(mon_data.re), im = real'(mon_data.im);
      mag1[mon_chan[0]] = $sqrt(re * re + im * im);
    end
  end

  initial begin
    foreach (ncap[f]) begin ncap[f] = 0; adc_idx[f] = 0; nframes[f] = 0; rec_rd_addr[f] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < NFEED; f++) begin
      automatic int fs = (f == 0) ? 0 : 1;
      // window: Hamming-windowed sinc, bins widened by 32/27, Q1.17
      for (int i = 0; i < TAPS * N; i++) begin
        automatic real x = (real'(i) - TAPS * N / 2.0 + 0.5) / N * 32.0 / 27.0;
        automatic real s = (x == 0.0) ? 1.0 : $sin(3.141592653589793 * x) / (3.141592653589793 * x);
        automatic real w = 0.54 - 0.46 * $cos(TWO_PI * i / (TAPS * N - 1));
        cfg(f, CFG_PFB_COEF, i, 32'($rtoi($floor(s * w * 131000.0 + 0.5))));
      end
      // DAC waveform: one period of the comb
      for (int n = 0; n < DAC_DEPTH; n++) begin
        automatic real re = 0, im = 0;
        automatic cplx_t smp;
        for (int t = 0; t < NT; t++) begin
          automatic real a = TWO_PI * (tk[fs][t] + td[fs][t]) / N * n;
          re += ta[fs][t] * $cos(a);
          im += ta[fs][t] * $sin(a);
        end
        smp.re = samp_t'($rtoi($floor(re + 0.5)));
        smp.im = samp_t'($rtoi($floor(im + 0.5)));
        cfg(f, CFG_DAC_LUT, n, smp);
      end
      // channel map and oscillators
      for (int c = 0; c < NCHAN; c++) begin
        automatic int b; logic [31:0] inc;
        if (c < NT && ta[fs][c] > 0.0) begin
          b = int'(tk[fs][c]); inc = inc_of(tk[fs][c], td[fs][c]);
        end else if (f == 0 && c == 5) begin
          b = int'(tk[0][0]); inc = 32'd0;          // uncorrected copy of ch0
        end else begin
          b = (2 * c + 1) % N; inc = 32'd0;
        end
        cfg(f, CFG_CHAN_MAP, c, 32'(b));
        cfg(f, CFG_DDS_INC, c, inc);
      end
      cfg(f, CFG_CTRL, 0, 32'(DAC_DEPTH));
    end
    for (int f = 0; f < NFEED; f++) cfg(f, CFG_CTRL, 1, 32'd1);
    @(negedge clk); cfg_we = 0;

    // run until every feed has produced NFRAMES frames
    wait (nframes[0] >= NFRAMES && nframes[NFEED-1] >= NFRAMES);
    repeat (30) @(posedge clk);

    // read back the phase record
    for (int f = 0; f < NFEED; f++) begin
      automatic int nw = int'(rec_wr_count[f]);
      checks++;
      if (nw < NFRAMES * NCHAN) begin failures++; $display("feed %0d: %0d words recorded", f, nw); end
      if (nw > REC_DEPTH) nw = REC_DEPTH;
      for (int i = 0; i < nw; i++) begin
        @(negedge clk); rec_rd_addr[f] = RAW'(i);
        @(posedge clk); #1;
        checks++;
        if (int'(rec_rd_data[f][RDW-1:16]) != i % NCHAN) begin
          failures++;
          if (failures < 10) $display("feed %0d word %0d: channel %0d", f, i, rec_rd_data[f][RDW-1:16]);
        end
        ph[f][i % NCHAN].push_back(int'(rec_rd_data[f][15:0]));
      end
    end

    // feed 0: corrected single tones hold their phase
    for (int j = 0; j < 3; j++) begin
      automatic int c = (j == 2) ? 4 : j, s = spread(0, c);
      checks++;
      if (s > 400) begin failures++; $display("feed 0 ch %0d: phase wanders by %0d/65536 turn", c, s); end
      else n_steady++;
    end
    // feed 0: two tones in one bin, each channel tuned to its own tone
    for (int c = 2; c <= 3; c++) begin
      automatic int s = spread(0, c);
      checks++;
      if (s > 3500) begin failures++; $display("feed 0 ch %0d (shared bin): wanders by %0d", c, s); end
      else n_copied++;
    end
    // feed 0, ch5: no correction, rotation per frame = frac(KA*HOP/N) turn
    begin
      automatic real r = real'(KA) * HOP / N;
      automatic int want = $rtoi(65536.0 * (r - $floor(r)));
      for (int k = SETTLE + 5; k < ph[0][5].size(); k++) begin
        automatic int d = wrap16(ph[0][5][k] - ph[0][5][k-1] - want);
        checks++;
        if (d > 400 || d < -400) begin
          failures++; $display("uncorrected rotation off by %0d at frame %0d", d, k);
        end else n_rotation++;
      end
    end
    // feed 1: bin-edge tone, no scalloping loss
    if (NFEED > 1) begin
      for (int c = 0; c < 2; c++) begin
        automatic int s = spread(1, c);
        checks++;
        if (s > 400) begin failures++; $display("feed 1 ch %0d: phase wanders by %0d", c, s); end
        else n_steady++;
      end
      checks++;
      if (mag1[1] < 0.707 * mag1[0] || mag1[0] < 1000.0) begin
        failures++; $display("bin-edge tone %0.0f against centred tone %0.0f", mag1[1], mag1[0]);
      end else n_flat++;
      $display("feed 1: centred tone %0.0f, bin-edge tone %0.0f (%0.2f dB)", mag1[0], mag1[1],
               20.0 * $log10(mag1[1] / mag1[0]));
    end

    $display("mechanisms: backpressure=%0d dac_wrap=%0d copied_bin=%0d steady=%0d rotation=%0d flat_edge=%0d",
             n_backpressure, n_dac_wrap, n_copied, n_steady, n_rotation, n_flat);
    checks++; if (n_backpressure == 0) begin failures++; $display("no ADC back-pressure"); end
    checks++; if (n_dac_wrap == 0)     begin failures++; $display("DAC loop never wrapped"); end
    checks++; if (n_copied == 0)       begin failures++; $display("no copied bin"); end
    checks++; if (n_steady == 0)       begin failures++; $display("no steady channel"); end
    checks++; if (n_rotation == 0)     begin failures++; $display("no uncorrected rotation seen"); end
    checks++; if (n_flat == 0 && NFEED > 1) begin failures++; $display("edge tone not checked"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
