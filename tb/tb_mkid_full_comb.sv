// tb_mkid_full_comb: a full probe comb through the readout at its default size. Feedline 0
// carries 2,000 tones about 2 bins (1.95 MHz at 4 GS/s) apart, filling the band from bin -2000
// to bin +1998. Tone c sits at q_c = 2c - 2000 + (c mod 8)/16 bins, so the tones land at
// offsets of 0 to 7/16 bin from their bin centres, and each starts at a random phase.
//
// Stimulus. The host port loads:
//   - the window (Hamming-windowed sinc widened by 32/27, Q1.17);
//   - the comb as one 65,536-sample period of the DAC table;
//   - channel c -> bin round(q_c) mod 4096;
//   - the oscillator increment frac(q_c * HOP / N) turn.
// The tone amplitude is 200 per tone, which keeps the comb's peak below full scale.
//
// Checks:
//   - one period of the DAC output equals the table;
//   - the same comb, fed to the ADC port at the rate it accepts, produces one record word per
//     channel and frame, in channel order;
//   - after 10 frames of settling, every one of the 2,000 channels holds its phase within
//     2 degrees for the remaining frames.
// The readout is instantiated without parameter overrides.
module tb_mkid_full_comb;
  import mkid_pkg::*;
  localparam int NFEED = 2, N = 4096, HOP = 3456, NCHAN = 2000, TAPS = 8;
  localparam int DAC_DEPTH = 65536, REC_DEPTH = 65536;
  localparam int RAW = $clog2(REC_DEPTH), CW = $clog2(NCHAN), RDW = CW + 16;
  localparam int NFRAMES = 22, SETTLE = 10;
  localparam real TWO_PI = 6.283185307179586, PI = 3.141592653589793, AMP = 200.0;
  localparam int TOL = 364;   // 2 degrees in units of 2^-16 turn

  logic           clk = 0, rst_n = 0, cfg_we = 0;
  logic [0:0]     cfg_feed = '0;
  cfg_region_e    cfg_region = CFG_CTRL;
  logic [19:0]    cfg_addr = '0;
  logic [31:0]    cfg_data = '0;
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

  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cplx_t wave [DAC_DEPTH];
  real   q [NCHAN];
  int    adc_idx = 0, nframes = 0, ndac = 0, clipped = 0;
  bit    feeding = 0, dac_checking = 0;

  always_comb begin
    adc_valid[0] = feeding;
    adc_data[0]  = wave[adc_idx % DAC_DEPTH];
    adc_valid[1] = 1'b0;
    adc_data[1]  = '0;
    rec_rd_addr[1] = '0;
  end

  always @(posedge clk) begin
    if (rst_n && feeding && adc_ready[0]) adc_idx <= adc_idx + 1;
    if (rst_n && frame_done[0]) nframes <= nframes + 1;
    if (rst_n && dac_checking && dac_valid[0] && ndac < DAC_DEPTH) begin
      checks++;
      if (dac_data[0] != wave[ndac]) begin
        failures++;
        if (failures < 5) $display("DAC sample %0d differs", ndac);
      end
      ndac <= ndac + 1;
    end
  end

  task automatic cfg(cfg_region_e r, int a, logic [31:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_feed = '0; cfg_region = r; cfg_addr = 20'(a); cfg_data = d;
  endtask

  function automatic logic [31:0] inc_of(real qq);
    real cyc = qq * HOP / N;
    cyc = cyc - $floor(cyc);
    if (cyc >= 0.5) cyc -= 1.0;
    return 32'($rtoi($floor(cyc * 4294967296.0 + 0.5)));
  endfunction

  initial begin
    // comb: sum of 2,000 tones, each advanced by phasor rotation
    automatic real wr [] = new [DAC_DEPTH];
    automatic real wi [] = new [DAC_DEPTH];
    foreach (wr[n]) begin wr[n] = 0.0; wi[n] = 0.0; end
    for (int c = 0; c < NCHAN; c++) begin
      automatic real ph = TWO_PI * real'($urandom_range(0, 65535)) / 65536.0;
      automatic real pr = AMP * $cos(ph), pi_ = AMP * $sin(ph);
      automatic real rc, rs, t;
      q[c] = 2.0 * c - 2000.0 + real'(c % 8) / 16.0;
      rc = $cos(TWO_PI * q[c] / N);
      rs = $sin(TWO_PI * q[c] / N);
      for (int n = 0; n < DAC_DEPTH; n++) begin
        wr[n] += pr;
        wi[n] += pi_;
        t   = pr * rc - pi_ * rs;
        pi_ = pr * rs + pi_ * rc;
        pr  = t;
      end
    end
    foreach (wave[n]) begin
      automatic int re = $rtoi($floor(wr[n] + 0.5)), im = $rtoi($floor(wi[n] + 0.5));
      if (re > 32767 || re < -32768 || im > 32767 || im < -32768) clipped++;
      wave[n].re = samp_t'((re > 32767) ? 32767 : (re < -32768) ? -32768 : re);
      wave[n].im = samp_t'((im > 32767) ? 32767 : (im < -32768) ? -32768 : im);
    end
    checks++;
    if (clipped != 0) begin failures++; $display("comb clipped in %0d samples", clipped); end

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < TAPS * N; i++) begin
      automatic real x = (real'(i) - TAPS * N / 2.0 + 0.5) / N * 32.0 / 27.0;
      automatic real s = (x == 0.0) ? 1.0 : $sin(PI * x) / (PI * x);
      automatic real w = 0.54 - 0.46 * $cos(TWO_PI * i / (TAPS * N - 1));
      cfg(CFG_PFB_COEF, i, 32'($rtoi($floor(s * w * 131000.0 + 0.5))));
    end
    for (int n = 0; n < DAC_DEPTH; n++) cfg(CFG_DAC_LUT, n, {wave[n].re, wave[n].im});
    for (int c = 0; c < NCHAN; c++) begin
      automatic int b = $rtoi($floor(q[c] + 0.5));
      cfg(CFG_CHAN_MAP, c, 32'((b + N) % N));
      cfg(CFG_DDS_INC, c, inc_of(q[c]));
    end
    cfg(CFG_CTRL, 0, DAC_DEPTH);
    cfg(CFG_CTRL, 1, 1);
    @(negedge clk); cfg_we = 0; dac_checking = 1;
    // the readout input: the same comb, at the rate the filter bank accepts
    feeding = 1;
    wait (nframes >= NFRAMES);
    feeding = 0;
    repeat (20) @(posedge clk);

    checks++;
    if (ndac != DAC_DEPTH) begin failures++; $display("only %0d DAC samples seen", ndac); end
    checks++;
    if (int'(rec_wr_count[0]) < NFRAMES * NCHAN) begin
      failures++; $display("only %0d record words", rec_wr_count[0]);
    end

    // read the record back: word j*NCHAN + c is frame j, channel c
    begin
      automatic int ref_ph [NCHAN];
      automatic int worst = 0, worst_c = 0;
      for (int j = 0; j < NFRAMES; j++)
        for (int c = 0; c < NCHAN; c++) begin
          automatic logic [RDW-1:0] w;
          @(negedge clk); rec_rd_addr[0] = RAW'(j * NCHAN + c);
          @(negedge clk); w = rec_rd_data[0];
          checks++;
          if (int'(w[RDW-1:16]) != c) begin
            failures++;
            if (failures < 10) $display("record word %0d: channel %0d, want %0d", j * NCHAN + c, w[RDW-1:16], c);
          end
          if (j == SETTLE) ref_ph[c] = int'(w[15:0]);
          if (j > SETTLE) begin
            automatic int d = int'(w[15:0]) - ref_ph[c];
            if (d > 32767) d -= 65536;
            if (d < -32768) d += 65536;
            if (d < 0) d = -d;
            if (d > worst) begin worst = d; worst_c = c; end
            checks++;
            if (d > TOL) begin
              failures++;
              if (failures < 10) $display("channel %0d frame %0d: phase moved %0d/65536 turn", c, j, d);
            end
          end
        end
      $display("2000-tone comb: largest phase excursion %0.2f deg (channel %0d)",
               real'(worst) * 360.0 / 65536.0, worst_c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
