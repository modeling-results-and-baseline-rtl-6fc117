// tb_pfb_scalloping: scalloping loss of the coarse filter bank (pfb_fir followed by fft_sdf),
// for the critically sampled bank and for the oversampled one.
//
// Two chains with 256 bins are built side by side:
//   g=0: 4 taps, hop 256 (critically sampled), Hamming-windowed sinc of normal width;
//   g=1: 8 taps, hop 216 (= 256*27/32, oversampled), Hamming-windowed sinc widened by 32/27.
// Each receives a complex tone at bin 38 + d, for d = 0, 1/4, 1/2, 3/4 and 1 bin. This is the
// same sweep as a bench measurement of a 4-tap, 256-bin bank with tones stepped by a quarter
// bin from the 38 MHz bin. The chain is reset before each tone, and frames 2 to 4 are measured.
// The magnitudes of bins 38 and 39 are compared with the closed form
//     |X[38]| = A/N * |sum_i h[i] exp(j 2 pi d i / N)| / 2^17
// (and d-1 for bin 39), within 1 % plus 3 units. The best-bin loss at d = 1/2 must then be
// about 6 dB for the critically sampled bank (between 4.5 and 7.5 dB). For the oversampled
// bank it must be under 3 dB.
module tb_pfb_scalloping;
  import mkid_pkg::*;
  localparam int N = 256, K0 = 38, NOFF = 5, MEAS0 = 2, MEAS1 = 4;
  localparam real A = 12000.0, TWO_PI = 6.283185307179586, PI = 3.141592653589793;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  real meas [2][NOFF][2];    // [config][offset][bin 38/39]
  real model [2][NOFF][2];
  logic [1:0] done = '0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int TAPS = (g == 0) ? 4 : 8;
    localparam int HOP  = (g == 0) ? N : N * 27 / 32;
    localparam real WIDEN = (g == 0) ? 1.0 : 32.0 / 27.0;
    localparam int CAW = $clog2(N * TAPS);
    logic rst_n = 0;
    logic in_valid = 0, in_ready;
    cplx_t in_data = '0;
    logic coef_we = 0;
    logic [CAW-1:0] coef_addr = '0;
    logic signed [17:0] coef_data = '0;
    logic pv, pl, fv, fl;
    cplx_t pd, fd;
    logic [$clog2(N)-1:0] fbin;
    int h [N*TAPS];

    pfb_fir #(.N(N), .TAPS(TAPS), .HOP(HOP)) u_pfb (
      .clk, .rst_n, .in_valid, .in_ready, .in_data, .coef_we, .coef_addr, .coef_data,
      .out_valid(pv), .out_last(pl), .out_data(pd));
    fft_sdf #(.N(N)) u_fft (
      .clk, .rst_n, .in_valid(pv), .in_data(pd),
      .out_valid(fv), .out_last(fl), .out_data(fd), .out_bin(fbin));

    // output side: average |bin 38| and |bin 39| over frames MEAS0..MEAS1
    int frame = 0;
    real acc38 = 0.0, acc39 = 0.0;
    always @(posedge clk) begin
      if (rst_n && fv) begin
        if (frame >= MEAS0 && frame <= MEAS1) begin
          if (int'(fbin) == K0)
            acc38 += $sqrt(real'(fd.re) * real'(fd.re) + real'(fd.im) * real'(fd.im));
          if (int'(fbin) == K0 + 1)
            acc39 += $sqrt(real'(fd.re) * real'(fd.re) + real'(fd.im) * real'(fd.im));
        end
        if (fl) frame++;
      end
    end

    initial begin
      // window, Q1.17, plus the closed-form responses of bins 38 and 39
      for (int i = 0; i < N * TAPS; i++) begin
        automatic real x = (real'(i) - TAPS * N / 2.0 + 0.5) / N * WIDEN;
        automatic real s = (x == 0.0) ? 1.0 : $sin(PI * x) / (PI * x);
        automatic real w = 0.54 - 0.46 * $cos(TWO_PI * i / (TAPS * N - 1));
        h[i] = $rtoi($floor(s * w * 131000.0 + 0.5));
      end
      for (int o = 0; o < NOFF; o++)
        for (int b = 0; b < 2; b++) begin
          automatic real d = real'(o) / 4.0 - real'(b);
          automatic real sr = 0.0, si = 0.0;
          for (int i = 0; i < N * TAPS; i++) begin
            sr += real'(h[i]) * $cos(TWO_PI * d * i / N);
            si += real'(h[i]) * $sin(TWO_PI * d * i / N);
          end
          model[g][o][b] = A / N * $sqrt(sr * sr + si * si) / 131072.0;
        end
      repeat (2) @(posedge clk);
      rst_n = 1;
      for (int i = 0; i < N * TAPS; i++) begin
        @(negedge clk);
        coef_we = 1; coef_addr = CAW'(i); coef_data = 18'(h[i]);
      end
      @(negedge clk); coef_we = 0;
      for (int o = 0; o < NOFF; o++) begin
        automatic real f = (real'(K0) + real'(o) / 4.0) / N;
        automatic int n = 0;
        @(negedge clk); rst_n = 0;
        @(negedge clk); rst_n = 1;
        frame = 0; acc38 = 0.0; acc39 = 0.0;
        while (frame <= MEAS1) begin
          in_valid = 1;
          in_data.re = 16'($rtoi($floor(A * $cos(TWO_PI * f * n) + 0.5)));
          in_data.im = 16'($rtoi($floor(A * $sin(TWO_PI * f * n) + 0.5)));
          @(posedge clk);
          if (in_ready) n++;
          @(negedge clk);
        end
        in_valid = 0;
        meas[g][o][0] = acc38 / (MEAS1 - MEAS0 + 1);
        meas[g][o][1] = acc39 / (MEAS1 - MEAS0 + 1);
      end
      done[g] = 1;
    end
  end

  function automatic real db(real x, real ref_v);
    return 20.0 * $log10(x / ref_v);
  endfunction

  initial begin
    wait (done == 2'b11);
    for (int g = 0; g < 2; g++) begin
      automatic real ref_v = meas[g][0][0];
      automatic real edge_db;
      $display("%s bank: tone offset (bins) / bin 38 dB / bin 39 dB (model)",
               g == 0 ? "critically sampled 4-tap" : "oversampled 8-tap");
      for (int o = 0; o < NOFF; o++) begin
        $display("  %4.2f  %7.2f  %7.2f   (%7.2f %7.2f)", real'(o) / 4.0,
                 db(meas[g][o][0], ref_v), db(meas[g][o][1], ref_v),
                 db(model[g][o][0], model[g][0][0]), db(model[g][o][1], model[g][0][0]));
        for (int b = 0; b < 2; b++) begin
          checks++;
          if (meas[g][o][b] < model[g][o][b] * 0.99 - 3.0 ||
              meas[g][o][b] > model[g][o][b] * 1.01 + 3.0) begin
            failures++;
            $display("MISMATCH cfg %0d offset %0d bin %0d: %f vs model %f",
                     g, o, K0 + b, meas[g][o][b], model[g][o][b]);
          end
        end
      end
      edge_db = db(meas[g][2][0] > meas[g][2][1] ? meas[g][2][0] : meas[g][2][1], ref_v);
      checks++;
      if (g == 0 && (edge_db > -4.5 || edge_db < -7.5)) begin
        failures++;
        $display("critically sampled edge loss %f dB, expected about -6 dB", edge_db);
      end
      if (g == 1 && edge_db < -3.0) begin
        failures++;
        $display("oversampled edge loss %f dB, expected under 3 dB", edge_db);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
