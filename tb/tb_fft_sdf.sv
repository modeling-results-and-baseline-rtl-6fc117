// tb_fft_sdf: checks the streaming FFT against a direct DFT computed in real arithmetic.
// Several frames of random complex samples (inside the circle of radius 32767, the input
// range the FFT supports) are streamed, with random gaps in in_valid; every
// output bin is compared with DFT/N of its frame within a small tolerance, the bin tags are
// checked to cover each bin once per frame, and the latency from the first input beat to the
// first output beat is checked to be N + log2(N) - 2 valid beats.
module tb_fft_sdf;
  import mkid_pkg::*;
  localparam int N = 64;
  localparam int FRAMES = 5;
  localparam int S = $clog2(N);

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  cplx_t in_data = '0;
  logic out_valid, out_last;
  cplx_t out_data;
  logic [S-1:0] out_bin;
  int checks = 0, failures = 0;

  fft_sdf #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  real xr [FRAMES+2][N];
  real xi [FRAMES+2][N];
  int  beats = 0, first_out_beat = -1, out_count = 0;
  bit  seen_bin [N];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: DFT of frame f, bin k, divided by N
  function automatic real rabs(real v); return v < 0 ? -v : v; endfunction

  function automatic void dft(int f, int k, output real yr, output real yi);
    yr = 0; yi = 0;
    for (int n = 0; n < N; n++) begin
      real ang = -6.283185307179586 * k * n / N;
      yr += xr[f][n] * $cos(ang) - xi[f][n] * $sin(ang);
      yi += xr[f][n] * $sin(ang) + xi[f][n] * $cos(ang);
    end
    yr /= N; yi /= N;
  endfunction

  // monitor
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      automatic int f = out_count / N;
      real yr, yi;
      if (first_out_beat < 0) begin
        first_out_beat = beats - 1;
        checks++;
        if (first_out_beat != N + S - 2) begin
          failures++;
          $display("latency: first output on beat %0d, expected %0d", first_out_beat, N + S - 2);
        end
      end
      if (f < FRAMES) begin
        dft(f, int'(out_bin), yr, yi);
        checks++;
        if (rabs(real'(out_data.re) - yr) > 6.0 || rabs(real'(out_data.im) - yi) > 6.0) begin
          failures++;
          if (failures < 10)
            $display("frame %0d bin %0d: got (%0d,%0d) want (%0.1f,%0.1f)", f, out_bin,
                     out_data.re, out_data.im, yr, yi);
        end
        if (seen_bin[out_bin]) begin failures++; $display("bin %0d twice", out_bin); end
        seen_bin[out_bin] = 1;
        checks++;
        if (out_last != ((out_count % N) == N - 1)) begin
          failures++; $display("out_last wrong at output %0d", out_count);
        end
        if ((out_count % N) == N - 1) foreach (seen_bin[i]) seen_bin[i] = 0;
      end
      out_count++;
    end
    if (rst_n && in_valid) beats++;
  end

  initial begin
    for (int f = 0; f < FRAMES + 2; f++)
      for (int n = 0; n < N; n++) begin
        // frame 0: a pure tone in bin 5; then random data
        if (f == 0) begin
          xr[f][n] = 12000.0 * $cos(6.283185307179586 * 5 * n / N);
          xi[f][n] = 12000.0 * $sin(6.283185307179586 * 5 * n / N);
        end else begin
          // random point inside the circle of radius 32767 (the input range the FFT supports)
          do begin
            xr[f][n] = real'($signed(16'($urandom_range(0, 65535))));
            xi[f][n] = real'($signed(16'($urandom_range(0, 65535))));
          end while (xr[f][n] * xr[f][n] + xi[f][n] * xi[f][n] > 32767.0 * 32767.0);
        end
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES + 2; f++)
      for (int n = 0; n < N; n++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1;
        in_data.re = samp_t'($rtoi(xr[f][n]));
        in_data.im = samp_t'($rtoi(xi[f][n]));
      end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (out_count < FRAMES * N) begin failures++; $display("only %0d outputs", out_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
