// tb_pfb_fir: checks the polyphase window front end against an integer reference model.
// Random coefficients and random input samples are used; every output sample of every frame
// is compared exactly with round(sum_m h[n+mN] x[k*HOP+n+mN] / 2^17). The input is first
// driven with random gaps, then continuously, and the test checks that in_ready throttles the
// input (back-pressure) and that, once throttled, frames leave back to back every N clocks.
module tb_pfb_fir;
  import mkid_pkg::*;
  localparam int N = 32, TAPS = 4, HOP = 27, COEF_W = 18;
  localparam int NIN = 40 * N;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  cplx_t in_data = '0;
  logic coef_we = 0;
  logic [$clog2(N*TAPS)-1:0] coef_addr = '0;
  logic signed [COEF_W-1:0] coef_data = '0;
  logic out_valid, out_last;
  cplx_t out_data;
  int checks = 0, failures = 0;

  pfb_fir #(.N(N), .TAPS(TAPS), .HOP(HOP), .COEF_W(COEF_W)) dut (.*);
  always #5 clk = ~clk;

  int h [N*TAPS];
  int xr [NIN], xi [NIN];
  int nacc = 0, nout = 0, stalls = 0, last_cycle = -1, cycle = 0, gap_ok = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_out(int k, int n, bit im);
    longint acc = 0, r;
    for (int m = 0; m < TAPS; m++)
      acc += longint'(im ? xi[k*HOP+n+m*N] : xr[k*HOP+n+m*N]) * h[n+m*N];
    r = (acc + (64'sd1 <<< 16)) >>> 17;
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return int'(r);
  endfunction

  always @(posedge clk) begin
    cycle++;
    if (in_valid && !in_ready) stalls++;
    if (in_valid && in_ready) nacc++;
    if (rst_n && out_valid) begin
      automatic int k = nout / N, n = nout % N;
      if ((k + 1) * HOP + TAPS * N <= nacc + HOP) begin
        checks++;
        if (out_data.re != samp_t'(ref_out(k, n, 0)) || out_data.im != samp_t'(ref_out(k, n, 1))) begin
          failures++;
          if (failures < 8) $display("frame %0d n %0d: got (%0d,%0d) want (%0d,%0d)", k, n,
                                     out_data.re, out_data.im, ref_out(k, n, 0), ref_out(k, n, 1));
        end
      end
      checks++;
      if (out_last != (n == N - 1)) begin failures++; $display("out_last wrong"); end
      if (out_last) begin
        // in the continuously driven phase, frames must follow each other every N clocks
        if (last_cycle >= 0 && nacc > NIN / 2 + TAPS * N) begin
          checks++;
          if (cycle - last_cycle != N) begin
            failures++; $display("frame spacing %0d, want %0d", cycle - last_cycle, N);
          end else gap_ok++;
        end
        last_cycle = cycle;
      end
      nout++;
    end
  end

  initial begin
    for (int i = 0; i < N * TAPS; i++) h[i] = $signed(18'($urandom)) / 4;
    for (int i = 0; i < NIN; i++) begin
      xr[i] = $signed(16'($urandom));
      xi[i] = $signed(16'($urandom));
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N * TAPS; i++) begin
      @(negedge clk);
      coef_we = 1; coef_addr = ($clog2(N*TAPS))'(i); coef_data = COEF_W'(h[i]);
    end
    @(negedge clk); coef_we = 0;
    for (int i = 0; i < NIN; i++) begin
      @(negedge clk);
      if (i < NIN / 2)
        while ($urandom_range(0, 2) == 0) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      in_data.re = samp_t'(xr[i]);
      in_data.im = samp_t'(xi[i]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0;
    repeat (3 * N) @(posedge clk);
    checks++;
    if (stalls == 0) begin failures++; $display("in_ready never throttled the input"); end
    checks++;
    if (gap_ok < 3) begin failures++; $display("too few back-to-back frames: %0d", gap_ok); end
    checks++;
    if (nout / N != (NIN - TAPS * N) / HOP + 1) begin
      failures++; $display("frames out %0d, want %0d", nout / N, (NIN - TAPS * N) / HOP + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
