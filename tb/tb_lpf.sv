// tb_lpf: per-channel low-pass filter. After the reset-time clearing (NCHAN clocks, inputs
// dropped), four channels receive interleaved inputs: steps of different heights and random
// noise. Each output is compared with a real-valued model y += (x - y) / 2^SHIFT within two
// units; the step responses must settle to the step height, and the channels must not mix.
module tb_lpf;
  import mkid_pkg::*;
  localparam int NCHAN = 4, SHIFT = 2, CW = $clog2(NCHAN);
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  cplx_t in_data = '0;
  logic [CW-1:0] in_chan = '0;
  logic clearing, out_valid, out_last;
  cplx_t out_data;
  logic [CW-1:0] out_chan;
  int checks = 0, failures = 0;

  lpf #(.NCHAN(NCHAN), .SHIFT(SHIFT)) dut (.*);
  always #5 clk = ~clk;

  real yr [NCHAN], yi [NCHAN];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int clr = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    do begin @(posedge clk); clr++; #1; end while (clearing);
    checks++;
    if (clr != NCHAN) begin failures++; $display("clearing lasted %0d clocks", clr); end
    foreach (yr[c]) begin yr[c] = 0; yi[c] = 0; end
    for (int k = 0; k < 60; k++)
      for (int c = 0; c < NCHAN; c++) begin
        real xr, xi;
        if (c < 2) begin xr = (c == 0) ? 10000.0 : -7000.0; xi = (c == 0) ? -3000.0 : 20000.0; end
        else begin xr = real'($signed(15'($urandom))); xi = real'($signed(15'($urandom))); end
        @(negedge clk);
        in_valid = 1; in_chan = CW'(c); in_last = (c == NCHAN - 1);
        in_data.re = samp_t'($rtoi(xr)); in_data.im = samp_t'($rtoi(xi));
        yr[c] += (xr - yr[c]) / (2.0 ** SHIFT);
        yi[c] += (xi - yi[c]) / (2.0 ** SHIFT);
        @(posedge clk); #1;
        checks++;
        if (!out_valid || out_chan != CW'(c) || out_last != (c == NCHAN - 1) ||
            real'(out_data.re) - yr[c] > 2.0 || yr[c] - real'(out_data.re) > 2.0 ||
            real'(out_data.im) - yi[c] > 2.0 || yi[c] - real'(out_data.im) > 2.0) begin
          failures++;
          if (failures < 8) $display("k %0d chan %0d: got (%0d,%0d) want (%0.1f,%0.1f)", k, c,
                                     out_data.re, out_data.im, yr[c], yi[c]);
        end
        if (k == 59 && c == 0) begin
          checks++;
          if (out_data.re < 9990 || out_data.re > 10010) begin failures++; $display("step not settled"); end
        end
      end
    @(negedge clk); in_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
