// tb_ddc: random samples and random unit-magnitude oscillator values; each output must equal
// in * (cos - j sin) / 32768 within one unit (saturated at full scale), one clock after the input, with channel number
// and frame-end flag carried along. A tone rotating by a fixed step per frame, mixed with an
// oscillator of the same step, must come out with constant phase.
module tb_ddc;
  import mkid_pkg::*;
  localparam int NCHAN = 16, CW = $clog2(NCHAN);
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  cplx_t in_data = '0;
  logic [CW-1:0] in_chan = '0;
  samp_t lo_cos = '0, lo_sin = '0;
  logic out_valid, out_last;
  cplx_t out_data;
  logic [CW-1:0] out_chan;
  int checks = 0, failures = 0;

  ddc #(.NCHAN(NCHAN)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one(real xr, real xi, real ang, int ch, output real yr, output real yi);
    real c = $cos(ang), s = $sin(ang);
    real er, ei;
    @(negedge clk);
    in_valid = 1; in_last = ch[0]; in_chan = CW'(ch);
    in_data.re = samp_t'($rtoi(xr)); in_data.im = samp_t'($rtoi(xi));
    lo_cos = samp_t'($rtoi($floor(32767.0 * c + 0.5)));
    lo_sin = samp_t'($rtoi($floor(32767.0 * s + 0.5)));
    er = (real'(in_data.re) * real'(lo_cos) + real'(in_data.im) * real'(lo_sin)) / 32768.0;
    ei = (real'(in_data.im) * real'(lo_cos) - real'(in_data.re) * real'(lo_sin)) / 32768.0;
    if (er > 32767.0) er = 32767.0;
    if (er < -32768.0) er = -32768.0;
    if (ei > 32767.0) ei = 32767.0;
    if (ei < -32768.0) ei = -32768.0;
    @(posedge clk); #1;
    yr = real'(out_data.re); yi = real'(out_data.im);
    checks++;
    if (!out_valid || yr - er > 1.01 || er - yr > 1.01 || yi - ei > 1.01 || ei - yi > 1.01 ||
        out_chan != CW'(ch) || out_last != ch[0]) begin
      failures++;
      if (failures < 8) $display("got (%0.0f,%0.0f) want (%0.1f,%0.1f)", yr, yi, er, ei);
    end
  endtask

  initial begin
    real yr, yi, p0 = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++)
      one(real'($signed(16'($urandom))), real'($signed(16'($urandom))),
          6.283185307179586 * $urandom_range(0, 9999) / 10000.0, i % NCHAN, yr, yi);
    // rotating tone, matched oscillator: the phase must stay put
    for (int k = 0; k < 50; k++) begin
      real ph = 6.283185307179586 * 0.137 * k;
      one(20000.0 * $cos(ph + 0.5), 20000.0 * $sin(ph + 0.5), ph, 1, yr, yi);
      checks++;
      if (yr - 20000.0 * $cos(0.5) > 4 || 20000.0 * $cos(0.5) - yr > 4 ||
          yi - 20000.0 * $sin(0.5) > 4 || 20000.0 * $sin(0.5) - yi > 4) begin
        failures++; $display("derotated tone moved: (%0.0f,%0.0f)", yr, yi);
      end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) begin failures++; $display("out_valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
