// tb_phase_recorder: random complex samples (magnitude 500..30000) with channel numbers are
// streamed one per clock. The recorded words are read back through the host port and
// compared with {channel, atan2(im, re) in 2^-16 turn} within 3 units; wr_count must count
// every sample, and the first word must be written 17 clocks after its sample (CORDIC depth).
module tb_phase_recorder;
  import mkid_pkg::*;
  localparam int NCHAN = 2000, DEPTH = 256, NS = 200, CW = $clog2(NCHAN);
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  cplx_t in_data = '0;
  logic [CW-1:0] in_chan = '0;
  logic [$clog2(DEPTH)-1:0] rd_addr = '0;
  logic [CW+16-1:0] rd_data;
  logic [$clog2(DEPTH):0] wr_count;
  int checks = 0, failures = 0;

  phase_recorder #(.NCHAN(NCHAN), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  int exp_ph [NS], exp_ch [NS];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t0 = 0, t1 = -1;
  always @(posedge clk) if (rst_n && t1 < 0 && wr_count != 0) t1 = $time;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NS; i++) begin
      automatic real mag = 500.0 + $urandom_range(0, 29500);
      automatic real ang = 6.283185307179586 * $urandom_range(0, 65535) / 65536.0;
      @(negedge clk);
      in_valid = 1;
      in_data.re = samp_t'($rtoi(mag * $cos(ang)));
      in_data.im = samp_t'($rtoi(mag * $sin(ang)));
      in_chan = CW'($urandom_range(0, NCHAN - 1));
      exp_ch[i] = int'(in_chan);
      exp_ph[i] = $rtoi($floor($atan2(real'(in_data.im), real'(in_data.re)) / 6.283185307179586 * 65536.0 + 0.5));
      if (i == 0) t0 = $time;
    end
    @(negedge clk); in_valid = 0;
    wait (t1 >= 0);
    checks++;
    if ((t1 - t0) / 10 != 18) begin failures++; $display("first write after %0d clocks", (t1 - t0) / 10 - 1); end
    repeat (30) @(posedge clk);
    checks++;
    if (wr_count != ($clog2(DEPTH)+1)'(NS)) begin failures++; $display("wr_count %0d", wr_count); end
    for (int i = 0; i < NS; i++) begin
      int d;
      @(negedge clk); rd_addr = ($clog2(DEPTH))'(i);
      @(posedge clk); #1;
      d = int'(16'(rd_data[15:0]) - 16'(exp_ph[i]));
      if (d >= 32768) d -= 65536;
      checks++;
      if (d > 3 || d < -3 || int'(rd_data[CW+15:16]) != exp_ch[i]) begin
        failures++;
        if (failures < 8) $display("sample %0d: phase %0d want %0d chan %0d want %0d", i,
                                   rd_data[15:0], 16'(exp_ph[i]), rd_data[CW+15:16], exp_ch[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
