// tb_channel_select: feeds frames of tagged bins in bit-reversed order with a map that drops
// most bins and copies one bin to two channels, and checks each frame's channels (value,
// number, order, frame-end flag) and that first channel leaves 3 clocks after the frame's last bin.
module tb_channel_select;
  import mkid_pkg::*;
  localparam int N = 64, NCHAN = 20, FRAMES = 4;
  localparam int BW = $clog2(N), CW = $clog2(NCHAN);
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  cplx_t in_data = '0;
  logic [BW-1:0] in_bin = '0;
  logic map_we = 0;
  logic [CW-1:0] map_addr = '0;
  logic [BW-1:0] map_data = '0;
  logic out_valid, out_last;
  cplx_t out_data;
  logic [CW-1:0] out_chan;
  int checks = 0, failures = 0;

  channel_select #(.N(N), .NCHAN(NCHAN)) dut (.*);
  always #5 clk = ~clk;

  int    cmap [NCHAN];
  cplx_t frames [FRAMES][N];
  int    nout = 0, cyc = 0, last_in_cyc [FRAMES], dups = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      automatic int f = nout / NCHAN, c = nout % NCHAN;
      checks++;
      if (out_chan != CW'(c) || out_data != frames[f][cmap[c]] || out_last != (c == NCHAN - 1)) begin
        failures++;
        if (failures < 8) $display("frame %0d chan %0d: got chan %0d data %h want %h", f, c,
                                   out_chan, out_data, frames[f][cmap[c]]);
      end
      if (c == 0) begin
        checks++;
        if (cyc - last_in_cyc[f] != 4) begin
          failures++; $display("read-out latency %0d clocks", cyc - last_in_cyc[f] - 1);
        end
      end
      if (c == 7) dups++;
      nout++;
    end
  end

  initial begin
    for (int c = 0; c < NCHAN; c++) cmap[c] = (c * 3 + 5) % N;
    cmap[7] = cmap[6];                       // two tones in one bin: copy it
    for (int f = 0; f < FRAMES; f++)
      for (int b = 0; b < N; b++) frames[f][b] = cplx_t'($urandom);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NCHAN; c++) begin
      @(negedge clk); map_we = 1; map_addr = CW'(c); map_data = BW'(cmap[c]);
    end
    @(negedge clk); map_we = 0;
    for (int f = 0; f < FRAMES; f++)
      for (int p = 0; p < N; p++) begin
        automatic logic [BW-1:0] pb = BW'(p);
        @(negedge clk);
        in_valid = 1;
        in_bin = {<<{pb}};
        in_data = frames[f][in_bin];
        in_last = (p == N - 1);
        if (p == N - 1) last_in_cyc[f] = cyc;
      end
    @(negedge clk); in_valid = 0; in_last = 0;
    repeat (NCHAN + 10) @(posedge clk);
    checks++;
    if (nout != FRAMES * NCHAN || dups != FRAMES) begin
      failures++; $display("outputs %0d, copied-bin channels %0d", nout, dups);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
