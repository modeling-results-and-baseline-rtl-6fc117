// tb_dds: per-channel oscillators. Random phase increments are written for 8 channels, then
// the channels are presented in order for several frames. Each output (cos, sin) is compared
// with the cosine and sine of the expected accumulated phase k*inc (top 12 bits), the
// sample/channel/last sideband with what entered 2 clocks earlier, and rewriting an increment
// must restart that channel's phase at zero.
module tb_dds;
  import mkid_pkg::*;
  localparam int NCHAN = 8, FRAMES = 6;
  localparam int CW = $clog2(NCHAN);
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  cplx_t in_data = '0;
  logic [CW-1:0] in_chan = '0;
  logic inc_we = 0;
  logic [CW-1:0] inc_addr = '0;
  logic [31:0] inc_data = '0;
  logic out_valid, out_last;
  cplx_t out_data;
  logic [CW-1:0] out_chan;
  samp_t out_cos, out_sin;
  int checks = 0, failures = 0;

  dds #(.NCHAN(NCHAN), .PHASE_W(32)) dut (.*);
  always #5 clk = ~clk;

  logic [31:0] inc [NCHAN];
  logic [31:0] acc [NCHAN];
  // expected outputs, queued in input order
  int exp_c [$], exp_s [$], exp_ch [$], exp_l [$];
  cplx_t exp_d [$];
  int sent_cyc [$];
  int cyc = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int qc(logic [31:0] ph, bit sine);
    real a = 6.283185307179586 * real'(ph[31:20]) / 4096.0;
    return $rtoi($floor(32767.0 * (sine ? $sin(a) : $cos(a)) + 0.5));
  endfunction

  always @(posedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      automatic int ec = exp_c.pop_front(), es = exp_s.pop_front();
      automatic int ech = exp_ch.pop_front(), el = exp_l.pop_front(), sc = sent_cyc.pop_front();
      automatic cplx_t ed = exp_d.pop_front();
      checks++;
      if (int'(out_cos) - ec > 1 || ec - int'(out_cos) > 1 || int'(out_sin) - es > 1 || es - int'(out_sin) > 1 ||
          out_chan != CW'(ech) || out_last != el[0] || out_data != ed || cyc - sc != 3) begin
        failures++;
        if (failures < 8) $display("chan %0d: got (%0d,%0d) want (%0d,%0d), latency %0d", ech,
                                   out_cos, out_sin, ec, es, cyc - sc - 1);
      end
    end
  end

  task automatic frame();
    for (int c = 0; c < NCHAN; c++) begin
      @(negedge clk);
      in_valid = 1; in_chan = CW'(c); in_last = (c == NCHAN - 1); in_data = cplx_t'($urandom);
      exp_c.push_back(qc(acc[c], 0)); exp_s.push_back(qc(acc[c], 1));
      exp_ch.push_back(c); exp_l.push_back(int'(in_last)); exp_d.push_back(in_data);
      sent_cyc.push_back(cyc);
      acc[c] += inc[c];
    end
    @(negedge clk); in_valid = 0; in_last = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NCHAN; c++) begin
      inc[c] = $urandom; acc[c] = 0;
      @(negedge clk); inc_we = 1; inc_addr = CW'(c); inc_data = inc[c];
    end
    @(negedge clk); inc_we = 0;
    for (int f = 0; f < FRAMES; f++) frame();
    // retune channel 3: its phase restarts at zero
    inc[3] = 32'h0100_0000; acc[3] = 0;
    @(negedge clk); inc_we = 1; inc_addr = 3; inc_data = inc[3];
    @(negedge clk); inc_we = 0;
    for (int f = 0; f < 3; f++) frame();
    repeat (5) @(posedge clk);
    checks++;
    if (exp_c.size() != 0) begin failures++; $display("%0d outputs missing", exp_c.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
