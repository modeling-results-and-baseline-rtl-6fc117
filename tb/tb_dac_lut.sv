// tb_dac_lut: writes a random waveform, plays it with two loop lengths and checks that the
// output repeats the stored samples in order, one per clock, wrapping at the loop length,
// and that the output is zero and invalid when stopped.
module tb_dac_lut;
  import mkid_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr = '0;
  cplx_t wr_data = '0;
  logic [$clog2(DEPTH):0] play_len = '0;
  logic run = 0;
  logic out_valid;
  cplx_t out_data;
  int checks = 0, failures = 0;
  cplx_t model [DEPTH];

  dac_lut #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic play(int len, int nsamp);
    @(negedge clk); play_len = ($clog2(DEPTH)+1)'(len); run = 1;
    for (int i = 0; i < nsamp; i++) begin
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_data != model[i % len]) begin
        failures++;
        if (failures < 8) $display("len %0d sample %0d: got %h want %h", len, i, out_data, model[i % len]);
      end
    end
    @(negedge clk); run = 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid || out_data != '0) begin failures++; $display("output not idle when stopped"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      model[i] = cplx_t'($urandom);
      wr_en = 1; wr_addr = ($clog2(DEPTH))'(i); wr_data = model[i];
    end
    @(negedge clk); wr_en = 0;
    play(DEPTH, 3 * DEPTH);
    play(37, 200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
