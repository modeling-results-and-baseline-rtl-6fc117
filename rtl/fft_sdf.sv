// fft_sdf: streaming N-point complex FFT, radix-2 single-path delay-feedback (SDF) pipeline.
//
// Each PFB frame of N samples (natural order, one per valid beat) is transformed into N
// frequency bins. The pipeline has log2(N) stages; stage s works on blocks of L = N >> s
// samples with a delay line of L/2 samples:
//   * during the first half of a block the input is pushed into the delay line and the
//     delay line's output (the previous block's weighted differences) goes on;
//   * during the second half the delay output a and the input b form (a+b)/2, sent on, and
//     ((a-b)/2) * W_L^j, j = position in the half block, pushed into the delay line.
// This is decimation in frequency, so the bins leave in bit-reversed order; every output
// carries its bin number (out_bin) so later blocks need not reorder. Each stage halves the
// data, so the output is DFT/N. Input range: samples must lie inside the circle of radius
// 32767. Then every intermediate value does too, and the twiddle rotations cannot overflow.
// A sample in a corner of the I/Q square (both parts near full scale) can saturate in a
// rotation. Twiddles come from the package's quarter-wave table, which limits N to 4,096.
//
// Timing: the whole pipeline advances only on beats with in_valid (a gap in the input holds
// it). Each stage has an output register, so a sample entering on valid beat t influences
// the output on beat t + N + log2(N) - 2. Results of the last frame therefore leave only
// while the next frame enters, which suits the continuous frame stream of the readout.
// out_last marks the last bin of a frame.
//
// The paper gives the transform size (4,096 points, bins just under 1 MHz apart at 4 GSPS).
// The SDF architecture, the scaling and the word widths are this design's choices.
module fft_sdf
  import mkid_pkg::*;
#(
  parameter int unsigned N = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  cplx_t                in_data,
  output logic                 out_valid,
  output logic                 out_last,
  output cplx_t                out_data,
  output logic [$clog2(N)-1:0] out_bin
);
  localparam int unsigned S   = $clog2(N);
  localparam int unsigned LAT = N + S - 2;       // valid beats from input to output

  initial begin
    assert ((1 << S) == N && N >= 4 && N <= 4096)
      else $fatal(1, "fft_sdf: N must be a power of two in 4..4096");
  end

  cplx_t stage_d [S+1];
  assign stage_d[0] = in_data;

  for (genvar s = 0; s < int'(S); s++) begin : g_stage
    localparam int unsigned L  = N >> s;
    localparam int unsigned H  = L / 2;
    localparam int unsigned CW = $clog2(L);
    localparam int unsigned HW = (H > 1) ? $clog2(H) : 1;
    localparam int unsigned TW_STEP = (4096 / N) << s;   // table steps per twiddle index

    cplx_t         dline [H];
    logic [CW-1:0] cnt;        // position in the block of this stage's input
    logic [HW-1:0] dptr;
    cplx_t         a, b, sum, dif, dif_w, nxt;
    logic signed [SAMPLE_W:0] t_re, t_im;
    logic [11:0]   tw_ph;
    sincos_t       tw;

    assign dptr = (H > 1) ? HW'(cnt % H) : '0;
    assign a    = dline[dptr];
    assign b    = stage_d[s];

    always_comb begin
      t_re   = (SAMPLE_W+1)'(a.re) + (SAMPLE_W+1)'(b.re);
      t_im   = (SAMPLE_W+1)'(a.im) + (SAMPLE_W+1)'(b.im);
      sum.re = samp_t'(t_re >>> 1);
      sum.im = samp_t'(t_im >>> 1);
      t_re   = (SAMPLE_W+1)'(a.re) - (SAMPLE_W+1)'(b.re);
      t_im   = (SAMPLE_W+1)'(a.im) - (SAMPLE_W+1)'(b.im);
      dif.re = samp_t'(t_re >>> 1);
      dif.im = samp_t'(t_im >>> 1);
      tw_ph  = 12'((32'(cnt) - H) * TW_STEP);
      tw     = sincos(tw_ph);
      // multiply by W = exp(-j*2*pi*ph/4096) = cos - j*sin; W = 1 needs no multiply
      dif_w  = (tw_ph == 12'd0) ? dif : cmul_q15(dif, tw.c, -tw.s);
      nxt    = (32'(cnt) < H) ? b : dif_w;
    end

    cplx_t out_q;
    always_ff @(posedge clk) begin
      if (in_valid) dline[dptr] <= nxt;
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        // the output registers of the s earlier stages delay this stage's data by s beats
        cnt   <= CW'((L - (s % L)) % L);
        out_q <= '0;
      end else if (in_valid) begin
        cnt   <= cnt + 1'b1;
        out_q <= (32'(cnt) < H) ? a : sum;
      end
    end
    assign stage_d[s+1] = out_q;
  end

  // ---------------- output tagging ----------------
  logic [$clog2(LAT+1)-1:0] seen;     // valid beats so far, saturating at LAT
  logic [S-1:0]             ocnt;     // output position in the frame (bit-reversed bin)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seen      <= '0;
      ocnt      <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_bin   <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      if (in_valid) begin
        if (32'(seen) < LAT) seen <= seen + 1'b1;
        else begin
          out_valid <= 1'b1;
          out_last  <= (ocnt == S'(N - 1));
          for (int i = 0; i < int'(S); i++) out_bin[i] <= ocnt[S-1-i];
          ocnt <= ocnt + 1'b1;
        end
      end
    end
  end
  assign out_data = stage_d[S];
endmodule
