// pfb_fir: windowing (FIR) front end of the oversampled polyphase filter bank.
//
// The filter bank splits the complex band into N coarse bins. Each output frame is
//     y[n] = sum_{m=0}^{TAPS-1} h[n + m*N] * x[s + n + m*N],   n = 0 .. N-1,
// where h is a TAPS*N-point window and s is the frame's first input sample. Frames start
// every HOP input samples. With HOP = N (critical sampling) the bins would just touch; with
// HOP = N*27/32 = 3456 the bank is oversampled by 32/27, so a window whose bins are made
// 32/27 wider fills the gaps between bins without aliasing (no scalloping loss). The
// following FFT turns each frame into N bins.
//
// Storage: the input is written into (TAPS+1) banks of N samples used as one circular
// buffer. A frame may be computed once TAPS*N samples from its start are present; the extra
// bank lets new input arrive while the frame is read. All banks are read at the same
// offset each clock and rotated so that tap m takes bank (start_bank + carry + m). The
// coefficients live in TAPS banks of N words (Q1.17), written by the host (the
// Hamming-windowed sinc with the 32/27 bin scale is computed outside). One output sample is
// produced per clock; a frame takes N clocks, so the input may run at up to HOP/N samples
// per clock, and in_ready drops when the buffer is full. Output latency is 3 clocks from
// the read of offset n; out_last marks sample N-1 of a frame.
//
// The paper gives the window (4/8-tap sinc, Hamming, bin scale x32/27), the 4,096 points and
// the 32/27 oversampling ratio. The buffer organisation, the host-written coefficient memory,
// fixed-point widths and the 1-sample-per-clock rate are this design's choices.
module pfb_fir
  import mkid_pkg::*;
#(
  parameter int unsigned N      = 4096,
  parameter int unsigned TAPS   = 8,
  parameter int unsigned HOP    = 3456,
  parameter int unsigned COEF_W = 18
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // input sample stream
  input  logic                           in_valid,
  output logic                           in_ready,
  input  cplx_t                          in_data,
  // coefficient writes: address = m*N + n
  input  logic                           coef_we,
  input  logic [$clog2(N*TAPS)-1:0]      coef_addr,
  input  logic signed [COEF_W-1:0]       coef_data,
  // windowed frame, one sample per clock
  output logic                           out_valid,
  output logic                           out_last,
  output cplx_t                          out_data
);
  localparam int unsigned NB   = TAPS + 1;           // banks in the circular buffer
  localparam int unsigned OW   = $clog2(N);
  localparam int unsigned BW   = $clog2(NB);
  localparam int unsigned CAP  = NB * N;
  localparam int unsigned FW   = $clog2(CAP + 1);
  localparam int unsigned ACCW = SAMPLE_W + COEF_W + $clog2(TAPS) + 1;

  initial begin
    assert (HOP <= N && HOP > 0) else $fatal(1, "pfb_fir: HOP must be in 1..N");
    assert ((1 << OW) == N) else $fatal(1, "pfb_fir: N must be a power of two");
  end

  cplx_t                    buffer [NB][N];
  logic signed [COEF_W-1:0] coef   [TAPS][N];

  // ---------------- write side ----------------
  logic [BW-1:0] wr_bank;
  logic [OW-1:0] wr_off;
  logic [FW-1:0] fill;            // samples held from the current frame start
  logic          wr_fire;

  assign in_ready = (fill < FW'(CAP));
  assign wr_fire  = in_valid && in_ready;

  always_ff @(posedge clk) begin
    if (wr_fire) buffer[wr_bank][wr_off] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (coef_we) coef[coef_addr[$clog2(N*TAPS)-1:OW]][coef_addr[OW-1:0]] <= coef_data;
  end

  // ---------------- frame control ----------------
  logic          running;
  logic [OW-1:0] n;
  logic [BW-1:0] st_bank;
  logic [OW-1:0] st_off;
  logic          frame_done;

  logic [FW-1:0] fill_next;

  assign frame_done = running && (n == OW'(N - 1));
  assign fill_next  = fill + FW'(wr_fire) - (frame_done ? FW'(HOP) : FW'(0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_bank <= '0;
      wr_off  <= '0;
      fill    <= '0;
      running <= 1'b0;
      n       <= '0;
      st_bank <= '0;
      st_off  <= '0;
    end else begin
      if (wr_fire) begin
        if (wr_off == OW'(N - 1)) begin
          wr_off  <= '0;
          wr_bank <= (wr_bank == BW'(NB - 1)) ? '0 : wr_bank + 1'b1;
        end else begin
          wr_off <= wr_off + 1'b1;
        end
      end
      fill <= fill_next;

      if (!running) begin
        n <= '0;
        if (fill >= FW'(TAPS * N)) running <= 1'b1;
      end else if (frame_done) begin
        // start the next frame at once if its samples are already in
        running <= (fill_next >= FW'(TAPS * N));
        n       <= '0;
        // advance the frame start by HOP samples
        if (32'(st_off) + HOP >= N) begin
          st_off  <= OW'(32'(st_off) + HOP - N);
          st_bank <= (st_bank == BW'(NB - 1)) ? '0 : st_bank + 1'b1;
        end else begin
          st_off <= OW'(32'(st_off) + HOP);
        end
      end else begin
        n <= n + 1'b1;
      end
    end
  end

  // ---------------- read pipeline ----------------
  // stage 1: read every bank at the common offset; remember the rotation
  logic [OW:0]   sum_off;
  logic [OW-1:0] rd_off;
  logic [BW-1:0] rd_base;

  always_comb begin
    sum_off = (OW+1)'(st_off) + (OW+1)'(n);
    rd_off  = sum_off[OW-1:0];
    if (sum_off[OW])
      rd_base = (st_bank == BW'(NB - 1)) ? '0 : st_bank + 1'b1;
    else
      rd_base = st_bank;
  end

  cplx_t                    bank_q [NB];
  logic signed [COEF_W-1:0] coef_q [TAPS];
  logic [BW-1:0]            base_q;
  logic                     v1, l1;

  always_ff @(posedge clk) begin
    for (int b = 0; b < int'(NB); b++) bank_q[b] <= buffer[b][rd_off];
    for (int m = 0; m < int'(TAPS); m++) coef_q[m] <= coef[m][n];
    base_q <= rd_base;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      l1 <= 1'b0;
    end else begin
      v1 <= running;
      l1 <= frame_done;
    end
  end

  // stage 2: multiply-accumulate over the taps
  logic signed [ACCW-1:0] acc_re, acc_im;
  always_comb begin
    acc_re = '0;
    acc_im = '0;
    for (int m = 0; m < int'(TAPS); m++) begin
      automatic int unsigned bsel = (int'(base_q) + m) % NB;
      acc_re += ACCW'(bank_q[bsel].re) * ACCW'(coef_q[m]);
      acc_im += ACCW'(bank_q[bsel].im) * ACCW'(coef_q[m]);
    end
  end

  logic signed [ACCW-1:0] acc_re_q, acc_im_q;
  logic                   v2, l2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0;
      l2 <= 1'b0;
      acc_re_q <= '0;
      acc_im_q <= '0;
    end else begin
      v2 <= v1;
      l2 <= l1;
      acc_re_q <= acc_re;
      acc_im_q <= acc_im;
    end
  end

  // stage 3: round from Q.(COEF_W-1) and saturate
  function automatic samp_t scale(logic signed [ACCW-1:0] a);
    logic signed [ACCW-1:0] r;
    r = (a + (ACCW'(1) <<< (COEF_W - 2))) >>> (COEF_W - 1);
    return sat16(32'(r));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid   <= v2;
      out_last    <= l2;
      out_data.re <= scale(acc_re_q);
      out_data.im <= scale(acc_im_q);
    end
  end
endmodule
