// lpf: per-channel low-pass filter of the down-converted I/Q stream.
//
// After down-conversion each channel's tone sits at 0 Hz, while leakage from neighbouring
// tones and noise sit at other frequencies. A single-pole IIR per channel,
//     y[k] = y[k-1] + (x[k] - y[k-1]) / 2^SHIFT,
// keeps the low frequencies (time constant 2^SHIFT frames). The state of all NCHAN channels
// is kept in memory with 8 extra fraction bits and updated when the channel's sample passes
// (read-modify-write in one clock, safe because a channel appears once per frame). After
// reset the states are cleared, one per clock; samples arriving during those NCHAN clocks
// (flagged by `clearing`) are dropped. One sample per clock,
// 1 clock latency; channel number and frame-end flag are carried along.
//
// The paper calls for a low-pass filter per channel after the DDC but gives no filter
// type; the single-pole IIR, SHIFT and the state widths are this design's choices.
module lpf
  import mkid_pkg::*;
#(
  parameter int unsigned NCHAN = 2000,
  parameter int unsigned SHIFT = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_last,
  input  cplx_t                    in_data,
  input  logic [$clog2(NCHAN)-1:0] in_chan,
  output logic                     clearing,
  output logic                     out_valid,
  output logic                     out_last,
  output cplx_t                    out_data,
  output logic [$clog2(NCHAN)-1:0] out_chan
);
  localparam int unsigned CW = $clog2(NCHAN);
  localparam int unsigned FR = 8;                    // extra fraction bits of the state
  localparam int unsigned SW = SAMPLE_W + FR + 1;

  typedef logic signed [SW-1:0] st_t;
  st_t st_re [NCHAN];
  st_t st_im [NCHAN];

  logic [CW-1:0] clr_idx;
  st_t           y_re, y_im;

  always_comb begin
    y_re = st_re[in_chan] + (((SW'(in_data.re) <<< FR) - st_re[in_chan]) >>> SHIFT);
    y_im = st_im[in_chan] + (((SW'(in_data.im) <<< FR) - st_im[in_chan]) >>> SHIFT);
  end

  always_ff @(posedge clk) begin
    if (clearing) begin
      st_re[clr_idx] <= '0;
      st_im[clr_idx] <= '0;
    end else if (in_valid) begin
      st_re[in_chan] <= y_re;
      st_im[in_chan] <= y_im;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clearing <= 1'b1;
      clr_idx  <= '0;
      out_valid <= 1'b0; out_last <= 1'b0; out_data <= '0; out_chan <= '0;
    end else begin
      if (clearing) begin
        clr_idx <= clr_idx + 1'b1;
        if (clr_idx == CW'(NCHAN - 1)) clearing <= 1'b0;
      end
      out_valid   <= in_valid && !clearing;
      out_last    <= in_last && !clearing;
      out_chan    <= in_chan;
      out_data.re <= samp_t'((y_re + (SW'(1) <<< (FR - 1))) >>> FR);
      out_data.im <= samp_t'((y_im + (SW'(1) <<< (FR - 1))) >>> FR);
    end
  end
endmodule
