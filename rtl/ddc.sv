// ddc: digital down-conversion of each channel sample by its local oscillator.
//
// out = in * conj(lo) = in * (cos - j*sin), rounded to 16 bits (Q1.15 oscillator), so a
// channel whose phase turns by the oscillator's phase step per frame leaves with a steady
// phase: the tone sits at 0 Hz, where a photon hit shows as a step in phase. The channel
// number and frame-end flag are carried along. One sample per clock, 1 clock latency.
//
// The paper describes this step (each channel multiplied by a sinusoid whose frequency
// removes both the tone's offset from the bin centre and the oversampling rotation); the
// rounding and widths are this design's choices.
module ddc
  import mkid_pkg::*;
#(
  parameter int unsigned NCHAN = 2000
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_last,
  input  cplx_t                    in_data,
  input  logic [$clog2(NCHAN)-1:0] in_chan,
  input  samp_t                    lo_cos,
  input  samp_t                    lo_sin,
  output logic                     out_valid,
  output logic                     out_last,
  output cplx_t                    out_data,
  output logic [$clog2(NCHAN)-1:0] out_chan
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_last <= 1'b0; out_data <= '0; out_chan <= '0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_last;
      out_chan  <= in_chan;
      out_data  <= cmul_q15(in_data, lo_cos, -lo_sin);
    end
  end
endmodule
