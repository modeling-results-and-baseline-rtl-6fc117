// dds: one numerically controlled oscillator per channel, time-shared.
//
// The phase of a tone seen in a coarse bin turns from frame to frame for two reasons: the
// tone is not at the bin centre, and with an oversampled filter bank (frame hop of 3456
// rather than 4096 samples) even a bin-centred tone advances by a bin-dependent fraction of a
// turn per frame. Both are known in advance, so the host writes for each channel c a phase
// increment inc[c] (2^PHASE_W per turn) equal to the tone's expected rotation per frame,
// i.e. frac(f_tone * HOP / fs). Writing an increment also clears that channel's phase.
//
// Each time channel c's sample passes (once per frame) the oscillator returns
// (cos, sin) of acc[c] and advances acc[c] by inc[c]. The top PH_W bits of the phase index
// the package's quarter-wave table. The channel's sample, number and frame-end flag travel
// alongside, so out_data, out_chan and out_last leave aligned with out_cos/out_sin, 2 clocks
// after the input.
//
// The paper gives the function (a table of 2,000 oscillator tones whose frequency includes
// the tone offset and the oversampling shift, phi_f = f_tone - f0 - f_shift). The
// phase-accumulator form and the widths are this design's choices.
module dds
  import mkid_pkg::*;
#(
  parameter int unsigned NCHAN   = 2000,
  parameter int unsigned PHASE_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_last,
  input  cplx_t                    in_data,
  input  logic [$clog2(NCHAN)-1:0] in_chan,
  input  logic                     inc_we,
  input  logic [$clog2(NCHAN)-1:0] inc_addr,
  input  logic [PHASE_W-1:0]       inc_data,
  output logic                     out_valid,
  output logic                     out_last,
  output cplx_t                    out_data,
  output logic [$clog2(NCHAN)-1:0] out_chan,
  output samp_t                    out_cos,
  output samp_t                    out_sin
);
  localparam int unsigned CW = $clog2(NCHAN);

  logic [PHASE_W-1:0] inc_mem [NCHAN];
  logic [PHASE_W-1:0] acc_mem [NCHAN];

  // stage 1: read the accumulator, update it
  logic [PHASE_W-1:0] ph1;
  logic               v1, l1;
  cplx_t              d1;
  logic [CW-1:0]      c1;

  always_ff @(posedge clk) begin
    if (inc_we) begin
      inc_mem[inc_addr] <= inc_data;
      acc_mem[inc_addr] <= '0;
    end else if (in_valid) begin
      acc_mem[in_chan] <= acc_mem[in_chan] + inc_mem[in_chan];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; l1 <= 1'b0; d1 <= '0; c1 <= '0; ph1 <= '0;
      out_valid <= 1'b0; out_last <= 1'b0; out_data <= '0; out_chan <= '0;
      out_cos <= '0; out_sin <= '0;
    end else begin
      v1  <= in_valid;
      l1  <= in_last;
      d1  <= in_data;
      c1  <= in_chan;
      ph1 <= acc_mem[in_chan];
      // stage 2: table lookup
      out_valid <= v1;
      out_last  <= l1;
      out_data  <= d1;
      out_chan  <= c1;
      {out_cos, out_sin} <= sincos(ph1[PHASE_W-1 -: PH_W]);
    end
  end
endmodule
