// phase_recorder: turns each filtered channel sample into a phase and records it for the host.
//
// The quantity watched for photon events is the phase of each probe tone. Every LPF output
// sample goes through a CORDIC (cordic_phase, 16 iterations, 17 clocks) and the pair
// {channel, phase} is written into a circular record memory of DEPTH words. wr_count is the
// number of words written since reset (it wraps at 2^(log2(DEPTH)+1)), so the host can tell
// where the newest data is and whether it fell behind. The host reads word rd_addr on
// rd_data one clock later. Phase units: 2^-16 turn.
//
// The paper places an on-chip/on-board memory that records phase at the end of the chain and
// says that the phase is what is monitored. The CORDIC, the record format and the depth are
// this design's choices.
module phase_recorder
  import mkid_pkg::*;
#(
  parameter int unsigned NCHAN = 2000,
  parameter int unsigned DEPTH = 65536
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             in_valid,
  input  cplx_t                            in_data,
  input  logic [$clog2(NCHAN)-1:0]         in_chan,
  input  logic [$clog2(DEPTH)-1:0]         rd_addr,
  output logic [$clog2(NCHAN)+16-1:0]      rd_data,
  output logic [$clog2(DEPTH):0]           wr_count
);
  localparam int unsigned CW = $clog2(NCHAN);
  localparam int unsigned AW = $clog2(DEPTH);

  logic          p_valid;
  logic [15:0]   p_phase;
  logic [CW-1:0] p_chan;

  cordic_phase #(.ITER(16), .TAG_W(CW)) u_cordic (
    .clk, .rst_n,
    .in_valid, .in_data, .in_tag(in_chan),
    .out_valid(p_valid), .out_phase(p_phase), .out_tag(p_chan)
  );

  logic [CW+16-1:0] rec_mem [DEPTH];

  always_ff @(posedge clk) begin
    if (p_valid) rec_mem[wr_count[AW-1:0]] <= {p_chan, p_phase};
    rd_data <= rec_mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       wr_count <= '0;
    else if (p_valid) wr_count <= wr_count + 1'b1;
  end
endmodule
