// cordic_phase: pipelined CORDIC in vectoring mode, returning the angle of a complex sample.
//
// The vector (re, im) is first turned into the right half plane (adding half a turn when
// re < 0), then ITER micro-rotations by +-atan(2^-i) drive im towards zero while the
// rotations are summed. The angle is in units of 2^-16 turn (0x8000 = pi), so it wraps
// naturally. The vector is scaled up by 2^4 first so that small vectors keep their angle
// resolution. One stage per iteration, a new sample may enter every clock, latency ITER + 1
// clocks. A tag (TAG_W bits) travels with each sample. The micro-rotation angles are
// computed at elaboration from atan(2^-i).
module cordic_phase
  import mkid_pkg::*;
#(
  parameter int unsigned ITER  = 16,
  parameter int unsigned TAG_W = 11
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  cplx_t             in_data,
  input  logic [TAG_W-1:0]  in_tag,
  output logic              out_valid,
  output logic [15:0]       out_phase,
  output logic [TAG_W-1:0]  out_tag
);
  localparam int unsigned FB = 4;                // extra fraction bits against rounding loss
  localparam int unsigned XW = SAMPLE_W + 3 + FB; // growth of 1.65 plus sign margin

  typedef logic [15:0] ang_t;
  typedef ang_t atab_t [ITER];

  function automatic atab_t gen_atan();
    atab_t t;
    for (int i = 0; i < int'(ITER); i++)
      t[i] = ang_t'($rtoi($floor($atan(2.0 ** (-i)) / 6.283185307179586 * 65536.0 + 0.5)));
    return t;
  endfunction
  localparam atab_t ATAN = gen_atan();

  logic signed [XW-1:0] x [ITER+1];
  logic signed [XW-1:0] y [ITER+1];
  ang_t                 z [ITER+1];
  logic                 v [ITER+1];
  logic [TAG_W-1:0]     t [ITER+1];

  // stage 0: move to the right half plane
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x[0] <= '0; y[0] <= '0; z[0] <= '0; v[0] <= 1'b0; t[0] <= '0;
    end else begin
      v[0] <= in_valid;
      t[0] <= in_tag;
      if (in_data.re < 0) begin
        x[0] <= -(XW'(in_data.re) <<< FB);
        y[0] <= -(XW'(in_data.im) <<< FB);
        z[0] <= 16'h8000;
      end else begin
        x[0] <= XW'(in_data.re) <<< FB;
        y[0] <= XW'(in_data.im) <<< FB;
        z[0] <= 16'h0000;
      end
    end
  end

  for (genvar i = 0; i < int'(ITER); i++) begin : g_it
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x[i+1] <= '0; y[i+1] <= '0; z[i+1] <= '0; v[i+1] <= 1'b0; t[i+1] <= '0;
      end else begin
        v[i+1] <= v[i];
        t[i+1] <= t[i];
        if (y[i] >= 0) begin
          x[i+1] <= x[i] + (y[i] >>> i);
          y[i+1] <= y[i] - (x[i] >>> i);
          z[i+1] <= z[i] + ATAN[i];
        end else begin
          x[i+1] <= x[i] - (y[i] >>> i);
          y[i+1] <= y[i] + (x[i] >>> i);
          z[i+1] <= z[i] - ATAN[i];
        end
      end
    end
  end

  assign out_valid = v[ITER];
  assign out_phase = z[ITER];
  assign out_tag   = t[ITER];
endmodule
