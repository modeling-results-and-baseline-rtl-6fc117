// dac_lut: waveform memory that plays the probe-tone frequency comb to one I/Q DAC pair.
//
// The host computes one period of the complex baseband comb (the sum of up to 2,000 probe
// tones, one per detector) and writes it sample by sample through wr_en/wr_addr/wr_data.
// While run is high the memory is read cyclically from address 0 to play_len-1 and each
// sample appears on out_data one clock after it is read, with out_valid high. When run is
// low the read pointer returns to 0 and out_data is zero, so the DACs are quiet. A tone of
// frequency f repeats exactly only if f*play_len/fs is an integer, so the host chooses tone
// frequencies on that grid.
//
// The paper names the table ("DAC LUT, 2,000 tones") and its place in front of the DACs; its
// depth (DEPTH, 65,536 samples), one sample per clock and the run/length controls are this
// design's choices. The real converters take several samples per fabric clock; here one
// sample per clock is produced.
module dac_lut
  import mkid_pkg::*;
#(
  parameter int unsigned DEPTH = 65536
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [$clog2(DEPTH)-1:0]   wr_addr,
  input  cplx_t                      wr_data,
  input  logic [$clog2(DEPTH):0]     play_len,
  input  logic                       run,
  output logic                       out_valid,
  output cplx_t                      out_data
);
  localparam int unsigned AW = $clog2(DEPTH);

  cplx_t         mem [DEPTH];
  logic [AW-1:0] rd_ptr;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr    <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (run && play_len != '0) begin
      out_data  <= mem[rd_ptr];
      out_valid <= 1'b1;
      rd_ptr    <= ((AW+1)'(rd_ptr) + 1'b1 >= play_len) ? '0 : rd_ptr + 1'b1;
    end else begin
      rd_ptr    <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end
  end
endmodule
