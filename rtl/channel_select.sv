// channel_select: picks the FFT bins that hold probe tones and turns them into channels.
//
// Each FFT frame arrives bin by bin, in any order, tagged with its bin number, and is written
// into one half of a double-buffered frame memory (2 x N bins). When the frame's last bin
// (in_last) has been written the halves swap and the full half is read out as NCHAN
// channels: channel c reads the bin given by map[c]. Bins that no channel names are dropped;
// a bin named by several channels (two tones in one bin) is copied to each of them, so
// every channel can later be down-converted to its own tone. The map is written by the host
// (map_we/map_addr/map_data). The read-out takes NCHAN clocks and must end before the next
// frame is complete, which holds for NCHAN <= N at one bin per clock. Output: one channel
// per clock, out_chan = c, out_last on the last channel of a frame; the first channel
// leaves 3 clocks after the frame's last bin was presented.
//
// From the paper: 4,096 bins in, 2,000 channels out, empty bins discarded and shared bins
// copied. The double buffer and the host-written map are this design's choices.
module channel_select
  import mkid_pkg::*;
#(
  parameter int unsigned N     = 4096,
  parameter int unsigned NCHAN = 2000
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_last,
  input  cplx_t                    in_data,
  input  logic [$clog2(N)-1:0]     in_bin,
  input  logic                     map_we,
  input  logic [$clog2(NCHAN)-1:0] map_addr,
  input  logic [$clog2(N)-1:0]     map_data,
  output logic                     out_valid,
  output logic                     out_last,
  output cplx_t                    out_data,
  output logic [$clog2(NCHAN)-1:0] out_chan
);
  localparam int unsigned BW = $clog2(N);
  localparam int unsigned CW = $clog2(NCHAN);

  cplx_t         frame_mem [2][N];
  logic [BW-1:0] chan_map  [NCHAN];

  logic          wr_half;      // half being filled
  logic          reading;
  logic [CW-1:0] rd_chan;

  always_ff @(posedge clk) begin
    if (in_valid) frame_mem[wr_half][in_bin] <= in_data;
    if (map_we)   chan_map[map_addr] <= map_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_half <= 1'b0;
      reading <= 1'b0;
      rd_chan <= '0;
    end else begin
      if (in_valid && in_last) begin
        wr_half <= ~wr_half;
        reading <= 1'b1;
        rd_chan <= '0;
      end else if (reading) begin
        if (rd_chan == CW'(NCHAN - 1)) reading <= 1'b0;
        rd_chan <= rd_chan + 1'b1;
      end
    end
  end

  // stage 1: look up the bin; stage 2: read it from the full half
  logic          v1, l1;
  logic [BW-1:0] bin1;
  logic [CW-1:0] chan1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; l1 <= 1'b0; bin1 <= '0; chan1 <= '0;
      out_valid <= 1'b0; out_last <= 1'b0; out_data <= '0; out_chan <= '0;
    end else begin
      v1    <= reading;
      l1    <= reading && (rd_chan == CW'(NCHAN - 1));
      bin1  <= chan_map[rd_chan];
      chan1 <= rd_chan;
      out_valid <= v1;
      out_last  <= l1;
      out_chan  <= chan1;
      out_data  <= frame_mem[~wr_half][bin1];
    end
  end
endmodule
