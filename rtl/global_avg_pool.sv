// global_avg_pool -- per-channel mean over all pixels of a feature map.
//
// Used as the pool of the last full-precision layer, in front of the fully
// connected layer.  The paper shows an optional pool there without saying
// which; averaging over the whole map so that the FC layer sees one vector
// per image is this design's choice.  The pixel count is a power of two,
// given as its log2 (lg_npix), so the mean is an arithmetic right shift of
// the sum (floor).
//
// Interface: clear starts a new map; each in_valid adds one vector of N Q8.8
// values; mean is combinational from the running sums and is read after the
// last vector.  Accumulators are 32 bits wide.
module global_avg_pool
  import bcnn_pkg::*;
#(
  parameter int N = 32
) (
  input  logic           clk,
  input  logic           clear,
  input  logic [4:0]     lg_npix,
  input  logic           in_valid,
  input  fx16_t [N-1:0]  in_data,
  output fx16_t [N-1:0]  mean
);

  logic signed [31:0] acc [N];

  always_ff @(posedge clk) begin
    for (int n = 0; n < N; n++) begin
      if (clear)         acc[n] <= '0;
      else if (in_valid) acc[n] <= acc[n] + 32'(in_data[n]);
    end
  end

  always_comb
    for (int n = 0; n < N; n++) mean[n] = sat16(48'(acc[n] >>> lg_npix));

endmodule
