// quad_binarize -- quadrant binarization with channel pruning.
//
// Each complex value is binarized part by part (quadrant binarization) with
// the deterministic sign function: x >= 0 -> +1, x < 0 -> -1.  A binary value
// is stored as its sign bit (0 = +1, 1 = -1), so the binary multiply of the
// following convolution is an XOR.  Following the paper, the channel pruning
// is applied here, during binarization, so that the convolution never stalls
// on pruned channels: a channel whose keep bit is 0 is forced to bit 0.  The
// next layer's weight rows carry 0 in the same positions, so a pruned
// channel adds nothing to the popcount and the layer's offset (the count of
// kept channels, 128 at the paper's 0.5 pruning ratio) gives the dot product.
//
// Interface: N complex lanes in, 2N bits out, real parts in bits [N-1:0] and
// imaginary parts in bits [2N-1:N].  Combinational.
module quad_binarize
  import bcnn_pkg::*;
#(
  parameter int N = 128
) (
  input  fx16_t [N-1:0]   re,
  input  fx16_t [N-1:0]   im,
  input  logic  [2*N-1:0] keep,
  output logic  [2*N-1:0] bits
);

  always_comb begin
    for (int n = 0; n < N; n++) begin
      bits[n]     = keep[n]     & re[n][15];
      bits[N + n] = keep[N + n] & im[n][15];
    end
  end

endmodule
