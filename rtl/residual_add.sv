// residual_add -- residual addition of two binarized complex activations.
//
// In the ResNet blocks the output of the convolution path is added to the
// shortcut path and the sum is the next binarized layer's input.  With both
// operands in {+1,-1} the sum is in {-2, 0, +2}; binarizing it with the
// deterministic sign (0 -> +1) gives -1 only where both operands are -1.  In
// the sign-bit encoding (1 = -1) that is a bitwise AND, which is what this
// unit computes.  Doing the add in the binary domain is this design's choice;
// the paper shows the adder but not the number format at its inputs.
// en = 0 passes the convolution path (layers without a shortcut).
// Combinational.
module residual_add
  import bcnn_pkg::*;
(
  input  logic      en,
  input  bin_word_t conv_path,
  input  bin_word_t shortcut,
  output bin_word_t sum_bin
);

  always_comb sum_bin = en ? (conv_path & shortcut) : conv_path;

endmodule
