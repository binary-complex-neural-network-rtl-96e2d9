// nonlinear -- element-wise activation function of the full-precision layers.
//
// The paper uses ReLU and Hardtanh, both of which need only a compare and a
// select.  Values are Q8.8: ReLU gives max(0, x); Hardtanh clips x to
// [-1.0, +1.0] (-256 .. +256).  mode = 0 selects ReLU, mode = 1 Hardtanh (the
// select encoding is this design's choice).  Purely combinational, N lanes.
module nonlinear
  import bcnn_pkg::*;
#(
  parameter int N = 8
) (
  input  logic            mode,
  input  fx16_t [N-1:0]   din,
  output fx16_t [N-1:0]   dout
);

  always_comb begin
    for (int n = 0; n < N; n++) begin
      if (mode) begin
        if (din[n] > FX_ONE)       dout[n] = FX_ONE;
        else if (din[n] < -FX_ONE) dout[n] = -FX_ONE;
        else                       dout[n] = din[n];
      end else begin
        dout[n] = (din[n] < 0) ? '0 : din[n];
      end
    end
  end

endmodule
