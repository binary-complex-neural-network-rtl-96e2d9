// cgbn -- complex Gaussian batch normalization (CGBN), L complex lanes.
//
// Implements the paper's CGBN equation in inference form
//     s     = (x_r - mu_r) * k_r - (x_i - mu_i) * k_i
//     out_r = g_r * s + b_r
//     out_i = g_i * s + b_i
// where k_r = 1/sqrt(2*var_r + eps) and k_i = 1/sqrt(2*var_i + eps) are
// folded into constants offline, and gamma = g_r + i*g_i and beta = b_r + i*b_i
// are the learned complex scale and shift.  The paper gives the equation;
// the fixed-point formats are this design's choice: x and mu are integers
// (the popcount sums of the binarized convolution), k, g and b are Q8.8, s is
// kept at full width in Q.8 and the outputs are saturated to Q8.8.
//
// Timing: one register stage; out_valid follows in_valid by one clock and
// the lanes accept a new group every clock.
module cgbn
  import bcnn_pkg::*;
#(
  parameter int L = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  fx16_t     [L-1:0]   x_r,
  input  fx16_t     [L-1:0]   x_i,
  input  bn_param_t [L-1:0]   prm,
  output logic                out_valid,
  output fx16_t     [L-1:0]   y_r,
  output fx16_t     [L-1:0]   y_i
);

  fx16_t [L-1:0] nr, ni;

  always_comb begin
    for (int l = 0; l < L; l++) begin
      logic signed [16:0] dr, di;
      logic signed [33:0] s;         // Q.8
      logic signed [47:0] tr, ti;
      dr = 17'(x_r[l]) - 17'(prm[l].mu_r);
      di = 17'(x_i[l]) - 17'(prm[l].mu_i);
      s  = 34'(dr * prm[l].k_r) - 34'(di * prm[l].k_i);
      tr = (48'(s) * 48'(prm[l].g_r)) >>> FRAC;
      ti = (48'(s) * 48'(prm[l].g_i)) >>> FRAC;
      nr[l] = sat16(tr + 48'(prm[l].b_r));
      ni[l] = sat16(ti + 48'(prm[l].b_i));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      y_r <= nr;
      y_i <= ni;
    end
  end

endmodule
