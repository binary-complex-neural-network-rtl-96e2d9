// complex_input_gen -- turns a real RGB pixel into a complex input pixel.
//
// The RGB image has only a real part.  Following the paper, a small
// two-layer residual network learns the imaginary part: each layer is
// batch norm -> non-linearity -> convolution, and the real input is
// concatenated with the network's output as (real, imaginary).  The paper
// does not give the kernel size, channel count or non-linearity of these two
// layers: this design uses 1x1 convolutions of C -> C channels (C = 3), folded
// batch norm (y = a*x + b per channel, a = gamma/sqrt(var+eps),
// b = beta - a*mu) and ReLU.  All values are Q8.8.
//
// Parameters are written through a small register port: address
// s*16 + {0..C-1: a, C..2C-1: b, 2C..2C+C*C-1: W[o][c] at 2C + o*C + c} for
// layer s = 0, 1.
// Timing: fully pipelined, two register stages; out_valid follows in_valid
// by two clocks, one pixel per clock.
module complex_input_gen
  import bcnn_pkg::*;
#(
  parameter int C = IMG_C
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            prm_we,
  input  logic [4:0]      prm_addr,
  input  fx16_t           prm_data,
  input  logic            in_valid,
  input  fx16_t [C-1:0]   in_re,
  output logic            out_valid,
  output fx16_t [C-1:0]   out_re,
  output fx16_t [C-1:0]   out_im
);

  localparam int NPRM = 2*C + C*C;

  fx16_t prm [2][NPRM];

  always_ff @(posedge clk)
    if (prm_we && int'(prm_addr[3:0]) < NPRM) prm[prm_addr[4]][prm_addr[3:0]] <= prm_data;

  // One layer: batch norm, ReLU, 1x1 convolution.
  function automatic fx16_t [C-1:0] gen_layer(input logic s, input fx16_t [C-1:0] x);
    fx16_t [C-1:0] t, y;
    for (int ch = 0; ch < C; ch++) begin
      logic signed [47:0] v;
      v = (48'(x[ch]) * 48'(prm[s][ch])) >>> FRAC;
      t[ch] = sat16(v + 48'(prm[s][C + ch]));
      if (t[ch] < 0) t[ch] = '0;
    end
    for (int o = 0; o < C; o++) begin
      logic signed [47:0] acc;
      acc = '0;
      for (int ch = 0; ch < C; ch++) acc += 48'(t[ch]) * 48'(prm[s][2*C + o*C + ch]);
      y[o] = sat16(acc >>> FRAC);
    end
    return y;
  endfunction

  fx16_t [C-1:0] re1, mid;
  logic          v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

  always_ff @(posedge clk) begin
    re1    <= in_re;
    mid    <= gen_layer(1'b0, in_re);
    out_re <= re1;
    out_im <= gen_layer(1'b1, mid);
  end

endmodule
