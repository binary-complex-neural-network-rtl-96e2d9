// fp_complex_conv -- full-precision complex convolution layer
// (convolution -> add bias -> non-linearity).
//
// The first and last convolutions of the networks stay in full precision.
// For every output channel o the layer computes the complex sum
//     y_o = sum_c w_{o,c} * x_c + b_o
// using the matrix form of the complex product
//     [y_r]   [w_r  -w_i] [x_r]
//     [y_i] = [w_i   w_r] [x_i]
// then applies ReLU or Hardtanh (nl_mode).  The paper writes the complex
// product twice, once as (x_r w_r - x_i w_i) + i(x_r w_i - x_i w_r) and once
// as the matrix above; the two disagree in the sign of the imaginary part.
// This design follows the matrix form, which is the ordinary complex product.
// The paper gives the layer's function; the insides are this design's
// choice: 1x1 kernels (as in the paper's convolution example), Q8.8 values
// instead of floating point, and L complex MAC lanes that work on L output
// channels at once, looping over the CIN input channels.  A pixel takes
// (COUT/L)*CIN + 2 clocks.
//
// Weights: L banks, bank b holding output channels g*L + b at address
// g*CIN + c, written through w_we/w_oc/w_ic/w_data = {w_i, w_r}; biases
// through b_we/b_oc/b_data = {b_i, b_r}.
// Interface: one input pixel (CIN complex values) with valid/ready, one
// output pixel (COUT complex values) with valid/ready.  A new pixel is
// accepted once the previous result has been taken.
module fp_complex_conv
  import bcnn_pkg::*;
#(
  parameter int CIN  = 3,
  parameter int COUT = CPLX,
  parameter int L    = 16,
  localparam int G   = COUT / L,
  localparam int OW  = (COUT > 1) ? $clog2(COUT) : 1,
  localparam int IW  = (CIN > 1) ? $clog2(CIN) : 1,
  localparam int AW  = (G * CIN > 1) ? $clog2(G * CIN) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                nl_mode,
  input  logic                w_we,
  input  logic [OW-1:0]       w_oc,
  input  logic [IW-1:0]       w_ic,
  input  logic [31:0]         w_data,
  input  logic                b_we,
  input  logic [OW-1:0]       b_oc,
  input  logic [31:0]         b_data,
  input  logic                in_valid,
  output logic                in_ready,
  input  fx16_t [CIN-1:0]     in_re,
  input  fx16_t [CIN-1:0]     in_im,
  output logic                out_valid,
  input  logic                out_ready,
  output fx16_t [COUT-1:0]    out_re,
  output fx16_t [COUT-1:0]    out_im
);

  // ---- weight banks and biases ---------------------------------------------
  logic [AW-1:0]      raddr;
  logic [L-1:0][31:0] wq;
  logic [AW-1:0]      waddr;
  assign waddr = AW'((int'(w_oc) / L) * CIN + int'(w_ic));

  for (genvar b = 0; b < L; b++) begin : g_bank
    sdp_ram #(.WIDTH(32), .DEPTH(G * CIN)) u_bank (
      .clk   (clk),
      .we    (w_we && (int'(w_oc) % L == b)),
      .waddr (waddr),
      .wdata (w_data),
      .raddr (raddr),
      .rdata (wq[b])
    );
  end

  logic [31:0] bias [COUT];
  always_ff @(posedge clk) if (b_we) bias[b_oc] <= b_data;

  // ---- loop control ----------------------------------------------------------
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_FIN} state_e;
  state_e state;

  fx16_t [CIN-1:0] xr, xi;
  int unsigned     g, k;
  logic            s1_valid, s1_first, s1_last;
  int unsigned     s1_k, s1_g;
  logic            fin_valid;
  int unsigned     fin_g;
  logic            last_fin;

  assign in_ready = (state == S_IDLE) && !out_valid;
  assign raddr    = AW'(g * CIN + k);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      g         <= 0;
      k         <= 0;
      s1_valid  <= 1'b0;
      s1_first  <= 1'b0;
      s1_last   <= 1'b0;
      fin_valid <= 1'b0;
      last_fin  <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_valid  <= (state == S_RUN);
      s1_first  <= (k == 0);
      s1_last   <= (k == CIN - 1);
      fin_valid <= s1_valid && s1_last;
      last_fin  <= s1_valid && s1_last && (s1_g == G - 1);
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_IDLE: if (in_valid && in_ready) begin
          g     <= 0;
          k     <= 0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (k == CIN - 1) begin
            k <= 0;
            if (g == G - 1) state <= S_FIN;
            else            g <= g + 1;
          end else begin
            k <= k + 1;
          end
        end
        S_FIN: if (last_fin) begin
          out_valid <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      xr <= in_re;
      xi <= in_im;
    end
    s1_k  <= k;
    s1_g  <= g;
    fin_g <= s1_g;
  end

  // ---- complex MAC lanes -------------------------------------------------------
  logic signed [39:0] acc_r [L];
  logic signed [39:0] acc_i [L];

  always_ff @(posedge clk) begin
    if (s1_valid) begin
      for (int b = 0; b < L; b++) begin
        logic signed [39:0] pr, pi;
        fx16_t wr, wi;
        wr = fx16_t'(wq[b][15:0]);
        wi = fx16_t'(wq[b][31:16]);
        pr = 40'(wr * xr[s1_k]) - 40'(wi * xi[s1_k]);
        pi = 40'(wi * xr[s1_k]) + 40'(wr * xi[s1_k]);
        acc_r[b] <= s1_first ? pr : acc_r[b] + pr;
        acc_i[b] <= s1_first ? pi : acc_i[b] + pi;
      end
    end
  end

  // ---- add bias, non-linearity ----------------------------------------------
  fx16_t [2*L-1:0] pre, post;
  always_comb begin
    for (int b = 0; b < L; b++) begin
      logic [31:0] bb;
      bb = bias[fin_g * L + b];
      pre[b]     = sat16(48'(acc_r[b] >>> FRAC) + 48'(fx16_t'(bb[15:0])));
      pre[L + b] = sat16(48'(acc_i[b] >>> FRAC) + 48'(fx16_t'(bb[31:16])));
    end
  end

  nonlinear #(.N(2 * L)) u_nl (.mode(nl_mode), .din(pre), .dout(post));

  always_ff @(posedge clk)
    if (fin_valid)
      for (int b = 0; b < L; b++) begin
        out_re[fin_g * L + b] <= post[b];
        out_im[fin_g * L + b] <= post[L + b];
      end

endmodule
