// bcnn_pkg -- types, sizes and helper functions shared by the binarized
// complex neural network (BCNN) accelerator.
//
// Numbers that follow the paper: the 32x32 CIFAR-10 frame, the 256-bit
// binarized complex activation word (128 complex channels, real parts in
// bits 0..127 and imaginary parts in bits 128..255), the 16-bit signed
// convolution result and the 10 output classes.
// Choices of this design: the Q8.8 fixed-point format that stands in for the
// paper's floating-point layers, the sign-bit encoding of binary values
// (bit 0 = +1, bit 1 = -1) and the layout of the host write bus.
package bcnn_pkg;

  // ---- sizes ---------------------------------------------------------------
  localparam int CH_BITS   = 256;          // binary channels per activation word
  localparam int CPLX      = CH_BITS / 2;  // complex channels (128)
  localparam int IMG_H     = 32;
  localparam int IMG_W     = 32;
  localparam int IMG_C     = 3;            // RGB input channels
  localparam int NPIX      = IMG_H * IMG_W;
  localparam int NCLS      = 10;           // CIFAR-10 classes
  localparam int FRAC      = 8;            // fractional bits of the Q8.8 format

  localparam logic signed [15:0] FX_ONE = 16'sd256;  // 1.0 in Q8.8

  typedef logic signed [15:0] fx16_t;            // Q8.8 value, or an integer sum
  typedef logic [CH_BITS-1:0] bin_word_t;        // one pixel of binarized activations

  // CGBN (complex Gaussian batch normalization) parameters of one complex
  // channel.  k_r = 1/sqrt(2*var_r + eps), k_i = 1/sqrt(2*var_i + eps),
  // all Q8.8 except mu_r / mu_i, which are in the integer units of the
  // binarized convolution result.
  typedef struct packed {
    fx16_t mu_r;
    fx16_t mu_i;
    fx16_t k_r;
    fx16_t k_i;
    fx16_t g_r;
    fx16_t g_i;
    fx16_t b_r;
    fx16_t b_i;
  } bn_param_t;

  // Configuration of one binarized complex layer (set by the host).
  typedef struct packed {
    logic [1:0] src;      // activation buffer read by the convolution
    logic [1:0] dst;      // activation buffer written with the binarized result
    logic [1:0] res;      // activation buffer added as residual (if res_en)
    logic       res_en;   // residual add (ResNet blocks)
    logic       pool_en;  // 2x2 average pooling after the convolution
    logic [9:0] offset;   // Y = offset - 2*popcount(x ^ w); 128 in the paper
  } layer_cfg_t;

  // Targets of the host write bus.
  typedef enum logic [3:0] {
    HW_IMG    = 4'd0,   // addr = pixel, data[23:0] = {B,G,R}, 8 bit each
    HW_BWGT   = 4'd1,   // addr = layer*256 + out channel, data = weight row
    HW_BN     = 4'd2,   // addr = layer*128 + complex channel, data[127:0] = bn_param_t
    HW_MASK   = 4'd3,   // addr = 0 (front end) or layer+1, data = keep mask
    HW_CFG    = 4'd4,   // addr = layer, data = layer_cfg_t
    HW_GLOBAL = 4'd5,   // data[4:0] = binarized layers, data[5] = fp non-linearity (1 = Hardtanh)
    HW_CIG    = 4'd6,   // addr[4:0] = complex input generator parameter, data[15:0]
    HW_FP1_W  = 4'd7,   // addr = {out ch, in ch}, data[31:0] = {w_i, w_r}
    HW_FP1_B  = 4'd8,   // addr = out ch, data[31:0] = {b_i, b_r}
    HW_FP2_W  = 4'd9,
    HW_FP2_B  = 4'd10,
    HW_FC     = 4'd11   // addr = {class, index}, index == features -> bias; data[15:0]
  } hw_sel_e;

  typedef struct packed {
    logic          en;
    hw_sel_e       sel;
    logic [15:0]   addr;
    logic [255:0]  data;
  } host_wr_t;

  // ---- helpers --------------------------------------------------------------
  // Population count of a 256-bit word as a loop-free adder tree: each step
  // adds neighbouring fields of the previous step (1 -> 2 -> 4 ... -> 256 bits).
  function automatic logic [15:0] popcnt256(input logic [CH_BITS-1:0] v);
    logic [CH_BITS-1:0] t;
    t = (v & {128{2'b01}}) + ((v >> 1) & {128{2'b01}});
    t = (t & {64{4'h3}})   + ((t >> 2) & {64{4'h3}});
    t = (t & {32{8'h0f}})  + ((t >> 4) & {32{8'h0f}});
    t = (t & {16{16'h00ff}}) + ((t >> 8) & {16{16'h00ff}});
    t = (t & {8{32'h0000_ffff}}) + ((t >> 16) & {8{32'h0000_ffff}});
    t = (t & {4{64'h0000_0000_ffff_ffff}}) + ((t >> 32) & {4{64'h0000_0000_ffff_ffff}});
    t = (t & {2{{64'd0}, {64{1'b1}}}}) + ((t >> 64) & {2{{64'd0}, {64{1'b1}}}});
    t = (t & {{128'd0}, {128{1'b1}}}) + (t >> 128);
    return t[15:0];
  endfunction

  // Saturate a wide signed value to 16 bits.
  function automatic fx16_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return fx16_t'(v[15:0]);
  endfunction

endpackage
